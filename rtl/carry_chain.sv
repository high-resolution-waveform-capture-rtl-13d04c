// carry_chain: behavioural model of the WCD transmission line (copy gate plus K
// carry elements). This is a behavioural model, not synthesizable logic: on the
// FPGA the chain is built from Cyclone V arithmetic-cell primitives with fixed
// LUT masks, placed by location constraints, and its timing is physical.
//
// How it works. The input s first passes a copy gate (the signal cannot enter a
// carry port directly) with delay COPY_DELAY_FS. Each of the K carry elements is
// an adder with fixed inputs 0 and 1, so its carry-out equals its carry-in and its
// sum output is the inverted carry-in. The carry-out feeds the next element after
// a delay TAU_RISE_FS for a rising edge and TAU_FALL_FS for a falling one; the
// sum output of element k is tap_n[k], which goes to the capture register k.
// Element 0 is the one nearest the input (x_1 in the paper's notation).
//
// Timing. Carry delays are transport delays in femtoseconds. Because the rise and fall
// delays differ, a high pulse shrinks by (TAU_RISE_FS - TAU_FALL_FS) per
// element. When its falling edge catches its rising edge the pulse is gone:
// the overtaken edge stops there and the chain beyond never sees the pulse.
// Pulses wider than K*(rise - fall) therefore survive the whole chain, the
// limit the paper states for the device.
//
// The copy gate is modelled as an inertial delay: an input pulse shorter than
// COPY_DELAY_FS does not reach the chain, as a slow gate filters it out.
//
// The element function (sum = !cin, cout = cin), the delays 4.91 ps / 4.54 ps
// (MLAB carry times) and the copy gate's low-pass behaviour follow the paper.
// The copy-gate delay itself is this model's own number: the paper says only
// that the copy gate is much slower than a carry element and limits switching
// to about 50 ps.
module carry_chain #(
  parameter int unsigned K             = wcd_pkg::K_DEFAULT,
  parameter int unsigned TAU_RISE_FS   = 4910,
  parameter int unsigned TAU_FALL_FS   = 4540,
  parameter int unsigned COPY_DELAY_FS = 50000
) (
  input  logic         s,      // signal S from the calibration-select multiplexer
  output logic [K-1:0] tap_n,  // sum outputs (inverted carry) to the capture registers
  output logic         cout    // carry-out of the last element
);
  timeunit 1ps;
  timeprecision 1fs;

  localparam realtime TR = real'(TAU_RISE_FS) / 1000.0;
  localparam realtime TF = real'(TAU_FALL_FS) / 1000.0;
  localparam realtime TC = real'(COPY_DELAY_FS) / 1000.0;

  // carry[0] is the copy-gate output; carry[k+1] is the carry-out of element k.
  logic [K:0] carry;

  initial carry = '0;

  // Each edge of s starts one process that carries it down the chain: it
  // reaches carry[0] after the copy-gate delay and every further element one
  // rise or fall delay later. This gives the same transport delays as one
  // process per element, at a cost independent of K per element crossed.
  // The copy gate is inertial: an edge is dropped if s changes again before
  // the copy delay has passed, so glitches shorter than COPY_DELAY_FS never
  // enter the chain.
  int unsigned edge_id = 0;
  int unsigned last_id [K+1];   // newest edge that has reached each node

  initial last_id = '{default: 0};

  initial begin
    forever begin
      @(s);
      edge_id++;
      fork
        begin : g_wave
          automatic logic        v   = s;
          automatic int unsigned id  = edge_id;
          automatic realtime     tau = v ? TR : TF;
          #TC;
          if (id == edge_id) begin
            carry[0]   = v;
            last_id[0] = id;
            for (int k = 1; k <= int'(K); k++) begin
              #tau;
              // A newer edge got here first: the pulse between the two has
              // shrunk to nothing, and this edge ends.
              if (last_id[k] > id) break;
              last_id[k] = id;
              carry[k]   = v;
            end
          end
        end
      join_none
    end
  end

  // Sum output of each adder with inputs 0, 1 and cin.
  assign tap_n = ~carry[K-1:0];

  assign cout = carry[K];
endmodule
