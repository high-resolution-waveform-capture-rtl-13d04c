// ring_oscillator_model: behavioural ring of N inverters, the device measured
// in the ring-oscillator workload. Testbench only.
//
// While release is low every node is held at its initial value; after release
// each node takes the inverse of the node before it after GATE_DELAY_FS
// (transport delay). The initial values alternate 1, 0, 1, ... so that, N
// being odd, exactly one transition circulates: every node then toggles every
// N x GATE_DELAY_FS, i.e. its pulses are N gate delays wide.
module ring_oscillator_model #(
  parameter int unsigned N             = 19,
  parameter longint      GATE_DELAY_FS = 240000
) (
  input  logic release_ro,
  output logic node0
);
  timeunit 1ps;
  timeprecision 1fs;

  localparam realtime D = real'(GATE_DELAY_FS) / 1000.0;

  logic node [N];

  for (genvar i = 0; i < int'(N); i++) begin : g_inv
    localparam int unsigned PREV = (i == 0) ? N - 1 : i - 1;
    initial node[i] = ((i % 2) == 0);
    always @(node[PREV] or release_ro) begin
      if (release_ro) node[i] <= #D ~node[PREV];
    end
  end

  assign node0 = node[0];
endmodule
