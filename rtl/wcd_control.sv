// wcd_control: control logic of the waveform capture device.
//
// It runs in the capture-clock domain (C, 200 MHz) and has two modes.
//
// Capture (mode = MODE_CAPTURE). The external signal is selected and, from the
// rising edge that sees start, the RAM write enable stays high for DEPTH
// consecutive cycles while the address counts 0, 1, ..., DEPTH-1. Every period of
// C is stored, so there is no dead time: DEPTH = 512 words cover 2.56 us.
//
// Calibration (mode = MODE_CALIBRATE). The phase-shifted PLL output is selected.
// After SETTLE_CYCLES cycles (so that the chain holds only the calibration
// signal) word 0 is stored with no phase shift. Then, for n = 1 .. DEPTH-1: the
// PLL phase-step port is held high for PHASESTEP_CYCLES cycles of C (two cycles
// of the 50 MHz reference); the logic waits until the PLL's phase-done flag has
// gone low and come back high; the address is set to n and one word is written.
// Word n therefore holds the capture made after a net shift of n steps.
//
// The phase-counter select and the up/down direction are static ports, set once,
// with the direction positive. phase_done is asynchronous to C (it comes from the
// PLL's scan-clock domain) and passes a two-flop synchronizer.
//
// Outputs are registered. ram_we and ram_addr change on the rising edge of C, and
// the RAM writes on the following falling edge the word the TDL captured on that
// same rising edge. done is high from the end of a run until the next start;
// a start while done begins a new run.
//
// From the paper: the two modes, the 512-word run, writing with no dead time,
// static select and direction ports, the two-reference-cycle phase-step hold and
// waiting on the PLL before the address update and write. This design's own
// choices: the start/mode handshake, the settle wait before word 0, the state
// encoding, the synchronizer and the phase-done low-then-high rule.
module wcd_control
  import wcd_pkg::*;
#(
  parameter int unsigned DEPTH            = DEPTH_DEFAULT,
  parameter int unsigned PHASESTEP_CYCLES = PHASESTEP_CYCLES_DEFAULT,
  parameter int unsigned SETTLE_CYCLES    = 8,
  parameter logic [4:0]  PHASE_CNT_SEL    = 5'd1,
  parameter bit          PHASE_UP         = 1'b1,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,            // capture clock C
  input  logic          rst_n,          // asynchronous active-low reset
  input  logic          start,          // level; sampled in IDLE and DONE
  input  wcd_mode_e     mode,           // capture or calibration, sampled with start
  input  logic          phase_done,     // PLL phase-done flag (asynchronous)
  output logic          cal_select,     // 1: calibration signal into the chain
  output logic          ram_we,         // RAM write enable
  output logic [AW-1:0] ram_addr,       // RAM word address n
  output logic          phase_step,     // PLL phase-step port
  output logic          phase_updn,     // PLL direction port (static)
  output logic [4:0]    phase_cnt_sel,  // PLL counter select port (static)
  output logic          busy,
  output logic          done,
  output wcd_state_e    state
);
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned CW = $clog2(PHASESTEP_CYCLES + SETTLE_CYCLES + 1);
  localparam logic [AW-1:0] LAST = AW'(DEPTH - 1);

  logic [1:0]    done_sync;
  logic          done_s;
  logic          seen_low;
  logic [CW-1:0] cnt;

  assign phase_updn    = PHASE_UP;
  assign phase_cnt_sel = PHASE_CNT_SEL;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done_sync <= 2'b11;
    else        done_sync <= {done_sync[0], phase_done};
  end
  assign done_s = done_sync[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= ST_IDLE;
      cal_select <= 1'b0;
      ram_we     <= 1'b0;
      ram_addr   <= '0;
      phase_step <= 1'b0;
      seen_low   <= 1'b0;
      cnt        <= '0;
    end else begin
      unique case (state)
        ST_IDLE, ST_DONE: begin
          ram_we     <= 1'b0;
          phase_step <= 1'b0;
          if (start) begin
            ram_addr <= '0;
            if (mode == MODE_CAPTURE) begin
              cal_select <= 1'b0;
              ram_we     <= 1'b1;
              state      <= ST_CAPTURE;
            end else begin
              cal_select <= 1'b1;
              cnt        <= '0;
              state      <= ST_CAL_SETTLE;
            end
          end
        end

        ST_CAPTURE: begin
          if (ram_addr == LAST) begin
            ram_we <= 1'b0;
            state  <= ST_DONE;
          end else begin
            ram_addr <= ram_addr + 1'b1;
          end
        end

        ST_CAL_SETTLE: begin
          if (cnt == CW'(SETTLE_CYCLES - 1)) begin
            ram_we <= 1'b1;
            state  <= ST_CAL_WRITE;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end

        ST_CAL_WRITE: begin
          ram_we <= 1'b0;
          if (ram_addr == LAST) begin
            state <= ST_DONE;
          end else begin
            phase_step <= 1'b1;
            seen_low   <= 1'b0;
            cnt        <= '0;
            state      <= ST_CAL_STEP;
          end
        end

        ST_CAL_STEP: begin
          if (!done_s) seen_low <= 1'b1;
          if (cnt == CW'(PHASESTEP_CYCLES - 1)) begin
            phase_step <= 1'b0;
            state      <= ST_CAL_WAIT;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end

        ST_CAL_WAIT: begin
          if (!done_s) seen_low <= 1'b1;
          if (seen_low && done_s) begin
            ram_addr <= ram_addr + 1'b1;
            ram_we   <= 1'b1;
            state    <= ST_CAL_WRITE;
          end
        end

        default: state <= ST_IDLE;
      endcase
    end
  end

  assign busy = (state != ST_IDLE) && (state != ST_DONE);
  assign done = (state == ST_DONE);

  // The RAM is written only while capturing or for a calibration word, never
  // while the PLL is being stepped.
  a_we_state: assert property (@(posedge clk) disable iff (!rst_n)
    ram_we |-> (state == ST_CAPTURE || state == ST_CAL_WRITE));
  a_step_no_we: assert property (@(posedge clk) disable iff (!rst_n)
    phase_step |-> !ram_we);
  a_addr_range: assert property (@(posedge clk) disable iff (!rst_n)
    ram_we |-> (int'(ram_addr) < DEPTH));
endmodule
