// wcd_top: the waveform capture device (WCD).
//
// A signal S is sent down a long carry chain; on every rising edge of the 200 MHz
// capture clock C all K taps of the chain are registered at once, so each word X
// is a snapshot of the last K carry delays (about K x 5 ps = 6.5 ns) of S. The
// snapshot is longer than the 5 ns clock period, so consecutive words overlap and
// nothing of the waveform is lost. Words go to a RAM on the falling edge of C.
//
// Data path: cal_select_mux -> carry_chain -> tdl_capture -> capture_ram.
// Control: wcd_control chooses the input, drives the RAM enable and address, and
// steps the PLL phase during calibration.
//
// Parts outside this module, brought out as ports: the PLL with dynamic phase
// shift (it provides clk_c and cal_signal and takes the phase_* ports), the
// 50 MHz board oscillator, the I/O buffer of the external signal and the JTAG
// readout (it uses rd_clk, rd_addr and rd_data).
//
// The carry chain inside is a behavioural model with transport delays (see
// carry_chain); everything else is synthesizable.
//
// Use: hold rst_n low, then raise start with mode set. A capture run stores
// DEPTH words in DEPTH consecutive cycles; a calibration run stores DEPTH words,
// word n after n phase steps. done rises when the run is complete; the words can
// then be read through the read port.
module wcd_top
  import wcd_pkg::*;
#(
  parameter int unsigned K                = K_DEFAULT,
  parameter int unsigned DEPTH            = DEPTH_DEFAULT,
  parameter int unsigned PHASESTEP_CYCLES = PHASESTEP_CYCLES_DEFAULT,
  parameter int unsigned SETTLE_CYCLES    = 8,
  parameter int unsigned TAU_RISE_FS      = 4910,
  parameter int unsigned TAU_FALL_FS      = 4540,
  parameter int unsigned COPY_DELAY_FS    = 50000,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk_c,          // capture clock C from the PLL (200 MHz)
  input  logic          rst_n,
  input  logic          ext_signal,     // signal under test
  input  logic          cal_signal,     // phase-shifted calibration output of the PLL
  input  logic          start,
  input  wcd_mode_e     mode,
  input  logic          phase_done,     // PLL phase-done flag
  output logic          phase_step,     // PLL phase-step port
  output logic          phase_updn,     // PLL direction port
  output logic [4:0]    phase_cnt_sel,  // PLL counter-select port
  output logic          busy,
  output logic          done,
  input  logic          rd_clk,         // readout port
  input  logic [AW-1:0] rd_addr,
  output logic [K-1:0]  rd_data
);
  timeunit 1ps;
  timeprecision 1fs;

  logic          cal_select;
  logic          s;
  logic [K-1:0]  tap_n;
  logic          chain_cout;
  logic [K-1:0]  x;
  logic          ram_we;
  logic [AW-1:0] ram_addr;
  wcd_state_e    state;

  cal_select_mux u_mux (
    .ext_signal (ext_signal),
    .cal_signal (cal_signal),
    .cal_select (cal_select),
    .s          (s)
  );

  carry_chain #(
    .K             (K),
    .TAU_RISE_FS   (TAU_RISE_FS),
    .TAU_FALL_FS   (TAU_FALL_FS),
    .COPY_DELAY_FS (COPY_DELAY_FS)
  ) u_chain (
    .s     (s),
    .tap_n (tap_n),
    .cout  (chain_cout)
  );

  tdl_capture #(.K(K)) u_tdl (
    .clk   (clk_c),
    .tap_n (tap_n),
    .x     (x)
  );

  capture_ram #(.W(K), .DEPTH(DEPTH)) u_ram (
    .wr_clk  (clk_c),
    .we      (ram_we),
    .wr_addr (ram_addr),
    .wr_data (x),
    .rd_clk  (rd_clk),
    .rd_addr (rd_addr),
    .rd_data (rd_data)
  );

  wcd_control #(
    .DEPTH            (DEPTH),
    .PHASESTEP_CYCLES (PHASESTEP_CYCLES),
    .SETTLE_CYCLES    (SETTLE_CYCLES)
  ) u_ctrl (
    .clk           (clk_c),
    .rst_n         (rst_n),
    .start         (start),
    .mode          (mode),
    .phase_done    (phase_done),
    .cal_select    (cal_select),
    .ram_we        (ram_we),
    .ram_addr      (ram_addr),
    .phase_step    (phase_step),
    .phase_updn    (phase_updn),
    .phase_cnt_sel (phase_cnt_sel),
    .busy          (busy),
    .done          (done),
    .state         (state)
  );

  // The last carry-out ends the chain on the FPGA; nothing samples it.
  logic unused;
  assign unused = chain_cout ^ (^state);
endmodule
