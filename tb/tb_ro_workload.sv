// tb_ro_workload: the ring-oscillator pulse-width measurement, run through the
// waveform capture device at its default size.
//
// Node 0 of a 19-inverter ring whose gates switch in 240 ps drives the
// external input. One capture run stores 512 words (2.56 us). In every word
// each run of 1s that lies wholly inside the chain and is longer than 15
// carries (shorter runs would be bubbles) is counted as a pulse; its length in
// carries times the rise carry delay is its width. The mean width divided by
// the 19 gates gives the time per gate, which must come out within 5 % of the
// 240 ps set in the ring model (pulse shrinking along the chain makes the
// measured value slightly low). The number of pulses measured is checked too.
module tb_ro_workload;
  timeunit 1ps;
  timeprecision 1fs;
  import wcd_pkg::*;

  localparam int unsigned K     = K_DEFAULT;
  localparam int unsigned DEPTH = DEPTH_DEFAULT;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned NODES = 19;
  localparam real         TAU_R = 4.91;    // ps, from calibration
  localparam real         GATE  = 240.0;   // ps

  logic          refclk = 1'b0;
  logic          clk_c, cal_signal, phase_step, phase_updn, phase_done;
  logic [4:0]    phase_cnt_sel;
  logic          rst_n, ro_out, start, busy, done, release_ro;
  wcd_mode_e     mode;
  logic [AW-1:0] rd_addr;
  logic [K-1:0]  rd_data;
  longint        phase_fs;
  int            shifts, long_relocks;
  int            checks = 0;
  int            failures = 0;

  dps_pll_model u_pll (
    .scanclk(refclk), .phasestep(phase_step), .updn(phase_updn), .cntsel(phase_cnt_sel),
    .phasedone(phase_done), .outclk0(clk_c), .outclk1(cal_signal),
    .phase_fs(phase_fs), .shifts(shifts), .long_relocks(long_relocks));

  ring_oscillator_model #(.N(NODES)) u_ro (.release_ro(release_ro), .node0(ro_out));

  wcd_top dut (
    .clk_c(clk_c), .rst_n(rst_n), .ext_signal(ro_out), .cal_signal(cal_signal),
    .start(start), .mode(mode), .phase_done(phase_done), .phase_step(phase_step),
    .phase_updn(phase_updn), .phase_cnt_sel(phase_cnt_sel), .busy(busy), .done(done),
    .rd_clk(refclk), .rd_addr(rd_addr), .rd_data(rd_data));

  initial begin
    #1000;
    forever #10000 refclk = ~refclk;
  end

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int    pulses = 0;
    real   sum_w = 0.0, per_gate;
    rst_n = 1'b0;
    start = 1'b0;
    mode = MODE_CAPTURE;
    rd_addr = '0;
    release_ro = 1'b0;
    repeat (4) @(posedge clk_c);
    rst_n = 1'b1;
    release_ro = 1'b1;
    repeat (20) @(posedge clk_c);
    #1000 start = 1'b1;
    @(posedge clk_c);
    #1000 start = 1'b0;
    @(posedge clk_c);
    while (!done) @(posedge clk_c);
    for (int n = 0; n < int'(DEPTH); n++) begin
      int k0;
      @(negedge refclk);
      rd_addr = AW'(n);
      @(posedge refclk);
      #1;
      // Runs of 1s with a 0 on both sides.
      k0 = -1;
      for (int k = 1; k < int'(K); k++) begin
        if (rd_data[k] && !rd_data[k-1]) k0 = k;
        if (!rd_data[k] && rd_data[k-1] && k0 > 0) begin
          if (k - k0 > 15) begin
            pulses++;
            sum_w += real'(k - k0) * TAU_R;
          end
          k0 = -1;
        end
      end
    end
    per_gate = (pulses > 0) ? sum_w / pulses / NODES : 0.0;
    $display("ring oscillator: %0d pulses, mean width %0.1f ps, %0.2f ps per gate",
             pulses, (pulses > 0) ? sum_w / pulses : 0.0, per_gate);
    checks++;
    if (pulses < 50) begin
      failures++;
      $display("FAIL too few whole pulses");
    end
    checks++;
    if (per_gate < GATE * 0.95 || per_gate > GATE * 1.05) begin
      failures++;
      $display("FAIL time per gate %0.2f ps", per_gate);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
