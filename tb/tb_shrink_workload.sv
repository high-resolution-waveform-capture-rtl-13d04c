// tb_shrink_workload: the pulse-shrinking measurement, run through the
// waveform capture device at its default size.
//
// The PLL's calibration output is set to 600 MHz, 50 % duty (0.83 ns pulses)
// and shifted 104 ps per step, so several pulses are in the chain in every
// word. A calibration run stores 512 words. Every run of 1s longer than 15
// carries with a 0 on both sides is a pulse; its width in carries is fitted
// against the carry index of its falling edge (its lower end). A pulse whose
// falling edge has travelled f carries has lost f x (tau_rise - tau_fall) of
// its width, so the slope must be tau_fall / tau_rise - 1 = -7.5 % for the
// chain's 4.91 / 4.54 ps, within 0.5 %.
module tb_shrink_workload;
  timeunit 1ps;
  timeprecision 1fs;
  import wcd_pkg::*;

  localparam int unsigned K     = K_DEFAULT;
  localparam int unsigned DEPTH = DEPTH_DEFAULT;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam real         SLOPE = 4.54 / 4.91 - 1.0;

  logic          refclk = 1'b0;
  logic          clk_c, cal_signal, phase_step, phase_updn, phase_done;
  logic [4:0]    phase_cnt_sel;
  logic          rst_n, start, busy, done;
  wcd_mode_e     mode;
  logic [AW-1:0] rd_addr;
  logic [K-1:0]  rd_data;
  longint        phase_fs;
  int            shifts, long_relocks;
  int            checks = 0;
  int            failures = 0;

  dps_pll_model #(
    .CAL_PERIOD_FS(1666667), .CAL_HIGH_FS(833333), .STEP_FS(104167),
    .RELOCK_MIN(2), .RELOCK_MAX(12)
  ) u_pll (
    .scanclk(refclk), .phasestep(phase_step), .updn(phase_updn), .cntsel(phase_cnt_sel),
    .phasedone(phase_done), .outclk0(clk_c), .outclk1(cal_signal),
    .phase_fs(phase_fs), .shifts(shifts), .long_relocks(long_relocks));

  wcd_top dut (
    .clk_c(clk_c), .rst_n(rst_n), .ext_signal(1'b0), .cal_signal(cal_signal),
    .start(start), .mode(mode), .phase_done(phase_done), .phase_step(phase_step),
    .phase_updn(phase_updn), .phase_cnt_sel(phase_cnt_sel), .busy(busy), .done(done),
    .rd_clk(refclk), .rd_addr(rd_addr), .rd_data(rd_data));

  initial begin
    #1000;
    forever #10000 refclk = ~refclk;
  end

  initial begin
    #2000000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int  pulses = 0;
    real sx = 0.0, sy = 0.0, sxx = 0.0, sxy = 0.0, slope;
    rst_n = 1'b0;
    start = 1'b0;
    mode = MODE_CALIBRATE;
    rd_addr = '0;
    repeat (4) @(posedge clk_c);
    rst_n = 1'b1;
    repeat (4) @(posedge clk_c);
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
      k0 = -1;
      for (int k = 1; k < int'(K); k++) begin
        if (rd_data[k] && !rd_data[k-1]) k0 = k;
        if (!rd_data[k] && rd_data[k-1] && k0 > 0) begin
          if (k - k0 > 15) begin
            pulses++;
            sx += real'(k0); sy += real'(k - k0);
            sxx += real'(k0) * real'(k0); sxy += real'(k0) * real'(k - k0);
          end
          k0 = -1;
        end
      end
    end
    slope = (pulses > 1) ? (pulses * sxy - sx * sy) / (pulses * sxx - sx * sx) : 0.0;
    $display("pulse shrinking: %0d pulses, width slope %0.4f carries per carry (expected %0.4f)",
             pulses, slope, SLOPE);
    checks++;
    if (pulses < 1000) begin
      failures++;
      $display("FAIL too few pulses");
    end
    checks++;
    if (slope < SLOPE - 0.005 || slope > SLOPE + 0.005) begin
      failures++;
      $display("FAIL contraction slope %0.4f", slope);
    end
    checks++;
    if (shifts != int'(DEPTH) - 1) begin
      failures++;
      $display("FAIL %0d phase steps", shifts);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
