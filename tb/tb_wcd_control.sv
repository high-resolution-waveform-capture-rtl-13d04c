// tb_wcd_control: checks the control logic's two run modes cycle by cycle.
//
// Capture: after start, the RAM enable must be high for exactly DEPTH
// consecutive cycles with the address counting 0 .. DEPTH-1, the external
// signal selected, and done raised afterwards.
//
// Calibration: a small PLL stand-in lowers phase_done a few cycles after the
// phase-step port rises and raises it again a random 2 to 30 reference cycles
// after the port falls. The test checks that the calibration signal stays
// selected, that word 0 is written SETTLE_CYCLES after start, that each
// phase-step pulse lasts exactly PHASESTEP_CYCLES cycles, that no word is
// written while a shift is pending, that word n is written exactly three cycles
// after phase_done returns (two synchronizer stages and the state update), that
// there are DEPTH-1 shifts and DEPTH writes in address order, and that the
// static direction and counter-select ports hold their values.
module tb_wcd_control;
  timeunit 1ps;
  timeprecision 1fs;
  import wcd_pkg::*;

  localparam int unsigned DEPTH = 512;
  localparam int unsigned PSC   = 8;
  localparam int unsigned SETTLE = 8;
  localparam int unsigned AW    = 9;

  logic          clk = 1'b0;
  logic          rst_n;
  logic          start;
  wcd_mode_e     mode;
  logic          phase_done;
  logic          cal_select, ram_we, phase_step, phase_updn, busy, done;
  logic [AW-1:0] ram_addr;
  logic [4:0]    phase_cnt_sel;
  wcd_state_e    state;

  int checks = 0;
  int failures = 0;
  int cycle = 0;

  wcd_control #(.DEPTH(DEPTH), .PHASESTEP_CYCLES(PSC), .SETTLE_CYCLES(SETTLE)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .mode(mode), .phase_done(phase_done),
    .cal_select(cal_select), .ram_we(ram_we), .ram_addr(ram_addr),
    .phase_step(phase_step), .phase_updn(phase_updn), .phase_cnt_sel(phase_cnt_sel),
    .busy(busy), .done(done), .state(state));

  always #2500 clk = ~clk;
  always @(posedge clk) cycle++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL cycle %0d: %s", cycle, what);
    end
  endtask

  // PLL stand-in: phase_done changes on falling edges of C.
  int pll_shifts = 0;
  int done_rise_cycle = -1;
  initial begin
    phase_done = 1'b1;
    forever begin
      @(posedge phase_step);
      repeat (3) @(negedge clk);
      phase_done = 1'b0;
      @(negedge phase_step);
      repeat (4 * $urandom_range(30, 2)) @(negedge clk);
      phase_done = 1'b1;
      pll_shifts++;
      done_rise_cycle = cycle;
    end
  end

  initial begin
    #1000000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, start_cycle, step_len, writes;
    rst_n = 1'b0;
    start = 1'b0;
    mode  = MODE_CAPTURE;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!busy && !done && !ram_we && !phase_step, "idle after reset");
    check(phase_updn == 1'b1 && phase_cnt_sel == 5'd1, "static PLL ports");

    // ---------------- capture mode ----------------
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    for (n = 0; n < int'(DEPTH); n++) begin
      check(ram_we && ram_addr == AW'(n) && !cal_select && busy,
            $sformatf("capture word %0d: we=%0d addr=%0d", n, ram_we, ram_addr));
      @(negedge clk);
    end
    check(!ram_we && done && !busy, "capture ends after DEPTH words");
    repeat (5) @(negedge clk);
    check(!ram_we && done, "done holds");

    // ---------------- calibration mode ----------------
    mode  = MODE_CALIBRATE;
    start = 1'b1;
    start_cycle = cycle;
    @(negedge clk);
    start = 1'b0;
    writes = 0;
    // Word 0 after the settle wait, with no shift.
    while (!ram_we) begin
      check(cal_select && busy && !phase_step, "settle: calibration selected, no step");
      @(negedge clk);
    end
    check(cycle - start_cycle == int'(SETTLE) + 1,
          $sformatf("word 0 after %0d cycles", cycle - start_cycle));
    check(ram_addr == '0 && pll_shifts == 0, "word 0 at address 0, no shift");
    writes++;
    @(negedge clk);
    check(!ram_we, "single-cycle write");
    for (n = 1; n < int'(DEPTH); n++) begin
      // Phase-step pulse.
      check(phase_step, $sformatf("step %0d starts right after the write", n));
      step_len = 0;
      while (phase_step) begin
        check(!ram_we, "no write while stepping");
        step_len++;
        @(negedge clk);
      end
      check(step_len == int'(PSC), $sformatf("step %0d held %0d cycles", n, step_len));
      while (!ram_we) begin
        check(pll_shifts == n - 1 || phase_done, "no write before the PLL is done");
        check(!phase_step && cal_select, "waiting");
        @(negedge clk);
      end
      check(pll_shifts == n, $sformatf("word %0d written after %0d shifts", n, pll_shifts));
      check(cycle - done_rise_cycle == 3,
            $sformatf("word %0d written %0d cycles after phase_done", n, cycle - done_rise_cycle));
      check(ram_addr == AW'(n), $sformatf("word %0d at address %0d", n, ram_addr));
      writes++;
      @(negedge clk);
      check(!ram_we, "single-cycle write");
    end
    repeat (2) @(negedge clk);
    check(done && !busy && !phase_step, "calibration done");
    check(writes == int'(DEPTH) && pll_shifts == int'(DEPTH) - 1, "DEPTH writes, DEPTH-1 shifts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
