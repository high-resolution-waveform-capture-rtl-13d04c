// tb_wcd_top: end-to-end test of the waveform capture device at its default
// size (K = 1300 carries, 512 words), with a behavioural PLL and a 50 MHz
// reference clock around it.
//
// 1. Capture run. A random pulse train (pulses and gaps of 0.7 to 3 ns, every
//    eighth pulse only 50 to 420 ps wide, every edge on a 1 fs grid) drives the
//    external input. After the run every word
//    is read back through the read port and each bit is compared with the value
//    worked out here from the edge times: an edge entering at te reaches tap k
//    at te + copy delay + k x tau (tau = rise or fall delay), and tap k holds the
//    level of the latest edge that has reached it by the capture edge; a pulse
//    whose falling edge has caught its rising edge is gone beyond that tap. Bits
//    within 1 ps of an arrival are not judged. The words must have been
//    captured on DEPTH consecutive edges of C (no dead time).
// 2. Mode switch and calibration run: the PLL's 100 MHz, 25 % duty output is
//    selected and shifted 78.125 ps per step. Each word is checked bit by bit in
//    the same way, using the phase the PLL had when the word was taken, and word
//    n must have been taken after exactly n shifts.
// 3. Dynamic phase calibration from the RAM contents: the carry index of the
//    rising and of the falling edge is found in every word and fitted against
//    the time since that edge entered, which the phase shift fixes; the inverse
//    slope is the carry delay. It must match the chain's 4.91 ps rise and
//    4.54 ps fall delays within 2 %.
//
// Mechanisms counted, each must occur: capture run, calibration run, switch of
// the input select, phase steps, PLL re-lock waits longer than the minimum,
// words whose pulse has visibly shrunk along the chain (falling edge of a pulse
// deeper in the chain than the width at entry allows), and words in which a
// narrow pulse has died inside the chain.
module tb_wcd_top;
  timeunit 1ps;
  timeprecision 1fs;
  import wcd_pkg::*;

  localparam int unsigned K     = K_DEFAULT;
  localparam int unsigned DEPTH = DEPTH_DEFAULT;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam longint TR  = 4910;
  localparam longint TF  = 4540;
  localparam longint TC  = 50000;
  localparam longint TCLK = 5000000;
  localparam longint CALP = 10000000;
  localparam longint CALH = 2500000;
  localparam longint STEP = 78125;
  localparam int     NE  = 4096;

  logic          refclk = 1'b0;
  logic          clk_c, cal_signal, phase_step, phase_updn, phase_done;
  logic [4:0]    phase_cnt_sel;
  logic          rst_n, ext_signal, start, busy, done;
  wcd_mode_e     mode;
  logic [AW-1:0] rd_addr;
  logic [K-1:0]  rd_data;
  longint        phase_fs;
  int            shifts, long_relocks;

  int checks = 0;
  int failures = 0;

  // Mechanism counters.
  int n_capture_runs = 0, n_cal_runs = 0, n_select_switch = 0, n_shrunk = 0;
  int n_collapse_in = 0, n_collapsed = 0;

  dps_pll_model #(.RELOCK_MIN(2), .RELOCK_MAX(12)) u_pll (
    .scanclk(refclk), .phasestep(phase_step), .updn(phase_updn), .cntsel(phase_cnt_sel),
    .phasedone(phase_done), .outclk0(clk_c), .outclk1(cal_signal),
    .phase_fs(phase_fs), .shifts(shifts), .long_relocks(long_relocks));

  wcd_top dut (
    .clk_c(clk_c), .rst_n(rst_n), .ext_signal(ext_signal), .cal_signal(cal_signal),
    .start(start), .mode(mode), .phase_done(phase_done), .phase_step(phase_step),
    .phase_updn(phase_updn), .phase_cnt_sel(phase_cnt_sel), .busy(busy), .done(done),
    .rd_clk(refclk), .rd_addr(rd_addr), .rd_data(rd_data));

  // 50 MHz reference, 1 ns after the edges of C.
  initial begin
    #1000;
    forever #10000 refclk = ~refclk;
  end

  function automatic longint now_fs();
    return longint'($realtime * 1000.0);
  endfunction

  // Capture time and PLL phase of every stored word, seen from the RAM's write
  // strobe: the word written at a falling edge was captured on the rising edge
  // before it.
  longint last_rise, tcap [DEPTH], pcap [DEPTH];
  int     scap [DEPTH];
  always @(posedge clk_c) last_rise = now_fs();
  always @(negedge clk_c) begin
    if (dut.ram_we) begin
      tcap[dut.ram_addr] = last_rise;
      pcap[dut.ram_addr] = phase_fs;
      scap[dut.ram_addr] = shifts;
    end
  end
  logic sel_q = 1'b0;
  always @(posedge clk_c) begin
    if (dut.cal_select != sel_q) n_select_switch++;
    sel_q = dut.cal_select;
  end

  // External pulse train.
  longint ext_e [NE];
  initial begin
    longint t = 100000000;
    for (int j = 0; j < NE; j++) begin
      ext_e[j] = t;
      if ((j % 16) == 0) begin
        // Every eighth pulse is 50 to 420 ps wide, narrower than the
        // K x (rise - fall) = 481 ps the chain takes from it, so it dies inside.
        // Widths are 185 fs off a multiple of 370 fs so that the falling edge
        // never lands on the rising edge exactly.
        t += 370 * longint'($urandom_range(1000, 135)) + 185;
        n_collapse_in++;
      end else begin
        t += 700000 + longint'($urandom_range(2300000));
      end
    end
  end

  // Expected bit k at capture time t for the edge list e (even index rising,
  // level 0 before e[0]); -1 if an arrival is within 1 ps of t.
  // A high pulse whose falling edge reaches tap k no later than its rising
  // edge has died before tap k and leaves no trace there.
  function automatic int exp_bit(const ref longint e [$], int k, longint t);
    int v = 0;
    foreach (e[j]) begin
      longint a = e[j] + TC + longint'(k) * (((j % 2) == 0) ? TR : TF);
      if ((j % 2) == 0 && j + 1 < e.size()) begin
        if (e[j+1] + TC + longint'(k) * TF <= a) continue;
      end
      if ((j % 2) == 1 && j > 0) begin
        if (a <= e[j-1] + TC + longint'(k) * TR) continue;
      end
      if ((a > t ? a - t : t - a) < 1000) return -1;
      if (a <= t) v = ((j % 2) == 0) ? 1 : 0;
    end
    return v;
  endfunction

  task automatic check_word(int n, const ref longint e [$], const ref logic [K-1:0] w,
                            input string what);
    int bad = 0;
    for (int k = 0; k < int'(K); k++) begin
      int v = exp_bit(e, k, tcap[n]);
      if (v >= 0 && w[k] != v[0]) bad++;
    end
    checks++;
    if (bad != 0) begin
      failures++;
      if (failures < 10) $display("FAIL %s word %0d: %0d bits wrong", what, n, bad);
    end
  endtask

  task automatic read_word(int n, output logic [K-1:0] w);
    @(negedge refclk);
    rd_addr = AW'(n);
    @(posedge refclk);
    #1;
    w = rd_data;
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic wait_done();
    @(posedge clk_c);
    while (!done) @(posedge clk_c);
  endtask

  initial begin
    #2000000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [K-1:0] w;
    longint e [$];
    int rise_idx [DEPTH], fall_idx [DEPTH];
    real tau_r, tau_f;
    int  cnt_r = 0, cnt_f = 0;

    rst_n = 1'b0;
    start = 1'b0;
    mode  = MODE_CAPTURE;
    rd_addr = '0;
    ext_signal = 1'b0;
    fork
      begin
        for (int j = 0; j < NE; j++) begin
          #(real'(ext_e[j] - now_fs()) / 1000.0);
          ext_signal = ((j % 2) == 0);
        end
      end
    join_none
    repeat (4) @(posedge clk_c);
    rst_n = 1'b1;
    // ---------------- capture run ----------------
    repeat (30) @(posedge clk_c);
    #1000 start = 1'b1;
    @(posedge clk_c);
    #1000 start = 1'b0;
    wait_done();
    n_capture_runs++;
    for (int n = 1; n < int'(DEPTH); n++)
      check(tcap[n] == tcap[n-1] + TCLK, $sformatf("capture word %0d not on the next edge", n));
    for (int n = 0; n < int'(DEPTH); n++) begin
      e = {};
      foreach (ext_e[j]) if (ext_e[j] <= tcap[n] && ext_e[j] > tcap[n] - 20000000) begin
        if (e.size() == 0 && (j % 2) == 1) e.push_back(ext_e[j-1]);
        e.push_back(ext_e[j]);
      end
      read_word(n, w);
      check_word(n, e, w, "capture");
      // A narrow pulse that entered while this word was in the chain, whose
      // rising edge is already past its death point, shows only near the input.
      foreach (e[j]) if ((j % 2) == 0 && j + 1 < e.size())
        if (e[j+1] - e[j] < longint'(K) * (TR - TF) &&
            tcap[n] - e[j] - TC > longint'(K) * TR / 2) n_collapsed++;
    end

    // ---------------- calibration run ----------------
    mode = MODE_CALIBRATE;
    @(posedge clk_c);
    #1000 start = 1'b1;
    @(posedge clk_c);
    #1000 start = 1'b0;
    wait_done();
    n_cal_runs++;
    for (int n = 0; n < int'(DEPTH); n++) begin
      longint m_hi;
      check(scap[n] == n, $sformatf("calibration word %0d taken after %0d shifts", n, scap[n]));
      check(pcap[n] == longint'(n) * STEP, $sformatf("calibration word %0d phase", n));
      m_hi = (tcap[n] - pcap[n]) / CALP;
      e = {};
      for (longint m = m_hi - 2; m <= m_hi; m++) begin
        e.push_back(m * CALP + pcap[n]);
        e.push_back(m * CALP + pcap[n] + CALH);
      end
      read_word(n, w);
      check_word(n, e, w, "calibration");
      // Edge carry indices: the pulse is high from its falling-edge index to its
      // rising-edge index (the rising edge entered first, so it is deeper).
      rise_idx[n] = -1;
      fall_idx[n] = -1;
      for (int k = 0; k < int'(K) - 1; k++) begin
        if (w[k] && !w[k+1] && rise_idx[n] < 0) rise_idx[n] = k;
        if (!w[k] && w[k+1] && fall_idx[n] < 0) fall_idx[n] = k + 1;
      end
      if (rise_idx[n] > 0 && fall_idx[n] > 0 && rise_idx[n] > fall_idx[n] &&
          (rise_idx[n] - fall_idx[n]) * TR < CALH - 100000) n_shrunk++;
    end
    // Dynamic phase calibration. Word n was taken d_n = (capture time - phase
    // shift) mod period after a calibration rising edge entered, so its rising
    // edge sits at carry (d_n - copy delay) / tau_rise and its falling edge at
    // (d_n - high time - copy delay) / tau_fall. A straight-line fit of edge
    // index against d_n over all words gives 1 / tau.
    begin
      real sx_r = 0, sy_r = 0, sxx_r = 0, sxy_r = 0;
      real sx_f = 0, sy_f = 0, sxx_f = 0, sxy_f = 0;
      for (int n = 0; n < int'(DEPTH); n++) begin
        automatic real d = real'((tcap[n] - pcap[n]) % CALP) / 1000.0;   // ps
        if (rise_idx[n] > 0) begin
          sx_r += d; sy_r += rise_idx[n]; sxx_r += d * d; sxy_r += d * rise_idx[n]; cnt_r++;
        end
        if (fall_idx[n] > 0) begin
          d -= real'(CALH) / 1000.0;
          sx_f += d; sy_f += fall_idx[n]; sxx_f += d * d; sxy_f += d * fall_idx[n]; cnt_f++;
        end
      end
      tau_r = (cnt_r > 1) ? (cnt_r * sxx_r - sx_r * sx_r) / (cnt_r * sxy_r - sx_r * sy_r) : 0.0;
      tau_f = (cnt_f > 1) ? (cnt_f * sxx_f - sx_f * sx_f) / (cnt_f * sxy_f - sx_f * sy_f) : 0.0;
    end
    $display("calibration: tau_rise = %0.3f ps from %0d words, tau_fall = %0.3f ps from %0d words",
             tau_r, cnt_r, tau_f, cnt_f);
    check(cnt_r > int'(DEPTH) / 8 && tau_r > 4.91 * 0.98 && tau_r < 4.91 * 1.02,
          "rise carry delay from calibration");
    check(cnt_f > int'(DEPTH) / 8 && tau_f > 4.54 * 0.98 && tau_f < 4.54 * 1.02,
          "fall carry delay from calibration");

    $display("mechanisms: capture_runs=%0d calibration_runs=%0d select_switches=%0d phase_steps=%0d long_relocks=%0d shrunk_pulses=%0d collapsed_pulse_words=%0d",
             n_capture_runs, n_cal_runs, n_select_switch, shifts, long_relocks, n_shrunk, n_collapsed);
    check(n_capture_runs > 0, "capture run happened");
    check(n_cal_runs > 0, "calibration run happened");
    check(n_select_switch > 0, "input select switched");
    check(shifts == int'(DEPTH) - 1, "DEPTH-1 phase steps");
    check(long_relocks > 0, "a re-lock longer than the minimum");
    check(n_shrunk > 0, "pulse shrinking seen");
    check(n_collapsed > 0, "narrow pulses dying inside the chain");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
