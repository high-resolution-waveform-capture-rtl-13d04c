// tb_carry_chain: checks the carry-chain model against arrival times computed
// here from its delay parameters.
//
// A known pulse train enters the chain. At many sample times every tap is
// compared with the value expected from the edge arrival rule: an edge that
// enters at time te reaches the carry-in of element k (tap k) at te + copy delay + k x tau, with
// tau the rise or the fall delay. Taps within 1 ps of an arrival are skipped.
// It also checks the chain end's carry-out and that a pulse has shrunk by
// K x (rise - fall) when it leaves the chain, and that the copy gate swallows
// a glitch shorter than its delay but passes a longer pulse, which then shrinks
// to nothing inside the chain.
module tb_carry_chain;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned K    = 1300;
  localparam longint      TR   = 4910;   // fs
  localparam longint      TF   = 4540;   // fs
  localparam longint      TC   = 50000;  // fs
  localparam int          NE   = 16;

  logic         s;
  logic [K-1:0] tap_n;
  logic         cout;
  int           checks = 0;
  int           failures = 0;
  longint       edges [NE];  // edge input times in fs, even index = rising

  carry_chain #(.K(K)) dut (.s(s), .tap_n(tap_n), .cout(cout));

  function automatic longint arrival(int j, int k);
    return edges[j] + TC + longint'(k) * (((j % 2) == 0) ? TR : TF);
  endfunction

  // Expected level of the carry-in of element k at time t (fs); -1 if too close to call.
  function automatic int expected(int k, longint t);
    int v = 0;
    for (int j = 0; j < NE; j++) begin
      longint a = arrival(j, k);
      if ((a > t ? a - t : t - a) < 1000) return -1;
      if (a <= t) v = ((j % 2) == 0) ? 1 : 0;
    end
    return v;
  endfunction

  function automatic longint now_fs();
    return longint'($realtime * 1000.0);
  endfunction

  task automatic check_all_taps();
    int bad = 0;
    longint t = now_fs();
    for (int k = 0; k < int'(K); k++) begin
      int e = expected(k, t);
      if (e >= 0 && (tap_n[k] != logic'(e == 0))) begin
        if (bad == 0) $display("  first bad tap %0d exp %0d", k, e);
        bad++;
      end
    end
    checks++;
    if (bad != 0) begin
      failures++;
      $display("FAIL t=%0d fs: %0d taps wrong", t, bad);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0, w_in, t_r, t_f;
    s = 1'b0;
    // Pulse train: widths and gaps between 1.0 and 3.0 ns, on a 1 fs grid.
    t0 = 100000;
    for (int j = 0; j < NE; j++) begin
      edges[j] = t0;
      t0 += 1000000 + longint'($urandom_range(2000000));
    end
    fork
      begin
        for (int j = 0; j < NE; j++) begin
          #((real'(edges[j]) / 1000.0) - $realtime);
          s = ((j % 2) == 0);
        end
      end
      begin
        // Sample the whole chain every 137.3 ps until the train has left it.
        while (now_fs() < edges[NE-1] + TC + longint'(K) * TR + 200000) begin
          #137.3;
          check_all_taps();
        end
      end
      begin
        // Pulse width at the chain end: rising and falling arrivals at cout.
        @(posedge cout); t_r = now_fs();
        @(negedge cout); t_f = now_fs();
        w_in = edges[1] - edges[0];
        checks++;
        if ((t_f - t_r) != w_in - longint'(K) * (TR - TF)) begin
          failures++;
          $display("FAIL output width %0d fs, expected %0d fs", t_f - t_r,
                   w_in - longint'(K) * (TR - TF));
        end
        checks++;
        if (t_r != edges[0] + TC + longint'(K) * TR) begin
          failures++;
          $display("FAIL first arrival at cout %0d fs", t_r);
        end
      end
    join
    // Copy gate low-pass: a 30 ps glitch must not enter the chain, a 70 ps
    // pulse must.
    begin
      int unsigned cout_edges = 0;
      fork
        begin
          forever begin
            @(cout);
            cout_edges++;
          end
        end
      join_none
      #1000 s = 1'b1;
      #30   s = 1'b0;
      #20000;
      checks++;
      if (tap_n !== '1 || cout_edges != 0) begin
        failures++;
        $display("FAIL a 30 ps glitch entered the chain");
      end
      s = 1'b1;
      #70 s = 1'b0;
      // The pulse entered at +50 ps; 40 ps later it spans taps 0 .. 8.
      #20;
      checks++;
      if (tap_n[0] !== 1'b0 || tap_n[5] !== 1'b0) begin
        failures++;
        $display("FAIL a 70 ps pulse was filtered out");
      end
      #20000;
      checks++;
      // It shrinks 0.37 ps per element, so it dies near element 190 and
      // neither reaches the end nor leaves anything behind.
      if (cout_edges != 0 || tap_n !== '1) begin
        failures++;
        $display("FAIL the 70 ps pulse did not die out in the chain (%0d edges)", cout_edges);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
