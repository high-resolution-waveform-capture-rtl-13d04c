// tb_tdl_capture: checks that the TDL registers take the taps on the rising
// edge of C only and present them with the polarity of S.
//
// Random tap words are applied between clock edges, and changed again while the
// clock is high and while it is low; after every rising edge x must equal the
// inverse of the tap word present at that edge, and it must not move at the
// falling edge.
module tb_tdl_capture;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned K = 1300;

  logic         clk = 1'b0;
  logic [K-1:0] tap_n;
  logic [K-1:0] x;
  logic [K-1:0] at_edge;
  int           checks = 0;
  int           failures = 0;

  tdl_capture #(.K(K)) dut (.clk(clk), .tap_n(tap_n), .x(x));

  function automatic logic [K-1:0] rand_word();
    logic [K-1:0] w;
    for (int i = 0; i < int'(K); i += 32) w[i +: 32] = $urandom;
    return w;
  endfunction

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tap_n = rand_word();
    for (int n = 0; n < 200; n++) begin
      #1000 tap_n = rand_word();
      #1500 at_edge = tap_n;
      clk = 1'b1;                      // rising edge of C
      #500 tap_n = rand_word();        // taps move while C is high
      checks++;
      if (x !== ~at_edge) begin
        failures++;
        $display("FAIL cycle %0d: x differs from the taps at the edge", n);
      end
      #2000 clk = 1'b0;                // falling edge of C
      #1 checks++;
      if (x !== ~at_edge) begin
        failures++;
        $display("FAIL cycle %0d: x changed at the falling edge", n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
