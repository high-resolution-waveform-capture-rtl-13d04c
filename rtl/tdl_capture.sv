// tdl_capture: the register half of the tapped delay line (TDL).
//
// K flip-flops share the global capture clock C. On each rising edge of C every
// register freezes the carry-chain tap it is wired to, so the K-bit word x holds
// the last K carry delays of the signal: x[k] = S(t - d0 - k*tau), with x[0]
// the most recent sample (the paper's x_1). The taps are the carry elements' sum
// outputs, which carry the inverted signal, so the word is inverted once more
// after the registers and x has the polarity of S, as the capture equation
// X(t) = theta(S(t - tau), ..., S(t - K tau)) states.
//
// Interface: tap_n from carry_chain, clk = C, x to the capture RAM. Latency: x is
// valid one clock-to-q after the rising edge of C and holds for a full period; the
// RAM takes it on the following falling edge.
//
// The registers have no reset: they are overwritten on every edge of C and the
// control logic never stores a word captured before the first edge. One register
// per carry follows the paper; the inversion after the register is this design's
// choice of where to restore the polarity.
module tdl_capture #(
  parameter int unsigned K = wcd_pkg::K_DEFAULT
) (
  input  logic         clk,    // capture clock C (200 MHz)
  input  logic [K-1:0] tap_n,  // inverted carry-chain taps
  output logic [K-1:0] x       // captured word X, polarity of S
);
  timeunit 1ps;
  timeprecision 1fs;

  logic [K-1:0] q;

  always_ff @(posedge clk) begin
    q <= tap_n;
  end

  assign x = ~q;
endmodule
