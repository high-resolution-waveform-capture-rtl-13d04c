// cal_select_mux: chooses the signal S that enters the carry chain.
//
// When the control logic asserts cal_select the phase-shifted calibration output
// of the PLL drives S; otherwise the external signal under test does. The
// selection is combinational and sits directly in front of the copy gate, as in
// the paper's block diagram. On the FPGA this is one LUT; which input is chosen
// by the high level of cal_select is this design's choice.
module cal_select_mux (
  input  logic ext_signal,  // signal under test (after its I/O buffer)
  input  logic cal_signal,  // phase-shifted PLL calibration output
  input  logic cal_select,  // 1: calibration signal, 0: external signal
  output logic s            // signal S to the carry chain
);
  timeunit 1ps;
  timeprecision 1fs;

  always_comb begin
    s = cal_select ? cal_signal : ext_signal;
  end
endmodule
