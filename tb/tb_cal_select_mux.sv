// tb_cal_select_mux: exhaustive check of the calibration-select multiplexer.
// All eight input combinations are applied; s must follow cal_signal when
// cal_select is high and ext_signal when it is low.
module tb_cal_select_mux;
  timeunit 1ps;
  timeprecision 1fs;

  logic ext_signal, cal_signal, cal_select, s;
  int   checks = 0;
  int   failures = 0;

  cal_select_mux dut (.ext_signal(ext_signal), .cal_signal(cal_signal),
                      .cal_select(cal_select), .s(s));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 4; r++) begin
      for (int v = 0; v < 8; v++) begin
        {cal_select, cal_signal, ext_signal} = 3'(v);
        #10;
        checks++;
        if (s !== (v[2] ? v[1] : v[0])) begin
          failures++;
          $display("FAIL sel=%0d cal=%0d ext=%0d s=%0d", v[2], v[1], v[0], s);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
