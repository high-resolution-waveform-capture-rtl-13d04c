// tb_capture_ram: checks the capture RAM at its full size (512 x 1300 bits).
//
// Each write cycle sets address, enable and data on the rising edge of the
// write clock, as the control logic and TDL do, and changes the data again
// shortly after it and again after the falling edge, so only a write made on
// the falling edge stores the value the model expects. Cycles with the enable low write random data to
// random addresses, which must not land. Every word is then read back through
// the registered read port and compared, and the one-cycle read latency is
// checked.
module tb_capture_ram;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned W     = 1300;
  localparam int unsigned DEPTH = 512;
  localparam int unsigned AW    = 9;

  logic          wr_clk = 1'b0;
  logic          rd_clk = 1'b0;
  logic          we;
  logic [AW-1:0] wr_addr, rd_addr;
  logic [W-1:0]  wr_data, rd_data;
  logic [W-1:0]  model [DEPTH];
  int            checks = 0;
  int            failures = 0;

  capture_ram #(.W(W), .DEPTH(DEPTH)) dut (
    .wr_clk(wr_clk), .we(we), .wr_addr(wr_addr), .wr_data(wr_data),
    .rd_clk(rd_clk), .rd_addr(rd_addr), .rd_data(rd_data));

  function automatic logic [W-1:0] rand_word();
    logic [W-1:0] w;
    for (int i = 0; i < int'(W); i += 32) w[i +: 32] = $urandom;
    return w;
  endfunction

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 1'b0;
    wr_addr = '0;
    rd_addr = '0;
    // Fill every word once.
    for (int n = 0; n < int'(DEPTH); n++) begin
      wr_clk = 1'b1;
      we = 1'b1;
      wr_addr = AW'(n);
      wr_data = rand_word();           // value at the rising edge: not stored
      #100 wr_data = rand_word();      // settles after clock-to-q, as from the TDL
      #2400 wr_clk = 1'b0;
      model[n] = wr_data;
      #100 wr_data = rand_word();      // must not be stored
      #2400;
    end
    // Disabled cycles and a second round of writes to random addresses.
    for (int n = 0; n < 600; n++) begin
      wr_clk = 1'b1;
      we = ($urandom_range(1) == 1);
      wr_addr = AW'($urandom_range(DEPTH - 1));
      wr_data = rand_word();
      #100 wr_data = rand_word();
      #2400 wr_clk = 1'b0;
      if (we) model[wr_addr] = wr_data;
      #100 wr_data = rand_word();
      #2400;
    end
    wr_clk = 1'b1;
    we = 1'b0;
    // Read back: rd_data must show the word one rising edge after the address.
    for (int n = 0; n < int'(DEPTH); n++) begin
      rd_addr = AW'(n);
      #1000 rd_clk = 1'b1;
      #1 checks++;
      if (rd_data !== model[n]) begin
        failures++;
        $display("FAIL word %0d read back wrong", n);
      end
      #999 rd_clk = 1'b0;
      rd_addr = AW'((n + 1) % DEPTH);
      #1 checks++;
      if (rd_data !== model[n]) begin
        failures++;
        $display("FAIL word %0d: read data changed before the next edge", n);
      end
      #999;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
