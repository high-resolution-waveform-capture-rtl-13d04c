// capture_ram: buffer that stores one captured TDL word per write.
//
// DEPTH words of W bits. The write port is clocked on the falling edge of the
// capture clock C: the TDL registers change on the rising edge, so writing half a
// period later keeps the RAM from reading a word while it is being captured. A
// word is written when we is high at that falling edge; the address and enable
// come from the control logic, which updates them on the rising edge.
//
// The read port (rd_clk, rd_addr, rd_data) is for the host readout, which on the
// board goes over JTAG. It is synchronous: rd_data shows mem[rd_addr] one rising
// edge of rd_clk after the address. The negative-edge write and the word size
// follow the paper; the separate, registered read port is this design's choice,
// since the paper only says that the data is transferred to a computer.
module capture_ram #(
  parameter int unsigned W     = wcd_pkg::K_DEFAULT,
  parameter int unsigned DEPTH = wcd_pkg::DEPTH_DEFAULT,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          wr_clk,   // capture clock C; writes on its falling edge
  input  logic          we,       // write enable from the control logic
  input  logic [AW-1:0] wr_addr,  // word address n
  input  logic [W-1:0]  wr_data,  // captured word X
  input  logic          rd_clk,   // readout clock
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data
);
  timeunit 1ps;
  timeprecision 1fs;

  logic [W-1:0] mem [DEPTH];

  always_ff @(negedge wr_clk) begin
    if (we) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge rd_clk) begin
    rd_data <= mem[rd_addr];
  end
endmodule
