// sram_model: behavioural model of an asynchronous byte-wide SRAM (such as the M65609E).
// Writes at a clock edge with ce_n and we_n low; reads are combinational. Contents start at zero.
module sram_model #(
  parameter int AW = 17
) (
  input  logic          clk,
  input  logic [AW-1:0] addr,
  input  logic [7:0]    din,
  output logic [7:0]    dout,
  input  logic          ce_n,
  input  logic          we_n
);
  logic [7:0] mem [1 << AW];
  initial for (int i = 0; i < (1 << AW); i++) mem[i] = 8'h00;
  always @(posedge clk) if (!ce_n && !we_n) mem[addr] <= din;
  assign dout = mem[addr];
endmodule
