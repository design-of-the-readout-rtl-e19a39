// crc16: byte-serial CRC-16 generator protecting the science data frames.
//
// The design description lists CRC among its SEU checks without naming the polynomial; this
// design uses CRC-16/CCITT-FALSE (polynomial 0x1021, initial value 0xFFFF, no reflection, no
// final XOR). One byte is absorbed per enabled clock, MSB first.
// Interface: init loads 0xFFFF; en with data folds one byte in; crc is the running value and
// is updated one cycle after en.
module crc16 (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        init,
  input  logic        en,
  input  logic [7:0]  data,
  output logic [15:0] crc
);
  function automatic logic [15:0] next_crc(input logic [15:0] c, input logic [7:0] b);
    logic [15:0] r;
    r = c ^ {b, 8'h00};
    for (int i = 0; i < 8; i++)
      r = r[15] ? ((r << 1) ^ 16'h1021) : (r << 1);
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    crc <= 16'hFFFF;
    else if (init) crc <= 16'hFFFF;
    else if (en)   crc <= next_crc(crc, data);
  end
endmodule
