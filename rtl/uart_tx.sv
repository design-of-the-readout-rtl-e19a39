// uart_tx: UART transmitter of the command/state bus (115200 baud at the 20 MHz clock).
//
// Sends start bit, 8 data bits LSB first, odd parity and one stop bit, matching uart_rx.
// Interface: a byte is taken when start is high and busy low; busy stays high until the end of
// the stop bit. txd idles high. One frame takes 11*DIV clocks.
module uart_tx #(
  parameter int unsigned DIV = 174
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [7:0] data,
  output logic       txd,
  output logic       busy
);
  logic [10:0] sh;
  logic [3:0]  nbit;
  logic [$clog2(DIV)-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh <= '1; nbit <= '0; cnt <= '0; busy <= 1'b0; txd <= 1'b1;
    end else if (!busy) begin
      txd <= 1'b1;
      if (start) begin
        // stop, parity (odd), data[7:0], start -- shifted out LSB first
        sh   <= {1'b1, ~(^data), data, 1'b0};
        busy <= 1'b1; nbit <= '0; cnt <= '0;
      end
    end else begin
      txd <= sh[0];
      if (cnt == DIV - 1) begin
        cnt <= '0;
        sh  <= {1'b1, sh[10:1]};
        if (nbit == 4'd10) busy <= 1'b0;
        else nbit <= nbit + 1'b1;
      end else cnt <= cnt + 1'b1;
    end
  end
endmodule
