// uart_rx: UART receiver of the command/state bus (115200 baud at the 20 MHz clock).
//
// Frame: start bit, 8 data bits LSB first, odd parity bit, one stop bit. The baud rate is the
// published one; the odd parity is this design's reading of the "odd checksum" listed among the
// SEU checks. The line is synchronised, the start bit is confirmed at its middle, and each bit is
// sampled at the middle of its period (DIV = clock/baud, rounded).
// Interface: valid pulses one clock after the stop bit's middle with data; perr is set with valid
// when the parity is wrong, ferr when the stop bit is low.
module uart_rx #(
  parameter int unsigned DIV = 174   // 20 MHz / 115200
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rxd,
  output logic       valid,
  output logic [7:0] data,
  output logic       perr,
  output logic       ferr
);
  typedef enum logic [1:0] {IDLE, START, BITS, STOP} state_e;
  state_e state;
  logic [1:0]  sync;
  logic [$clog2(DIV)-1:0] cnt;
  logic [3:0]  nbit;
  logic [8:0]  sh;    // 8 data bits + parity

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync <= '1; state <= IDLE; cnt <= '0; nbit <= '0; sh <= '0;
      valid <= 1'b0; data <= '0; perr <= 1'b0; ferr <= 1'b0;
    end else begin
      sync  <= {sync[0], rxd};
      valid <= 1'b0;
      unique case (state)
        IDLE: if (!sync[1]) begin state <= START; cnt <= '0; end
        START: if (cnt == (DIV/2) - 1) begin
                 cnt <= '0;
                 if (!sync[1]) begin state <= BITS; nbit <= '0; end
                 else state <= IDLE;
               end else cnt <= cnt + 1'b1;
        BITS: if (cnt == DIV - 1) begin
                cnt <= '0;
                sh  <= {sync[1], sh[8:1]};
                if (nbit == 4'd8) state <= STOP;
                else nbit <= nbit + 1'b1;
              end else cnt <= cnt + 1'b1;
        STOP: if (cnt == DIV - 1) begin
                cnt   <= '0;
                state <= IDLE;
                valid <= 1'b1;
                data  <= sh[7:0];
                perr  <= ~(^sh);        // odd parity: data plus parity has an odd count of ones
                ferr  <= ~sync[1];
              end else cnt <= cnt + 1'b1;
        default: state <= IDLE;
      endcase
    end
  end
endmodule
