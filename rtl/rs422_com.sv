// rs422_com: command/state link between the TRB and the PDHU (RS422_COM).
//
// The PDHU sends commands and polls house-keeping data over a half-duplex UART at 115200 baud,
// on a main or a backup RS422 bus (both as in the design description). The packet formats are
// this design's own:
//   command  EB 90 ID CMD ARG_H ARG_L SUM      SUM = ID+CMD+ARG_H+ARG_L mod 256
//   reply    EB 90 ID N   B0 .. B(N-1)  SUM    SUM = ID+N+B0+..+B(N-1) mod 256
// ID is the board's TRB_ID or FF for all boards. A packet with a parity error, a framing error
// or a wrong SUM is dropped and counted in err_cnt. Only CMD_HK_POLL is answered, and only when
// addressed to this board alone, so two boards never drive the shared line. The reply carries
// the NB status bytes in hk_bytes, sampled when the poll is decoded. During the reply tx_en
// enables the chosen bus driver (half duplex); the other bus stays idle high and disabled.
// Timing: cmd_valid pulses one clock after the SUM byte's stop bit; the reply starts on the next
// clock and lasts (NB+5) UART frames.
module rs422_com
  import stk_pkg::*;
#(
  parameter int unsigned DIV = CLK_HZ / BAUD + ((CLK_HZ % BAUD) >= BAUD/2 ? 1 : 0),
  parameter int unsigned NB  = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [7:0]       trb_id,
  input  logic             bus_sel,     // 0 = main bus A, 1 = backup bus B
  input  logic             rxd_a,
  input  logic             rxd_b,
  output logic             txd_a,
  output logic             txd_b,
  output logic             tx_en_a,
  output logic             tx_en_b,
  input  logic [NB-1:0][7:0] hk_bytes,
  output logic             cmd_valid,
  output command_t         cmd,
  output logic [7:0]       err_cnt
);
  logic       rx_valid, rx_perr, rx_ferr;
  logic [7:0] rx_data;
  logic       txd, tx_busy, tx_start;
  logic [7:0] tx_data;

  uart_rx #(.DIV(DIV)) u_rx (.clk, .rst_n, .rxd(bus_sel ? rxd_b : rxd_a),
                             .valid(rx_valid), .data(rx_data), .perr(rx_perr), .ferr(rx_ferr));
  uart_tx #(.DIV(DIV)) u_tx (.clk, .rst_n, .start(tx_start), .data(tx_data),
                             .txd(txd), .busy(tx_busy));

  // ---------------- command parser ----------------
  logic [2:0]  rx_idx;
  logic [7:0]  rx_sum, rx_id, rx_cmd, rx_arg_h;
  logic        poll_req;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_idx <= '0; rx_sum <= '0; rx_id <= '0; rx_cmd <= '0; rx_arg_h <= '0;
      cmd_valid <= 1'b0; cmd <= '{cmd: CMD_SET_MODE, arg: '0}; err_cnt <= '0; poll_req <= 1'b0;
    end else begin
      cmd_valid <= 1'b0;
      poll_req  <= 1'b0;
      if (rx_valid) begin
        if (rx_perr || rx_ferr) begin
          rx_idx  <= '0;
          err_cnt <= err_cnt + 1'b1;
        end else begin
          unique case (rx_idx)
            3'd0: rx_idx <= (rx_data == SYNC0) ? 3'd1 : 3'd0;
            3'd1: rx_idx <= (rx_data == SYNC1) ? 3'd2 : (rx_data == SYNC0 ? 3'd1 : 3'd0);
            3'd2: begin rx_id <= rx_data; rx_sum <= rx_data; rx_idx <= 3'd3; end
            3'd3: begin rx_cmd <= rx_data; rx_sum <= rx_sum + rx_data; rx_idx <= 3'd4; end
            3'd4: begin rx_arg_h <= rx_data; rx_sum <= rx_sum + rx_data; rx_idx <= 3'd5; end
            3'd5: begin cmd.arg <= {rx_arg_h, rx_data}; rx_sum <= rx_sum + rx_data; rx_idx <= 3'd6; end
            3'd6: begin
              rx_idx <= '0;
              if (rx_data != rx_sum) err_cnt <= err_cnt + 1'b1;
              else if (rx_id == trb_id || rx_id == 8'hFF) begin
                cmd.cmd   <= cmd_e'(rx_cmd);
                cmd_valid <= 1'b1;
                poll_req  <= (rx_cmd == CMD_HK_POLL) && (rx_id == trb_id);
              end
            end
            default: rx_idx <= '0;
          endcase
        end
      end
    end
  end

  // ---------------- reply sender ----------------
  logic [NB-1:0][7:0] snap;
  logic [$clog2(NB+6)-1:0] tx_idx;
  logic        sending, tx_bus;
  logic [7:0]  tx_sum;

  always_comb begin
    if (tx_idx == 0)                 tx_data = SYNC0;
    else if (tx_idx == 1)            tx_data = SYNC1;
    else if (tx_idx == 2)            tx_data = trb_id;
    else if (tx_idx == 3)            tx_data = 8'(NB);
    else if (tx_idx < NB + 4)        tx_data = snap[tx_idx - 4];
    else                             tx_data = tx_sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      snap <= '0; tx_idx <= '0; sending <= 1'b0; tx_start <= 1'b0; tx_sum <= '0; tx_bus <= 1'b0;
    end else begin
      tx_start <= 1'b0;
      if (!sending) begin
        if (poll_req) begin
          snap <= hk_bytes; sending <= 1'b1; tx_idx <= '0; tx_bus <= bus_sel;
          tx_sum <= '0;
        end
      end else if (!tx_busy && !tx_start) begin
        if (tx_idx == NB + 5) sending <= 1'b0;
        else begin
          tx_start <= 1'b1;
          if (tx_idx >= 2 && tx_idx < NB + 4) tx_sum <= tx_sum + tx_data;
        end
      end else if (tx_start) tx_idx <= tx_idx + 1'b1;
    end
  end

  assign txd_a   = (sending && !tx_bus) ? txd : 1'b1;
  assign txd_b   = (sending &&  tx_bus) ? txd : 1'b1;
  assign tx_en_a = sending && !tx_bus;
  assign tx_en_b = sending &&  tx_bus;
endmodule
