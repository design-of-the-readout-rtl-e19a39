// lvds_tx: serial science-data transmitter towards the PDHU (LVDS_Driver).
//
// The science data bus is LVDS with a user-defined serial protocol and a 20 MHz reference clock,
// with a redundant backup bus (design description). Here one bit is sent per cycle of the 20 MHz
// clock, which is forwarded to the PDHU as the bit clock, so a 2000-byte frame takes 0.8 ms. The
// framing is this design's own: frame is high for the whole frame, data is MSB first, and a
// frame is
//   EB 90 | bytes from the event buffer | CRC_H CRC_L
// with CRC-16/CCITT (see crc16) over the buffer bytes. bus_sel (0 main, 1 backup) is sampled at
// the start of a frame; the unused bus stays low. A byte is taken from the input stream when the
// one-byte holding register is empty; the input must keep up with one byte per 8 clocks or the
// frame is aborted, counted in underrun_cnt, and the rest of its bytes are discarded. At least one idle clock separates frames.
module lvds_tx
  import stk_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        bus_sel,
  input  logic        i_valid,
  output logic        i_ready,
  input  logic [7:0]  i_data,
  input  logic        i_last,
  output logic        data_a,
  output logic        frame_a,
  output logic        data_b,
  output logic        frame_b,
  output logic [15:0] frames_sent,
  output logic [7:0]  underrun_cnt
);
  typedef enum logic [1:0] {T_IDLE, T_SYNC, T_DATA, T_CRC} tstate_e;
  tstate_e     state;
  logic [15:0] sh;
  logic [3:0]  nb;
  logic        hv, hlast, cur_last, bus, flush;
  logic [7:0]  hd;
  logic        crc_init, crc_en;
  logic [15:0] crc;

  crc16 u_crc (.clk, .rst_n, .init(crc_init), .en(crc_en), .data(hd), .crc(crc));

  assign i_ready = !hv && (state != T_CRC);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= T_IDLE; sh <= '0; nb <= '0; hv <= 1'b0; hlast <= 1'b0; hd <= '0;
      cur_last <= 1'b0; bus <= 1'b0; flush <= 1'b0; frames_sent <= '0; underrun_cnt <= '0;
    end else begin
      if (i_valid && i_ready) begin hv <= 1'b1; hd <= i_data; hlast <= i_last; end
      unique case (state)
        T_IDLE: if (hv && flush) begin
          hv <= 1'b0;                       // drop the rest of an aborted frame
          if (hlast) flush <= 1'b0;
        end else if (hv) begin
          sh <= {SYNC0, SYNC1}; nb <= 4'd15; state <= T_SYNC; bus <= bus_sel;
        end
        T_SYNC: if (nb == 0) begin
          if (hv) begin
            sh <= {hd, 8'h00}; nb <= 4'd7; cur_last <= hlast; hv <= 1'b0; state <= T_DATA;
          end else begin underrun_cnt <= underrun_cnt + 1'b1; flush <= 1'b1; state <= T_IDLE; end
        end else begin sh <= sh << 1; nb <= nb - 1'b1; end
        T_DATA: if (nb == 0) begin
          if (cur_last) begin sh <= crc; nb <= 4'd15; state <= T_CRC; end
          else if (hv) begin
            sh <= {hd, 8'h00}; nb <= 4'd7; cur_last <= hlast; hv <= 1'b0;
          end else begin underrun_cnt <= underrun_cnt + 1'b1; flush <= 1'b1; state <= T_IDLE; end
        end else begin sh <= sh << 1; nb <= nb - 1'b1; end
        T_CRC: if (nb == 0) begin
          frames_sent <= frames_sent + 1'b1; state <= T_IDLE;
        end else begin sh <= sh << 1; nb <= nb - 1'b1; end
        default: state <= T_IDLE;
      endcase
    end
  end

  // CRC: restart at the frame start, absorb each byte as it moves into the shifter
  assign crc_init = (state == T_IDLE);
  assign crc_en   = hv && (((state == T_SYNC) && nb == 0) || ((state == T_DATA) && nb == 0 && !cur_last));

  logic active;
  assign active  = (state != T_IDLE);
  assign data_a  = active && !bus && sh[15];
  assign frame_a = active && !bus;
  assign data_b  = active &&  bus && sh[15];
  assign frame_b = active &&  bus;
endmodule
