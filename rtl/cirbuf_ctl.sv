// cirbuf_ctl: circular event buffer in the external SRAM (Cirbuf_Ctl).
//
// The science data of every trigger is buffered in a 128K x 8 SRAM (M65609E) and read out to the
// LVDS transmitter while later events are being taken, so sending event N overlaps the readout
// of event N+1. The SRAM, its size and the 2000-byte limit per trigger follow the design
// description; the frame layout and the policies below are this design's choices.
//
// Writer: a trigger (ev_start) opens a frame. The words of the master FPGA's Data_Process are
// stored first, then those of the slave FPGA (each input's done marks its end), high byte first.
// Then a 6-byte header is written in front of the payload:
//   LEN_H LEN_L  payload length in bytes
//   TRIG_H TRIG_L trigger number
//   FLAGS        {trunc, drop(0), 4'b0, mode[1:0]}
//   TRB_ID
// and the frame is committed. In compression mode a payload that would make the frame, with
// the transmitter's 2-byte sync and 2-byte CRC, exceed MAX_FRAME bytes is cut at the last whole
// word that fits and the trunc flag is set (raw and calibration frames, 18 kB each, are never cut).
// If the ring fills, the event is dropped: its data is consumed but not committed.
// Reader: whenever a committed frame exists it streams its 6+LEN bytes out (o_last on the final
// one) and frees them. The reader has priority on the single SRAM port when it needs a byte; it
// needs one per 8 clocks at the transmitter's rate, so the writer still gets 7 of 8 cycles.
// SRAM access: one byte per clock; the address and strobes are combinational, a write happens at
// the clock edge with ce_n = we_n = 0, and read data is taken at the end of the addressed cycle.
module cirbuf_ctl
  import stk_pkg::*;
#(
  parameter int unsigned AW        = 17,        // 128K x 8
  parameter int unsigned MAX_BYTES = MAX_FRAME
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          ev_start,
  input  mode_e         ev_mode,
  input  logic [15:0]   trig_num,
  input  logic [7:0]    trb_id,
  input  logic          in0_valid,
  output logic          in0_ready,
  input  logic [15:0]   in0_data,
  input  logic          in0_done,
  input  logic          in1_valid,
  output logic          in1_ready,
  input  logic [15:0]   in1_data,
  input  logic          in1_done,
  // SRAM
  output logic [AW-1:0] sram_addr,
  output logic [7:0]    sram_dq_o,
  input  logic [7:0]    sram_dq_i,
  output logic          sram_dq_oe,
  output logic          sram_ce_n,
  output logic          sram_we_n,
  output logic          sram_oe_n,
  // byte stream to the transmitter
  output logic          o_valid,
  input  logic          o_ready,
  output logic [7:0]    o_data,
  output logic          o_last,
  // status
  output logic          wr_busy,
  output logic [7:0]    n_frames,
  output logic [15:0]   drop_cnt,
  output logic [15:0]   trunc_cnt
);
  localparam int unsigned HDR = 6;
  localparam int unsigned MAX_PAY = MAX_BYTES - HDR - 4;   // sync and CRC added by the transmitter

  typedef enum logic [2:0] {W_IDLE, W_IN, W_LO, W_HDR} wstate_e;
  wstate_e wstate;
  logic [AW-1:0] base, wptr, rd_base, rptr;
  logic [15:0]   paylen, trig_q;
  logic [7:0]    lo_byte;
  logic          src, done0, done1, trunc, drop;
  logic [1:0]    mode_q;
  logic [2:0]    hidx;

  // ---------------- reader state ----------------
  logic          rd_act, rd_req, hold_v;
  logic [15:0]   rk, rtotal;
  logic [7:0]    hold_d, len_h;

  // ---------------- port arbitration ----------------
  logic          w_req;
  logic [AW-1:0] w_addr;
  logic [7:0]    w_data;
  logic          full;
  logic          rd_grant, w_grant;

  assign full     = (wptr == rd_base) || (AW'(wptr + 1'b1) == rd_base);   // room for a word?
  assign rd_req   = rd_act && !hold_v && (rk < rtotal);
  assign rd_grant = rd_req;
  assign w_grant  = w_req && !rd_grant;

  logic          in_valid, take;
  logic [15:0]   in_data;
  assign in_valid = src ? in1_valid : in0_valid;
  assign in_data  = src ? in1_data  : in0_data;
  logic          fits;
  assign fits = !(mode_q == 2'(MODE_CMP) && (paylen + 16'd2 > 16'(MAX_PAY)));

  always_comb begin
    w_req  = 1'b0;
    w_addr = wptr;
    w_data = in_data[15:8];
    take   = 1'b0;
    unique case (wstate)
      W_IN: if (in_valid) begin
        if (!fits || drop || full) take = 1'b1;           // discard
        else begin w_req = 1'b1; take = !rd_grant; end
      end
      W_LO: begin w_req = 1'b1; w_data = lo_byte; end
      W_HDR: begin
        w_req  = 1'b1;
        w_addr = AW'(base + AW'(hidx));
        unique case (hidx)
          3'd0: w_data = paylen[15:8];
          3'd1: w_data = paylen[7:0];
          3'd2: w_data = trig_q[15:8];
          3'd3: w_data = trig_q[7:0];
          3'd4: w_data = {trunc, 5'b0, mode_q};
          default: w_data = trb_id;
        endcase
      end
      default: ;
    endcase
  end
  assign in0_ready = (wstate == W_IN) && !src && take;
  assign in1_ready = (wstate == W_IN) &&  src && take;

  assign sram_addr  = rd_grant ? rptr : w_addr;
  assign sram_dq_o  = w_data;
  assign sram_dq_oe = w_grant;
  assign sram_ce_n  = !(rd_grant || w_grant);
  assign sram_we_n  = !w_grant;
  assign sram_oe_n  = !rd_grant;

  // ---------------- writer ----------------
  logic commit;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wstate <= W_IDLE; base <= '0; wptr <= '0; paylen <= '0; trig_q <= '0; lo_byte <= '0;
      src <= 1'b0; done0 <= 1'b0; done1 <= 1'b0; trunc <= 1'b0; drop <= 1'b0; mode_q <= '0;
      hidx <= '0; drop_cnt <= '0; trunc_cnt <= '0; commit <= 1'b0;
    end else begin
      commit <= 1'b0;
      if (in0_done) done0 <= 1'b1;
      if (in1_done) done1 <= 1'b1;
      unique case (wstate)
        W_IDLE: if (ev_start) begin
          wstate <= W_IN; wptr <= AW'(base + AW'(HDR)); paylen <= '0; trig_q <= trig_num;
          mode_q <= ev_mode; src <= 1'b0; done0 <= 1'b0; done1 <= 1'b0;
          trunc <= 1'b0;
          // no room for even the header: drop the whole event
          drop <= (rd_base != base) && (AW'(rd_base - base - 1'b1) < AW'(HDR + 2));
        end
        W_IN: begin
          if (in_valid && take) begin
            if (drop) ;
            else if (full) drop <= 1'b1;
            else if (!fits) trunc <= 1'b1;
            else begin
              wptr <= wptr + 1'b1; lo_byte <= in_data[7:0]; wstate <= W_LO;
            end
          end else if (!in_valid) begin
            if (!src && (done0 || in0_done)) src <= 1'b1;
            else if (src && (done1 || in1_done)) begin hidx <= '0; wstate <= W_HDR; end
          end
        end
        W_LO: if (w_grant) begin
          wptr <= wptr + 1'b1; paylen <= paylen + 16'd2; wstate <= W_IN;
        end
        W_HDR: if (drop) begin
          drop_cnt <= drop_cnt + 1'b1; wstate <= W_IDLE;
        end else if (w_grant) begin
          if (hidx == 3'd5) begin
            base <= AW'(base + AW'(HDR) + AW'(paylen)); commit <= 1'b1; wstate <= W_IDLE;
            if (trunc) trunc_cnt <= trunc_cnt + 1'b1;
          end else hidx <= hidx + 1'b1;
        end
        default: wstate <= W_IDLE;
      endcase
    end
  end
  assign wr_busy = (wstate != W_IDLE);

  // ---------------- reader ----------------
  logic fin;
  assign fin = rd_act && o_valid && o_ready && (rk == rtotal);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_act <= 1'b0; rptr <= '0; rd_base <= '0; rk <= '0; rtotal <= '0; hold_v <= 1'b0;
      hold_d <= '0; len_h <= '0; n_frames <= '0;
    end else begin
      if (!rd_act) begin
        if (n_frames != 0) begin
          rd_act <= 1'b1; rptr <= rd_base; rk <= '0; rtotal <= 16'(HDR);
        end
      end else begin
        if (rd_grant) begin
          hold_v <= 1'b1; hold_d <= sram_dq_i; rptr <= rptr + 1'b1;
          if (rk == 16'd0) len_h  <= sram_dq_i;
          if (rk == 16'd1) rtotal <= {len_h, sram_dq_i} + 16'(HDR);
          rk <= rk + 1'b1;
        end
        if (o_valid && o_ready) begin
          hold_v <= 1'b0;
          if (fin) begin rd_act <= 1'b0; rd_base <= rptr; end
        end
      end
      n_frames <= n_frames + (commit ? 8'd1 : 8'd0) - (fin ? 8'd1 : 8'd0);
    end
  end
  assign o_valid = hold_v;
  assign o_data  = hold_d;
  assign o_last  = hold_v && (rk == rtotal);

  // A write must never land in a committed frame: only in the free part of the ring that
  // starts at base and ends before rd_base.
  property p_no_overwrite;
    @(posedge clk) disable iff (!rst_n)
      w_grant && (n_frames != 0) |-> (AW'(w_addr - base) < AW'(rd_base - base));
  endproperty
  assert property (p_no_overwrite);
endmodule
