// data_process: event buffer and on-line data reduction of one FPGA (Data_Process module).
//
// Each of the two FPGAs of a TRB runs one identical Data_Process module serving 24 serial ADCs,
// i.e. 12 ladders, 24 x 192 = 4608 strips. What it does in each working mode follows the design
// description:
//   raw / gain calibration   all 4608 samples are sent, uncompressed;
//   pedestal update          every sample is accumulated; after 1024 events each channel's
//                            pedestal becomes the average (sum >> 10) and the sums are cleared;
//   data compression         pedestal subtraction, common-noise subtraction, bad-channel cut,
//                            then cluster finding.
// The description only names the compression steps; how they are done here is this design's
// simplest version of them:
//   * common noise is the mean of (raw - pedestal) over the good channels of each 64-channel
//     VA140 chip, found with a sequential restoring divider, and subtracted from each channel;
//   * a channel whose threshold is all ones (BAD_THR) is bad: it is left out of the mean and its
//     signal is forced to zero;
//   * a cluster is a run of adjacent strips of one sub-part whose signal exceeds its own
//     threshold. It is sent as a header word {1'b1, 1'b0, channel[13:0]} with the global number of
//     its first strip (FPGA_ID * 4608 + adc * 192 + strip), a length word, and one signed 16-bit
//     signal word per strip.
// Raw words are {4'b0, sample}, in the order adc 0 strip 0..191, adc 1 strip 0..191, ...
//
// Samples arrive as one vector of 24 values per strip (from sadc_rx) and are written into the
// event memory one ADC per clock, so the samples of two strips must be at least N_ADC+1 clocks
// apart (the readout gives 54). After reset the module spends N_ADC*N_STRIP clocks
// clearing the pedestals and sums and setting every threshold to DEF_THR; the thresholds are
// then normally reloaded from the EEPROM. Memories: event data (14-bit signed), pedestal
// (12-bit), threshold (12-bit), pedestal sum (22-bit), each N_ADC*N_STRIP deep.
// Interface: start (the trigger) begins an event in mode; the output is a valid/ready word
// stream; done pulses when the event's data has all been sent. Timing in compression mode, after
// the last strip: per chip 64 + 23 + 64 clocks of pre-processing (sum, divide, subtract; about
// 0.54 ms for 72 chips), then one clock per strip of scan plus 2 + length clocks per cluster
// sent (when the output is ready).
module data_process
  import stk_pkg::*;
#(
  parameter int unsigned N_ADC    = 24,
  parameter int unsigned N_STRIP  = 192,
  parameter int unsigned VA_CH    = 64,
  parameter int unsigned PED_LOG2 = 10,
  parameter int unsigned FPGA_ID  = 0,
  parameter logic [ADC_W-1:0] DEF_THR = 12'd40
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  mode_e                         mode,
  input  logic                          in_valid,
  input  logic [7:0]                    in_strip,
  input  logic [N_ADC-1:0][ADC_W-1:0]   in_sample,
  // threshold table access (EEPROM controller and commands)
  input  logic                          thr_we,
  input  logic [13:0]                   thr_waddr,
  input  logic [ADC_W-1:0]              thr_wdata,
  input  logic [13:0]                   thr_raddr,
  output logic [ADC_W-1:0]              thr_rdata,
  // output stream
  output logic                          o_valid,
  input  logic                          o_ready,
  output logic [15:0]                   o_data,
  output logic                          done,
  output logic                          busy,
  output logic                          ready,       // initialisation finished
  output logic                          ped_updated, // one clock when new pedestals are in place
  output logic [15:0]                   n_clusters,  // clusters sent in the last event
  output logic                          overrun      // a strip arrived before the last was stored
);
  localparam int unsigned N   = N_ADC * N_STRIP;
  localparam int unsigned AW  = $clog2(N + 1);
  localparam int unsigned SW  = ADC_W + PED_LOG2;   // pedestal sum width
  localparam int unsigned NG  = N / VA_CH;

  typedef enum logic [3:0] {
    S_INIT, S_IDLE, S_CAP, S_CAPW, S_UPD, S_SUM, S_DIV, S_SUB,
    S_SCAN, S_HDR0, S_HDR1, S_DATA, S_RAW, S_FIN
  } state_e;
  state_e state;

  logic signed [13:0]    dmem [N];
  logic [ADC_W-1:0]      ped  [N];
  logic [ADC_W-1:0]      thr  [N];
  logic [SW-1:0]         acc  [N];

  mode_e                 emode;
  logic [AW-1:0]         ptr, cl_start, resume;
  logic [7:0]            cap_strip;
  logic [N_ADC-1:0][ADC_W-1:0] cap;
  logic [$clog2(N_ADC)-1:0] wa;
  logic [PED_LOG2:0]     ev_cnt;
  logic [$clog2(VA_CH)-1:0] gcnt;
  logic signed [20:0]    gsum;
  logic [7:0]            ngood;
  logic [20:0]           dvd, quo;
  logic [21:0]           rem;
  logic [4:0]            dstep;
  logic signed [13:0]    cn;
  logic [8:0]            cl_len, emit_k;

  // ---------------- combinational helpers ----------------
  logic [AW-1:0] cap_idx;
  logic          bad_p, hit_p, last_strip_p;
  logic signed [14:0] diff_p;
  assign cap_idx      = AW'(wa) * AW'(N_STRIP) + AW'(cap_strip);
  assign bad_p        = (thr[ptr] == BAD_THR);
  assign diff_p       = 15'(dmem[ptr]) - 15'($signed({1'b0, ped[ptr]}));
  assign hit_p        = !bad_p && (dmem[ptr] > $signed({2'b00, thr[ptr]}));
  assign last_strip_p = ((ptr % AW'(N_STRIP)) == AW'(N_STRIP - 1));
  assign thr_rdata    = thr[thr_raddr];

  // ---------------- memory writes ----------------
  always_ff @(posedge clk) begin
    unique case (state)
      S_INIT: begin
        ped[ptr] <= '0; acc[ptr] <= '0; thr[ptr] <= DEF_THR; dmem[ptr] <= '0;
      end
      S_CAPW: begin
        dmem[cap_idx] <= 14'($signed({2'b00, cap[wa]}));
        if (emode == MODE_PED) acc[cap_idx] <= acc[cap_idx] + SW'(cap[wa]);
      end
      S_UPD: begin
        ped[ptr] <= ADC_W'(acc[ptr] >> PED_LOG2);
        acc[ptr] <= '0;
      end
      S_SUB: dmem[ptr] <= bad_p ? 14'sd0 : 14'(diff_p - 15'(cn));
      default: ;
    endcase
    if (thr_we && state != S_INIT && thr_waddr < 14'(N)) thr[thr_waddr] <= thr_wdata;
  end

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_INIT; ptr <= '0; emode <= MODE_RAW; cap_strip <= '0; cap <= '0; wa <= '0;
      ev_cnt <= '0; gcnt <= '0; gsum <= '0; ngood <= '0; dvd <= '0; quo <= '0; rem <= '0;
      dstep <= '0; cn <= '0; cl_len <= '0; emit_k <= '0; cl_start <= '0; resume <= '0;
      done <= 1'b0; ready <= 1'b0; ped_updated <= 1'b0; n_clusters <= '0; overrun <= 1'b0;
    end else begin
      done        <= 1'b0;
      ped_updated <= 1'b0;
      if (in_valid && state == S_CAPW) overrun <= 1'b1;
      unique case (state)
        S_INIT: if (ptr == AW'(N - 1)) begin ptr <= '0; ready <= 1'b1; state <= S_IDLE; end
                else ptr <= ptr + 1'b1;
        S_IDLE: if (start) begin
          emode <= mode; state <= S_CAP; n_clusters <= '0; overrun <= 1'b0;
        end
        S_CAP: if (in_valid) begin
          cap <= in_sample; cap_strip <= in_strip; wa <= '0; state <= S_CAPW;
        end
        S_CAPW: if (wa == $bits(wa)'(N_ADC - 1)) begin
          if (cap_strip == 8'(N_STRIP - 1)) begin
            ptr <= '0; gcnt <= '0; gsum <= '0; ngood <= '0;
            unique case (emode)
              MODE_PED: begin
                if (ev_cnt == (PED_LOG2+1)'((1 << PED_LOG2) - 1)) begin
                  ev_cnt <= '0; state <= S_UPD;
                end else begin
                  ev_cnt <= ev_cnt + 1'b1; state <= S_FIN;
                end
              end
              MODE_CMP: state <= S_SUM;
              default:  state <= S_RAW;
            endcase
          end else state <= S_CAP;
        end else wa <= wa + 1'b1;
        S_UPD: if (ptr == AW'(N - 1)) begin ped_updated <= 1'b1; state <= S_FIN; end
               else ptr <= ptr + 1'b1;
        // ---- pre-processing, one VA140 chip (VA_CH channels) at a time ----
        S_SUM: begin
          if (!bad_p) begin
            gsum  <= gsum + 21'(diff_p);
            ngood <= ngood + 1'b1;
          end
          gcnt <= gcnt + 1'b1;
          if (gcnt == $bits(gcnt)'(VA_CH - 1)) begin
            ptr   <= ptr - AW'(VA_CH - 1);
            state <= S_DIV;
            dstep <= '0;
            quo   <= '0;
            rem   <= '0;
            dvd   <= '0;
          end else ptr <= ptr + 1'b1;
        end
        S_DIV: begin
          // restoring division of |gsum| by ngood, one quotient bit per clock
          if (dstep == 5'd0) begin
            dvd   <= gsum[20] ? 21'(-gsum) : 21'(gsum);
            dstep <= 5'd1;
          end else if (dstep <= 5'd21) begin
            logic [21:0] r;
            r = {rem[20:0], dvd[20]};
            dvd <= {dvd[19:0], 1'b0};
            if (r >= 22'(ngood)) begin rem <= r - 22'(ngood); quo <= {quo[19:0], 1'b1}; end
            else begin rem <= r; quo <= {quo[19:0], 1'b0}; end
            dstep <= dstep + 1'b1;
          end else begin
            if (ngood == 0) cn <= '0;
            else cn <= gsum[20] ? -14'(quo) : 14'(quo);
            state <= S_SUB;
          end
        end
        S_SUB: begin
          gcnt <= gcnt + 1'b1;
          if (gcnt == $bits(gcnt)'(VA_CH - 1)) begin
            gsum <= '0; ngood <= '0;
            if (ptr == AW'(N - 1)) begin ptr <= '0; cl_len <= '0; state <= S_SCAN; end
            else begin ptr <= ptr + 1'b1; state <= S_SUM; end
          end else ptr <= ptr + 1'b1;
        end
        // ---- cluster finding ----
        S_SCAN: begin
          if (hit_p) begin
            if (cl_len == 0) cl_start <= ptr;
            cl_len <= cl_len + 1'b1;
            if (last_strip_p) begin resume <= ptr + 1'b1; state <= S_HDR0; end
            else if (ptr == AW'(N - 1)) state <= S_FIN;
            else ptr <= ptr + 1'b1;
          end else if (cl_len != 0) begin
            resume <= ptr + 1'b1; state <= S_HDR0;
          end else if (ptr == AW'(N - 1)) state <= S_FIN;
          else ptr <= ptr + 1'b1;
        end
        S_HDR0: if (o_ready) state <= S_HDR1;
        S_HDR1: if (o_ready) begin ptr <= cl_start; emit_k <= '0; state <= S_DATA; end
        S_DATA: if (o_ready) begin
          if (emit_k == cl_len - 1'b1) begin
            n_clusters <= n_clusters + 1'b1;
            cl_len     <= '0;
            if (resume == AW'(N)) state <= S_FIN;
            else begin ptr <= resume; state <= S_SCAN; end
          end else begin
            emit_k <= emit_k + 1'b1; ptr <= ptr + 1'b1;
          end
        end
        S_RAW: if (o_ready) begin
          if (ptr == AW'(N - 1)) state <= S_FIN;
          else ptr <= ptr + 1'b1;
        end
        S_FIN: begin done <= 1'b1; ptr <= '0; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- output stream ----------------
  logic [13:0] glob_ch;
  assign glob_ch = 14'(FPGA_ID * N) + 14'(cl_start);
  always_comb begin
    o_valid = 1'b0;
    o_data  = '0;
    unique case (state)
      S_HDR0: begin o_valid = 1'b1; o_data = {2'b10, glob_ch}; end
      S_HDR1: begin o_valid = 1'b1; o_data = 16'(cl_len); end
      S_DATA: begin o_valid = 1'b1; o_data = 16'(dmem[ptr]); end
      S_RAW:  begin o_valid = 1'b1; o_data = {4'h0, dmem[ptr][ADC_W-1:0]}; end
      default: ;
    endcase
  end
  assign busy = (state != S_IDLE) && (state != S_INIT);

  // The memory layout assumes whole VA140 chips per sub-part.
  initial assert (N_STRIP % VA_CH == 0) else $error("N_STRIP must be a multiple of VA_CH");
endmodule
