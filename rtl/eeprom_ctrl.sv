// eeprom_ctrl: keeps the per-channel compression thresholds in the external EEPROM (EEPROM_Ctrl).
//
// The thresholds used by the data compression (one per strip; a very high value masks a noisy
// channel) are stored in an EEPROM (EE1M08, 128K x 8) and loaded into both Data_Process modules,
// as the design description says. This design loads them automatically once both modules have
// finished their own initialisation (dp_ready rising), and again on a load command; a store
// command copies the current table into the EEPROM.
// Layout: channel c (0 .. N_CH-1, master FPGA first) at bytes 2c (high nibble) and 2c+1 (low
// byte); then a 16-bit cumulative checksum, the byte sum of the table, high byte first. A load
// whose checksum differs sets chk_err (the thresholds are still applied).
// Timing: a read takes T_RD clocks per byte with ce_n and oe_n low (so a load of 9216 channels
// takes about 2*9216*T_RD clocks, 3.7 ms at the defaults). A byte write holds we_n low for T_WP
// clocks and then waits T_WC clocks for the internal write cycle; the 10 ms default is an
// assumption for the part, making a full store take about 3 minutes.
module eeprom_ctrl #(
  parameter int unsigned N_CH = 9216,
  parameter int unsigned AW   = 17,
  parameter int unsigned T_RD = 4,
  parameter int unsigned T_WP = 4,
  parameter int unsigned T_WC = 200_000
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          dp_ready,
  input  logic          load_req,
  input  logic          store_req,
  // EEPROM pins
  output logic [AW-1:0] ee_addr,
  output logic [7:0]    ee_dq_o,
  input  logic [7:0]    ee_dq_i,
  output logic          ee_dq_oe,
  output logic          ee_ce_n,
  output logic          ee_we_n,
  output logic          ee_oe_n,
  // threshold table
  output logic          thr_we,
  output logic [13:0]   thr_addr,
  output logic [11:0]   thr_wdata,
  output logic [13:0]   thr_raddr,
  input  logic [11:0]   thr_rdata,
  output logic          busy,
  output logic          chk_err,
  output logic          load_done
);
  localparam int unsigned NB = 2 * N_CH + 2;   // table plus checksum
  typedef enum logic [2:0] {IDLE, RD, WR_P, WR_C} state_e;
  state_e        state;
  logic [AW-1:0] a;
  logic [17:0]   cnt;
  logic [15:0]   sum;
  logic [7:0]    hi;
  logic          rdy_q;

  assign busy = (state != IDLE) || (dp_ready && !rdy_q);   // covers the cycle before the boot load starts

  // byte to write at address a
  logic [7:0] wbyte;
  always_comb begin
    if (a == AW'(NB - 2))      wbyte = sum[15:8];
    else if (a == AW'(NB - 1)) wbyte = sum[7:0];
    else if (!a[0])            wbyte = {4'h0, thr_rdata[11:8]};
    else                       wbyte = thr_rdata[7:0];
  end
  assign thr_raddr = 14'(a >> 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; a <= '0; cnt <= '0; sum <= '0; hi <= '0; rdy_q <= 1'b0;
      ee_addr <= '0; ee_dq_o <= '0; ee_dq_oe <= 1'b0; ee_ce_n <= 1'b1; ee_we_n <= 1'b1;
      ee_oe_n <= 1'b1; thr_we <= 1'b0; thr_addr <= '0; thr_wdata <= '0; chk_err <= 1'b0;
      load_done <= 1'b0;
    end else begin
      rdy_q     <= dp_ready;
      thr_we    <= 1'b0;
      load_done <= 1'b0;
      unique case (state)
        IDLE: begin
          ee_ce_n <= 1'b1; ee_oe_n <= 1'b1; ee_we_n <= 1'b1; ee_dq_oe <= 1'b0;
          if (dp_ready && ((dp_ready && !rdy_q) || load_req)) begin
            a <= '0; cnt <= '0; sum <= '0; state <= RD;
            ee_addr <= '0; ee_ce_n <= 1'b0; ee_oe_n <= 1'b0;
          end else if (dp_ready && store_req) begin
            a <= '0; cnt <= '0; sum <= '0; state <= WR_P;
          end
        end
        RD: if (cnt == 18'(T_RD - 1)) begin
          cnt <= '0;
          if (a < AW'(NB - 2)) sum <= sum + 16'(ee_dq_i);
          if (a == AW'(NB - 2)) hi <= ee_dq_i;
          else if (a == AW'(NB - 1)) chk_err <= ({hi, ee_dq_i} != sum);
          else if (!a[0]) hi <= ee_dq_i;
          else begin
            thr_we <= 1'b1; thr_addr <= 14'(a >> 1); thr_wdata <= {hi[3:0], ee_dq_i};
          end
          if (a == AW'(NB - 1)) begin
            state <= IDLE; ee_ce_n <= 1'b1; ee_oe_n <= 1'b1; load_done <= 1'b1;
          end else begin a <= a + 1'b1; ee_addr <= a + 1'b1; end
        end else cnt <= cnt + 1'b1;
        WR_P: begin
          // drive address and data, pulse we_n low for T_WP clocks
          ee_addr <= a; ee_dq_o <= wbyte; ee_dq_oe <= 1'b1; ee_ce_n <= 1'b0;
          ee_we_n <= (cnt == 18'(T_WP)) ? 1'b1 : 1'b0;
          if (cnt == 18'(T_WP)) begin
            cnt <= '0; state <= WR_C;
            if (a < AW'(NB - 2)) sum <= sum + 16'(wbyte);
          end else cnt <= cnt + 1'b1;
        end
        WR_C: begin
          ee_ce_n <= 1'b1; ee_dq_oe <= 1'b0;
          if (cnt == 18'(T_WC - 1)) begin
            cnt <= '0;
            if (a == AW'(NB - 1)) state <= IDLE;
            else begin a <= a + 1'b1; state <= WR_P; end
          end else cnt <= cnt + 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
