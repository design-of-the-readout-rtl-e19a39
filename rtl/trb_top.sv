// trb_top: digital logic of one Tracker Readout Board (master and slave FPGA together).
//
// A TRB reads 24 silicon ladders (9216 strips) after every global trigger, reduces the data and
// sends it to the payload data handling unit (PDHU). Following the block diagram of the design
// description, the master FPGA holds the trigger and command receivers (trigger_rx, rs422_com),
// the VA140/ADC sequencer (daq_driver), one Data_Process module for ADCs 0..23, the SRAM event
// buffer (cirbuf_ctl), the LVDS transmitter (lvds_tx) and the EEPROM controller (eeprom_ctrl).
// The slave FPGA holds the second Data_Process module (ADCs 24..47), the house-keeping
// acquisition (hk_ctrl) and the SEL/HV control (sel_hv_ctl). The calibration DAC sequencer
// (cal_ctrl) sits with the master, which drives the calibration pulse generator. The link between
// the two FPGAs is not described; here the signals simply cross as wires.
//
// Event flow: trigger accepted (not busy) -> all 48 ADCs convert strip by strip while both
// Data_Process modules store the samples -> each processes according to the working mode ->
// the event buffer stores master then slave data as one frame -> the frame is sent on the LVDS
// bus while later events are taken. busy (the dead time) covers the readout, the processing and
// the storing of the frame; a trigger arriving during it is counted as lost.
// Configuration registers (mode, bus selection) are triple-redundant. Commands: see stk_pkg.
// House-keeping reply bytes (NB = 50):
//   0 mode  1 {5'b0, bus_sel}  2-3 triggers  4-5 lost triggers  6-7 dropped frames
//   8-9 truncated frames  10 command errors  11 calibration step  12-19 SEL trips per group
//   20-29 ADC-1 channels 0..9 (bits 11:4)  30-39 ADC-2 channels 0..9 (bits 11:4)
//   40-41 seconds  42 frames waiting  43 LVDS underruns  44-45 frames sent
//   46 {EEPROM checksum error, ADC lead-bit error, sample overrun, DAC busy, EEPROM busy, 3'b0}
//   47 corrected SEU count  48 pedestal updates  49 clusters in the last event (both FPGAs)
// The ADC count per FPGA, strip count, SRAM and EEPROM address widths and clock rates are
// parameters with the published values as defaults.
module trb_top
  import stk_pkg::*;
#(
  parameter int unsigned N_ADC     = 24,
  parameter int unsigned N_STRIP   = 192,
  parameter int unsigned PED_LOG2  = 10,
  parameter int unsigned UART_DIV  = 174,
  parameter int unsigned HK_TICK   = CLK_HZ,
  parameter int unsigned SEL_OFF   = CLK_HZ,
  parameter int unsigned EE_T_WC   = 200_000,
  parameter int unsigned CAL_EV    = 100,
  parameter int unsigned SRAM_AW   = 17
) (
  input  logic                 clk,          // 20 MHz
  input  logic                 rst_n,
  input  logic [7:0]           trb_id,
  // PDHU trigger (RS422, falling edge), main and backup
  input  logic                 trig_a_n,
  input  logic                 trig_b_n,
  // PDHU command/state UART, main and backup
  input  logic                 uart_rx_a,
  input  logic                 uart_rx_b,
  output logic                 uart_tx_a,
  output logic                 uart_tx_b,
  output logic                 uart_txen_a,
  output logic                 uart_txen_b,
  // PDHU science data (LVDS, bit clock = clk), main and backup
  output logic                 lvds_data_a,
  output logic                 lvds_frame_a,
  output logic                 lvds_data_b,
  output logic                 lvds_frame_b,
  // VA140 drivers (to the level shifters)
  output logic                 va_ckb,
  output logic                 va_holdb,
  output logic                 va_dreset,
  output logic                 va_shift_in,
  output logic                 va_test_on,
  // calibration pulse generator
  output logic                 cal_sw,
  output logic                 dac_fs_n,
  output logic                 dac_sclk,
  output logic                 dac_din,
  // science ADCs (AD7476): shared control, one data line each
  output logic                 sadc_cs_n,
  output logic                 sadc_sclk,
  input  logic [2*N_ADC-1:0]   sadc_sdata,
  // SRAM
  output logic [SRAM_AW-1:0]   sram_addr,
  output logic [7:0]           sram_dq_o,
  input  logic [7:0]           sram_dq_i,
  output logic                 sram_dq_oe,
  output logic                 sram_ce_n,
  output logic                 sram_we_n,
  output logic                 sram_oe_n,
  // EEPROM
  output logic [16:0]          ee_addr,
  output logic [7:0]           ee_dq_o,
  input  logic [7:0]           ee_dq_i,
  output logic                 ee_dq_oe,
  output logic                 ee_ce_n,
  output logic                 ee_we_n,
  output logic                 ee_oe_n,
  // house-keeping ADCs
  output logic                 hk_cs_n,
  output logic                 hk_sclk,
  output logic [3:0]           hk_mux,
  input  logic [1:0]           hk_sdata,
  // power control
  output logic [N_SEL_GRP-1:0] ldo_en,
  output logic [1:0]           hv_en_a,
  output logic [1:0]           hv_en_b,
  // status
  output logic                 busy
);
  localparam int unsigned NPF = N_ADC * N_STRIP;    // channels per FPGA
  localparam int unsigned NB  = 50;

  // ---------------- configuration (TMR) ----------------
  logic     cmd_valid;
  command_t cmd;
  logic [1:0] mode_q;
  logic [2:0] bus_q;
  logic       mode_err, bus_err;
  mode_e      mode;

  tmr_reg #(.WIDTH(2), .RESET_VAL(2'(MODE_CMP))) u_mode (
    .clk, .rst_n, .we(cmd_valid && cmd.cmd == CMD_SET_MODE), .d(cmd.arg[1:0]),
    .q(mode_q), .err(mode_err));
  tmr_reg #(.WIDTH(3), .RESET_VAL(3'b000)) u_bus (
    .clk, .rst_n, .we(cmd_valid && cmd.cmd == CMD_BUS_SEL), .d(cmd.arg[2:0]),
    .q(bus_q), .err(bus_err));
  assign mode = mode_e'(mode_q);

  // ---------------- trigger ----------------
  logic        trig;
  logic [15:0] trig_cnt, lost_cnt;
  trigger_rx u_trig (.clk, .rst_n, .trig_a_n, .trig_b_n, .bus_sel(bus_q[0]), .busy,
                     .trig, .trig_cnt, .lost_cnt);

  // ---------------- readout sequencer ----------------
  logic       daq_busy, daq_done, bit_en, word_done;
  logic [7:0] strip;
  logic       cal_mode;
  assign cal_mode = (mode == MODE_CAL);
  daq_driver #(.N_STRIP(N_STRIP)) u_daq (
    .clk, .rst_n, .start(trig), .cal_mode, .busy(daq_busy), .done(daq_done),
    .va_ckb, .va_holdb, .va_dreset, .va_shift_in, .va_test_on, .cal_sw,
    .adc_cs_n(sadc_cs_n), .adc_sclk(sadc_sclk), .bit_en, .word_done, .strip);

  logic [3:0]  cal_step;
  logic [11:0] cal_code;   // DAC code in use, visible in simulation
  logic        dac_busy;
  cal_ctrl #(.EV_STEP(CAL_EV)) u_cal (
    .clk, .rst_n, .cal_mode, .daq_done, .dac_fs_n, .dac_sclk, .dac_din,
    .step(cal_step), .code(cal_code), .dac_busy);

  // ---------------- two Data_Process modules ----------------
  logic [1:0]                        s_valid, lead_err;
  logic [1:0][7:0]                   s_strip;
  logic [1:0][N_ADC-1:0][ADC_W-1:0]  s_sample;
  logic [1:0]                        dp_valid, dp_ready_o, dp_done, dp_busy, dp_init;
  logic [1:0]                        ped_upd, dp_ovr;
  logic [1:0][15:0]                  dp_data, dp_ncl;
  logic [1:0][ADC_W-1:0]             thr_rd;
  logic                              thr_we;
  logic [13:0]                       thr_addr, thr_raddr;
  logic [11:0]                       thr_wdata;

  for (genvar f = 0; f < 2; f++) begin : g_fpga
    sadc_rx #(.N(N_ADC), .ADC_W(ADC_W)) u_rx (
      .clk, .rst_n, .sdata(sadc_sdata[f*N_ADC +: N_ADC]), .bit_en, .word_done, .strip_in(strip),
      .valid(s_valid[f]), .strip(s_strip[f]), .sample(s_sample[f]), .lead_err(lead_err[f]));
    data_process #(.N_ADC(N_ADC), .N_STRIP(N_STRIP), .PED_LOG2(PED_LOG2), .FPGA_ID(f)) u_dp (
      .clk, .rst_n, .start(trig), .mode, .in_valid(s_valid[f]), .in_strip(s_strip[f]),
      .in_sample(s_sample[f]),
      .thr_we(thr_we && (f == 0 ? thr_addr < 14'(NPF) : thr_addr >= 14'(NPF))),
      .thr_waddr(f == 0 ? thr_addr : thr_addr - 14'(NPF)), .thr_wdata,
      .thr_raddr(f == 0 ? thr_raddr : thr_raddr - 14'(NPF)), .thr_rdata(thr_rd[f]),
      .o_valid(dp_valid[f]), .o_ready(dp_ready_o[f]), .o_data(dp_data[f]), .done(dp_done[f]),
      .busy(dp_busy[f]), .ready(dp_init[f]), .ped_updated(ped_upd[f]), .n_clusters(dp_ncl[f]),
      .overrun(dp_ovr[f]));
  end

  // ---------------- threshold table: EEPROM and commands ----------------
  logic        ee_thr_we, ee_busy, ee_chk_err, ee_load_done;
  logic [13:0] ee_thr_addr, ee_thr_raddr;
  logic [11:0] ee_thr_wdata;
  logic [13:0] cmd_ptr;
  eeprom_ctrl #(.N_CH(2 * NPF), .T_WC(EE_T_WC)) u_ee (
    .clk, .rst_n, .dp_ready(&dp_init),
    .load_req(cmd_valid && cmd.cmd == CMD_EE_LOAD),
    .store_req(cmd_valid && cmd.cmd == CMD_EE_STORE),
    .ee_addr, .ee_dq_o, .ee_dq_i, .ee_dq_oe, .ee_ce_n, .ee_we_n, .ee_oe_n,
    .thr_we(ee_thr_we), .thr_addr(ee_thr_addr), .thr_wdata(ee_thr_wdata),
    .thr_raddr(ee_thr_raddr), .thr_rdata(ee_thr_raddr < 14'(NPF) ? thr_rd[0] : thr_rd[1]),
    .busy(ee_busy), .chk_err(ee_chk_err), .load_done(ee_load_done));
  assign thr_raddr = ee_thr_raddr;

  logic cmd_thr_we;
  assign cmd_thr_we = cmd_valid && cmd.cmd == CMD_THR_DATA && !ee_busy;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cmd_ptr <= '0;
    else if (cmd_valid && cmd.cmd == CMD_THR_ADDR) cmd_ptr <= cmd.arg[13:0];
    else if (cmd_thr_we) cmd_ptr <= cmd_ptr + 1'b1;
  end
  assign thr_we    = ee_thr_we || cmd_thr_we;
  assign thr_addr  = ee_thr_we ? ee_thr_addr  : cmd_ptr;
  assign thr_wdata = ee_thr_we ? ee_thr_wdata : cmd.arg[11:0];

  // ---------------- event buffer and LVDS ----------------
  logic        cb_valid, cb_ready, cb_last, cb_busy;
  logic [7:0]  cb_data, n_frames;
  logic [15:0] drop_cnt, trunc_cnt, frames_sent;
  logic [7:0]  underrun_cnt;
  cirbuf_ctl #(.AW(SRAM_AW)) u_cb (
    .clk, .rst_n, .ev_start(trig), .ev_mode(mode), .trig_num(trig_cnt), .trb_id,
    .in0_valid(dp_valid[0]), .in0_ready(dp_ready_o[0]), .in0_data(dp_data[0]), .in0_done(dp_done[0]),
    .in1_valid(dp_valid[1]), .in1_ready(dp_ready_o[1]), .in1_data(dp_data[1]), .in1_done(dp_done[1]),
    .sram_addr, .sram_dq_o, .sram_dq_i, .sram_dq_oe, .sram_ce_n, .sram_we_n, .sram_oe_n,
    .o_valid(cb_valid), .o_ready(cb_ready), .o_data(cb_data), .o_last(cb_last),
    .wr_busy(cb_busy), .n_frames, .drop_cnt, .trunc_cnt);
  lvds_tx u_lvds (
    .clk, .rst_n, .bus_sel(bus_q[2]), .i_valid(cb_valid), .i_ready(cb_ready), .i_data(cb_data),
    .i_last(cb_last), .data_a(lvds_data_a), .frame_a(lvds_frame_a), .data_b(lvds_data_b),
    .frame_b(lvds_frame_b), .frames_sent, .underrun_cnt);

  assign busy = daq_busy || (|dp_busy) || cb_busy || !(&dp_init) || ee_busy;

  // ---------------- slave: house-keeping, SEL and HV ----------------
  logic [1:0][9:0][11:0]    hk_val;
  logic                     hk_scan;
  logic [15:0]              seconds;
  logic [N_SEL_GRP-1:0][7:0] sel_cnt;
  logic                     sel_seu;
  hk_ctrl #(.TICK(HK_TICK), .N_MUX(10)) u_hk (
    .clk, .rst_n, .adc_cs_n(hk_cs_n), .adc_sclk(hk_sclk), .mux(hk_mux), .adc_sdata(hk_sdata),
    .val(hk_val), .scan_done(hk_scan), .seconds);
  sel_hv_ctl #(.N_GRP(N_SEL_GRP), .OFF_CLKS(SEL_OFF)) u_sel (
    .clk, .rst_n, .cur(hk_val[0][N_SEL_GRP-1:0]), .cur_valid(hk_scan),
    .thr_we(cmd_valid && cmd.cmd == CMD_SEL_THR), .thr_grp(cmd.arg[15:12]),
    .thr_val(cmd.arg[11:0]), .hv_we(cmd_valid && cmd.cmd == CMD_HV), .hv_val(cmd.arg[3:0]),
    .ldo_en, .hv_en_a, .hv_en_b, .sel_cnt, .seu_err(sel_seu));

  // ---------------- command/state link ----------------
  logic [NB-1:0][7:0] hk_bytes;
  logic [7:0]         cmd_err;
  logic [7:0]         seu_cnt, ped_cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seu_cnt <= '0; ped_cnt <= '0;
    end else begin
      if ((mode_err || bus_err || sel_seu) && seu_cnt != 8'hFF) seu_cnt <= seu_cnt + 1'b1;
      if (ped_upd[0]) ped_cnt <= ped_cnt + 1'b1;
    end
  end
  always_comb begin
    hk_bytes[0]  = {6'b0, mode_q};
    hk_bytes[1]  = {5'b0, bus_q};
    hk_bytes[2]  = trig_cnt[15:8];  hk_bytes[3] = trig_cnt[7:0];
    hk_bytes[4]  = lost_cnt[15:8];  hk_bytes[5] = lost_cnt[7:0];
    hk_bytes[6]  = drop_cnt[15:8];  hk_bytes[7] = drop_cnt[7:0];
    hk_bytes[8]  = trunc_cnt[15:8]; hk_bytes[9] = trunc_cnt[7:0];
    hk_bytes[10] = cmd_err;
    hk_bytes[11] = {4'b0, cal_step};
    for (int g = 0; g < N_SEL_GRP; g++) hk_bytes[12 + g] = sel_cnt[g];
    for (int m = 0; m < 10; m++) begin
      hk_bytes[20 + m] = hk_val[0][m][11:4];
      hk_bytes[30 + m] = hk_val[1][m][11:4];
    end
    hk_bytes[40] = seconds[15:8];   hk_bytes[41] = seconds[7:0];
    hk_bytes[42] = n_frames;        hk_bytes[43] = underrun_cnt;
    hk_bytes[44] = frames_sent[15:8]; hk_bytes[45] = frames_sent[7:0];
    hk_bytes[46] = {ee_chk_err, |lead_err, |dp_ovr, dac_busy, ee_busy, 3'b0};
    hk_bytes[47] = seu_cnt;
    hk_bytes[48] = ped_cnt;
    hk_bytes[49] = 8'(dp_ncl[0] + dp_ncl[1]);
  end
  rs422_com #(.DIV(UART_DIV), .NB(NB)) u_com (
    .clk, .rst_n, .trb_id, .bus_sel(bus_q[1]), .rxd_a(uart_rx_a), .rxd_b(uart_rx_b),
    .txd_a(uart_tx_a), .txd_b(uart_tx_b), .tx_en_a(uart_txen_a), .tx_en_b(uart_txen_b),
    .hk_bytes, .cmd_valid, .cmd, .err_cnt(cmd_err));
endmodule
