// tb_trb_top: end-to-end test of one TRB at reduced size (4 ADCs per FPGA, 128 strips each).
//
// The testbench plays the PDHU (trigger lines, command UART, LVDS receiver) and models the
// front end, the SRAM, the EEPROM and the house-keeping ADCs. It runs all four working modes and
// checks every science frame received on the LVDS bus: sync word, CRC, header, and the payload
// against a reference computed from the stimulus definitions (raw samples; clusters after
// pedestal and common-noise subtraction, using the pedestals expected from the pedestal run).
// It also makes each mechanism happen and counts it: lost triggers, pedestal update,
// calibration steps, clusters, truncation at the 2000-byte limit, ring-buffer overflow, SEL
// power cycling, HV switching, backup buses, EEPROM load and store, house-keeping polls and a
// corrected register upset. A mechanism that never happened counts as a failure.
module tb_trb_top;
  import stk_pkg::*;
  import tb_stk_ref_pkg::*;
  localparam int NA = 4, NS = 128, VC = 64, PL = 2, DIV = 16, AWS = 12;
  localparam int NPF = NA * NS, NCH = 2 * NPF;
  localparam int HK_TICK = 30000, SEL_OFF = 8000;

  logic clk = 0, rst_n = 0;
  logic trig_a_n = 1, trig_b_n = 1, uart_rx_a = 1, uart_rx_b = 1;
  logic uart_tx_a, uart_tx_b, uart_txen_a, uart_txen_b;
  logic lvds_data_a, lvds_frame_a, lvds_data_b, lvds_frame_b;
  logic va_ckb, va_holdb, va_dreset, va_shift_in, va_test_on, cal_sw, dac_fs_n, dac_sclk, dac_din;
  logic sadc_cs_n, sadc_sclk;
  logic [2*NA-1:0] sadc_sdata;
  logic [AWS-1:0] sram_addr;
  logic [7:0] sram_dq_o, sram_dq_i, ee_dq_o, ee_dq_i;
  logic sram_dq_oe, sram_ce_n, sram_we_n, sram_oe_n;
  logic [16:0] ee_addr;
  logic ee_dq_oe, ee_ce_n, ee_we_n, ee_oe_n;
  logic hk_cs_n, hk_sclk;
  logic [3:0] hk_mux;
  logic [1:0] hk_sdata;
  logic [7:0] ldo_en;
  logic [1:0] hv_en_a, hv_en_b;
  logic busy;
  int checks = 0, failures = 0;
  always #25 clk = ~clk;   // 20 MHz

  trb_top #(.N_ADC(NA), .N_STRIP(NS), .PED_LOG2(PL), .UART_DIV(DIV), .HK_TICK(HK_TICK),
            .SEL_OFF(SEL_OFF), .EE_T_WC(5), .CAL_EV(2), .SRAM_AW(AWS)) dut (.*, .trb_id(8'h21));

  va_sadc_model #(.N(NA), .N_STRIP(NS), .VA_CH(VC), .ADC_OFS(0)) fe0 (
    .holdb(va_holdb), .ckb(va_ckb), .shift_in(va_shift_in), .cs_n(sadc_cs_n), .sclk(sadc_sclk),
    .sdata(sadc_sdata[NA-1:0]));
  va_sadc_model #(.N(NA), .N_STRIP(NS), .VA_CH(VC), .ADC_OFS(NA)) fe1 (
    .holdb(va_holdb), .ckb(va_ckb), .shift_in(va_shift_in), .cs_n(sadc_cs_n), .sclk(sadc_sclk),
    .sdata(sadc_sdata[2*NA-1:NA]));
  sram_model #(.AW(AWS)) sram (.clk, .addr(sram_addr), .din(sram_dq_o), .dout(sram_dq_i),
                               .ce_n(sram_ce_n), .we_n(sram_we_n));
  sram_model #(.AW(17)) eeprom (.clk, .addr(ee_addr), .din(ee_dq_o), .dout(ee_dq_i),
                                .ce_n(ee_ce_n), .we_n(ee_we_n));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- house-keeping ADCs: group 3 over-current while sel_spike is set ----------------
  bit sel_spike = 0;
  logic [1:0][15:0] hsh;
  always @(negedge hk_cs_n) for (int i = 0; i < 2; i++) begin
    hsh[i] = (i == 0 && hk_mux == 3 && sel_spike) ? 16'd4000 : 16'(100 + 10 * hk_mux + i);
    hk_sdata[i] = hsh[i][15];
  end
  always @(negedge hk_sclk) if (!hk_cs_n) for (int i = 0; i < 2; i++) begin
    hsh[i] = hsh[i] << 1; hk_sdata[i] = hsh[i][15];
  end

  // ---------------- PDHU side ----------------
  bit bus_b = 0;
  task automatic uart_byte(input logic [7:0] b);
    logic [10:0] f;
    f = {1'b1, ~(^b), b, 1'b0};
    for (int i = 0; i < 11; i++) begin
      if (bus_b) uart_rx_b = f[i]; else uart_rx_a = f[i];
      repeat (DIV) @(posedge clk);
    end
  endtask
  task automatic command(input cmd_e c, input logic [15:0] arg);
    logic [7:0] id;
    id = 8'h21;
    uart_byte(8'hEB); uart_byte(8'h90); uart_byte(id); uart_byte(c);
    uart_byte(arg[15:8]); uart_byte(arg[7:0]); uart_byte(8'(id + c + arg[15:8] + arg[7:0]));
    repeat (4) @(posedge clk);
  endtask

  // reply receiver
  logic [7:0] rep [$];
  initial forever begin
    logic [10:0] f;
    @(negedge (bus_b ? uart_tx_b : uart_tx_a));
    repeat (DIV / 2) @(posedge clk);
    for (int i = 0; i < 11; i++) begin
      f[i] = bus_b ? uart_tx_b : uart_tx_a;
      if (i < 10) repeat (DIV) @(posedge clk);
    end
    rep.push_back(f[8:1]);
  end
  task automatic poll(output logic [7:0] hk [$]);
    rep.delete();
    command(CMD_HK_POLL, 16'h0);
    repeat (12 * DIV * 56) @(posedge clk);
    hk = rep;
  endtask

  int n_trig = 0;
  task automatic fire(input bit line_b);
    @(negedge clk);
    if (line_b) trig_b_n = 0; else trig_a_n = 0;
    repeat (10) @(negedge clk);
    trig_a_n = 1; trig_b_n = 1;
    repeat (4) @(negedge clk);
  endtask
  task automatic wait_idle();
    repeat (5) @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  // LVDS receiver: frames with their check results
  typedef struct { logic [7:0] b [$]; bit crc_ok; bit sync_ok; bit on_b; } frame_t;
  frame_t frames [$];
  logic bits [$];
  logic fr_q = 0, fr_b_q = 0;
  always @(posedge clk) if (!rst_n) begin
    bits.delete();
    fr_q <= 0;
  end else begin
    if (lvds_frame_a || lvds_frame_b) bits.push_back(lvds_frame_a ? lvds_data_a : lvds_data_b);
    if (fr_q && !(lvds_frame_a || lvds_frame_b)) begin
      automatic frame_t f;
      automatic logic [15:0] c;
      automatic logic [7:0] all [$];
      for (int k = 0; k + 8 <= bits.size(); k += 8) begin
        logic [7:0] v;
        for (int j = 0; j < 8; j++) v[7 - j] = bits[k + j];
        all.push_back(v);
      end
      f.sync_ok = all.size() >= 4 && all[0] == 8'hEB && all[1] == 8'h90 && (bits.size() % 8 == 0);
      c = 16'hFFFF;
      for (int k = 2; k < all.size() - 2; k++) begin f.b.push_back(all[k]); c = crc_byte(c, all[k]); end
      f.crc_ok = all.size() >= 4 && {all[all.size() - 2], all[all.size() - 1]} == c;
      f.on_b = fr_b_q;
      frames.push_back(f);
      bits.delete();
    end
    fr_q <= lvds_frame_a || lvds_frame_b;
    fr_b_q <= lvds_frame_b;
  end

  // ---------------- reference ----------------
  int thr_ref [NCH];
  int ped_ref [NCH];

  function automatic void ref_cmp(int ev, ref logic [7:0] pay [$], output int ncl);
    int sig [NCH];
    pay.delete();
    ncl = 0;
    for (int a = 0; a < 2 * NA; a++)
      for (int v = 0; v < NS / VC; v++) begin
        int sum, ng, cn;
        sum = 0; ng = 0;
        for (int s = v * VC; s < (v + 1) * VC; s++)
          if (thr_ref[a * NS + s] != 4095) begin sum += adc_value(ev, a, s, NS, VC) - ped_ref[a * NS + s]; ng++; end
        cn = (ng == 0) ? 0 : sum / ng;
        for (int s = v * VC; s < (v + 1) * VC; s++)
          sig[a * NS + s] = (thr_ref[a * NS + s] == 4095) ? 0 : adc_value(ev, a, s, NS, VC) - ped_ref[a * NS + s] - cn;
      end
    for (int a = 0; a < 2 * NA; a++) begin
      int s;
      s = 0;
      while (s < NS) begin
        int i;
        i = a * NS + s;
        if (thr_ref[i] != 4095 && sig[i] > thr_ref[i]) begin
          int len;
          logic [15:0] w;
          len = 0;
          while (s + len < NS && thr_ref[i + len] != 4095 && sig[i + len] > thr_ref[i + len]) len++;
          w = {2'b10, 14'(i)};  pay.push_back(w[15:8]); pay.push_back(w[7:0]);
          w = 16'(len);         pay.push_back(w[15:8]); pay.push_back(w[7:0]);
          for (int k = 0; k < len; k++) begin
            w = 16'(sig[i + k]); pay.push_back(w[15:8]); pay.push_back(w[7:0]);
          end
          ncl++;
          s += len;
        end else s++;
      end
    end
  endfunction

  function automatic void ref_raw(int ev, ref logic [7:0] pay [$]);
    pay.delete();
    for (int a = 0; a < 2 * NA; a++)
      for (int s = 0; s < NS; s++) begin
        pay.push_back(8'(adc_value(ev, a, s, NS, VC) >> 8));
        pay.push_back(8'(adc_value(ev, a, s, NS, VC)));
      end
  endfunction

  function automatic bit same(ref logic [7:0] a [$], ref logic [7:0] b [$]);
    if (a.size() > b.size()) return 0;
    for (int i = 0; i < a.size(); i++) if (a[i] !== b[i]) return 0;
    return 1;
  endfunction

  // checks frame k: header fields and payload
  task automatic check_frame(input int k, input int trig_no, input mode_e m, input logic [7:0] pay [$],
                             input string what);
    logic [7:0] hdr [$];
    checks++;
    if (k >= frames.size()) begin failures++; $display("FAIL: %s: no frame", what); return; end
    hdr = {8'(pay.size() >> 8), 8'(pay.size()), 8'(trig_no >> 8), 8'(trig_no), 8'(m), 8'h21};
    hdr = {hdr, pay};
    if (!frames[k].sync_ok || !frames[k].crc_ok || frames[k].b.size() != hdr.size() || !same(frames[k].b, hdr)) begin
      failures++;
      $display("FAIL: %s: sync %0d crc %0d, %0d bytes, expected %0d", what, frames[k].sync_ok,
               frames[k].crc_ok, frames[k].b.size(), hdr.size());
    end
  endtask

  // EEPROM image of a threshold table
  task automatic ee_image();
    int sum;
    sum = 0;
    for (int c = 0; c < NCH; c++) begin
      eeprom.mem[2 * c] = {4'h0, 4'(thr_ref[c] >> 8)}; eeprom.mem[2 * c + 1] = 8'(thr_ref[c]);
      sum += (thr_ref[c] >> 8) + (thr_ref[c] & 255);
    end
    eeprom.mem[2 * NCH] = 8'(sum >> 8); eeprom.mem[2 * NCH + 1] = 8'(sum);
  endtask

  // mechanism counters
  int m_lost, m_ped, m_cal_pulse, m_cal_step, m_clusters, m_trunc, m_drop, m_sel, m_hv, m_backup,
      m_ee_load, m_ee_store, m_poll, m_seu, m_raw, m_cmp;
  always @(posedge cal_sw) m_cal_pulse++;
  always @(negedge ldo_en[3]) if (rst_n) m_sel++;

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [7:0] pay [$], hk [$];
    int ev, nf, ncl, t0, tdead;
    {m_lost, m_ped, m_cal_pulse, m_cal_step, m_clusters, m_trunc, m_drop, m_sel, m_hv, m_backup,
     m_ee_load, m_ee_store, m_poll, m_seu, m_raw, m_cmp} = '0;
    for (int c = 0; c < NCH; c++) thr_ref[c] = 30;
    thr_ref[10] = 4095;
    for (int c = 0; c < NCH; c++) if (is_hot(c / NS, c % NS, NS)) thr_ref[c] = 4095; thr_ref[NPF + 300] = 4095; thr_ref[NS + 5] = 200;
    ee_image();
    #60 rst_n = 1;
    wait_idle();
    if (dut.u_ee.load_done || !dut.u_ee.chk_err) m_ee_load++;
    check(!dut.u_ee.chk_err, "EEPROM thresholds loaded with a good checksum");
    ev = -1;

    // ---- pedestal update: 2^PL events, empty frames ----
    command(CMD_SET_MODE, 16'(MODE_PED));
    for (int k = 0; k < (1 << PL); k++) begin fire(0); n_trig++; ev++; wait_idle(); end
    for (int c = 0; c < NCH; c++) begin
      int s;
      s = 0;
      for (int e = 0; e < (1 << PL); e++) s += adc_value(e, c / NS, c % NS, NS, VC);
      ped_ref[c] = s >> PL;
    end
    m_ped = dut.ped_cnt;
    repeat (3000) @(negedge clk);
    nf = frames.size();
    check(nf == (1 << PL), $sformatf("%0d pedestal frames, trig %0d lost %0d", nf, dut.trig_cnt, dut.lost_cnt));
    pay.delete();
    for (int k = 0; k < nf; k++) check_frame(k, k + 1, MODE_PED, pay, "pedestal frame");

    // ---- raw event ----
    command(CMD_SET_MODE, 16'(MODE_RAW));
    fire(0); n_trig++; ev++; wait_idle();
    repeat (20000) @(negedge clk);
    ref_raw(ev, pay);
    check_frame(nf, n_trig, MODE_RAW, pay, "raw frame"); nf++; m_raw++;

    // ---- gain calibration: 4 events, 2 per amplitude ----
    command(CMD_SET_MODE, 16'(MODE_CAL));
    for (int k = 0; k < 4; k++) begin
      fire(0); n_trig++; ev++; wait_idle();
      repeat (20000) @(negedge clk);
      ref_raw(ev, pay);
      check_frame(nf, n_trig, MODE_CAL, pay, "calibration frame"); nf++;
      if (k == 1) begin
        check(dut.cal_step == 1 && dut.u_cal.code == 12'd200, "second amplitude selected");
        if (dut.cal_step == 1) m_cal_step++;
      end
    end

    // ---- compression ----
    command(CMD_SET_MODE, 16'(MODE_CMP));
    for (int k = 0; k < 6; k++) begin
      @(negedge clk);
      fire(0); n_trig++; ev++;
      t0 = $time;
      if (k == 2) begin fire(0); m_lost++; end      // arrives during the dead time
      wait_idle();
      tdead = ($time - t0) / 50;
      repeat (8000) @(negedge clk);
      ref_cmp(ev, pay, ncl);
      m_clusters += ncl;
      check_frame(nf, n_trig, MODE_CMP, pay, $sformatf("compressed frame ev %0d", ev)); nf++; m_cmp++;
    end
    $display("dead time of a compressed event at this size: %0d clocks", tdead);

    // ---- house-keeping poll ----
    poll(hk);
    m_poll++;
    check(hk.size() == 55 && hk[0] == 8'hEB && hk[2] == 8'h21 && hk[3] == 8'd50, "poll reply header");
    if (hk.size() == 55) begin
      check({hk[4 + 2], hk[4 + 3]} == 16'(n_trig), $sformatf("trigger count %0d", {hk[6], hk[7]}));
      check({hk[4 + 4], hk[4 + 5]} == 16'(m_lost), "lost trigger count");
      check(hk[4 + 0] == 8'(MODE_CMP), "mode in reply");
      check(hk[4 + 20 + 2] == 8'((100 + 20) >> 4), "house-keeping value in reply");
      check(hk[4 + 48] == 8'd1, "pedestal update count in reply");
    end

    // ---- SEL: group 3 over-current for one scan ----
    sel_spike = 1;
    @(negedge ldo_en[3]);
    sel_spike = 0;
    t0 = $time;
    @(posedge ldo_en[3]);
    check(($time - t0) / 50 >= SEL_OFF - 2 && ($time - t0) / 50 <= SEL_OFF + 2, "LDO off for the set time");
    check(ldo_en == 8'hFF, "only group 3 was cycled");

    // ---- HV: group 1 to its backup module ----
    command(CMD_HV, 16'b1001);
    repeat (3) @(negedge clk);
    check(hv_en_a == 2'b01 && hv_en_b == 2'b10, "HV group 1 on backup module");
    if (hv_en_b == 2'b10) m_hv++;

    // ---- backup buses for trigger, commands and science data ----
    command(CMD_BUS_SEL, 16'h0007);
    bus_b = 1;
    fire(1); n_trig++; ev++; wait_idle();
    repeat (8000) @(negedge clk);
    ref_cmp(ev, pay, ncl);
    check_frame(nf, n_trig, MODE_CMP, pay, "frame on backup bus");
    check(nf < frames.size() && frames[nf].on_b, "science frame on backup LVDS");
    nf++;
    poll(hk);
    check(hk.size() == 55 && hk[4 + 1] == 8'h07, "poll answered on backup bus");
    if (hk.size() == 55 && frames[nf - 1].on_b) m_backup++;

    // ---- register upset: one copy of the mode register flipped ----
    dut.u_mode.r0 = ~dut.u_mode.r0;
    repeat (3) @(negedge clk);
    check(dut.mode_q == MODE_CMP && dut.seu_cnt == 1, "mode register upset corrected");
    if (dut.seu_cnt == 1) m_seu++;

    // ---- truncation: all thresholds 0 reloaded from the EEPROM ----
    for (int c = 0; c < NCH; c++) if (thr_ref[c] != 4095) thr_ref[c] = 0;
    ee_image();
    command(CMD_EE_LOAD, 16'h0);
    wait_idle();
    check(!dut.u_ee.chk_err, "reload checksum");
    m_ee_load++;
    fire(1); n_trig++; ev++; wait_idle();
    repeat (25000) @(negedge clk);
    ref_cmp(ev, pay, ncl);
    check(pay.size() > MAX_FRAME, "reference payload above the limit");
    check(nf < frames.size() && frames[nf].crc_ok && frames[nf].b.size() == MAX_FRAME - 4 &&
          frames[nf].b[4][7], "compressed frame cut at 2000 bytes and flagged");
    if (nf < frames.size() && frames[nf].b[4][7]) m_trunc++;
    if (nf < frames.size()) begin
      logic [7:0] got [$];
      got = frames[nf].b[6:$];
      check(same(got, pay), "truncated frame is a prefix of the full data");
    end
    nf++;

    // ---- ring overflow: raw events back to back ----
    command(CMD_SET_MODE, 16'(MODE_RAW));
    for (int k = 0; k < 3; k++) begin fire(1); n_trig++; ev++; wait_idle(); end
    check(dut.drop_cnt >= 1, $sformatf("dropped events %0d", dut.drop_cnt));
    m_drop = dut.drop_cnt;
    repeat (60000) @(negedge clk);
    check(frames.size() == nf + 3 - m_drop, "frames that were not dropped are all sent");
    for (int k = nf; k < frames.size(); k++) check(frames[k].crc_ok, "raw frame CRC after overflow");

    // ---- store: two thresholds changed by command, table copied to the EEPROM ----
    command(CMD_THR_ADDR, 16'd5);
    command(CMD_THR_DATA, 16'h0123);
    command(CMD_THR_DATA, 16'h0456);
    command(CMD_EE_STORE, 16'h0);
    wait_idle();
    check(eeprom.mem[10] == 8'h01 && eeprom.mem[11] == 8'h23 && eeprom.mem[12] == 8'h04 &&
          eeprom.mem[13] == 8'h56, "thresholds stored in the EEPROM");
    if (eeprom.mem[11] == 8'h23) m_ee_store++;

    // ---- every mechanism happened ----
    $display("mechanisms: lost=%0d ped=%0d cal_pulse=%0d cal_step=%0d clusters=%0d trunc=%0d drop=%0d sel=%0d hv=%0d backup=%0d ee_load=%0d ee_store=%0d poll=%0d seu=%0d raw=%0d cmp=%0d",
             m_lost, m_ped, m_cal_pulse, m_cal_step, m_clusters, m_trunc, m_drop, m_sel, m_hv,
             m_backup, m_ee_load, m_ee_store, m_poll, m_seu, m_raw, m_cmp);
    check(m_lost > 0 && m_ped > 0 && m_cal_pulse > 0 && m_cal_step > 0 && m_clusters > 0 &&
          m_trunc > 0 && m_drop > 0 && m_sel > 0 && m_hv > 0 && m_backup > 0 && m_ee_load > 0 &&
          m_ee_store > 0 && m_poll > 0 && m_seu > 0 && m_raw > 0 && m_cmp > 0,
          "every mechanism exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
