// tb_trb_full: one TRB at its published size (2 FPGAs x 24 ADCs x 192 strips = 9216 channels,
// 20 MHz clock, 115200 baud, 128 KB ring buffer), built with the default parameters.
//
// Sequence: power-on (pedestal/threshold memory initialisation and threshold load from the
// EEPROM, 18434 bytes), one raw event (18438-byte frame, checked sample by sample), three
// compressed events (checked against the reference compression, cut at the 2000-byte frame
// limit; the pedestals are still zero, so most channels are above threshold), and a
// house-keeping poll at 115200 baud. It measures the dead time of a compressed event and checks
// it is below the 3 ms needed for a 50 Hz trigger rate with margin, and that the 2000-byte frame
// leaves the board in 0.8 ms.
module tb_trb_full;
  import stk_pkg::*;
  import tb_stk_ref_pkg::*;
  localparam int NA = N_SADC, NS = N_STRIP, VC = VA_CH, DIV = CLK_HZ / BAUD;
  localparam int NPF = NA * NS, NCH = 2 * NPF;

  logic clk = 0, rst_n = 0;
  logic trig_a_n = 1, trig_b_n = 1, uart_rx_a = 1, uart_rx_b = 1;
  logic uart_tx_a, uart_tx_b, uart_txen_a, uart_txen_b;
  logic lvds_data_a, lvds_frame_a, lvds_data_b, lvds_frame_b;
  logic va_ckb, va_holdb, va_dreset, va_shift_in, va_test_on, cal_sw, dac_fs_n, dac_sclk, dac_din;
  logic sadc_cs_n, sadc_sclk;
  logic [2*NA-1:0] sadc_sdata;
  logic [16:0] sram_addr, ee_addr;
  logic [7:0] sram_dq_o, sram_dq_i, ee_dq_o, ee_dq_i;
  logic sram_dq_oe, sram_ce_n, sram_we_n, sram_oe_n;
  logic ee_dq_oe, ee_ce_n, ee_we_n, ee_oe_n;
  logic hk_cs_n, hk_sclk;
  logic [3:0] hk_mux;
  logic [1:0] hk_sdata = '0;
  logic [7:0] ldo_en;
  logic [1:0] hv_en_a, hv_en_b;
  logic busy;
  int checks = 0, failures = 0;
  always #25 clk = ~clk;   // 20 MHz

  trb_top dut (.*, .trb_id(8'h05));

  va_sadc_model #(.N(NA), .N_STRIP(NS), .VA_CH(VC), .ADC_OFS(0)) fe0 (
    .holdb(va_holdb), .ckb(va_ckb), .shift_in(va_shift_in), .cs_n(sadc_cs_n), .sclk(sadc_sclk),
    .sdata(sadc_sdata[NA-1:0]));
  va_sadc_model #(.N(NA), .N_STRIP(NS), .VA_CH(VC), .ADC_OFS(NA)) fe1 (
    .holdb(va_holdb), .ckb(va_ckb), .shift_in(va_shift_in), .cs_n(sadc_cs_n), .sclk(sadc_sclk),
    .sdata(sadc_sdata[2*NA-1:NA]));
  sram_model #(.AW(17)) sram (.clk, .addr(sram_addr), .din(sram_dq_o), .dout(sram_dq_i),
                              .ce_n(sram_ce_n), .we_n(sram_we_n));
  sram_model #(.AW(17)) eeprom (.clk, .addr(ee_addr), .din(ee_dq_o), .dout(ee_dq_i),
                                .ce_n(ee_ce_n), .we_n(ee_we_n));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic uart_byte(input logic [7:0] b);
    logic [10:0] f;
    f = {1'b1, ~(^b), b, 1'b0};
    for (int i = 0; i < 11; i++) begin uart_rx_a = f[i]; repeat (DIV) @(posedge clk); end
  endtask
  task automatic command(input cmd_e c, input logic [15:0] arg);
    uart_byte(8'hEB); uart_byte(8'h90); uart_byte(8'h05); uart_byte(c);
    uart_byte(arg[15:8]); uart_byte(arg[7:0]); uart_byte(8'(8'h05 + c + arg[15:8] + arg[7:0]));
    repeat (4) @(posedge clk);
  endtask
  int n_rep = 0;
  always @(negedge uart_tx_a) if (rst_n && uart_txen_a) begin
    repeat (DIV * 21 / 2) @(posedge clk);
    n_rep++;
  end

  task automatic fire();
    @(negedge clk); trig_a_n = 0;
    repeat (10) @(negedge clk); trig_a_n = 1;
    repeat (4) @(negedge clk);
  endtask
  task automatic wait_idle();
    repeat (5) @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  typedef struct { logic [7:0] b [$]; bit crc_ok; bit sync_ok; int clocks; } frame_t;
  frame_t frames [$];
  logic bits [$];
  logic fr_q = 0;
  always @(posedge clk) if (!rst_n) begin
    bits.delete();
    fr_q <= 0;
  end else begin
    if (lvds_frame_a) bits.push_back(lvds_data_a);
    if (fr_q && !lvds_frame_a) begin
      automatic frame_t f;
      automatic logic [15:0] c = 16'hFFFF;
      automatic logic [7:0] all [$];
      for (int k = 0; k + 8 <= bits.size(); k += 8) begin
        logic [7:0] v;
        for (int j = 0; j < 8; j++) v[7 - j] = bits[k + j];
        all.push_back(v);
      end
      f.sync_ok = all.size() >= 4 && all[0] == 8'hEB && all[1] == 8'h90 && (bits.size() % 8 == 0);
      for (int k = 2; k < all.size() - 2; k++) begin f.b.push_back(all[k]); c = crc_byte(c, all[k]); end
      f.crc_ok = all.size() >= 4 && {all[all.size() - 2], all[all.size() - 1]} == c;
      f.clocks = bits.size();
      frames.push_back(f);
      bits.delete();
    end
    fr_q <= lvds_frame_a;
  end

  int thr_ref [NCH];
  logic [7:0] pay [$];
  int sig [NCH];

  // compression with all pedestals zero
  function automatic void ref_cmp(int ev);
    pay.delete();
    for (int a = 0; a < 2 * NA; a++)
      for (int v = 0; v < NS / VC; v++) begin
        int sum, ng, cn;
        sum = 0; ng = 0;
        for (int s = v * VC; s < (v + 1) * VC; s++)
          if (thr_ref[a * NS + s] != 4095) begin sum += adc_value(ev, a, s, NS, VC); ng++; end
        cn = (ng == 0) ? 0 : sum / ng;
        for (int s = v * VC; s < (v + 1) * VC; s++)
          sig[a * NS + s] = (thr_ref[a * NS + s] == 4095) ? 0 : adc_value(ev, a, s, NS, VC) - cn;
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
          s += len;
        end else s++;
      end
    end
  endfunction

  function automatic int prefix_ok(int k, int from);
    for (int i = from; i < frames[k].b.size(); i++)
      if (i - from >= pay.size() || frames[k].b[i] !== pay[i - from]) return 0;
    return 1;
  endfunction

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int ev, t0, dead, sum, boot;
    sum = 0;
    for (int c = 0; c < NCH; c++) begin
      thr_ref[c] = (c % 997 == 13 || is_hot(c / NS, c % NS, NS)) ? 4095 : 40;
      eeprom.mem[2 * c] = 8'(thr_ref[c] >> 8); eeprom.mem[2 * c + 1] = 8'(thr_ref[c]);
      sum += (thr_ref[c] >> 8) + (thr_ref[c] & 255);
    end
    eeprom.mem[2 * NCH] = 8'(sum >> 8); eeprom.mem[2 * NCH + 1] = 8'(sum);
    #60 rst_n = 1;
    wait_idle();
    boot = $time / 50;
    $display("power-on initialisation and threshold load: %0d clocks (%0d us)", boot, boot / 20);
    check(!dut.u_ee.chk_err, $sformatf("thresholds loaded, checksum error %0d", dut.u_ee.chk_err));
    check(dut.g_fpga[0].u_dp.thr[13] == 12'hFFF && dut.g_fpga[1].u_dp.thr[14] == 12'd40, "threshold table contents");
    ev = -1;

    // raw event
    command(CMD_SET_MODE, 16'(MODE_RAW));
    fire(); ev++;
    t0 = $time; wait_idle(); dead = ($time - t0) / 50;
    $display("raw event dead time: %0d clocks", dead);
    wait (frames.size() == 1);
    check(frames[0].sync_ok && frames[0].crc_ok, "raw frame sync and CRC");
    check(frames[0].b.size() == 6 + 2 * NCH, $sformatf("raw frame %0d bytes", frames[0].b.size()));
    if (frames[0].b.size() == 6 + 2 * NCH) begin
      int bad;
      bad = 0;
      for (int c = 0; c < NCH; c++)
        if ({frames[0].b[6 + 2 * c], frames[0].b[7 + 2 * c]} != 16'(adc_value(ev, c / NS, c % NS, NS, VC))) bad++;
      check(bad == 0, $sformatf("%0d raw samples wrong", bad));
    end

    // compressed events
    command(CMD_SET_MODE, 16'(MODE_CMP));
    for (int k = 1; k <= 3; k++) begin
      fire(); ev++;
      t0 = $time; wait_idle(); dead = ($time - t0) / 50;
      $display("compressed event dead time: %0d clocks (%0d us)", dead, dead / 20);
      check(dead < 3 * CLK_HZ / 1000, "dead time below 3 ms");
      wait (frames.size() == k + 1);
      ref_cmp(ev);
      check(frames[k].sync_ok && frames[k].crc_ok, "compressed frame sync and CRC");
      check(frames[k].b.size() == (pay.size() + 6 > MAX_FRAME - 4 ? MAX_FRAME - 4 : pay.size() + 6),
            $sformatf("compressed frame %0d bytes, reference payload %0d", frames[k].b.size(), pay.size()));
      check(frames[k].b[4][7] == (pay.size() + 6 > MAX_FRAME - 4), "truncation flag");
      check(prefix_ok(k, 6) == 1, "compressed payload matches the reference");
      check(frames[k].clocks <= MAX_FRAME * 8, $sformatf("frame took %0d clocks on the LVDS bus", frames[k].clocks));
    end

    // house-keeping poll
    command(CMD_HK_POLL, 16'h0);
    repeat (DIV * 11 * 60) @(posedge clk);
    check(n_rep == 55, $sformatf("house-keeping reply bytes %0d", n_rep));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
