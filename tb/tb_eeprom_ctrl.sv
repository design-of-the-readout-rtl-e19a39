// tb_eeprom_ctrl: the automatic threshold load after initialisation (with its checksum check),
// a store of a changed table into the EEPROM model, a reload, and the detection of a corrupted
// EEPROM byte. Also checks the load time against T_RD clocks per byte.
module tb_eeprom_ctrl;
  localparam int NCH = 20, AW = 17, TRD = 4, TWP = 3, TWC = 10;
  logic clk = 0, rst_n = 0, dp_ready = 0, load_req = 0, store_req = 0;
  logic [AW-1:0] ee_addr;
  logic [7:0] ee_dq_o, ee_dq_i;
  logic ee_dq_oe, ee_ce_n, ee_we_n, ee_oe_n, thr_we, busy, chk_err, load_done;
  logic [13:0] thr_addr, thr_raddr;
  logic [11:0] thr_wdata, thr_rdata;
  logic [11:0] table_q [NCH];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  eeprom_ctrl #(.N_CH(NCH), .AW(AW), .T_RD(TRD), .T_WP(TWP), .T_WC(TWC)) dut (
    .clk, .rst_n, .dp_ready, .load_req, .store_req, .ee_addr, .ee_dq_o, .ee_dq_i, .ee_dq_oe,
    .ee_ce_n, .ee_we_n, .ee_oe_n, .thr_we, .thr_addr, .thr_wdata, .thr_raddr, .thr_rdata,
    .busy, .chk_err, .load_done);
  sram_model #(.AW(AW)) ee (.clk, .addr(ee_addr), .din(ee_dq_o), .dout(ee_dq_i), .ce_n(ee_ce_n),
                            .we_n(ee_we_n));

  // the threshold table the controller loads into and stores from
  always @(posedge clk) if (rst_n && thr_we) table_q[thr_addr] <= thr_wdata;
  assign thr_rdata = table_q[thr_raddr];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int ee_writes = 0;
  always @(negedge clk) if (!ee_ce_n && !ee_we_n && !ee_dq_oe) begin
    failures++; $display("FAIL: write strobe without data drive");
  end
  always @(negedge ee_we_n) ee_writes++;

  task automatic fill_ee(input int seed);
    int sum;
    sum = 0;
    for (int c = 0; c < NCH; c++) begin
      logic [11:0] t;
      t = 12'(c * 97 + seed);
      ee.mem[2 * c] = {4'h0, t[11:8]}; ee.mem[2 * c + 1] = t[7:0];
      sum += t[11:8] + t[7:0];
    end
    ee.mem[2 * NCH] = 8'(sum >> 8); ee.mem[2 * NCH + 1] = 8'(sum);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int t0, t1;
    foreach (table_q[i]) table_q[i] = '0;
    #1 fill_ee(5);
    #11 rst_n = 1;
    repeat (20) @(negedge clk);
    check(!busy, "waits for the Data_Process modules");
    dp_ready = 1; t0 = $time;
    @(negedge clk);
    while (!load_done) @(negedge clk);
    t1 = $time;
    check((t1 - t0) / 10 <= (2 * NCH + 2) * TRD + 3, $sformatf("load took %0d clocks", (t1 - t0) / 10));
    for (int c = 0; c < NCH; c++) check(table_q[c] == 12'(c * 97 + 5), $sformatf("loaded %0d", c));
    check(!chk_err, "checksum good");
    // change the table and store it
    foreach (table_q[i]) table_q[i] = 12'($urandom);
    @(negedge clk); store_req = 1; @(negedge clk); store_req = 0;
    @(negedge clk);
    while (busy) @(negedge clk);
    check(ee_writes == 2 * NCH + 2, $sformatf("%0d byte writes", ee_writes));
    begin
      int sum;
      sum = 0;
      for (int c = 0; c < NCH; c++) begin
        check(ee.mem[2 * c] == {4'h0, table_q[c][11:8]} && ee.mem[2 * c + 1] == table_q[c][7:0],
              $sformatf("stored %0d", c));
        sum += table_q[c][11:8] + table_q[c][7:0];
      end
      check({ee.mem[2 * NCH], ee.mem[2 * NCH + 1]} == 16'(sum), "stored checksum");
    end
    // reload after wiping the table
    begin
      logic [11:0] saved [NCH];
      saved = table_q;
      foreach (table_q[i]) table_q[i] = '0;
      @(negedge clk); load_req = 1; @(negedge clk); load_req = 0;
      while (!load_done) @(negedge clk);
      @(negedge clk);
      check(table_q == saved && !chk_err, "reload restores the table");
      // corrupt one byte: checksum error
      ee.mem[7] = ee.mem[7] ^ 8'h10;
      @(negedge clk); load_req = 1; @(negedge clk); load_req = 0;
      while (!load_done) @(negedge clk);
      @(negedge clk);
      check(chk_err, "corrupted EEPROM detected");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
