// tb_hk_ctrl: house-keeping scans against a model of two multiplexed serial ADCs. Checks that
// every channel is converted every second except the slow ones (every SLOW_DIV seconds), that
// the stored values match, and the scan_done pulse per second.
module tb_hk_ctrl;
  localparam int TICK = 4000, NM = 10, SD = 4;
  localparam logic [15:0] SLOW = 16'h0030;
  logic clk = 0, rst_n = 0, cs_n, sclk, scan_done;
  logic [3:0] mux;
  logic [1:0] sdata = '0;
  logic [1:0][NM-1:0][11:0] val;
  logic [15:0] seconds;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  hk_ctrl #(.TICK(TICK), .N_MUX(NM), .SLOW_MASK(SLOW), .SLOW_DIV(SD), .SETTLE(8)) dut (
    .clk, .rst_n, .adc_cs_n(cs_n), .adc_sclk(sclk), .mux, .adc_sdata(sdata), .val, .scan_done,
    .seconds);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [11:0] hkv(int adc, int m, int conv);
    return 12'(adc * 1000 + m * 50 + conv);
  endfunction

  // ADC model; conversions counted per (adc, mux)
  int nconv [16];
  logic [1:0][15:0] sh;
  always @(negedge cs_n) begin
    for (int i = 0; i < 2; i++) begin
      sh[i] = {4'h0, hkv(i, mux, nconv[mux])};
      sdata[i] = sh[i][15];
    end
    nconv[mux]++;
  end
  always @(negedge sclk) if (!cs_n) for (int i = 0; i < 2; i++) begin
    sh[i] = sh[i] << 1; sdata[i] = sh[i][15];
  end

  int scans = 0;
  always @(posedge clk) if (rst_n && scan_done) scans++;

  initial begin
    repeat (TICK * 10) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    foreach (nconv[i]) nconv[i] = 0;
    #12 rst_n = 1;
    for (int s = 1; s <= 8; s++) begin
      @(posedge scan_done); @(negedge clk);
      check(seconds == 16'(s), $sformatf("second %0d", seconds));
      for (int m = 0; m < NM; m++) begin
        int exp_n;
        exp_n = SLOW[m] ? s / SD : s;
        check(nconv[m] == exp_n, $sformatf("s%0d ch%0d converted %0d times, expected %0d", s, m,
              nconv[m], exp_n));
        if (nconv[m] > 0)
          for (int i = 0; i < 2; i++)
            check(val[i][m] == hkv(i, m, nconv[m] - 1), $sformatf("value adc%0d ch%0d", i, m));
      end
    end
    @(negedge clk);
    check(scans == 8, "one scan per second");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
