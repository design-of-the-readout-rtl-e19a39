// tb_daq_driver: runs the VA140/ADC readout sequence against the behavioural front end and
// checks the number of CKB pulses, conversions and SCLK edges, the hold window, the
// calibration signals, the strip numbers and sample values seen through sadc_rx, and the
// length of the readout in clocks.
module tb_daq_driver;
  import tb_stk_ref_pkg::*;
  localparam int N_STRIP = 8, SETTLE = 5, CK_W = 2, HOLD_DLY = 30, N = 3;
  logic clk = 0, rst_n = 0, start = 0, cal_mode = 0;
  logic busy, done, ckb, holdb, dreset, shift_in, test_on, cal_sw, cs_n, sclk, bit_en, word_done;
  logic [7:0] strip, r_strip;
  logic [N-1:0] sdata;
  logic r_valid, lead_err;
  logic [N-1:0][11:0] sample;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  daq_driver #(.N_STRIP(N_STRIP), .SETTLE(SETTLE), .CK_W(CK_W), .HOLD_DLY(HOLD_DLY)) dut (
    .clk, .rst_n, .start, .cal_mode, .busy, .done, .va_ckb(ckb), .va_holdb(holdb),
    .va_dreset(dreset), .va_shift_in(shift_in), .va_test_on(test_on), .cal_sw,
    .adc_cs_n(cs_n), .adc_sclk(sclk), .bit_en, .word_done, .strip);
  va_sadc_model #(.N(N), .N_STRIP(N_STRIP), .VA_CH(4)) fe (
    .holdb, .ckb, .shift_in, .cs_n, .sclk, .sdata);
  sadc_rx #(.N(N)) rx (.clk, .rst_n, .sdata, .bit_en, .word_done, .strip_in(strip),
    .valid(r_valid), .strip(r_strip), .sample, .lead_err);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int n_ck = 0, n_cs = 0, n_sclk = 0, n_bad_hold = 0, n_samples = 0, n_dreset = 0, ev = 0;
  always @(negedge ckb) n_ck++;
  always @(negedge cs_n) begin n_cs++; if (holdb) n_bad_hold++; end
  always @(negedge sclk) n_sclk++;
  always @(posedge dreset) n_dreset++;
  always @(posedge clk) if (rst_n && r_valid) begin
    n_samples++;
    if (r_strip != 8'((n_samples - 1) % N_STRIP)) begin
      failures++; $display("FAIL: strip %0d", r_strip);
    end
    for (int i = 0; i < N; i++) begin
      checks++;
      if (sample[i] != 12'(adc_value(ev, i, r_strip, N_STRIP, 4))) begin
        failures++; $display("FAIL: sample ev %0d adc %0d strip %0d = %0d", ev, i, r_strip, sample[i]);
      end
    end
  end

  task automatic run(input bit cal, output int cycles);
    cal_mode = cal;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; if (cal) check(test_on && cal_sw || done, "cal signals held"); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int cyc, exp_cyc;
    #12 rst_n = 1;
    repeat (3) @(negedge clk);
    check(holdb && ckb && cs_n && !test_on && !cal_sw && !busy, "idle levels");
    run(0, cyc);
    exp_cyc = 2 + 2 * CK_W + N_STRIP * (SETTLE + 34) + (N_STRIP - 1) * 2 * CK_W + CK_W;
    check(cyc == exp_cyc, $sformatf("readout %0d clocks, expected %0d", cyc, exp_cyc));
    check(n_ck == N_STRIP, $sformatf("CKB pulses %0d", n_ck));
    check(n_cs == N_STRIP, $sformatf("conversions %0d", n_cs));
    check(n_sclk == 16 * N_STRIP, $sformatf("SCLK falling edges %0d", n_sclk));
    check(n_bad_hold == 0, "conversions inside the hold window");
    check(n_dreset == 1, "one DRESET per readout");
    check(n_samples == N_STRIP, "one sample vector per strip");
    check(!test_on && !cal_sw, "no calibration pulse in physics readout");
    repeat (5) @(negedge clk);
    check(holdb && !busy, "hold released");
    ev = 1;
    run(1, cyc);
    check(cyc == exp_cyc + HOLD_DLY, $sformatf("calibration readout %0d clocks", cyc));
    check(n_samples == 2 * N_STRIP, "second event samples");
    repeat (5) @(negedge clk);
    check(!test_on && !cal_sw, "calibration signals released");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
