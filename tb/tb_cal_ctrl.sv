// tb_cal_ctrl: decodes the DAC serial words and checks the calibration sweep: ten amplitudes of
// 100 mV steps (codes 100..1000 at a 4096 mV full scale), EV_STEP events per amplitude, the wrap
// after the tenth, and code 0 when calibration mode ends.
module tb_cal_ctrl;
  localparam int EV = 3;
  logic clk = 0, rst_n = 0, cal_mode = 0, daq_done = 0, fs_n, sclk, din, busy;
  logic [3:0] step;
  logic [11:0] code;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  cal_ctrl #(.EV_STEP(EV)) dut (.clk, .rst_n, .cal_mode, .daq_done, .dac_fs_n(fs_n),
    .dac_sclk(sclk), .dac_din(din), .step, .code, .dac_busy(busy));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // DAC model: 16 bits on SCLK falling edges while FS is low
  logic [15:0] sh;
  int nb = 0;
  logic [15:0] words [$];
  always @(negedge fs_n) nb = 0;
  always @(negedge sclk) if (!fs_n) begin sh = {sh[14:0], din}; nb++; end
  always @(posedge fs_n) if (rst_n) begin
    if (nb != 16) begin failures++; $display("FAIL: %0d bits in a DAC word", nb); end
    words.push_back(sh);
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    #12 rst_n = 1;
    repeat (60) @(negedge clk);
    check(words.size() == 1 && words[0] == 16'hC000, "code 0 written at reset");
    cal_mode = 1;
    repeat (60) @(negedge clk);
    for (int k = 0; k < 12; k++) begin
      int s;
      s = k % 10;
      check(words.size() == 2 + k, $sformatf("word count %0d at step %0d", words.size(), k));
      check(words[$] == {4'b1100, 12'((s + 1) * 100)}, $sformatf("step %0d word %h", k, words[$]));
      check(step == 4'(s), "step index");
      for (int e = 0; e < EV; e++) begin
        @(negedge clk); daq_done = 1; @(negedge clk); daq_done = 0;
        repeat (5) @(negedge clk);
      end
      repeat (60) @(negedge clk);
    end
    cal_mode = 0;
    repeat (60) @(negedge clk);
    check(words[$] == 16'hC000, "code 0 after calibration");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
