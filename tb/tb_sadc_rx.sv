// tb_sadc_rx: shifts random 16-bit ADC words into the receiver on N lines and checks the
// 12-bit results, the strip tag and the leading-zero check.
module tb_sadc_rx;
  localparam int N = 5;
  logic clk = 0, rst_n = 0, bit_en = 0, word_done = 0;
  logic [N-1:0] sdata = '0;
  logic [7:0] strip_in = '0, strip;
  logic valid, lead_err;
  logic [N-1:0][11:0] sample;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  sadc_rx #(.N(N)) dut (.clk, .rst_n, .sdata, .bit_en, .word_done, .strip_in, .valid, .strip,
                        .sample, .lead_err);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [N-1:0][15:0] w;
    #12 rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      bit lead;
      lead = (t % 7 == 3);
      for (int i = 0; i < N; i++) w[i] = {4'h0, 12'($urandom)};
      if (lead) w[t % N][14] = 1'b1;
      for (int k = 15; k >= 0; k--) begin
        @(negedge clk);
        for (int i = 0; i < N; i++) sdata[i] = w[i][k];
        bit_en = 1; @(negedge clk); bit_en = 0;
        sdata = ~sdata;               // line changes between bits must not matter
      end
      strip_in = 8'(t); word_done = 1; @(negedge clk); word_done = 0;
      check(valid, "valid after word_done");
      check(strip == 8'(t), "strip tag");
      for (int i = 0; i < N; i++) check(sample[i] == w[i][11:0], $sformatf("line %0d", i));
      check(lead_err == lead, "leading-zero check");
      @(negedge clk);
      check(!valid, "valid is one clock");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
