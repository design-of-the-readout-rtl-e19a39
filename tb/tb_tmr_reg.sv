// tb_tmr_reg: checks the voted output, the single-upset masking and the scrubbing of tmr_reg.
module tb_tmr_reg;
  logic clk = 0, rst_n = 0, we = 0, err;
  logic [7:0] d = '0, q;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  tmr_reg #(.WIDTH(8), .RESET_VAL(8'hA5)) dut (.clk, .rst_n, .we, .d, .q, .err);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    #12 rst_n = 1;
    @(negedge clk); check(q == 8'hA5 && !err, "reset value");
    for (int i = 0; i < 20; i++) begin
      logic [7:0] v;
      v = 8'($urandom);
      d = v; we = 1; @(negedge clk); we = 0;
      check(q == v && !err, $sformatf("write %h got %h", v, q));
      // upset one copy
      case (i % 3)
        0: dut.r0 = dut.r0 ^ 8'(1 << (i % 8));
        1: dut.r1 = ~dut.r1;
        default: dut.r2 = dut.r2 ^ 8'h0F;
      endcase
      #1 check(q == v, "upset masked");
      check(err, "upset flagged");
      @(negedge clk);
      check(q == v && !err, "upset scrubbed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
