// tb_crc16: checks crc16 against the CRC-16/CCITT-FALSE check value of "123456789" (0x29B1)
// and against a bit-by-bit reference over random byte strings.
module tb_crc16;
  import tb_stk_ref_pkg::*;
  logic clk = 0, rst_n = 0, init = 0, en = 0;
  logic [7:0] data = '0;
  logic [15:0] crc;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  crc16 dut (.clk, .rst_n, .init, .en, .data, .crc);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    string s;
    logic [15:0] ref_crc;
    #12 rst_n = 1;
    s = "123456789";
    @(negedge clk); init = 1; @(negedge clk); init = 0;
    for (int i = 0; i < 9; i++) begin data = s[i]; en = 1; @(negedge clk); end
    en = 0; @(negedge clk);
    check(crc == 16'h29B1, $sformatf("check value %h", crc));
    for (int t = 0; t < 20; t++) begin
      init = 1; @(negedge clk); init = 0;
      ref_crc = 16'hFFFF;
      for (int i = 0; i < 1 + t * 3; i++) begin
        data = 8'($urandom); en = ($urandom % 4) != 0;
        if (en) ref_crc = crc_byte(ref_crc, data);
        @(negedge clk);
      end
      en = 0; @(negedge clk);
      check(crc == ref_crc, $sformatf("random string %0d: %h vs %h", t, crc, ref_crc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
