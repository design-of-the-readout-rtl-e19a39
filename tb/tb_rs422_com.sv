// tb_rs422_com: sends command packets over the UART (main and backup bus), checks the decoded
// commands, the rejection of bad checksums, bad parity and foreign IDs, and the
// house-keeping reply, byte by byte, including its checksum and the bit timing.
module tb_rs422_com;
  import stk_pkg::*;
  localparam int DIV = 16;
  localparam int NB  = 4;
  logic clk = 0, rst_n = 0, bus_sel = 0, rxd_a = 1, rxd_b = 1;
  logic txd_a, txd_b, tx_en_a, tx_en_b, cmd_valid;
  logic [NB-1:0][7:0] hk_bytes;
  command_t cmd;
  logic [7:0] err_cnt;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  rs422_com #(.DIV(DIV), .NB(NB)) dut (.clk, .rst_n, .trb_id(8'h03), .bus_sel, .rxd_a, .rxd_b,
    .txd_a, .txd_b, .tx_en_a, .tx_en_b, .hk_bytes, .cmd_valid, .cmd, .err_cnt);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send_byte(input logic [7:0] b, input bit bad_par = 0);
    logic [10:0] f;
    f = {1'b1, ~(^b) ^ bad_par, b, 1'b0};
    for (int i = 0; i < 11; i++) begin
      if (bus_sel) rxd_b = f[i]; else rxd_a = f[i];
      repeat (DIV) @(posedge clk);
    end
  endtask

  task automatic send_cmd(input logic [7:0] id, input logic [7:0] c, input logic [15:0] arg,
                          input bit bad_sum = 0, input bit bad_par = 0);
    logic [7:0] s;
    s = id + c + arg[15:8] + arg[7:0] + (bad_sum ? 8'd1 : 8'd0);
    send_byte(8'hEB); send_byte(8'h90); send_byte(id); send_byte(c, bad_par);
    send_byte(arg[15:8]); send_byte(arg[7:0]); send_byte(s);
  endtask

  // decoded command capture
  int ncmd = 0;
  command_t last;
  always @(posedge clk) if (rst_n && cmd_valid) begin ncmd++; last = cmd; end

  // reply receiver on the selected bus, sampling at bit middles
  logic [7:0] rx_buf [64];
  int nrx = 0;
  bit bad_bits = 0;
  initial forever begin
    logic [10:0] f;
    @(negedge (bus_sel ? txd_b : txd_a));
    repeat (DIV / 2) @(posedge clk);
    for (int i = 0; i < 11; i++) begin
      f[i] = bus_sel ? txd_b : txd_a;
      if (!(bus_sel ? tx_en_b : tx_en_a)) bad_bits = 1;
      if (i < 10) repeat (DIV) @(posedge clk);
    end
    if (f[0] != 0 || f[10] != 1 || (^f[9:1]) != 1) bad_bits = 1;
    rx_buf[nrx] = f[8:1]; nrx++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    hk_bytes = {8'h44, 8'h33, 8'h22, 8'h11};
    #12 rst_n = 1;
    repeat (5) @(posedge clk);
    send_cmd(8'h03, 8'h01, 16'h0002);
    repeat (3 * DIV) @(posedge clk);
    check(ncmd == 1 && last.cmd == CMD_SET_MODE && last.arg == 16'h0002, "set mode decoded");
    send_cmd(8'hFF, 8'h02, 16'h000A);
    repeat (3 * DIV) @(posedge clk);
    check(ncmd == 2 && last.cmd == CMD_HV && last.arg == 16'h000A, "broadcast decoded");
    send_cmd(8'h05, 8'h01, 16'h0001);
    repeat (3 * DIV) @(posedge clk);
    check(ncmd == 2, "other board's command ignored");
    send_cmd(8'h03, 8'h01, 16'h0001, 1);
    repeat (3 * DIV) @(posedge clk);
    check(ncmd == 2 && err_cnt == 1, "bad checksum rejected");
    send_cmd(8'h03, 8'h01, 16'h0001, 0, 1);
    repeat (3 * DIV) @(posedge clk);
    check(ncmd == 2 && err_cnt == 2, "bad parity rejected");
    check(nrx == 0 && !tx_en_a && !tx_en_b, "no reply to plain commands");
    // house-keeping poll on the backup bus
    bus_sel = 1;
    send_cmd(8'h03, 8'h08, 16'h0000);
    repeat (12 * (NB + 6) * DIV) @(posedge clk);
    check(nrx == NB + 5, $sformatf("reply length %0d", nrx));
    check(rx_buf[0] == 8'hEB && rx_buf[1] == 8'h90 && rx_buf[2] == 8'h03 && rx_buf[3] == 8'(NB),
          "reply header");
    for (int i = 0; i < NB; i++)
      check(rx_buf[4 + i] == hk_bytes[i], $sformatf("reply byte %0d = %h", i, rx_buf[4 + i]));
    check(rx_buf[NB + 4] == 8'(8'h03 + 8'(NB) + 8'h11 + 8'h22 + 8'h33 + 8'h44), "reply checksum");
    check(!bad_bits, "reply framing, parity and driver enable");
    check(txd_a == 1 && !tx_en_a, "main bus idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
