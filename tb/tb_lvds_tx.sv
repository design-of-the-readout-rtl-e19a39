// tb_lvds_tx: sends byte frames through the transmitter and decodes the serial bus: sync word,
// data, CRC, one bit per clock, the main/backup selection, and the underrun abort.
module tb_lvds_tx;
  import tb_stk_ref_pkg::*;
  logic clk = 0, rst_n = 0, bus_sel = 0, i_valid = 0, i_last = 0, i_ready;
  logic [7:0] i_data = '0, underrun_cnt;
  logic data_a, frame_a, data_b, frame_b;
  logic [15:0] frames_sent;
  int checks = 0, failures = 0;
  bit stall = 0;
  always #5 clk = ~clk;
  lvds_tx dut (.clk, .rst_n, .bus_sel, .i_valid, .i_ready, .i_data, .i_last, .data_a, .frame_a,
               .data_b, .frame_b, .frames_sent, .underrun_cnt);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // receiver: collects the bits of each frame
  logic rx_bits [$];
  logic rx_frames [$][$];
  int   rx_bus [$];
  always @(posedge clk) begin
    if (frame_a || frame_b) rx_bits.push_back(frame_a ? data_a : data_b);
    if ((frame_a || frame_b) && !dut.active) ;
  end
  logic fa_q = 0, fb_q = 0;
  always @(posedge clk) begin
    if ((fa_q || fb_q) && !(frame_a || frame_b)) begin
      rx_frames.push_back(rx_bits); rx_bus.push_back(fb_q); rx_bits.delete();
    end
    fa_q <= frame_a; fb_q <= frame_b;
    if (frame_a && frame_b) begin failures++; $display("FAIL: both buses active"); end
  end

  task automatic send(input logic [7:0] b [$], input int stall_at = -1);
    foreach (b[i]) begin
      if (i == stall_at) repeat (40) @(negedge clk);
      i_data = b[i]; i_last = (i == b.size() - 1); i_valid = 1;
      do @(posedge clk); while (!i_ready);
      #1 i_valid = 0;
      if ($urandom % 2) @(negedge clk);
    end
  endtask

  function automatic bit frame_ok(logic bits [$], logic [7:0] b [$]);
    logic [7:0] exp_bytes [$];
    logic [15:0] c;
    c = 16'hFFFF;
    exp_bytes.push_back(8'hEB); exp_bytes.push_back(8'h90);
    foreach (b[i]) begin exp_bytes.push_back(b[i]); c = crc_byte(c, b[i]); end
    exp_bytes.push_back(c[15:8]); exp_bytes.push_back(c[7:0]);
    if (bits.size() != 8 * exp_bytes.size()) return 0;
    foreach (exp_bytes[k])
      for (int j = 0; j < 8; j++) if (bits[8 * k + j] != exp_bytes[k][7 - j]) return 0;
    return 1;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [7:0] f [$][$];
    #12 rst_n = 1;
    repeat (3) @(negedge clk);
    for (int k = 0; k < 6; k++) begin
      logic [7:0] b [$];
      for (int i = 0; i < 1 + k * 13; i++) b.push_back(8'($urandom));
      f.push_back(b);
      bus_sel = (k >= 3);
      send(b);
      repeat (8 * (b.size() + 6)) @(negedge clk);
    end
    check(rx_frames.size() == 6, $sformatf("%0d frames received", rx_frames.size()));
    for (int k = 0; k < 6 && k < rx_frames.size(); k++) begin
      check(frame_ok(rx_frames[k], f[k]), $sformatf("frame %0d content, %0d bits", k, rx_frames[k].size()));
      check(rx_bus[k] == (k >= 3), $sformatf("frame %0d bus", k));
    end
    check(frames_sent == 6, "frames counted");
    // underrun: the source stops in the middle of a frame
    begin
      logic [7:0] b [$];
      for (int i = 0; i < 10; i++) b.push_back(8'(i));
      send(b, 5);
      repeat (200) @(negedge clk);
    end
    check(underrun_cnt != 0, "underrun detected");
    check(frames_sent == 6, "aborted frame not counted as sent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
