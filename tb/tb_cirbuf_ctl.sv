// tb_cirbuf_ctl: writes events from two word streams into the ring buffer (with an SRAM model)
// and checks each frame read out: header, master-then-slave byte order, the truncation of
// compressed frames at the byte limit, the dropping of events when the ring is full, and
// frames that carry no payload.
module tb_cirbuf_ctl;
  import stk_pkg::*;
  localparam int AW = 10, MAXB = 64, MAXPAY = MAXB - 10;
  logic clk = 0, rst_n = 0, ev_start = 0;
  mode_e ev_mode = MODE_RAW;
  logic [15:0] trig_num = '0;
  logic in0_valid = 0, in1_valid = 0, in0_done = 0, in1_done = 0, in0_ready, in1_ready;
  logic [15:0] in0_data = '0, in1_data = '0;
  logic [AW-1:0] sram_addr;
  logic [7:0] sram_dq_o, sram_dq_i, o_data, n_frames;
  logic sram_dq_oe, sram_ce_n, sram_we_n, sram_oe_n, o_valid, o_last, wr_busy;
  logic o_ready = 0;
  logic [15:0] drop_cnt, trunc_cnt;
  int checks = 0, failures = 0;
  bit reader_on = 1;
  always #5 clk = ~clk;

  cirbuf_ctl #(.AW(AW), .MAX_BYTES(MAXB)) dut (
    .clk, .rst_n, .ev_start, .ev_mode, .trig_num, .trb_id(8'h5A),
    .in0_valid, .in0_ready, .in0_data, .in0_done, .in1_valid, .in1_ready, .in1_data, .in1_done,
    .sram_addr, .sram_dq_o, .sram_dq_i, .sram_dq_oe, .sram_ce_n, .sram_we_n, .sram_oe_n,
    .o_valid, .o_ready, .o_data, .o_last, .wr_busy, .n_frames, .drop_cnt, .trunc_cnt);
  sram_model #(.AW(AW)) mem (.clk, .addr(sram_addr), .din(sram_dq_o), .dout(sram_dq_i),
                             .ce_n(sram_ce_n), .we_n(sram_we_n));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // frames out: the transmitter takes a byte about every 8 clocks
  logic [7:0] cur [$];
  logic [7:0] frames [$][$];
  always @(negedge clk) o_ready = reader_on && (($urandom % 8) == 0);
  always @(posedge clk) if (rst_n && o_valid && o_ready) begin
    cur.push_back(o_data);
    if (o_last) begin frames.push_back(cur); cur.delete(); end
  end

  task automatic stream0(input logic [15:0] w [$]);
    foreach (w[i]) begin
      in0_data = w[i]; in0_valid = 1;
      do @(posedge clk); while (!in0_ready);
      #1 in0_valid = 0;
      if ($urandom % 2) @(negedge clk);
    end
    @(negedge clk); in0_done = 1; @(negedge clk); in0_done = 0;
  endtask
  task automatic stream1(input logic [15:0] w [$]);
    foreach (w[i]) begin
      in1_data = w[i]; in1_valid = 1;
      do @(posedge clk); while (!in1_ready);
      #1 in1_valid = 0;
    end
    @(negedge clk); in1_done = 1; @(negedge clk); in1_done = 0;
  endtask

  // runs one event; returns the frame expected for it
  task automatic event_run(input mode_e m, input int n0, input int n1, output logic [7:0] exp_f [$]);
    logic [15:0] w0 [$], w1 [$];
    int pay, keep;
    for (int i = 0; i < n0; i++) w0.push_back(16'($urandom));
    for (int i = 0; i < n1; i++) w1.push_back(16'($urandom));
    trig_num++;
    ev_mode = m;
    @(negedge clk); ev_start = 1; @(negedge clk); ev_start = 0;
    fork stream0(w0); stream1(w1); join
    while (wr_busy) @(negedge clk);
    keep = n0 + n1;
    if (m == MODE_CMP && 2 * keep > MAXPAY) keep = MAXPAY / 2;
    pay = 2 * keep;
    exp_f.delete();
    exp_f.push_back(8'(pay >> 8)); exp_f.push_back(8'(pay));
    exp_f.push_back(trig_num[15:8]); exp_f.push_back(trig_num[7:0]);
    exp_f.push_back({(keep < n0 + n1) ? 1'b1 : 1'b0, 5'b0, 2'(m)});
    exp_f.push_back(8'h5A);
    for (int i = 0; i < keep; i++) begin
      logic [15:0] w;
      w = (i < n0) ? w0[i] : w1[i - n0];
      exp_f.push_back(w[15:8]); exp_f.push_back(w[7:0]);
    end
  endtask

  task automatic cmp_frame(input int k, input logic [7:0] e [$], input string what);
    checks++;
    if (k >= frames.size()) begin failures++; $display("FAIL: %s missing", what); return; end
    if (frames[k] != e) begin
      failures++;
      $display("FAIL: %s: %0d bytes, expected %0d", what, frames[k].size(), e.size());
    end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [7:0] e0 [$], e1 [$], e2 [$], e3 [$];
    logic [7:0] keep_f [$][$];
    int base;
    #12 rst_n = 1;
    repeat (3) @(negedge clk);
    event_run(MODE_RAW, 10, 7, e0);
    event_run(MODE_CMP, 30, 12, e1);          // over the byte limit: truncated
    event_run(MODE_PED, 0, 0, e2);            // no payload
    event_run(MODE_CMP, 5, 3, e3);
    repeat (3000) @(negedge clk);
    check(frames.size() == 4, $sformatf("%0d frames", frames.size()));
    cmp_frame(0, e0, "raw frame");
    cmp_frame(1, e1, "truncated frame");
    cmp_frame(2, e2, "empty frame");
    cmp_frame(3, e3, "compressed frame");
    check(trunc_cnt == 1, "truncation counted");
    check(n_frames == 0, "buffer drained");
    // overflow: stop the reader and keep writing 200-byte raw events into a 1 KB ring
    reader_on = 0;
    base = frames.size();
    for (int k = 0; k < 7; k++) begin
      logic [7:0] e [$];
      event_run(MODE_RAW, 50, 47, e);
      if (k < 5) keep_f.push_back(e);
    end
    check(drop_cnt == 2, $sformatf("dropped events %0d, expected 2", drop_cnt));
    check(n_frames == 5, $sformatf("frames held %0d, expected 5", n_frames));
    reader_on = 1;
    repeat (20000) @(negedge clk);
    check(frames.size() == base + 5, "held frames all sent");
    for (int k = 0; k < 5; k++) cmp_frame(base + k, keep_f[k], $sformatf("held frame %0d", k));
    // after the overflow the ring works again
    event_run(MODE_RAW, 4, 4, e0);
    repeat (2000) @(negedge clk);
    cmp_frame(base + 5, e0, "frame after overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
