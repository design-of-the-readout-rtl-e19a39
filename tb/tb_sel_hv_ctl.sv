// tb_sel_hv_ctl: over-current trips of the SEL protection (one-second power-off, then on),
// per-group thresholds, samples ignored while off, trip counters, the HV enable defaults and
// the main/backup rule, and the scrubbing of an upset threshold copy.
module tb_sel_hv_ctl;
  localparam int NG = 8, OFF = 500;
  logic clk = 0, rst_n = 0, cur_valid = 0, thr_we = 0, hv_we = 0, seu_err;
  logic [NG-1:0][11:0] cur = '0;
  logic [3:0] thr_grp = '0, hv_val = '0;
  logic [11:0] thr_val = '0;
  logic [NG-1:0] ldo_en;
  logic [1:0] hv_en_a, hv_en_b;
  logic [NG-1:0][7:0] sel_cnt;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  sel_hv_ctl #(.N_GRP(NG), .OFF_CLKS(OFF), .DEF_THR(12'd3500)) dut (
    .clk, .rst_n, .cur, .cur_valid, .thr_we, .thr_grp, .thr_val, .hv_we, .hv_val, .ldo_en,
    .hv_en_a, .hv_en_b, .sel_cnt, .seu_err);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic sample(input logic [NG-1:0][11:0] c);
    cur = c; @(negedge clk); cur_valid = 1; @(negedge clk); cur_valid = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [NG-1:0][11:0] c;
    int t0;
    #12 rst_n = 1;
    @(negedge clk);
    check(ldo_en == '1, "all groups powered at reset");
    check(hv_en_a == 2'b11 && hv_en_b == 2'b00, "HV main modules on, backups off at reset");
    // group 2 threshold lowered
    thr_grp = 2; thr_val = 12'd1000; thr_we = 1; @(negedge clk); thr_we = 0;
    for (int g = 0; g < NG; g++) c[g] = 12'd900;
    sample(c);
    check(ldo_en == '1, "currents below thresholds");
    c[2] = 12'd1001; c[5] = 12'd3000;
    sample(c);
    check(ldo_en == ~(NG'(1) << 2), "group 2 tripped, group 5 below default threshold");
    check(sel_cnt[2] == 1, "trip counted");
    t0 = $time;
    // samples while off are ignored
    sample(c);
    check(sel_cnt[2] == 1, "no second trip while off");
    while (!ldo_en[2]) @(negedge clk);
    check(($time - t0) / 10 >= OFF - 1 && ($time - t0) / 10 <= OFF + 1,
          $sformatf("off for %0d clocks", ($time - t0) / 10));
    c[2] = 12'd500; c[7] = 12'd4000;
    sample(c);
    check(ldo_en == ~(NG'(1) << 7) && sel_cnt[7] == 1 && sel_cnt[2] == 1, "group 7 trips at default");
    // HV: switch group 0 to its backup, ask for both on group 1
    hv_val = 4'b0110; hv_we = 1; @(negedge clk); hv_we = 0;
    @(negedge clk);
    check(hv_en_a == 2'b10 && hv_en_b == 2'b01, "group 0 on backup, group 1 main only");
    // upset one threshold copy
    dut.g_thr[2].u_thr.r1 = 12'hFFF;
    #1 check(seu_err, "upset flagged");
    @(negedge clk);
    check(!seu_err && dut.thr[2] == 12'd1000, "upset scrubbed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
