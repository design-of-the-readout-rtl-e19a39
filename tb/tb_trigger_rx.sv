// tb_trigger_rx: falling-edge triggers on the main and backup lines, glitch rejection, the
// backup selection, and triggers lost while busy.
module tb_trigger_rx;
  logic clk = 0, rst_n = 0, a = 1, b = 1, bus_sel = 0, busy = 0, trig;
  logic [15:0] trig_cnt, lost_cnt;
  int checks = 0, failures = 0, seen = 0;
  always #5 clk = ~clk;
  trigger_rx #(.MIN_LOW(4)) dut (.clk, .rst_n, .trig_a_n(a), .trig_b_n(b), .bus_sel, .busy,
                                 .trig, .trig_cnt, .lost_cnt);
  always @(posedge clk) if (rst_n && trig) seen++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // low pulse of n clocks on line a (sel=0) or b (sel=1); returns clocks to the trig pulse
  task automatic pulse(input bit line, input int n, output int lat);
    int t0;
    @(negedge clk);
    if (line) b = 0; else a = 0;
    t0 = $time;
    lat = -1;
    for (int i = 0; i < n + 8; i++) begin
      if (i == n) begin a = 1; b = 1; end
      @(negedge clk);
      if (trig && lat < 0) lat = ($time - t0) / 10;
    end
    a = 1; b = 1;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int lat, s0;
    #12 rst_n = 1;
    repeat (3) @(negedge clk);
    s0 = seen; pulse(0, 20, lat);
    check(seen == s0 + 1, "main line trigger");
    check(lat == 6, $sformatf("latency %0d, expected MIN_LOW+2", lat));
    s0 = seen; pulse(0, 2, lat);
    check(seen == s0, "2-clock glitch rejected");
    s0 = seen; pulse(1, 20, lat);
    check(seen == s0, "backup line ignored while main selected");
    bus_sel = 1;
    s0 = seen; pulse(1, 20, lat);
    check(seen == s0 + 1, "backup line trigger");
    s0 = seen; pulse(0, 20, lat);
    check(seen == s0, "main line ignored while backup selected");
    busy = 1;
    s0 = seen; pulse(1, 20, lat);
    check(seen == s0 && lost_cnt == 1, "trigger while busy lost and counted");
    busy = 0;
    // a long low level fires only once
    s0 = seen; pulse(1, 200, lat);
    check(seen == s0 + 1, "long low fires once");
    check(trig_cnt == 3, $sformatf("trigger count %0d", trig_cnt));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
