// tb_data_process: drives one Data_Process module with synthetic events and compares its output
// with a reference written from the mode definitions: no output and new pedestals after 2^PED_LOG2
// pedestal events; the raw samples in raw mode; in compression mode the clusters found after
// pedestal and common-noise subtraction, with bad channels cut. The output is stalled at random.
// The time from the last sample to done in compression mode is checked against its budget.
module tb_data_process;
  import stk_pkg::*;
  import tb_stk_ref_pkg::*;
  localparam int NA = 2, NS = 128, VC = 64, PL = 2, FID = 1;
  localparam int N = NA * NS;
  localparam logic [11:0] DTHR = 12'd40;

  logic clk = 0, rst_n = 0, start = 0, in_valid = 0, o_ready = 1;
  mode_e mode = MODE_RAW;
  logic [7:0] in_strip = '0;
  logic [NA-1:0][11:0] in_sample = '0;
  logic thr_we = 0;
  logic [13:0] thr_waddr = '0, thr_raddr = '0;
  logic [11:0] thr_wdata = '0, thr_rdata;
  logic o_valid, done, busy, ready, ped_updated, overrun;
  logic [15:0] o_data, n_clusters;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  data_process #(.N_ADC(NA), .N_STRIP(NS), .VA_CH(VC), .PED_LOG2(PL), .FPGA_ID(FID),
                 .DEF_THR(DTHR)) dut (
    .clk, .rst_n, .start, .mode, .in_valid, .in_strip, .in_sample, .thr_we, .thr_waddr,
    .thr_wdata, .thr_raddr, .thr_rdata, .o_valid, .o_ready, .o_data, .done, .busy, .ready,
    .ped_updated, .n_clusters, .overrun);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // output capture with random stalls
  logic [15:0] got [$];
  always @(posedge clk) if (rst_n && o_valid && o_ready) got.push_back(o_data);
  always @(negedge clk) o_ready = ($urandom % 4) != 0;
  int n_pedupd = 0;
  always @(posedge clk) if (rst_n && ped_updated) n_pedupd++;

  int thr_ref [N];
  int ped_ref [N];
  int last_sample_t, done_t;

  task automatic feed(input int ev, input mode_e m);
    got.delete();
    mode = m;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int s = 0; s < NS; s++) begin
      repeat (30) @(negedge clk);
      for (int a = 0; a < NA; a++) in_sample[a] = 12'(adc_value(ev, a, s, NS, VC));
      in_strip = 8'(s); in_valid = 1; @(negedge clk); in_valid = 0;
      last_sample_t = $time;
    end
    while (!done) @(negedge clk);
    done_t = $time;
    @(negedge clk);
  endtask

  // reference compression
  task automatic ref_cmp(input int ev, ref logic [15:0] exp_q [$], output int ncl);
    int sig [N];
    exp_q.delete();
    ncl = 0;
    for (int a = 0; a < NA; a++)
      for (int v = 0; v < NS / VC; v++) begin
        int sum, ng, cn;
        sum = 0; ng = 0;
        for (int s = v * VC; s < (v + 1) * VC; s++) begin
          int i;
          i = a * NS + s;
          if (thr_ref[i] != 4095) begin sum += adc_value(ev, a, s, NS, VC) - ped_ref[i]; ng++; end
        end
        cn = (ng == 0) ? 0 : sum / ng;
        for (int s = v * VC; s < (v + 1) * VC; s++) begin
          int i;
          i = a * NS + s;
          sig[i] = (thr_ref[i] == 4095) ? 0 : adc_value(ev, a, s, NS, VC) - ped_ref[i] - cn;
        end
      end
    for (int a = 0; a < NA; a++) begin
      int s;
      s = 0;
      while (s < NS) begin
        int i;
        i = a * NS + s;
        if (thr_ref[i] != 4095 && sig[i] > thr_ref[i]) begin
          int len;
          len = 0;
          while (s + len < NS && thr_ref[i + len] != 4095 && sig[i + len] > thr_ref[i + len]) len++;
          exp_q.push_back({2'b10, 14'(FID * N + i)});
          exp_q.push_back(16'(len));
          for (int k = 0; k < len; k++) exp_q.push_back(16'(sig[i + k]));
          ncl++;
          s += len;
        end else s++;
      end
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [15:0] exp_q [$];
    int ncl, total_cl;
    #12 rst_n = 1;
    while (!ready) @(negedge clk);
    // thresholds: default everywhere, the hot strip and two more channels masked, one raised
    for (int i = 0; i < N; i++) thr_ref[i] = DTHR;
    thr_ref[10] = 4095;
    for (int c = 0; c < N; c++) if (is_hot(c / NS, c % NS, NS)) thr_ref[c] = 4095;
    thr_ref[NS + 70] = 4095; thr_ref[NS + 3] = 250;
    foreach (thr_ref[i]) if (thr_ref[i] != DTHR) begin
      thr_waddr = 14'(i); thr_wdata = 12'(thr_ref[i]); thr_we = 1; @(negedge clk); thr_we = 0;
    end
    thr_raddr = 14'(NS + 3); #1 check(thr_rdata == 12'd250, "threshold read back");
    thr_raddr = 14'(11);     #1 check(thr_rdata == DTHR, "default threshold");
    // pedestal update: 2^PL events
    for (int ev = 0; ev < (1 << PL); ev++) begin
      feed(ev, MODE_PED);
      check(got.size() == 0, "no output in pedestal mode");
    end
    check(n_pedupd == 1, "pedestals updated once");
    for (int i = 0; i < N; i++) begin
      int s;
      s = 0;
      for (int ev = 0; ev < (1 << PL); ev++) s += adc_value(ev, i / NS, i % NS, NS, VC);
      ped_ref[i] = s >> PL;
      checks++;
      if (dut.ped[i] != 12'(ped_ref[i])) begin
        failures++; $display("FAIL: pedestal %0d = %0d, expected %0d", i, dut.ped[i], ped_ref[i]);
      end
    end
    // raw event
    feed(4, MODE_RAW);
    check(got.size() == N, $sformatf("raw word count %0d", got.size()));
    for (int i = 0; i < N && i < got.size(); i++) begin
      checks++;
      if (got[i] != 16'(adc_value(4, i / NS, i % NS, NS, VC))) begin
        failures++; $display("FAIL: raw word %0d", i);
      end
    end
    // compression events
    total_cl = 0;
    for (int ev = 5; ev < 13; ev++) begin
      int budget;
      feed(ev, MODE_CMP);
      ref_cmp(ev, exp_q, ncl);
      total_cl += ncl;
      check(got.size() == exp_q.size(), $sformatf("event %0d: %0d words, expected %0d",
            ev, got.size(), exp_q.size()));
      for (int k = 0; k < exp_q.size() && k < got.size(); k++) begin
        checks++;
        if (got[k] != exp_q[k]) begin
          failures++; $display("FAIL: event %0d word %0d = %h, expected %h", ev, k, got[k], exp_q[k]);
        end
      end
      check(n_clusters == 16'(ncl), "cluster count");
      // time budget after the last strip: store + 151 per chip + scan + sending (with stalls)
      budget = NA + 2 + (N / VC) * 151 + N + 4 * (exp_q.size() + 2) + 10;
      check((done_t - last_sample_t) / 10 <= budget,
            $sformatf("processing %0d clocks, budget %0d", (done_t - last_sample_t) / 10, budget));
    end
    check(total_cl >= 4, $sformatf("clusters exercised: %0d", total_cl));
    check(!overrun, "no sample overrun");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
