// sel_hv_ctl: single-event-latchup protection and HV control of the slave FPGA (SEL&HV_Ctl).
//
// SEL: the VA140 chips (24 per group of 4 ladders, 6 groups) and the AD7476 ADCs (24 per group,
// 2 groups) are powered by LDO groups whose currents are sampled every second. When a group's
// current exceeds its configurable threshold the group's LDO is switched off for one second and
// then on again (design description). Here the check runs on every house-keeping scan
// (cur_valid); samples of a group that is off are ignored. Each trip is counted per group.
// HV: each of the two HV-generator groups has a main module A ("default on") and a cold-backup
// module B, each with its own enable (Fig. 8 of the design description). Module A starts
// enabled. A command sets the enables; this design never turns on B together with A.
// Thresholds and HV enables are held in triple-redundant registers (tmr_reg). Threshold reset
// value DEF_THR and the 12-bit current scale are assumptions. seu_err reports a disagreement
// between copies; like tmr_reg's err, a synthesis tool may reduce it to 0 unless the copies are kept.
// Timing: ldo_en falls one clock after the scan that saw the over-current and rises OFF_CLKS
// clocks later.
module sel_hv_ctl #(
  parameter int unsigned N_GRP    = 8,
  parameter int unsigned OFF_CLKS = 20_000_000,   // one second at 20 MHz
  parameter logic [11:0] DEF_THR  = 12'd3500
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [N_GRP-1:0][11:0]      cur,
  input  logic                        cur_valid,
  input  logic                        thr_we,
  input  logic [3:0]                  thr_grp,
  input  logic [11:0]                 thr_val,
  input  logic                        hv_we,
  input  logic [3:0]                  hv_val,      // {grp1 B, grp1 A, grp0 B, grp0 A}
  output logic [N_GRP-1:0]            ldo_en,
  output logic [1:0]                  hv_en_a,
  output logic [1:0]                  hv_en_b,
  output logic [N_GRP-1:0][7:0]       sel_cnt,
  output logic                        seu_err
);
  logic [N_GRP-1:0][11:0] thr;
  logic [N_GRP-1:0]       terr;
  logic [3:0]             hv_q;
  logic                   hv_err;

  for (genvar g = 0; g < N_GRP; g++) begin : g_thr
    tmr_reg #(.WIDTH(12), .RESET_VAL(DEF_THR)) u_thr (
      .clk, .rst_n, .we(thr_we && thr_grp == 4'(g)), .d(thr_val), .q(thr[g]), .err(terr[g]));
  end
  tmr_reg #(.WIDTH(4), .RESET_VAL(4'b0101)) u_hv (
    .clk, .rst_n, .we(hv_we), .d(hv_val), .q(hv_q), .err(hv_err));

  assign seu_err = |terr || hv_err;
  assign hv_en_a = {hv_q[2], hv_q[0]};
  assign hv_en_b = {hv_q[3] & ~hv_q[2], hv_q[1] & ~hv_q[0]};

  logic [N_GRP-1:0][$clog2(OFF_CLKS+1)-1:0] tmr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ldo_en <= '1; tmr <= '0; sel_cnt <= '0;
    end else begin
      for (int g = 0; g < N_GRP; g++) begin
        if (!ldo_en[g]) begin
          if (tmr[g] == $bits(tmr[g])'(OFF_CLKS - 1)) ldo_en[g] <= 1'b1;
          else tmr[g] <= tmr[g] + 1'b1;
        end else if (cur_valid && cur[g] > thr[g]) begin
          ldo_en[g]  <= 1'b0;
          tmr[g]     <= '0;
          sel_cnt[g] <= sel_cnt[g] + 1'b1;
        end
      end
    end
  end
endmodule
