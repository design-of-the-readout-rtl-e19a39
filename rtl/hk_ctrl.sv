// hk_ctrl: analog house-keeping acquisition of the slave FPGA (House_Keeping data).
//
// The TRB monitors its supply currents, the currents of the SEL-protected LDO groups, the HV
// bias voltages and its NTC temperatures through two house-keeping ADCs behind analog
// multiplexers (design description: currents every second, HV voltages every 16 seconds). The
// ADC type is not given; this design assumes the same 16-clock serial frame as the AD7476
// (4 leading zeros, 12 bits, MSB first), both ADCs converting together under one chip-select
// and clock with a shared 4-bit multiplexer address. Channel map (an assumption):
//   ADC-1  0..5 VA140 SEL groups, 6..7 SADC SEL groups
//   ADC-2  0..3 supplies +3.4V -3.3V +5.7V +12V, 4..5 HV groups, 6..9 NTC thermistors
// Once per second (TICK clocks) the module scans mux positions 0..N_MUX-1; positions set in
// SLOW_MASK (the HV voltages) are converted only every SLOW_DIV-th second. Each conversion waits
// SETTLE clocks after the multiplexer moves and takes 34 clocks.
// Outputs: the latest value of every channel, a pulse scan_done after each scan (used for SEL
// protection), and a seconds counter.
module hk_ctrl #(
  parameter int unsigned TICK      = 20_000_000,
  parameter int unsigned N_MUX     = 10,
  parameter logic [15:0] SLOW_MASK = 16'h0030,
  parameter int unsigned SLOW_DIV  = 16,
  parameter int unsigned SETTLE    = 40
) (
  input  logic                         clk,
  input  logic                         rst_n,
  output logic                         adc_cs_n,
  output logic                         adc_sclk,
  output logic [3:0]                   mux,
  input  logic [1:0]                   adc_sdata,
  output logic [1:0][N_MUX-1:0][11:0]  val,
  output logic                         scan_done,
  output logic [15:0]                  seconds
);
  typedef enum logic [1:0] {IDLE, SETL, CONV, NEXT} state_e;
  state_e      state;
  logic [$clog2(TICK)-1:0] tcnt;
  logic [5:0]  cnt;
  logic [1:0][15:0] sh;
  logic        slow;

  // skip a slow channel on a fast second
  function automatic logic skip(input logic [3:0] m, input logic slow_sec);
    return SLOW_MASK[m] && !slow_sec;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; tcnt <= '0; cnt <= '0; sh <= '0; slow <= 1'b0; mux <= '0;
      adc_cs_n <= 1'b1; adc_sclk <= 1'b1; val <= '0; scan_done <= 1'b0; seconds <= '0;
    end else begin
      scan_done <= 1'b0;
      if (tcnt == $bits(tcnt)'(TICK - 1)) tcnt <= '0;
      else tcnt <= tcnt + 1'b1;
      unique case (state)
        IDLE: if (tcnt == $bits(tcnt)'(TICK - 1)) begin
          seconds <= seconds + 1'b1;
          slow    <= (16'(seconds % SLOW_DIV) == 16'(SLOW_DIV - 1));
          mux     <= '0; cnt <= '0; state <= SETL;
        end
        SETL: if (skip(mux, slow)) state <= NEXT;
              else if (cnt == 6'(SETTLE - 1)) begin cnt <= '0; adc_cs_n <= 1'b0; state <= CONV; end
              else cnt <= cnt + 1'b1;
        CONV: begin
          cnt <= cnt + 1'b1;
          if (cnt <= 6'd32) adc_sclk <= ~cnt[0];
          if (cnt[0] && cnt <= 6'd31)
            for (int i = 0; i < 2; i++) sh[i] <= {sh[i][14:0], adc_sdata[i]};
          if (cnt == 6'd32) adc_cs_n <= 1'b1;
          if (cnt == 6'd33) begin
            cnt <= '0;
            for (int i = 0; i < 2; i++) val[i][mux] <= sh[i][11:0];
            state <= NEXT;
          end
        end
        NEXT: if (mux == 4'(N_MUX - 1)) begin scan_done <= 1'b1; state <= IDLE; end
              else begin mux <= mux + 1'b1; cnt <= '0; state <= SETL; end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
