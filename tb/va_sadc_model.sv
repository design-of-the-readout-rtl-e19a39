// va_sadc_model: behavioural model of N VA140 chains, each read through one AD7476 ADC.
//
// Not synthesizable logic: it stands for the front-end hybrids and the serial ADCs. HOLDB
// falling freezes an event (the event counter advances); a CKB rising edge with SHIFT_IN high
// selects strip 0, without it the next strip. CS falling starts a conversion of the selected
// strip: the ADC puts out a leading zero and shifts one more bit out after each SCLK falling
// edge, 4 zeros then 12 bits MSB first. The sample values come from tb_stk_ref_pkg::adc_value.
module va_sadc_model
  import tb_stk_ref_pkg::*;
#(
  parameter int N       = 24,
  parameter int N_STRIP = 192,
  parameter int VA_CH   = 64,
  parameter int ADC_OFS = 0      // number of the first ADC, for the slave FPGA's group
) (
  input  logic         holdb,
  input  logic         ckb,
  input  logic         shift_in,
  input  logic         cs_n,
  input  logic         sclk,
  output logic [N-1:0] sdata
);
  int ev = -1;
  int strip = 0;
  logic [N-1:0][15:0] sh;

  initial sdata = '0;
  always @(negedge holdb) ev++;
  always @(posedge ckb) strip = shift_in ? 0 : strip + 1;
  always @(negedge cs_n) begin
    for (int i = 0; i < N; i++) begin
      sh[i] = 16'(adc_value(ev, i + ADC_OFS, strip, N_STRIP, VA_CH));
      sdata[i] = sh[i][15];
    end
  end
  always @(negedge sclk) if (!cs_n) begin
    for (int i = 0; i < N; i++) begin
      sh[i] = sh[i] << 1;
      sdata[i] = sh[i][15];
    end
  end
endmodule
