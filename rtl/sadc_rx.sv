// sadc_rx: parallel receiver of the serial ADC data lines of one Data_Process module.
//
// Each FPGA reads 24 AD7476 ADCs that convert at the same time under one chip-select and clock
// (design description). An AD7476 word is 16 bits, MSB first: four leading zeros and the 12-bit
// result (vendor data sheet). The receiver shifts all N lines in on every bit_en from the
// sequencer and, on word_done, presents the N 12-bit results with valid for one clock, tagged
// with the strip number. The four leading bits are checked to be zero; a non-zero leading bit
// sets lead_err with valid (a stuck or upset ADC line).
module sadc_rx #(
  parameter int unsigned N     = 24,
  parameter int unsigned ADC_W = 12
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [N-1:0]              sdata,
  input  logic                      bit_en,
  input  logic                      word_done,
  input  logic [7:0]                strip_in,
  output logic                      valid,
  output logic [7:0]                strip,
  output logic [N-1:0][ADC_W-1:0]   sample,
  output logic                      lead_err
);
  logic [N-1:0][15:0] sh;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh <= '0; valid <= 1'b0; strip <= '0; sample <= '0; lead_err <= 1'b0;
    end else begin
      valid <= 1'b0;
      if (bit_en)
        for (int i = 0; i < N; i++) sh[i] <= {sh[i][14:0], sdata[i]};
      if (word_done) begin
        valid    <= 1'b1;
        strip    <= strip_in;
        lead_err <= 1'b0;
        for (int i = 0; i < N; i++) begin
          sample[i] <= sh[i][ADC_W-1:0];
          if (sh[i][15:ADC_W] != '0) lead_err <= 1'b1;
        end
      end
    end
  end
endmodule
