// tmr_reg: triple modular redundant register for configuration state.
//
// Three copies of the register are written together; the output is the bitwise majority of the
// three. Every clock each copy is rewritten with the voted value (scrubbing), so a single upset
// in one copy is outvoted at once and repaired on the next edge. The design description names
// TMR as its SEU mitigation for flip-flops; the scrubbing and the error flag are this design's
// own choices.
// Interface: we/d write all copies; q is the voted value, valid one cycle after the write.
// err pulses for one cycle whenever the copies disagree.
// Synthesis: the three copies are logically identical, so a netlist optimiser may merge them and
// reduce err to a constant 0. An upset is a physical event the logic cannot express. A real build
// must keep the copies apart (keep attributes or the FPGA tool's TMR option); err stays as the
// upset monitor for simulation and for such builds.
module tmr_reg #(
  parameter int unsigned WIDTH = 8,
  parameter logic [WIDTH-1:0] RESET_VAL = '0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             we,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q,
  output logic             err
);
  logic [WIDTH-1:0] r0, r1, r2;

  assign q   = (r0 & r1) | (r1 & r2) | (r0 & r2);
  assign err = (r0 != r1) || (r1 != r2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r0 <= RESET_VAL; r1 <= RESET_VAL; r2 <= RESET_VAL;
    end else if (we) begin
      r0 <= d; r1 <= d; r2 <= d;
    end else begin
      r0 <= q; r1 <= q; r2 <= q;
    end
  end
endmodule
