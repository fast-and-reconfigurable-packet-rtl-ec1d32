// decision_reg: the 1-bit decision register between the rules memory and the
// final compile unit.
//
// When the current sub-rule is terminal (en = ACTION = 1) the register stores
// the sub-rule's decision bit (bit 19: 1 = allow, 0 = deny) and presents it as
// DECISION one clock later. `clear` empties it at the start of an inspection
// so no earlier result can leak into the next one.
//
// Timing: loads on the rising edge with en = 1; clear and rst have priority.
//
// The register, its EN = ACTION connection and its input taken from bit 19
// follow the published engine drawing; the clear input is this design's
// choice.
module decision_reg (
  input  logic clk,
  input  logic rst,
  input  logic clear,
  input  logic en,
  input  logic d,
  output logic q
);

  always_ff @(posedge clk) begin
    if (rst || clear) q <= 1'b0;
    else if (en)      q <= d;
  end

endmodule
