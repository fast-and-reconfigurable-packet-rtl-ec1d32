// comparator: 8-bit magnitude comparator with a selectable criterion.
//
// Compares the selected header sub-field (in2, MUX_OUT) with the constant of
// the current sub-rule (in1) and outputs 1 when the criterion chosen by the
// 2-bit `sel` (the sub-rule's OPERATION) holds:
//   OP_GT: in2 >  in1     OP_LT: in2 < in1     OP_EQ: in2 == in1
//   OP_NONE: always 0, so the sub-rule never branches on its comparison.
// Purely combinational.
//
// The ports, widths and the three criteria (greater, less, equal) follow the
// published comparator; the 2-bit code assignment, the direction of the
// comparison (sub-field against constant) and OP_NONE are this design's
// choices. OP_EQ = 2'b11 agrees with the example rule words, whose protocol
// checks use operation 11.
module comparator
  import pce_pkg::*;
(
  input  op_e               sel,
  input  logic [SUBF_W-1:0] in1,
  input  logic [SUBF_W-1:0] in2,
  output logic              out
);

  always_comb begin
    unique case (sel)
      OP_GT:   out = (in2 >  in1);
      OP_LT:   out = (in2 <  in1);
      OP_EQ:   out = (in2 == in1);
      default: out = 1'b0;
    endcase
  end

endmodule
