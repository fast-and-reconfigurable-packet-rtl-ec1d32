// program_counter: 8-bit program counter of the rule processor.
//
// Each clock the PC takes either PC+1 (PCPLUS1, the next option at the same
// tree level) or the sub-rule's branch ADDRESS, chosen by sel_decision
// (the sub-rule's JUMP bit or a true comparison). `hold` freezes the PC, which
// is used once a terminal sub-rule is reached so the engine idles on it.
// `rst` and `start` both put the PC back to address 0, where every rule
// program begins. Priority: rst, start, hold, advance.
//
// Interface: address (branch target), sel_decision, hold, start; pc_out
// (PCOUT) addresses the rules memory combinationally.
// Timing: one update per rising clock edge; PC wraps from 255 to 0.
//
// Adder, 2:1 multiplexer, start address 0 and the RESET/START/hold inputs
// follow the published program counter; synchronous clearing and the priority
// order are this design's choices.
module program_counter
  import pce_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              start,
  input  logic              hold,
  input  logic              sel_decision,
  input  logic [ADDR_W-1:0] address,
  output logic [ADDR_W-1:0] pc_out
);

  logic [ADDR_W-1:0] pc_plus1;
  logic [ADDR_W-1:0] pc_in;

  assign pc_plus1 = pc_out + ADDR_W'(1);
  assign pc_in    = sel_decision ? address : pc_plus1;

  always_ff @(posedge clk) begin
    if (rst || start) pc_out <= '0;
    else if (!hold)   pc_out <= pc_in;
  end

endmodule
