// rules_memory: instruction memory of the rule processor.
//
// Holds DEPTH 24-bit sub-rules. The read port is asynchronous: the word at
// `addr` (the PC) appears on `rules` in the same cycle, which is what lets the
// engine fetch, compare and branch on one sub-rule per clock, like a
// single-cycle processor. A synchronous write port (we/waddr/wdata) loads a
// rule program; it is a plain loading path for a host, not a rule-update
// mechanism.
//
// Power-up contents: the four example words published for the engine at
// addresses 0..3 (three protocol checks branching to 4, 36 and 84, then
// "deny"), and the terminal "deny" word 24'h000001 everywhere else. An
// unloaded engine therefore denies every packet.
//
// Interface: addr/rules (8-bit address, 24-bit sub-rule), write port.
// Timing: read combinational; write on the rising edge with we = 1.
//
// Depth (8-bit address), width (24 bits) and the example words follow the
// paper; the write port and the fill value are this design's choices.
module rules_memory
  import pce_pkg::*;
#(
  parameter int unsigned DEPTH = 2**ADDR_W
) (
  input  logic                 clk,
  input  logic [ADDR_W-1:0]    addr,
  output subrule_t             rules,
  input  logic                 we,
  input  logic [ADDR_W-1:0]    waddr,
  input  logic [SUBRULE_W-1:0] wdata
);

  // Terminal sub-rule with decision 0: the fill value.
  localparam subrule_word_t DENY_WORD = 24'h000001;

  subrule_word_t mem [DEPTH];

  initial begin
    for (int unsigned i = 0; i < DEPTH; i++) mem[i] = DENY_WORD;
    mem[0] = 24'b0_0000_11_00000001_00000100_0;  // PR_0 == 1  -> 4
    mem[1] = 24'b0_0000_11_00010001_00100100_0;  // PR_0 == 17 -> 36
    mem[2] = 24'b0_0000_11_00001100_01010100_0;  // PR_0 == 12 -> 84
    mem[3] = 24'b0_0000_00_00000000_00000000_1;  // deny
  end

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rules = subrule_t'(mem[addr]);

endmodule
