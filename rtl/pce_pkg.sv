// pce_pkg: types and constants shared by the packet classification engine.
//
// A rule program is a list of 24-bit sub-rules. Each sub-rule names one 8-bit
// sub-field of the packet header, a comparison against an 8-bit constant and a
// branch target; a terminal sub-rule (ACTION = 1) ends the inspection and
// carries the allow/deny decision.
//
// Bit layout of a sub-rule, MSB to LSB (field order and widths as published):
//   [23]    JUMP      unconditional branch to ADDRESS
//   [22:19] SELECTOR  which sub-field the comparator sees (see sel_e)
//   [18:17] OPERATION comparison criterion (see op_e)
//   [16:9]  HEADER    8-bit constant compared with the sub-field
//   [8:1]   ADDRESS   branch target
//   [0]     ACTION    terminal sub-rule: stop and produce the result
// In a terminal sub-rule, bit 19 (the SELECTOR's LSB) is the decision:
// 1 = allow, 0 = deny, so 24'h000001 is "deny". The all-zero word is not
// terminal: it compares nothing and falls through to the next address.
//
// The selector numbering follows the order of the sub-field multiplexer
// inputs; the operation encoding and the use of bit 19 as decision are this
// design's reading of the architecture drawing, not stated numerically.
package pce_pkg;

  localparam int unsigned SUBRULE_W = 24;  // sub-rule width
  localparam int unsigned ADDR_W    = 8;   // rules memory address width
  localparam int unsigned SUBF_W    = 8;   // sub-field width
  localparam int unsigned SEL_W     = 4;   // sub-field selector width

  // Sub-field selector values, in multiplexer input order.
  typedef enum logic [SEL_W-1:0] {
    SEL_PR_0 = 4'd0,
    SEL_SA_1 = 4'd1, SEL_SA_2 = 4'd2, SEL_SA_3 = 4'd3, SEL_SA_4 = 4'd4,
    SEL_DA_1 = 4'd5, SEL_DA_2 = 4'd6, SEL_DA_3 = 4'd7, SEL_DA_4 = 4'd8,
    SEL_SP_1 = 4'd9, SEL_SP_2 = 4'd10,
    SEL_DP_1 = 4'd11, SEL_DP_2 = 4'd12
  } sel_e;

  // Comparison criteria. The result is "sub-field <op> constant".
  typedef enum logic [1:0] {
    OP_NONE = 2'b00,  // never true: the sub-rule falls through (or JUMPs)
    OP_GT   = 2'b01,  // sub-field >  constant
    OP_LT   = 2'b10,  // sub-field <  constant
    OP_EQ   = 2'b11   // sub-field == constant
  } op_e;

  // A sub-rule as a raw memory word, and the same word with its fields named.
  typedef logic [SUBRULE_W-1:0] subrule_word_t;

  typedef struct packed {
    logic              jump;
    logic [SEL_W-1:0]  selector;
    op_e               operation;
    logic [SUBF_W-1:0] header;
    logic [ADDR_W-1:0] address;
    logic              action;
  } subrule_t;

  // The five inspected header fields. Byte 1 of a field is its MSB byte.
  typedef struct packed {
    logic [31:0] src_ip;
    logic [31:0] dst_ip;
    logic [15:0] src_port;
    logic [15:0] dst_port;
    logic [7:0]  protocol;
  } header_t;

  // Helpers to build sub-rules (used for the default program and by testbenches).
  function automatic subrule_t cmp_rule(sel_e sel, op_e op, logic [7:0] value,
                                        logic [ADDR_W-1:0] target);
    subrule_t r;
    r = '0;
    r.selector  = sel;
    r.operation = op;
    r.header    = value;
    r.address   = target;
    return r;
  endfunction

  function automatic subrule_t jump_rule(logic [ADDR_W-1:0] target);
    subrule_t r;
    r = '0;
    r.jump    = 1'b1;
    r.address = target;
    return r;
  endfunction

  function automatic subrule_t action_rule(logic allow);
    subrule_t r;
    r = '0;
    r.selector[0] = allow;
    r.action      = 1'b1;
    return r;
  endfunction

endpackage
