// pce_top: packet classification engine (PCE) for a hardware firewall.
//
// The engine decides allow/deny for a packet from its 5-tuple (source and
// destination IP address, source and destination port, protocol). The
// firewall rules are compiled into a tree-shaped program of 24-bit sub-rules
// held in the rules memory; the engine runs that program like a single-cycle
// processor. Every clock it fetches the sub-rule at the PC, routes the
// sub-field named by the sub-rule's SELECTOR to the comparator, compares it
// with the sub-rule's 8-bit constant, and branches to the sub-rule's ADDRESS
// if the comparison holds or JUMP is set, else goes on to PC+1 (the next
// option at the same tree level). A sub-rule with ACTION = 1 ends the
// inspection: the PC holds, bit 19 is taken as the decision, and the final
// compile unit raises FORWARD (finished) with VALID (1 = allow, 0 = deny).
//
// Interface
//   start + header fields : start an inspection; the fields are captured in
//                           the clock START is seen in idle, and may change
//                           afterwards.
//   valid, forward        : result; forward = 1 marks a finished inspection
//                           and stays high, with valid, until the next one
//                           starts (both go low on the edge that samples
//                           START).
//   rule_we/waddr/wdata   : write port of the rules memory for loading a
//                           program (the host side of the firewall).
// Timing: FORWARD rises n + 3 clocks after START is sampled, n being the
// number of sub-rules executed. START is ignored while an inspection runs.
//
// The datapath (field register and 13-way sub-field multiplexer, comparator,
// PC with +1 adder and branch multiplexer, rules memory, 1-bit decision
// register, final compile unit) and the sub-rule format follow the paper's
// architecture; the control sequencing (pce_ctrl) is this design's reading of
// the paper's state diagram. SEL_DECISION is JUMP or COMP_OUT, as the paper
// says branching comes from "jumping procedure or suitable comparison".
module pce_top
  import pce_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 start,
  input  logic [31:0]          src_ip,
  input  logic [31:0]          dst_ip,
  input  logic [15:0]          src_port,
  input  logic [15:0]          dst_port,
  input  logic [7:0]           protocol,
  output logic                 valid,
  output logic                 forward,
  input  logic                 rule_we,
  input  logic [ADDR_W-1:0]    rule_waddr,
  input  logic [SUBRULE_W-1:0] rule_wdata
);

  header_t           hdr_in;
  subrule_t          rule;
  logic [ADDR_W-1:0] pc;
  logic [SUBF_W-1:0] mux_out;
  logic              comp_out;
  logic              sel_decision;
  logic              decision;
  logic              load_fields, pc_start, run;
  logic              dec_clear, dec_en, out_clear, publish;

  assign hdr_in = '{src_ip: src_ip, dst_ip: dst_ip, src_port: src_port,
                    dst_port: dst_port, protocol: protocol};

  pce_ctrl u_ctrl (
    .clk, .rst, .start,
    .done        (rule.action),
    .load_fields, .pc_start, .run,
    .dec_clear, .dec_en, .out_clear, .publish
  );

  subfield_mux u_mux (
    .clk, .rst,
    .load     (load_fields),
    .hdr_in,
    .selector (rule.selector),
    .mux_out
  );

  comparator u_cmp (
    .sel (rule.operation),
    .in1 (rule.header),
    .in2 (mux_out),
    .out (comp_out)
  );

  assign sel_decision = rule.jump | comp_out;

  program_counter u_pc (
    .clk, .rst,
    .start        (pc_start),
    .hold         (!run || rule.action),
    .sel_decision,
    .address      (rule.address),
    .pc_out       (pc)
  );

  rules_memory u_rules (
    .clk,
    .addr  (pc),
    .rules (rule),
    .we    (rule_we),
    .waddr (rule_waddr),
    .wdata (rule_wdata)
  );

  decision_reg u_dec (
    .clk, .rst,
    .clear (dec_clear),
    .en    (dec_en),
    .d     (rule.selector[0]),
    .q     (decision)
  );

  final_compile_unit u_fcu (
    .clk, .rst,
    .clear    (out_clear),
    .en       (publish && rule.action),
    .decision,
    .valid,
    .forward
  );

  // A result is only meaningful with FORWARD: VALID never rises without it.
  a_valid_needs_forward: assert property (@(posedge clk) disable iff (rst)
    valid |-> forward);

endmodule
