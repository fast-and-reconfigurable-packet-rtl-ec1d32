// pce_ctrl: high-level state machine of the packet classification engine.
//
//   IDLE    -- wait for START. On the edge where START is seen, the header
//              fields are captured (load_fields), the previous result is
//              cleared and the FSM enters DATA_IN.
//   DATA_IN -- the fields sit in their register; the PC is put back to 0
//              (pc_start) and the decision register is emptied.
//   PROCESS -- one sub-rule is executed per clock (run = 1, outputs held
//              clear). In the same clock the FSM checks DONE, the ACTION bit
//              of the sub-rule being executed; if it is 0 the FSM stays in
//              PROCESS for the next sub-rule, if it is 1 the decision is
//              captured and the FSM goes to STOP.
//   STOP    -- publish: the final compile unit registers VALID and FORWARD
//              (publish = 1); then back to IDLE on its own.
//
// With n sub-rules executed, FORWARD is high n + 3 clocks after the clock in
// which START was sampled.
//
// The states idle, data_in, stop and the loop that repeats inspection until
// DONE follow the published state diagram. The diagram draws the loop as two
// states, process_1 (inspect, outputs cleared) and process_2 (check DONE);
// here both happen in one PROCESS state in the same clock, because the paper
// also has the engine compare one sub-rule with one sub-field every clock.
module pce_ctrl (
  input  logic clk,
  input  logic rst,
  input  logic start,
  input  logic done,         // ACTION bit of the current sub-rule
  output logic load_fields,  // capture header fields
  output logic pc_start,     // put the PC back to address 0
  output logic run,          // PC may advance (unless done)
  output logic dec_clear,    // empty the decision register
  output logic dec_en,       // capture the decision bit
  output logic out_clear,    // hold VALID/FORWARD at 0
  output logic publish       // final compile unit enable
);

  typedef enum logic [1:0] {
    S_IDLE    = 2'd0,
    S_DATA_IN = 2'd1,
    S_PROCESS = 2'd2,
    S_STOP    = 2'd3
  } state_e;

  state_e state, state_d;

  always_comb begin
    state_d = state;
    unique case (state)
      S_IDLE:    if (start) state_d = S_DATA_IN;
      S_DATA_IN: state_d = S_PROCESS;
      S_PROCESS: if (done) state_d = S_STOP;
      S_STOP:    state_d = S_IDLE;
      default:   state_d = S_IDLE;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) state <= S_IDLE;
    else     state <= state_d;
  end

  assign load_fields = (state == S_IDLE) && start;
  assign pc_start    = (state == S_DATA_IN);
  assign run         = (state == S_PROCESS);
  assign dec_clear   = (state == S_DATA_IN);
  assign dec_en      = (state == S_PROCESS) && done;
  assign out_clear   = load_fields || (state == S_DATA_IN) || (state == S_PROCESS);
  assign publish     = (state == S_STOP);

  // The engine publishes exactly once per inspection: STOP lasts one clock.
  a_stop_one_cycle: assert property (@(posedge clk) disable iff (rst)
    (state == S_STOP) |=> (state == S_IDLE));

endmodule
