// final_compile_unit: produces the engine's VALID and FORWARD outputs.
//
// While an inspection runs, CLEAR holds both outputs at 0. When the engine has
// reached a terminal sub-rule and is told to publish the result (en), the unit
// registers VALID <= DECISION (1 = let the packet through, 0 = discard it) and
// FORWARD <= 1 (an inspection has finished and VALID may be read). Both then
// stay put until the next CLEAR or reset.
//
// Timing: registered; the outputs change on the rising edge after en = 1.
// Priority: rst, clear, en.
//
// Ports (IN = DECISION, EN, CLEAR, CLOCK, VALID, FORWARD) follow the published
// unit; the priority order is this design's choice.
module final_compile_unit (
  input  logic clk,
  input  logic rst,
  input  logic clear,
  input  logic en,
  input  logic decision,
  output logic valid,
  output logic forward
);

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      valid   <= 1'b0;
      forward <= 1'b0;
    end else if (en) begin
      valid   <= decision;
      forward <= 1'b1;
    end
  end

endmodule
