// tb_comparator: exhaustive check of the 8-bit criterion comparator.
// All 4 criteria x 256 x 256 operand pairs are applied and the output is
// compared with integer arithmetic done in the testbench.
module tb_comparator;
  import pce_pkg::*;

  logic clk = 1'b0;
  op_e  sel;
  logic [7:0] in1, in2;
  logic out;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  comparator dut (.sel, .in1, .in2, .out);

  function automatic logic expected(int op, int a, int b);
    // a: constant, b: sub-field
    case (op)
      1: return b > a;
      2: return b < a;
      3: return b == a;
      default: return 1'b0;
    endcase
  endfunction

  initial begin
    for (int op = 0; op < 4; op++)
      for (int a = 0; a < 256; a++)
        for (int b = 0; b < 256; b++) begin
          sel = op_e'(op); in1 = 8'(a); in2 = 8'(b);
          #1;
          checks++;
          if (out !== expected(op, a, b)) begin
            failures++;
            if (failures < 10) $display("FAIL op=%0d in1=%0d in2=%0d out=%0b", op, a, b, out);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
