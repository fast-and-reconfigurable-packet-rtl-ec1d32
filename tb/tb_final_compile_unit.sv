// tb_final_compile_unit: random rst/clear/en/decision into the final compile
// unit; VALID and FORWARD are compared every clock with a model (cleared by
// reset or CLEAR; on EN, VALID takes DECISION and FORWARD goes to 1; else
// both hold).
module tb_final_compile_unit;
  logic clk = 1'b0, rst, clear, en, decision, valid, forward;
  logic m_valid, m_forward;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  final_compile_unit dut (.clk, .rst, .clear, .en, .decision, .valid, .forward);

  initial begin
    rst = 1; clear = 0; en = 0; decision = 0;
    @(posedge clk); #1 rst = 0; m_valid = 0; m_forward = 0;
    for (int n = 0; n < 3000; n++) begin
      rst      = ($urandom_range(0, 49) == 0);
      clear    = ($urandom_range(0, 7) == 0);
      en       = ($urandom_range(0, 3) == 0);
      decision = 1'($urandom);
      @(posedge clk);
      if (rst || clear) begin m_valid = 0; m_forward = 0; end
      else if (en) begin m_valid = decision; m_forward = 1; end
      #1;
      checks++;
      if (valid !== m_valid || forward !== m_forward) begin
        failures++;
        if (failures < 10)
          $display("FAIL step %0d valid=%0b/%0b forward=%0b/%0b", n, valid, m_valid, forward, m_forward);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
