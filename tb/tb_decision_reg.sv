// tb_decision_reg: random rst/clear/en/d into the 1-bit decision register,
// compared every clock with a one-line model (clear or reset to 0, else load
// d when en, else hold).
module tb_decision_reg;
  logic clk = 1'b0, rst, clear, en, d, q;
  logic model;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  decision_reg dut (.clk, .rst, .clear, .en, .d, .q);

  initial begin
    rst = 1; clear = 0; en = 0; d = 0;
    @(posedge clk); #1 rst = 0; model = 0;
    for (int n = 0; n < 3000; n++) begin
      rst   = ($urandom_range(0, 49) == 0);
      clear = ($urandom_range(0, 9) == 0);
      en    = ($urandom_range(0, 2) == 0);
      d     = 1'($urandom);
      @(posedge clk);
      if (rst || clear) model = 0;
      else if (en) model = d;
      #1;
      checks++;
      if (q !== model) begin
        failures++;
        if (failures < 10) $display("FAIL step %0d q=%0b exp=%0b", n, q, model);
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
