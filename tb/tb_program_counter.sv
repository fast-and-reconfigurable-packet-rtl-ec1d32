// tb_program_counter: drives random rst/start/hold/sel_decision/address
// sequences into the program counter and compares pc_out every clock with a
// reference model kept in the testbench (clear to 0 on rst or start, else
// hold, else branch target or PC+1 modulo 256).
module tb_program_counter;
  import pce_pkg::*;

  logic clk = 1'b0, rst, start, hold, sel_decision;
  logic [7:0] address, pc_out;
  int unsigned model;
  int checks = 0, failures = 0;
  int n_jump = 0, n_inc = 0, n_hold = 0, n_wrap = 0;

  always #5 clk = ~clk;

  program_counter dut (.clk, .rst, .start, .hold, .sel_decision, .address, .pc_out);

  initial begin
    rst = 1; start = 0; hold = 0; sel_decision = 0; address = '0;
    @(posedge clk); #1 rst = 0; model = 0;
    checks++; if (pc_out !== 8'd0) failures++;
    for (int n = 0; n < 5000; n++) begin
      rst          = ($urandom_range(0, 99) == 0);
      start        = ($urandom_range(0, 49) == 0);
      hold         = ($urandom_range(0, 4) == 0);
      sel_decision = ($urandom_range(0, 3) == 0);
      address      = 8'($urandom);
      @(posedge clk);
      if (rst || start) model = 0;
      else if (!hold) begin
        if (sel_decision) begin model = address; n_jump++; end
        else begin
          if (model == 255) n_wrap++;
          model = (model + 1) % 256; n_inc++;
        end
      end else n_hold++;
      #1;
      checks++;
      if (pc_out !== 8'(model)) begin
        failures++;
        if (failures < 10) $display("FAIL step %0d pc=%0d exp=%0d", n, pc_out, model);
      end
    end
    // Run straight through the wrap from 255 to 0.
    rst = 0; start = 0; hold = 0; sel_decision = 1; address = 8'd254;
    @(posedge clk); #1 sel_decision = 0;
    @(posedge clk); @(posedge clk); #1;
    checks++; if (pc_out !== 8'd0) failures++;
    n_wrap++;
    if (n_jump == 0 || n_inc == 0 || n_hold == 0) failures++;
    $display("jumps=%0d increments=%0d holds=%0d wraps=%0d", n_jump, n_inc, n_hold, n_wrap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
