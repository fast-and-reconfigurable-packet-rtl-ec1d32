// tb_rules_memory: checks the power-up image of the rules memory (the four
// published example words at 0..3, written here as the published bit strings,
// and the terminal "deny" word 24'h000001 elsewhere), then writes random words to random
// addresses and reads everything back against a shadow copy. Also checks that
// the read port is combinational: a new address gives its word in the same
// cycle.
module tb_rules_memory;
  import pce_pkg::*;

  logic clk = 1'b0, we;
  logic [7:0] addr, waddr;
  logic [23:0] wdata;
  subrule_t rules;
  logic [23:0] shadow [256];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  rules_memory dut (.clk, .addr, .rules, .we, .waddr, .wdata);

  task automatic check_word(int a, logic [23:0] exp);
    addr = 8'(a);
    #1;
    checks++;
    if (rules !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL addr=%0d got=%h exp=%h", a, rules, exp);
    end
  endtask

  initial begin
    we = 0; waddr = '0; wdata = '0; addr = '0;
    for (int i = 0; i < 256; i++) shadow[i] = 24'h000001;
    shadow[0] = 24'b000001100000001000001000;
    shadow[1] = 24'b000001100010001001001000;
    shadow[2] = 24'b000001100001100010101000;
    shadow[3] = 24'b000000000000000000000001;
    #2;
    for (int i = 0; i < 256; i++) check_word(i, shadow[i]);
    // decoded fields of the first example word: protocol == 1 -> 4
    addr = 8'd0; #1;
    checks++;
    if (!(rules.jump == 0 && rules.selector == 4'd0 && rules.operation == OP_EQ &&
          rules.header == 8'd1 && rules.address == 8'd4 && rules.action == 0)) failures++;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      we = 1; waddr = 8'($urandom); wdata = 24'($urandom);
      shadow[waddr] = wdata;
      addr = 8'($urandom);
      @(posedge clk); #1 we = 0;
      check_word(addr, shadow[addr]);
    end
    for (int i = 0; i < 256; i++) check_word(i, shadow[i]);
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
