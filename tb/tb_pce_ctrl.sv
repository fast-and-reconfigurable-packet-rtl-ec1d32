// tb_pce_ctrl: drives random START and DONE into the controller and checks
// its seven control outputs every clock against an independent model of the
// idle -> data_in -> process (loop until DONE) -> stop -> idle sequence.
// Also checks the sequence timing of one inspection with a known number of
// processing clocks, and counts how often each state was visited.
module tb_pce_ctrl;
  logic clk = 1'b0, rst, start, done;
  logic load_fields, pc_start, run, dec_clear, dec_en, out_clear, publish;
  int st;  // 0 idle, 1 data_in, 2 process, 3 stop
  int checks = 0, failures = 0;
  int visits[4] = '{0, 0, 0, 0};

  always #5 clk = ~clk;

  pce_ctrl dut (.clk, .rst, .start, .done, .load_fields, .pc_start, .run,
                .dec_clear, .dec_en, .out_clear, .publish);

  task automatic check_outputs();
    logic [6:0] exp, got;
    exp = {(st == 0) && start, st == 1, st == 2, st == 1, (st == 2) && done,
           ((st == 0) && start) || (st == 1) || (st == 2), st == 3};
    got = {load_fields, pc_start, run, dec_clear, dec_en, out_clear, publish};
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL st=%0d start=%0b done=%0b got=%b exp=%b", st, start, done, got, exp);
    end
  endtask

  initial begin
    int t_start, t_pub;
    rst = 1; start = 0; done = 0;
    @(posedge clk); #1 rst = 0; st = 0;
    // directed: START, then 5 processing clocks, the last with DONE
    start = 1; #1 check_outputs(); t_start = 0;
    @(posedge clk); #1 start = 0; st = 1; check_outputs();
    for (int k = 0; k < 5; k++) begin
      @(posedge clk); #1 st = 2; done = (k == 4); #1 check_outputs();
    end
    @(posedge clk); #1 done = 0; st = 3; check_outputs();
    checks++; if (!publish) failures++;  // publish 1 + 1 + 5 clocks after START
    @(posedge clk); #1 st = 0; check_outputs();
    // random
    for (int n = 0; n < 4000; n++) begin
      start = ($urandom_range(0, 3) == 0);
      done  = ($urandom_range(0, 5) == 0);
      rst   = ($urandom_range(0, 199) == 0);
      #1;
      if (!rst) check_outputs();
      visits[st]++;
      @(posedge clk);
      if (rst) st = 0;
      else case (st)
        0: if (start) st = 1;
        1: st = 2;
        2: if (done) st = 3;
        3: st = 0;
      endcase
      #1;
    end
    for (int s = 0; s < 4; s++) if (visits[s] == 0) failures++;
    $display("visits idle=%0d data_in=%0d process=%0d stop=%0d", visits[0], visits[1], visits[2], visits[3]);
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
