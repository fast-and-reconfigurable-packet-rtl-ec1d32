// tb_pce_top: end-to-end test of the packet classification engine at its
// default size (256-word rules memory, 24-bit sub-rules).
//
// Phase 1, power-up image: without loading anything, packets are classified
// by the four example words held at addresses 0..3 (three protocol checks
// that branch to deny words, then deny).
// Phase 2, example firewall: the four-rule policy below (first match wins,
// default deny) is compiled by hand into a 61-word sub-rule tree, loaded
// through the write port, and fed with random packets biased towards each
// rule. Every result is compared with a direct first-match evaluation of the
// policy.
//     src ip          dst ip         sport  dport  proto  action
//     167.205.3.11    167.205.65.32  25     8080   TCP    allow
//     192.168.*.*     *              80     *      TCP    deny
//     167.205.65.5    *              *      *      UDP    allow
//     *               134.25.5.2     >1023  80     TCP    allow
// Phase 3, random programs: forward-branching random sub-rule programs using
// every operation, jumps and terminal words; each result and its latency are
// compared with an instruction-level interpreter written in this testbench.
//
// In all phases the latency is checked: FORWARD must be high exactly n + 3
// clocks after START is sampled, n being the number of sub-rules the
// interpreter executes. The test also checks that START during an
// inspection is ignored, that changing the inputs after START does not
// change the result, and that reset aborts an inspection. Each mechanism is
// counted and one that never happened counts as a failure.
module tb_pce_top;
  import pce_pkg::*;

  logic clk = 1'b0, rst, start;
  logic [31:0] src_ip, dst_ip;
  logic [15:0] src_port, dst_port;
  logic [7:0]  protocol;
  logic valid, forward;
  logic rule_we;
  logic [7:0] rule_waddr;
  logic [23:0] rule_wdata;

  int checks = 0, failures = 0;
  logic [23:0] prog [256];  // testbench copy of the loaded program

  // mechanism counters
  int n_branch_cmp = 0, n_fallthrough = 0, n_jump = 0;
  int n_gt = 0, n_lt = 0, n_eq = 0;
  int n_allow = 0, n_deny = 0, n_default_deny = 0;
  int n_start_ignored = 0, n_input_change = 0, n_reset_abort = 0, n_loads = 0;
  int rule_hits[5] = '{0, 0, 0, 0, 0};
  longint lat_sum = 0; int lat_cnt = 0, lat_max = 0;

  always #5 clk = ~clk;

  pce_top dut (.clk, .rst, .start, .src_ip, .dst_ip, .src_port, .dst_port,
               .protocol, .valid, .forward, .rule_we, .rule_waddr, .rule_wdata);

  // ---------------------------------------------------------------- helpers
  function automatic logic [7:0] subfield(header_t h, int sel);
    logic [103:0] v;
    v = h;
    if (sel == 0) return h.protocol;
    if (sel >= 1 && sel <= 12) return v[103 - 8*(sel-1) -: 8];
    return 8'h00;
  endfunction

  function automatic logic [23:0] w(logic j, int sel, int op, int val, int tgt, logic act);
    return {j, 4'(sel), 2'(op), 8'(val), 8'(tgt), act};
  endfunction
  function automatic logic [23:0] EQ(int sel, int val, int tgt); return w(0, sel, 3, val, tgt, 0); endfunction
  function automatic logic [23:0] GT(int sel, int val, int tgt); return w(0, sel, 1, val, tgt, 0); endfunction
  function automatic logic [23:0] JMP(int tgt);                  return w(1, 0, 0, 0, tgt, 0); endfunction
  function automatic logic [23:0] ALLOW();                       return w(0, 1, 0, 0, 0, 1); endfunction
  function automatic logic [23:0] DENY();                        return w(0, 0, 0, 0, 0, 1); endfunction

  // Instruction-level interpreter; returns decision, sets steps; counts
  // which mechanisms the program exercised.
  function automatic logic interpret(header_t h, output int steps, input bit count);
    int pc;
    logic [23:0] x;
    logic [7:0] f, k;
    logic hit;
    pc = 0;
    steps = 0;
    while (1) begin
      x = prog[pc];
      f = subfield(h, int'(x[22:19]));
      k = x[16:9];
      steps++;
      if (x[0]) begin
        if (count && !x[19] && pc == 2 && prog[2] == DENY()) n_default_deny++;
        return x[19];
      end
      case (x[18:17])
        2'b01: hit = f > k;
        2'b10: hit = f < k;
        2'b11: hit = f == k;
        default: hit = 1'b0;
      endcase
      if (count && hit) begin
        if (x[18:17] == 2'b01) n_gt++;
        if (x[18:17] == 2'b10) n_lt++;
        if (x[18:17] == 2'b11) n_eq++;
      end
      if (count) begin
        if (x[23]) n_jump++;
        else if (hit) n_branch_cmp++;
        else n_fallthrough++;
      end
      pc = (x[23] || hit) ? int'(x[8:1]) : (pc + 1) % 256;
      if (steps > 1000) return 1'b0;
    end
  endfunction

  task automatic load_program(int n);
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      rule_we = 1; rule_waddr = 8'(a); rule_wdata = (a < n) ? prog[a] : 24'h000001;
    end
    @(negedge clk) rule_we = 0;
    for (int a = n; a < 256; a++) prog[a] = 24'h000001;
    n_loads++;
  endtask

  task automatic drive(header_t h);
    src_ip = h.src_ip; dst_ip = h.dst_ip; src_port = h.src_port;
    dst_port = h.dst_port; protocol = h.protocol;
  endtask

  // Run one inspection and check result and latency. Optionally disturb it.
  task automatic inspect(header_t h, int disturb, output logic result);
    int steps, cycles;
    logic exp;
    exp = interpret(h, steps, 1);
    @(negedge clk);
    drive(h); start = 1;
    @(posedge clk); cycles = 1;
    @(negedge clk);
    start = 0;
    if (disturb == 1) begin  // new inputs after capture must not matter
      drive(header_t'({$urandom, $urandom, $urandom, $urandom}));
      n_input_change++;
    end
    while (!forward && cycles < 400) begin
      if (disturb == 2 && cycles == 2) begin start = 1; n_start_ignored++; end
      else start = 0;
      @(posedge clk); cycles++;
      @(negedge clk);
    end
    start = 0;
    checks++;
    if (!forward || cycles != steps + 3) begin
      failures++;
      if (failures < 10) $display("FAIL latency: forward=%0b cycles=%0d expected %0d", forward, cycles, steps + 3);
    end
    checks++;
    if (valid !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL result: valid=%0b expected %0b (hdr %h)", valid, exp, h);
    end
    if (exp) n_allow++; else n_deny++;
    lat_sum += longint'(cycles); lat_cnt++;
    if (cycles > lat_max) lat_max = cycles;
    // result must stay put while idle
    @(negedge clk);
    checks++;
    if (!(forward && valid === exp)) failures++;
    result = valid;
  endtask

  // Direct evaluation of the example policy (first match, default deny).
  function automatic logic policy(header_t h, output int which);
    if (h.protocol == 6 && h.src_ip == {8'd167, 8'd205, 8'd3, 8'd11} &&
        h.dst_ip == {8'd167, 8'd205, 8'd65, 8'd32} && h.src_port == 25 &&
        h.dst_port == 8080) begin which = 1; return 1; end
    if (h.protocol == 6 && h.src_ip[31:16] == {8'd192, 8'd168} && h.src_port == 80)
      begin which = 2; return 0; end
    if (h.protocol == 17 && h.src_ip == {8'd167, 8'd205, 8'd65, 8'd5})
      begin which = 3; return 1; end
    if (h.protocol == 6 && h.dst_ip == {8'd134, 8'd25, 8'd5, 8'd2} &&
        h.src_port > 1023 && h.dst_port == 80) begin which = 4; return 1; end
    which = 0;
    return 0;
  endfunction

  task automatic build_policy_program();
    for (int a = 0; a < 256; a++) prog[a] = 24'h000001;
    prog[0]  = EQ(0, 6, 12);      // TCP -> 12
    prog[1]  = EQ(0, 17, 3);      // UDP -> 3
    prog[2]  = DENY();            // any other protocol
    // UDP: src ip 167.205.65.5 -> allow
    prog[3]  = EQ(1, 167, 5);  prog[4]  = DENY();
    prog[5]  = EQ(2, 205, 7);  prog[6]  = DENY();
    prog[7]  = EQ(3, 65, 9);   prog[8]  = DENY();
    prog[9]  = EQ(4, 5, 11);   prog[10] = DENY();
    prog[11] = ALLOW();
    // TCP: source address level
    prog[12] = EQ(1, 167, 15);
    prog[13] = EQ(1, 192, 39);
    prog[14] = JMP(46);
    prog[15] = EQ(2, 205, 17); prog[16] = JMP(46);
    prog[17] = EQ(3, 3, 19);   prog[18] = JMP(46);
    prog[19] = EQ(4, 11, 21);  prog[20] = JMP(46);
    // src = 167.205.3.11: rule 1 or rule 4, split on DA_1
    prog[21] = EQ(5, 167, 24);
    prog[22] = EQ(5, 134, 48);
    prog[23] = DENY();
    prog[24] = EQ(6, 205, 26); prog[25] = DENY();
    prog[26] = EQ(7, 65, 28);  prog[27] = DENY();
    prog[28] = EQ(8, 32, 30);  prog[29] = DENY();
    prog[30] = EQ(9, 0, 32);   prog[31] = DENY();     // sport 25
    prog[32] = EQ(10, 25, 34); prog[33] = DENY();
    prog[34] = EQ(11, 31, 36); prog[35] = DENY();     // dport 8080 = 0x1F90
    prog[36] = EQ(12, 144, 38); prog[37] = DENY();
    prog[38] = ALLOW();
    // src = 192.168.*.*: rule 2 (sport 80 -> deny) else rule 4
    prog[39] = EQ(2, 168, 41); prog[40] = JMP(46);
    prog[41] = EQ(9, 0, 43);   prog[42] = JMP(46);
    prog[43] = EQ(10, 80, 45); prog[44] = JMP(46);
    prog[45] = DENY();
    // rule 4: dst 134.25.5.2, sport > 1023 (SP_1 > 3), dport 80
    prog[46] = EQ(5, 134, 48); prog[47] = DENY();
    prog[48] = EQ(6, 25, 50);  prog[49] = DENY();
    prog[50] = EQ(7, 5, 52);   prog[51] = DENY();
    prog[52] = EQ(8, 2, 54);   prog[53] = DENY();
    prog[54] = GT(9, 3, 56);   prog[55] = DENY();
    prog[56] = EQ(11, 0, 58);  prog[57] = DENY();
    prog[58] = EQ(12, 80, 60); prog[59] = DENY();
    prog[60] = ALLOW();
  endtask

  function automatic header_t policy_packet();
    header_t h;
    h = header_t'({$urandom, $urandom, $urandom, $urandom});
    case ($urandom_range(0, 5))
      0: h = '{src_ip: {8'd167, 8'd205, 8'd3, 8'd11}, dst_ip: {8'd167, 8'd205, 8'd65, 8'd32},
               src_port: 16'd25, dst_port: 16'd8080, protocol: 8'd6};
      1: begin h.src_ip[31:16] = {8'd192, 8'd168}; h.src_port = 16'd80; h.protocol = 8'd6; end
      2: begin h.src_ip = {8'd167, 8'd205, 8'd65, 8'd5}; h.protocol = 8'd17; end
      3: begin h.dst_ip = {8'd134, 8'd25, 8'd5, 8'd2}; h.src_port = 16'($urandom_range(1000, 65535));
               h.dst_port = 16'd80; h.protocol = 8'd6;
               if ($urandom_range(0, 1) != 0) h.src_ip = {8'd192, 8'd168, 8'($urandom), 8'($urandom)};
               if ($urandom_range(0, 2) == 0) h.src_ip = {8'd167, 8'd205, 8'd3, 8'd11}; end
      4: h.protocol = ($urandom_range(0, 1) != 0) ? 8'd6 : 8'd17;
      default: ;
    endcase
    // perturb one byte now and then so near-misses are exercised
    if ($urandom_range(0, 3) == 0) begin
      logic [103:0] v = h;
      int b = $urandom_range(0, 12);
      v[8*b +: 8] = v[8*b +: 8] ^ 8'(1 << $urandom_range(0, 7));
      h = header_t'(v);
    end
    return h;
  endfunction

  // Random forward-branching program: always terminates.
  task automatic build_random_program(int n);
    for (int a = 0; a < 256; a++) prog[a] = 24'h000001;
    for (int a = 0; a < n - 1; a++) begin
      int kind = $urandom_range(0, 9);
      int tgt = $urandom_range(a + 1, n - 1);
      if (kind == 0)      prog[a] = w(0, $urandom_range(0, 1), 0, 0, 0, 1);      // terminal
      else if (kind == 1) prog[a] = JMP(tgt);
      else                prog[a] = w(0, $urandom_range(0, 15), $urandom_range(0, 3),
                                      $urandom_range(0, 255), tgt, 0);
      // bits the action word does not use are random: must be ignored
      if (kind == 0) prog[a][18:1] = 18'($urandom);
    end
    prog[n - 1] = w(0, $urandom_range(0, 1), 0, 0, 0, 1);
  endtask

  // ------------------------------------------------------------------ test
  initial begin
    header_t h;
    logic r;
    int which, steps;
    rst = 1; start = 0; rule_we = 0; rule_waddr = '0; rule_wdata = '0;
    drive('0);
    // Testbench copy of the power-up image
    for (int a = 0; a < 256; a++) prog[a] = 24'h000001;
    prog[0] = 24'b000001100000001000001000;
    prog[1] = 24'b000001100010001001001000;
    prog[2] = 24'b000001100001100010101000;
    prog[3] = 24'b000000000000000000000001;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    checks++; if (forward !== 1'b0 || valid !== 1'b0) failures++;

    // Phase 1: power-up image
    for (int p = 0; p < 4; p++) begin
      h = header_t'({$urandom, $urandom, $urandom, $urandom});
      h.protocol = (p == 0) ? 8'd1 : (p == 1) ? 8'd17 : (p == 2) ? 8'd12 : 8'd6;
      inspect(h, 0, r);
      checks++; if (r !== 1'b0) failures++;
    end

    // Phase 2: example policy
    build_policy_program();
    load_program(61);
    for (int n = 0; n < 600; n++) begin
      logic exp;
      h = policy_packet();
      exp = policy(h, which);
      rule_hits[which]++;
      inspect(h, (n % 7 == 3) ? 1 : (n % 11 == 5) ? 2 : 0, r);
      checks++;
      if (r !== exp) begin
        failures++;
        if (failures < 10) $display("FAIL policy: hdr %h rule %0d got %0b", h, which, r);
      end
    end
    $display("policy: rule hits r1=%0d r2=%0d r3=%0d r4=%0d none=%0d, latency max %0d mean %0d.%02d clocks",
             rule_hits[1], rule_hits[2], rule_hits[3], rule_hits[4], rule_hits[0], lat_max,
             int'(lat_sum / longint'(lat_cnt)), int'((lat_sum * 100 / longint'(lat_cnt)) % 100));
    for (int k = 0; k < 5; k++) if (rule_hits[k] == 0) failures++;

    // Reset in the middle of an inspection: outputs clear, engine idles.
    h = policy_packet();
    @(negedge clk); drive(h); start = 1;
    @(negedge clk); start = 0;
    @(negedge clk); @(negedge clk);
    rst = 1; @(negedge clk); rst = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (forward !== 1'b0 || valid !== 1'b0) failures++;
    n_reset_abort++;
    // and it works afterwards
    inspect(h, 0, r);
    checks++; if (r !== policy(h, which)) failures++;

    // Phase 3: random programs
    for (int p = 0; p < 40; p++) begin
      automatic int n = $urandom_range(4, 256);
      build_random_program(n);
      load_program(n);
      for (int k = 0; k < 25; k++) begin
        h = header_t'({$urandom, $urandom, $urandom, $urandom});
        // sometimes copy constants of the program into the header so
        // equality hits are frequent
        if ($urandom_range(0, 1) != 0) begin
          automatic logic [103:0] v = h;
          for (int a = 0; a < n; a++)
            if (prog[a][22:19] >= 1 && prog[a][22:19] <= 12 && $urandom_range(0, 3) == 0)
              v[103 - 8*(int'(prog[a][22:19]) - 1) -: 8] = prog[a][16:9];
            else if (prog[a][22:19] == 0 && $urandom_range(0, 3) == 0)
              v[7:0] = prog[a][16:9];
          h = header_t'(v);
        end
        inspect(h, 0, r);
      end
    end

    $display("mechanisms: cmp-branch=%0d fall-through=%0d jump=%0d gt=%0d lt=%0d eq=%0d",
             n_branch_cmp, n_fallthrough, n_jump, n_gt, n_lt, n_eq);
    $display("            allow=%0d deny=%0d default-deny=%0d start-ignored=%0d input-change=%0d reset-abort=%0d loads=%0d",
             n_allow, n_deny, n_default_deny, n_start_ignored, n_input_change, n_reset_abort, n_loads);
    if (n_branch_cmp == 0) failures++;
    if (n_fallthrough == 0) failures++;
    if (n_jump == 0) failures++;
    if (n_gt == 0) failures++;
    if (n_lt == 0) failures++;
    if (n_eq == 0) failures++;
    if (n_allow == 0) failures++;
    if (n_deny == 0) failures++;
    if (n_default_deny == 0) failures++;
    if (n_start_ignored == 0) failures++;
    if (n_input_change == 0) failures++;
    if (n_reset_abort == 0) failures++;
    if (n_loads == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
