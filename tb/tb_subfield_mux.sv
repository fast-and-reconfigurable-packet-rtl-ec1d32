// tb_subfield_mux: checks the header field register and the 13-way sub-field
// multiplexer. Random headers are loaded; for every selector code the output
// is compared with the byte cut out of the 104-bit header by the testbench
// (sub-field k of SA/DA/SP/DP is its k-th byte counted from the MSB). Also
// checks that the register holds while load = 0 and is cleared by reset.
module tb_subfield_mux;
  import pce_pkg::*;

  logic clk = 1'b0, rst, load;
  header_t hdr_in;
  logic [3:0] selector;
  logic [7:0] mux_out;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  subfield_mux dut (.clk, .rst, .load, .hdr_in, .selector, .mux_out);

  function automatic logic [7:0] ref_byte(logic [103:0] h, int sel);
    // layout: SA[103:72] DA[71:40] SP[39:24] DP[23:8] PR[7:0]
    if (sel == 0) return h[7:0];
    if (sel >= 1 && sel <= 12) return h[103 - 8*(sel-1) -: 8];
    return 8'h00;
  endfunction

  task automatic check_all(logic [103:0] h);
    for (int s = 0; s < 16; s++) begin
      selector = 4'(s);
      #1;
      checks++;
      if (mux_out !== ref_byte(h, s)) begin
        failures++;
        if (failures < 10) $display("FAIL sel=%0d got=%h exp=%h", s, mux_out, ref_byte(h, s));
      end
    end
  endtask

  initial begin
    logic [103:0] h, held;
    rst = 1; load = 0; hdr_in = '0; selector = '0;
    @(posedge clk); #1 rst = 0;
    check_all('0);
    for (int n = 0; n < 200; n++) begin
      h = {$urandom, $urandom, $urandom, $urandom}; // upper bits truncated to 104
      hdr_in = header_t'(h);
      load = 1;
      @(posedge clk); #1 load = 0;
      held = h;
      hdr_in = header_t'({$urandom, $urandom, $urandom, $urandom});  // must not be taken
      @(posedge clk); #1;
      check_all(held);
    end
    rst = 1; @(posedge clk); #1 rst = 0;
    check_all('0);
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
