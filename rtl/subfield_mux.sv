// subfield_mux: header field register and 13-way sub-field multiplexer.
//
// The five header fields (source/destination IP address, source/destination
// port, protocol) are captured in a register when `load` is high, so the
// inspection is not disturbed if the inputs change while it runs. The register
// output is cut into 13 byte-wide sub-fields, MSB byte first (SA_1 is the top
// byte of the source address), and `selector` picks one of them for the
// comparator. Selector values 13..15 have no input and give 8'h00.
//
// Interface: header_t hdr_in, 4-bit selector (sel_e numbering), 8-bit mux_out.
// Timing: the register loads on the clock edge where `load` is high; mux_out
// is combinational from the register and the selector.
//
// The register, the 13 inputs and their order follow the published
// multiplexer drawing. A load enable stands in for the drawing's gated clock
// (CLOCK combined with a control signal); synchronous reset clearing the
// register and the 8'h00 for unused selector codes are this design's choices.
module subfield_mux
  import pce_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              load,
  input  header_t           hdr_in,
  input  logic [SEL_W-1:0]  selector,
  output logic [SUBF_W-1:0] mux_out
);

  header_t hdr_q;

  always_ff @(posedge clk) begin
    if (rst)       hdr_q <= '0;
    else if (load) hdr_q <= hdr_in;
  end

  always_comb begin
    unique case (selector)
      SEL_PR_0: mux_out = hdr_q.protocol;
      SEL_SA_1: mux_out = hdr_q.src_ip[31:24];
      SEL_SA_2: mux_out = hdr_q.src_ip[23:16];
      SEL_SA_3: mux_out = hdr_q.src_ip[15:8];
      SEL_SA_4: mux_out = hdr_q.src_ip[7:0];
      SEL_DA_1: mux_out = hdr_q.dst_ip[31:24];
      SEL_DA_2: mux_out = hdr_q.dst_ip[23:16];
      SEL_DA_3: mux_out = hdr_q.dst_ip[15:8];
      SEL_DA_4: mux_out = hdr_q.dst_ip[7:0];
      SEL_SP_1: mux_out = hdr_q.src_port[15:8];
      SEL_SP_2: mux_out = hdr_q.src_port[7:0];
      SEL_DP_1: mux_out = hdr_q.dst_port[15:8];
      SEL_DP_2: mux_out = hdr_q.dst_port[7:0];
      default:  mux_out = '0;
    endcase
  end

endmodule
