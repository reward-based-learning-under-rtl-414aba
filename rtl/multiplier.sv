// Multiplier of the EPP: mullw / mulli (low word), mulhw (signed high word)
// and mulhwu (unsigned high word), with CR0 recording for Rc=1.
//
// Three-stage pipeline, one op per cycle: operands registered after issue,
// 64-bit product registered in the second cycle, selected word registered
// into the write-back record presented in the third cycle. The paper names the
// unit only; the latency of three cycles is this design's choice.
module multiplier
  import epp_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  uop_t        in_uop,
  input  logic [31:0] in_a,
  input  logic [31:0] in_b,
  output wb_t         out
);
  logic        s1_valid, s2_valid;
  uop_t        s1_uop, s2_uop;
  logic [31:0] s1_a, s1_b;
  logic [63:0] s2_p;
  logic [63:0] prod;
  logic [31:0] res;

  always_comb begin
    if (s1_uop.op == OP_MULHWU) prod = {32'd0, s1_a} * {32'd0, s1_b};
    else                        prod = 64'($signed({{32{s1_a[31]}}, s1_a}) * $signed({{32{s1_b[31]}}, s1_b}));
  end
  assign res = (s2_uop.op == OP_MULLW) ? s2_p[31:0] : s2_p[63:32];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0; s2_valid <= 1'b0;
      s1_uop <= '0; s2_uop <= '0;
      s1_a <= '0; s1_b <= '0; s2_p <= '0;
      out <= '0;
    end else begin
      s1_valid <= in_valid; s1_uop <= in_uop; s1_a <= in_a; s1_b <= in_b;
      s2_valid <= s1_valid; s2_uop <= s1_uop; s2_p <= prod;
      out        <= '0;
      out.valid  <= s2_valid;
      out.gpr_we <= s2_valid && s2_uop.dst_we;
      out.rd     <= s2_uop.dst;
      out.data   <= res;
      out.cr_we  <= s2_valid && s2_uop.cr_we;
      out.crf    <= 3'd0;
      out.crv    <= {res[31], !res[31] && res != 0, res == 0, 1'b0};
    end
  end
endmodule
