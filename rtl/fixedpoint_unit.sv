// Fixed-point unit of the EPP: add/subtract, logical operations, the barrel
// shifter (slw, srw, sraw/srawi, rlwinm), sign extension, compares into a
// CR field, CR0 recording (Rc=1) and moves from/to LR and CTR.
//
// Two-cycle pipeline, matching the paper's minimum of two cycles per unit:
// the operands are registered in the cycle after issue (stage 1, where the
// result is computed) and the result is registered into the write-back record
// presented in the second cycle. in_b is already the immediate when the op
// uses one. For mfspr, in_a carries LR or CTR. Fully pipelined: one op per
// cycle. Carry and overflow (XER) are not modelled; SO always reads 0.
module fixedpoint_unit
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
  logic        s1_valid;
  uop_t        s1_uop;
  logic [31:0] s1_a, s1_b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_uop   <= '0;
      s1_a     <= '0;
      s1_b     <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_uop   <= in_uop;
      s1_a     <= in_a;
      s1_b     <= in_b;
    end
  end

  function automatic logic [31:0] rotl(logic [31:0] x, logic [4:0] n);
    return (x << n) | (x >> (6'd32 - {1'b0, n}));
  endfunction

  function automatic logic [31:0] mask(logic [4:0] mb, logic [4:0] me);
    logic [31:0] m;
    for (int j = 0; j < 32; j++) begin
      int p;
      p = 31 - j;                       // PowerISA bit number
      if (mb <= me) m[j] = (p >= int'(mb)) && (p <= int'(me));
      else          m[j] = (p >= int'(mb)) || (p <= int'(me));
    end
    return m;
  endfunction

  function automatic logic [3:0] cr_of(logic [31:0] r);
    return {r[31], !r[31] && (r != 0), r == 0, 1'b0};
  endfunction

  logic [31:0] res;
  logic [3:0]  crv;
  always_comb begin
    res = '0;
    unique case (s1_uop.op)
      OP_ADD:    res = s1_a + s1_b;
      OP_SUBF:   res = s1_b - s1_a;
      OP_NEG:    res = -s1_a;
      OP_AND:    res = s1_a & s1_b;
      OP_OR:     res = s1_a | s1_b;
      OP_XOR:    res = s1_a ^ s1_b;
      OP_NOR:    res = ~(s1_a | s1_b);
      OP_ANDC:   res = s1_a & ~s1_b;
      OP_SLW:    res = s1_b[5] ? 32'd0 : s1_a << s1_b[4:0];
      OP_SRW:    res = s1_b[5] ? 32'd0 : s1_a >> s1_b[4:0];
      OP_SRAW:   res = s1_b[5] ? {32{s1_a[31]}} : 32'($signed(s1_a) >>> s1_b[4:0]);
      OP_RLWINM: res = rotl(s1_a, s1_uop.shamt) & mask(s1_uop.mb, s1_uop.me);
      OP_EXTSB:  res = {{24{s1_a[7]}}, s1_a[7:0]};
      OP_EXTSH:  res = {{16{s1_a[15]}}, s1_a[15:0]};
      OP_MFSPR:  res = s1_a;
      OP_MTSPR:  res = s1_a;
      default:   res = '0;
    endcase
    if (s1_uop.op == OP_CMP)
      crv = {$signed(s1_a) < $signed(s1_b), $signed(s1_a) > $signed(s1_b), s1_a == s1_b, 1'b0};
    else if (s1_uop.op == OP_CMPL)
      crv = {s1_a < s1_b, s1_a > s1_b, s1_a == s1_b, 1'b0};
    else
      crv = cr_of(res);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out <= '0;
    end else begin
      out.valid  <= s1_valid;
      out.gpr_we <= s1_valid && s1_uop.dst_we;
      out.rd     <= s1_uop.dst;
      out.data   <= res;
      out.cr_we  <= s1_valid && s1_uop.cr_we;
      out.crf    <= s1_uop.crf;
      out.crv    <= crv;
      out.lr_we  <= s1_valid && s1_uop.op == OP_MTSPR && !s1_uop.spr_ctr;
      out.lr     <= res;
      out.ctr_we <= s1_valid && s1_uop.op == OP_MTSPR && s1_uop.spr_ctr;
      out.ctr    <= res;
    end
  end
endmodule
