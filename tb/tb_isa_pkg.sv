// Instruction encoders for testbench programs: PowerISA 2.06 encodings of the
// EPP's instruction subset and the SYNAPSE instructions (primary opcode 4).
package tb_isa_pkg;
  function automatic logic [31:0] D(int op, int rt, int ra, int imm);
    return {6'(op), 5'(rt), 5'(ra), 16'(imm)};
  endfunction
  function automatic logic [31:0] X(int rt, int ra, int rb, int xo, int rc = 0);
    return {6'd31, 5'(rt), 5'(ra), 5'(rb), 10'(xo), 1'(rc)};
  endfunction
  function automatic logic [31:0] addi (int rt, int ra, int i); return D(14, rt, ra, i); endfunction
  function automatic logic [31:0] addis(int rt, int ra, int i); return D(15, rt, ra, i); endfunction
  function automatic logic [31:0] ori  (int ra, int rs, int i); return D(24, rs, ra, i); endfunction
  function automatic logic [31:0] mulli(int rt, int ra, int i); return D(7, rt, ra, i); endfunction
  function automatic logic [31:0] cmpwi(int bf, int ra, int i); return D(11, bf << 2, ra, i); endfunction
  function automatic logic [31:0] lwz  (int rt, int ra, int d); return D(32, rt, ra, d); endfunction
  function automatic logic [31:0] lbz  (int rt, int ra, int d); return D(34, rt, ra, d); endfunction
  function automatic logic [31:0] stw  (int rs, int ra, int d); return D(36, rs, ra, d); endfunction
  function automatic logic [31:0] stb  (int rs, int ra, int d); return D(38, rs, ra, d); endfunction
  function automatic logic [31:0] add  (int rt, int ra, int rb); return X(rt, ra, rb, 266); endfunction
  function automatic logic [31:0] subf (int rt, int ra, int rb); return X(rt, ra, rb, 40); endfunction
  function automatic logic [31:0] mullw(int rt, int ra, int rb); return X(rt, ra, rb, 235); endfunction
  function automatic logic [31:0] divw (int rt, int ra, int rb); return X(rt, ra, rb, 491); endfunction
  function automatic logic [31:0] divwu(int rt, int ra, int rb); return X(rt, ra, rb, 459); endfunction
  function automatic logic [31:0] and_ (int ra, int rs, int rb); return X(rs, ra, rb, 28); endfunction
  function automatic logic [31:0] or_  (int ra, int rs, int rb); return X(rs, ra, rb, 444); endfunction
  function automatic logic [31:0] slw  (int ra, int rs, int rb); return X(rs, ra, rb, 24); endfunction
  function automatic logic [31:0] sraw (int ra, int rs, int rb); return X(rs, ra, rb, 792); endfunction
  function automatic logic [31:0] rlwinm(int ra, int rs, int sh, int mb, int me);
    return {6'd21, 5'(rs), 5'(ra), 5'(sh), 5'(mb), 5'(me), 1'b0};
  endfunction
  function automatic logic [31:0] mtctr(int rs); return {6'd31, 5'(rs), 5'd9, 5'd0, 10'd467, 1'b0}; endfunction
  function automatic logic [31:0] mflr (int rt); return {6'd31, 5'(rt), 5'd8, 5'd0, 10'd339, 1'b0}; endfunction
  function automatic logic [31:0] b    (int off, int lk = 0); return {6'd18, 24'(off >>> 2), 1'b0, 1'(lk)}; endfunction
  function automatic logic [31:0] bc   (int bo, int bi, int off); return {6'd16, 5'(bo), 5'(bi), 14'(off >>> 2), 2'b00}; endfunction
  function automatic logic [31:0] bdnz (int off); return bc(16, 0, off); endfunction
  function automatic logic [31:0] blr  (); return {6'd19, 5'd20, 5'd0, 5'd0, 10'd16, 1'b0}; endfunction
  // SYNAPSE unit
  function automatic logic [31:0] SY(int rt, int ra, int rb, int sub);
    return {6'd4, 5'(rt), 5'(ra), 5'(rb), 10'(sub), 1'b0};
  endfunction
  function automatic logic [31:0] synrd  (int rt, int ra); return SY(rt, ra, 0, 1); endfunction
  function automatic logic [31:0] synwr  (int rs, int ra); return SY(rs, ra, 0, 2); endfunction
  function automatic logic [31:0] syneval(int rt, int ra); return SY(rt, ra, 0, 3); endfunction
  function automatic logic [31:0] synrst (int ra);         return SY(0, ra, 0, 4); endfunction
  function automatic logic [31:0] synupd (int rt, int ra); return SY(rt, ra, 0, 5); endfunction
  function automatic logic [31:0] mtsynr (int idx, int rs); return SY(rs, 0, idx, 6); endfunction
  function automatic logic [31:0] mfsynr (int rt, int idx); return SY(rt, 0, idx, 7); endfunction
  localparam logic [31:0] NOP = 32'h6000_0000;   // ori 0,0,0
endpackage
