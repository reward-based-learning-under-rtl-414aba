// Test of the predecode stage: for a set of encodings (every unit and
// operand pattern) checks the unit, operation, register fields and the
// immediate against the field layout of the instruction formats, worked out
// here bit by bit; undefined opcodes must decode as no-ops and an invalid
// slot as an all-zero record.
module tb_predecode;
  import epp_pkg::*;
  import tb_isa_pkg::*;
  logic [31:0] instr; logic valid; uop_t uop;
  predecode dut (.*);
  int checks = 0, failures = 0;
  task automatic t(string w, logic [31:0] i, fu_t fu, op_t op, int dst, bit dst_we,
                   int s1, bit s1u, logic [31:0] imm, bit use_imm);
    instr = i; valid = 1; #1;
    checks++;
    if (uop.fu != fu || uop.op != op || uop.dst_we != dst_we || (dst_we && uop.dst != 5'(dst))
        || uop.src1_use != s1u || (s1u && uop.src1 != 5'(s1))
        || uop.use_imm != use_imm || (use_imm && uop.imm != imm) || !uop.valid) begin
      failures++;
      $display("FAIL %s: fu %0d op %0d dst %0d/%b src1 %0d/%b imm %h/%b", w, uop.fu, uop.op,
               uop.dst, uop.dst_we, uop.src1, uop.src1_use, uop.imm, uop.use_imm);
    end
  endtask
  initial begin
    t("addi",  addi(3, 4, -5),    FU_FXU, OP_ADD,   3, 1, 4, 1, -32'sd5, 1);
    t("addis", addis(3, 4, 1),    FU_FXU, OP_ADD,   3, 1, 4, 1, 32'h1_0000, 1);
    t("ori",   ori(7, 8, 16'hff00), FU_FXU, OP_OR,  7, 1, 8, 1, 32'h0000_ff00, 1);
    t("add",   add(1, 2, 3),      FU_FXU, OP_ADD,   1, 1, 2, 1, 0, 0);
    t("subf",  subf(1, 2, 3),     FU_FXU, OP_SUBF,  1, 1, 2, 1, 0, 0);
    t("mullw", mullw(9, 10, 11),  FU_MUL, OP_MULLW, 9, 1, 10, 1, 0, 0);
    t("mulli", mulli(9, 10, -2),  FU_MUL, OP_MULLW, 9, 1, 10, 1, -32'sd2, 1);
    t("divw",  divw(9, 10, 11),   FU_DIV, OP_DIVW,  9, 1, 10, 1, 0, 0);
    t("divwu", divwu(9, 10, 11),  FU_DIV, OP_DIVWU, 9, 1, 10, 1, 0, 0);
    t("lwz",   lwz(5, 6, 8),      FU_LSU, OP_LOAD,  5, 1, 6, 1, 8, 1);
    t("stw",   stw(5, 6, -4),     FU_LSU, OP_STORE, 0, 0, 6, 1, -32'sd4, 1);
    t("b",     b(16),             FU_BR,  OP_B,     0, 0, 0, 0, 0, 0);
    t("bc",    bc(12, 2, -8),     FU_BR,  OP_BC,    0, 0, 0, 0, 0, 0);
    t("blr",   blr(),             FU_BR,  OP_BCLR,  0, 0, 0, 0, 0, 0);
    t("synrd", synrd(4, 5),       FU_SYN, OP_SYN,   4, 1, 5, 1, 0, 0);
    // field checks
    instr = bc(12, 2, -8); #1; checks += 3;
    if (uop.bo != 5'd12 || uop.bi != 5'd2) failures++;
    if (!uop.cr_rd) failures++;
    if (uop.imm != -32'sd8) begin failures++; $display("FAIL bc displacement %h", uop.imm); end
    instr = bdnz(-4); #1; checks++; if (!uop.ctr_rd || !uop.ctr_we) failures++;
    instr = b(12, 1); #1; checks++; if (!uop.lr_we) failures++;
    instr = cmpwi(0, 1, 100); #1; checks++; if (!uop.cr_we || uop.crf != 0) failures++;
    instr = mtctr(20); #1; checks++; if (!uop.ctr_we || !uop.spr_ctr || uop.src1 != 20) failures++;
    instr = rlwinm(3, 4, 5, 6, 7); #1; checks++;
    if (uop.shamt != 5 || uop.mb != 6 || uop.me != 7 || uop.op != OP_RLWINM) failures++;
    instr = synupd(4, 5); #1; checks++; if (uop.sub != 3'(SYN_UPD)) failures++;
    instr = {6'd1, 26'd0}; #1; checks++; if (uop.fu != FU_NONE) failures++;
    valid = 0; #1; checks++; if (uop != '0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
