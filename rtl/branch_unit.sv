// Branch unit of the EPP: resolves b, bc, bclr and bcctr.
//
// Operands (CR, LR, CTR, the branch's address and the frontend's predicted
// next address) are registered in the cycle after issue; the condition is
// evaluated per the PowerISA BO/BI rules. With the BO field held LSB-first
// in bo[4:0] (PowerISA BO_0 is bo[4]): bo[4]=1 ignores the CR bit, bo[3] is
// the required value of CR bit BI, bo[2]=0 decrements CTR and bo[1] selects
// whether CTR must then be zero or non-zero. In the second
// cycle the unit presents a write-back record (LR = address+4 for LK=1, the
// decremented CTR) and the resolution: taken, target, and mispredict when the
// predicted next address differs from the real one, which makes the
// frontend flush and refetch, and updates the branch predictor. Branch hints
// (the remaining BO bit) are ignored.
module branch_unit
  import epp_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  uop_t        in_uop,
  input  logic [31:0] in_pc,
  input  logic [31:0] in_pred_npc,
  input  logic [31:0] in_cr,
  input  logic [31:0] in_lr,
  input  logic [31:0] in_ctr,
  output wb_t         out,
  output logic        res_valid,
  output logic [31:0] res_pc,
  output logic        res_taken,
  output logic [31:0] res_target,    // taken target
  output logic [31:0] res_npc,       // real next address
  output logic        res_mispredict
);
  logic        s1_valid;
  uop_t        s1_uop;
  logic [31:0] s1_pc, s1_pnpc, s1_cr, s1_lr, s1_ctr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0; s1_uop <= '0;
      s1_pc <= '0; s1_pnpc <= '0; s1_cr <= '0; s1_lr <= '0; s1_ctr <= '0;
    end else begin
      s1_valid <= in_valid; s1_uop <= in_uop;
      s1_pc <= in_pc; s1_pnpc <= in_pred_npc;
      s1_cr <= in_cr; s1_lr <= in_lr; s1_ctr <= in_ctr;
    end
  end

  logic        dec;
  logic [31:0] ctr_n;
  logic        ctr_ok, cond_ok, taken;
  logic [31:0] target, npc;
  always_comb begin
    dec     = (s1_uop.op == OP_BC || s1_uop.op == OP_BCLR) && !s1_uop.bo[2];
    ctr_n   = dec ? s1_ctr - 32'd1 : s1_ctr;
    ctr_ok  = !dec || ((ctr_n != 0) ^ s1_uop.bo[1]);
    cond_ok = s1_uop.bo[4] || (s1_cr[31 - s1_uop.bi] == s1_uop.bo[3]);
    unique case (s1_uop.op)
      OP_B:     begin taken = 1'b1; target = (s1_uop.aa ? 32'd0 : s1_pc) + s1_uop.imm; end
      OP_BC:    begin taken = ctr_ok && cond_ok; target = (s1_uop.aa ? 32'd0 : s1_pc) + s1_uop.imm; end
      OP_BCLR:  begin taken = ctr_ok && cond_ok; target = {s1_lr[31:2], 2'b00}; end
      OP_BCCTR: begin taken = cond_ok; target = {s1_ctr[31:2], 2'b00}; end
      default:  begin taken = 1'b0; target = s1_pc + 32'd4; end
    endcase
    npc = taken ? target : s1_pc + 32'd4;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out <= '0;
      res_valid <= 1'b0; res_pc <= '0; res_taken <= 1'b0;
      res_target <= '0; res_npc <= '0; res_mispredict <= 1'b0;
    end else begin
      out        <= '0;
      out.valid  <= s1_valid;
      out.lr_we  <= s1_valid && s1_uop.lr_we;
      out.lr     <= s1_pc + 32'd4;
      out.ctr_we <= s1_valid && s1_uop.ctr_we;
      out.ctr    <= ctr_n;
      res_valid      <= s1_valid;
      res_pc         <= s1_pc;
      res_taken      <= taken;
      res_target     <= target;
      res_npc        <= npc;
      res_mispredict <= s1_valid && (npc != s1_pnpc);
    end
  end
endmodule
