// Pre-decode stage of the EPP frontend: turns a PowerISA instruction word into
// a micro-op (uop_t) naming the functional unit, the operation, the
// registers read and written and the immediate.
//
// Purely combinational; the frontend registers its output. Standard
// instructions use the PowerISA 2.06 encodings (D, I, B, X, XL, XFX and M
// forms). The subset is this design's choice (the paper says only "a subset
// of the PowerISA 2.06"):
//   D-form : addi addis mulli cmpi cmpli ori oris xori andi. lwz lbz lhz
//            stw stb sth
//   I/B/XL : b bc bclr bcctr (with AA/LK)
//   M-form : rlwinm
//   X-form : add subf neg and or xor nor andc slw srw sraw srawi cmp cmpl
//            extsb extsh mullw mulhw mulhwu divw divwu (with Rc) mfspr
//            mtspr (LR, CTR)
// SYNAPSE instructions: primary opcode 4, X-form, sub-operation in
// instr[10:1] (see syn_op_t). Anything else decodes to a no-op.
module predecode
  import epp_pkg::*;
(
  input  logic [31:0] instr,
  input  logic        valid,
  output uop_t        uop
);
  logic [5:0]  opcd;
  logic [4:0]  rt, ra, rb;
  logic [9:0]  xo;
  logic        rc;
  logic [31:0] simm, uimm;

  assign opcd = instr[31:26];
  assign rt   = instr[25:21];
  assign ra   = instr[20:16];
  assign rb   = instr[15:11];
  assign xo   = instr[10:1];
  assign rc   = instr[0];
  assign simm = {{16{instr[15]}}, instr[15:0]};
  assign uimm = {16'd0, instr[15:0]};

  // helpers filling the common register patterns
  function automatic uop_t d_arith(uop_t u, op_t op, logic [4:0] d,
                                   logic [4:0] s, logic [31:0] im,
                                   logic zero_ra);
    u.fu = FU_FXU; u.op = op; u.dst = d; u.dst_we = 1'b1;
    u.src1 = s; u.src1_use = 1'b1; u.src1_zero = zero_ra;
    u.use_imm = 1'b1; u.imm = im;
    return u;
  endfunction

  always_comb begin
    uop = '0;
    uop.fu = FU_NONE;
    uop.op = OP_NOP;
    uop.valid = valid;
    uop.bo = rt;
    uop.bi = ra;
    uop.aa = instr[1];
    uop.shamt = rb;
    uop.mb = instr[10:6];
    uop.me = instr[5:1];
    case (opcd)
      6'd14: uop = d_arith(uop, OP_ADD, rt, ra, simm, 1'b1);               // addi
      6'd15: uop = d_arith(uop, OP_ADD, rt, ra, {instr[15:0], 16'd0}, 1'b1); // addis
      6'd7: begin                                                           // mulli
        uop = d_arith(uop, OP_MULLW, rt, ra, simm, 1'b0);
        uop.fu = FU_MUL;
      end
      6'd24: uop = d_arith(uop, OP_OR,  ra, rt, uimm, 1'b0);                // ori
      6'd25: uop = d_arith(uop, OP_OR,  ra, rt, {instr[15:0], 16'd0}, 1'b0);// oris
      6'd26: uop = d_arith(uop, OP_XOR, ra, rt, uimm, 1'b0);                // xori
      6'd28: begin                                                          // andi.
        uop = d_arith(uop, OP_AND, ra, rt, uimm, 1'b0);
        uop.cr_we = 1'b1; uop.crf = 3'd0;
      end
      6'd11, 6'd10: begin                                                   // cmpi, cmpli
        uop = d_arith(uop, (opcd == 6'd11) ? OP_CMP : OP_CMPL, 5'd0, ra,
                      (opcd == 6'd11) ? simm : uimm, 1'b0);
        uop.dst_we = 1'b0; uop.cr_we = 1'b1; uop.crf = instr[25:23];
      end
      6'd32, 6'd34, 6'd40: begin                                            // lwz lbz lhz
        uop = d_arith(uop, OP_LOAD, rt, ra, simm, 1'b1);
        uop.fu  = FU_LSU;
        uop.sub = (opcd == 6'd32) ? 3'd2 : (opcd == 6'd40) ? 3'd1 : 3'd0;
      end
      6'd36, 6'd38, 6'd44: begin                                            // stw stb sth
        uop = d_arith(uop, OP_STORE, 5'd0, ra, simm, 1'b1);
        uop.fu = FU_LSU; uop.dst_we = 1'b0;
        uop.src2 = rt; uop.src2_use = 1'b1;
        uop.sub = (opcd == 6'd36) ? 3'd2 : (opcd == 6'd44) ? 3'd1 : 3'd0;
      end
      6'd18: begin                                                          // b
        uop.fu = FU_BR; uop.op = OP_B;
        uop.imm = {{6{instr[25]}}, instr[25:2], 2'b00};
        uop.lr_we = instr[0];
      end
      6'd16: begin                                                          // bc
        uop.fu = FU_BR; uop.op = OP_BC;
        uop.imm = {{16{instr[15]}}, instr[15:2], 2'b00};
        uop.lr_we = instr[0];
        uop.cr_rd = !rt[4];
        uop.ctr_rd = !rt[2]; uop.ctr_we = !rt[2];
      end
      6'd19: begin
        if (xo == 10'd16 || xo == 10'd528) begin                            // bclr, bcctr
          uop.fu = FU_BR;
          uop.op = (xo == 10'd16) ? OP_BCLR : OP_BCCTR;
          uop.lr_we = instr[0];
          uop.lr_rd = (xo == 10'd16);
          uop.cr_rd = !rt[4];
          uop.ctr_rd = (xo == 10'd528) || !rt[2];
          uop.ctr_we = (xo == 10'd16) && !rt[2];
        end
      end
      6'd21: begin                                                          // rlwinm
        uop.fu = FU_FXU; uop.op = OP_RLWINM;
        uop.src1 = rt; uop.src1_use = 1'b1;
        uop.dst = ra; uop.dst_we = 1'b1;
        uop.cr_we = rc; uop.crf = 3'd0;
      end
      6'd31: begin
        // default X-form arithmetic: rD = rA op rB
        uop.fu = FU_FXU;
        uop.src1 = ra; uop.src1_use = 1'b1;
        uop.src2 = rb; uop.src2_use = 1'b1;
        uop.dst = rt; uop.dst_we = 1'b1;
        uop.cr_we = rc; uop.crf = 3'd0;
        case (xo)
          10'd266: uop.op = OP_ADD;
          10'd40:  uop.op = OP_SUBF;
          10'd104: begin uop.op = OP_NEG; uop.src2_use = 1'b0; end
          10'd235: begin uop.op = OP_MULLW;  uop.fu = FU_MUL; end
          10'd75:  begin uop.op = OP_MULHW;  uop.fu = FU_MUL; end
          10'd11:  begin uop.op = OP_MULHWU; uop.fu = FU_MUL; end
          10'd491: begin uop.op = OP_DIVW;   uop.fu = FU_DIV; end
          10'd459: begin uop.op = OP_DIVWU;  uop.fu = FU_DIV; end
          10'd0, 10'd32: begin                                             // cmp, cmpl
            uop.op = (xo == 10'd0) ? OP_CMP : OP_CMPL;
            uop.dst_we = 1'b0; uop.cr_we = 1'b1; uop.crf = instr[25:23];
          end
          10'd339: begin                                                   // mfspr
            uop.op = OP_MFSPR; uop.src1_use = 1'b0; uop.src2_use = 1'b0;
            uop.spr_ctr = ({rb, ra} == 10'(SPR_CTR));
            uop.lr_rd  = !uop.spr_ctr; uop.ctr_rd = uop.spr_ctr;
            uop.cr_we = 1'b0;
            if ({rb, ra} != 10'(SPR_CTR) && {rb, ra} != 10'(SPR_LR)) begin
              uop.fu = FU_NONE; uop.op = OP_NOP; uop.dst_we = 1'b0;
            end
          end
          10'd467: begin                                                   // mtspr
            uop.op = OP_MTSPR; uop.src1 = rt; uop.src2_use = 1'b0;
            uop.dst_we = 1'b0; uop.cr_we = 1'b0;
            uop.spr_ctr = ({rb, ra} == 10'(SPR_CTR));
            uop.ctr_we = uop.spr_ctr; uop.lr_we = !uop.spr_ctr;
            if ({rb, ra} != 10'(SPR_CTR) && {rb, ra} != 10'(SPR_LR)) begin
              uop.fu = FU_NONE; uop.op = OP_NOP; uop.lr_we = 1'b0;
            end
          end
          default: begin
            // logical forms: rA = rS op rB
            uop.src1 = rt; uop.dst = ra;
            case (xo)
              10'd28:  uop.op = OP_AND;
              10'd444: uop.op = OP_OR;
              10'd316: uop.op = OP_XOR;
              10'd124: uop.op = OP_NOR;
              10'd60:  uop.op = OP_ANDC;
              10'd24:  uop.op = OP_SLW;
              10'd536: uop.op = OP_SRW;
              10'd792: uop.op = OP_SRAW;
              10'd824: begin uop.op = OP_SRAW; uop.src2_use = 1'b0;        // srawi
                             uop.use_imm = 1'b1; uop.imm = {27'd0, rb}; end
              10'd954: begin uop.op = OP_EXTSB; uop.src2_use = 1'b0; end
              10'd922: begin uop.op = OP_EXTSH; uop.src2_use = 1'b0; end
              default: begin
                uop.fu = FU_NONE; uop.op = OP_NOP;
                uop.dst_we = 1'b0; uop.cr_we = 1'b0;
                uop.src1_use = 1'b0; uop.src2_use = 1'b0;
              end
            endcase
          end
        endcase
      end
      6'd4: begin                                                           // SYNAPSE
        uop.fu  = FU_SYN; uop.op = OP_SYN;
        uop.sub = xo[2:0];
        uop.src1 = ra; uop.src1_use = 1'b1;
        uop.src2 = rt;
        uop.dst  = rt;
        uop.imm  = {27'd0, rb};
        case (xo[2:0])
          SYN_RD, SYN_EVAL, SYN_UPD: uop.dst_we = 1'b1;
          SYN_WR:  uop.src2_use = 1'b1;
          SYN_RST: ;
          SYN_MTR: begin uop.src1 = rt; uop.src2_use = 1'b0; end
          SYN_MFR: begin uop.src1_use = 1'b0; uop.dst_we = 1'b1; end
          default: begin uop.fu = FU_NONE; uop.op = OP_NOP; uop.src1_use = 1'b0; end
        endcase
        if (xo[9:3] != '0) begin
          uop.fu = FU_NONE; uop.op = OP_NOP; uop.src1_use = 1'b0;
          uop.src2_use = 1'b0; uop.dst_we = 1'b0;
        end
      end
      default: ;
    endcase
    if (!valid) uop = '0;
  end
endmodule
