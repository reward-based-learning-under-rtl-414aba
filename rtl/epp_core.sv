// Embedded plasticity processor (EPP) core: an in-order-issue,
// out-of-order-completion processor for a 32-bit subset of PowerISA 2.06
// with a SYNAPSE special-function unit, after the paper's Fig. 2.
//
// Frontend, four stages (the paper: "four clock cycles to decode
// instructions and issue them in-order"):
//   1 Branch predict  fetch address register; the fully associative
//                     predictor chooses the next fetch address
//   2 ICache          direct-mapped cache lookup; a miss stalls this stage
//                     while the line is refilled from main memory
//   3 Pre-Decode      instruction word -> micro-op
//   4 Schedule / Op fetch
//                     the micro-op waits here until it may issue: its source
//                     and destination registers (GPR, CR, LR, CTR) are not
//                     awaiting a result (scoreboard), its unit is free, and
//                     for a fixed-latency unit the result shift register has
//                     the write-back slot free; then the register file is
//                     read and the op goes to its unit.
// Back end: Branch (2 cycles), Fixedpoint (2), Multiplier (3), and the
// variable-latency Divider, Load/Store (with the control-bus interface) and
// SYNAPSE (with the synapse interface) units. Write back is one more cycle:
// the unit chosen by the result shift register (or, in a cycle it leaves
// free, a finished variable-latency unit) is registered and committed to the
// register file, CR, LR and CTR at the end of the next cycle. There is no
// bypass: a dependent op issues in the cycle after the commit.
//
// Branches: the frontend follows the prediction; issue waits behind a
// branch until it resolves (two cycles after issue). On a wrong prediction
// stages 2-4 are flushed and fetch restarts at the right address; every
// resolution trains the predictor. These rules, the scoreboard and the
// write-back sharing are this design's choices; the paper gives the stages,
// units, latencies, cache type, predictor type and the result shift register.
//
// Reset starts fetching at address 0. The ev_* outputs pulse once per event
// (issue, stall on a hazard, misprediction, cache miss, a result retiring
// before an older one).
module epp_core
  import epp_pkg::*;
#(
  parameter int unsigned MEM_AW     = 14,   // byte address bits of main memory
  parameter int unsigned BP_ENTRIES = 16,
  parameter int unsigned IC_LINES   = 128,
  parameter int unsigned RSR_DEPTH  = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // instruction refill port of main memory
  output logic              imem_req,
  output logic [MEM_AW-3:0] imem_addr,
  input  logic [31:0]       imem_rdata,
  // data port of main memory
  output logic              dmem_req,
  output logic              dmem_we,
  output logic [MEM_AW-3:0] dmem_addr,
  output logic [31:0]       dmem_wdata,
  output logic [3:0]        dmem_be,
  input  logic [31:0]       dmem_rdata,
  // control bus master
  output bus_req_t          bus_req,
  input  bus_rsp_t          bus_rsp,
  // synapse interface
  output syn_req_t          syn_req,
  input  syn_rsp_t          syn_rsp,
  // event pulses
  output logic              ev_issue,
  output logic              ev_stall,
  output logic              ev_mispredict,
  output logic              ev_icache_miss,
  output logic              ev_ooo_retire
);
  // ------------------------------------------------------------ stage 1
  logic [31:0] f_pc;
  logic        bp_taken;
  logic [31:0] bp_target;

  // branch resolution
  logic        br_res_valid, br_res_taken, br_mispredict;
  logic [31:0] br_res_pc, br_res_target, br_res_npc;

  branch_predictor #(.ENTRIES(BP_ENTRIES)) u_bp (
    .clk, .rst_n,
    .fetch_pc   (f_pc),
    .pred_taken (bp_taken),
    .pred_target(bp_target),
    .upd_valid  (br_res_valid),
    .upd_pc     (br_res_pc),
    .upd_taken  (br_res_taken),
    .upd_target (br_res_target)
  );

  // ------------------------------------------------------------ stage 2
  logic        s2_valid;
  logic [31:0] s2_pc, s2_pnpc;
  logic        ic_hit;
  logic [31:0] ic_instr;

  icache #(.LINES(IC_LINES), .AW(MEM_AW)) u_icache (
    .clk, .rst_n,
    .req      (s2_valid),
    .pc       (s2_pc),
    .hit      (ic_hit),
    .instr    (ic_instr),
    .mem_req  (imem_req),
    .mem_addr (imem_addr),
    .mem_rdata(imem_rdata)
  );

  // ------------------------------------------------------------ stage 3
  logic        s3_valid;
  logic [31:0] s3_pc, s3_pnpc, s3_instr;
  uop_t        s3_uop;

  predecode u_pd (.instr(s3_instr), .valid(s3_valid), .uop(s3_uop));

  // ------------------------------------------------------------ stage 4
  logic        s4_valid;
  logic [31:0] s4_pc, s4_pnpc;
  uop_t        u;

  // architectural state beside the GPRs
  logic [31:0] cr_q, lr_q, ctr_q;
  logic [31:0] gpr_pend_q;
  logic        cr_pend_q, lr_pend_q, ctr_pend_q, br_pend_q;

  // register file
  logic [31:0] rf_a, rf_b;
  wb_t         wb_q;
  register_file u_rf (
    .clk, .rst_n,
    .ra (u.src1), .rda(rf_a),
    .rb (u.src2), .rdb(rf_b),
    .we (wb_q.valid && wb_q.gpr_we),
    .wa (wb_q.rd),
    .wd (wb_q.data)
  );

  // units
  logic rsr_can;
  fu_t  rsr_wb_fu;
  logic rsr_busy;
  logic [$clog2(RSR_DEPTH)-1:0] lat;
  always_comb begin
    unique case (u.fu)
      FU_FXU:  lat = $clog2(RSR_DEPTH)'(LAT_FXU);
      FU_BR:   lat = $clog2(RSR_DEPTH)'(LAT_BR);
      FU_MUL:  lat = $clog2(RSR_DEPTH)'(LAT_MUL);
      default: lat = '0;
    endcase
  end

  logic div_busy, lsu_busy, sfu_busy;

  // hazards
  logic haz_src, haz_dst, haz_spr, unit_ok, issue;
  always_comb begin
    haz_src = (u.src1_use && !(u.src1_zero && u.src1 == 5'd0) && gpr_pend_q[u.src1])
           || (u.src2_use && gpr_pend_q[u.src2]);
    haz_dst = u.dst_we && gpr_pend_q[u.dst];
    haz_spr = ((u.cr_rd || u.cr_we) && cr_pend_q)
           || ((u.lr_rd || u.lr_we) && lr_pend_q)
           || ((u.ctr_rd || u.ctr_we) && ctr_pend_q);
    unique case (u.fu)
      FU_FXU, FU_BR, FU_MUL: unit_ok = rsr_can;
      FU_DIV:                unit_ok = !div_busy;
      FU_LSU:                unit_ok = !lsu_busy;
      FU_SYN:                unit_ok = !sfu_busy;
      default:               unit_ok = 1'b1;
    endcase
    issue = s4_valid && !br_pend_q && !haz_src && !haz_dst && !haz_spr && unit_ok;
  end

  // operands
  logic [31:0] op_a, op_b;
  always_comb begin
    if (u.op == OP_MFSPR)                     op_a = u.spr_ctr ? ctr_q : lr_q;
    else if (u.src1_zero && u.src1 == 5'd0)   op_a = '0;
    else                                      op_a = rf_a;
    op_b = u.use_imm ? u.imm : rf_b;
  end

  logic iss_fxu, iss_br, iss_mul, iss_div, iss_lsu, iss_syn;
  assign iss_fxu = issue && u.fu == FU_FXU;
  assign iss_br  = issue && u.fu == FU_BR;
  assign iss_mul = issue && u.fu == FU_MUL;
  assign iss_div = issue && u.fu == FU_DIV;
  assign iss_lsu = issue && u.fu == FU_LSU;
  assign iss_syn = issue && u.fu == FU_SYN;

  result_shift_register #(.DEPTH(RSR_DEPTH)) u_rsr (
    .clk, .rst_n,
    .query_lat(lat),
    .can_issue(rsr_can),
    .issue    (iss_fxu || iss_br || iss_mul),
    .issue_fu (u.fu),
    .wb_fu    (rsr_wb_fu),
    .wb_busy  (rsr_busy)
  );

  wb_t fxu_out, mul_out, br_out, div_out, lsu_out, sfu_out;
  logic div_ack, lsu_ack, sfu_ack;

  fixedpoint_unit u_fxu (.clk, .rst_n, .in_valid(iss_fxu), .in_uop(u),
                         .in_a(op_a), .in_b(op_b), .out(fxu_out));
  multiplier u_mul (.clk, .rst_n, .in_valid(iss_mul), .in_uop(u),
                    .in_a(op_a), .in_b(op_b), .out(mul_out));
  divider u_div (.clk, .rst_n, .in_valid(iss_div), .in_uop(u), .in_a(op_a),
                 .in_b(op_b), .busy(div_busy), .out(div_out), .wb_ack(div_ack));
  branch_unit u_br (
    .clk, .rst_n, .in_valid(iss_br), .in_uop(u), .in_pc(s4_pc),
    .in_pred_npc(s4_pnpc), .in_cr(cr_q), .in_lr(lr_q), .in_ctr(ctr_q),
    .out(br_out), .res_valid(br_res_valid), .res_pc(br_res_pc),
    .res_taken(br_res_taken), .res_target(br_res_target), .res_npc(br_res_npc),
    .res_mispredict(br_mispredict)
  );
  load_store_unit #(.MEM_AW(MEM_AW)) u_lsu (
    .clk, .rst_n, .in_valid(iss_lsu), .in_uop(u), .in_a(op_a), .in_s(rf_b),
    .busy(lsu_busy), .out(lsu_out), .wb_ack(lsu_ack),
    .mem_req(dmem_req), .mem_we(dmem_we), .mem_addr(dmem_addr),
    .mem_wdata(dmem_wdata), .mem_be(dmem_be), .mem_rdata(dmem_rdata),
    .bus_req, .bus_rsp
  );
  synapse_sfu u_syn (
    .clk, .rst_n, .in_valid(iss_syn), .in_uop(u), .in_a(op_a), .in_b(rf_b),
    .busy(sfu_busy), .out(sfu_out), .wb_ack(sfu_ack), .syn_req, .syn_rsp
  );

  // ------------------------------------------------------------ write back
  wb_t wb_sel;
  always_comb begin
    wb_sel  = '0;
    div_ack = 1'b0;
    lsu_ack = 1'b0;
    sfu_ack = 1'b0;
    if (rsr_busy) begin
      unique case (rsr_wb_fu)
        FU_FXU:  wb_sel = fxu_out;
        FU_MUL:  wb_sel = mul_out;
        FU_BR:   wb_sel = br_out;
        default: wb_sel = '0;
      endcase
    end else if (lsu_out.valid) begin
      wb_sel = lsu_out; lsu_ack = 1'b1;
    end else if (div_out.valid) begin
      wb_sel = div_out; div_ack = 1'b1;
    end else if (sfu_out.valid) begin
      wb_sel = sfu_out; sfu_ack = 1'b1;
    end
  end

  // issue order tags, to see results retiring ahead of older ones
  logic [7:0] seq_q;
  logic [7:0] fx_seq_q [RSR_DEPTH];
  logic       lsu_pend_q, div_pend_q, sfu_pend_q;
  logic [7:0] lsu_seq_q, div_seq_q, sfu_seq_q;

  function automatic logic older(logic [7:0] a, logic [7:0] b);   // a before b
    logic [7:0] d;
    d = b - a;
    return d != 0 && !d[7];
  endfunction

  assign ev_ooo_retire = rsr_busy && (
      (lsu_pend_q && older(lsu_seq_q, fx_seq_q[0]))
   || (div_pend_q && older(div_seq_q, fx_seq_q[0]))
   || (sfu_pend_q && older(sfu_seq_q, fx_seq_q[0])));
  assign ev_issue       = issue;
  assign ev_stall       = s4_valid && !issue;
  assign ev_mispredict  = br_res_valid && br_mispredict;
  assign ev_icache_miss = imem_req;

  // ------------------------------------------------------------ pipeline
  logic s4_free, s3_free, s2_free, s3_adv, s2_adv;
  assign s4_free = !s4_valid || issue;
  assign s3_free = !s3_valid || s4_free;
  assign s3_adv  = s3_valid && s4_free;
  assign s2_adv  = s2_valid && ic_hit && s3_free;
  assign s2_free = !s2_valid || s2_adv;

  logic flush;
  assign flush = br_res_valid && br_mispredict;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_pc <= '0;
      s2_valid <= 1'b0; s2_pc <= '0; s2_pnpc <= '0;
      s3_valid <= 1'b0; s3_pc <= '0; s3_pnpc <= '0; s3_instr <= '0;
      s4_valid <= 1'b0; s4_pc <= '0; s4_pnpc <= '0; u <= '0;
    end else if (flush) begin
      f_pc     <= br_res_npc;
      s2_valid <= 1'b0;
      s3_valid <= 1'b0;
      s4_valid <= 1'b0;
    end else begin
      if (s2_free) begin
        s2_valid <= 1'b1;
        s2_pc    <= f_pc;
        s2_pnpc  <= bp_target;
        f_pc     <= bp_target;
      end
      if (s2_adv) begin
        s3_valid <= 1'b1;
        s3_pc    <= s2_pc;
        s3_pnpc  <= s2_pnpc;
        s3_instr <= ic_instr;
      end else if (s3_free) begin
        s3_valid <= 1'b0;
      end
      if (s3_adv) begin
        s4_valid <= 1'b1;
        s4_pc    <= s3_pc;
        s4_pnpc  <= s3_pnpc;
        u        <= s3_uop;
      end else if (issue) begin
        s4_valid <= 1'b0;
      end
    end
  end

  // scoreboard, special registers, write-back register, tags
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cr_q <= '0; lr_q <= '0; ctr_q <= '0;
      gpr_pend_q <= '0; cr_pend_q <= 1'b0; lr_pend_q <= 1'b0; ctr_pend_q <= 1'b0;
      br_pend_q <= 1'b0;
      wb_q <= '0;
      seq_q <= '0;
      for (int k = 0; k < RSR_DEPTH; k++) fx_seq_q[k] <= '0;
      lsu_pend_q <= 1'b0; div_pend_q <= 1'b0; sfu_pend_q <= 1'b0;
      lsu_seq_q <= '0; div_seq_q <= '0; sfu_seq_q <= '0;
    end else begin
      wb_q <= wb_sel;
      // commit
      if (wb_q.valid) begin
        if (wb_q.gpr_we) gpr_pend_q[wb_q.rd] <= 1'b0;
        if (wb_q.cr_we) begin
          cr_q[31 - 4*wb_q.crf -: 4] <= wb_q.crv;
          cr_pend_q <= 1'b0;
        end
        if (wb_q.lr_we)  begin lr_q  <= wb_q.lr;  lr_pend_q  <= 1'b0; end
        if (wb_q.ctr_we) begin ctr_q <= wb_q.ctr; ctr_pend_q <= 1'b0; end
      end
      // issue
      if (issue) begin
        seq_q <= seq_q + 1'b1;
        if (u.dst_we) gpr_pend_q[u.dst] <= 1'b1;
        if (u.cr_we)  cr_pend_q  <= 1'b1;
        if (u.lr_we)  lr_pend_q  <= 1'b1;
        if (u.ctr_we) ctr_pend_q <= 1'b1;
      end
      if (iss_br) br_pend_q <= 1'b1;
      else if (br_res_valid) br_pend_q <= 1'b0;
      // tags
      for (int k = 0; k < RSR_DEPTH - 1; k++) fx_seq_q[k] <= fx_seq_q[k+1];
      if (iss_fxu || iss_br || iss_mul) fx_seq_q[lat - 1'b1] <= seq_q;
      if (iss_lsu && u.dst_we) begin lsu_pend_q <= 1'b1; lsu_seq_q <= seq_q; end
      else if (lsu_ack)          lsu_pend_q <= 1'b0;
      if (iss_div) begin div_pend_q <= 1'b1; div_seq_q <= seq_q; end
      else if (div_ack)          div_pend_q <= 1'b0;
      if (iss_syn && u.dst_we) begin sfu_pend_q <= 1'b1; sfu_seq_q <= seq_q; end
      else if (sfu_ack)          sfu_pend_q <= 1'b0;
    end
  end
endmodule
