// SYNAPSE special-function unit of the EPP: application-specific
// instructions and registers for synapse access and weight computation.
//
// Registers (index in the RB field of mtsynr/mfsynr):
//   0 A0    signed weight step applied when b0 = 1      (8 bit)
//   1 A1    signed weight step applied when b1 = 1      (8 bit)
//   2 CFG0  evaluation configuration {e_cc,e_ca,e_ac,e_aa} giving b0
//   3 CFG1  evaluation configuration giving b1
//   4 ATL   analog parameter a_tl (code)
//   5 ATH   analog parameter a_th (code)
// Instructions (rA holds a synapse address):
//   synrd   rD = weight            synwr  weight = rS[3:0]
//   syneval rD = {b1, b0}          synrst clear a+ and a-
//   synupd  w' = clamp(w + A0*b0 + A1*b1, 0, 15); write w'; clear a+/a-;
//           rD = w'
// synupd is the paper's example update F(b0,b1) = A0 b0 + A1 b1 done in one
// instruction, which is what makes 4-bit deterministic updates fast; 8-bit
// (two adjacent 4-bit synapses) and probabilistic updates are left to
// software, as in the paper. The instruction set, register map and clearing
// the accumulators after an update are this design's choices.
//
// Each synapse operation is a request on the synapse interface, held until
// acknowledged; synupd chains read, evaluate, write and reset. The result is
// presented as a write-back record (out.valid) until wb_ack; busy covers the
// whole instruction.
module synapse_sfu
  import epp_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  uop_t        in_uop,
  input  logic [31:0] in_a,
  input  logic [31:0] in_b,
  output logic        busy,
  output wb_t         out,
  input  logic        wb_ack,
  output syn_req_t    syn_req,
  input  syn_rsp_t    syn_rsp
);
  typedef enum logic [1:0] {S_IDLE, S_REQ, S_DONE} state_t;
  state_t      st_q;
  uop_t        uop_q;
  logic [31:0] a_q, b_q;
  sif_op_t     sop_q;          // synapse operation in flight
  logic [3:0]  w_q;            // weight read by synupd
  logic [3:0]  wnew_q;

  logic signed [7:0]  A0_q, A1_q;
  eval_cfg_t          cfg_q [NEVAL];
  logic [ACODE_W-1:0] atl_q, ath_q;

  assign busy = st_q != S_IDLE;

  always_comb begin
    syn_req       = '0;
    syn_req.valid = st_q == S_REQ;
    syn_req.op    = sop_q;
    syn_req.addr  = a_q[SYN_AW-1:0];
    syn_req.wdata = (uop_q.sub == SYN_UPD) ? wnew_q : b_q[3:0];
    for (int i = 0; i < NEVAL; i++) syn_req.cfg[i] = cfg_q[i];
    syn_req.a_tl  = atl_q;
    syn_req.a_th  = ath_q;
  end

  // weight update from the evaluation bits
  logic signed [9:0] sum;
  logic [3:0]        wsat;
  always_comb begin
    sum = $signed({6'd0, w_q})
        + (syn_rsp.bits[0] ? 10'(A0_q) : 10'sd0)
        + (syn_rsp.bits[1] ? 10'(A1_q) : 10'sd0);
    if (sum < 0)        wsat = 4'd0;
    else if (sum > 15)  wsat = 4'd15;
    else                wsat = sum[3:0];
  end

  function automatic logic [31:0] reg_rd(logic [2:0] idx);
    unique case (idx)
      3'd0:    return 32'(A0_q);
      3'd1:    return 32'(A1_q);
      3'd2:    return {28'd0, cfg_q[0]};
      3'd3:    return {28'd0, cfg_q[1]};
      3'd4:    return {16'd0, atl_q};
      3'd5:    return {16'd0, ath_q};
      default: return 32'd0;
    endcase
  endfunction

  task automatic finish(input logic [31:0] d);
    out        <= '0;
    out.valid  <= 1'b1;
    out.gpr_we <= uop_q.dst_we;
    out.rd     <= uop_q.dst;
    out.data   <= d;
    st_q       <= S_DONE;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_IDLE; uop_q <= '0; a_q <= '0; b_q <= '0; sop_q <= SIF_READ;
      w_q <= '0; wnew_q <= '0; out <= '0;
      A0_q <= '0; A1_q <= '0; atl_q <= '0; ath_q <= '0;
      for (int i = 0; i < NEVAL; i++) cfg_q[i] <= '0;
    end else begin
      unique case (st_q)
        S_IDLE: if (in_valid) begin
          uop_q <= in_uop;
          a_q   <= in_a;
          b_q   <= in_b;
          unique case (syn_op_t'(in_uop.sub))
            SYN_RD:   begin sop_q <= SIF_READ;  st_q <= S_REQ; end
            SYN_WR:   begin sop_q <= SIF_WRITE; st_q <= S_REQ; end
            SYN_EVAL: begin sop_q <= SIF_EVAL;  st_q <= S_REQ; end
            SYN_RST:  begin sop_q <= SIF_RESET; st_q <= S_REQ; end
            SYN_UPD:  begin sop_q <= SIF_READ;  st_q <= S_REQ; end
            SYN_MTR: begin
              unique case (in_uop.imm[2:0])
                3'd0: A0_q <= in_a[7:0];
                3'd1: A1_q <= in_a[7:0];
                3'd2: cfg_q[0] <= in_a[3:0];
                3'd3: cfg_q[1] <= in_a[3:0];
                3'd4: atl_q <= in_a[ACODE_W-1:0];
                3'd5: ath_q <= in_a[ACODE_W-1:0];
                default: ;
              endcase
              st_q <= S_IDLE;
            end
            SYN_MFR: begin
              out        <= '0;
              out.valid  <= 1'b1;
              out.gpr_we <= 1'b1;
              out.rd     <= in_uop.dst;
              out.data   <= reg_rd(in_uop.imm[2:0]);
              st_q       <= S_DONE;
            end
            default: st_q <= S_IDLE;
          endcase
        end
        S_REQ: if (syn_rsp.ack) begin
          unique case (syn_op_t'(uop_q.sub))
            SYN_RD:   finish({28'd0, syn_rsp.rdata});
            SYN_EVAL: finish({{(32-NEVAL){1'b0}}, syn_rsp.bits});
            SYN_WR, SYN_RST: st_q <= S_IDLE;
            SYN_UPD: begin
              unique case (sop_q)
                SIF_READ:  begin w_q <= syn_rsp.rdata; sop_q <= SIF_EVAL; end
                SIF_EVAL:  begin wnew_q <= wsat;       sop_q <= SIF_WRITE; end
                SIF_WRITE: sop_q <= SIF_RESET;
                default:   finish({28'd0, wnew_q});
              endcase
            end
            default: st_q <= S_IDLE;
          endcase
        end
        S_DONE: if (wb_ack) begin
          out  <= '0;
          st_q <= S_IDLE;
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end
endmodule
