// Synapse interface: the link between the SYNAPSE unit of the EPP (and the
// control bus) and the synapse array.
//
// It serves one request at a time, SYNAPSE unit first, control bus second:
//   READ   weight SRAM read: request cycle, data cycle, acknowledge
//   WRITE  weight SRAM write, then acknowledge
//   EVAL   selects the synapse's accumulators and runs the evaluation unit
//          once per configuration set, one cycle each, collecting the bits
//          b[0..NEVAL-1] (the paper's "series of bits" from one unit)
//   RESET  clears the synapse's a+ and a-
// The acknowledge (syn_rsp.ack / bus_rsp.ack) is a one-cycle pulse carrying
// the read data or bits; the requester holds its request until then. On the
// bus, the weights appear as 32-bit words at 4-byte steps from the region
// base, reading the weight in bits 3:0. The paper shows this interface only as
// a block of the processor (Fig. 2); the sequencing is this design's choice.
module synapse_interface
  import epp_pkg::*;
#(
  parameter int unsigned AW = SYN_AW
) (
  input  logic               clk,
  input  logic               rst_n,
  // from the SYNAPSE unit
  input  syn_req_t           sfu_req,
  output syn_rsp_t           sfu_rsp,
  // from the control bus (already decoded to this region)
  input  bus_req_t           bus_req,
  output bus_rsp_t           bus_rsp,
  // weight SRAM
  output logic               sram_req,
  output logic               sram_we,
  output logic [AW-1:0]      sram_addr,
  output logic [3:0]         sram_wdata,
  input  logic [3:0]         sram_rdata,
  // accumulators
  output logic [AW-1:0]      acc_sel,
  output logic               acc_clr,
  // evaluation unit
  output eval_cfg_t          eval_cfg,
  output logic [ACODE_W-1:0] eval_a_tl,
  output logic [ACODE_W-1:0] eval_a_th,
  input  logic               eval_b
);
  typedef enum logic [2:0] {S_IDLE, S_RD, S_RDATA, S_EVAL, S_ACK} state_t;
  state_t               st_q;
  logic                 from_bus_q;
  syn_req_t             req_q;
  logic [$clog2(NEVAL+1)-1:0] step_q;
  logic [NEVAL-1:0]     bits_q;
  logic [3:0]           rdata_q;

  // request chosen in IDLE
  logic     take_sfu, take_bus;
  syn_req_t bus_as_syn;
  assign take_sfu = (st_q == S_IDLE) && sfu_req.valid;
  assign take_bus = (st_q == S_IDLE) && !sfu_req.valid && bus_req.valid;
  always_comb begin
    bus_as_syn       = '0;
    bus_as_syn.valid = bus_req.valid;
    bus_as_syn.op    = bus_req.we ? SIF_WRITE : SIF_READ;
    bus_as_syn.addr  = bus_req.addr[AW+1:2];
    bus_as_syn.wdata = bus_req.wdata[3:0];
  end

  syn_req_t cur;
  assign cur = take_sfu ? sfu_req : take_bus ? bus_as_syn : req_q;

  // SRAM: issued straight from IDLE
  assign sram_req   = (take_sfu || take_bus) && (cur.op == SIF_READ || cur.op == SIF_WRITE);
  assign sram_we    = cur.op == SIF_WRITE;
  assign sram_addr  = cur.addr;
  assign sram_wdata = cur.wdata;

  assign acc_sel   = req_q.addr;
  assign acc_clr   = (take_sfu || take_bus) && cur.op == SIF_RESET;
  assign eval_cfg  = req_q.cfg[(int'(step_q) < NEVAL) ? step_q : '0];
  assign eval_a_tl = req_q.a_tl;
  assign eval_a_th = req_q.a_th;

  always_comb begin
    sfu_rsp       = '0;
    sfu_rsp.ack   = (st_q == S_ACK) && !from_bus_q;
    sfu_rsp.rdata = rdata_q;
    sfu_rsp.bits  = bits_q;
    bus_rsp       = '0;
    bus_rsp.ack   = (st_q == S_ACK) && from_bus_q;
    bus_rsp.rdata = {28'd0, rdata_q};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_IDLE; from_bus_q <= 1'b0; req_q <= '0;
      step_q <= '0; bits_q <= '0; rdata_q <= '0;
    end else begin
      unique case (st_q)
        S_IDLE: if (take_sfu || take_bus) begin
          req_q      <= cur;
          from_bus_q <= take_bus;
          step_q     <= '0;
          unique case (cur.op)
            SIF_READ:  st_q <= S_RDATA;
            SIF_EVAL:  st_q <= S_EVAL;
            default:   st_q <= S_ACK;      // write / reset done this cycle
          endcase
        end
        S_RDATA: begin
          rdata_q <= sram_rdata;
          st_q    <= S_ACK;
        end
        S_EVAL: begin
          bits_q[step_q] <= eval_b;
          step_q         <= step_q + 1'b1;
          if (int'(step_q) == NEVAL - 1) st_q <= S_ACK;
        end
        S_ACK:   st_q <= S_IDLE;
        default: st_q <= S_IDLE;
      endcase
    end
  end

  a_sfu_hold: assert property (@(posedge clk) disable iff (!rst_n)
    sfu_req.valid && !sfu_rsp.ack |=> sfu_req.valid && $stable(sfu_req.op));
endmodule
