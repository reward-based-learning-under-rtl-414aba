// Result shift register (after Smith and Pleszkun) of the EPP back end.
//
// Slot k holds the unit whose result reaches write back k cycles from now.
// When an instruction of a fixed-latency unit issues with latency L, it claims
// slot L-1 of the next cycle; issue is allowed only if that slot is free
// (can_issue for the requested latency). Every cycle the register shifts one
// slot towards 0; slot 0 names the unit that owns the write-back port in the
// current cycle. Thus quick instructions can retire before an older slow one,
// without two results ever meeting at the single write port. Cycles in which
// slot 0 is empty are free for the variable-latency units (load/store,
// divider, SYNAPSE), which the paper does not discuss; that sharing is this
// design's choice.
module result_shift_register
  import epp_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [$clog2(DEPTH)-1:0] query_lat,  // latency of the op at issue
  output logic                     can_issue,
  input  logic                     issue,      // reserve for query_lat
  input  fu_t                      issue_fu,
  output fu_t                      wb_fu,      // unit owning write back now
  output logic                     wb_busy
);
  fu_t slot_q [DEPTH];

  // The op lands in slot L-1 after this cycle's shift, so the slot that
  // shifts there, slot L, must be empty now.
  assign can_issue = (query_lat != 0) && (slot_q[query_lat] == FU_NONE);
  assign wb_fu   = slot_q[0];
  assign wb_busy = slot_q[0] != FU_NONE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < DEPTH; k++) slot_q[k] <= FU_NONE;
    end else begin
      for (int k = 0; k < DEPTH - 1; k++) slot_q[k] <= slot_q[k+1];
      slot_q[DEPTH-1] <= FU_NONE;
      if (issue && can_issue) slot_q[query_lat - 1'b1] <= issue_fu;
    end
  end
endmodule
