// Rate counters of the building block: one saturating spike counter per
// neuron (column), read by the EPP or the control cluster over the control
// bus.
//
// Every postsynaptic spike event (post_valid, post_col) increments that
// column's counter, which stops at its maximum. On the bus, counter c is the
// 32-bit word at byte offset 4c of the region: a read returns the count, a
// write clears it (the written data is ignored). Each bus access is
// acknowledged in the cycle after the request. A clear and a spike in the
// same cycle leave the counter at 0. The paper only names the rate
// counters; this is the simplest thing that does their job.
module rate_counters
  import epp_pkg::*;
#(
  parameter int unsigned COLS  = 512,
  parameter int unsigned CBITS = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    post_valid,
  input  logic [$clog2(COLS)-1:0] post_col,
  input  bus_req_t                bus_req,
  output bus_rsp_t                bus_rsp
);
  localparam int unsigned CW = $clog2(COLS);
  logic [CBITS-1:0] cnt_q [COLS];
  logic             ack_q;
  logic [31:0]      rdata_q;
  logic [CW-1:0]    idx;

  assign idx = bus_req.addr[CW+1:2];
  assign bus_rsp.ack   = ack_q;
  assign bus_rsp.rdata = rdata_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < COLS; c++) cnt_q[c] <= '0;
      ack_q   <= 1'b0;
      rdata_q <= '0;
    end else begin
      if (post_valid && int'(post_col) < COLS && cnt_q[post_col] != '1)
        cnt_q[post_col] <= cnt_q[post_col] + 1'b1;
      ack_q <= bus_req.valid && !ack_q;
      if (bus_req.valid && !ack_q) begin
        rdata_q <= 32'(cnt_q[idx]);
        if (bus_req.we) cnt_q[idx] <= '0;
      end
    end
  end
endmodule
