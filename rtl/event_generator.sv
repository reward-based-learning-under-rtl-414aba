// Event generator of the building block: lets the EPP (or the control
// cluster) inject spike events into the network.
//
// A bus write to the region loads bits 15:0 of the data, the event address,
// into a one-entry buffer; the event leaves on ev_valid/ev_addr with a
// valid/ready handshake. A write while the buffer is full is held (no
// acknowledge) until the event has left. A read returns {31'b0, full}. Bus
// accesses are acknowledged in the cycle after they are accepted. The paper
// only names "event generation for the network"; buffer depth and format
// are this design's choice.
module event_generator
  import epp_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  bus_req_t     bus_req,
  output bus_rsp_t     bus_rsp,
  output logic         ev_valid,
  output logic [15:0]  ev_addr,
  input  logic         ev_ready
);
  logic        full_q, ack_q;
  logic [15:0] addr_q;

  logic accept;
  assign accept = bus_req.valid && !ack_q && (!bus_req.we || !full_q);

  assign ev_valid      = full_q;
  assign ev_addr       = addr_q;
  assign bus_rsp.ack   = ack_q;
  assign bus_rsp.rdata = {31'd0, full_q};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full_q <= 1'b0; ack_q <= 1'b0; addr_q <= '0;
    end else begin
      ack_q <= accept;
      if (full_q && ev_ready) full_q <= 1'b0;
      if (accept && bus_req.we) begin
        full_q <= 1'b1;
        addr_q <= bus_req.wdata[15:0];
      end
    end
  end

  a_ev_hold: assert property (@(posedge clk) disable iff (!rst_n)
    ev_valid && !ev_ready |=> ev_valid && $stable(ev_addr));
endmodule
