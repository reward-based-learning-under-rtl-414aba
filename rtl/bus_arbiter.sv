// Control bus of the building block: arbiter between its two masters and
// decoder to its targets.
//
// Masters are the external control access (from the control cluster; the
// paper: the control bus "is also used by external control accesses") and
// the load/store unit of the EPP. When the bus is free the external master
// wins; a granted master keeps the bus until its access is acknowledged.
// Bits 31:20 of the address select the target (see epp_pkg): main memory,
// synapse weights, rate counters, event generator, or the run-control
// register held here (bit 0 = EPP running; reset value 0, so the program can
// be loaded before the processor starts). Accesses to unmapped addresses are
// acknowledged with zero data. Requests pass through combinationally, the
// acknowledge returns to the granted master only. Arbitration, address map
// and run register are this design's choices.
module bus_arbiter
  import epp_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t host_req,
  output bus_rsp_t host_rsp,
  input  bus_req_t epp_req,
  output bus_rsp_t epp_rsp,
  output bus_req_t mem_req,
  input  bus_rsp_t mem_rsp,
  output bus_req_t syn_req,
  input  bus_rsp_t syn_rsp,
  output bus_req_t rate_req,
  input  bus_rsp_t rate_rsp,
  output bus_req_t ev_req,
  input  bus_rsp_t ev_rsp,
  output logic     epp_run
);
  logic     locked_q, owner_q;     // owner: 1 = host
  logic     owner;
  bus_req_t cur;
  bus_rsp_t rsp;
  logic     ctrl_ack_q;
  logic     run_q;

  assign owner = locked_q ? owner_q : host_req.valid;
  assign cur   = owner ? host_req : epp_req;
  assign epp_run = run_q;

  logic [11:0] sel;
  assign sel = cur.addr[31:20];

  always_comb begin
    mem_req  = '0;
    syn_req  = '0;
    rate_req = '0;
    ev_req   = '0;
    rsp      = '0;
    unique case (sel)
      BUS_MEM:   begin mem_req  = cur; rsp = mem_rsp;  end
      BUS_SYN:   begin syn_req  = cur; rsp = syn_rsp;  end
      BUS_RATE:  begin rate_req = cur; rsp = rate_rsp; end
      BUS_EVENT: begin ev_req   = cur; rsp = ev_rsp;   end
      default:   begin rsp.ack = ctrl_ack_q; rsp.rdata = (sel == BUS_CTRL) ? {31'd0, run_q} : '0; end
    endcase
    host_rsp     = '0;
    epp_rsp      = '0;
    if (owner) host_rsp = rsp;
    else       epp_rsp  = rsp;
  end

  logic is_local;
  assign is_local = !(sel inside {BUS_MEM, BUS_SYN, BUS_RATE, BUS_EVENT});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked_q <= 1'b0; owner_q <= 1'b0; ctrl_ack_q <= 1'b0; run_q <= 1'b0;
    end else begin
      if (cur.valid && !rsp.ack) begin
        locked_q <= 1'b1;
        owner_q  <= owner;
      end else if (rsp.ack) begin
        locked_q <= 1'b0;
      end
      ctrl_ack_q <= cur.valid && is_local && !ctrl_ack_q;
      if (cur.valid && is_local && !ctrl_ack_q && cur.we && sel == BUS_CTRL)
        run_q <= cur.wdata[0];
    end
  end
endmodule
