// Load/store unit of the EPP with its control-bus interface.
//
// Executes lwz/lhz/lbz and stw/sth/stb (D-form, effective address rA|0 + d).
// Addresses below 0x8000_0000 go to the data port of main memory
// (synchronous SRAM: request in the cycle after issue, data one cycle later);
// addresses with bit 31 set go out on the building block's control bus, where
// the request is held until the slave acknowledges. Byte order is big-endian,
// as in PowerISA: byte offset 0 is bits 31:24. One access at a time: busy is
// high from issue until a store is sent, or until a load's write-back record
// (out.valid) is taken by write back (wb_ack). Loads may therefore retire
// after younger, quicker instructions. The address split is this design's
// choice; the paper says only that I/O goes "through a bus interface served
// by the load/store unit". Misaligned accesses are not supported (the low
// address bits are ignored beyond the access size).
module load_store_unit
  import epp_pkg::*;
#(
  parameter int unsigned MEM_AW = 14       // byte address bits of main memory
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  uop_t              in_uop,
  input  logic [31:0]       in_a,          // base (0 for rA=0)
  input  logic [31:0]       in_s,          // store data
  output logic              busy,
  output wb_t               out,
  input  logic              wb_ack,
  // main memory data port
  output logic              mem_req,
  output logic              mem_we,
  output logic [MEM_AW-3:0] mem_addr,
  output logic [31:0]       mem_wdata,
  output logic [3:0]        mem_be,
  input  logic [31:0]       mem_rdata,
  // control bus
  output bus_req_t          bus_req,
  input  bus_rsp_t          bus_rsp
);
  typedef enum logic [2:0] {S_IDLE, S_MEM, S_MWAIT, S_BUS, S_DONE} state_t;
  state_t      st_q;
  uop_t        uop_q;
  logic [31:0] ea_q, sd_q;

  logic [1:0]  off;
  logic [3:0]  be;
  logic [31:0] wdata;
  assign off = ea_q[1:0];
  always_comb begin
    unique case (uop_q.sub[1:0])
      2'd0:    begin be = 4'b1000 >> off;                 wdata = {4{sd_q[7:0]}};  end
      2'd1:    begin be = off[1] ? 4'b0011 : 4'b1100;     wdata = {2{sd_q[15:0]}}; end
      default: begin be = 4'b1111;                        wdata = sd_q;            end
    endcase
  end

  function automatic logic [31:0] extract(logic [31:0] w, logic [1:0] o, logic [1:0] sz);
    unique case (sz)
      2'd0:    return {24'd0, w[31 - 8*o -: 8]};
      2'd1:    return {16'd0, o[1] ? w[15:0] : w[31:16]};
      default: return w;
    endcase
  endfunction

  assign busy      = st_q != S_IDLE;
  assign mem_req   = st_q == S_MEM;
  assign mem_we    = uop_q.op == OP_STORE;
  assign mem_addr  = ea_q[MEM_AW-1:2];
  assign mem_wdata = wdata;
  assign mem_be    = be;

  always_comb begin
    bus_req       = '0;
    bus_req.valid = st_q == S_BUS;
    bus_req.we    = uop_q.op == OP_STORE;
    bus_req.addr  = {ea_q[31:2], 2'b00};
    bus_req.wdata = wdata;
    bus_req.be    = be;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_IDLE; uop_q <= '0; ea_q <= '0; sd_q <= '0; out <= '0;
    end else begin
      unique case (st_q)
        S_IDLE: if (in_valid) begin
          uop_q <= in_uop;
          ea_q  <= in_a + in_uop.imm;
          sd_q  <= in_s;
          st_q  <= (in_a + in_uop.imm) >= 32'h8000_0000 ? S_BUS : S_MEM;
        end
        S_MEM:  st_q <= (uop_q.op == OP_STORE) ? S_IDLE : S_MWAIT;
        S_MWAIT: begin
          out        <= '0;
          out.valid  <= 1'b1;
          out.gpr_we <= 1'b1;
          out.rd     <= uop_q.dst;
          out.data   <= extract(mem_rdata, off, uop_q.sub[1:0]);
          st_q       <= S_DONE;
        end
        S_BUS: if (bus_rsp.ack) begin
          if (uop_q.op == OP_STORE) st_q <= S_IDLE;
          else begin
            out        <= '0;
            out.valid  <= 1'b1;
            out.gpr_we <= 1'b1;
            out.rd     <= uop_q.dst;
            out.data   <= extract(bus_rsp.rdata, off, uop_q.sub[1:0]);
            st_q       <= S_DONE;
          end
        end
        S_DONE: if (wb_ack) begin
          out  <= '0;
          st_q <= S_IDLE;
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  // a bus request stays stable until it is acknowledged
  a_bus_hold: assert property (@(posedge clk) disable iff (!rst_n)
    bus_req.valid && !bus_rsp.ack |=> bus_req.valid && $stable(bus_req.addr));
endmodule
