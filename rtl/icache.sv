// Direct-mapped instruction cache of the EPP frontend ("ICache" stage).
//
// LINES lines of one 32-bit word each, indexed by pc[IDX+1:2] and tagged with
// the remaining address bits. The lookup is combinational on the address held
// by the ICache pipeline stage: hit and instr are valid in the same cycle. On
// a miss (while req is high) the cache reads the word from the instruction
// port of main memory: mem_req for one cycle, data one cycle later (a
// synchronous SRAM), written into the line; the stage then hits. The paper
// gives only "direct-mapped"; size, line length and refill are this design's
// choices. flush_inv clears all valid bits (after new code is loaded).
module icache #(
  parameter int unsigned LINES = 128,
  parameter int unsigned AW    = 14        // byte address bits of main memory
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req,
  input  logic [31:0]   pc,
  output logic          hit,
  output logic [31:0]   instr,
  // refill port
  output logic          mem_req,
  output logic [AW-3:0] mem_addr,           // word address
  input  logic [31:0]   mem_rdata           // valid the cycle after mem_req
);
  localparam int unsigned IW = $clog2(LINES);
  localparam int unsigned TW = 30 - IW;

  logic [LINES-1:0] valid_q;
  logic [TW-1:0]    tag_q  [LINES];
  logic [31:0]      data_q [LINES];

  logic [IW-1:0] idx;
  logic [TW-1:0] tag;
  assign idx = pc[IW+1:2];
  assign tag = pc[31:IW+2];

  assign hit   = req && valid_q[idx] && tag_q[idx] == tag;
  assign instr = data_q[idx];

  // refill: IDLE -> WAIT (memory answers) -> IDLE
  logic          busy_q;
  logic [IW-1:0] ridx_q;
  logic [TW-1:0] rtag_q;

  assign mem_req  = req && !hit && !busy_q;
  assign mem_addr = pc[AW-1:2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      busy_q  <= 1'b0;
      ridx_q  <= '0;
      rtag_q  <= '0;
    end else begin
      if (mem_req) begin
        busy_q <= 1'b1;
        ridx_q <= idx;
        rtag_q <= tag;
      end else if (busy_q) begin
        busy_q          <= 1'b0;
        valid_q[ridx_q] <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (busy_q) begin
      tag_q[ridx_q]  <= rtag_q;
      data_q[ridx_q] <= mem_rdata;
    end
  end
endmodule
