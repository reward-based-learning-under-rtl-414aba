// Main memory of the EPP: 12 kiB holding program and data (the paper's
// size), organised as 3072 words of 32 bits.
//
// Two synchronous ports, each with a one-cycle read latency: port A serves
// instruction-cache refills (read only), port B serves data accesses with
// byte enables (be[3] = bits 31:24). The paper gives only the size and that
// program and data share the memory; the two ports are this design's choice
// (an SRAM macro in silicon, a memory array here). Contents are not reset.
module main_memory #(
  parameter int unsigned WORDS = 3072,
  parameter int unsigned AW    = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          a_req,
  input  logic [AW-1:0] a_addr,
  output logic [31:0]   a_rdata,
  input  logic          b_req,
  input  logic          b_we,
  input  logic [AW-1:0] b_addr,
  input  logic [31:0]   b_wdata,
  input  logic [3:0]    b_be,
  output logic [31:0]   b_rdata
);
  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (a_req) a_rdata <= (int'(a_addr) < WORDS) ? mem[a_addr] : 32'd0;
  end

  always_ff @(posedge clk) begin
    if (b_req) begin
      if (b_we && int'(b_addr) < WORDS) begin
        for (int i = 0; i < 4; i++)
          if (b_be[i]) mem[b_addr][8*i +: 8] <= b_wdata[8*i +: 8];
      end
      b_rdata <= (int'(b_addr) < WORDS) ? mem[b_addr] : 32'd0;
    end
  end
endmodule
