// Weight memory of the synapse array: one 4-bit SRAM word per synapse, as
// in the paper, for ROWS x COLS synapses (default 448 x 512 = 229,376,
// matching the paper's "up to 230 k synapses" per processor; the split into
// rows and columns is this design's choice). Address = {row, column}.
//
// One synchronous port: a write takes effect at the clock edge, read data
// appears the cycle after the request. The weights also drive the analog
// synapse circuits, which are outside this model. Combining two adjacent
// synapses into an 8-bit weight is done by software with two 4-bit accesses.
// Contents are not reset, as in an SRAM.
module synapse_weight_sram #(
  parameter int unsigned ROWS  = 448,
  parameter int unsigned COLS  = 512,
  parameter int unsigned WBITS = 4,
  parameter int unsigned AW    = $clog2(ROWS) + $clog2(COLS)
) (
  input  logic             clk,
  input  logic             req,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WBITS-1:0] wdata,
  output logic [WBITS-1:0] rdata
);
  localparam int unsigned CW = $clog2(COLS);
  logic [WBITS-1:0] mem [ROWS * COLS];

  logic [31:0] lin;
  assign lin = 32'(addr[AW-1:CW]) * COLS + 32'(addr[CW-1:0]);

  always_ff @(posedge clk) begin
    if (req && lin < ROWS * COLS) begin
      if (we) mem[lin] <= wdata;
      rdata <= mem[lin];
    end
  end
endmodule
