// General-purpose register file of the EPP: 32 registers of 32 bits,
// two combinational read ports (operand fetch) and one write port (write
// back), written on the clock edge. All registers reset to zero. A read of a
// register in the cycle it is written returns the new value (write-through);
// the paper gives only that results are written back to a register file.
module register_file #(
  parameter int unsigned NREGS = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [$clog2(NREGS)-1:0] ra,
  output logic [31:0]              rda,
  input  logic [$clog2(NREGS)-1:0] rb,
  output logic [31:0]              rdb,
  input  logic                     we,
  input  logic [$clog2(NREGS)-1:0] wa,
  input  logic [31:0]              wd
);
  logic [31:0] regs_q [NREGS];

  assign rda = (we && wa == ra) ? wd : regs_q[ra];
  assign rdb = (we && wa == rb) ? wd : regs_q[rb];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGS; i++) regs_q[i] <= '0;
    end else if (we) begin
      regs_q[wa] <= wd;
    end
  end
endmodule
