// Test of the branch unit: unconditional, conditional (CR bit set / clear),
// CTR-decrementing (bdnz) and return (blr) branches, with and without link.
// Checks the resolved next PC, taken flag, misprediction against the
// predicted next PC, the LR and CTR write-back values, and that the result
// comes LAT_BR = 2 cycles after the operands.
module tb_branch_unit;
  import epp_pkg::*;
  import tb_isa_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid; uop_t in_uop; logic [31:0] ins, in_pc, in_pred_npc, in_cr, in_lr, in_ctr;
  wb_t out; logic res_valid, res_taken, res_mispredict; logic [31:0] res_pc, res_target, res_npc;
  predecode u_pd (.instr(ins), .valid(1'b1), .uop(in_uop));
  branch_unit dut (.*);
  int checks = 0, failures = 0;
  task automatic br(string w, logic [31:0] i, logic [31:0] pc, logic [31:0] pnpc,
                    logic [31:0] cr, logic [31:0] ctr, logic exp_taken, logic [31:0] exp_npc,
                    logic exp_lr_we, logic exp_ctr_we);
    @(negedge clk); in_valid = 1; ins = i; in_pc = pc; in_pred_npc = pnpc; in_cr = cr;
    in_ctr = ctr; in_lr = 32'h0000_0200;
    @(negedge clk); in_valid = 0;
    checks++; if (res_valid) begin failures++; $display("FAIL %s early", w); end
    @(negedge clk);
    checks++;
    if (!res_valid || !out.valid || res_taken != exp_taken || res_npc != exp_npc
        || res_pc != pc || res_mispredict != (exp_npc != pnpc)
        || out.lr_we != exp_lr_we || (exp_lr_we && out.lr != pc + 4)
        || out.ctr_we != exp_ctr_we || (exp_ctr_we && out.ctr != ctr - 1)) begin
      failures++;
      $display("FAIL %s: v %b taken %b npc %h mis %b lr %b/%h ctr %b/%h", w, res_valid,
               res_taken, res_npc, res_mispredict, out.lr_we, out.lr, out.ctr_we, out.ctr);
    end
  endtask
  initial begin
    in_valid = 0; ins = NOP; in_pc = 0; in_pred_npc = 0; in_cr = 0; in_lr = 0; in_ctr = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    br("b",        b(16),        32'h100, 32'h104, 0, 0, 1, 32'h110, 0, 0);
    br("b pred",   b(16),        32'h100, 32'h110, 0, 0, 1, 32'h110, 0, 0);
    br("bl",       b(-8, 1),     32'h100, 32'h0f8, 0, 0, 1, 32'h0f8, 1, 0);
    br("beq t",    bc(12, 2, 8), 32'h40, 32'h44, 32'h2000_0000, 0, 1, 32'h48, 0, 0);
    br("beq nt",   bc(12, 2, 8), 32'h40, 32'h48, 32'h4000_0000, 0, 0, 32'h44, 0, 0);
    br("bne t",    bc(4, 2, -16), 32'h40, 32'h30, 32'h0, 0, 1, 32'h30, 0, 0);
    br("bdnz t",   bdnz(-4),     32'h80, 32'h7c, 0, 5, 1, 32'h7c, 0, 1);
    br("bdnz nt",  bdnz(-4),     32'h80, 32'h7c, 0, 1, 0, 32'h84, 0, 1);
    br("blr",      blr(),        32'h300, 32'h304, 0, 0, 1, 32'h200, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (1000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
