// Test of the branch predictor: allocation on first update (taken starts
// weakly taken, not taken weakly not taken), 2-bit counter hysteresis,
// target replacement, all ENTRIES branches held at once and round-robin
// replacement of the oldest entry by the next new branch.
module tb_branch_predictor;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [31:0] fetch_pc, pred_target, upd_pc, upd_target; logic pred_taken, upd_valid, upd_taken;
  branch_predictor dut (.*);
  int checks = 0, failures = 0;
  task automatic upd(logic [31:0] pc, logic t, logic [31:0] tg);
    @(negedge clk); upd_valid = 1; upd_pc = pc; upd_taken = t; upd_target = tg;
    @(negedge clk); upd_valid = 0;
  endtask
  task automatic expect_pred(string w, logic [31:0] pc, logic t, logic [31:0] tg);
    fetch_pc = pc; #1; checks++;
    if (pred_taken !== t || pred_target !== (t ? tg : pc + 4)) begin
      failures++; $display("FAIL %s pc %h: %b %h", w, pc, pred_taken, pred_target);
    end
  endtask
  initial begin
    upd_valid = 0; upd_pc = 0; upd_taken = 0; upd_target = 0; fetch_pc = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    expect_pred("empty", 32'h100, 0, 0);
    upd(32'h100, 1, 32'h40);  expect_pred("alloc taken", 32'h100, 1, 32'h40);
    upd(32'h100, 0, 32'h40);  expect_pred("one not taken", 32'h100, 0, 0);
    upd(32'h100, 1, 32'h80);  upd(32'h100, 1, 32'h80);
    expect_pred("strong", 32'h100, 1, 32'h80);
    upd(32'h100, 0, 32'h80);  expect_pred("hysteresis", 32'h100, 1, 32'h80);
    upd(32'h200, 0, 32'h0);   expect_pred("alloc not taken", 32'h200, 0, 0);
    upd(32'h200, 1, 32'h300); expect_pred("becomes taken", 32'h200, 1, 32'h300);
    // fill: entries 0,1 are used; 14 more fill the table
    for (int i = 0; i < N - 2; i++) upd(32'h1000 + 4 * i, 1, 32'h2000 + 4 * i);
    expect_pred("kept 0", 32'h100, 1, 32'h80);
    for (int i = 0; i < N - 2; i++) expect_pred("full", 32'h1000 + 4 * i, 1, 32'h2000 + 4 * i);
    upd(32'h5000, 1, 32'h6000);       // replaces the oldest (0x100)
    expect_pred("new", 32'h5000, 1, 32'h6000);
    expect_pred("evicted", 32'h100, 0, 0);
    expect_pred("kept 1", 32'h200, 1, 32'h300);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
