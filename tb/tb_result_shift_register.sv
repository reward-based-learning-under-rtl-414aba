// Test of the result shift register: random issue attempts with random
// latencies against a model that books write-back cycles. An op of latency L
// issued in cycle t owns write back in cycle t+L; it may issue only if that
// cycle is still free. Also checks that latency 0 never issues.
module tb_result_shift_register;
  import epp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [2:0] query_lat; logic can_issue, issue, wb_busy; fu_t issue_fu, wb_fu;
  result_shift_register dut (.*);
  fu_t book [int];
  int checks = 0, failures = 0, now = 0, nissued = 0, nblocked = 0;
  initial begin
    query_lat = 0; issue = 0; issue_fu = FU_NONE;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      logic exp_can; fu_t exp_wb;
      @(negedge clk);
      query_lat = 3'($urandom_range(0, 7)); issue = 1'($urandom);
      issue_fu = fu_t'($urandom_range(1, 3));
      #1;
      exp_can = query_lat != 0 && !book.exists(now + query_lat);
      exp_wb  = book.exists(now) ? book[now] : FU_NONE;
      checks += 3;
      if (can_issue !== exp_can) begin failures++; $display("FAIL can_issue %0d lat %0d", now, query_lat); end
      if (wb_fu !== exp_wb) begin failures++; $display("FAIL wb_fu %0d", now); end
      if (wb_busy !== (exp_wb != FU_NONE)) failures++;
      if (issue && exp_can) begin book[now + query_lat] = issue_fu; nissued++; end
      if (issue && !exp_can) nblocked++;
      @(posedge clk); now++;
    end
    checks++; if (nissued == 0 || nblocked == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
