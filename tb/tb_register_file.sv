// Test of the register file: reset to zero, writes to random registers,
// two read ports compared with a model array, write-through to both ports in
// the cycle of the write.
module tb_register_file;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [4:0] ra, rb, wa; logic [31:0] rda, rdb, wd; logic we;
  register_file dut (.*);
  logic [31:0] model [32];
  int checks = 0, failures = 0;
  task automatic check(string w, logic [31:0] g, logic [31:0] e);
    checks++; if (g !== e) begin failures++; $display("FAIL %s got %h exp %h", w, g, e); end
  endtask
  initial begin
    we = 0; ra = 0; rb = 0; wa = 0; wd = 0;
    foreach (model[i]) model[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 32; i++) begin ra = 5'(i); #1 check("reset", rda, 0); end
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      we = 1'($urandom); wa = 5'($urandom); wd = $urandom;
      ra = 5'($urandom); rb = (n % 3 == 0) ? wa : 5'($urandom);
      #1;
      check("port a", rda, (we && ra == wa) ? wd : model[ra]);
      check("port b", rdb, (we && rb == wa) ? wd : model[rb]);
      @(posedge clk); if (we) model[wa] = wd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
