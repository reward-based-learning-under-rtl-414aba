// Test of the dual-ported main memory: port B writes words and single bytes
// (byte enables, big-endian lane 3 = bits 31:24), both ports read back with
// one cycle of latency and are compared with a model.
module tb_main_memory;
  logic clk = 0;
  always #5 clk = ~clk;
  logic a_req, b_req, b_we; logic [11:0] a_addr, b_addr; logic [31:0] a_rdata, b_rdata, b_wdata;
  logic [3:0] b_be;
  main_memory dut (.*);
  logic [31:0] model [3072];
  int checks = 0, failures = 0;
  task automatic check(string w, logic [31:0] g, logic [31:0] e);
    checks++; if (g !== e) begin failures++; $display("FAIL %s got %h exp %h", w, g, e); end
  endtask
  initial begin
    a_req = 0; b_req = 0; b_we = 0; a_addr = 0; b_addr = 0; b_wdata = 0; b_be = 0;
    for (int i = 0; i < 3072; i++) begin
      @(negedge clk); b_req = 1; b_we = 1; b_addr = 12'(i); b_be = 4'hf; b_wdata = i * 32'h01010101 ^ 32'hA5A50000;
      model[i] = b_wdata;
    end
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      b_addr = 12'($urandom_range(0, 3071)); b_we = 1; b_be = 4'($urandom); b_wdata = $urandom;
      for (int k = 0; k < 4; k++) if (b_be[k]) model[b_addr][8*k +: 8] = b_wdata[8*k +: 8];
    end
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      b_we = 0; a_req = 1; a_addr = 12'($urandom_range(0, 3071)); b_addr = 12'($urandom_range(0, 3071));
      @(negedge clk);
      check("port A", a_rdata, model[a_addr]);
      check("port B", b_rdata, model[b_addr]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
