// Test of the instruction cache: a miss asks memory for exactly one cycle,
// the line is valid two cycles after the miss with the right word; hits need
// no memory access; two addresses LINES*4 apart evict each other. The number
// of memory requests must equal the number of misses worked out here.
module tb_icache;
  localparam int LINES = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req, hit, mem_req; logic [31:0] pc, instr, mem_rdata; logic [11:0] mem_addr;
  icache dut (.*);
  logic [31:0] mem [4096];
  always_ff @(posedge clk) mem_rdata <= mem[mem_addr];
  int checks = 0, failures = 0, nreq = 0, exp_miss = 0;
  always_ff @(posedge clk) nreq <= nreq + int'(mem_req);
  logic [31:0] resident [LINES];
  logic        rvalid [LINES];
  task automatic fetch(logic [31:0] a);
    int idx; idx = (a >> 2) % LINES;
    @(negedge clk); req = 1; pc = a; #1;
    if (!(rvalid[idx] && resident[idx] == a)) begin
      exp_miss++;
      checks++; if (hit || !mem_req) begin failures++; $display("FAIL expected miss %h", a); end
      @(negedge clk); checks++; if (mem_req) begin failures++; $display("FAIL second request"); end
      @(negedge clk);
      rvalid[idx] = 1; resident[idx] = a;
    end
    #1 checks++;
    if (!hit || instr !== mem[a[13:2]]) begin failures++; $display("FAIL fetch %h: %b %h", a, hit, instr); end
    req = 0;
  endtask
  initial begin
    for (int i = 0; i < 4096; i++) mem[i] = $urandom;
    foreach (rvalid[i]) rvalid[i] = 0;
    req = 0; pc = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 64; i++) fetch(4 * i);
    for (int i = 0; i < 64; i++) fetch(4 * i);          // all hits
    fetch(32'h0 + 4 * LINES); fetch(32'h0);             // conflict
    for (int n = 0; n < 500; n++) fetch(4 * $urandom_range(0, 300));
    @(negedge clk);
    checks++; if (nreq != exp_miss) begin failures++; $display("FAIL %0d requests, %0d misses", nreq, exp_miss); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
