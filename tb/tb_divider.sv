// Test of the divider: random signed (divw) and unsigned (divwu) divisions,
// including division by zero and the signed overflow case (both give 0 here).
// The result must be held until acknowledged, busy must be high from the
// start to the acknowledge, and the result must come 33 cycles after the
// start edge (counted in clock edges from the one that starts it: 32
// iterations, one cycle to form the record).
module tb_divider;
  import epp_pkg::*;
  import tb_isa_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, busy, wb_ack; uop_t in_uop; logic [31:0] in_a, in_b, ins; wb_t out;
  predecode u_pd (.instr(ins), .valid(1'b1), .uop(in_uop));
  divider dut (.*);
  int checks = 0, failures = 0;
  task automatic run(logic sgn, logic [31:0] a, logic [31:0] b);
    logic [31:0] exp; int lat;
    if (b == 0 || (sgn && a == 32'h8000_0000 && b == '1)) exp = 0;
    else if (sgn) exp = 32'($signed(a) / $signed(b));
    else exp = a / b;
    @(negedge clk);
    ins = sgn ? divw(4, 1, 2) : divwu(4, 1, 2);
    in_valid = 1; in_a = a; in_b = b;
    @(negedge clk); in_valid = 0; lat = 1;
    while (!out.valid) begin
      checks++; if (!busy) begin failures++; $display("FAIL not busy"); end
      @(negedge clk); lat++;
    end
    repeat ($urandom_range(0, 3)) begin
      checks++; if (!out.valid || !busy) failures++;
      @(negedge clk);
    end
    checks++;
    if (out.data !== exp || out.rd != 5'd4 || lat != 34) begin
      failures++; $display("FAIL %0d %h / %h = %h exp %h, %0d cycles", sgn, a, b, out.data, exp, lat);
    end
    wb_ack = 1; @(negedge clk); wb_ack = 0;
    checks++; if (out.valid || busy) begin failures++; $display("FAIL not released"); end
  endtask
  initial begin
    in_valid = 0; wb_ack = 0; in_a = 0; in_b = 0; ins = NOP;
    repeat (2) @(posedge clk); rst_n = 1;
    run(1, 100, 7); run(1, -100, 7); run(1, 100, -7); run(0, 32'hffff_fff0, 3);
    run(1, 5, 0); run(0, 5, 0); run(1, 32'h8000_0000, 32'hffff_ffff);
    for (int n = 0; n < 200; n++) run(1'(n), $urandom, (n % 3) ? 32'($urandom_range(1, 1000)) : $urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
