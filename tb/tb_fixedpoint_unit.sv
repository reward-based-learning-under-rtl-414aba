// Test of the fixed-point unit: random add, subf, and, or, slw and
// rotate operands; the result must appear as a write-back record to the right
// register exactly LAT_FXU = 2 cycles after the operands, one per cycle.
// Operations are decoded by the predecode block.
module tb_fixedpoint_unit;
  import epp_pkg::*;
  import tb_isa_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid; uop_t in_uop; logic [31:0] in_a, in_b, ins; wb_t out;
  predecode u_pd (.instr(ins), .valid(1'b1), .uop(in_uop));
  fixedpoint_unit dut (.*);
  int checks = 0, failures = 0, cyc = 0;
  logic [31:0] expq [$];
  int          tq [$];
  always_ff @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n && out.valid) begin
    logic [31:0] e; int t;
    checks++;
    if (expq.size() == 0) begin failures++; $display("FAIL unexpected result"); end
    else begin
      e = expq.pop_front(); t = tq.pop_front();
      if (out.data !== e || !out.gpr_we || out.rd != 5'd3 || cyc - t != 2) begin
        failures++; $display("FAIL got %h exp %h after %0d", out.data, e, cyc - t);
      end
    end
  end
  initial begin
    in_valid = 0; in_a = 0; in_b = 0; ins = NOP;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      logic [31:0] a, b, exp;
      @(negedge clk);
      a = $urandom; b = (n % 5 == 0) ? 32'($urandom_range(0, 40)) : $urandom;
      case (n % 6)
        0: begin ins = add(3, 1, 2);  exp = a + b; end
        1: begin ins = subf(3, 1, 2); exp = b - a; end
        2: begin ins = and_(3, 1, 2); exp = a & b; end
        3: begin ins = or_(3, 1, 2);  exp = a | b; end
        4: begin ins = slw(3, 1, 2);  exp = b[5] ? 0 : a << b[4:0]; end
        default: begin ins = rlwinm(3, 1, int'(b[4:0]), 0, 31); exp = (a << b[4:0]) | (a >> (6'd32 - b[4:0])); end
      endcase
      in_valid = 1; in_a = a; in_b = (ins[31:26] == 6'd7) ? 32'(signed'(16'(b))) : b;
      expq.push_back(exp); tq.push_back(cyc);
    end
    @(negedge clk); in_valid = 0;
    repeat (6) @(posedge clk);
    checks++; if (expq.size() != 0) begin failures++; $display("FAIL %0d results missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
