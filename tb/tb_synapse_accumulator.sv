// Test of the STDP accumulator model on a 4 x 4 array. A causal pair (pre,
// then post dt cycles later) must add A exp(-dt/tau) to a+ of that synapse
// only; an anti-causal pair adds to a-. Under the reduced nearest-neighbour
// rule a second post spike with no new pre spike adds nothing. Values are
// compared with exp() computed here (tolerance 1 % + 2 codes, for the fixed
// point decay). Also checks clearing of one synapse and saturation at a_max.
module tb_synapse_accumulator;
  import epp_pkg::*;
  localparam int ROWS = 4, COLS = 4, TAU = 200, A = 512, AMAX = 16000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic pre_valid, post_valid, clr; logic [1:0] pre_row, post_col;
  logic [3:0] sel_addr, clr_addr; logic [15:0] a_plus, a_minus;
  synapse_accumulator #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  int checks = 0, failures = 0;
  real ep [ROWS][COLS], em [ROWS][COLS];
  function automatic real fabs(real x); return x < 0 ? -x : x; endfunction
  int cyc = 0, t_post [COLS], t_pre [ROWS];
  always_ff @(posedge clk) cyc <= cyc + 1;
  task automatic pre(int r);  @(negedge clk); pre_valid = 1; pre_row = 2'(r); t_pre[r] = cyc; @(negedge clk); pre_valid = 0; endtask
  task automatic post(int c); @(negedge clk); post_valid = 1; post_col = 2'(c); t_post[c] = cyc; @(negedge clk); post_valid = 0; endtask
  task automatic gap(int n); repeat (n) @(negedge clk); endtask
  task automatic check_all(string w);
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
      sel_addr = 4'(r * COLS + c); #1;
      checks += 2;
      if (fabs(real'(a_plus) - ep[r][c]) > 0.01 * ep[r][c] + 2.0) begin
        failures++; $display("FAIL %s a+ [%0d][%0d] %0d exp %0.1f", w, r, c, a_plus, ep[r][c]);
      end
      if (fabs(real'(a_minus) - em[r][c]) > 0.01 * em[r][c] + 2.0) begin
        failures++; $display("FAIL %s a- [%0d][%0d] %0d exp %0.1f", w, r, c, a_minus, em[r][c]);
      end
    end
  endtask
  initial begin
    pre_valid = 0; post_valid = 0; clr = 0; pre_row = 0; post_col = 0; sel_addr = 0; clr_addr = 0;
    foreach (ep[r, c]) begin ep[r][c] = 0; em[r][c] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    check_all("reset");
    // causal pair on (1,2), dt = 20
    pre(1); gap(19); post(2);
    ep[1][2] += A * $exp(-20.0 / TAU);
    gap(2); check_all("causal");
    // second post, no new pre: nothing
    gap(10); post(2); gap(2); check_all("nearest neighbour");
    // anti-causal on (3,0): post then pre, dt = 50
    post(0); gap(49); pre(3);
    em[3][0] += A * $exp(-50.0 / TAU);
    // the post spike of column 0 also pairs with row 1's earlier pre spike
    ep[1][0] += A * $exp(-real'(t_post[0] - t_pre[1]) / TAU);
    // row 3 has never spiked before, so it pairs with column 2's latest post
    em[3][2] += A * $exp(-real'(t_pre[3] - t_post[2]) / TAU);
    gap(2);
    check_all("anti-causal");
    // clear one synapse
    @(negedge clk); clr = 1; clr_addr = 4'(1 * COLS + 2); @(negedge clk); clr = 0;
    ep[1][2] = 0; check_all("clear");
    // saturation: many coincident causal pairs on (0,1)
    for (int i = 0; i < 40; i++) begin pre(0); post(1); gap(1); end
    sel_addr = 4'(0 * COLS + 1); #1; checks++;
    if (a_plus != 16'(AMAX)) begin failures++; $display("FAIL saturation %0d", a_plus); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
