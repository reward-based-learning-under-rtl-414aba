// Test of the 4-bit synapse weight memory at its full size (448 x 512):
// writes a pattern to every synapse and reads it back with the one-cycle
// latency, plus random single accesses compared with a model.
module tb_synapse_weight_sram;
  localparam int ROWS = 448, COLS = 512, AW = 18;
  logic clk = 0;
  always #5 clk = ~clk;
  logic req, we; logic [AW-1:0] addr; logic [3:0] wdata, rdata;
  synapse_weight_sram dut (.*);
  int checks = 0, failures = 0;
  function automatic logic [3:0] pat(int r, int c); return 4'(r * 7 + c * 3 + (r >> 4)); endfunction
  initial begin
    req = 0; we = 0; addr = 0; wdata = 0;
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
      @(negedge clk); req = 1; we = 1; addr = AW'((r << 9) | c); wdata = pat(r, c);
    end
    for (int n = 0; n < 4000; n++) begin
      int r, c; r = $urandom_range(0, ROWS - 1); c = $urandom_range(0, COLS - 1);
      @(negedge clk); req = 1; we = 0; addr = AW'((r << 9) | c);
      @(negedge clk); req = 0;
      checks++; if (rdata !== pat(r, c)) begin failures++; $display("FAIL %0d/%0d", r, c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (300000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
