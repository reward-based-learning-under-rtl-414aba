// Test of the rate counters: random spike events per column are counted by
// a model; bus reads return the count (acknowledged one cycle after the
// request), bus writes clear a counter, and counters saturate at 0xFFFF.
module tb_rate_counters;
  import epp_pkg::*;
  localparam int COLS = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic post_valid; logic [3:0] post_col; bus_req_t bus_req; bus_rsp_t bus_rsp;
  rate_counters #(.COLS(COLS)) dut (.*);
  int model [COLS];
  int checks = 0, failures = 0;
  task automatic access(logic we, int c, output logic [31:0] d);
    int lat = 0;
    @(negedge clk); bus_req = '{valid: 1, we: we, addr: BUS_RATE << 20 | 32'(4 * c), wdata: 0, be: 4'hf};
    do begin @(negedge clk); lat++; end while (!bus_rsp.ack);
    d = bus_rsp.rdata;
    bus_req = '0;
    checks++; if (lat != 1) begin failures++; $display("FAIL ack after %0d", lat); end
  endtask
  logic [31:0] d;
  initial begin
    bus_req = '0; post_valid = 0; post_col = 0;
    foreach (model[i]) model[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk); post_valid = 1'($urandom); post_col = 4'($urandom);
      if (post_valid) model[post_col]++;
    end
    @(negedge clk); post_valid = 0;
    for (int c = 0; c < COLS; c++) begin
      access(0, c, d); checks++;
      if (d != 32'(model[c])) begin failures++; $display("FAIL col %0d: %0d vs %0d", c, d, model[c]); end
    end
    access(1, 3, d); access(0, 3, d); checks++; if (d != 0) failures++;
    access(0, 4, d); checks++; if (d != 32'(model[4])) failures++;
    // saturation
    @(negedge clk); post_valid = 1; post_col = 5;
    repeat (70000) @(negedge clk);
    post_valid = 0;
    access(0, 5, d); checks++; if (d != 32'hffff) begin failures++; $display("FAIL saturation %h", d); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
