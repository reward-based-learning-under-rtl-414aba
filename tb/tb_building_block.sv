// End-to-end test of one building block at its full size (448 x 512
// synapses, 12 kiB memory). The host side loads a plasticity program over
// the control bus and starts the EPP. The program configures the SYNAPSE
// unit, writes a weight, clears the synapse's accumulators and then waits
// on a flag in memory. Meanwhile the test sends a presynaptic spike and,
// 20 cycles later, a postsynaptic spike to that synapse. Then it sets the
// flag. The program runs synupd, sends an event, reads a rate counter and
// reports the results in memory. The test checks the results against the
// expected values (w' = 5 + A0 = 8 for a causal pair). It also counts issue
// stalls, branch mispredictions, instruction cache misses, out-of-order
// retirements, host/EPP bus sharing and generated events, and counts a
// failure for any of them that never happened.
module tb_building_block;
  import epp_pkg::*;
  import tb_isa_pkg::*;

  localparam int ROWS = 448, COLS = 512;
  localparam int RW = $clog2(ROWS), CW = $clog2(COLS);
  localparam int ROW = 1, COL = 2;
  localparam int SADDR = (ROW << CW) | COL;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  bus_req_t host_req;
  bus_rsp_t host_rsp;
  logic pre_valid = 0, post_valid = 0;
  logic [RW-1:0] pre_row = '0;
  logic [CW-1:0] post_col = '0;
  logic ev_valid, ev_ready;
  logic [15:0] ev_addr;
  logic epp_run, ev_issue, ev_stall, ev_mis, ev_miss, ev_ooo;

  building_block dut (
    .clk, .rst_n, .host_req, .host_rsp,
    .pre_valid, .pre_row, .post_valid, .post_col,
    .ev_valid, .ev_addr, .ev_ready,
    .epp_run, .ev_issue, .ev_stall, .ev_mispredict(ev_mis),
    .ev_icache_miss(ev_miss), .ev_ooo_retire(ev_ooo)
  );

  int checks = 0, failures = 0;
  int n_issue = 0, n_stall = 0, n_mis = 0, n_miss = 0, n_ooo = 0, n_ev = 0;
  int n_share = 0;
  logic [15:0] last_ev;
  assign ev_ready = 1'b1;
  always_ff @(posedge clk) begin
    n_issue <= n_issue + int'(ev_issue);
    n_stall <= n_stall + int'(ev_stall);
    n_mis   <= n_mis   + int'(ev_mis);
    n_miss  <= n_miss  + int'(ev_miss);
    n_ooo   <= n_ooo   + int'(ev_ooo);
    // host and EPP want the control bus in the same cycle
    n_share <= n_share + int'(host_req.valid && dut.u_core.bus_req.valid);
    if (ev_valid && ev_ready) begin n_ev <= n_ev + 1; last_ev <= ev_addr; end
  end

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d (0x%08h) expected %0d (0x%08h)", what, got, got, exp, exp);
    end
  endtask
  task automatic count(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL %s never happened", what); end
  endtask

  task automatic host(input logic we, input logic [31:0] addr, input logic [31:0] wdata,
                      output logic [31:0] rdata);
    @(posedge clk);
    host_req <= '{valid: 1'b1, we: we, addr: addr, wdata: wdata, be: 4'hf};
    do @(posedge clk); while (!host_rsp.ack);
    rdata = host_rsp.rdata;
    host_req <= '0;
  endtask

  localparam logic [31:0] MEM = 32'h8000_0000, SYN = 32'h8010_0000,
                          RATE = 32'h8020_0000, CTRL = 32'h8040_0000;
  logic [31:0] prog [$];
  logic [31:0] d;
  initial begin
    host_req = '0;
    prog.push_back(addi(1, 0, 3));   prog.push_back(mtsynr(0, 1));   // A0 = 3
    prog.push_back(addi(1, 0, -2));  prog.push_back(mtsynr(1, 1));   // A1 = -2
    prog.push_back(addi(1, 0, 3));   prog.push_back(mtsynr(2, 1));   // b0: e_ac = e_aa = 1
    prog.push_back(addi(1, 0, 12));  prog.push_back(mtsynr(3, 1));   // b1: e_cc = e_ca = 1
    prog.push_back(addi(1, 0, 0));   prog.push_back(mtsynr(4, 1));   // a_tl
    prog.push_back(addi(1, 0, 200)); prog.push_back(mtsynr(5, 1));   // a_th
    prog.push_back(addi(2, 0, SADDR));
    prog.push_back(addi(3, 0, 5));
    prog.push_back(synwr(3, 2));
    prog.push_back(synrst(2));
    prog.push_back(addi(5, 0, 1));
    prog.push_back(stw(5, 0, 32'h804));   // ready
    prog.push_back(lwz(6, 0, 32'h800));   // poll: wait for the host's flag
    prog.push_back(cmpwi(0, 6, 0));
    prog.push_back(bc(12, 2, -8));
    prog.push_back(synupd(7, 2));
    prog.push_back(divw(8, 7, 5));        // slow ...
    prog.push_back(add(9, 7, 7));         // ... overtaken
    prog.push_back(addis(10, 0, 16'h8030));
    prog.push_back(addi(11, 0, 32'h1234));
    prog.push_back(stw(11, 10, 0));       // event
    prog.push_back(addis(12, 0, 16'h8020));
    prog.push_back(lwz(13, 12, 4 * COL)); // rate counter of the column
    prog.push_back(syneval(14, 2));       // after the update: a+ = a- = 0
    prog.push_back(stw(7, 0, 32'h810));
    prog.push_back(stw(8, 0, 32'h814));
    prog.push_back(stw(9, 0, 32'h818));
    prog.push_back(stw(13, 0, 32'h81c));
    prog.push_back(stw(14, 0, 32'h820));
    prog.push_back(stw(5, 0, 32'h80c));   // done
    prog.push_back(b(0));

    repeat (3) @(posedge clk);
    rst_n = 1;
    // clear the data area, load the program
    for (int i = 32'h800; i < 32'h840; i += 4) host(1'b1, MEM + i, 32'd0, d);
    foreach (prog[i]) host(1'b1, MEM + 4 * i, prog[i], d);
    host(1'b0, MEM + 4 * 5, 32'd0, d);
    check("program readback", d, prog[5]);
    check("run before start", {31'd0, epp_run}, 32'd0);
    host(1'b1, CTRL, 32'd1, d);
    check("run after start", {31'd0, epp_run}, 32'd1);
    // wait for the program to be ready
    do host(1'b0, MEM + 32'h804, 32'd0, d); while (d != 32'd1);
    // causal spike pair with dt = 20 cycles
    @(posedge clk); pre_valid <= 1'b1; pre_row <= RW'(ROW);
    @(posedge clk); pre_valid <= 1'b0;
    repeat (19) @(posedge clk);
    post_valid <= 1'b1; post_col <= CW'(COL);
    @(posedge clk); post_valid <= 1'b0;
    repeat (2) @(posedge clk);
    host(1'b1, MEM + 32'h800, 32'd1, d);   // go
    do host(1'b0, MEM + 32'h80c, 32'd0, d); while (d != 32'd1);
    host(1'b0, MEM + 32'h810, 32'd0, d); check("synupd result", d, 32'd8);
    host(1'b0, MEM + 32'h814, 32'd0, d); check("divw", d, 32'd8);
    host(1'b0, MEM + 32'h818, 32'd0, d); check("add", d, 32'd16);
    host(1'b0, MEM + 32'h81c, 32'd0, d); check("rate counter", d, 32'd1);
    host(1'b0, MEM + 32'h820, 32'd0, d); check("eval after reset", d, 32'd0);
    host(1'b0, SYN + 4 * SADDR, 32'd0, d); check("weight over bus", d, 32'd8);
    host(1'b1, SYN + 4 * (SADDR + 1), 32'd11, d);
    host(1'b0, SYN + 4 * (SADDR + 1), 32'd0, d); check("weight write over bus", d, 32'd11);
    host(1'b1, RATE + 4 * COL, 32'd0, d);
    host(1'b0, RATE + 4 * COL, 32'd0, d); check("rate cleared", d, 32'd0);
    check("event address", {16'd0, last_ev}, 32'h1234);
    count("issue stall", n_stall);
    count("branch misprediction", n_mis);
    count("instruction cache miss", n_miss);
    count("out-of-order retirement", n_ooo);
    count("host/EPP bus contention", n_share);
    count("generated event", n_ev);
    $display("issued %0d, stalls %0d, mispredicts %0d, misses %0d, ooo %0d, shared %0d, events %0d",
             n_issue, n_stall, n_mis, n_miss, n_ooo, n_share, n_ev);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
