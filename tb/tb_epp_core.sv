// Self-checking test of the EPP core with its main memory: runs a program
// that exercises every functional unit (fixed point, shifter, multiplier,
// divider, branches with CTR loop, call/return, compare-and-branch,
// loads/stores to memory and to the control bus, SYNAPSE read), stores the
// results to memory and compares them with values computed here. It also
// checks that mispredictions, cache misses, issue stalls and out-of-order
// retirement happened. The control bus and synapse interface are answered by
// simple responders in this file.
module tb_epp_core;
  import epp_pkg::*;
  import tb_isa_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        imem_req, dmem_req, dmem_we;
  logic [11:0] imem_addr, dmem_addr;
  logic [31:0] imem_rdata, dmem_rdata, dmem_wdata;
  logic [3:0]  dmem_be;
  bus_req_t    bus_req;
  bus_rsp_t    bus_rsp;
  syn_req_t    syn_req;
  syn_rsp_t    syn_rsp;
  logic ev_issue, ev_stall, ev_mis, ev_miss, ev_ooo;

  epp_core dut (
    .clk, .rst_n, .imem_req, .imem_addr, .imem_rdata,
    .dmem_req, .dmem_we, .dmem_addr, .dmem_wdata, .dmem_be, .dmem_rdata,
    .bus_req, .bus_rsp, .syn_req, .syn_rsp,
    .ev_issue, .ev_stall, .ev_mispredict(ev_mis), .ev_icache_miss(ev_miss),
    .ev_ooo_retire(ev_ooo)
  );
  main_memory u_mem (
    .clk, .a_req(imem_req), .a_addr(imem_addr), .a_rdata(imem_rdata),
    .b_req(dmem_req), .b_we(dmem_we), .b_addr(dmem_addr), .b_wdata(dmem_wdata),
    .b_be(dmem_be), .b_rdata(dmem_rdata)
  );

  // control bus responder: acknowledges two cycles after a request, reads
  // return the address xor 0x5A5A5A5A, writes are recorded
  logic [1:0]  bcnt;
  logic [31:0] last_bus_w, last_bus_a;
  always_ff @(posedge clk) begin
    bus_rsp <= '0;
    if (bus_req.valid && !bus_rsp.ack) begin
      bcnt <= bcnt + 1;
      if (bcnt == 2'd1) begin
        bus_rsp.ack   <= 1'b1;
        bus_rsp.rdata <= bus_req.addr ^ 32'h5A5A_5A5A;
        if (bus_req.we) begin last_bus_w <= bus_req.wdata; last_bus_a <= bus_req.addr; end
        bcnt <= '0;
      end
    end else bcnt <= '0;
  end
  // synapse responder: weight = address[3:0] + 1, bits = address[1:0]
  always_ff @(posedge clk) begin
    syn_rsp <= '0;
    if (syn_req.valid && !syn_rsp.ack) begin
      syn_rsp.ack   <= 1'b1;
      syn_rsp.rdata <= syn_req.addr[3:0] + 4'd1;
      syn_rsp.bits  <= syn_req.addr[1:0];
    end
  end

  int checks = 0, failures = 0;
  int n_issue = 0, n_stall = 0, n_mis = 0, n_miss = 0, n_ooo = 0;
  always_ff @(posedge clk) begin
    n_issue <= n_issue + int'(ev_issue);
    n_stall <= n_stall + int'(ev_stall);
    n_mis   <= n_mis   + int'(ev_mis);
    n_miss  <= n_miss  + int'(ev_miss);
    n_ooo   <= n_ooo   + int'(ev_ooo);
  end

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d (0x%08h) expected %0d (0x%08h)", what, got, got, exp, exp);
    end
  endtask

  logic [31:0] prog [$];
  localparam int RES = 32'h1000;   // result area
  initial begin
    // arithmetic
    prog.push_back(addi(1, 0, 100));
    prog.push_back(addi(2, 0, 7));
    prog.push_back(divw(6, 1, 2));        // slow
    prog.push_back(add(3, 1, 2));         // overtakes the divide
    prog.push_back(subf(4, 2, 1));        // r1 - r2
    prog.push_back(mullw(5, 1, 2));
    prog.push_back(addi(7, 0, -9));
    prog.push_back(divw(8, 7, 2));
    prog.push_back(slw(9, 2, 2));
    prog.push_back(rlwinm(10, 1, 4, 0, 31));
    prog.push_back(addi(12, 0, 2));
    prog.push_back(sraw(11, 7, 12));
    // CTR loop: r13 += 3, ten times
    prog.push_back(addi(13, 0, 0));
    prog.push_back(addi(20, 0, 10));
    prog.push_back(mtctr(20));
    prog.push_back(addi(13, 13, 3));
    prog.push_back(bdnz(-4));
    // call and return
    prog.push_back(b(12, 1));             // bl +12
    prog.push_back(addi(15, 0, 77));      // after return
    prog.push_back(b(12));                // skip the function
    prog.push_back(addi(14, 0, 55));      // function
    prog.push_back(blr());
    // compare and branch: r1 == 100, so skip "r16 = 1"
    prog.push_back(cmpwi(0, 1, 100));
    prog.push_back(bc(12, 2, 8));         // beq +8
    prog.push_back(addi(16, 0, 1));
    prog.push_back(addi(16, 16, 2));      // r16 = (r16 was 0) + 2
    // memory
    prog.push_back(stw(3, 0, 32'h800));
    prog.push_back(lwz(17, 0, 32'h800));
    prog.push_back(lbz(18, 0, 32'h803));
    // control bus at 0x8030_0000
    prog.push_back(addis(19, 0, 16'h8030));
    prog.push_back(stw(5, 19, 8));
    prog.push_back(lwz(21, 19, 4));
    // SYNAPSE read of synapse 5
    prog.push_back(addi(22, 0, 5));
    prog.push_back(synrd(23, 22));
    prog.push_back(mulli(24, 2, -3));
    prog.push_back(divwu(25, 1, 12));
    // store results r3..r25 to RES
    for (int r = 3; r <= 25; r++) prog.push_back(stw(r, 0, RES + 4 * r));
    prog.push_back(addi(26, 0, 1));
    prog.push_back(stw(26, 0, RES));      // done flag
    prog.push_back(b(0));                 // stay here

    for (int i = 0; i < 3072; i++) u_mem.mem[i] = '0;
    foreach (prog[i]) u_mem.mem[i] = prog[i];
    bcnt = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (u_mem.mem[RES / 4] == 32'd1);
    repeat (5) @(posedge clk);
    check("add",    u_mem.mem[RES/4 + 3],  32'd107);
    check("subf",   u_mem.mem[RES/4 + 4],  32'd93);
    check("mullw",  u_mem.mem[RES/4 + 5],  32'd700);
    check("divw",   u_mem.mem[RES/4 + 6],  32'd14);
    check("r7",     u_mem.mem[RES/4 + 7],  -32'sd9);
    check("divw-",  u_mem.mem[RES/4 + 8],  -32'sd1);
    check("slw",    u_mem.mem[RES/4 + 9],  32'd896);
    check("rlwinm", u_mem.mem[RES/4 + 10], 32'd1600);
    check("sraw",   u_mem.mem[RES/4 + 11], -32'sd3);
    check("loop",   u_mem.mem[RES/4 + 13], 32'd30);
    check("call",   u_mem.mem[RES/4 + 14], 32'd55);
    check("return", u_mem.mem[RES/4 + 15], 32'd77);
    check("beq",    u_mem.mem[RES/4 + 16], 32'd2);
    check("lwz",    u_mem.mem[RES/4 + 17], 32'd107);
    check("lbz",    u_mem.mem[RES/4 + 18], 32'd107);
    check("bus rd", u_mem.mem[RES/4 + 21], 32'h8030_0004 ^ 32'h5A5A_5A5A);
    check("bus wr", last_bus_w, 32'd700);
    check("bus wa", last_bus_a, 32'h8030_0008);
    check("synrd",  u_mem.mem[RES/4 + 23], 32'd6);
    check("mulli",  u_mem.mem[RES/4 + 24], -32'sd21);
    check("divwu",  u_mem.mem[RES/4 + 25], 32'd50);
    check("LR",     dut.lr_q, 32'd4 * 18);
    checks++; if (n_mis  == 0) begin failures++; $display("FAIL no misprediction"); end
    checks++; if (n_miss == 0) begin failures++; $display("FAIL no cache miss"); end
    checks++; if (n_stall == 0) begin failures++; $display("FAIL no stall"); end
    checks++; if (n_ooo  == 0) begin failures++; $display("FAIL no out-of-order retirement"); end
    $display("issued %0d, stalls %0d, mispredicts %0d, misses %0d, ooo %0d",
             n_issue, n_stall, n_mis, n_miss, n_ooo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
