// Test of the synapse interface with a 64-synapse weight memory model and
// accumulator values held here. SYNAPSE-unit requests (read, write, evaluate
// with two configurations, reset) and control-bus requests (weight read and
// write) are issued at random, often at the same time. Read data, written
// weights, evaluation bits (worked out here from the readout inequality),
// the cleared synapse and the priority of the SYNAPSE unit are checked.
module tb_synapse_interface;
  import epp_pkg::*;
  localparam int AW = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  syn_req_t sfu_req; syn_rsp_t sfu_rsp; bus_req_t bus_req; bus_rsp_t bus_rsp;
  logic sram_req, sram_we, acc_clr, eval_b; logic [AW-1:0] sram_addr, acc_sel;
  logic [3:0] sram_wdata, sram_rdata; eval_cfg_t eval_cfg; logic [15:0] eval_a_tl, eval_a_th;
  synapse_interface #(.AW(AW)) dut (.*);
  logic [3:0]  w [64];
  logic [15:0] ap [64], am [64];
  always_ff @(posedge clk) if (sram_req) begin
    if (sram_we) w[sram_addr] <= sram_wdata; else sram_rdata <= w[sram_addr];
  end
  always_ff @(posedge clk) if (acc_clr) begin ap[sram_addr] <= 0; am[sram_addr] <= 0; end
  eval_unit u_eval (.a_plus(ap[acc_sel]), .a_minus(am[acc_sel]), .a_tl(eval_a_tl), .a_th(eval_a_th),
                    .cfg(eval_cfg), .b(eval_b));
  function automatic logic ref_b(int p, int m, int tl, int th, logic [3:0] c);
    return (tl + c[1] * p + c[2] * m) * (1 + c[3] + c[0]) > (th + c[3] * p + c[0] * m) * (1 + c[1] + c[2]);
  endfunction
  int checks = 0, failures = 0, both = 0, sfu_first = 0;
  logic [3:0] mw [64];
  task automatic sfu(sif_op_t op, int a, logic [3:0] wd, eval_cfg_t c0, eval_cfg_t c1, output syn_rsp_t r);
    @(negedge clk);
    sfu_req = '0; sfu_req.valid = 1; sfu_req.op = op; sfu_req.addr = SYN_AW'(a); sfu_req.wdata = wd;
    sfu_req.cfg[0] = c0; sfu_req.cfg[1] = c1; sfu_req.a_tl = 100; sfu_req.a_th = 400;
    do @(negedge clk); while (!sfu_rsp.ack);
    r = sfu_rsp;
    @(posedge clk); sfu_req <= '0;
  endtask
  task automatic bus(logic we, int a, logic [31:0] wd, output logic [31:0] d);
    @(negedge clk); bus_req = '{valid: 1, we: we, addr: {BUS_SYN, 20'(4 * a)}, wdata: wd, be: 4'hf};
    do @(negedge clk); while (!bus_rsp.ack);
    d = bus_rsp.rdata;
    @(posedge clk); bus_req <= '0;
  endtask
  always_ff @(posedge clk) if (sfu_req.valid && bus_req.valid && dut.st_q == 0) begin
    both <= both + 1;
    if (sram_addr == AW'(sfu_req.addr) || acc_clr) sfu_first <= sfu_first + 1;
  end
  task automatic sfu_proc;
    syn_rsp_t r; int a; eval_cfg_t c0, c1;
    for (int n = 0; n < 300; n++) begin
      a = $urandom_range(0, 31);         // SYNAPSE side uses synapses 0..31
      c0 = eval_cfg_t'(4'($urandom)); c1 = eval_cfg_t'(4'($urandom));
      case (n % 4)
        0: begin sfu(SIF_READ, a, 0, c0, c1, r); checks++;
             if (r.rdata != mw[a]) begin failures++; $display("FAIL sfu read %0d", a); end end
        1: begin mw[a] = 4'($urandom); sfu(SIF_WRITE, a, mw[a], c0, c1, r);
             checks++; if (w[a] != mw[a]) begin failures++; $display("FAIL sfu write"); end end
        2: begin
             logic [1:0] e;
             e = {ref_b(ap[a], am[a], 100, 400, c1), ref_b(ap[a], am[a], 100, 400, c0)};
             sfu(SIF_EVAL, a, 0, c0, c1, r); checks++;
             if (r.bits != e) begin failures++; $display("FAIL eval %0d: %b exp %b", a, r.bits, e); end
           end
        default: begin sfu(SIF_RESET, a, 0, c0, c1, r); @(negedge clk); checks++;
             if (ap[a] != 0 || am[a] != 0) begin failures++; $display("FAIL reset"); end
             ap[a] = 16'($urandom_range(0, 2000)); am[a] = 16'($urandom_range(0, 2000)); end
      endcase
    end
  endtask
  task automatic bus_proc;
    logic [31:0] d; int a;
    for (int n = 0; n < 300; n++) begin
      a = $urandom_range(32, 63);        // bus side uses synapses 32..63
      if (n % 2) begin bus(0, a, 0, d); checks++;
        if (d != {28'd0, mw[a]}) begin failures++; $display("FAIL bus read %0d", a); end end
      else begin mw[a] = 4'($urandom); bus(1, a, 32'(mw[a]), d); end
    end
  endtask
  initial begin
    sfu_req = '0; bus_req = '0; sram_rdata = 0;
    for (int i = 0; i < 64; i++) begin
      w[i] = 4'(i); mw[i] = 4'(i);
      ap[i] = 16'($urandom_range(0, 2000)); am[i] = 16'($urandom_range(0, 2000));
    end
    repeat (2) @(posedge clk); rst_n = 1;
    fork sfu_proc(); bus_proc(); join
    checks++; if (both == 0 || sfu_first != both) begin
      failures++; $display("FAIL priority %0d of %0d", sfu_first, both); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (30000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
