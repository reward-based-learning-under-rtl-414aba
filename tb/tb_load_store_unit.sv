// Test of the load/store unit: random word and byte loads and stores to the
// main memory (big-endian bytes, memory model here with one cycle of read
// latency) and word accesses to the control bus (slave model here with a
// random delay). Loaded values are compared with the model; after the run
// the memory contents are compared word by word. Busy must cover each access
// and a load's result must be held until acknowledged; stores end without a
// write-back record.
module tb_load_store_unit;
  import epp_pkg::*;
  import tb_isa_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, busy, wb_ack, mem_req, mem_we; uop_t in_uop; logic [31:0] ins, in_a, in_s;
  wb_t out; logic [11:0] mem_addr; logic [31:0] mem_wdata, mem_rdata; logic [3:0] mem_be;
  bus_req_t bus_req; bus_rsp_t bus_rsp;
  predecode u_pd (.instr(ins), .valid(1'b1), .uop(in_uop));
  load_store_unit dut (.*);
  logic [31:0] mem [4096], model [4096];
  always_ff @(posedge clk) if (mem_req) begin
    if (mem_we) begin for (int k = 0; k < 4; k++) if (mem_be[k]) mem[mem_addr][8*k +: 8] <= mem_wdata[8*k +: 8]; end
    else mem_rdata <= mem[mem_addr];
  end
  logic [31:0] bus_last;
  int bcnt;
  always_ff @(posedge clk) begin
    bus_rsp <= '0;
    if (!rst_n) bcnt <= 0;
    else if (bus_req.valid && !bus_rsp.ack) begin
      if (bcnt == 2) begin
        bus_rsp.ack <= 1; bus_rsp.rdata <= ~bus_req.addr; bcnt <= 0;
        if (bus_req.we) bus_last <= bus_req.wdata;
      end else bcnt <= bcnt + 1;
    end
  end
  int checks = 0, failures = 0;
  task automatic op(logic [31:0] i, logic [31:0] a, logic [31:0] s, bit is_load, logic [31:0] exp);
    @(negedge clk); in_valid = 1; ins = i; in_a = a; in_s = s;
    @(negedge clk); in_valid = 0;
    if (!is_load) begin   // stores end without a write-back record
      checks++; if (!busy) begin failures++; $display("FAIL store not busy"); end
      while (busy) begin
        checks++; if (out.valid) begin failures++; $display("FAIL store result"); end
        @(negedge clk);
      end
      return;
    end
    while (!out.valid) begin
      checks++; if (!busy) begin failures++; $display("FAIL not busy"); end
      @(negedge clk);
    end
    repeat (2) @(negedge clk);
    checks++;
    if (!out.valid || out.gpr_we != is_load || (is_load && (out.data != exp || out.rd != 5'd7))) begin
      failures++; $display("FAIL %h at %h: %h exp %h", i, a, out.data, exp);
    end
    wb_ack = 1; @(negedge clk); wb_ack = 0;
  endtask
  initial begin
    for (int i = 0; i < 4096; i++) begin mem[i] = $urandom; model[i] = mem[i]; end
    in_valid = 0; wb_ack = 0; ins = NOP; in_a = 0; in_s = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      logic [31:0] a, s; int k;
      s = $urandom;
      case ($urandom_range(0, 4))
        0: begin a = 32'($urandom_range(0, 3071)) * 4;
             op(lwz(7, 1, 0), a, 0, 1, model[a >> 2]); end
        1: begin a = 32'($urandom_range(0, 12287)); k = 3 - int'(a[1:0]);
             op(lbz(7, 1, 0), a, 0, 1, {24'd0, model[a >> 2][8*k +: 8]}); end
        2: begin a = 32'($urandom_range(0, 3071)) * 4; model[a >> 2] = s;
             op(stw(7, 1, 0), a, s, 0, 0); end
        3: begin a = 32'($urandom_range(0, 12287)); k = 3 - int'(a[1:0]);
             model[a >> 2][8*k +: 8] = s[7:0];
             op(stb(7, 1, 0), a, s, 0, 0); end
        default: begin
          a = 32'h8030_0000 | (32'($urandom_range(0, 255)) << 2);
          if (n % 2) op(lwz(7, 1, 0), a, 0, 1, ~a);
          else begin
            op(stw(7, 1, 0), a, s, 0, 0);
            checks++; if (bus_last != s) begin failures++; $display("FAIL bus write"); end
          end
        end
      endcase
    end
    for (int i = 0; i < 3072; i++) begin
      checks++; if (mem[i] != model[i]) begin failures++; $display("FAIL mem[%0d]", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
