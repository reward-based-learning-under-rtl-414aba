// Test of the SYNAPSE unit: register moves (mtsynr/mfsynr), synrd, synwr,
// syneval, synrst and synupd against a synapse model here that holds weights
// and preset evaluation bits and answers after a random delay. For synupd the
// written weight must be clamp(w + A0 b0 + A1 b1, 0, 15) with the request
// sequence read, evaluate, write, reset; requests must carry the
// configuration registers; busy must cover every instruction.
module tb_synapse_sfu;
  import epp_pkg::*;
  import tb_isa_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, busy, wb_ack; uop_t in_uop; logic [31:0] ins, in_a, in_b; wb_t out;
  syn_req_t syn_req; syn_rsp_t syn_rsp;
  predecode u_pd (.instr(ins), .valid(1'b1), .uop(in_uop));
  synapse_sfu dut (.*);
  logic [3:0] w [64];
  logic [1:0] bits [64];
  sif_op_t    seq [$];
  int checks = 0, failures = 0, dly;
  logic [15:0] seen_tl;
  eval_cfg_t   seen_cfg1;
  always_ff @(posedge clk) begin
    syn_rsp <= '0;
    if (!rst_n) dly <= 0;
    else if (syn_req.valid && !syn_rsp.ack) begin
      if (dly >= 1) begin
        dly <= 0;
        syn_rsp.ack <= 1;
        seq.push_back(syn_req.op);
        seen_tl <= syn_req.a_tl; seen_cfg1 <= syn_req.cfg[1];
        unique case (syn_req.op)
          SIF_READ:  syn_rsp.rdata <= w[syn_req.addr[5:0]];
          SIF_WRITE: w[syn_req.addr[5:0]] <= syn_req.wdata;
          SIF_EVAL:  syn_rsp.bits <= bits[syn_req.addr[5:0]];
          default: ;
        endcase
      end else dly <= dly + 1;
    end
  end
  task automatic exec(logic [31:0] i, logic [31:0] a, logic [31:0] bb, output logic [31:0] res, output bit got);
    @(negedge clk); in_valid = 1; ins = i; in_a = a; in_b = bb;
    @(negedge clk); in_valid = 0; got = 0; res = 0;
    for (int n = 0; n < 40 && busy; n++) begin
      if (out.valid) begin got = 1; res = out.data; wb_ack = 1; end
      @(negedge clk); wb_ack = 0;
    end
    checks++; if (busy) begin failures++; $display("FAIL %h hangs", i); end
  endtask
  logic [31:0] r; bit got;
  initial begin
    in_valid = 0; wb_ack = 0; ins = NOP; in_a = 0; in_b = 0;
    for (int i = 0; i < 64; i++) begin w[i] = 4'($urandom); bits[i] = 2'($urandom); end
    repeat (2) @(posedge clk); rst_n = 1;
    exec(mtsynr(0, 1), 32'd5, 0, r, got);       // A0 = 5
    exec(mtsynr(1, 1), -32'sd3, 0, r, got);     // A1 = -3
    exec(mtsynr(3, 1), 32'hc, 0, r, got);       // CFG1
    exec(mtsynr(4, 1), 32'h1234, 0, r, got);    // ATL
    exec(mfsynr(6, 0), 0, 0, r, got); checks++; if (r != 5) begin failures++; $display("FAIL mfsynr A0 %h", r); end
    exec(mfsynr(6, 1), 0, 0, r, got); checks++; if (r != -32'sd3) begin failures++; $display("FAIL mfsynr A1 %h", r); end
    exec(mfsynr(6, 4), 0, 0, r, got); checks++; if (r != 32'h1234) failures++;
    for (int n = 0; n < 200; n++) begin
      int a, e; logic [3:0] w0; logic [1:0] b0;
      a = $urandom_range(0, 63); w0 = w[a]; b0 = bits[a];
      seq.delete();
      case (n % 4)
        0: begin exec(synrd(6, 1), 32'(a), 0, r, got); checks++;
             if (!got || r != 32'(w0)) begin failures++; $display("FAIL synrd"); end end
        1: begin exec(synwr(6, 1), 32'(a), 32'($urandom), r, got); checks++;
             if (w[a] != in_b[3:0]) begin failures++; $display("FAIL synwr"); end end
        2: begin exec(syneval(6, 1), 32'(a), 0, r, got); checks++;
             if (!got || r != 32'(b0) || seen_cfg1 != eval_cfg_t'(4'hc) || seen_tl != 16'h1234) begin
               failures++; $display("FAIL syneval"); end end
        default: begin
          exec(synupd(6, 1), 32'(a), 0, r, got);
          e = int'(w0) + (b0[0] ? 5 : 0) + (b0[1] ? -3 : 0);
          e = e < 0 ? 0 : e > 15 ? 15 : e;
          checks += 2;
          if (!got || r != 32'(e) || w[a] != 4'(e)) begin
            failures++; $display("FAIL synupd w %0d b %b: %0d/%0d exp %0d", w0, b0, r, w[a], e); end
          if (seq.size() != 4 || seq[0] != SIF_READ || seq[1] != SIF_EVAL || seq[2] != SIF_WRITE
              || seq[3] != SIF_RESET) begin failures++; $display("FAIL synupd sequence"); end
        end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
