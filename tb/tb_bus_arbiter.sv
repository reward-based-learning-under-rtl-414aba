// Test of the control-bus arbiter: a host and an EPP master issue random
// reads and writes at the same time to the four slave regions and to the
// control register. Slaves answer after random delays with data derived
// from the address. Each master must get its own data, each slave must see
// the writes that were sent to it, a transfer must not be switched to the
// other master before its acknowledge, the host must win when both start
// together, and the run register must follow writes to it. Masters keep a
// request valid until the end of the cycle in which it is acknowledged.
module tb_bus_arbiter;
  import epp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  bus_req_t host_req, epp_req, mem_req, syn_req, rate_req, ev_req;
  bus_rsp_t host_rsp, epp_rsp, mem_rsp, syn_rsp, rate_rsp, ev_rsp;
  logic epp_run;
  bus_arbiter dut (.*);

  int checks = 0, failures = 0, both = 0, host_first = 0;
  task automatic check(string w, logic [31:0] g, logic [31:0] e);
    checks++; if (g !== e) begin failures++; $display("FAIL %s got %h exp %h", w, g, e); end
  endtask

  // slaves: ack after 1..3 cycles, read data = address ^ slave key
  bus_req_t sreq [4];
  bus_rsp_t srsp [4];
  assign sreq[0] = mem_req; assign sreq[1] = syn_req; assign sreq[2] = rate_req; assign sreq[3] = ev_req;
  assign mem_rsp = srsp[0]; assign syn_rsp = srsp[1]; assign rate_rsp = srsp[2]; assign ev_rsp = srsp[3];
  logic [31:0] last_w [4];
  for (genvar s = 0; s < 4; s++) begin : g_slave
    int cnt, lat;
    always_ff @(posedge clk) begin
      srsp[s] <= '0;
      if (!rst_n) begin cnt <= 0; lat <= 1; end
      else if (sreq[s].valid && !srsp[s].ack) begin
        if (cnt + 1 >= lat) begin
          srsp[s].ack <= 1'b1;
          srsp[s].rdata <= sreq[s].addr ^ (32'h1111_1111 * (s + 1));
          if (sreq[s].we) last_w[s] <= sreq[s].wdata;
          cnt <= 0; lat <= $urandom_range(1, 3);
        end else cnt <= cnt + 1;
      end
    end
  end
  // a transfer keeps its master
  logic host_busy, epp_busy;
  always_ff @(posedge clk) begin
    if (host_req.valid && epp_req.valid && !dut.locked_q) begin
      both <= both + 1;
      if (dut.owner) host_first <= host_first + 1;
    end
  end

  task automatic xfer(input bit is_host, input logic we, input logic [31:0] addr,
                      input logic [31:0] wd, output logic [31:0] rd);
    bus_req_t r;
    r = '{valid: 1, we: we, addr: addr, wdata: wd, be: 4'hf};
    @(negedge clk);
    if (is_host) host_req = r; else epp_req = r;
    do @(negedge clk); while (!(is_host ? host_rsp.ack : epp_rsp.ack));
    rd = is_host ? host_rsp.rdata : epp_rsp.rdata;
    // the request stays valid to the end of the acknowledge cycle
    @(posedge clk);
    if (is_host) host_req <= '0; else epp_req <= '0;
  endtask

  task automatic master(bit is_host);
    logic [31:0] rd, a, wd; int s;
    for (int n = 0; n < 300; n++) begin
      s = $urandom_range(0, 3);
      a = {BUS_MEM + 12'(s), 20'($urandom) & 20'hffffc};
      wd = $urandom;
      if ($urandom_range(0, 1)) begin
        xfer(is_host, 1, a, wd, rd);
        check("write data", last_w[s], wd);
      end else begin
        xfer(is_host, 0, a, 0, rd);
        check("read data", rd, a ^ (32'h1111_1111 * (s + 1)));
      end
    end
  endtask

  logic [31:0] d;
  initial begin
    host_req = '0; epp_req = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    check("run at reset", {31'd0, epp_run}, 0);
    xfer(1, 1, {BUS_CTRL, 20'd0}, 1, d);
    @(negedge clk); check("run set", {31'd0, epp_run}, 1);
    xfer(0, 0, {BUS_CTRL, 20'd0}, 0, d); check("run read", d, 1);
    xfer(1, 0, 32'h1234_0000, 0, d);   check("unmapped read", d, 0);
    fork master(1); master(0); join
    xfer(1, 1, {BUS_CTRL, 20'd0}, 0, d);
    @(negedge clk); check("run clear", {31'd0, epp_run}, 0);
    checks++; if (both == 0 || host_first != both) begin
      failures++; $display("FAIL priority: %0d contended, %0d to host", both, host_first);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("FAIL watchdog: host %b epp %b locked %b owner %b", host_req.valid, epp_req.valid, dut.locked_q, dut.owner_q);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
