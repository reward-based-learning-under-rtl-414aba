// Test of the event generator: bus writes become events with the written
// address; a second write while the buffer is full is held until the first
// event leaves (ready held low for a while); reads return the full flag.
module tb_event_generator;
  import epp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  bus_req_t bus_req; bus_rsp_t bus_rsp; logic ev_valid, ev_ready; logic [15:0] ev_addr;
  event_generator dut (.*);
  int checks = 0, failures = 0;
  logic [15:0] got [$];
  always @(posedge clk) if (ev_valid && ev_ready) got.push_back(ev_addr);
  task automatic access(logic we, logic [31:0] wd, output logic [31:0] d, output int lat);
    lat = 0;
    @(negedge clk); bus_req = '{valid: 1, we: we, addr: BUS_EVENT << 20, wdata: wd, be: 4'hf};
    do begin @(negedge clk); lat++; end while (!bus_rsp.ack);
    d = bus_rsp.rdata;
    bus_req = '0;
  endtask
  logic [31:0] d; int lat;
  initial begin
    bus_req = '0; ev_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    access(0, 0, d, lat); checks++; if (d != 0) failures++;
    access(1, 32'h0001_0042, d, lat);
    access(0, 0, d, lat); checks++; if (d != 1) begin failures++; $display("FAIL not full"); end
    fork
      begin repeat (20) @(negedge clk); ev_ready = 1; end
      access(1, 32'h0000_0777, d, lat);
    join
    checks++; if (lat < 15) begin failures++; $display("FAIL write not held (%0d)", lat); end
    repeat (5) @(posedge clk);
    for (int i = 0; i < 20; i++) access(1, 32'(i), d, lat);
    repeat (5) @(posedge clk);
    checks++; if (got.size() != 22) begin failures++; $display("FAIL %0d events", got.size()); end
    else begin
      checks += 22;
      if (got[0] != 16'h0042) failures++;
      if (got[1] != 16'h0777) failures++;
      for (int i = 0; i < 20; i++) if (got[2 + i] != 16'(i)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
