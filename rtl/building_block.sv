// One building block of the wafer with the proposed plasticity extension:
// the embedded plasticity processor (EPP) with its 12 kiB main memory, the
// synapse array's digital weights and (as behavioural models) its analog STDP
// accumulators and evaluation unit, rate counters and event generation, all
// on the building block's control bus.
//
// Connections, after the paper's Fig. 1 and 2 and its text:
//   EPP core -- instruction port --> main memory port A (through the ICache)
//   EPP core -- data port        --> main memory port B (load/store unit)
//   EPP core -- control bus      --> bus arbiter (shared with host_req)
//   EPP core -- synapse interface --> weight SRAM, accumulators, evaluation
//   bus arbiter --> main memory, synapse weights, rate counters, event
//                   generator, run register
// The control cluster reaches the block through host_req/host_rsp (load the
// program into memory at 0x8000_0000, write the run register at 0x8040_0000
// to start the EPP at address 0, exchange data such as the reward through
// memory). Neurons and the spike network are outside: presynaptic spike
// events enter on pre_*, neuron spikes on post_*, generated events leave on
// ev_*. Memory port B is shared: the load/store unit has priority, a bus
// access waits for a free cycle and is acknowledged the cycle after it is
// done. While the run register is 0 the EPP is held in reset.
// Lint reports rst_n and core_rst_n as used both asynchronously (flip-flop
// resets) and synchronously: the synchronous use is only the 'disable iff'
// of the handshake assertions in the sub-modules, not logic.
module building_block
  import epp_pkg::*;
#(
  parameter int unsigned ROWS = 448,
  parameter int unsigned COLS = 512
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // external control access
  input  bus_req_t                host_req,
  output bus_rsp_t                host_rsp,
  // spike events from the network and the neurons
  input  logic                    pre_valid,
  input  logic [$clog2(ROWS)-1:0] pre_row,
  input  logic                    post_valid,
  input  logic [$clog2(COLS)-1:0] post_col,
  // generated events
  output logic                    ev_valid,
  output logic [15:0]             ev_addr,
  input  logic                    ev_ready,
  // status
  output logic                    epp_run,
  output logic                    ev_issue,
  output logic                    ev_stall,
  output logic                    ev_mispredict,
  output logic                    ev_icache_miss,
  output logic                    ev_ooo_retire
);
  localparam int unsigned MEM_AW = $clog2(MEM_BYTES);    // 14
  localparam int unsigned SAW    = $clog2(ROWS) + $clog2(COLS);

  logic core_rst_n;
  assign core_rst_n = rst_n && epp_run;

  // ------------------------------------------------------------ EPP
  logic              imem_req;
  logic [MEM_AW-3:0] imem_addr;
  logic [31:0]       imem_rdata;
  logic              dmem_req, dmem_we;
  logic [MEM_AW-3:0] dmem_addr;
  logic [31:0]       dmem_wdata, dmem_rdata;
  logic [3:0]        dmem_be;
  bus_req_t          epp_req;
  bus_rsp_t          epp_rsp;
  syn_req_t          syn_req;
  syn_rsp_t          syn_rsp;

  epp_core #(.MEM_AW(MEM_AW)) u_core (
    .clk, .rst_n(core_rst_n),
    .imem_req, .imem_addr, .imem_rdata,
    .dmem_req, .dmem_we, .dmem_addr, .dmem_wdata, .dmem_be, .dmem_rdata,
    .bus_req(epp_req), .bus_rsp(epp_rsp),
    .syn_req, .syn_rsp,
    .ev_issue, .ev_stall, .ev_mispredict, .ev_icache_miss, .ev_ooo_retire
  );

  // ------------------------------------------------------------ bus
  bus_req_t mbus_req, sbus_req, rbus_req, ebus_req;
  bus_rsp_t mbus_rsp, sbus_rsp, rbus_rsp, ebus_rsp;

  bus_arbiter u_bus (
    .clk, .rst_n,
    .host_req, .host_rsp,
    .epp_req, .epp_rsp,
    .mem_req(mbus_req),  .mem_rsp(mbus_rsp),
    .syn_req(sbus_req),  .syn_rsp(sbus_rsp),
    .rate_req(rbus_req), .rate_rsp(rbus_rsp),
    .ev_req(ebus_req),   .ev_rsp(ebus_rsp),
    .epp_run
  );

  // ------------------------------------------------------------ memory
  logic              mb_go, mb_ack_q;
  logic              b_req, b_we;
  logic [MEM_AW-3:0] b_addr;
  logic [31:0]       b_wdata;
  logic [3:0]        b_be;
  assign mb_go   = mbus_req.valid && !dmem_req && !mb_ack_q;
  assign b_req   = dmem_req || mb_go;
  assign b_we    = dmem_req ? dmem_we    : mbus_req.we;
  assign b_addr  = dmem_req ? dmem_addr  : mbus_req.addr[MEM_AW-1:2];
  assign b_wdata = dmem_req ? dmem_wdata : mbus_req.wdata;
  assign b_be    = dmem_req ? dmem_be    : mbus_req.be;
  assign mbus_rsp.ack   = mb_ack_q;
  assign mbus_rsp.rdata = dmem_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mb_ack_q <= 1'b0;
    else        mb_ack_q <= mb_go;
  end

  main_memory #(.WORDS(MEM_BYTES / 4), .AW(MEM_AW - 2)) u_mem (
    .clk,
    .a_req(imem_req), .a_addr(imem_addr), .a_rdata(imem_rdata),
    .b_req, .b_we, .b_addr, .b_wdata, .b_be, .b_rdata(dmem_rdata)
  );

  // ------------------------------------------------------------ synapses
  logic               sram_req, sram_we;
  logic [SAW-1:0]     sram_addr, acc_sel;
  logic [3:0]         sram_wdata, sram_rdata;
  logic               acc_clr;
  eval_cfg_t          eval_cfg;
  logic [ACODE_W-1:0] a_tl, a_th, a_plus, a_minus;
  logic               eval_b;
  syn_req_t           syn_req_w;

  // synapse addresses are SYN_AW wide in the instruction set
  always_comb begin
    syn_req_w      = syn_req;
    syn_req_w.addr = SYN_AW'(syn_req.addr[SAW-1:0]);
  end

  synapse_interface #(.AW(SAW)) u_sif (
    .clk, .rst_n,
    .sfu_req(syn_req_w), .sfu_rsp(syn_rsp),
    .bus_req(sbus_req), .bus_rsp(sbus_rsp),
    .sram_req, .sram_we, .sram_addr, .sram_wdata, .sram_rdata,
    .acc_sel, .acc_clr,
    .eval_cfg, .eval_a_tl(a_tl), .eval_a_th(a_th), .eval_b
  );

  synapse_weight_sram #(.ROWS(ROWS), .COLS(COLS)) u_wsram (
    .clk, .req(sram_req), .we(sram_we), .addr(sram_addr),
    .wdata(sram_wdata), .rdata(sram_rdata)
  );

  synapse_accumulator #(.ROWS(ROWS), .COLS(COLS)) u_acc (
    .clk, .rst_n,
    .pre_valid, .pre_row, .post_valid, .post_col,
    .sel_addr(acc_sel), .a_plus, .a_minus,
    .clr(acc_clr), .clr_addr(sram_addr)
  );

  eval_unit u_eval (
    .a_plus, .a_minus, .a_tl, .a_th, .cfg(eval_cfg), .b(eval_b)
  );

  // ------------------------------------------------------------ other
  rate_counters #(.COLS(COLS)) u_rate (
    .clk, .rst_n, .post_valid, .post_col,
    .bus_req(rbus_req), .bus_rsp(rbus_rsp)
  );

  event_generator u_evg (
    .clk, .rst_n, .bus_req(ebus_req), .bus_rsp(ebus_rsp),
    .ev_valid, .ev_addr, .ev_ready
  );
endmodule
