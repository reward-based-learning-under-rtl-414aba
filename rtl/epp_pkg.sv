// Shared types and constants of the embedded plasticity processor (EPP) and
// its building block.
//
// The EPP executes a 32-bit subset of the PowerISA 2.06 instruction set. The
// encodings of the standard instructions below follow that ISA; the SYNAPSE
// special-function instructions (primary opcode 4) and the control-bus
// address map are this design's own assignments.
//
// Bit numbering: all fields are given LSB-first (bit 0 = least significant),
// i.e. PowerISA bit k is instr[31-k].
package epp_pkg;

  // ---------------------------------------------------------------- units
  typedef enum logic [2:0] {
    FU_NONE = 3'd0,
    FU_BR   = 3'd1,
    FU_FXU  = 3'd2,
    FU_MUL  = 3'd3,
    FU_DIV  = 3'd4,
    FU_LSU  = 3'd5,
    FU_SYN  = 3'd6
  } fu_t;

  // Fixed latencies (issue cycle to the cycle the result is presented to
  // write back). The paper gives a minimum of two cycles for every unit.
  localparam int unsigned LAT_FXU = 2;
  localparam int unsigned LAT_BR  = 2;
  localparam int unsigned LAT_MUL = 3;

  // ----------------------------------------------------------- operations
  typedef enum logic [4:0] {
    OP_ADD, OP_SUBF, OP_NEG, OP_AND, OP_OR, OP_XOR, OP_NOR, OP_ANDC,
    OP_SLW, OP_SRW, OP_SRAW, OP_RLWINM, OP_CMP, OP_CMPL, OP_EXTSB, OP_EXTSH,
    OP_MFSPR, OP_MTSPR,
    OP_MULLW, OP_MULHW, OP_MULHWU,
    OP_DIVW, OP_DIVWU,
    OP_LOAD, OP_STORE,
    OP_B, OP_BC, OP_BCLR, OP_BCCTR,
    OP_SYN, OP_NOP
  } op_t;

  // SYNAPSE unit sub-operations (extended opcode in instr[10:1] under
  // primary opcode 4).
  typedef enum logic [2:0] {
    SYN_RD    = 3'd1,  // rD = weight[rA]
    SYN_WR    = 3'd2,  // weight[rA] = rS[3:0]
    SYN_EVAL  = 3'd3,  // rD = evaluation bits b[NEVAL-1:0] of synapse rA
    SYN_RST   = 3'd4,  // reset accumulators a+/a- of synapse rA
    SYN_UPD   = 3'd5,  // w' = sat(w + A0*b0 + A1*b1), reset, rD = w'
    SYN_MTR   = 3'd6,  // SFU register[RB field] = rS
    SYN_MFR   = 3'd7   // rD = SFU register[RB field]
  } syn_op_t;

  localparam int unsigned SPR_LR  = 8;
  localparam int unsigned SPR_CTR = 9;

  // Micro-op produced by pre-decode.
  typedef struct packed {
    logic        valid;
    fu_t         fu;
    op_t         op;
    logic [2:0]  sub;       // SYNAPSE sub-op / load-store size (0 b,1 h,2 w)
    logic [4:0]  src1;      // register read on port A
    logic        src1_use;
    logic        src1_zero; // rA=0 reads as zero (addi, loads, stores)
    logic [4:0]  src2;      // register read on port B
    logic        src2_use;
    logic [4:0]  dst;
    logic        dst_we;
    logic        use_imm;   // operand B is the immediate
    logic [31:0] imm;
    logic        cr_we;     // writes a CR field
    logic [2:0]  crf;       // which CR field
    logic        cr_rd;     // reads CR (conditional branch)
    logic        lr_rd;
    logic        lr_we;
    logic        ctr_rd;
    logic        ctr_we;
    logic [4:0]  bo;
    logic [4:0]  bi;
    logic        aa;
    logic [4:0]  shamt;
    logic [4:0]  mb;
    logic [4:0]  me;
    logic        spr_ctr;   // mfspr/mtspr selects CTR (else LR)
  } uop_t;

  // Result presented to write back.
  typedef struct packed {
    logic        valid;
    logic        gpr_we;
    logic [4:0]  rd;
    logic [31:0] data;
    logic        cr_we;
    logic [2:0]  crf;
    logic [3:0]  crv;       // {LT, GT, EQ, SO}
    logic        lr_we;
    logic [31:0] lr;
    logic        ctr_we;
    logic [31:0] ctr;
  } wb_t;

  // ------------------------------------------------------ control bus
  // A master holds req until the slave answers with ack for one cycle.
  typedef struct packed {
    logic        valid;
    logic        we;
    logic [31:0] addr;   // byte address
    logic [31:0] wdata;
    logic [3:0]  be;     // byte enables, be[3] = bits 31:24
  } bus_req_t;

  typedef struct packed {
    logic        ack;
    logic [31:0] rdata;
  } bus_rsp_t;

  // Control-bus address map (bits 31:20 select the target).
  localparam logic [11:0] BUS_MEM   = 12'h800;  // main memory
  localparam logic [11:0] BUS_SYN   = 12'h801;  // synapse weights, 4 bytes each
  localparam logic [11:0] BUS_RATE  = 12'h802;  // rate counters
  localparam logic [11:0] BUS_EVENT = 12'h803;  // event generator
  localparam logic [11:0] BUS_CTRL  = 12'h804;  // EPP run control

  // Main memory occupies the bottom of the EPP's own address space.
  localparam int unsigned MEM_BYTES = 12 * 1024;

  // ------------------------------------------------ synapse interface
  localparam int unsigned NEVAL    = 2;   // evaluations per readout
  localparam int unsigned SYN_AW   = 18;  // synapse address width
  localparam int unsigned ACODE_W  = 16;  // analog value code width

  typedef enum logic [1:0] {
    SIF_READ  = 2'd0,
    SIF_WRITE = 2'd1,
    SIF_EVAL  = 2'd2,
    SIF_RESET = 2'd3
  } sif_op_t;

  // One evaluation configuration {e_cc, e_ca, e_ac, e_aa}.
  typedef struct packed {
    logic cc;
    logic ca;
    logic ac;
    logic aa;
  } eval_cfg_t;

  typedef struct packed {
    logic                           valid;
    sif_op_t                        op;
    logic [SYN_AW-1:0]              addr;
    logic [3:0]                     wdata;
    eval_cfg_t [NEVAL-1:0]          cfg;
    logic [ACODE_W-1:0]             a_tl;
    logic [ACODE_W-1:0]             a_th;
  } syn_req_t;

  typedef struct packed {
    logic              ack;
    logic [3:0]        rdata;
    logic [NEVAL-1:0]  bits;
  } syn_rsp_t;

endpackage
