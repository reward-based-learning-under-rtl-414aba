// Behavioural model of the analog STDP accumulation circuits of the synapse
// array (kind: behavioural model of an analog part).
//
// Every synapse (row = presynaptic input, column = postsynaptic neuron) holds
// two capacitors, a+ and a-. For each pre-before-post pair a+ grows by
// A exp(-dt/tau), for each post-before-pre pair a- grows by the same amount,
// as in the paper; pairs follow the reduced symmetric nearest-neighbour
// scheme: a spike pairs with the latest spike of the other side, and only if
// that spike came after the previous spike of its own side. Values are codes
// of 1/16 pS: A = 32 pS is 512 codes and a_max = 1000 pS is 16000 codes
// (the paper's a_max follows from "sigma_a = 500 pS corresponds to 50 % of
// a_max"); accumulation saturates at a_max. tau is given in clock cycles:
// 20 ms biological time at the paper's acceleration of 1e4 is 2 us, 200
// cycles of an assumed 100 MHz clock. The model is ideal: the charge does
// not drift (the paper studies drift only as a simulated non-ideality).
// After reset every accumulator reads 0: a flag per row (a-) and per column
// (a+) marks storage written since reset, so the arrays need no reset.
//
// Spikes arrive as events (one presynaptic and one postsynaptic event per
// cycle at most, addressed by row or column). Each row keeps a presynaptic
// trace and each column a postsynaptic trace that is set to A on a spike and
// decays by exp(-1/tau) per cycle (fixed point, 8 fraction bits), so on a
// spike the trace of the other side equals A exp(-dt/tau) for the latest
// spike there. Spike times are kept to apply the pairing rule. a- is stored
// by rows and a+ by columns, so one event updates one memory word.
// sel_addr = {row, column} selects the synapse whose a+ and a- are driven to
// the evaluation unit (combinational); clr clears one synapse's a+ and a-
// (a spike pair in the same cycle on the same synapse is lost).
module synapse_accumulator
  import epp_pkg::*;
#(
  parameter int unsigned ROWS       = 448,
  parameter int unsigned COLS       = 512,
  parameter int unsigned TAU_CYCLES = 200,
  parameter int unsigned A_CODE     = 512,
  parameter int unsigned AMAX_CODE  = 16000,
  parameter int unsigned AW         = $clog2(ROWS) + $clog2(COLS)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      pre_valid,
  input  logic [$clog2(ROWS)-1:0]   pre_row,
  input  logic                      post_valid,
  input  logic [$clog2(COLS)-1:0]   post_col,
  input  logic [AW-1:0]             sel_addr,
  output logic [ACODE_W-1:0]        a_plus,
  output logic [ACODE_W-1:0]        a_minus,
  input  logic                      clr,
  input  logic [AW-1:0]             clr_addr
);
  localparam int unsigned CW = $clog2(COLS);
  localparam int unsigned RW = $clog2(ROWS);
  localparam int unsigned TW = ACODE_W + 8;              // trace width
  // per-cycle decay factor 1 - exp(-1/tau), 16 fraction bits
  localparam logic [15:0] DEC =
    16'($rtoi(65536.0 * (1.0 - $exp(-1.0 / real'(TAU_CYCLES))) + 0.5));

  typedef logic [ACODE_W-1:0] code_t;

  function automatic code_t sat_add(code_t a, code_t d);
    logic [ACODE_W:0] s;
    s = {1'b0, a} + {1'b0, d};
    return (32'(s) > AMAX_CODE) ? code_t'(AMAX_CODE) : s[ACODE_W-1:0];
  endfunction

  function automatic logic [TW-1:0] decay(logic [TW-1:0] x);
    logic [TW+15:0] p;
    p = (TW+16)'(x) * (TW+16)'(DEC);
    return x - TW'(p >> 16);
  endfunction

  code_t [COLS-1:0] am_row [ROWS];   // a- by rows
  code_t [ROWS-1:0] ap_col [COLS];   // a+ by columns
  logic [TW-1:0]    xtr [ROWS];      // presynaptic traces
  logic [TW-1:0]    ytr [COLS];      // postsynaptic traces
  logic [31:0]      t_pre  [ROWS];
  logic [31:0]      t_post [COLS];
  logic [ROWS-1:0]  seen_pre;
  logic [COLS-1:0]  seen_post;
  logic [31:0]      now;
  logic [ROWS-1:0]  am_ok;           // row of a- written since reset
  logic [COLS-1:0]  ap_ok;           // column of a+ written since reset

  logic [RW-1:0] sel_r, clr_r;
  logic [CW-1:0] sel_c, clr_c;
  assign sel_r = sel_addr[AW-1:CW];
  assign sel_c = sel_addr[CW-1:0];
  assign clr_r = clr_addr[AW-1:CW];
  assign clr_c = clr_addr[CW-1:0];

  assign a_plus  = (int'(sel_r) < ROWS && ap_ok[sel_c]) ? ap_col[sel_c][sel_r] : '0;
  assign a_minus = (int'(sel_r) < ROWS && am_ok[sel_r]) ? am_row[sel_r][sel_c] : '0;

  // new row of a- for a presynaptic event, new column of a+ for a
  // postsynaptic event
  code_t [COLS-1:0] am_new;
  code_t [ROWS-1:0] ap_new;
  always_comb begin
    am_new = am_ok[pre_row] ? am_row[pre_row] : '0;
    for (int c = 0; c < COLS; c++)
      if (seen_post[c] && (!seen_pre[pre_row] || t_post[c] >= t_pre[pre_row]))
        am_new[c] = sat_add(am_new[c], code_t'(ytr[c] >> 8));
    if (clr && clr_r == pre_row) am_new[clr_c] = '0;
    ap_new = ap_ok[post_col] ? ap_col[post_col] : '0;
    for (int r = 0; r < ROWS; r++)
      if (seen_pre[r] && (!seen_post[post_col] || t_pre[r] >= t_post[post_col]))
        ap_new[r] = sat_add(ap_new[r], code_t'(xtr[r] >> 8));
    if (clr && clr_c == post_col) ap_new[clr_r] = '0;
  end

  // accumulator memories: not reset; a row or column counts as empty until
  // its first write (am_ok/ap_ok), which then writes the whole word
  always_ff @(posedge clk) begin
    if (rst_n) begin
      if (pre_valid && int'(pre_row) < ROWS) am_row[pre_row] <= am_new;
      if (clr && int'(clr_r) < ROWS && !(pre_valid && clr_r == pre_row)) begin
        if (am_ok[clr_r]) am_row[clr_r][clr_c] <= '0;
        else              am_row[clr_r]        <= '0;
      end
      if (post_valid && int'(post_col) < COLS) ap_col[post_col] <= ap_new;
      if (clr && int'(clr_r) < ROWS && !(post_valid && clr_c == post_col)) begin
        if (ap_ok[clr_c]) ap_col[clr_c][clr_r] <= '0;
        else              ap_col[clr_c]        <= '0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      am_ok <= '0;
      ap_ok <= '0;
    end else begin
      if (pre_valid && int'(pre_row) < ROWS) am_ok[pre_row] <= 1'b1;
      if (clr && int'(clr_r) < ROWS)         am_ok[clr_r]   <= 1'b1;
      if (post_valid && int'(post_col) < COLS) ap_ok[post_col] <= 1'b1;
      if (clr && int'(clr_r) < ROWS)           ap_ok[clr_c]    <= 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now       <= '0;
      seen_pre  <= '0;
      seen_post <= '0;
      for (int r = 0; r < ROWS; r++) begin t_pre[r]  <= '0; xtr[r] <= '0; end
      for (int c = 0; c < COLS; c++) begin t_post[c] <= '0; ytr[c] <= '0; end
    end else begin
      now <= now + 1;
      for (int r = 0; r < ROWS; r++) xtr[r] <= decay(xtr[r]);
      for (int c = 0; c < COLS; c++) ytr[c] <= decay(ytr[c]);
      if (pre_valid && int'(pre_row) < ROWS) begin
        t_pre[pre_row]    <= now;
        seen_pre[pre_row] <= 1'b1;
        xtr[pre_row]      <= TW'(A_CODE) << 8;
      end
      if (post_valid && int'(post_col) < COLS) begin
        t_post[post_col]    <= now;
        seen_post[post_col] <= 1'b1;
        ytr[post_col]       <= TW'(A_CODE) << 8;
      end
    end
  end
endmodule
