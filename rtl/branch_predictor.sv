// Branch predictor of the EPP frontend ("Branch predict" stage).
//
// A fully associative table: every entry holds the address of a branch, its
// last target and a 2-bit saturating counter (strong/weak not-taken 0/1,
// weak/strong taken 2/3), as the paper describes. A lookup compares the fetch
// address with all valid entries in the same cycle (combinational); a hit with
// counter >= 2 predicts taken to the stored target. The branch unit sends an
// update when a branch resolves: a hit moves the counter towards the outcome
// and refreshes the target, a miss allocates an entry (round-robin) with a
// counter of 2 if taken or 1 if not. The entry count, the stored target,
// replacement and initial counter are this design's choices.
module branch_predictor #(
  parameter int unsigned ENTRIES = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // lookup
  input  logic [31:0] fetch_pc,
  output logic        pred_taken,
  output logic [31:0] pred_target,
  // update from the branch unit
  input  logic        upd_valid,
  input  logic [31:0] upd_pc,
  input  logic        upd_taken,
  input  logic [31:0] upd_target
);
  localparam int unsigned IW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  logic [ENTRIES-1:0]       valid_q;
  logic [29:0]              tag_q  [ENTRIES];
  logic [29:0]              tgt_q  [ENTRIES];
  logic [1:0]               cnt_q  [ENTRIES];
  logic [IW-1:0]            victim_q;

  // lookup
  always_comb begin
    pred_taken  = 1'b0;
    pred_target = fetch_pc + 32'd4;
    for (int i = 0; i < ENTRIES; i++) begin
      if (valid_q[i] && tag_q[i] == fetch_pc[31:2] && cnt_q[i][1]) begin
        pred_taken  = 1'b1;
        pred_target = {tgt_q[i], 2'b00};
      end
    end
  end

  // update
  logic          upd_hit;
  logic [IW-1:0] upd_idx;
  always_comb begin
    upd_hit = 1'b0;
    upd_idx = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (valid_q[i] && tag_q[i] == upd_pc[31:2]) begin
        upd_hit = 1'b1;
        upd_idx = IW'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q  <= '0;
      victim_q <= '0;
      for (int i = 0; i < ENTRIES; i++) begin
        tag_q[i] <= '0;
        tgt_q[i] <= '0;
        cnt_q[i] <= 2'd1;
      end
    end else if (upd_valid) begin
      if (upd_hit) begin
        if (upd_taken) begin
          if (cnt_q[upd_idx] != 2'd3) cnt_q[upd_idx] <= cnt_q[upd_idx] + 2'd1;
          tgt_q[upd_idx] <= upd_target[31:2];
        end else if (cnt_q[upd_idx] != 2'd0) begin
          cnt_q[upd_idx] <= cnt_q[upd_idx] - 2'd1;
        end
      end else begin
        valid_q[victim_q] <= 1'b1;
        tag_q[victim_q]   <= upd_pc[31:2];
        tgt_q[victim_q]   <= upd_target[31:2];
        cnt_q[victim_q]   <= upd_taken ? 2'd2 : 2'd1;
        victim_q          <= (victim_q == IW'(ENTRIES - 1)) ? '0 : victim_q + 1'b1;
      end
    end
  end
endmodule
