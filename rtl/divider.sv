// Divider of the EPP: divw (signed) and divwu (unsigned), with CR0 recording.
//
// Radix-2 restoring division on magnitudes, one quotient bit per cycle: after
// start it is busy for 32 cycles, then holds its write-back record (out.valid)
// until wb_ack. Signed quotients are formed by negating the magnitude
// quotient. Division by zero, which PowerISA leaves undefined, returns 0, as
// does the overflowing 0x80000000 / -1 for divw. The paper names the unit
// only; the algorithm is this design's choice.
module divider
  import epp_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,    // start (only when !busy)
  input  uop_t        in_uop,
  input  logic [31:0] in_a,        // dividend
  input  logic [31:0] in_b,        // divisor
  output logic        busy,
  output wb_t         out,
  input  logic        wb_ack
);
  logic [31:0] rem_q, quo_q, div_q;
  logic [5:0]  cnt_q;
  logic        run_q, neg_q, zero_q;
  uop_t        uop_q;

  logic        sgn;
  logic [31:0] ma, mb;
  assign sgn = (in_uop.op == OP_DIVW);
  assign ma  = (sgn && in_a[31]) ? -in_a : in_a;
  assign mb  = (sgn && in_b[31]) ? -in_b : in_b;

  logic [32:0] trial;
  assign trial = {rem_q, quo_q[31]} - {1'b0, div_q};

  assign busy = run_q || out.valid || uop_q.valid;

  logic [31:0] q_final;
  assign q_final = zero_q ? 32'd0 : (neg_q ? -quo_q : quo_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem_q <= '0; quo_q <= '0; div_q <= '0; cnt_q <= '0;
      run_q <= 1'b0; neg_q <= 1'b0; zero_q <= 1'b0; uop_q <= '0;
      out <= '0;
    end else begin
      if (in_valid && !busy) begin
        run_q  <= 1'b1;
        rem_q  <= '0;
        quo_q  <= ma;
        div_q  <= mb;
        cnt_q  <= 6'd32;
        neg_q  <= sgn && (in_a[31] ^ in_b[31]);
        zero_q <= (in_b == 0) || (sgn && in_a == 32'h8000_0000 && in_b == 32'hffff_ffff);
        uop_q  <= in_uop;
      end else if (run_q) begin
        // shift {rem,quo} left, subtract divisor if it fits
        if (!trial[32]) begin
          rem_q <= trial[31:0];
          quo_q <= {quo_q[30:0], 1'b1};
        end else begin
          rem_q <= {rem_q[30:0], quo_q[31]};
          quo_q <= {quo_q[30:0], 1'b0};
        end
        cnt_q <= cnt_q - 1'b1;
        if (cnt_q == 6'd1) run_q <= 1'b0;
      end
      if (!run_q && !out.valid && cnt_q == 6'd0 && uop_q.valid) begin
        out.valid  <= 1'b1;
        out.gpr_we <= uop_q.dst_we;
        out.rd     <= uop_q.dst;
        out.data   <= q_final;
        out.cr_we  <= uop_q.cr_we;
        out.crf    <= 3'd0;
        out.crv    <= {q_final[31], !q_final[31] && q_final != 0, q_final == 0, 1'b0};
        uop_q.valid <= 1'b0;
      end else if (out.valid && wb_ack) begin
        out <= '0;
      end
    end
  end
endmodule
