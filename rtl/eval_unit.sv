// Behavioural model of the analog evaluation unit of the synapse readout.
//
// In the chip this is an analog circuit; here the analog values a+, a-,
// a_tl and a_th are unsigned codes in a common unit and the comparison of the
// paper's readout equation is evaluated exactly:
//
//   b = 1  if  (a_tl + e_ac a+ + e_ca a-) / (1 + e_ac + e_ca)
//            > (a_th + e_cc a+ + e_aa a-) / (1 + e_cc + e_aa)
//
// computed without division by cross-multiplying both sides with the
// (positive) denominators. With e_ac = e_aa = 1 (others 0) this gives
// b+ = (a+ - a- > a_th - a_tl); with e_ca = e_cc = 1 it gives b- = (a- - a+ >
// a_th - a_tl), the paper's thresholded readout. Combinational, no timing
// (the real circuit's settling time is not given). Noise and offsets of the
// comparator are not modelled.
module eval_unit
  import epp_pkg::*;
(
  input  logic [ACODE_W-1:0] a_plus,
  input  logic [ACODE_W-1:0] a_minus,
  input  logic [ACODE_W-1:0] a_tl,
  input  logic [ACODE_W-1:0] a_th,
  input  eval_cfg_t          cfg,
  output logic               b
);
  logic [ACODE_W+1:0] num_l, num_h;      // up to 3 codes summed
  logic [1:0]         den_l, den_h;      // 1..3
  logic [ACODE_W+3:0] lhs, rhs;

  always_comb begin
    num_l = (ACODE_W+2)'(a_tl) + (cfg.ac ? (ACODE_W+2)'(a_plus) : '0)
                               + (cfg.ca ? (ACODE_W+2)'(a_minus) : '0);
    num_h = (ACODE_W+2)'(a_th) + (cfg.cc ? (ACODE_W+2)'(a_plus) : '0)
                               + (cfg.aa ? (ACODE_W+2)'(a_minus) : '0);
    den_l = 2'd1 + 2'(cfg.ac) + 2'(cfg.ca);
    den_h = 2'd1 + 2'(cfg.cc) + 2'(cfg.aa);
    lhs   = (ACODE_W+4)'(num_l) * (ACODE_W+4)'(den_h);
    rhs   = (ACODE_W+4)'(num_h) * (ACODE_W+4)'(den_l);
    b     = lhs > rhs;
  end
endmodule
