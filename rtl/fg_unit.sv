// fg_unit: the P-lane processing-element array of the semi-parallel
// fast-SSC datapath.
//
// Each lane i works on one pair of parent LLRs a[i] = alpha_v[j] and
// b[i] = alpha_v[j + Nv/2] and, in the same cycle, on one pair of child
// partial sums. Three results come out of every lane at once; the
// controller picks the one the current instruction needs:
//   f    : alpha_l = sgn(a*b) * min(|a|,|b|)           (min-sum, paper eq. 2)
//   g    : alpha_r = b + a if beta_l = 0, else b - a    (paper eq. 4)
//   comb : beta_v[j] = beta_l ^ beta_r, beta_v[j+Nv/2] = beta_r  (eq. 5)
// The equations follow the paper. The g result is saturated to the
// symmetric range of QA bits; the LLR width and the saturation are this
// design's choice (the paper gives no quantization). Purely combinational;
// the surrounding decoder registers the results into its memories.
module fg_unit #(
  parameter int unsigned P  = 64,  // lanes (paper: P = 64)
  parameter int unsigned QA = 8    // LLR width in bits
) (
  input  logic signed [QA-1:0] a       [P],
  input  logic signed [QA-1:0] b       [P],
  input  logic                 beta_l  [P],
  input  logic                 beta_r  [P],
  output logic signed [QA-1:0] f_out   [P],
  output logic signed [QA-1:0] g_out   [P],
  output logic                 comb_lo [P],  // beta_v[j]
  output logic                 comb_hi [P]   // beta_v[j + Nv/2]
);
  import fssc_pkg::*;

  always_comb begin
    for (int i = 0; i < P; i++) begin
      int ia, ib, ma, mb, m, gs;
      ia = int'(a[i]);
      ib = int'(b[i]);
      ma = (ia < 0) ? -ia : ia;
      mb = (ib < 0) ? -ib : ib;
      m  = (ma < mb) ? ma : mb;
      m  = sat_sym(m, QA);
      f_out[i] = ((ia < 0) != (ib < 0)) ? QA'(-m) : QA'(m);
      gs = beta_l[i] ? (ib - ia) : (ib + ia);
      g_out[i]   = QA'(sat_sym(gs, QA));
      comb_lo[i] = beta_l[i] ^ beta_r[i];
      comb_hi[i] = beta_r[i];
    end
  end
endmodule
