// spc_node: decoder for a single-parity-check node of length 4 <= Nv <= P.
//
// Decoding (Wagner rule, as in fast-SSC): take the hard decision HD[i] of
// every input LLR; if their parity p is odd, invert the bit with the least
// reliable LLR (index i_min1). The node's information bits are positions
// 1..Nv-1 (position 0 is the frozen one), so information bit d sits at
// position i = d + 1.
//
// Decision LLRs, the paper's approximation (eq. 10), in lane d:
//   lambda_d = |alpha_{d+1}| + s * (-1)^p * min_i |alpha_i|
// with s = 2^-S_SHIFT (the paper's s = 0.5 is S_SHIFT = 1; s*min is
// truncated by the shift, which is this design's choice).
//
// Flip (paper, Sec. III-D): to keep the parity satisfied two estimates are
// inverted together. With i_flip = d + 1: if i_flip = i_min1, invert
// i_flip and i_min2, otherwise invert i_flip and i_min1. Ties between equal
// magnitudes go to the lower index (own choice). Combinational.
module spc_node #(
  parameter int unsigned P       = 64,  // also the largest SPC node (paper: 64)
  parameter int unsigned QA      = 8,
  parameter int unsigned QL      = 8,
  parameter int unsigned S_SHIFT = 1,   // s = 2^-S_SHIFT (paper: s = 0.5)
  parameter int unsigned LW      = $clog2(P) + 1
) (
  input  logic signed [QA-1:0]  alpha     [P],
  input  logic [LW-1:0]         nv_log,
  input  logic                  flip_en,
  input  logic [$clog2(P)-1:0]  flip_d,
  output logic                  beta      [P],
  output logic [QL-1:0]         lam       [P],
  output logic                  lam_valid [P]
);
  import fssc_pkg::*;

  always_comb begin
    int nv, min1, min2, i1, i2, ifl, sm;
    logic p;
    logic hd [P];
    int   mag[P];
    nv   = 1 << nv_log;
    p    = 1'b0;
    min1 = 1 << QA;
    min2 = 1 << QA;
    i1   = 0;
    i2   = 0;
    for (int i = 0; i < P; i++) begin
      hd[i]  = alpha[i] < 0;
      mag[i] = (alpha[i] < 0) ? -int'(alpha[i]) : int'(alpha[i]);
      if (i < nv) begin
        p = p ^ hd[i];
        if (mag[i] < min1) begin
          min2 = min1; i2 = i1;
          min1 = mag[i]; i1 = i;
        end else if (mag[i] < min2) begin
          min2 = mag[i]; i2 = i;
        end
      end
    end
    // Wagner correction
    if (p) hd[i1] = ~hd[i1];  // i1, i2 < P
    // two-bit flip
    ifl = int'(flip_d) + 1;
    if (flip_en && ifl < nv) begin
      hd[ifl] = ~hd[ifl];
      if (ifl == i1) hd[i2] = ~hd[i2];
      else           hd[i1] = ~hd[i1];
    end
    sm = min1 >> S_SHIFT;
    for (int d = 0; d < P; d++) begin
      beta[d] = (d < nv) ? hd[d] : 1'b0;
      if (d < nv - 1) begin
        lam[d]       = QL'(sat_u(p ? (mag[d+1] - sm) : (mag[d+1] + sm), QL));
        lam_valid[d] = 1'b1;
      end else begin
        lam[d]       = '0;
        lam_valid[d] = 1'b0;
      end
    end
  end
endmodule
