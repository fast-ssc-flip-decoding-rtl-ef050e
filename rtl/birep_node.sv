// birep_node: decoder for a birepetition node of length 4 <= Nv <= P.
//
// A birepetition node has only its two last bit positions unfrozen. Its
// codewords are two independent repetition codes, one on the even and one
// on the odd positions, so the node is built from two copies of the
// repetition decoder (paper, Sec. III-C and IV, where it replaces the ML
// unit of fast-SSC). Decision LLRs (paper, eq. 9):
//   lambda_0 = |sum of alpha over even positions|  (lane 0)
//   lambda_1 = |sum of alpha over odd positions|   (lane 1)
// A flip of information bit 0 inverts all even estimates, of bit 1 all odd
// ones. The largest size, P = 64, is the paper's. Lane layout and lambda
// saturation are this design's. Combinational.
module birep_node #(
  parameter int unsigned P  = 64,  // also the largest birepetition node (paper: 64)
  parameter int unsigned QA = 8,
  parameter int unsigned QL = 8,
  parameter int unsigned LW = $clog2(P) + 1
) (
  input  logic signed [QA-1:0] alpha     [P],
  input  logic [LW-1:0]        nv_log,
  input  logic                 flip_en,
  input  logic                 flip_d,     // 0: even bit, 1: odd bit
  output logic                 beta      [P],
  output logic [QL-1:0]        lam       [P],
  output logic                 lam_valid [P]
);
  import fssc_pkg::*;

  always_comb begin
    int nv, se, so;
    logic hd_e, hd_o;
    nv = 1 << nv_log;
    se = 0;
    so = 0;
    for (int i = 0; i < P; i++)
      if (i < nv) begin
        if (i % 2 == 0) se += int'(alpha[i]);
        else            so += int'(alpha[i]);
      end
    hd_e = (se < 0) ^ (flip_en && !flip_d);
    hd_o = (so < 0) ^ (flip_en && flip_d);
    for (int i = 0; i < P; i++) begin
      beta[i]      = (i < nv) ? ((i % 2 == 0) ? hd_e : hd_o) : 1'b0;
      lam[i]       = '0;
      lam_valid[i] = 1'b0;
    end
    lam[0]       = QL'(sat_u((se < 0) ? -se : se, QL));
    lam[1]       = QL'(sat_u((so < 0) ? -so : so, QL));
    lam_valid[0] = 1'b1;
    lam_valid[1] = 1'b1;
  end
endmodule
