// rate1_node: decoder for an information (rate-1) node of length Nv <= P.
//
// Fast-SSC decodes a rate-1 node by a hard decision on each input LLR. For
// flip decoding the node also outputs one decision LLR per information bit,
// lambda_d = |alpha_d| (paper, Sec. III-A), in lane d. When the flip index
// of the current trial falls inside the node, the hard decision of that one
// bit is inverted after decoding. This follows the paper. The lane layout,
// the valid mask and the saturation of lambda to QL bits are this design's.
// Combinational: results are valid in the cycle the inputs are.
module rate1_node #(
  parameter int unsigned P  = 64,  // lanes = largest node length
  parameter int unsigned QA = 8,   // LLR width
  parameter int unsigned QL = 8,   // decision-LLR width
  parameter int unsigned LW = $clog2(P) + 1  // width of log2(Nv)
) (
  input  logic signed [QA-1:0]  alpha     [P],
  input  logic [LW-1:0]         nv_log,      // node length is 2^nv_log
  input  logic                  flip_en,     // flip one bit of this node
  input  logic [$clog2(P)-1:0]  flip_d,      // information-bit index in node
  output logic                  beta      [P],
  output logic [QL-1:0]         lam       [P],
  output logic                  lam_valid [P]
);
  import fssc_pkg::*;

  always_comb begin
    int nv;
    nv = 1 << nv_log;
    for (int i = 0; i < P; i++) begin
      int v;
      v = int'(alpha[i]);
      if (i < nv) begin
        beta[i]      = (v < 0) ^ (flip_en && (flip_d == i[$clog2(P)-1:0]));
        lam[i]       = QL'(sat_u((v < 0) ? -v : v, QL));
        lam_valid[i] = 1'b1;
      end else begin
        beta[i]      = 1'b0;
        lam[i]       = '0;
        lam_valid[i] = 1'b0;
      end
    end
  end
endmodule
