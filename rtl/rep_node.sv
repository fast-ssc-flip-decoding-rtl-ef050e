// rep_node: decoder for a repetition node of length Nv <= REP_MAX.
//
// A repetition node carries one information bit repeated Nv times. The node
// sums its Nv input LLRs, takes the hard decision of the sum and repeats it
// over all Nv bit estimates. The decision LLR is the magnitude of that sum
// (paper, eq. 8), given in lane 0. When the trial's flip index points at
// this node, the decided bit, and with it all Nv estimates, is inverted.
// This follows the paper, including the largest size REP_MAX = 32. The sum
// is kept at full width; only lambda is saturated to QL bits (own choice).
// Combinational.
module rep_node #(
  parameter int unsigned P       = 64,
  parameter int unsigned REP_MAX = 32,  // largest repetition node (paper: 32)
  parameter int unsigned QA      = 8,
  parameter int unsigned QL      = 8,
  parameter int unsigned LW      = $clog2(P) + 1
) (
  input  logic signed [QA-1:0] alpha     [P],
  input  logic [LW-1:0]        nv_log,
  input  logic                 flip_en,
  output logic                 beta      [P],
  output logic [QL-1:0]        lam       [P],
  output logic                 lam_valid [P]
);
  import fssc_pkg::*;

  always_comb begin
    int nv, sum;
    logic hd;
    nv  = 1 << nv_log;
    sum = 0;
    for (int i = 0; i < REP_MAX; i++)
      if (i < nv) sum += int'(alpha[i]);
    hd = (sum < 0) ^ flip_en;
    for (int i = 0; i < P; i++) begin
      beta[i]      = (i < nv) ? hd : 1'b0;
      lam[i]       = '0;
      lam_valid[i] = 1'b0;
    end
    lam[0]       = QL'(sat_u((sum < 0) ? -sum : sum, QL));
    lam_valid[0] = 1'b1;
  end
endmodule
