// lambda_select: keeps the K smallest of M (decision LLR, index) pairs.
//
// Every valid input gets a rank, the number of valid inputs that are
// smaller than it, ties going to the lower input position. The input of
// rank r is routed to output r, so the outputs come out sorted, smallest
// first; outputs past the number of valid inputs are marked invalid.
// The paper asks for such an LLR sorter behind node units that produce
// more than Tmax-1 decision LLRs, so that only the Tmax-1 smallest reach
// the insert-sort unit. The rank-and-route structure is this design's
// choice. Combinational, M*M comparators.
module lambda_select #(
  parameter int unsigned M  = 64,  // inputs
  parameter int unsigned K  = 7,   // outputs (Tmax - 1)
  parameter int unsigned QL = 8,   // decision-LLR width
  parameter int unsigned IW = 7    // index width
) (
  input  logic [QL-1:0] in_lam   [M],
  input  logic [IW-1:0] in_idx   [M],
  input  logic          in_valid [M],
  output logic [QL-1:0] out_lam  [K],
  output logic [IW-1:0] out_idx  [K],
  output logic          out_valid[K]
);
  // rank of every input: one comparator row per input
  logic [$clog2(M+1)-1:0] rank [M];

  for (genvar i = 0; i < M; i++) begin : g_rank
    always_comb begin
      rank[i] = '0;
      for (int j = 0; j < M; j++)
        if (in_valid[j] && (in_lam[j] < in_lam[i] || (in_lam[j] == in_lam[i] && j < i)))
          rank[i] = rank[i] + 1'b1;
    end
  end

  // route the input of rank r to output r
  for (genvar r = 0; r < K; r++) begin : g_route
    always_comb begin
      out_lam[r]   = '0;
      out_idx[r]   = '0;
      out_valid[r] = 1'b0;
      for (int i = 0; i < M; i++)
        if (in_valid[i] && int'(rank[i]) == r) begin
          out_lam[r]   = in_lam[i];
          out_idx[r]   = in_idx[i];
          out_valid[r] = 1'b1;
        end
    end
  end
endmodule
