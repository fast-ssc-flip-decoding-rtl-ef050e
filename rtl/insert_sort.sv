// insert_sort: the sorted flip list of the SCF decoder.
//
// Holds the K = Tmax-1 least reliable decision LLRs seen during the first
// trial, with the information-bit index of each, sorted smallest first. In
// a cycle with 'ins' high, up to K new candidates (from a node unit, after
// lambda_select) are merged into the list: the smallest K of the old list
// and the new candidates are kept. Old entries win ties, so an earlier
// decision stays ahead of a later one with the same LLR. 'clr' empties the
// list (start of a new frame). Storage is QL*K bits of LLRs and IW*K bits
// of indices, the sizes the paper gives (Q_lambda(Tmax-1) and
// (Tmax-1)ceil(log2 k)). The paper gives the unit's function; the one-cycle
// merge through a rank network is this design's choice.
// Timing: list outputs are registers; a merge shows one cycle after 'ins'.
module insert_sort #(
  parameter int unsigned K  = 7,   // list length, Tmax - 1 (paper: Tmax = 8)
  parameter int unsigned QL = 8,
  parameter int unsigned IW = 7    // ceil(log2 k), k = 128 in the paper's code
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          ins,
  input  logic [QL-1:0] in_lam   [K],
  input  logic [IW-1:0] in_idx   [K],
  input  logic          in_valid [K],
  output logic [QL-1:0] list_lam   [K],
  output logic [IW-1:0] list_idx   [K],
  output logic          list_valid [K]
);
  logic [QL-1:0] m_lam   [2*K];
  logic [IW-1:0] m_idx   [2*K];
  logic          m_valid [2*K];
  logic [QL-1:0] n_lam   [K];
  logic [IW-1:0] n_idx   [K];
  logic          n_valid [K];

  always_comb begin
    for (int i = 0; i < K; i++) begin
      m_lam[i]     = list_lam[i];
      m_idx[i]     = list_idx[i];
      m_valid[i]   = list_valid[i];
      m_lam[K+i]   = in_lam[i];
      m_idx[K+i]   = in_idx[i];
      m_valid[K+i] = in_valid[i];
    end
  end

  lambda_select #(.M(2*K), .K(K), .QL(QL), .IW(IW)) u_merge (
    .in_lam(m_lam), .in_idx(m_idx), .in_valid(m_valid),
    .out_lam(n_lam), .out_idx(n_idx), .out_valid(n_valid)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < K; i++) begin
        list_lam[i]   <= '0;
        list_idx[i]   <= '0;
        list_valid[i] <= 1'b0;
      end
    end else if (clr) begin
      for (int i = 0; i < K; i++) list_valid[i] <= 1'b0;
    end else if (ins) begin
      list_lam   <= n_lam;
      list_idx   <= n_idx;
      list_valid <= n_valid;
    end
  end

  // the list stays sorted, valid entries first
  logic sorted;
  always_comb begin
    sorted = 1'b1;
    for (int i = 1; i < K; i++)
      if ((list_valid[i] && !list_valid[i-1]) || (list_valid[i] && list_lam[i] < list_lam[i-1]))
        sorted = 1'b0;
  end
  a_sorted: assert property (@(posedge clk) disable iff (!rst_n) sorted)
    else $error("insert_sort: list out of order");
endmodule
