// fssc_flip_decoder: fast-SSC-flip decoder for polar codes of length N.
//
// What it does. The decoder takes N channel LLRs and returns the estimated
// codeword. It runs a fast-SSC decoding pass (one "trial"), checks the
// CRC over the estimated information bits and, if the check fails, runs
// up to Tmax-1 further trials. Trial t (t >= 2) inverts the decision of
// the information bit with the (t-1)-th smallest decision LLR recorded
// during trial 1. This is successive-cancellation flip (SCF) decoding on
// top of fast-SSC, as proposed in the paper.
//
// How it works. The decoder tree of the code is compiled off-line into an
// instruction list (see fssc_pkg) held in an instruction memory. Each
// trial walks that list once:
//   F, G      the P-lane array (fg_unit) computes child LLRs, P per cycle,
//             from the node's LLRs; the results go to the LLR memory.
//   COMB      the same array merges the two children's bit estimates into
//             the node's, P pairs per cycle.
//   RATE0     writes zeros, P bits per cycle.
//   RATE1, REP, BIREP, SPC
//             one cycle each: the node unit reads up to P LLRs, writes the
//             node's bit estimates and outputs its decision LLRs.
// During trial 1 the decision LLRs of each leaf go through lambda_select
// (keeps the Tmax-1 smallest) into insert_sort, the sorted flip list. In
// later trials the flip index is compared with the range of information
// bits the current leaf holds, and the leaf unit applies its own flip rule.
// After END the crc_check unit reads the root estimate P bits per cycle
// (N/P cycles), then one cycle decides: stop or next trial.
//
// Memories (arrays of registers, one level l of the tree at offset 2^l):
//   channel LLRs  N x QC bits      (level n, loaded from outside)
//   LLR memory    N x QA bits      (levels 0..n-1)
//   beta_l/beta_r 2N bits each     (bit estimates of left / right children;
//                                   the root's land in beta_l at level n)
//   info mask     N bits           (1 = information position, for the CRC)
//   instructions  PROG_DEPTH words
//
// Interface. Load the channel LLRs, the info mask and the program through
// their write ports (P LLRs or P mask bits per beat, one instruction per
// beat) while idle, then pulse 'start'. 'busy' stays high until 'done'
// pulses for one cycle; then 'x_hat' holds the codeword estimate (systematic
// code: the information bits are x_hat at the mask positions), 'crc_ok'
// whether the CRC matched, and 'trials' how many trials ran. 'cycles'
// counts the clock cycles from start to done.
//
// Paper versus own choices. The node types, their decision-LLR and flip
// rules, P = 64, Tmax, the size limits of the nodes, the 16-bit CRC and the
// sorted list of Tmax-1 entries follow the paper. The instruction set and
// its encoding, the memory layout, the one-cycle leaf units, the bit
// widths (QC, QA, QL) and the load interface are this design's choices:
// the paper builds on an earlier fast-SSC architecture without detailing it.
// T_MAX must be at least 2.
module fssc_flip_decoder
  import fssc_pkg::*;
#(
  parameter int unsigned N          = 512,  // code length (paper: 512)
  parameter int unsigned K          = 128,  // information bits incl. CRC (paper: 128)
  parameter int unsigned P          = 64,   // processing lanes (paper: 64)
  parameter int unsigned T_MAX      = 8,    // maximum trials (paper: 8 and 16)
  parameter int unsigned QC         = 6,    // channel LLR width
  parameter int unsigned QA         = 8,    // internal LLR width
  parameter int unsigned QL         = 8,    // decision-LLR width
  parameter int unsigned S_SHIFT    = 1,    // SPC scaling s = 2^-S_SHIFT (paper: 0.5)
  parameter int unsigned REP_MAX    = 32,   // largest repetition node (paper: 32)
  parameter int unsigned CRC_W      = 16,   // CRC length (paper: 16)
  parameter int unsigned PROG_DEPTH = 2 * N,
  // derived
  parameter int unsigned NL  = $clog2(N),
  parameter int unsigned CW  = (N > P) ? $clog2(N / P) : 1,
  parameter int unsigned IW  = $clog2(K),
  parameter int unsigned PAW = $clog2(PROG_DEPTH),
  parameter int unsigned TW  = $clog2(T_MAX + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // loading (while idle)
  input  logic                 llr_we,
  input  logic [CW-1:0]        llr_addr,     // chunk of P LLRs
  input  logic signed [QC-1:0] llr_data [P],
  input  logic                 mask_we,
  input  logic [CW-1:0]        mask_addr,    // chunk of P mask bits
  input  logic [P-1:0]         mask_data,
  input  logic                 prog_we,
  input  logic [PAW-1:0]       prog_addr,
  input  instr_t               prog_data,
  // control and result
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  output logic                 crc_ok,
  output logic [TW-1:0]        trials,
  output logic [31:0]          cycles,
  output logic [N-1:0]         x_hat
);
  localparam int unsigned PW  = $clog2(P);
  localparam int unsigned LW  = PW + 1;
  localparam int unsigned NCH = (N > P) ? N / P : 1;  // chunks per frame
  localparam int unsigned LST = T_MAX - 1;            // flip-list length

  // Tmax = 1 (plain fast-SSC) would leave an empty flip list
  if (T_MAX < 2) begin : g_tmax_check
    $error("fssc_flip_decoder: T_MAX must be at least 2");
  end

  // ---------------------------------------------------------------- memories
  logic signed [QC-1:0] ch_mem    [N];
  logic signed [QA-1:0] alpha_mem [N];
  logic                 beta_l_m  [2*N];
  logic                 beta_r_m  [2*N];
  logic                 info_mask [N];
  instr_t               prog      [PROG_DEPTH];

  // ---------------------------------------------------------------- control
  typedef enum logic [2:0] {S_IDLE, S_RUN, S_CRC, S_CHK, S_DONE} state_e;
  state_e          state;
  logic [PAW-1:0]  pc;
  logic [NL-1:0]   chunk;
  logic [TW-1:0]   trial;
  logic [IW:0]     info_base;

  instr_t          ins;
  int              lvl, half, size, nodelen;
  logic            last_chunk;

  always_comb begin
    ins     = prog[pc];
    lvl     = int'(ins.level);
    size    = 1 << lvl;
    half    = size >> 1;
    nodelen = (ins.op == OP_RATE0) ? size : half;
    last_chunk = (int'(chunk) + 1) * P >= nodelen;
  end

  // LLR of node level l, position i (level NL is the channel memory)
  function automatic logic signed [QA-1:0] rd_alpha(input int l, input int i);
    if (l >= int'(NL)) return QA'(ch_mem[i % N]);
    return alpha_mem[((1 << l) + i) % N];
  endfunction

  // ---------------------------------------------------------------- datapath
  logic signed [QA-1:0] pe_a [P], pe_b [P], pe_f [P], pe_g [P];
  logic                 pe_bl [P], pe_br [P], pe_clo [P], pe_chi [P];
  logic signed [QA-1:0] leaf_alpha [P];

  always_comb begin
    for (int j = 0; j < P; j++) begin
      int idx;
      idx = int'(chunk) * P + j;
      pe_a[j]       = rd_alpha(lvl, idx);
      pe_b[j]       = rd_alpha(lvl, idx + half);
      pe_bl[j]      = beta_l_m[(half + idx) % (2 * N)];
      pe_br[j]      = beta_r_m[(half + idx) % (2 * N)];
      leaf_alpha[j] = (j < size) ? rd_alpha(lvl, j) : '0;
    end
  end

  fg_unit #(.P(P), .QA(QA)) u_fg (
    .a(pe_a), .b(pe_b), .beta_l(pe_bl), .beta_r(pe_br),
    .f_out(pe_f), .g_out(pe_g), .comb_lo(pe_clo), .comb_hi(pe_chi)
  );

  // leaf units
  logic [LW-1:0] nv_log;
  assign nv_log = LW'(ins.level);

  // flip selection for the current leaf
  int            kv;
  logic          flip_on, in_node;
  logic [IW-1:0] flip_idx;
  logic [IW:0]   flip_rel;
  logic [QL-1:0] list_lam   [LST];
  logic [IW-1:0] list_idx   [LST];
  logic          list_valid [LST];

  always_comb begin
    case (ins.op)
      OP_RATE1: kv = size;
      OP_REP:   kv = 1;
      OP_BIREP: kv = 2;
      OP_SPC:   kv = size - 1;
      default:  kv = 0;
    endcase
    flip_on  = 1'b0;
    flip_idx = '0;
    if (trial >= 2) begin
      flip_on  = list_valid[int'(trial) - 2];
      flip_idx = list_idx[int'(trial) - 2];
    end
    flip_rel = {1'b0, flip_idx} - info_base;
    in_node  = flip_on && ({1'b0, flip_idx} >= info_base) && (int'(flip_rel) < kv);
  end

  logic          r1_beta [P], rp_beta [P], br_beta [P], sp_beta [P];
  logic [QL-1:0] r1_lam  [P], rp_lam  [P], br_lam  [P], sp_lam  [P];
  logic          r1_v    [P], rp_v    [P], br_v    [P], sp_v    [P];

  rate1_node #(.P(P), .QA(QA), .QL(QL)) u_rate1 (
    .alpha(leaf_alpha), .nv_log(nv_log),
    .flip_en(in_node && ins.op == OP_RATE1), .flip_d(flip_rel[PW-1:0]),
    .beta(r1_beta), .lam(r1_lam), .lam_valid(r1_v));

  rep_node #(.P(P), .REP_MAX(REP_MAX), .QA(QA), .QL(QL)) u_rep (
    .alpha(leaf_alpha), .nv_log(nv_log),
    .flip_en(in_node && ins.op == OP_REP),
    .beta(rp_beta), .lam(rp_lam), .lam_valid(rp_v));

  birep_node #(.P(P), .QA(QA), .QL(QL)) u_birep (
    .alpha(leaf_alpha), .nv_log(nv_log),
    .flip_en(in_node && ins.op == OP_BIREP), .flip_d(flip_rel[0]),
    .beta(br_beta), .lam(br_lam), .lam_valid(br_v));

  spc_node #(.P(P), .QA(QA), .QL(QL), .S_SHIFT(S_SHIFT)) u_spc (
    .alpha(leaf_alpha), .nv_log(nv_log),
    .flip_en(in_node && ins.op == OP_SPC), .flip_d(flip_rel[PW-1:0]),
    .beta(sp_beta), .lam(sp_lam), .lam_valid(sp_v));

  logic          leaf_beta [P];
  logic [QL-1:0] leaf_lam  [P];
  logic [IW-1:0] leaf_idx  [P];
  logic          leaf_v    [P];
  logic          is_leaf;

  always_comb begin
    is_leaf = ins.op inside {OP_RATE1, OP_REP, OP_BIREP, OP_SPC};
    for (int j = 0; j < P; j++) begin
      unique case (ins.op)
        OP_REP:   begin leaf_beta[j] = rp_beta[j]; leaf_lam[j] = rp_lam[j]; leaf_v[j] = rp_v[j]; end
        OP_BIREP: begin leaf_beta[j] = br_beta[j]; leaf_lam[j] = br_lam[j]; leaf_v[j] = br_v[j]; end
        OP_SPC:   begin leaf_beta[j] = sp_beta[j]; leaf_lam[j] = sp_lam[j]; leaf_v[j] = sp_v[j]; end
        default:  begin leaf_beta[j] = r1_beta[j]; leaf_lam[j] = r1_lam[j]; leaf_v[j] = r1_v[j]; end
      endcase
      leaf_idx[j] = IW'(info_base + (IW + 1)'(j));
    end
  end

  // flip list: LLR sorter behind the leaf units, then the insert-sort unit
  logic [QL-1:0] sel_lam [LST];
  logic [IW-1:0] sel_idx [LST];
  logic          sel_v   [LST];

  lambda_select #(.M(P), .K(LST), .QL(QL), .IW(IW)) u_sel (
    .in_lam(leaf_lam), .in_idx(leaf_idx), .in_valid(leaf_v),
    .out_lam(sel_lam), .out_idx(sel_idx), .out_valid(sel_v));

  insert_sort #(.K(LST), .QL(QL), .IW(IW)) u_list (
    .clk(clk), .rst_n(rst_n),
    .clr((state == S_IDLE || state == S_DONE) && start),
    .ins(state == S_RUN && is_leaf && trial == 1),
    .in_lam(sel_lam), .in_idx(sel_idx), .in_valid(sel_v),
    .list_lam(list_lam), .list_idx(list_idx), .list_valid(list_valid));

  // CRC over the root estimate
  logic [P-1:0] crc_bits, crc_mask;
  logic         crc_pass;

  always_comb
    for (int j = 0; j < P; j++) begin
      crc_bits[j] = beta_l_m[(N + int'(chunk) * P + j) % (2 * N)];
      crc_mask[j] = info_mask[(int'(chunk) * P + j) % N];
    end

  crc_check #(.P(P), .W(CRC_W)) u_crc (
    .clk(clk), .rst_n(rst_n),
    .start(state == S_RUN && ins.op == OP_END),
    .en(state == S_CRC),
    .bits(crc_bits), .mask(crc_mask),
    .ok(crc_pass), .crc());

  // another trial is possible when a further flip candidate exists
  logic next_avail;
  always_comb begin
    next_avail = 1'b0;
    for (int t = 0; t < int'(LST); t++)
      if (int'(trial) == t + 1) next_avail = list_valid[t];
  end

  // ---------------------------------------------------------------- memory writes
  always_ff @(posedge clk) begin
    if (state == S_IDLE || state == S_DONE) begin
      if (llr_we)
        for (int j = 0; j < P; j++) ch_mem[(int'(llr_addr) * P + j) % N] <= llr_data[j];
      if (mask_we)
        for (int j = 0; j < P; j++) info_mask[(int'(mask_addr) * P + j) % N] <= mask_data[j];
      if (prog_we) prog[prog_addr] <= prog_data;
    end
    if (state == S_RUN) begin
      for (int j = 0; j < P; j++) begin
        int idx;
        idx = int'(chunk) * P + j;
        unique case (ins.op)
          OP_F: if (idx < half) alpha_mem[(half + idx) % N] <= pe_f[j];
          OP_G: if (idx < half) alpha_mem[(half + idx) % N] <= pe_g[j];
          OP_COMB:
            if (idx < half) begin
              if (ins.left) begin
                beta_l_m[(size + idx) % (2 * N)]        <= pe_clo[j];
                beta_l_m[(size + idx + half) % (2 * N)] <= pe_chi[j];
              end else begin
                beta_r_m[(size + idx) % (2 * N)]        <= pe_clo[j];
                beta_r_m[(size + idx + half) % (2 * N)] <= pe_chi[j];
              end
            end
          OP_RATE0:
            if (idx < size) begin
              if (ins.left) beta_l_m[(size + idx) % (2 * N)] <= 1'b0;
              else          beta_r_m[(size + idx) % (2 * N)] <= 1'b0;
            end
          OP_RATE1, OP_REP, OP_BIREP, OP_SPC:
            if (j < size) begin
              if (ins.left) beta_l_m[(size + j) % (2 * N)] <= leaf_beta[j];
              else          beta_r_m[(size + j) % (2 * N)] <= leaf_beta[j];
            end
          default: ;
        endcase
      end
    end
  end

  // ---------------------------------------------------------------- sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      pc        <= '0;
      chunk     <= '0;
      trial     <= '0;
      info_base <= '0;
      done      <= 1'b0;
      crc_ok    <= 1'b0;
      trials    <= '0;
      cycles    <= '0;
    end else begin
      done <= 1'b0;
      if (state != S_IDLE && state != S_DONE) cycles <= cycles + 1;
      unique case (state)
        S_IDLE, S_DONE:
          if (start) begin
            state     <= S_RUN;
            pc        <= '0;
            chunk     <= '0;
            trial     <= TW'(1);
            info_base <= '0;
            cycles    <= '0;
            crc_ok    <= 1'b0;
          end
        S_RUN: begin
          if (ins.op == OP_END) begin
            state <= S_CRC;
            chunk <= '0;
          end else if (ins.op inside {OP_F, OP_G, OP_COMB, OP_RATE0} && !last_chunk) begin
            chunk <= chunk + 1'b1;
          end else begin
            chunk     <= '0;
            pc        <= pc + 1'b1;
            info_base <= info_base + (IW + 1)'(kv);
          end
        end
        S_CRC: begin
          if (int'(chunk) == NCH - 1) state <= S_CHK;
          chunk <= chunk + 1'b1;
        end
        S_CHK: begin
          // trial done: stop on a CRC match, after Tmax trials or when the
          // flip list holds no further candidate
          if (crc_pass || !next_avail) begin
            state  <= S_DONE;
            done   <= 1'b1;
            crc_ok <= crc_pass;
            trials <= trial;
          end else begin
            state     <= S_RUN;
            trial     <= trial + 1'b1;
            pc        <= '0;
            chunk     <= '0;
            info_base <= '0;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE) && (state != S_DONE);

  always_comb
    for (int i = 0; i < N; i++) x_hat[i] = beta_l_m[N + i];

  // a leaf never holds more than P bits and its information bits never run
  // past K
  a_leaf_size: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_RUN && is_leaf) |-> (size <= int'(P) && int'(info_base) + kv <= int'(K)))
    else $error("leaf node larger than P or information-bit count past K");

endmodule
