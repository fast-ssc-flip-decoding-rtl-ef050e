// fssc_tb_pkg: test-side models for the fast-SSC-flip decoder.
//
// Everything here is simulation-only and written independently of the RTL:
//  * build_code    picks the K most reliable bit positions of a length-N
//                  polar code from Bhattacharyya parameters (design-SNR
//                  z0 = exp(-R Eb/N0)); a stand-in for a Tal-Vardy design.
//  * compile       decomposes the decoder tree into the instruction list of
//                  fssc_pkg, using RATE0, RATE1 (<= P), REP (<= 32),
//                  BIREP (4..P) and SPC (4..P) leaves.
//  * encode        systematic polar encoding with a 16-bit CRC on the
//                  last 16 information bits.
//  * channel       BPSK over AWGN, LLRs quantized to QC bits.
//  * ref_decode    a behavioural fast-SSC-flip decoder that walks the same
//                  instruction list with whole-node loops, records all
//                  decision LLRs of trial 1 and flips by a stable sort.
package fssc_tb_pkg;
  import fssc_pkg::*;

  localparam int NMAX = 512;
  localparam int PMAX = 64;

  typedef struct {
    int  n;          // code length
    int  k;          // information bits (CRC included)
    bit  info[NMAX]; // 1 = information position
  } code_t;

  typedef struct {
    instr_t ins[2*NMAX];
    int     len;     // instructions including END
  } prog_t;

  // ---------------------------------------------------------------- code
  function automatic void build_code(output code_t c, input int n, input int k,
                                     input real design_ebn0_db);
    real z[NMAX];
    real z0, best;
    int  sel;
    bit  taken[NMAX];
    z0 = $exp(-(real'(k) / real'(n)) * (10.0 ** (design_ebn0_db / 10.0)));
    c.n = n;
    c.k = k;
    for (int i = 0; i < NMAX; i++) begin
      c.info[i] = 0;
      taken[i]  = 0;
    end
    for (int i = 0; i < n; i++) begin
      real zz;
      zz = z0;
      // the most significant index bit is the first polarization step
      for (int b = $clog2(n) - 1; b >= 0; b--)
        zz = ((i >> b) & 1) ? zz * zz : 2.0 * zz - zz * zz;
      z[i] = zz;
    end
    for (int m = 0; m < k; m++) begin
      best = 2.0;
      sel  = 0;
      for (int i = n - 1; i >= 0; i--)
        if (!taken[i] && z[i] < best) begin
          best = z[i];
          sel  = i;
        end
      taken[sel]  = 1;
      c.info[sel] = 1;
    end
  endfunction

  // ---------------------------------------------------------------- compiler
  function automatic instr_t mk(op_e op, int l, bit left);
    instr_t r;
    r.op    = op;
    r.level = 4'(l);
    r.left  = left;
    return r;
  endfunction

  // leaf type of the node at level l, offset off; OP_END when it must split
  function automatic op_e classify(const ref code_t c, input int l, input int off,
                                   input int p, input int rep_max, input bit use_spc);
    int sz, ni;
    bit last1, last2, first0;
    sz = 1 << l;
    ni = 0;
    for (int i = 0; i < sz; i++) ni += c.info[off + i];
    last1  = c.info[off + sz - 1];
    last2  = (sz >= 2) && c.info[off + sz - 2];
    first0 = !c.info[off];
    if (ni == 0) return OP_RATE0;
    if (ni == sz && sz <= p) return OP_RATE1;
    if (ni == 1 && last1 && sz <= rep_max) return OP_REP;
    if (ni == 2 && last1 && last2 && sz >= 4 && sz <= p) return OP_BIREP;
    if (use_spc && ni == sz - 1 && first0 && sz >= 4 && sz <= p) return OP_SPC;
    return OP_END;
  endfunction

  function automatic void compile(const ref code_t c, output prog_t pr, input int p,
                                  input int rep_max, input bit use_spc);
    // explicit stack: kind 0 = visit node, 1 = emit G, 2 = emit COMB
    int  st_kind[64], st_l[64], st_off[64];
    bit  st_left[64];
    int  sp;
    pr.len = 0;
    sp = 0;
    st_kind[0] = 0; st_l[0] = $clog2(c.n); st_off[0] = 0; st_left[0] = 1;
    sp = 1;
    while (sp > 0) begin
      int  kd, l, off;
      bit  left;
      op_e t;
      sp--;
      kd = st_kind[sp]; l = st_l[sp]; off = st_off[sp]; left = st_left[sp];
      if (kd == 1) begin
        pr.ins[pr.len++] = mk(OP_G, l, left);
      end else if (kd == 2) begin
        pr.ins[pr.len++] = mk(OP_COMB, l, left);
      end else begin
        t = classify(c, l, off, p, rep_max, use_spc);
        if (t != OP_END) begin
          pr.ins[pr.len++] = mk(t, l, left);
        end else begin
          pr.ins[pr.len++] = mk(OP_F, l, left);
          st_kind[sp] = 2; st_l[sp] = l;     st_off[sp] = off;                  st_left[sp] = left; sp++;
          st_kind[sp] = 0; st_l[sp] = l - 1; st_off[sp] = off + (1 << (l - 1)); st_left[sp] = 0;    sp++;
          st_kind[sp] = 1; st_l[sp] = l;     st_off[sp] = off;                  st_left[sp] = left; sp++;
          st_kind[sp] = 0; st_l[sp] = l - 1; st_off[sp] = off;                  st_left[sp] = 1;    sp++;
        end
      end
    end
    pr.ins[pr.len++] = mk(OP_END, 0, 1);
  endfunction

  // clock cycles one trial takes in the decoder: F, G, COMB take
  // ceil(Nv/2 / P), RATE0 ceil(Nv / P), other leaves 1, END 1, then the CRC
  // pass of N/P cycles and one decision cycle
  function automatic int trial_cycles(const ref prog_t pr, input int n, input int p);
    int cyc, sz;
    cyc = 0;
    for (int i = 0; i < pr.len; i++) begin
      sz = 1 << int'(pr.ins[i].level);
      case (pr.ins[i].op)
        OP_F, OP_G, OP_COMB: cyc += (sz / 2 + p - 1) / p;
        OP_RATE0:            cyc += (sz + p - 1) / p;
        default:             cyc += 1;
      endcase
    end
    return cyc + (n + p - 1) / p + 1;
  endfunction

  // ---------------------------------------------------------------- CRC
  function automatic logic [15:0] crc_step(logic [15:0] r, bit b);
    bit fb;
    fb = r[15] ^ b;
    return {r[14:0], 1'b0} ^ (fb ? 16'h1021 : 16'h0);
  endfunction

  // ---------------------------------------------------------------- encoder
  function automatic void polar_transform(ref bit x[NMAX], input int n);
    for (int h = 1; h < n; h = h * 2)
      for (int i = 0; i < n; i++)
        if ((i & h) == 0) x[i] = x[i] ^ x[i + h];
  endfunction

  // random message, CRC appended, systematic codeword in x, message in m
  function automatic void encode(const ref code_t c, output bit x[NMAX],
                                 output bit m[NMAX]);
    logic [15:0] r;
    int j;
    r = '0;
    for (int i = 0; i < NMAX; i++) begin
      x[i] = 0;
      m[i] = 0;
    end
    for (int i = 0; i < c.k - 16; i++) begin
      m[i] = bit'($urandom & 1);
      r = crc_step(r, m[i]);
    end
    for (int i = 0; i < 16; i++) m[c.k - 16 + i] = r[15 - i];
    j = 0;
    for (int i = 0; i < c.n; i++)
      if (c.info[i]) x[i] = m[j++];
    polar_transform(x, c.n);
    for (int i = 0; i < c.n; i++)
      if (!c.info[i]) x[i] = 0;
    polar_transform(x, c.n);
  endfunction

  function automatic void extract(const ref code_t c, const ref bit x[NMAX],
                                  output bit m[NMAX]);
    int j;
    j = 0;
    for (int i = 0; i < NMAX; i++) m[i] = 0;
    for (int i = 0; i < c.n; i++)
      if (c.info[i]) m[j++] = x[i];
  endfunction

  function automatic bit crc_holds(const ref code_t c, const ref bit x[NMAX]);
    logic [15:0] r;
    r = '0;
    for (int i = 0; i < c.n; i++)
      if (c.info[i]) r = crc_step(r, x[i]);
    return r == 16'h0;
  endfunction

  // ---------------------------------------------------------------- channel
  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom % 32'hFFFFFF) + 1.0) / 16777217.0;
    u2 = real'($urandom % 32'hFFFFFF) / 16777216.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // BPSK, LLR = 2y/sigma^2, quantized with 2 fractional bits to qc bits
  function automatic void channel(const ref code_t c, const ref bit x[NMAX],
                                  input real ebn0_db, input int qc,
                                  output int llr[NMAX]);
    real sigma, y, l;
    int  q, lim;
    sigma = $sqrt(1.0 / (2.0 * (real'(c.k) / real'(c.n)) * (10.0 ** (ebn0_db / 10.0))));
    lim = (1 << (qc - 1)) - 1;
    for (int i = 0; i < NMAX; i++) llr[i] = 0;
    for (int i = 0; i < c.n; i++) begin
      y = (x[i] ? -1.0 : 1.0) + sigma * gauss();
      l = 2.0 * y / (sigma * sigma) * 4.0;
      q = (l >= 0.0) ? int'(l + 0.5) : -int'(-l + 0.5);
      if (q > lim) q = lim;
      if (q < -lim) q = -lim;
      llr[i] = q;
    end
  endfunction

  // ---------------------------------------------------------------- reference decoder
  function automatic int sat(int v, int w);
    int lim;
    lim = (1 << (w - 1)) - 1;
    return (v > lim) ? lim : ((v < -lim) ? -lim : v);
  endfunction

  function automatic int satu(int v, int w);
    int lim;
    lim = (1 << w) - 1;
    return (v > lim) ? lim : ((v < 0) ? 0 : v);
  endfunction

  function automatic int iabs(int v);
    return (v < 0) ? -v : v;
  endfunction

  // one trial; flip < 0: none. When record is set, the decision LLRs are
  // appended to lam/lidx in decoding order.
  function automatic void ref_trial(const ref code_t c, const ref prog_t pr,
      const ref int llr[NMAX], input int qa, input int ql, input int s_shift,
      input int flip, input bit record,
      ref int lam[NMAX], ref int lidx[NMAX], ref int nlam, output bit x[NMAX]);
    int alpha[10][NMAX];
    bit bl[11][NMAX], br[11][NMAX];
    int nl, base;
    nl = $clog2(c.n);
    for (int i = 0; i < c.n; i++) alpha[nl][i] = llr[i];
    base = 0;
    for (int pc = 0; pc < pr.len; pc++) begin
      int l, sz, h, kv;
      bit left;
      bit be[NMAX];
      l = int'(pr.ins[pc].level);
      left = pr.ins[pc].left;
      sz = 1 << l;
      h  = sz / 2;
      kv = 0;
      case (pr.ins[pc].op)
        OP_F:
          for (int i = 0; i < h; i++) begin
            int a, b, m;
            a = alpha[l][i]; b = alpha[l][i + h];
            m = (iabs(a) < iabs(b)) ? iabs(a) : iabs(b);
            alpha[l-1][i] = ((a < 0) != (b < 0)) ? -m : m;
          end
        OP_G:
          for (int i = 0; i < h; i++)
            alpha[l-1][i] = sat(bl[l-1][i] ? alpha[l][i+h] - alpha[l][i]
                                           : alpha[l][i+h] + alpha[l][i], qa);
        OP_COMB:
          for (int i = 0; i < h; i++) begin
            if (left) begin
              bl[l][i] = bl[l-1][i] ^ br[l-1][i]; bl[l][i+h] = br[l-1][i];
            end else begin
              br[l][i] = bl[l-1][i] ^ br[l-1][i]; br[l][i+h] = br[l-1][i];
            end
          end
        OP_END: ;
        default: begin
          // leaf
          case (pr.ins[pc].op)
            OP_RATE0: for (int i = 0; i < sz; i++) be[i] = 0;
            OP_RATE1: begin
              kv = sz;
              for (int i = 0; i < sz; i++) begin
                be[i] = alpha[l][i] < 0;
                if (record) begin lam[nlam] = satu(iabs(alpha[l][i]), ql); lidx[nlam++] = base + i; end
                if (flip == base + i) be[i] = !be[i];
              end
            end
            OP_REP: begin
              int s;
              kv = 1;
              s = 0;
              for (int i = 0; i < sz; i++) s += alpha[l][i];
              if (record) begin lam[nlam] = satu(iabs(s), ql); lidx[nlam++] = base; end
              for (int i = 0; i < sz; i++) be[i] = (s < 0) ^ (flip == base);
            end
            OP_BIREP: begin
              int se, so;
              kv = 2;
              se = 0; so = 0;
              for (int i = 0; i < sz; i += 2) begin se += alpha[l][i]; so += alpha[l][i+1]; end
              if (record) begin
                lam[nlam] = satu(iabs(se), ql); lidx[nlam++] = base;
                lam[nlam] = satu(iabs(so), ql); lidx[nlam++] = base + 1;
              end
              for (int i = 0; i < sz; i++)
                be[i] = (i % 2 == 0) ? ((se < 0) ^ (flip == base)) : ((so < 0) ^ (flip == base + 1));
            end
            OP_SPC: begin
              int i1, i2, mn;
              bit par;
              kv = sz - 1;
              par = 0;
              i1 = 0;
              for (int i = 0; i < sz; i++) begin
                be[i] = alpha[l][i] < 0;
                par ^= be[i];
                if (iabs(alpha[l][i]) < iabs(alpha[l][i1])) i1 = i;
              end
              i2 = (i1 == 0) ? 1 : 0;
              for (int i = 0; i < sz; i++)
                if (i != i1 && iabs(alpha[l][i]) < iabs(alpha[l][i2])) i2 = i;
              mn = iabs(alpha[l][i1]) >> s_shift;
              if (par) be[i1] = !be[i1];
              if (record)
                for (int d = 0; d < sz - 1; d++) begin
                  lam[nlam] = satu(par ? iabs(alpha[l][d+1]) - mn : iabs(alpha[l][d+1]) + mn, ql);
                  lidx[nlam++] = base + d;
                end
              if (flip >= base && flip < base + kv) begin
                int f;
                f = flip - base + 1;
                be[f] = !be[f];
                if (f == i1) be[i2] = !be[i2];
                else         be[i1] = !be[i1];
              end
            end
            default: ;
          endcase
          for (int i = 0; i < sz; i++)
            if (left) bl[l][i] = be[i]; else br[l][i] = be[i];
          base += kv;
        end
      endcase
    end
    for (int i = 0; i < NMAX; i++) x[i] = (i < c.n) ? bl[nl][i] : 0;
  endfunction

  // full SCF decoding; returns trials used, x = estimate, ok = CRC matched
  function automatic int ref_decode(const ref code_t c, const ref prog_t pr,
      const ref int llr[NMAX], input int qa, input int ql, input int s_shift,
      input int tmax, output bit x[NMAX], output bit ok);
    int lam[NMAX], lidx[NMAX], nlam;
    int ord[NMAX];
    nlam = 0;
    ref_trial(c, pr, llr, qa, ql, s_shift, -1, 1, lam, lidx, nlam, x);
    ok = crc_holds(c, x);
    if (ok) return 1;
    // stable selection sort of the decision LLRs
    for (int i = 0; i < nlam; i++) ord[i] = i;
    for (int i = 0; i < nlam && i < tmax - 1; i++) begin
      int b;
      b = i;
      for (int j = i + 1; j < nlam; j++)
        if (lam[ord[j]] < lam[ord[b]] || (lam[ord[j]] == lam[ord[b]] && ord[j] < ord[b])) b = j;
      begin int t; t = ord[i]; ord[i] = ord[b]; ord[b] = t; end
    end
    for (int t = 2; t <= tmax; t++) begin
      if (t - 2 >= nlam) return t - 1;
      ref_trial(c, pr, llr, qa, ql, s_shift, lidx[ord[t-2]], 0, lam, lidx, nlam, x);
      ok = crc_holds(c, x);
      if (ok) return t;
    end
    return tmax;
  endfunction

endpackage
