// polar_ref_pkg: software reference of the decoder for the testbenches.
//
// It builds a code (frozen set from the polarisation-weight order, good bits, message with
// CRC, polar encoding, BPSK over AWGN, LLR quantisation) and decodes it with a plain
// SC / SCL model. The model recomputes partial sums by re-encoding the decided bits, keeps a
// complete copy of every path's state and copies whole paths after sorting, instead of the
// hardware's shared storage indices. Arithmetic is the same quantised min-sum with
// saturation as the PEs, the path metric the same saturating sum, and ties are broken the
// same way (stable order: path 0 before path 1, hard decision before flipped bit; among
// equal metrics at the CRC check, the lower slot), so results are comparable bit for bit.
// Nodes of stage 2..fmax of the kinds listed at node_stage are decided as a whole (zeros
// with a metric penalty, hard decisions, a repetition vote or hard decisions with a parity
// fix on the node LLRs), re-encoded into leaf bits.
package polar_ref_pkg;
  import polar_pkg::*;

  localparam int NMAX = 256;
  localparam int LMAX = 8;
  localparam int LOGN = 8;

  // --------------------------------------------------------------- code construction
  // polarisation weight of index i: sum over set bits j of 2^(j/4)
  function automatic real pw(input int i);
    real w = 0.0;
    for (int j = 0; j < 16; j++) if (i[j]) w += 2.0 ** (real'(j) / 4.0);
    return w;
  endfunction

  // leaf types of a length-n code with k information bits of which the g most reliable are good
  function automatic void build_code(input int n, input int k, input int g, output leaf_t lt [NMAX]);
    int order [NMAX];
    for (int i = 0; i < NMAX; i++) begin lt[i] = LEAF_FROZEN; order[i] = i; end
    // selection sort of indices by decreasing weight (ties: larger index first)
    for (int a = 0; a < n; a++)
      for (int b = a + 1; b < n; b++)
        if (pw(order[b]) > pw(order[a]) || (pw(order[b]) == pw(order[a]) && order[b] > order[a])) begin
          int t = order[a]; order[a] = order[b]; order[b] = t;
        end
    for (int a = 0; a < k; a++) lt[order[a]] = (a < g) ? LEAF_GOOD : LEAF_INFO;
  endfunction

  // CRC remainder of a bit sequence by long division (generator x^11 + CRC_POLY)
  function automatic logic [CRC_W-1:0] crc_div(input bit msg [NMAX], input int len);
    bit r [NMAX + CRC_W];
    logic [CRC_W:0] g;
    logic [CRC_W-1:0] rem;
    g = {1'b1, CRC_POLY};
    for (int i = 0; i < NMAX + CRC_W; i++) r[i] = (i < len) ? msg[i] : 1'b0;
    for (int i = 0; i < len; i++)
      if (r[i]) for (int j = 0; j <= CRC_W; j++) r[i + j] ^= g[CRC_W - j];
    for (int j = 0; j < CRC_W; j++) rem[CRC_W - 1 - j] = r[len + j];
    return rem;
  endfunction

  // random message of k-11 bits, CRC appended, placed on the information leaves
  function automatic void make_word(input int n, input int k, input leaf_t lt [NMAX], output bit u [NMAX]);
    bit msg [NMAX];
    logic [CRC_W-1:0] rem;
    int p;
    for (int i = 0; i < NMAX; i++) msg[i] = 1'b0;
    for (int i = 0; i < k - CRC_W; i++) msg[i] = 1'($urandom);
    rem = crc_div(msg, k - CRC_W);
    for (int j = 0; j < CRC_W; j++) msg[k - CRC_W + j] = rem[CRC_W - 1 - j];
    p = 0;
    for (int i = 0; i < NMAX; i++) u[i] = 1'b0;
    for (int i = 0; i < n; i++) if (lt[i] != LEAF_FROZEN) begin u[i] = msg[p]; p++; end
  endfunction

  // x = u * F^(kron log2 n), butterflies (a, b) -> (a xor b, b)
  function automatic void encode(input int n, input bit u [NMAX], output bit x [NMAX]);
    x = u;
    for (int len = 1; len < n; len *= 2)
      for (int i = 0; i < n; i += 2 * len)
        for (int j = 0; j < len; j++) x[i + j] ^= x[i + j + len];
  endfunction

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom % 1000000) + 1.0) / 1000001.0;
    u2 = real'($urandom % 1000000) / 1000000.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // BPSK (0 -> +1) over AWGN with noise variance sigma^2 = 10^(-es_n0/10) (signal to noise
  // ratio per real sample); LLR 2y/sigma^2 quantised with step 0.5, saturated
  function automatic void channel(input int n, input bit x [NMAX], input real es_n0_db, input int q,
                                  output int llr [NMAX]);
    real sigma2, y, v;
    int maxv, r;
    maxv = 2 ** (q - 1) - 1;
    sigma2 = 1.0 / (10.0 ** (es_n0_db / 10.0));
    for (int i = 0; i < NMAX; i++) llr[i] = 0;
    for (int i = 0; i < n; i++) begin
      y = (x[i] ? -1.0 : 1.0) + $sqrt(sigma2) * gauss();
      v = 2.0 * y / sigma2 * 2.0;
      r = (v >= 0.0) ? int'(v + 0.5) : -int'(-v + 0.5);
      llr[i] = r > maxv ? maxv : (r < -maxv ? -maxv : r);
    end
  endfunction

  // --------------------------------------------------------------- reference decoder
  function automatic int sat(input int v, input int q);
    int m = 2 ** (q - 1) - 1;
    return v > m ? m : (v < -m ? -m : v);
  endfunction
  function automatic int fminus(input int a, input int b, input int q);
    int ma = a < 0 ? -a : a, mb = b < 0 ? -b : b, mn;
    mn = ma < mb ? ma : mb;
    return sat(((a < 0) != (b < 0)) ? -mn : mn, q);
  endfunction
  function automatic int fplus(input int a, input int b, input bit beta, input int q);
    return sat(beta ? b - a : b + a, q);
  endfunction
  function automatic int pmadd(input int a, input int b);
    int s = a + b;
    return s > (2 ** PM_W - 1) ? 2 ** PM_W - 1 : s;
  endfunction

  typedef struct {
    int               a  [LOGN + 1][NMAX];  // alpha per stage
    bit               u  [NMAX];
    int               pm;
    logic [CRC_W-1:0] crc;
  } path_t;

  // Node kinds decided in one step.
  localparam int ND_R0 = 0, ND_R1 = 1, ND_REP = 2, ND_SPC = 3;

  // Largest node stage sd (2..fmax, node smaller than the code) whose 2^sd leaves starting
  // at leaf i (i aligned) are all frozen (ND_R0), all decided without splitting (ND_R1: all
  // non-frozen in SC mode, all good in list mode), or in SC mode all frozen but the last
  // (ND_REP) or only the first frozen (ND_SPC); 0 if none, i.e. leaf i is decided alone.
  function automatic int node_stage(input int n, input int i, input leaf_t lt [NMAX],
                                    input bit list_mode, input int fmax, output int kind);
    int sd = 0;
    kind = ND_R0;
    for (int s = 2; s <= fmax && (1 << s) < n; s++)
      if (i % (1 << s) == 0) begin
        bit all_f = 1, all_1 = 1, rep = !list_mode, spc = !list_mode;
        for (int j = 0; j < (1 << s); j++) begin
          bit fz = (lt[i + j] == LEAF_FROZEN);
          if (!fz) all_f = 0;
          if (list_mode ? lt[i + j] != LEAF_GOOD : fz) all_1 = 0;
          if (fz != (j < (1 << s) - 1)) rep = 0;
          if (fz != (j == 0)) spc = 0;
        end
        if (all_f || all_1 || rep || spc) begin
          sd = s;
          kind = all_f ? ND_R0 : all_1 ? ND_R1 : rep ? ND_REP : ND_SPC;
        end
      end
    return sd;
  endfunction

  // Decode n channel LLRs with list size lsize (1 = SC) and t CRC checks; nodes of stage
  // 2..fmax that node_stage finds are decided in one step (fmax < 2: leaf by leaf).
  // Returns the decoded word u and whether its CRC passed.
  function automatic void ref_decode(input int n, input int q, input int lsize, input int t,
                                     input int fmax,
                                     input int llr [NMAX], input leaf_t lt [NMAX],
                                     output bit u [NMAX], output bit pass);
    path_t p [LMAX];
    path_t np [LMAX];
    int nact, logn, top, h, sd, i, kind;
    int cpm [2 * LMAX], cpar [2 * LMAX], ncand;
    bit cbit [2 * LMAX];
    int idx [2 * LMAX];
    bit checked [LMAX];
    int best, pick, chosen;
    logn = $clog2(n);
    nact = 1;
    for (int i = 0; i < n; i++) p[0].a[logn][i] = llr[i];
    p[0].pm = 0;
    p[0].crc = '0;
    i = 0;
    while (i < n) begin
      sd  = node_stage(n, i, lt, lsize > 1, fmax, kind);
      top = (i == 0) ? logn : 1;
      if (i != 0) for (int k = 0; k < logn; k++) if (i[k]) begin top = k + 1; break; end
      for (int l = 0; l < nact; l++)
        for (int s = top; s >= sd + 1; s--) begin
          bit lb [NMAX];
          h = 1 << (s - 1);
          // partial sums of the left sibling: re-encode its decided bits
          for (int j = 0; j < NMAX; j++) lb[j] = 1'b0;
          if (i != 0 && s == top) begin
            for (int j = 0; j < h; j++) lb[j] = p[l].u[i - h + j];
            for (int len = 1; len < h; len *= 2)
              for (int b0 = 0; b0 < h; b0 += 2 * len)
                for (int j = 0; j < len; j++) lb[b0 + j] ^= lb[b0 + j + len];
          end
          for (int j = 0; j < h; j++)
            p[l].a[s-1][j] = (i != 0 && s == top) ? fplus(p[l].a[s][j], p[l].a[s][j+h], lb[j], q)
                                                  : fminus(p[l].a[s][j], p[l].a[s][j+h], q);
        end
      // decision
      if (sd > 0) begin
        for (int l = 0; l < nact; l++) begin
          bit b [NMAX];
          int sum = 0, par = 0, mn = 1 << 30, pos = 0;
          for (int j = 0; j < (1 << sd); j++) begin
            int a0 = p[l].a[sd][j];
            int mag = a0 < 0 ? -a0 : a0;
            b[j] = (kind != ND_R0) && a0 < 0;
            if (kind == ND_R0 && a0 < 0) p[l].pm = pmadd(p[l].pm, -a0);
            sum += a0;
            par ^= (a0 < 0);
            if (mag < mn) begin mn = mag; pos = j; end
          end
          if (kind == ND_REP) for (int j = 0; j < (1 << sd); j++) b[j] = sum < 0;
          if (kind == ND_SPC && par) b[pos] = !b[pos];
          for (int len = 1; len < (1 << sd); len *= 2)     // u = beta F (F is its own inverse)
            for (int b0 = 0; b0 < (1 << sd); b0 += 2 * len)
              for (int j = 0; j < len; j++) b[b0 + j] ^= b[b0 + j + len];
          for (int j = 0; j < (1 << sd); j++) begin
            p[l].u[i + j] = b[j];
            if (lt[i + j] != LEAF_FROZEN) p[l].crc = crc_step(p[l].crc, b[j]);
          end
        end
      end else if (lt[i] == LEAF_INFO && lsize > 1) begin
        ncand = 0;
        for (int l = 0; l < nact; l++) begin
          int a0 = p[l].a[0][0];
          bit hd = a0 < 0;
          cpm[ncand] = p[l].pm; cbit[ncand] = hd; cpar[ncand] = l; ncand++;
          cpm[ncand] = pmadd(p[l].pm, a0 < 0 ? -a0 : a0); cbit[ncand] = !hd; cpar[ncand] = l; ncand++;
        end
        for (int c = 0; c < ncand; c++) idx[c] = c;
        for (int c = 1; c < ncand; c++)            // stable insertion sort
          for (int d = c; d > 0 && cpm[idx[d-1]] > cpm[idx[d]]; d--) begin
            int tmp = idx[d]; idx[d] = idx[d-1]; idx[d-1] = tmp;
          end
        if (ncand > lsize) ncand = lsize;
        for (int k = 0; k < ncand; k++) begin
          np[k] = p[cpar[idx[k]]];
          np[k].pm = cpm[idx[k]];
          np[k].u[i] = cbit[idx[k]];
        end
        nact = ncand;
        for (int k = 0; k < nact; k++) p[k] = np[k];
      end else begin
        for (int l = 0; l < nact; l++) begin
          int a0 = p[l].a[0][0];
          if (lt[i] == LEAF_FROZEN) begin
            p[l].u[i] = 0;
            if (a0 < 0) p[l].pm = pmadd(p[l].pm, -a0);
          end else p[l].u[i] = a0 < 0;
        end
      end
      // CRC
      if (sd == 0)
        for (int l = 0; l < nact; l++)
          if (lt[i] != LEAF_FROZEN) p[l].crc = crc_step(p[l].crc, p[l].u[i]);
      i += 1 << sd;
    end
    // CRC check of up to t paths, best metric first
    for (int l = 0; l < LMAX; l++) checked[l] = 0;
    best = -1; chosen = -1;
    for (int c = 0; c < t && c < nact; c++) begin
      pick = -1;
      for (int l = 0; l < nact; l++) if (!checked[l] && (pick < 0 || p[l].pm < p[pick].pm)) pick = l;
      if (best < 0) best = pick;
      if (p[pick].crc == '0) begin chosen = pick; break; end
      checked[pick] = 1;
    end
    pass = (chosen >= 0);
    if (chosen < 0) chosen = best;
    u = p[chosen].u;
  endfunction

endpackage
