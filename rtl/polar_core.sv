// polar_core: the common core of the decoder. An FSM calls one sub-process (SP) after
// another over the decoding tree and processes the list paths one by one.
//
// The tree of a length-N code (n = log2 N stages) is traversed leaf by leaf, or node by
// node: a node of stage sd = 2..FM (FM = min(FAST, log2 2P)) is one SP when its 2^sd leaves
// are all frozen (rate 0) or all decided without splitting (rate 1: all non-frozen in SC
// mode, all "good" in list mode), or, in SC mode, all frozen but the last (repetition) or
// all non-frozen but the first (single parity check). The SP starting at leaf i begins at the node where the
// previous SP turned: stage t = n for i = 0, otherwise t = 1 + (trailing zeros of i).
//  * Edge traversal (S_DESC): from stage t down to stage sd (0 for a single leaf) the PEs
//    compute the child LLRs, f+ for the first step when i > 0 (the right child of the
//    turning node), f- below it, P LLRs per cycle: a stage s step takes ceil(2^(s-1)/P)
//    cycles.
//  * Decision (S_DEC): a node is decided in one cycle from its 2^sd LLRs (read through both
//    P-lane windows): rate 0 gives zeros and, in list mode, adds |alpha| of every negative
//    alpha to the path metric; rate 1 takes hard decisions beta; repetition sets every beta
//    to the sign of the LLR sum; parity takes hard decisions and flips the least reliable
//    one if their parity is odd. The leaf bits are u = beta F. A single leaf uses the SC bit-decision module in SC mode; in list mode the
//    SCL module decides frozen and good leaves at once (simplified SP, SSP), and an
//    information leaf is a full SP (FSP): both extensions of the path go to the sorter.
//  * Sorting and inter-path switching (S_APPLY, FSP only): after the last path the survivors
//    (best first) take slots 0.. and the path manager switches storage indices, metrics and
//    CRC registers to them; no LLR or partial sum is copied.
//  * Partial sums (S_PSUM): the decided bits (beta of a node) are combined upward, one stage
//    per cycle, with the stored left-sibling sums (beta_v = (beta_l xor beta_r, beta_r))
//    until a left child is completed, whose sums are stored. Information bits enter the
//    path's CRC register (a node's bits all in its decision cycle).
// In an SSP each path runs edge traversal, decision and partial sums before the next path
// starts; in an FSP all paths run edge traversal and decision, then the sort result is
// applied, then all paths update their partial sums. After the last leaf (S_CHECK) up to T
// paths, best metric first, are checked against the CRC one per cycle; the first that
// passes is chosen, else the best path with crc_pass = 0. In list mode S_TRACE then rebuilds
// the decoded word u_hat of the chosen path from the decision memory, one leaf per cycle;
// in SC mode (one path) the decisions were written to u_hat directly. Then done pulses.
// Interface: channel LLRs are written through llr_we/llr_addr/llr_data while idle; start
// with list_en = 0 (SC) or 1 (SCL-L) begins a decode; leaf_type must stay stable during it.
// ev_ssp / ev_fsp / ev_check pulse once per SSP (a node counts as one), FSP (per leaf, not
// per path) and CRC check.
// The SP structure, serial list processing, sorting with index switching, "check times" T,
// and deciding rate-1, SPC and REP nodes (SC) and all-frozen / all-good nodes (list) at
// stages 2..4 follow the paper. The cycle-level schedule and the exact node rules (standard
// fast-SSC ones, the paper only names the node types) are this design's. The paper's
// dual-SPC, dual-REP, PCR and RPC nodes and its flip-syndrome decision are left out.
module polar_core
  import polar_pkg::*;
#(
  parameter int unsigned N = N_DEF,
  parameter int unsigned Q = Q_DEF,
  parameter int unsigned L = L_DEF,
  parameter int unsigned T = T_DEF,
  parameter int unsigned P = P_DEF,
  parameter int unsigned FAST = FAST_DEF   // largest node stage decided in one step (<2: none)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  llr_we,
  input  logic [$clog2(N)-1:0]  llr_addr,
  input  logic [Q-1:0]          llr_data,
  input  leaf_t                 leaf_type [N],
  input  logic                  start,
  input  logic                  list_en,
  output logic                  busy,
  output logic                  done,
  output logic                  crc_pass,
  output logic [N-1:0]          u_hat,
  output logic                  ev_ssp,
  output logic                  ev_fsp,
  output logic                  ev_check
);

  localparam int unsigned NW = $clog2(N);
  localparam int unsigned NS = NW;              // stages below the channel
  localparam int unsigned SW = $clog2(NS + 1);  // width of a stage number 0..n
  localparam int unsigned CW = $clog2(N / P + 1);
  // node stages 2..FM are decided whole; a node's 2^FM LLRs must fit the two read windows
  // (2P lanes) and a node must be smaller than the root
  localparam int unsigned FM0 = (FAST < $clog2(2 * P)) ? FAST : $clog2(2 * P);
  localparam int unsigned FM  = (FM0 < NS) ? FM0 : NS - 1;
  localparam int unsigned NL  = (FM >= 2) ? (1 << FM) : 1;   // lanes of a node decision
  localparam int unsigned NLW = $clog2(NL + 1);

  typedef enum logic [2:0] {S_IDLE, S_DESC, S_DEC, S_APPLY, S_PSUM, S_CHECK, S_TRACE, S_DONE} state_t;

  state_t             state;
  logic [NW:0]        leaf;        // current leaf 0..N-1
  logic [PATH_W-1:0]  path;        // current path slot
  logic [SW-1:0]      s;           // stage being read in S_DESC (writes s-1)
  logic [CW-1:0]      c;           // chunk of P lanes
  logic [SW-1:0]      ps;          // stage of the partial sums held in cur
  logic [N/2-1:0]     cur;         // partial sums carried upward
  logic               fsp;         // current leaf is a full SP
  logic               lmode;       // list decoding on for this decode
  logic [L-1:0]       checked;
  logic [$clog2(T+1)-1:0] nchk;
  logic [PATH_W-1:0]  best;
  logic [NW-1:0]      tleaf;
  logic [PATH_W-1:0]  tslot;

  // ---------------------------------------------------------------- sub-blocks
  logic [P-1:0][Q-1:0] ch_a, ch_b, mem_a, mem_b, op_a, op_b, pe_y;
  logic [NW-1:0]       rd_addr_a, rd_addr_b;
  logic [PATH_W-1:0]   rd_path;
  logic [P-1:0]        wr_mask, pe_beta;
  logic                llr_wr;
  logic [NW-1:0]       llr_wr_addr;
  logic                is_g;

  logic [PATH_W-1:0]   ps_rd_path;
  logic [NW-1:0]       ps_rd_stage;
  logic [N/2-1:0]      ps_rd_bits;
  logic                ps_wr;

  logic                sc_bit, sc_info;
  logic                scl_extend;
  cand_t               cand0, cand1;
  cand_t               surv [L];
  logic [$clog2(L+1)-1:0] surv_cnt;
  logic                sorter_clear, sorter_push;

  logic [PM_W-1:0]     pm [L];
  logic [PATH_W-1:0]   aptr [L][NS];
  logic [PATH_W-1:0]   bptr [L][NS];
  logic [$clog2(L+1)-1:0] n_active;
  logic                pm_init, pm_apply, pm_we, a_claim, b_claim;
  logic [PM_W-1:0]     pm_val;

  logic [CRC_W-1:0]    crc_regs [L];
  logic [L-1:0]        crc_ok;
  logic                crc_clear;

  logic                tr_row, tr_rd_bit;
  logic [NLW-1:0]      tr_n, crc_cnt;
  logic [NL-1:0]       tr_bits, crc_bits;
  logic [NW-1:0]       tr_rd_leaf;
  logic [PATH_W-1:0]   tr_rd_slot, tr_rd_parent;

  channel_llr_mem #(.N(N), .Q(Q), .P(P)) u_chan (
    .clk, .wr_en(llr_we), .wr_addr(llr_addr), .wr_llr(llr_data),
    .rd_addr_a, .rd_addr_b, .rd_a(ch_a), .rd_b(ch_b));

  llr_mem #(.N(N), .Q(Q), .P(P), .L(L)) u_alpha (
    .clk, .wr_en(llr_wr), .wr_path(path), .wr_addr(llr_wr_addr), .wr_mask, .wr_data(pe_y),
    .rd_path, .rd_addr_a, .rd_addr_b, .rd_a(mem_a), .rd_b(mem_b));

  psum_mem #(.N(N), .L(L)) u_beta (
    .clk, .wr_en(ps_wr), .wr_path(path), .wr_stage(NW'(ps)), .wr_bits(ps == 0 ? (N/2)'(tr_rd_bit) : cur),
    .rd_path(ps_rd_path), .rd_stage(ps_rd_stage), .rd_bits(ps_rd_bits));

  pe_array #(.P(P), .Q(Q)) u_pe (.is_g, .a(op_a), .b(op_b), .beta(pe_beta), .y(pe_y));

  bit_decision_sc #(.Q(Q)) u_bd_sc (
    .llr(mem_a[0]), .leaf(leaf_type[leaf[NW-1:0]]), .dbit(sc_bit), .is_info(sc_info));

  bit_decision_scl #(.Q(Q)) u_bd_scl (
    .llr(mem_a[0]), .leaf(leaf_type[leaf[NW-1:0]]), .list_en(lmode), .path, .pm_in(pm[path]),
    .extend(scl_extend), .cand0, .cand1);

  path_sorter #(.L(L)) u_sort (
    .clk, .rst_n, .clear(sorter_clear), .push(sorter_push), .cand0, .cand1,
    .list(surv), .count(surv_cnt));

  path_manager #(.L(L), .NS(NS)) u_pm (
    .clk, .rst_n, .init(pm_init), .apply(pm_apply), .surv, .pm_we, .pm_path(path), .pm_val,
    .a_claim, .b_claim, .claim_path(path),
    .a_claim_stage(($clog2(NS))'(s - 1'b1)), .b_claim_stage(($clog2(NS))'(ps)),
    .pm, .aptr, .bptr, .n_active);

  crc_unit #(.L(L), .W(NL)) u_crc (
    .clk, .rst_n, .clear(crc_clear), .upd_cnt(crc_cnt), .upd_path(path), .upd_bits(crc_bits),
    .permute(pm_apply), .surv, .crc(crc_regs), .crc_ok);

  trace_mem #(.N(N), .L(L), .W(NL)) u_trace (
    .clk, .wr_n(tr_n), .wr_row(tr_row), .wr_leaf(leaf[NW-1:0]), .wr_slot(path), .wr_bits(tr_bits),
    .wr_surv(surv), .rd_leaf(tr_rd_leaf), .rd_slot(tr_rd_slot), .rd_bit(tr_rd_bit),
    .rd_parent(tr_rd_parent));

  // ---------------------------------------------------------------- helpers
  function automatic logic [SW-1:0] top_stage(input logic [NW:0] i);
    if (i == 0) return SW'(NS);
    for (int k = 0; k < NS; k++)
      if (i[k]) return SW'(k + 1);
    return SW'(NS);
  endfunction

  // beta of the parent (2^(st+1) bits) from the left (bl) and right (br) children at stage st
  function automatic logic [N/2-1:0] combine(input logic [N/2-1:0] bl, input logic [N/2-1:0] br,
                                             input logic [SW-1:0] st);
    logic [N/2-1:0] r;
    r = '0;
    for (int j = 0; j < N / 4; j++)
      if (j < (1 << st)) begin
        r[j]             = bl[j] ^ br[j];
        r[j + (1 << st)] = br[j];
      end
    return r;
  endfunction

  // ---------------------------------------------------------------- node classification
  // nd_sd: stage of the largest node (2..FM) starting at the current leaf that is decided in
  // one step, 0 when the leaf is decided alone. nd_kind: rate 0 (all leaves frozen), rate 1
  // (all decided without splitting: non-frozen in SC mode, good in list mode), and in SC
  // mode only repetition (all frozen but the last) and single parity check (only the first
  // frozen).
  typedef enum logic [1:0] {ND_R0, ND_R1, ND_REP, ND_SPC} nd_kind_t;
  logic [SW-1:0]  nd_sd;
  nd_kind_t       nd_kind;
  logic [NW:0]    nd_next;     // first leaf after this SP
  logic           last_grp;    // this SP decides leaf N-1
  logic [NL-1:0]  nd_beta, nd_u, nd_crc_bits;
  logic [NLW-1:0] nd_crc_cnt;
  logic [PM_W-1:0] nd_pen;

  logic all_f, all_1, rep, spc, fz;
  always_comb begin
    nd_sd   = '0;
    nd_kind = ND_R0;
    all_f = 1'b0;
    all_1 = 1'b0;
    rep   = 1'b0;
    spc   = 1'b0;
    fz    = 1'b0;
    for (int sd = 2; sd <= int'(FM); sd++)
      if ((int'(leaf) % (1 << sd)) == 0) begin
        all_f = 1'b1;
        all_1 = 1'b1;
        rep   = !lmode;
        spc   = !lmode;
        for (int j = 0; j < int'(NL); j++)
          if (j < (1 << sd)) begin
            fz = (leaf_type[(int'(leaf) + j) % N] == LEAF_FROZEN);
            if (!fz) all_f = 1'b0;
            if (lmode ? leaf_type[(int'(leaf) + j) % N] != LEAF_GOOD : fz) all_1 = 1'b0;
            if (fz != (j < (1 << sd) - 1)) rep = 1'b0;
            if (fz != (j == 0)) spc = 1'b0;
          end
        if (all_f || all_1 || rep || spc) begin
          nd_sd   = SW'(sd);
          nd_kind = all_f ? ND_R0 : all_1 ? ND_R1 : rep ? ND_REP : ND_SPC;
        end
      end
    nd_next  = leaf + ((NW+1)'(1) << nd_sd);
    last_grp = (nd_next == (NW+1)'(N));
  end

  // node decision on the node's LLRs alpha (lanes 0..P-1 from window a, P.. from window b):
  //  rate 0: zeros; |alpha| of every negative alpha is added to the metric (list mode);
  //  rate 1: hard decisions beta = (alpha < 0);
  //  repetition: every beta is the sign of the sum of the alphas;
  //  single parity check: hard decisions, and on odd parity the least reliable one flipped.
  // The leaf bits are u = beta F (F is its own inverse); the information bits among them
  // (all, the last, or all but the first) go to the CRC register.
  logic [Q-1:0]    nd_a, nd_mag, nd_min;
  logic [Q+4:0]    nd_sum;
  logic            nd_par;
  logic [NLW-1:0]  nd_pos;
  always_comb begin
    nd_a    = '0;
    nd_mag  = '0;
    nd_min  = '1;
    nd_sum  = '0;
    nd_par  = 1'b0;
    nd_pos  = '0;
    nd_pen  = '0;
    nd_beta = '0;
    for (int j = 0; j < int'(NL); j++) begin
      nd_a   = (j < int'(P)) ? mem_a[j % P] : mem_b[(j - int'(P)) % P];
      nd_mag = nd_a[Q-1] ? Q'(-$signed(nd_a)) : nd_a;
      if (j < (1 << nd_sd)) begin
        nd_sum  = nd_sum + (Q+5)'($signed(nd_a));
        nd_par  = nd_par ^ nd_a[Q-1];
        if (nd_mag < nd_min) begin
          nd_min = nd_mag;
          nd_pos = NLW'(j);
        end
        if (nd_kind != ND_R0) nd_beta[j] = nd_a[Q-1];
        else if (nd_a[Q-1]) nd_pen = pm_add(nd_pen, PM_W'(nd_mag));
      end
    end
    if (nd_kind == ND_REP)
      for (int j = 0; j < int'(NL); j++) nd_beta[j] = (j < (1 << nd_sd)) && nd_sum[Q+4];
    if (nd_kind == ND_SPC && nd_par) nd_beta[nd_pos % NL] = !nd_beta[nd_pos % NL];
    nd_u = nd_beta;
    for (int len = 1; len < int'(NL); len = len * 2)
      for (int j = 0; j < int'(NL); j++)
        if ((j & len) == 0) nd_u[j] = nd_u[j] ^ nd_u[j + len];
    unique case (nd_kind)
      ND_R1:   begin nd_crc_cnt = NLW'(1 << nd_sd);       nd_crc_bits = nd_u;                           end
      ND_REP:  begin nd_crc_cnt = NLW'(1);                nd_crc_bits = NL'(nd_u >> ((1 << nd_sd) - 1)); end
      ND_SPC:  begin nd_crc_cnt = NLW'((1 << nd_sd) - 1); nd_crc_bits = NL'(nd_u >> 1);                  end
      default: begin nd_crc_cnt = '0;                     nd_crc_bits = '0;                             end
    endcase
  end

  // ---------------------------------------------------------------- datapath control
  int unsigned half, base;
  logic [SW-1:0] top;
  logic          last_path, chunk_last;
  logic [N/2-1:0] bv;

  // candidate with the smallest metric among unchecked active paths
  logic [PATH_W-1:0] pick;
  logic              pick_valid;

  always_comb begin
    top        = top_stage(leaf);
    half       = (s == 0) ? 0 : (1 << (s - 1));
    base       = int'(c) * P;
    chunk_last = (base + P >= half);
    last_path  = (($clog2(L+1))'(path) + 1'b1 == n_active);
    is_g       = (leaf != 0) && (s == top);

    rd_path    = aptr[path][(s >= SW'(NS)) ? NS-1 : s];
    if (state == S_DEC) begin
      rd_path   = aptr[path][(nd_sd >= SW'(NS)) ? NS-1 : nd_sd];
      rd_addr_a = NW'(1 << nd_sd);
      rd_addr_b = NW'((1 << nd_sd) + P);
    end else if (s == SW'(NS)) begin
      rd_addr_a = NW'(base);
      rd_addr_b = NW'(half + base);
    end else begin
      rd_addr_a = NW'((1 << s) + base);
      rd_addr_b = NW'((1 << s) + half + base);
    end

    // partial sums: left sibling at stage s-1 for f+, stage ps for combining
    if (state == S_PSUM) begin
      ps_rd_path  = bptr[path][ps];
      ps_rd_stage = NW'(ps);
    end else begin
      ps_rd_path  = bptr[path][(s == 0) ? 0 : s - 1];
      ps_rd_stage = NW'((s == 0) ? 0 : s - 1);
    end
    // decision memory read: current leaf while decoding, traceback afterwards
    tr_rd_leaf = (state == S_TRACE) ? tleaf : leaf[NW-1:0];
    tr_rd_slot = (state == S_TRACE) ? tslot : path;
  end

  // operands, write enables and decision control (use the read data of the storages)
  always_comb begin
    op_a = (s == SW'(NS)) ? ch_a : mem_a;
    op_b = (s == SW'(NS)) ? ch_b : mem_b;
    for (int k = 0; k < P; k++) begin
      pe_beta[k] = (base + k < N / 2) ? ps_rd_bits[base + k] : 1'b0;
      wr_mask[k] = (base + k < half);
    end
    llr_wr      = (state == S_DESC);
    llr_wr_addr = NW'(half + base);
    a_claim     = (state == S_DESC);

    bv         = (ps == 0) ? (N/2)'(tr_rd_bit) : cur;

    // decision
    tr_n        = '0;
    tr_bits     = '0;
    sorter_push = 1'b0;
    pm_we       = 1'b0;
    pm_val      = cand0.pm;
    crc_cnt     = '0;
    crc_bits    = '0;
    if (state == S_DEC) begin
      if (nd_sd != 0) begin
        tr_n    = NLW'(1 << nd_sd);
        tr_bits = nd_u;
        pm_we   = lmode;
        pm_val  = pm_add(pm[path], nd_pen);
        crc_cnt = nd_crc_cnt;
        crc_bits = nd_crc_bits;
      end else if (!lmode) begin
        tr_n       = NLW'(1);
        tr_bits[0] = sc_bit;
      end else if (scl_extend) begin
        sorter_push = 1'b1;
      end else begin
        tr_n       = NLW'(1);
        tr_bits[0] = cand0.dbit;
        pm_we      = 1'b1;
      end
    end
    // a single information bit enters the CRC when its sums are first combined
    if (state == S_PSUM && ps == 0 && leaf_type[leaf[NW-1:0]] != LEAF_FROZEN) begin
      crc_cnt     = NLW'(1);
      crc_bits[0] = tr_rd_bit;
    end
    pm_apply = (state == S_APPLY);
    tr_row   = (state == S_APPLY);

    ps_wr      = (state == S_PSUM) && !leaf[ps] && !last_grp;
    b_claim    = ps_wr;

    pick       = '0;
    pick_valid = 1'b0;
    for (int l = 0; l < L; l++)
      if (l < int'(n_active) && !checked[l] && (!pick_valid || pm[l] < pm[pick])) begin
        pick       = PATH_W'(l);
        pick_valid = 1'b1;
      end
  end

  // ---------------------------------------------------------------- FSM
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state        <= S_IDLE;
      leaf         <= '0;
      path         <= '0;
      s            <= '0;
      c            <= '0;
      ps           <= '0;
      cur          <= '0;
      fsp          <= 1'b0;
      lmode        <= 1'b0;
      checked      <= '0;
      nchk         <= '0;
      best         <= '0;
      tleaf        <= '0;
      tslot        <= '0;
      crc_pass     <= 1'b0;
      u_hat        <= '0;
      done         <= 1'b0;
      ev_ssp       <= 1'b0;
      ev_fsp       <= 1'b0;
      ev_check     <= 1'b0;
    end else begin
      done     <= 1'b0;
      ev_ssp   <= 1'b0;
      ev_fsp   <= 1'b0;
      ev_check <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          lmode <= list_en;
          leaf  <= '0;
          path  <= '0;
          s     <= SW'(NS);
          c     <= '0;
          state <= S_DESC;
        end

        S_DESC: begin
          if (chunk_last) begin
            c <= '0;
            if (s == nd_sd + 1'b1) state <= S_DEC;
            else        s <= s - 1'b1;
          end else begin
            c <= c + 1'b1;
          end
        end

        S_DEC: begin
          fsp <= lmode && scl_extend;
          // one path in SC mode: its decisions are final and go straight to the output
          if (!lmode)
            for (int j = 0; j < int'(NL); j++)
              if (j < int'(tr_n)) u_hat[(int'(leaf) + j) % N] <= tr_bits[j];
          if (path == 0) begin
            if (lmode && scl_extend) ev_fsp <= 1'b1;
            else                     ev_ssp <= 1'b1;
          end
          if (lmode && scl_extend) begin
            if (last_path) state <= S_APPLY;
            else begin
              path  <= path + 1'b1;
              s     <= top;
              c     <= '0;
              state <= S_DESC;
            end
          end else if (nd_sd != 0) begin
            cur   <= (N/2)'(nd_beta);
            ps    <= nd_sd;
            state <= S_PSUM;
          end else begin
            ps    <= '0;
            state <= S_PSUM;
          end
        end

        S_APPLY: begin
          path  <= '0;
          ps    <= '0;
          state <= S_PSUM;
        end

        S_PSUM: begin
          if (!leaf[ps] || ps == SW'(NS - 1) || last_grp) begin
            // this path is done
            ps <= '0;
            if (!last_path) begin
              path <= path + 1'b1;
              if (!fsp) begin
                s     <= top;
                c     <= '0;
                state <= S_DESC;
              end
            end else if (last_grp) begin
              checked <= '0;
              nchk    <= '0;
              state   <= S_CHECK;
            end else begin
              leaf  <= nd_next;
              path  <= '0;
              s     <= top_stage(nd_next);
              c     <= '0;
              state <= S_DESC;
            end
          end else begin
            cur <= combine(ps_rd_bits, bv, ps);
            ps  <= ps + 1'b1;
          end
        end

        S_CHECK: begin
          if (!pick_valid || int'(nchk) == T) begin
            tslot    <= best;
            crc_pass <= 1'b0;
            tleaf    <= NW'(N - 1);
            state    <= lmode ? S_TRACE : S_DONE;
          end else begin
            ev_check <= 1'b1;
            if (nchk == 0) best <= pick;
            if (crc_ok[pick]) begin
              tslot    <= pick;
              crc_pass <= 1'b1;
              tleaf    <= NW'(N - 1);
              state    <= lmode ? S_TRACE : S_DONE;
            end else begin
              checked[pick] <= 1'b1;
              nchk          <= nchk + 1'b1;
            end
          end
        end

        S_TRACE: begin
          u_hat[tleaf] <= tr_rd_bit;
          tslot        <= tr_rd_parent;
          if (tleaf == 0) state <= S_DONE;
          else            tleaf <= tleaf - 1'b1;
        end

        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end

  assign pm_init      = (state == S_IDLE) && start;
  assign crc_clear    = pm_init;
  assign sorter_clear = pm_init || (state == S_APPLY);
  assign busy         = (state != S_IDLE);

endmodule
