// tb_polar_core: the core alone at a reduced size (N = 64, K = 32 with CRC, 4 good bits,
// list of 4, 2 CRC checks, 4 PEs, nodes up to stage 3 decided whole), in SC and in list
// mode, on random noisy packets. The decoded word and CRC flag must equal the reference
// model bit for bit; the number of simplified and full sub-processes per decode must match
// the code (one per node or single leaf, full ones on the information leaves in list
// mode); rate-0 nodes must occur, and in SC mode rate-1, repetition and parity nodes too
// (this small code has no all-good node for list mode; the full-size test covers it); the
// number of CRC checks must respect T.
module tb_polar_core;
  import polar_pkg::*;
  import polar_ref_pkg::*;
  localparam int N = 64, K = 32, G = 4, Q = 6, L = 4, T = 2, P = 4, FAST = 3;

  logic clk = 0, rst_n = 0, llr_we = 0, start = 0, list_en = 0;
  logic [5:0] llr_addr = '0;
  logic [Q-1:0] llr_data = '0;
  leaf_t leaf_type [N];
  logic busy, done, crc_pass, ev_ssp, ev_fsp, ev_check;
  logic [N-1:0] u_hat;
  int checks = 0, failures = 0;
  int n_ssp, n_fsp, n_chk;

  polar_core #(.N(N), .Q(Q), .L(L), .T(T), .P(P), .FAST(FAST)) dut (.*);
  always #5 clk = ~clk;
  initial begin #50_000_000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(posedge clk) begin
    if (ev_ssp) n_ssp++;
    if (ev_fsp) n_fsp++;
    if (ev_check) n_chk++;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  leaf_t lt [NMAX];
  bit u [NMAX], x [NMAX], ru [NMAX];
  int llr [NMAX];
  bit rpass;
  int n_info, n_ok, n_pass;

  initial begin
    build_code(N, K, G, lt);
    n_info = 0;
    for (int i = 0; i < N; i++) begin leaf_type[i] = lt[i]; if (lt[i] == LEAF_INFO) n_info++; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    n_ok = 0; n_pass = 0;
    for (int pkt = 0; pkt < 120; pkt++) begin
      automatic bit lm = pkt % 2;
      automatic real snr = 0.0 + 0.5 * (pkt % 8);
      make_word(N, K, lt, u);
      encode(N, u, x);
      channel(N, x, snr, Q, llr);
      ref_decode(N, Q, lm ? L : 1, T, FAST, llr, lt, ru, rpass);
      for (int i = 0; i < N; i++) begin
        @(negedge clk); llr_we = 1; llr_addr = 6'(i); llr_data = Q'(llr[i]);
      end
      @(negedge clk); llr_we = 0; list_en = lm; start = 1;
      n_ssp = 0; n_fsp = 0; n_chk = 0;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      begin
        automatic bit m = 1;
        for (int i = 0; i < N; i++) if (u_hat[i] != ru[i]) m = 0;
        chk(m, $sformatf("packet %0d list %0d: word differs from reference", pkt, lm));
        if (m && rpass) n_ok++;
      end
      chk(crc_pass == rpass, "crc flag");
      begin
        automatic int nsp = 0, i = 0, sd;
        automatic int kind;
        automatic int nkind [4] = '{0, 0, 0, 0};
        while (i < N) begin
          sd = node_stage(N, i, lt, lm, FAST, kind);
          nsp++;
          if (sd > 0) nkind[kind]++;
          i += 1 << sd;
        end
        // every node kind of the mode must occur in this code
        chk(nkind[ND_R0] > 0, "no rate-0 node");
        if (!lm) chk(nkind[ND_R1] > 0 && nkind[ND_REP] > 0 && nkind[ND_SPC] > 0,
                     "no rate-1, repetition or parity node in SC mode");
        if (pkt == 0)
          $display("SC nodes: rate-0 %0d, rate-1 %0d, repetition %0d, parity %0d, SPs %0d",
                   nkind[ND_R0], nkind[ND_R1], nkind[ND_REP], nkind[ND_SPC], nsp);
        chk(n_fsp == (lm ? n_info : 0), $sformatf("full sub-processes %0d", n_fsp));
        chk(n_ssp == nsp - n_fsp, $sformatf("simplified sub-processes %0d, expected %0d", n_ssp, nsp - n_fsp));
      end
      chk(n_chk >= 1 && n_chk <= (lm ? T : 1), $sformatf("CRC checks %0d", n_chk));
      if (crc_pass) n_pass++;
    end
    chk(n_pass > 0 && n_pass < 120, "CRC outcome never varied");
    $display("packets with CRC pass: %0d of 120", n_pass);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
