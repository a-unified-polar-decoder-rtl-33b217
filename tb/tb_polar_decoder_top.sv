// tb_polar_decoder_top: end-to-end test of the adaptive decoder at its default size
// (N = 256, K = 128 including an 11-bit CRC, 16 good bits, 6-bit LLRs, list of 8, 8 CRC checks).
//
// Each packet is a random message with CRC, polar-encoded, sent as BPSK over AWGN and
// quantised. It is decoded by the hardware and by the reference model of polar_ref_pkg;
// the decoded word, the CRC flag and whether the list pass ran must agree bit for bit.
// Packets run in adaptive mode at several Es/N0 values, plus some in SC-only and SCL-only
// mode. The SC latency is checked against the cycle schedule of the core, which includes
// the nodes of stage 2..4 decided in one step. Every mechanism
// (simplified and full sub-processes, adaptive switch to SCL, SC success, several CRC
// checks in one decode, CRC failure after all checks) must occur at least once.
module tb_polar_decoder_top;
  import polar_pkg::*;
  import polar_ref_pkg::*;

  localparam int N = 256, K = 128, G = 16, Q = 6, L = 8, T = 8, P = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic llr_we = 1'b0, start = 1'b0;
  logic [7:0] llr_addr = '0;
  logic [Q-1:0] llr_data = '0;
  leaf_t leaf_type [N];
  dec_mode_t mode = MODE_ADAPTIVE;
  logic busy, done, crc_pass, used_scl, ev_ssp, ev_fsp, ev_check;
  logic [N-1:0] u_hat;

  polar_decoder_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_ssp = 0, n_fsp = 0, n_check = 0, n_switch = 0, n_sc_ok = 0, n_multi = 0, n_fail = 0;
  int n_correct = 0;
  int chk_this = 0;
  longint cyc = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (ev_ssp) n_ssp++;
    if (ev_fsp) n_fsp++;
    if (ev_check) begin n_check++; chk_this++; end
  end

  initial begin
    #(10 * 3_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // SC latency of the core schedule: per leaf the edge traversal, one decision cycle and
  // the partial-sum cycles; then CRC check cycles, traceback, done; plus the three handshake
  // cycles of the controller.
  leaf_t lt [NMAX];

  function automatic int sc_cycles(input bit pass);
    int tot = 0, top, ps, sd, i = 0;
    int kind;
    while (i < N) begin
      sd  = node_stage(N, i, lt, 0, FAST_DEF, kind);
      top = 8;
      if (i != 0) for (int k = 0; k < 8; k++) if (i[k]) begin top = k + 1; break; end
      for (int s = sd + 1; s <= top; s++) tot += ((1 << (s - 1)) + P - 1) / P;
      tot += 1;
      ps = sd;
      while (ps < 8 && i[ps]) ps++;
      tot += (i + (1 << sd) == N) ? 1 : ps - sd + 1;
      i += 1 << sd;
    end
    tot += pass ? 1 : 2;   // CRC check
    tot += 1;              // done (SC writes the word directly, no traceback)
    return tot + 3;        // controller start, core start, controller done
  endfunction

  task automatic decode(input dec_mode_t m, input int llr [NMAX], output int cycles);
    longint t0;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      llr_we = 1'b1; llr_addr = 8'(i); llr_data = Q'(llr[i]);
    end
    @(negedge clk);
    llr_we = 1'b0; mode = m; start = 1'b1; chk_this = 0;
    t0 = cyc;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    cycles = int'(cyc - t0);
  endtask

  bit u [NMAX], x [NMAX], ru [NMAX], su [NMAX];
  int llr [NMAX];
  bit rpass, spass;
  int cycles;
  real snr [6] = '{3.0, 2.5, 2.0, 1.5, 1.0, 0.5};

  task automatic one_packet(input dec_mode_t m, input real es_n0);
    bit exp_scl, exp_pass, match, right;
    make_word(N, K, lt, u);
    encode(N, u, x);
    channel(N, x, es_n0, Q, llr);
    ref_decode(N, Q, 1, T, FAST_DEF, llr, lt, su, spass);
    exp_scl = (m == MODE_SCL) || (m == MODE_ADAPTIVE && !spass);
    if (exp_scl) ref_decode(N, Q, L, T, FAST_DEF, llr, lt, ru, rpass);
    else begin ru = su; rpass = spass; end
    decode(m, llr, cycles);
    match = 1'b1; right = 1'b1;
    for (int i = 0; i < N; i++) begin
      if (u_hat[i] != ru[i]) match = 1'b0;
      if (u_hat[i] != u[i]) right = 1'b0;
    end
    check(match, $sformatf("decoded word differs from reference (mode %0d, %0.1f dB)", m, es_n0));
    check(crc_pass == rpass, "CRC flag differs from reference");
    check(used_scl == exp_scl, "list pass ran when it should not, or not when it should");
    if (m == MODE_SC) check(cycles == sc_cycles(rpass), $sformatf("SC latency %0d, schedule says %0d", cycles, sc_cycles(rpass)));
    if (m == MODE_ADAPTIVE && used_scl) n_switch++;
    if (m == MODE_ADAPTIVE && !used_scl && crc_pass) n_sc_ok++;
    if (chk_this > 1) n_multi++;
    if (!crc_pass) n_fail++;
    if (right) n_correct++;
    $display("mode %0d Es/N0 %0.1f dB: crc_pass=%0d scl=%0d checks=%0d cycles=%0d correct=%0d",
             m, es_n0, crc_pass, used_scl, chk_this, cycles, right);
  endtask

  initial begin
    build_code(N, K, G, lt);
    for (int i = 0; i < N; i++) leaf_type[i] = lt[i];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    one_packet(MODE_SC, 3.0);
    one_packet(MODE_SC, 1.0);
    one_packet(MODE_SCL, 1.0);
    one_packet(MODE_SCL, 0.5);
    foreach (snr[k]) repeat (3) one_packet(MODE_ADAPTIVE, snr[k]);
    begin
      // node kinds of this code in each mode (the SC latency check shows they are taken)
      automatic int nk [2][4] = '{'{0, 0, 0, 0}, '{0, 0, 0, 0}};
      for (int lm = 0; lm < 2; lm++) begin
        automatic int i = 0, sd, kind;
        while (i < N) begin
          sd = node_stage(N, i, lt, lm, FAST_DEF, kind);
          if (sd > 0) nk[lm][kind]++;
          i += 1 << sd;
        end
      end
      check(nk[0][ND_R0] > 0 && nk[0][ND_R1] > 0 && nk[0][ND_REP] > 0 && nk[0][ND_SPC] > 0,
            "SC mode lacks a node kind");
      check(nk[1][ND_R0] > 0 && nk[1][ND_R1] > 0, "list mode lacks an all-frozen or all-good node");
      $display("nodes SC: rate-0 %0d rate-1 %0d repetition %0d parity %0d; list: all-frozen %0d all-good %0d",
               nk[0][0], nk[0][1], nk[0][2], nk[0][3], nk[1][0], nk[1][1]);
    end
    check(n_ssp > 0, "no simplified sub-process");
    check(n_fsp > 0, "no full sub-process");
    check(n_switch > 0, "adaptive decoder never switched to SCL");
    check(n_sc_ok > 0, "adaptive decoder never finished after SC");
    check(n_multi > 0, "never more than one CRC check in a decode");
    check(n_fail > 0, "CRC never failed after all checks");
    $display("events: ssp=%0d fsp=%0d crc_checks=%0d switch=%0d sc_ok=%0d multi_check=%0d crc_fail=%0d correct=%0d",
             n_ssp, n_fsp, n_check, n_switch, n_sc_ok, n_multi, n_fail, n_correct);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
