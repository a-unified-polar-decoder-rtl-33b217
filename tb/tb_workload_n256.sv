// tb_workload_n256: the evaluation workload of the decoder at its default size. It decodes
// 200 packets of the rate-1/2 code of length 256 (K = 128 including the 11-bit CRC, 16 good
// bits) at each Es/N0 of 0.5, 1.0, ..., 3.0 dB in adaptive mode, as in the energy and
// latency evaluation the design was made for.
//
// Every packet is checked bit for bit against the reference model (word, CRC flag, whether
// the list pass ran). Per Es/N0 it reports the block error rate of plain SC (from the
// adaptive decoder's first pass, i.e. the reference SC result), of SCL8T8 alone (reference
// only), and of the adaptive decoder, the share of packets that ended after the SC pass and
// the average latency in cycles. It checks the trends the design relies on: the adaptive
// decoder never has more block errors than SC, SC errors fall from the lowest to the
// highest Es/N0, and the average latency at 3 dB is far below the one at 0.5 dB because
// most packets stop after SC. Packet count and Es/N0 points follow the original
// evaluation; the pass/fail trend checks are this testbench's choice. Watchdog: 20 million
// cycles.
module tb_workload_n256;
  import polar_pkg::*;
  import polar_ref_pkg::*;

  localparam int N = 256, K = 128, G = 16, Q = 6, L = 8, T = 8, NPKT = 200;

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
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #(10 * 20_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  leaf_t lt [NMAX];
  bit u [NMAX], x [NMAX], su [NMAX], lu [NMAX];
  int llr [NMAX];
  real snr [6] = '{0.5, 1.0, 1.5, 2.0, 2.5, 3.0};
  int err_sc [6], err_scl [6], err_ad [6], sc_only [6];
  longint lat [6];

  initial begin
    build_code(N, K, G, lt);
    for (int i = 0; i < N; i++) leaf_type[i] = lt[i];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    foreach (snr[k]) begin
      err_sc[k] = 0; err_scl[k] = 0; err_ad[k] = 0; sc_only[k] = 0; lat[k] = 0;
      for (int p = 0; p < NPKT; p++) begin
        automatic bit spass, lpass, e_sc = 0, e_scl = 0, e_ad = 0, match = 1;
        automatic longint t0;
        make_word(N, K, lt, u);
        encode(N, u, x);
        channel(N, x, snr[k], Q, llr);
        ref_decode(N, Q, 1, T, FAST_DEF, llr, lt, su, spass);
        ref_decode(N, Q, L, T, FAST_DEF, llr, lt, lu, lpass);
        for (int i = 0; i < N; i++) begin
          if (su[i] != u[i]) e_sc = 1;
          if (lu[i] != u[i]) e_scl = 1;
        end
        for (int i = 0; i < N; i++) begin
          @(negedge clk);
          llr_we = 1'b1; llr_addr = 8'(i); llr_data = Q'(llr[i]);
        end
        @(negedge clk);
        llr_we = 1'b0; start = 1'b1;
        t0 = cyc;
        @(negedge clk);
        start = 1'b0;
        while (!done) @(negedge clk);
        lat[k] += cyc - t0;
        for (int i = 0; i < N; i++) begin
          if (u_hat[i] != (spass ? su[i] : lu[i])) match = 0;
          if (u_hat[i] != u[i]) e_ad = 1;
        end
        check(match, $sformatf("%0.1f dB packet %0d: word differs from reference", snr[k], p));
        check(crc_pass == (spass ? 1'b1 : lpass), "CRC flag differs from reference");
        check(used_scl == !spass, "list pass ran when it should not, or not when it should");
        err_sc[k] += e_sc; err_scl[k] += e_scl; err_ad[k] += e_ad;
        if (!used_scl) sc_only[k]++;
      end
      check(err_ad[k] <= err_sc[k], $sformatf("%0.1f dB: adaptive has more block errors than SC", snr[k]));
      $display("Es/N0 %0.1f dB: BLER SC %0.3f  SCL8T8 %0.3f  adaptive %0.3f  SC only %0d of %0d  avg latency %0d cycles",
               snr[k], real'(err_sc[k]) / NPKT, real'(err_scl[k]) / NPKT, real'(err_ad[k]) / NPKT,
               sc_only[k], NPKT, lat[k] / NPKT);
    end
    check(err_sc[5] < err_sc[0], "SC block errors do not fall with Es/N0");
    check(lat[5] * 2 < lat[0], "adaptive latency does not fall with Es/N0");
    check(sc_only[5] > NPKT / 2, "most packets at 3 dB should end after the SC pass");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
