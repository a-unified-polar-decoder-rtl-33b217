// tb_crc_unit: shifts random messages with their CRC (computed by long division in the
// reference package) into random path registers, in random groups of 1 to W bits per
// cycle, checks crc_ok, and checks that a survivor permutation moves the registers to the
// right slots.
module tb_crc_unit;
  import polar_pkg::*;
  import polar_ref_pkg::*;
  localparam int L = 8, W = 16;
  logic clk = 0, rst_n = 0, clear = 0, permute = 0;
  logic [$clog2(W+1)-1:0] upd_cnt = '0;
  logic [W-1:0] upd_bits = '0;
  logic [PATH_W-1:0] upd_path = '0;
  cand_t surv [L];
  logic [CRC_W-1:0] crc [L];
  logic [L-1:0] crc_ok;
  int checks = 0, failures = 0;

  crc_unit #(.L(L), .W(W)) dut (.*);
  always #5 clk = ~clk;
  initial begin #20_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  bit msg [NMAX];
  logic [CRC_W-1:0] rem;
  bit good [L];
  logic [CRC_W-1:0] prev [L];

  initial begin
    for (int k = 0; k < L; k++) surv[k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 40; r++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      // each path gets its own message; odd paths get one corrupted bit
      for (int l = 0; l < L; l++) begin
        automatic int len = $urandom_range(20, 117);
        for (int i = 0; i < len; i++) msg[i] = 1'($urandom);
        rem = crc_div(msg, len);
        for (int j = 0; j < CRC_W; j++) msg[len + j] = rem[CRC_W - 1 - j];
        good[l] = (l % 2 == 0) || (r % 5 == 0);
        if (!good[l]) msg[$urandom_range(0, len + CRC_W - 1)] ^= 1'b1;
        for (int i = 0; i < len + CRC_W; ) begin
          automatic int g = $urandom_range(1, W);
          if (g > len + CRC_W - i) g = len + CRC_W - i;
          @(negedge clk); upd_cnt = g; upd_path = PATH_W'(l);
          upd_bits = W'($urandom);      // bits beyond the count must be ignored
          for (int j = 0; j < g; j++) upd_bits[j] = msg[i + j];
          i += g;
        end
        @(negedge clk); upd_cnt = 0;
      end
      for (int l = 0; l < L; l++) begin checks++; if (crc_ok[l] != good[l]) failures++; end
      prev = crc;
      for (int k = 0; k < L; k++) surv[k] = '{valid: 1'($urandom), parent: PATH_W'($urandom), dbit: 1'b0, pm: '0};
      @(negedge clk); permute = 1; @(negedge clk); permute = 0;
      for (int k = 0; k < L; k++) begin
        checks++;
        if (crc[k] != (surv[k].valid ? prev[surv[k].parent] : prev[k])) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
