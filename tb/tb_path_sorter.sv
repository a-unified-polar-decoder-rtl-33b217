// tb_path_sorter: rounds of 1..8 paths, two candidates each, pushed one path per cycle; the
// kept list must equal the first L of a stable sort of all candidates by metric. Metrics
// are drawn from a small range so that ties occur often.
module tb_path_sorter;
  import polar_pkg::*;
  localparam int L = 8;
  logic clk = 0, rst_n = 0, clear = 0, push = 0;
  cand_t cand0, cand1;
  cand_t list [L];
  logic [$clog2(L+1)-1:0] count;
  int checks = 0, failures = 0;

  path_sorter #(.L(L)) dut (.*);
  always #5 clk = ~clk;
  initial begin #5_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  cand_t all [2 * L];
  int nall, idx [2 * L];

  initial begin
    cand0 = '0; cand1 = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 500; r++) begin
      automatic int np = $urandom_range(1, L);
      automatic int range = (r % 2) ? 8 : 4000;
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      nall = 0;
      for (int p = 0; p < np; p++) begin
        cand0 = '{valid: 1'b1, parent: PATH_W'(p), dbit: 1'b0, pm: PM_W'($urandom_range(0, range))};
        cand1 = '{valid: (r % 7 != 3), parent: PATH_W'(p), dbit: 1'b1, pm: PM_W'($urandom_range(0, range))};
        all[nall++] = cand0;
        if (cand1.valid) all[nall++] = cand1;
        push = 1; @(negedge clk); push = 0;
      end
      for (int c = 0; c < nall; c++) idx[c] = c;
      for (int c = 1; c < nall; c++)
        for (int d = c; d > 0 && all[idx[d-1]].pm > all[idx[d]].pm; d--) begin
          automatic int t = idx[d]; idx[d] = idx[d-1]; idx[d-1] = t;
        end
      checks++;
      if (int'(count) != ((nall < L) ? nall : L)) failures++;
      for (int k = 0; k < L; k++) begin
        checks++;
        if (k < nall) begin
          if (list[k] != all[idx[k]]) begin
            failures++;
            if (failures < 5) begin $display("FAIL round %0d slot %0d", r, k); for (int z = 0; z < nall; z++) $display("  in %0d: p%0d b%0d pm%0d   sorted %0d: p%0d b%0d pm%0d hw p%0d b%0d pm%0d v%0d", z, all[z].parent, all[z].dbit, all[z].pm, z, all[idx[z]].parent, all[idx[z]].dbit, all[idx[z]].pm, list[z%L].parent, list[z%L].dbit, list[z%L].pm, list[z%L].valid); end
          end
        end else if (list[k].valid) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
