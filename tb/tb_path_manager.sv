// tb_path_manager: random sequences of index claims, metric writes and survivor applications
// (random parents, 1..L survivors) against a model of the index tables and metrics.
module tb_path_manager;
  import polar_pkg::*;
  localparam int L = 8, NS = 8;
  logic clk = 0, rst_n = 0, init = 0, apply = 0, pm_we = 0, a_claim = 0, b_claim = 0;
  cand_t surv [L];
  logic [PATH_W-1:0] pm_path, claim_path;
  logic [PM_W-1:0] pm_val;
  logic [2:0] a_claim_stage, b_claim_stage;
  logic [PM_W-1:0] pm [L];
  logic [PATH_W-1:0] aptr [L][NS], bptr [L][NS];
  logic [$clog2(L+1)-1:0] n_active;
  int checks = 0, failures = 0;

  path_manager #(.L(L), .NS(NS)) dut (.*);
  always #5 clk = ~clk;
  initial begin #5_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  int mpm [L], ma [L][NS], mb [L][NS], mact;

  task automatic compare(input string what);
    checks++;
    if (int'(n_active) != mact) begin failures++; $display("FAIL %s n_active", what); end
    for (int l = 0; l < L; l++) begin
      checks++;
      if (int'(pm[l]) != mpm[l]) failures++;
      for (int s = 0; s < NS; s++) begin
        checks += 2;
        if (int'(aptr[l][s]) != ma[l][s]) failures++;
        if (int'(bptr[l][s]) != mb[l][s]) failures++;
      end
    end
  endtask

  task automatic model_init();
    mact = 1;
    for (int l = 0; l < L; l++) begin mpm[l] = 0; for (int s = 0; s < NS; s++) begin ma[l][s] = l; mb[l][s] = l; end end
  endtask

  initial begin
    for (int k = 0; k < L; k++) surv[k] = '0;
    pm_path = 0; claim_path = 0; pm_val = 0; a_claim_stage = 0; b_claim_stage = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    model_init();
    @(negedge clk); compare("reset");
    for (int n = 0; n < 3000; n++) begin
      automatic int op = $urandom_range(0, 9);
      if (op == 0) begin
        init = 1; model_init();
      end else if (op <= 2) begin
        automatic int ns = $urandom_range(1, L);
        int oa [L][NS], ob [L][NS];
        oa = ma; ob = mb;
        for (int k = 0; k < L; k++) begin
          surv[k] = '{valid: (k < ns), parent: PATH_W'($urandom_range(0, L - 1)), dbit: 1'($urandom), pm: PM_W'($urandom)};
          if (k < ns) begin
            mpm[k] = int'(surv[k].pm);
            for (int s = 0; s < NS; s++) begin ma[k][s] = oa[surv[k].parent][s]; mb[k][s] = ob[surv[k].parent][s]; end
          end
        end
        mact = ns;
        apply = 1;
      end else begin
        pm_we = 1'($urandom); a_claim = 1'($urandom); b_claim = 1'($urandom);
        pm_path = PATH_W'($urandom); claim_path = PATH_W'($urandom);
        pm_val = PM_W'($urandom); a_claim_stage = 3'($urandom); b_claim_stage = 3'($urandom);
        if (pm_we) mpm[pm_path] = int'(pm_val);
        if (a_claim) ma[claim_path][a_claim_stage] = int'(claim_path);
        if (b_claim) mb[claim_path][b_claim_stage] = int'(claim_path);
      end
      @(negedge clk);
      init = 0; apply = 0; pm_we = 0; a_claim = 0; b_claim = 0;
      compare($sformatf("op %0d step %0d", op, n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
