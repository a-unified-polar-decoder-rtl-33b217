// path_manager: path metrics and storage indices of the list paths (PM/indices management
// and storage indices management).
//
// For every path slot l it keeps the path metric pm[l] and, for every stage s < n, the slot
// whose LLR region (aptr[l][s]) and partial-sum region (bptr[l][s]) hold that path's data.
// Paths are therefore never copied: when the sorter's survivors are applied, survivor k
// takes slot k, inherits the metric it was sorted with and a copy of its parent's index
// tables, and data move only by index. Whenever a path writes a stage, the writer claims
// that stage (a_claim / b_claim), so the index then points to its own slot. Because all paths
// of the list are at the same tree position, a stage that one path overwrites is never still
// needed by another path through a shared index. The index switching after sorting follows
// the paper; keeping one index per stage (lazy copy) is this design's choice.
// Operations, one per cycle, in priority order: init (one path, metric 0, identity indices),
// apply, then pm_we, a_claim and b_claim, which may come together.
module path_manager
  import polar_pkg::*;
#(
  parameter int unsigned L  = 8,
  parameter int unsigned NS = 8     // stages with stored data (n)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    init,
  input  logic                    apply,
  input  cand_t                   surv [L],
  input  logic                    pm_we,
  input  logic [PATH_W-1:0]       pm_path,
  input  logic [PM_W-1:0]         pm_val,
  input  logic                    a_claim,
  input  logic                    b_claim,
  input  logic [PATH_W-1:0]       claim_path,
  input  logic [$clog2(NS)-1:0]   a_claim_stage,
  input  logic [$clog2(NS)-1:0]   b_claim_stage,
  output logic [PM_W-1:0]         pm    [L],
  output logic [PATH_W-1:0]       aptr  [L][NS],
  output logic [PATH_W-1:0]       bptr  [L][NS],
  output logic [$clog2(L+1)-1:0]  n_active
);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      n_active <= 1;
      for (int l = 0; l < L; l++) begin
        pm[l] <= '0;
        for (int s = 0; s < NS; s++) begin
          aptr[l][s] <= PATH_W'(l);
          bptr[l][s] <= PATH_W'(l);
        end
      end
    end else if (init) begin
      n_active <= 1;
      for (int l = 0; l < L; l++) begin
        pm[l] <= '0;
        for (int s = 0; s < NS; s++) begin
          aptr[l][s] <= PATH_W'(l);
          bptr[l][s] <= PATH_W'(l);
        end
      end
    end else if (apply) begin
      n_active <= '0;
      for (int k = 0; k < L; k++)
        if (surv[k].valid) begin
          n_active <= ($clog2(L+1))'(k + 1);
          pm[k]    <= surv[k].pm;
          for (int s = 0; s < NS; s++) begin
            aptr[k][s] <= aptr[surv[k].parent][s];
            bptr[k][s] <= bptr[surv[k].parent][s];
          end
        end
    end else begin
      if (pm_we) pm[pm_path] <= pm_val;
      if (a_claim) aptr[claim_path][a_claim_stage] <= claim_path;
      if (b_claim) bptr[claim_path][b_claim_stage] <= claim_path;
    end

endmodule
