// bit_decision_scl: leaf bit decision and path-metric update of the list decoder.
//
// For the LLR of a leaf and the metric pm_in of the path that reached it:
//   FROZEN leaf: the bit is 0; the metric grows by |llr| if the LLR says 1 (llr < 0).
//   GOOD leaf:   the bit is the hard decision; the metric is unchanged (no extension).
//   INFO leaf:   the path is extended into two candidates. cand0 takes the hard decision
//                with the unchanged metric, cand1 the other bit with the metric plus |llr|.
// extend is 1 for an INFO leaf when list decoding is on (list_en); then both candidates go
// to the sorter (full sub-process). Otherwise only cand0 is valid and carries the single
// decision (simplified sub-process); with list_en = 0 an INFO leaf is decided like a GOOD
// one. This is the LLR-based path metric of SCL decoding with the "good bit" rule of the
// paper; the saturating metric is this design's choice. Combinational.
module bit_decision_scl
  import polar_pkg::*;
#(
  parameter int unsigned Q = 6
) (
  input  logic [Q-1:0]       llr,
  input  leaf_t              leaf,
  input  logic               list_en,
  input  logic [PATH_W-1:0]  path,
  input  logic [PM_W-1:0]    pm_in,
  output logic               extend,
  output cand_t              cand0,
  output cand_t              cand1
);

  logic              hard;
  logic [PM_W-1:0]   mag;

  always_comb begin
    hard = llr[Q-1];
    mag  = PM_W'(hard ? -$signed(llr) : $signed(llr));
    extend = list_en && (leaf == LEAF_INFO);

    cand0        = '0;
    cand0.valid  = 1'b1;
    cand0.parent = path;
    cand1        = '0;
    cand1.parent = path;

    if (leaf == LEAF_FROZEN) begin
      cand0.dbit = 1'b0;
      cand0.pm   = hard ? pm_add(pm_in, mag) : pm_in;
    end else begin
      cand0.dbit = hard;
      cand0.pm   = pm_in;
      if (extend) begin
        cand1.valid = 1'b1;
        cand1.dbit  = ~hard;
        cand1.pm    = pm_add(pm_in, mag);
      end
    end
  end

endmodule
