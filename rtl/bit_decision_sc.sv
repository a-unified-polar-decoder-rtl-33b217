// bit_decision_sc: leaf bit decision of the SC decoder.
//
// A frozen leaf returns 0. An information leaf (INFO or GOOD) returns the hard decision of
// its LLR: 1 when the LLR is negative, 0 otherwise (an LLR of 0 decides 0). The module also
// reports whether the decision is an information bit, which the CRC consumes. The paper
// describes an SC bit-decision module that also decides whole subtrees (rate-1, SPC, REP,
// SPC2, REP2, PCR, RPC nodes at stages 2..4); this module decides single leaves only.
// Combinational.
module bit_decision_sc
  import polar_pkg::*;
#(
  parameter int unsigned Q = 6
) (
  input  logic [Q-1:0] llr,
  input  leaf_t        leaf,
  output logic         dbit,
  output logic         is_info
);

  always_comb begin
    is_info = (leaf != LEAF_FROZEN);
    dbit    = is_info ? llr[Q-1] : 1'b0;
  end

endmodule
