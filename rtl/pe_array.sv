// pe_array: the processing elements (PEs) that compute the LLRs of a child node.
//
// Each of the P lanes takes the pair (a, b) = (alpha_v[i], alpha_v[i + 2^(s-1)]) of a node
// at stage s and returns one LLR of a child:
//   f- (is_g = 0): left child,  sign(a) * sign(b) * min(|a|, |b|)   (min-sum box-plus)
//   f+ (is_g = 1): right child, (-1)^beta * a + b
// where beta is the partial sum of the left child. Results saturate to the symmetric range
// [-(2^(Q-1)-1), 2^(Q-1)-1]. The equations follow the paper; the min-sum approximation of
// the box-plus and the saturation are this design's choices. Purely combinational.
module pe_array #(
  parameter int unsigned P = 8,   // number of PEs
  parameter int unsigned Q = 6    // LLR width
) (
  input  logic                 is_g,  // 0: f-, 1: f+
  input  logic [P-1:0][Q-1:0]  a,     // alpha_v[i]
  input  logic [P-1:0][Q-1:0]  b,     // alpha_v[i + 2^(s-1)]
  input  logic [P-1:0]         beta,  // partial sums of the left child (f+ only)
  output logic [P-1:0][Q-1:0]  y
);

  localparam int signed MAXV = 2 ** (Q - 1) - 1;

  function automatic logic [Q-1:0] sat(input logic signed [Q+1:0] v);
    if (v > MAXV) return Q'(MAXV);
    if (v < -MAXV) return Q'(-MAXV);
    return v[Q-1:0];
  endfunction

  always_comb begin
    for (int k = 0; k < P; k++) begin
      logic signed [Q+1:0] sa, sb, ma, mb, mn;
      sa = (Q+2)'($signed(a[k]));
      sb = (Q+2)'($signed(b[k]));
      ma = sa < 0 ? -sa : sa;
      mb = sb < 0 ? -sb : sb;
      mn = ma < mb ? ma : mb;
      if (is_g)
        y[k] = sat(beta[k] ? sb - sa : sb + sa);
      else
        y[k] = sat((a[k][Q-1] ^ b[k][Q-1]) ? -mn : mn);
    end
  end

endmodule
