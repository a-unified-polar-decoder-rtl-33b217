// path_sorter: serial sorter that keeps the best L of the extended paths of a full
// sub-process, together with its temporary storage.
//
// The list paths are processed one after another, so the sorter receives the two
// candidates of one path per push. It keeps up to L candidates in a register list ordered
// by increasing path metric (the "temp storage"); each push inserts the two new candidates
// into that list in one cycle (the intermediate result is fed back) and drops whatever falls
// past position L. clear empties the list before the first path ("from first list").
// After the last push, list[0..count-1] are the survivors, best first, and are handed to the
// path manager. Ties keep arrival order, cand0 before cand1. The serial sorting with a
// feedback through temp storage follows the paper; the insertion method is this design's.
module path_sorter
  import polar_pkg::*;
#(
  parameter int unsigned L = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   push,
  input  cand_t                  cand0,
  input  cand_t                  cand1,
  output cand_t                  list  [L],
  output logic [$clog2(L+1)-1:0] count
);

  cand_t stage1 [L];
  cand_t stage2 [L];

  // Insert c into the sorted list src (valid entries first) and write the result to dst.
  function automatic void insert(input cand_t src [L], input cand_t c, output cand_t dst [L]);
    int pos;
    pos = 0;
    for (int k = 0; k < L; k++)
      if (src[k].valid && src[k].pm <= c.pm) pos = k + 1;
    for (int k = 0; k < L; k++) begin
      if (!c.valid || k < pos) dst[k] = src[k];
      else if (k == pos)       dst[k] = c;
      else                     dst[k] = src[k-1];
    end
  endfunction

  always_comb begin
    insert(list, cand0, stage1);
    insert(stage1, cand1, stage2);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int k = 0; k < L; k++) list[k] <= '0;
    end else if (clear) begin
      for (int k = 0; k < L; k++) list[k] <= '0;
    end else if (push) begin
      list <= stage2;
    end

  always_comb begin
    count = '0;
    for (int k = 0; k < L; k++)
      if (list[k].valid) count = count + 1'b1;
  end

endmodule
