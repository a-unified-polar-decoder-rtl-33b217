// trace_mem: decision memory for the final output of the list decoder.
//
// For every leaf i and path slot k it records the bit decided there and the slot of the
// path it extended (its parent at that leaf). A simplified sub-process writes one entry per
// path (parent = itself), for up to W consecutive leaves at once when a whole node is
// decided; applying the sorter's survivors writes a whole row. At the end the decoded word
// of any slot is read back by following parents from leaf N-1 to leaf 0, so decided bits
// never have to be copied between paths. This storage is not described in the
// paper and is this design's way to deliver the decoded bits. Asynchronous read.
module trace_mem
  import polar_pkg::*;
#(
  parameter int unsigned N = 256,
  parameter int unsigned L = 8,
  parameter int unsigned W = 16    // leaves written at once by one path
) (
  input  logic                   clk,
  input  logic [$clog2(W+1)-1:0] wr_n,      // leaves written for wr_slot (0: none)
  input  logic                   wr_row,
  input  logic [$clog2(N)-1:0]   wr_leaf,
  input  logic [PATH_W-1:0]      wr_slot,
  input  logic [W-1:0]           wr_bits,   // bit of leaf wr_leaf + j in bit j
  input  cand_t                  wr_surv [L],
  input  logic [$clog2(N)-1:0]   rd_leaf,
  input  logic [PATH_W-1:0]      rd_slot,
  output logic                   rd_bit,
  output logic [PATH_W-1:0]      rd_parent
);

  logic              dbit   [N][L];
  logic [PATH_W-1:0] parent [N][L];

  always_ff @(posedge clk)
    if (wr_row) begin
      for (int k = 0; k < L; k++)
        if (wr_surv[k].valid) begin
          dbit[wr_leaf][k]   <= wr_surv[k].dbit;
          parent[wr_leaf][k] <= wr_surv[k].parent;
        end
    end else begin
      for (int j = 0; j < W; j++)
        if (j < int'(wr_n) && int'(wr_leaf) + j < N) begin
          dbit[int'(wr_leaf) + j][wr_slot]   <= wr_bits[j];
          parent[int'(wr_leaf) + j][wr_slot] <= wr_slot;
        end
    end

  assign rd_bit    = dbit[rd_leaf][rd_slot];
  assign rd_parent = parent[rd_leaf][rd_slot];

endmodule
