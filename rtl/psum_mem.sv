// psum_mem: partial-sum (beta) storage, one region per list path.
//
// For every stage s = 0 .. n-2 a path keeps the 2^s partial sums of the last completed
// left child at that stage, at bit addresses 2^s .. 2^(s+1)-1 of its row. They are needed
// twice: by f+ when the right sibling is computed, and by the combination
// beta_v = (beta_l xor beta_r, beta_r) when the right sibling has returned. A write stores a
// whole stage of one path in one cycle; the read port returns a whole stage of one path,
// right-aligned. The paper gives the stage-wise organisation per path; the one-cycle
// whole-stage access and the register implementation are this design's choices.
module psum_mem #(
  parameter int unsigned N = 256,
  parameter int unsigned L = 8
) (
  input  logic                       clk,
  input  logic                       wr_en,
  input  logic [$clog2(L)-1:0]       wr_path,
  input  logic [$clog2(N)-1:0]       wr_stage,
  input  logic [N/2-1:0]             wr_bits,
  input  logic [$clog2(L)-1:0]       rd_path,
  input  logic [$clog2(N)-1:0]       rd_stage,
  output logic [N/2-1:0]             rd_bits
);

  logic [N-1:0] mem [L];

  always_ff @(posedge clk)
    if (wr_en)
      for (int j = 0; j < N / 2; j++)
        if (j < (1 << wr_stage)) mem[wr_path][(1 << wr_stage) + j] <= wr_bits[j];

  always_comb begin
    rd_bits = '0;
    for (int j = 0; j < N / 2; j++)
      if (j < (1 << rd_stage)) rd_bits[j] = mem[rd_path][(1 << rd_stage) + j];
  end

endmodule
