// llr_mem: intermediate LLR (alpha) storage, one region per list path.
//
// Path (slot) p holds the LLRs of every stage s = 0 .. n-1 of the current traversal at
// addresses 2^s .. 2^(s+1)-1 (address 0 is unused); stage n is the channel storage. One
// write port stores up to P lanes at a base address under a lane mask; one read port
// returns two groups of P consecutive LLRs of a path, at the two base addresses the PEs
// need (alpha[i] and alpha[i + 2^(s-1)]). In the paper the region of path 0 belongs to the
// common core and the other paths to the SCL add-on; here they are one array of L regions.
// Reads are asynchronous (register file); that is this design's choice.
module llr_mem #(
  parameter int unsigned N = 256,
  parameter int unsigned Q = 6,
  parameter int unsigned P = 8,
  parameter int unsigned L = 8
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(L)-1:0]     wr_path,
  input  logic [$clog2(N)-1:0]     wr_addr,
  input  logic [P-1:0]             wr_mask,
  input  logic [P-1:0][Q-1:0]      wr_data,
  input  logic [$clog2(L)-1:0]     rd_path,
  input  logic [$clog2(N)-1:0]     rd_addr_a,
  input  logic [$clog2(N)-1:0]     rd_addr_b,
  output logic [P-1:0][Q-1:0]      rd_a,
  output logic [P-1:0][Q-1:0]      rd_b
);

  logic [Q-1:0] mem [L][N];

  always_ff @(posedge clk)
    if (wr_en)
      for (int k = 0; k < P; k++)
        if (wr_mask[k] && int'(wr_addr) + k < N) mem[wr_path][int'(wr_addr) + k] <= wr_data[k];

  always_comb begin
    for (int k = 0; k < P; k++) begin
      rd_a[k] = (int'(rd_addr_a) + k < N) ? mem[rd_path][int'(rd_addr_a) + k] : '0;
      rd_b[k] = (int'(rd_addr_b) + k < N) ? mem[rd_path][int'(rd_addr_b) + k] : '0;
    end
  end

endmodule
