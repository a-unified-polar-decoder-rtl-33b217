// channel_llr_mem: storage of the N channel LLRs of one packet (stage n of the tree).
//
// LLRs are written one per cycle through wr_en/wr_addr/wr_llr, before decoding starts; an
// input of -2^(Q-1) is clamped to -(2^(Q-1)-1) so that every stored LLR has a magnitude that
// the PEs can negate. Two combinational read ports each return P consecutive LLRs from a
// base address; lanes past the end read 0. The paper names this storage; the single write
// port and the asynchronous read (a register file rather than an SRAM macro) are this
// design's choices.
module channel_llr_mem #(
  parameter int unsigned N = 256,
  parameter int unsigned Q = 6,
  parameter int unsigned P = 8
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(N)-1:0]     wr_addr,
  input  logic [Q-1:0]             wr_llr,
  input  logic [$clog2(N)-1:0]     rd_addr_a,
  input  logic [$clog2(N)-1:0]     rd_addr_b,
  output logic [P-1:0][Q-1:0]      rd_a,
  output logic [P-1:0][Q-1:0]      rd_b
);

  localparam logic [Q-1:0] MOST_NEG = {1'b1, {(Q-1){1'b0}}};

  logic [Q-1:0] mem [N];

  always_ff @(posedge clk)
    if (wr_en) mem[wr_addr] <= (wr_llr == MOST_NEG) ? MOST_NEG + 1'b1 : wr_llr;

  always_comb begin
    for (int k = 0; k < P; k++) begin
      rd_a[k] = (int'(rd_addr_a) + k < N) ? mem[int'(rd_addr_a) + k] : '0;
      rd_b[k] = (int'(rd_addr_b) + k < N) ? mem[int'(rd_addr_b) + k] : '0;
    end
  end

endmodule
