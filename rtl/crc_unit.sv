// crc_unit: CRC calculation and check, one CRC register per list path.
//
// Every information bit a path decides is shifted into that path's register (update, up to
// W bits in one cycle when a whole node is decided, bit 0 first), so
// the check is ready as soon as the last leaf is decided: crc_ok[l] is 1 when the register
// of path l is zero, i.e. when the information bits, message followed by its CRC, divide by
// the generator. When the sorter's survivors are applied (permute), survivor k takes the
// register of its parent, exactly like the path metrics. The paper names a CRC check
// module; the bit-serial register per path and the polynomial (in polar_pkg) are this
// design's choices.
module crc_unit
  import polar_pkg::*;
#(
  parameter int unsigned L = 8,
  parameter int unsigned W = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic [$clog2(W+1)-1:0] upd_cnt,   // bits shifted in this cycle (0: none)
  input  logic [PATH_W-1:0]  upd_path,
  input  logic [W-1:0]       upd_bits,
  input  logic               permute,
  input  cand_t              surv   [L],
  output logic [CRC_W-1:0]   crc    [L],
  output logic [L-1:0]       crc_ok
);

  logic [CRC_W-1:0] upd_next;

  always_comb begin
    upd_next = crc[upd_path];
    for (int j = 0; j < W; j++)
      if (j < int'(upd_cnt)) upd_next = crc_step(upd_next, upd_bits[j]);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int l = 0; l < L; l++) crc[l] <= '0;
    end else if (clear) begin
      for (int l = 0; l < L; l++) crc[l] <= '0;
    end else if (permute) begin
      for (int k = 0; k < L; k++)
        if (surv[k].valid) crc[k] <= crc[surv[k].parent];
    end else if (upd_cnt != 0) begin
      crc[upd_path] <= upd_next;
    end

  always_comb
    for (int l = 0; l < L; l++) crc_ok[l] = (crc[l] == '0);

endmodule
