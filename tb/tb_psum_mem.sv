// tb_psum_mem: random whole-stage writes of partial sums to random paths, read back stage by
// stage against a model that keeps each stage of each path separately.
module tb_psum_mem;
  localparam int N = 256, L = 8;
  logic clk = 0, wr_en = 0;
  logic [2:0] wr_path, rd_path;
  logic [7:0] wr_stage, rd_stage;
  logic [N/2-1:0] wr_bits, rd_bits;
  logic [N/2-1:0] model [L][8];
  int checks = 0, failures = 0;

  psum_mem #(.N(N), .L(L)) dut (.*);
  always #5 clk = ~clk;
  initial begin #5_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic logic [N/2-1:0] rnd_bits(input int st);
    logic [N/2-1:0] v;
    for (int w = 0; w < N / 64; w++) v[w*32 +: 32] = $urandom;
    for (int j = 0; j < N / 2; j++) if (j >= (1 << st)) v[j] = 1'b0;
    return v;
  endfunction

  initial begin
    for (int p = 0; p < L; p++)
      for (int s = 0; s < 8; s++) begin
        @(negedge clk); wr_en = 1; wr_path = 3'(p); wr_stage = 8'(s); wr_bits = rnd_bits(s);
        model[p][s] = wr_bits;
      end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      wr_en = 1; wr_path = 3'($urandom); wr_stage = 8'($urandom_range(0, 7)); wr_bits = rnd_bits(int'(wr_stage));
      model[wr_path][wr_stage] = wr_bits;
      @(negedge clk); wr_en = 0;
      rd_path = 3'($urandom); rd_stage = 8'($urandom_range(0, 7));
      #1;
      checks++;
      if (rd_bits != model[rd_path][rd_stage]) begin
        failures++;
        if (failures < 5) $display("FAIL path %0d stage %0d", rd_path, rd_stage);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
