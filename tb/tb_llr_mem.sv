// tb_llr_mem: random masked multi-lane writes to random paths and addresses, then random
// two-window reads, against a plain array model.
module tb_llr_mem;
  localparam int N = 256, Q = 6, P = 8, L = 8;
  logic clk = 0, wr_en = 0;
  logic [2:0] wr_path, rd_path;
  logic [7:0] wr_addr, rd_addr_a, rd_addr_b;
  logic [P-1:0] wr_mask;
  logic [P-1:0][Q-1:0] wr_data, rd_a, rd_b;
  logic [Q-1:0] model [L][N];
  int checks = 0, failures = 0;

  llr_mem #(.N(N), .Q(Q), .P(P), .L(L)) dut (.*);
  always #5 clk = ~clk;
  initial begin #5_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    // initialise everything with full-mask writes
    for (int p = 0; p < L; p++)
      for (int i = 0; i < N; i += P) begin
        @(negedge clk); wr_en = 1; wr_path = 3'(p); wr_addr = 8'(i); wr_mask = '1;
        for (int k = 0; k < P; k++) begin wr_data[k] = Q'($urandom); model[p][i + k] = wr_data[k]; end
      end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      wr_en = 1; wr_path = 3'($urandom); wr_addr = 8'($urandom); wr_mask = P'($urandom);
      for (int k = 0; k < P; k++) begin
        wr_data[k] = Q'($urandom);
        if (wr_mask[k] && int'(wr_addr) + k < N) model[wr_path][int'(wr_addr) + k] = wr_data[k];
      end
      @(negedge clk); wr_en = 0;
      rd_path = 3'($urandom); rd_addr_a = 8'($urandom); rd_addr_b = 8'($urandom);
      #1;
      for (int k = 0; k < P; k++) begin
        checks += 2;
        if (rd_a[k] != ((int'(rd_addr_a) + k < N) ? model[rd_path][int'(rd_addr_a) + k] : '0)) failures++;
        if (rd_b[k] != ((int'(rd_addr_b) + k < N) ? model[rd_path][int'(rd_addr_b) + k] : '0)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
