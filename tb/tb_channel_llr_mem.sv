// tb_channel_llr_mem: fills the channel storage with random LLRs (including the most
// negative code, which must be clamped) and reads random windows on both ports.
module tb_channel_llr_mem;
  localparam int N = 256, Q = 6, P = 8;
  logic clk = 0, wr_en = 0;
  logic [7:0] wr_addr, rd_addr_a, rd_addr_b;
  logic [Q-1:0] wr_llr;
  logic [P-1:0][Q-1:0] rd_a, rd_b;
  int model [N];
  int checks = 0, failures = 0;

  channel_llr_mem #(.N(N), .Q(Q), .P(P)) dut (.*);
  always #5 clk = ~clk;
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic int expv(input int base, input int k);
    return (base + k < N) ? model[base + k] : 0;
  endfunction

  initial begin
    for (int i = 0; i < N; i++) begin
      automatic int v = int'($urandom_range(0, 63)) - 32;
      @(negedge clk); wr_en = 1; wr_addr = 8'(i); wr_llr = Q'(v);
      model[i] = (v == -32) ? -31 : v;
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 500; n++) begin
      automatic int ba = $urandom_range(0, N - 1), bb = $urandom_range(0, N - 1);
      rd_addr_a = 8'(ba); rd_addr_b = 8'(bb);
      #1;
      for (int k = 0; k < P; k++) begin
        checks += 2;
        if ($signed(rd_a[k]) != expv(ba, k)) failures++;
        if ($signed(rd_b[k]) != expv(bb, k)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
