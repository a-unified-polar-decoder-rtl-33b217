// tb_pe_array: random and corner LLR pairs through the PEs, f- and f+, compared with an
// integer model of min-sum box-plus and signed addition with symmetric saturation.
module tb_pe_array;
  localparam int P = 8, Q = 6, M = 31;
  logic is_g;
  logic [P-1:0][Q-1:0] a, b, y;
  logic [P-1:0] beta;
  int checks = 0, failures = 0;

  pe_array #(.P(P), .Q(Q)) dut (.*);

  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic int model(input int x, input int z, input bit g, input bit bt);
    int r, mx, mz;
    if (g) r = bt ? z - x : z + x;
    else begin
      mx = x < 0 ? -x : x; mz = z < 0 ? -z : z;
      r = (mx < mz) ? mx : mz;
      if ((x < 0) != (z < 0)) r = -r;
    end
    return r > M ? M : (r < -M ? -M : r);
  endfunction

  int va [P], vb [P];
  initial begin
    for (int n = 0; n < 3000; n++) begin
      is_g = 1'($urandom);
      beta = P'($urandom);
      for (int k = 0; k < P; k++) begin
        va[k] = (n < 8) ? ((k % 2) ? M : -M) : int'($urandom_range(0, 2 * M)) - M;
        vb[k] = (n < 8) ? ((k % 4 < 2) ? M : -M) : int'($urandom_range(0, 2 * M)) - M;
        a[k] = Q'(va[k]); b[k] = Q'(vb[k]);
      end
      #1;
      for (int k = 0; k < P; k++) begin
        checks++;
        if ($signed(y[k]) != model(va[k], vb[k], is_g, beta[k])) begin
          failures++;
          if (failures < 10) $display("FAIL g=%0d a=%0d b=%0d beta=%0d y=%0d exp=%0d", is_g, va[k], vb[k], beta[k], $signed(y[k]), model(va[k], vb[k], is_g, beta[k]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
