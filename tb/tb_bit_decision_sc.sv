// tb_bit_decision_sc: every LLR value with every leaf type.
module tb_bit_decision_sc;
  import polar_pkg::*;
  localparam int Q = 6;
  logic [Q-1:0] llr;
  leaf_t leaf;
  logic dbit, is_info;
  int checks = 0, failures = 0;

  bit_decision_sc #(.Q(Q)) dut (.*);
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int v = -31; v <= 31; v++)
      for (int t = 0; t < 3; t++) begin
        llr = Q'(v); leaf = leaf_t'(t);
        #1;
        checks += 2;
        if (dbit != ((t != 0) && v < 0)) failures++;
        if (is_info != (t != 0)) failures++;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
