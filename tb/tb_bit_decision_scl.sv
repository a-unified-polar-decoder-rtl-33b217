// tb_bit_decision_scl: every LLR value with every leaf type, list on and off, and random
// path metrics including ones near saturation, against the path-metric rules.
module tb_bit_decision_scl;
  import polar_pkg::*;
  localparam int Q = 6, PMAX = 2 ** PM_W - 1;
  logic [Q-1:0] llr;
  leaf_t leaf;
  logic list_en, extend;
  logic [PATH_W-1:0] path;
  logic [PM_W-1:0] pm_in;
  cand_t cand0, cand1;
  int checks = 0, failures = 0;

  bit_decision_scl #(.Q(Q)) dut (.*);
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic int add(input int a, input int b);
    return (a + b > PMAX) ? PMAX : a + b;
  endfunction

  task automatic chk(input bit ok);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL llr=%0d leaf=%0d list=%0d pm=%0d", $signed(llr), leaf, list_en, pm_in); end
  endtask

  initial begin
    for (int v = -31; v <= 31; v++)
      for (int t = 0; t < 3; t++)
        for (int le = 0; le < 2; le++)
          repeat (4) begin
            int pmv, mag;
            bit hd;
            pmv = ($urandom_range(0, 3) == 0) ? PMAX - int'($urandom_range(0, 40)) : int'($urandom_range(0, 2000));
            llr = Q'(v); leaf = leaf_t'(t); list_en = 1'(le); path = PATH_W'($urandom); pm_in = PM_W'(pmv);
            #1;
            hd = v < 0; mag = v < 0 ? -v : v;
            chk(extend == (le == 1 && t == 1));
            chk(cand0.valid && cand0.parent == path);
            if (t == 0) begin
              chk(cand0.dbit == 0 && int'(cand0.pm) == (hd ? add(pmv, mag) : pmv));
              chk(!cand1.valid);
            end else begin
              chk(cand0.dbit == hd && int'(cand0.pm) == pmv);
              if (le == 1 && t == 1) chk(cand1.valid && cand1.dbit == !hd && int'(cand1.pm) == add(pmv, mag) && cand1.parent == path);
              else chk(!cand1.valid);
            end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
