// tb_adaptive_ctrl: the controller against a core stand-in that answers each start after a
// random delay with a chosen CRC result. Checks which passes run in each mode, that the
// list pass follows an SC failure only in adaptive mode, and the reported flags.
module tb_adaptive_ctrl;
  import polar_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, core_done = 0, core_crc_pass = 0;
  dec_mode_t mode = MODE_ADAPTIVE;
  logic core_start, core_list_en, busy, done, crc_pass, used_scl;
  int checks = 0, failures = 0;

  adaptive_ctrl dut (.*);
  always #5 clk = ~clk;
  initial begin #10_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  bit sc_res, scl_res;
  int n_sc, n_scl;

  // core stand-in: answers a start after a random delay
  initial forever begin
    @(posedge clk);
    if (core_start && rst_n) begin
      automatic bit lst = core_list_en;
      if (lst) n_scl++; else n_sc++;
      repeat ($urandom_range(2, 20)) @(posedge clk);
      core_done <= 1'b1;
      core_crc_pass <= lst ? scl_res : sc_res;
      @(posedge clk);
      core_done <= 1'b0;
    end
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      bit exp_scl, exp_pass;
      mode = dec_mode_t'($urandom_range(0, 2));
      sc_res = 1'($urandom); scl_res = 1'($urandom);
      n_sc = 0; n_scl = 0;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      exp_scl = (mode == MODE_SCL) || (mode == MODE_ADAPTIVE && !sc_res);
      exp_pass = exp_scl ? scl_res : sc_res;
      chk(n_sc == ((mode == MODE_SCL) ? 0 : 1), $sformatf("number of SC passes %0d (n %0d mode %0d)", n_sc, n, mode));
      chk(n_scl == (exp_scl ? 1 : 0), $sformatf("number of list passes %0d (n %0d mode %0d sc %0d scl %0d nsc %0d)", n_scl, n, mode, sc_res, scl_res, n_sc));
      chk(used_scl == exp_scl, "used_scl");
      chk(crc_pass == exp_pass, "crc_pass");
      @(negedge clk);
      chk(!busy, "busy after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
