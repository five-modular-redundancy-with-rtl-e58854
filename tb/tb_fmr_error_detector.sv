// tb_fmr_error_detector: checks that bit i of the ErrorDetector word is 1
// exactly when module i+1 differs from the voted word, for every subset of
// modules made to differ (in one bit or in all bits) and for random words.
module tb_fmr_error_detector;
  import fmr_pkg::*;

  localparam int unsigned W = OUT_W;
  logic [N_MOD-1:0][W-1:0] m;
  logic [W-1:0]            f;
  logic [N_MOD-1:0]        err;
  int checks = 0, failures = 0;

  fmr_error_detector #(.WIDTH(W)) dut (.m(m), .f(f), .err(err));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int s = 0; s < 32; s++) begin
      for (int b = 0; b < int'(W); b++) begin
        f = W'($urandom);
        for (int i = 0; i < N_MOD; i++) m[i] = s[i] ? (f ^ (W'(1) << b)) : f;
        #1;
        check(err == 5'(s), $sformatf("subset %b bit %0d -> %b", s[4:0], b, err));
      end
    end
    for (int t = 0; t < 300; t++) begin
      logic [N_MOD-1:0] exp;
      f = W'($urandom);
      for (int i = 0; i < N_MOD; i++) begin
        m[i] = ($urandom % 2 == 0) ? f : W'($urandom);
        exp[i] = (m[i] != f);
      end
      #1;
      check(err == exp, $sformatf("random -> %b expected %b", err, exp));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
