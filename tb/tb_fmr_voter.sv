// tb_fmr_voter: checks the three-of-five voter against a per-bit count of
// ones (result 1 when at least three inputs are 1), on all 32 input patterns
// of a single bit column and on random 12-bit words; then checks that the
// good word wins when any two modules are corrupted.
module tb_fmr_voter;
  import fmr_pkg::*;

  localparam int unsigned W = OUT_W;
  logic [N_MOD-1:0][W-1:0] m;
  logic [W-1:0]            f;
  int checks = 0, failures = 0;

  fmr_voter #(.WIDTH(W)) dut (.m(m), .f(f));

  function automatic logic [W-1:0] ref_vote(input logic [N_MOD-1:0][W-1:0] x);
    for (int b = 0; b < int'(W); b++) begin
      int n = 0;
      for (int i = 0; i < N_MOD; i++) n += int'(x[i][b]);
      ref_vote[b] = (n >= 3);
    end
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int p = 0; p < 32; p++) begin
      for (int i = 0; i < N_MOD; i++) m[i] = {W{p[i]}};
      #1;
      check(f == ref_vote(m), $sformatf("pattern %b -> %b", p[4:0], f));
    end
    for (int t = 0; t < 500; t++) begin
      for (int i = 0; i < N_MOD; i++) m[i] = W'($urandom);
      #1;
      check(f == ref_vote(m), $sformatf("random -> %h expected %h", f, ref_vote(m)));
    end
    for (int a = 0; a < N_MOD; a++)
      for (int b = a + 1; b < N_MOD; b++) begin
        logic [W-1:0] good;
        good = W'($urandom);
        for (int i = 0; i < N_MOD; i++) m[i] = good;
        m[a] = ~good;
        m[b] = W'($urandom);
        #1;
        check(f == good, $sformatf("modules %0d,%0d bad: %h expected %h", a + 1, b + 1, f, good));
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
