// tb_fmr_module: checks one redundant module: without a bit-flip mask the
// second output is the code word and the first output the data; with any
// single-bit mask the code word shows the flip and the data is still right;
// the recorded example (data 1010, first code bit flipped) gives 00100101
// and 1010.
module tb_fmr_module;
  import fmr_pkg::*;

  logic [DATA_W-1:0] data_in;
  logic [CODE_W-1:0] code_err;
  mod_out_t          out;
  int checks = 0, failures = 0;

  fmr_module dut (.data_in(data_in), .code_err(code_err), .out(out));

  function automatic logic [7:0] mk(input logic [3:0] d);
    logic p1, p2, p3, p0;
    p1 = d[0] ^ d[1] ^ d[3];
    p2 = d[0] ^ d[2] ^ d[3];
    p3 = d[1] ^ d[2] ^ d[3];
    p0 = p1 ^ p2 ^ p3 ^ d[0] ^ d[1] ^ d[2] ^ d[3];
    return {p0, p1, p2, d[0], p3, d[1], d[2], d[3]};
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int v = 0; v < 16; v++) begin
      data_in = 4'(v); code_err = '0;
      #1;
      check(out.code == mk(4'(v)) && out.data == 4'(v), $sformatf("data %0d: out %b/%b", v, out.code, out.data));
      for (int b = 0; b < 8; b++) begin
        code_err = 8'b1 << b;
        #1;
        check(out.code == (mk(4'(v)) ^ code_err) && out.data == 4'(v),
              $sformatf("data %0d flip %0d: out %b/%b", v, b, out.code, out.data));
      end
    end
    data_in = 4'b1010; code_err = 8'b1000_0000;
    #1;
    check(out.code == 8'b00100101 && out.data == 4'b1010, $sformatf("example: %b/%b", out.code, out.data));
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
