// tb_hamming_dec: checks the extended Hamming (8,4) decoder with code words
// built in the testbench (not by the encoder): clean words decode to their
// data; every single-bit error is corrected; every double-bit error is flagged
// uncorrectable; the recorded word 00100101 decodes to 1010.
module tb_hamming_dec;
  import fmr_pkg::*;

  logic [CODE_W-1:0] code;
  logic [DATA_W-1:0] data;
  logic              unc;
  int checks = 0, failures = 0;

  hamming_dec dut (.code(code), .data(data), .uncorrectable(unc));

  // code = {p0,p1,p2,d1,p3,d2,d3,d4}, d1 = data[0]
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
      code = mk(4'(v));
      #1;
      check(data == 4'(v) && !unc, $sformatf("clean %b -> %b unc=%b", code, data, unc));
      for (int b = 0; b < 8; b++) begin
        code = mk(4'(v)) ^ (8'b1 << b);
        #1;
        check(data == 4'(v) && !unc, $sformatf("single flip bit %0d of data %0d -> %b unc=%b", b, v, data, unc));
      end
      for (int b = 0; b < 8; b++)
        for (int c = b + 1; c < 8; c++) begin
          code = mk(4'(v)) ^ (8'b1 << b) ^ (8'b1 << c);
          #1;
          check(unc, $sformatf("double flip %0d,%0d of data %0d not flagged", b, c, v));
        end
    end
    code = 8'b00100101;
    #1;
    check(data == 4'b1010 && !unc, $sformatf("00100101 -> %b", data));
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
