// tb_hamming_enc: checks the extended Hamming (8,4) encoder against a
// reference built from the Hamming position rule (parity bit 2^j covers every
// position with bit j set), for all 16 data words; checks the recorded
// example (1010 -> 10100101, shown with its first bit flipped as 00100101);
// and checks that any two code words differ in at least 4 bits.
module tb_hamming_enc;
  import fmr_pkg::*;

  logic [DATA_W-1:0] data;
  logic [CODE_W-1:0] code;
  int checks = 0, failures = 0;

  hamming_enc dut (.data(data), .code(code));

  function automatic logic [7:0] ref_code(input logic [3:0] d);
    logic [7:0] pos;
    int di;
    pos = '0;
    di  = 0;
    for (int k = 1; k < 8; k++)
      if ((k & (k - 1)) != 0) begin pos[k] = d[di]; di++; end
    for (int j = 0; j < 3; j++)
      for (int k = 1; k < 8; k++)
        if (((k >> j) & 1) == 1 && k != (1 << j)) pos[1 << j] ^= pos[k];
    pos[0] = ^pos[7:1];
    for (int k = 0; k < 8; k++) ref_code[7-k] = pos[k];
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [7:0] cw [16];

  initial begin
    for (int v = 0; v < 16; v++) begin
      data = 4'(v);
      #1;
      cw[v] = code;
      check(code == ref_code(4'(v)), $sformatf("data %b code %b expected %b", data, code, ref_code(4'(v))));
      check(^code == 1'b0, $sformatf("data %b: overall parity not even", data));
    end
    data = 4'b1010;
    #1;
    check(code == 8'b10100101, $sformatf("1010 encodes to %b", code));
    check((code ^ 8'b1000_0000) == 8'b00100101, "recorded word is the code with first bit flipped");
    for (int a = 0; a < 16; a++)
      for (int b = a + 1; b < 16; b++)
        check($countones(cw[a] ^ cw[b]) >= 4, $sformatf("distance %0d-%0d below 4", a, b));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
