// hamming_enc: extended Hamming (8,4) encoder (SEC-DED code), the first
// stage inside each redundant module.
//
// The code word is printed most significant bit first as
//   code[7:0] = { p0, p1, p2, d1, p3, d2, d3, d4 }
// i.e. code bit (7 - k) holds Hamming position k, with position 0 the overall
// parity bit. Data bit d1 is data[0] ... d4 is data[3]. Parity bits:
//   p1 = d1^d2^d4, p2 = d1^d3^d4, p3 = d2^d3^d4, p0 = XOR of positions 1..7
// (even overall parity). With this order data 1010 encodes to 10100101; the
// design's recorded test output 00100101 is that word with its first bit
// flipped, which the decoder corrects back to 1010. The code itself is named
// by the design; the bit order is this design's choice, picked so that the
// recorded example holds. Purely combinational.
module hamming_enc
  import fmr_pkg::*;
(
  input  logic [DATA_W-1:0] data,
  output logic [CODE_W-1:0] code
);

  logic d1, d2, d3, d4, p1, p2, p3;

  always_comb begin
    d1 = data[0];
    d2 = data[1];
    d3 = data[2];
    d4 = data[3];
    p1 = d1 ^ d2 ^ d4;
    p2 = d1 ^ d3 ^ d4;
    p3 = d2 ^ d3 ^ d4;
    code[6] = p1;   // position 1
    code[5] = p2;   // position 2
    code[4] = d1;   // position 3
    code[3] = p3;   // position 4
    code[2] = d2;   // position 5
    code[1] = d3;   // position 6
    code[0] = d4;   // position 7
    code[7] = ^code[6:0];  // position 0: overall parity
  end

endmodule
