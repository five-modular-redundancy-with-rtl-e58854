// hamming_dec: extended Hamming (8,4) decoder (single error correction,
// double error detection), the second stage inside each redundant module.
//
// Bit order as in hamming_enc: code bit (7 - k) holds Hamming position k.
// The 3-bit syndrome names the position of a single flipped bit among
// positions 1..7; the overall parity tells a single error (odd) from a double
// error (even, non-zero syndrome):
//   syndrome 0, parity even : no error
//   parity odd              : single error, flip position `syndrome`
//                             (syndrome 0 means the parity bit itself)
//   syndrome /= 0, parity even : double error, data passed uncorrected and
//                                `uncorrectable` raised
// The design names the code; the decoding rule is the standard one for it.
// Purely combinational.
module hamming_dec
  import fmr_pkg::*;
(
  input  logic [CODE_W-1:0] code,
  output logic [DATA_W-1:0] data,
  output logic              uncorrectable
);

  logic [7:0] pos;        // pos[k] = Hamming position k
  logic [7:0] fixed;
  logic [2:0] syndrome;
  logic       parity;

  always_comb begin
    for (int k = 0; k < 8; k++) pos[k] = code[7-k];
    syndrome[0] = pos[1] ^ pos[3] ^ pos[5] ^ pos[7];
    syndrome[1] = pos[2] ^ pos[3] ^ pos[6] ^ pos[7];
    syndrome[2] = pos[4] ^ pos[5] ^ pos[6] ^ pos[7];
    parity      = ^pos;
    fixed       = pos;
    if (parity) fixed[syndrome] = ~pos[syndrome];
    uncorrectable = !parity && (syndrome != 3'd0);
    data = {fixed[7], fixed[6], fixed[5], fixed[3]};
  end

endmodule
