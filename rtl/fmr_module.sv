// fmr_module: one of the five identical redundant modules of the FMR IP.
//
// The input data word is encoded with the extended Hamming (8,4) code; the
// code word goes out as the module's second output and into the decoder,
// whose 4-bit result is the module's first output. This is the structure of
// the design's module drawing (encoder -> decoder -> "Output 1st", encoder ->
// "Output 2nd").
//
// code_err is an XOR mask laid on the code word between encoder and decoder
// (and so also on the second output). It exists to reproduce the design's
// test, in which an error was put into the first bit of the code word and the
// decoder still returned the right data; in normal operation it is zero.
// The port is this design's addition. Purely combinational.
module fmr_module
  import fmr_pkg::*;
(
  input  logic [DATA_W-1:0] data_in,
  input  logic [CODE_W-1:0] code_err,
  output mod_out_t          out
);

  logic [CODE_W-1:0] code;
  logic [CODE_W-1:0] code_tx;
  logic [DATA_W-1:0] data_dec;
  logic              uncorrectable;

  hamming_enc u_enc (.data(data_in), .code(code));

  assign code_tx = code ^ code_err;

  hamming_dec u_dec (.code(code_tx), .data(data_dec), .uncorrectable(uncorrectable));

  assign out.code = code_tx;
  assign out.data = data_dec;

  // The module drawing shows no status output, so the decoder's
  // double-error flag is not brought out of the module.
  logic unused_ok;
  assign unused_ok = uncorrectable;

endmodule
