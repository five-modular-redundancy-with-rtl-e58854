// dpr_tb_pkg: what the testbenches need to model the partial
// reconfiguration side of the FMR system: the partial bitstream format of
// the configuration-port model and the content of the stored bitstreams.
//
// A partial bitstream here is a simplified frame stream carrying the three
// things the design names - FPGA location, configuration data and checksum:
//   word 0      SYNC (0xAA995566)
//   word 1      location: index (0..4) of the reconfigurable partition
//   word 2      L, number of configuration words
//   words 3..   L configuration words
//   last word   checksum: XOR of the L configuration words
// The good image of partition r holds golden_word(r, k), k = 0..L-1, with L
// the size of that module's bitstream; a blank image holds zeros. The sizes
// are the measured partial bitstream sizes of the five modules (128, 120, 81,
// 128 and 142 KB, 32-bit words = KB * 256). Real device bitstreams have a
// richer command format; only what the FMR recovery flow depends on is kept.
package dpr_tb_pkg;

  localparam logic [31:0] SYNC_WORD = 32'hAA99_5566;
  localparam int unsigned N_REGION  = 5;

  // bitstream size of module r+1 in KB
  function automatic int unsigned bitstream_kb(input int unsigned r);
    case (r)
      0: return 128;
      1: return 120;
      2: return 81;
      3: return 128;
      default: return 142;
    endcase
  endfunction

  // configuration words of module r+1; `scale_div` shrinks every image by
  // the same factor for short simulations (1 = full size)
  function automatic int unsigned bitstream_words(input int unsigned r, input int unsigned scale_div);
    return (bitstream_kb(r) * 256) / scale_div;
  endfunction

  // content of configuration word k of the good image of partition r
  function automatic logic [31:0] golden_word(input int unsigned r, input int unsigned k);
    logic [31:0] x;
    x = 32'h9E37_79B9 * (r + 1) ^ (32'h85EB_CA6B * (k + 1));
    return x ^ (x >> 13) ^ 32'h1;
  endfunction

endpackage
