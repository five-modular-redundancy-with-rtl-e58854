// fmr_pkg: sizes, types and register offsets shared by the five-modular-
// redundancy (FMR) fault-tolerant IP.
//
// Each redundant module takes a 4-bit data word, encodes it with an extended
// Hamming (8,4) code and decodes it again, so a module produces an 8-bit code
// word and a 4-bit decoded word. The 4-bit width and the 8-bit code follow the
// worked example of the design (data 1010, code word 00100101). The register
// offsets of the bus slave are this design's choice, except that the
// ErrorDetector word sits at the base address (offset 0), as the firmware
// reads it there.
package fmr_pkg;

  localparam int unsigned N_MOD  = 5;   // number of redundant modules
  localparam int unsigned DATA_W = 4;   // data word of a module
  localparam int unsigned CODE_W = 8;   // extended Hamming (8,4) code word
  localparam int unsigned OUT_W  = CODE_W + DATA_W;  // one module's output word

  // Output of one redundant module: "Output 2nd" (code) and "Output 1st" (data).
  typedef struct packed {
    logic [CODE_W-1:0] code;
    logic [DATA_W-1:0] data;
  } mod_out_t;

  // AXI4-Lite register offsets (byte addresses) of the FMR IP.
  localparam int unsigned AXIL_AW = 5;
  localparam logic [AXIL_AW-1:0] REG_ERRDET   = 5'h00;  // RO [4:0] ErrorDetector
  localparam logic [AXIL_AW-1:0] REG_DATA_IN  = 5'h04;  // RW [3:0] data sent to the modules
  localparam logic [AXIL_AW-1:0] REG_DECODED  = 5'h08;  // RO [3:0] voted decoded data
  localparam logic [AXIL_AW-1:0] REG_ENCODED  = 5'h0C;  // RO [7:0] voted code word
  localparam logic [AXIL_AW-1:0] REG_CODE_ERR = 5'h10;  // RW [7:0] bit-flip mask on the code word

  localparam logic [1:0] AXI_RESP_OKAY   = 2'b00;
  localparam logic [1:0] AXI_RESP_SLVERR = 2'b10;

endpackage
