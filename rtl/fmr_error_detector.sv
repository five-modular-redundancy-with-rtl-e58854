// fmr_error_detector: finds the redundant modules whose output differs from
// the voted result.
//
// err[i] is 1 when module i+1's whole output word differs from the voted word
// F and 0 when it equals it, so bit 0 (the LSB) stands for module 1. This
// follows the design's hardware listing ("ErrorDetector(0) <= '0' when
// FtResult = PR_Input1 else '1'") and its firmware, which takes a set bit as
// the request to reconfigure that module; an earlier pseudo-code of the
// design states the opposite polarity. Purely combinational.
module fmr_error_detector
  import fmr_pkg::*;
#(
  parameter int unsigned WIDTH = OUT_W
) (
  input  logic [N_MOD-1:0][WIDTH-1:0] m,   // m[0] is module 1
  input  logic [WIDTH-1:0]            f,   // voted result
  output logic [N_MOD-1:0]            err
);

  always_comb begin
    for (int i = 0; i < N_MOD; i++) err[i] = (m[i] != f);
  end

endmodule
