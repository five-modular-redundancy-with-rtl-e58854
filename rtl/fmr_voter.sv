// fmr_voter: bitwise three-of-five majority voter of the FMR IP.
//
// For every bit of the module outputs M1..M5 the voted bit F is the OR of the
// ten three-input AND terms, one for each choice of three modules out of five:
//   F = M1M2M3 | M1M2M4 | M1M2M5 | M1M3M4 | M1M3M5 |
//       M1M4M5 | M2M3M4 | M2M3M5 | M2M4M5 | M3M4M5
// This is the design's own voter equation. So F is right as long as at least
// three of the five modules are right, i.e. any two modules may fail at once.
// Purely combinational; WIDTH is the number of bits voted on (one module's
// code word plus decoded word by default).
module fmr_voter
  import fmr_pkg::*;
#(
  parameter int unsigned WIDTH = OUT_W
) (
  input  logic [N_MOD-1:0][WIDTH-1:0] m,   // m[0] is module 1
  output logic [WIDTH-1:0]            f
);

  logic [WIDTH-1:0] m1, m2, m3, m4, m5;

  always_comb begin
    m1 = m[0];
    m2 = m[1];
    m3 = m[2];
    m4 = m[3];
    m5 = m[4];
    f = (m1 & m2 & m3) |
        (m1 & m2 & m4) |
        (m1 & m2 & m5) |
        (m1 & m3 & m4) |
        (m1 & m3 & m5) |
        (m1 & m4 & m5) |
        (m2 & m3 & m4) |
        (m2 & m3 & m5) |
        (m2 & m4 & m5) |
        (m3 & m4 & m5);
  end

endmodule
