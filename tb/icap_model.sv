// icap_model: behavioural model (not synthesizable hardware of this design)
// of the FPGA's internal configuration access port together with the
// configuration memory of the five reconfigurable partitions that hold the
// FMR modules. It stands for a vendor primitive and for device fabric.
//
// Ports follow the 32-bit configuration port of the device: CLK, active-low
// chip select CSB, RDWRB (0 = write), data in I, data out O, BUSY. On top of
// these the model brings out region_configured[r]: 1 while partition r holds
// its module's good image. It parses the simplified frame stream of
// dpr_tb_pkg: after SYNC, the location word selects partition r, which from
// then on counts as unconfigured (being rewritten); after the last word it
// becomes configured only when the checksum is right and every configuration
// word matched the good image of length `words_of(r)`. A blank image (all
// zeros) thus leaves the partition blank. One word is taken per clock; BUSY
// stays low. O returns region_configured. All partitions start configured,
// as after the initial full configuration.
module icap_model
  import dpr_tb_pkg::*;
#(
  parameter int unsigned SCALE_DIV = 1
) (
  input  logic                 CLK,
  input  logic                 CSB,
  input  logic                 RDWRB,
  input  logic [31:0]          I,
  output logic [31:0]          O,
  output logic                 BUSY,
  output logic [N_REGION-1:0]  region_configured
);

  typedef enum logic [2:0] {S_IDLE, S_FAR, S_LEN, S_DATA, S_CRC} state_t;
  state_t      state = S_IDLE;
  int unsigned region = 0, len = 0, cnt = 0;
  logic [31:0] xsum = '0;
  bit          match = 1'b0;

  initial region_configured = '1;

  assign BUSY = 1'b0;
  assign O    = 32'(region_configured);

  always @(posedge CLK) begin
    if (!CSB && !RDWRB) begin
      case (state)
        S_IDLE: if (I == SYNC_WORD) state <= S_FAR;
        S_FAR: begin
          region <= (I < N_REGION) ? I : 0;
          if (I < N_REGION) region_configured[I] <= 1'b0;
          state  <= (I < N_REGION) ? S_LEN : S_IDLE;
        end
        S_LEN: begin
          len   <= I;
          cnt   <= 0;
          xsum  <= '0;
          match <= (I == bitstream_words(region, SCALE_DIV));
          state <= (I == 0) ? S_CRC : S_DATA;
        end
        S_DATA: begin
          xsum <= xsum ^ I;
          if (I != golden_word(region, cnt)) match <= 1'b0;
          cnt  <= cnt + 1;
          if (cnt + 1 == len) state <= S_CRC;
        end
        S_CRC: begin
          region_configured[region] <= (I == xsum) && match;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
