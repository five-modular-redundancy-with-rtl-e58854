// fmr_axil_regs: AXI4-Lite slave through which the processor of the
// reconfiguration system talks to the FMR IP.
//
// Registers (byte offsets, 32-bit words, unused bits read 0):
//   0x00 ERRDET   RO  [4:0] ErrorDetector, bit 0 = module 1 (1 = in error)
//   0x04 DATA_IN  RW  [3:0] data word given to all five modules
//   0x08 DECODED  RO  [3:0] voted decoded data ("Output 1st")
//   0x0C ENCODED  RO  [7:0] voted code word ("Output 2nd")
//   0x10 CODE_ERR RW  [7:0] bit-flip mask put on every module's code word
// Reads of other offsets return 0 with SLVERR; writes to them are dropped
// with SLVERR.
//
// The design puts the ErrorDetector word at the IP's base address and lets
// the processor poll it over the AXI Lite bus; it also speaks of an interrupt
// to the reconfiguration system, given here as irq = (ERRDET != 0). The rest
// of the register map is this design's choice.
//
// Timing: the voted result and the ErrorDetector are sampled into registers
// every clock, so a read returns what the modules produced one clock before.
// After the write response of DATA_IN, the new result is readable two clocks
// later. The slave accepts a write when address and data are both valid (one
// write and one read outstanding at most) and answers a read in the clock
// after the address. Reset is active low and synchronous.
module fmr_axil_regs
  import fmr_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // AXI4-Lite slave
  input  logic [AXIL_AW-1:0]   s_awaddr,
  input  logic                 s_awvalid,
  output logic                 s_awready,
  input  logic [31:0]          s_wdata,
  input  logic [3:0]           s_wstrb,
  input  logic                 s_wvalid,
  output logic                 s_wready,
  output logic [1:0]           s_bresp,
  output logic                 s_bvalid,
  input  logic                 s_bready,
  input  logic [AXIL_AW-1:0]   s_araddr,
  input  logic                 s_arvalid,
  output logic                 s_arready,
  output logic [31:0]          s_rdata,
  output logic [1:0]           s_rresp,
  output logic                 s_rvalid,
  input  logic                 s_rready,
  // FMR core side
  input  mod_out_t             voted,
  input  logic [N_MOD-1:0]     err_det,
  output logic [DATA_W-1:0]    data_in,
  output logic [CODE_W-1:0]    code_err,
  output logic                 irq
);

  mod_out_t         voted_q;
  logic [N_MOD-1:0] err_q;
  logic             wr_fire, rd_fire;

  // ---------------- sampling of the core ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      voted_q <= '0;
      err_q   <= '0;
    end else begin
      voted_q <= voted;
      err_q   <= err_det;
    end
  end

  assign irq = |err_q;

  // ---------------- write channel ----------------
  assign s_awready = s_awvalid && s_wvalid && !s_bvalid;
  assign s_wready  = s_awready;
  assign wr_fire   = s_awready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      data_in  <= '0;
      code_err <= '0;
      s_bvalid <= 1'b0;
      s_bresp  <= AXI_RESP_OKAY;
    end else begin
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr_fire) begin
        s_bvalid <= 1'b1;
        s_bresp  <= AXI_RESP_OKAY;
        unique case (s_awaddr)
          REG_DATA_IN:  if (s_wstrb[0]) data_in  <= s_wdata[DATA_W-1:0];
          REG_CODE_ERR: if (s_wstrb[0]) code_err <= s_wdata[CODE_W-1:0];
          REG_ERRDET, REG_DECODED, REG_ENCODED: ;  // read-only, write ignored
          default:      s_bresp <= AXI_RESP_SLVERR;
        endcase
      end
    end
  end

  // ---------------- read channel ----------------
  assign s_arready = !s_rvalid;
  assign rd_fire   = s_arvalid && s_arready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
      s_rresp  <= AXI_RESP_OKAY;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (rd_fire) begin
        s_rvalid <= 1'b1;
        s_rresp  <= AXI_RESP_OKAY;
        s_rdata  <= '0;
        unique case (s_araddr)
          REG_ERRDET:   s_rdata[N_MOD-1:0]  <= err_q;
          REG_DATA_IN:  s_rdata[DATA_W-1:0] <= data_in;
          REG_DECODED:  s_rdata[DATA_W-1:0] <= voted_q.data;
          REG_ENCODED:  s_rdata[CODE_W-1:0] <= voted_q.code;
          REG_CODE_ERR: s_rdata[CODE_W-1:0] <= code_err;
          default:      s_rresp <= AXI_RESP_SLVERR;
        endcase
      end
    end
  end

  // ---------------- bus rules ----------------
  // A response, once valid, stays valid with the same content until taken.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_bvalid && !s_bready |=> s_bvalid && $stable(s_bresp));
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata) && $stable(s_rresp));

endmodule
