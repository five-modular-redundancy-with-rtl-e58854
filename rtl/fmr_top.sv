// fmr_top: the fault-tolerant FMR IP - five identical redundant modules, the
// three-of-five voter, the error detector and the AXI4-Lite register slave.
//
// All five modules receive the same data word (and the same test bit-flip
// mask) from the register slave. Their 12-bit outputs {code word, decoded
// data} go to the voter, whose result F is the IP's output, and to the error
// detector, which marks every module whose output is not F. The processor of
// the reconfiguration system reads the ErrorDetector word over AXI4-Lite (or
// takes irq), reloads the partial bitstream of every marked module through
// the FPGA's configuration port, and so repairs it while the other modules
// keep the output right. Up to two modules may be wrong at the same time.
//
// Each module sits in its own reconfigurable partition. Whether a partition
// currently holds its module's configuration is state of the FPGA's
// configuration memory, written through the configuration port, not logic of
// this IP; it enters as pr_configured[i] (bit 0 = module 1). A partition that
// is blank or being rewritten drives all-zero outputs. That blank partitions
// read as zero is this design's model: the real value depends on the device.
//
// The module/voter/detector path is combinational; fmr_out and error_detector
// follow data_in within the same clock, the bus registers one clock later.
module fmr_top
  import fmr_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // AXI4-Lite slave, from the processor of the reconfiguration system
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
  // partition configuration state, from the FPGA configuration memory
  input  logic [N_MOD-1:0]     pr_configured,
  // results
  output mod_out_t             fmr_out,          // voted output
  output logic [N_MOD-1:0]     error_detector,   // to the reconfiguration system
  output logic                 irq
);

  logic [DATA_W-1:0]           data_in;
  logic [CODE_W-1:0]           code_err;
  mod_out_t                    mod_raw [N_MOD];
  logic [N_MOD-1:0][OUT_W-1:0] mod_out;

  for (genvar i = 0; i < N_MOD; i++) begin : g_mod
    fmr_module u_module (
      .data_in  (data_in),
      .code_err (code_err),
      .out      (mod_raw[i])
    );
    // a blank partition drives zeros
    assign mod_out[i] = pr_configured[i] ? mod_raw[i] : '0;
  end

  fmr_voter #(.WIDTH(OUT_W)) u_voter (
    .m (mod_out),
    .f (fmr_out)
  );

  fmr_error_detector #(.WIDTH(OUT_W)) u_errdet (
    .m   (mod_out),
    .f   (fmr_out),
    .err (error_detector)
  );

  fmr_axil_regs u_regs (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready,
    .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready,
    .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .voted    (fmr_out),
    .err_det  (error_detector),
    .data_in  (data_in),
    .code_err (code_err),
    .irq      (irq)
  );

endmodule
