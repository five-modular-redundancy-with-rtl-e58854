// tb_fmr_axil_regs: checks the AXI4-Lite register slave of the FMR IP:
// write and read-back of DATA_IN and CODE_ERR, the one-clock sampling of the
// voted word and the ErrorDetector word, irq, SLVERR on unknown offsets,
// writes to read-only registers, responses held under back-pressure, and the
// read latency (data valid one clock after the address handshake).
module tb_fmr_axil_regs;
  import fmr_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [AXIL_AW-1:0] awaddr, araddr;
  logic awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 0;
  logic arvalid = 0, arready, rvalid, rready = 0;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  mod_out_t          voted;
  logic [N_MOD-1:0]  err_det;
  logic [DATA_W-1:0] data_in;
  logic [CODE_W-1:0] code_err;
  logic              irq;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fmr_axil_regs dut (
    .clk, .rst_n,
    .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready),
    .s_wdata(wdata), .s_wstrb(wstrb), .s_wvalid(wvalid), .s_wready(wready),
    .s_bresp(bresp), .s_bvalid(bvalid), .s_bready(bready),
    .s_araddr(araddr), .s_arvalid(arvalid), .s_arready(arready),
    .s_rdata(rdata), .s_rresp(rresp), .s_rvalid(rvalid), .s_rready(rready),
    .voted, .err_det, .data_in, .code_err, .irq);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic axi_write(input logic [AXIL_AW-1:0] a, input logic [31:0] d,
                           output logic [1:0] resp, input int bdelay = 0);
    @(negedge clk);
    awaddr = a; wdata = d; wstrb = 4'hF; awvalid = 1; wvalid = 1;
    do @(posedge clk); while (!awready);
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    repeat (bdelay) begin
      @(negedge clk);
      check(bvalid, "bvalid dropped before bready");
    end
    bready = 1;
    while (!bvalid) @(negedge clk);
    resp = bresp;
    @(posedge clk);
    @(negedge clk);
    bready = 0;
  endtask

  task automatic axi_read(input logic [AXIL_AW-1:0] a, output logic [31:0] d,
                          output logic [1:0] resp, input int rdelay = 0);
    int lat;
    @(negedge clk);
    araddr = a; arvalid = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk);
    arvalid = 0;
    lat = 0;
    while (!rvalid) begin @(negedge clk); lat++; end
    check(lat == 0, $sformatf("read latency %0d clocks after handshake", lat + 1));
    repeat (rdelay) begin
      @(negedge clk);
      check(rvalid, "rvalid dropped before rready");
    end
    rready = 1;
    d = rdata; resp = rresp;
    @(posedge clk);
    @(negedge clk);
    rready = 0;
  endtask

  logic [31:0] d;
  logic [1:0]  r;

  initial begin
    voted = '0; err_det = '0; wdata = '0; wstrb = '0; awaddr = '0; araddr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    check(data_in == 0 && code_err == 0 && !irq, "reset values");

    axi_write(REG_DATA_IN, 32'hA, r, 2);
    check(r == AXI_RESP_OKAY && data_in == 4'hA, $sformatf("DATA_IN write: resp %0d data_in %h", r, data_in));
    axi_write(REG_CODE_ERR, 32'h80, r);
    check(r == AXI_RESP_OKAY && code_err == 8'h80, "CODE_ERR write");
    axi_read(REG_DATA_IN, d, r, 3);
    check(d == 32'hA && r == AXI_RESP_OKAY, $sformatf("DATA_IN read %h", d));
    axi_read(REG_CODE_ERR, d, r);
    check(d == 32'h80, $sformatf("CODE_ERR read %h", d));

    for (int t = 0; t < 20; t++) begin
      mod_out_t v;
      logic [N_MOD-1:0] e;
      v = mod_out_t'($urandom);
      e = N_MOD'($urandom);
      @(negedge clk);
      voted = v; err_det = e;
      @(posedge clk);
      @(negedge clk);
      check(irq == (e != 0), "irq follows ErrorDetector");
      axi_read(REG_ERRDET, d, r);
      check(d == 32'(e), $sformatf("ERRDET %h expected %h", d, e));
      axi_read(REG_DECODED, d, r);
      check(d == 32'(v.data), $sformatf("DECODED %h expected %h", d, v.data));
      axi_read(REG_ENCODED, d, r);
      check(d == 32'(v.code), $sformatf("ENCODED %h expected %h", d, v.code));
    end

    axi_write(REG_ERRDET, 32'h1F, r);
    check(r == AXI_RESP_OKAY && data_in == 4'hA, "write to read-only register ignored");
    axi_write(5'h14, 32'h5, r);
    check(r == AXI_RESP_SLVERR && data_in == 4'hA && code_err == 8'h80, "write to unknown offset");
    axi_read(5'h18, d, r);
    check(r == AXI_RESP_SLVERR && d == 0, "read of unknown offset");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
