// tb_fmr_endurance: long fault-injection run of the FMR IP, in the manner
// of the source design's hour-long hardware test, which performed more than
// 3600 reconfigurations. Each round loads a blank image into one randomly
// chosen copy (every third round into two copies at once), sends random
// non-zero data with an occasional single code-bit error, checks the voted
// result and the error word, and reloads the flagged copies, watching the
// voted output in every clock of every reload. Bitstreams are scaled down
// by SCALE_DIV (the IP itself runs at its only size) so that 3600 repairs
// simulate in seconds; the round count and the number of repairs are
// checked at the end.
module tb_fmr_endurance;
  import fmr_pkg::*;
  import dpr_tb_pkg::*;

  localparam int unsigned SCALE_DIV = 64;
  localparam int unsigned N_REPAIRS = 3600;

  logic clk = 0, rst_n = 0;
  logic [AXIL_AW-1:0] awaddr = '0, araddr = '0;
  logic awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 0;
  logic arvalid = 0, arready, rvalid, rready = 0;
  logic [31:0] wdata = '0, rdata;
  logic [3:0]  wstrb = '0;
  logic [1:0]  bresp, rresp;
  logic [N_MOD-1:0] pr_configured, error_detector;
  mod_out_t fmr_out;
  logic irq;
  // configuration port
  logic        icap_csb = 1, icap_rdwrb = 1;
  logic [31:0] icap_i = '0, icap_o;
  logic        icap_busy;

  int checks = 0, failures = 0;
  int n_single = 0, n_double = 0, n_flip = 0;
  int n_irq = 0, n_recover = 0, n_held = 0;

  always #5 clk = ~clk;   // 100 MHz

  fmr_top dut (
    .clk, .rst_n,
    .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready),
    .s_wdata(wdata), .s_wstrb(wstrb), .s_wvalid(wvalid), .s_wready(wready),
    .s_bresp(bresp), .s_bvalid(bvalid), .s_bready(bready),
    .s_araddr(araddr), .s_arvalid(arvalid), .s_arready(arready),
    .s_rdata(rdata), .s_rresp(rresp), .s_rvalid(rvalid), .s_rready(rready),
    .pr_configured, .fmr_out, .error_detector, .irq);

  icap_model #(.SCALE_DIV(SCALE_DIV)) u_icap (
    .CLK(clk), .CSB(icap_csb), .RDWRB(icap_rdwrb), .I(icap_i), .O(icap_o),
    .BUSY(icap_busy), .region_configured(pr_configured));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // reference extended Hamming code word {p0,p1,p2,d1,p3,d2,d3,d4}
  function automatic logic [7:0] mk(input logic [3:0] d);
    logic p1, p2, p3, p0;
    p1 = d[0] ^ d[1] ^ d[3];
    p2 = d[0] ^ d[2] ^ d[3];
    p3 = d[1] ^ d[2] ^ d[3];
    p0 = p1 ^ p2 ^ p3 ^ d[0] ^ d[1] ^ d[2] ^ d[3];
    return {p0, p1, p2, d[0], p3, d[1], d[2], d[3]};
  endfunction

  // ---------------- AXI4-Lite master (processor) ----------------
  task automatic axi_write(input logic [AXIL_AW-1:0] a, input logic [31:0] d);
    @(negedge clk);
    awaddr = a; wdata = d; wstrb = 4'hF; awvalid = 1; wvalid = 1; bready = 1;
    do @(posedge clk); while (!awready);
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    while (!bvalid) @(negedge clk);
    check(bresp == AXI_RESP_OKAY, "write response");
    @(negedge clk);
    bready = 0;
  endtask

  task automatic axi_read(input logic [AXIL_AW-1:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1; rready = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk);
    arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata;
    @(negedge clk);
    rready = 0;
  endtask

  // ---------------- configuration port writes ----------------
  logic [3:0] cur_data;   // data word the IP currently holds
  logic [7:0] cur_mask;
  bit         watch_out;  // check fmr_out in every clock of a reload

  task automatic icap_word(input logic [31:0] w);
    @(negedge clk);
    icap_csb = 0; icap_rdwrb = 0; icap_i = w;
    @(posedge clk);
    #1;
    if (watch_out) begin
      check(fmr_out.data == cur_data && fmr_out.code == (mk(cur_data) ^ cur_mask),
            "voted output disturbed during reconfiguration");
      n_held++;
    end
  endtask

  task automatic icap_idle();
    @(negedge clk);
    icap_csb = 1; icap_rdwrb = 1;
  endtask

  // load partition r with its good image (blank = 0) or an all-zero image
  task automatic load_image(input int unsigned r, input bit good);
    int unsigned len;
    logic [31:0] xs, w;
    len = bitstream_words(r, SCALE_DIV);
    xs  = '0;
    icap_word(SYNC_WORD);
    icap_word(32'(r));
    icap_word(32'(len));
    for (int unsigned k = 0; k < len; k++) begin
      w = good ? golden_word(r, k) : 32'h0;
      xs ^= w;
      icap_word(w);
    end
    icap_word(xs);
    icap_idle();
  endtask

  // ---------------- one step of the firmware ----------------
  task automatic send_data(input logic [3:0] d, input logic [7:0] mask);
    cur_data = d; cur_mask = mask;
    axi_write(REG_DATA_IN, 32'(d));
    axi_write(REG_CODE_ERR, 32'(mask));
    repeat (2) @(posedge clk);
  endtask

  task automatic read_result(output logic [3:0] dec, output logic [7:0] enc);
    logic [31:0] v;
    axi_read(REG_DECODED, v); dec = v[3:0];
    axi_read(REG_ENCODED, v); enc = v[7:0];
  endtask

  // poll ErrorDetector and reload every marked module, LSB = module 1
  task automatic recover(input logic [N_MOD-1:0] expect_set);
    logic [31:0] e;
    longint t0, t1;
    int waited;
    waited = 0;
    while (!irq && waited < 10) begin @(negedge clk); waited++; end
    check(irq, "interrupt raised for a module in error");
    if (irq) n_irq++;
    axi_read(REG_ERRDET, e);
    check(e[N_MOD-1:0] == expect_set, $sformatf("ErrorDetector %b expected %b", e[N_MOD-1:0], expect_set));
    for (int i = 0; i < N_MOD; i++)
      if (e[i]) begin
        t0 = $time / 10;
        watch_out = 1;
        load_image(i, 1'b1);
        watch_out = 0;
        t1 = $time / 10;
        if (n_recover < 5) $display("recovered module %0d: %0d words, %0d clocks (%.3f ms at 100 MHz for the port transfer)",
                 i + 1, bitstream_words(i, SCALE_DIV), t1 - t0, real'(t1 - t0) * 1.0e-5);
        n_recover++;
      end
    repeat (2) @(posedge clk);
    axi_read(REG_ERRDET, e);
    check(e == 0 && !irq, $sformatf("ErrorDetector %b after recovery", e[N_MOD-1:0]));
  endtask

  // inject blank images into `set`, send data, check result, recover
  task automatic round(input logic [N_MOD-1:0] set, input logic [3:0] d, input logic [7:0] mask);
    logic [3:0] dec;
    logic [7:0] enc;
    for (int i = 0; i < N_MOD; i++) if (set[i]) load_image(i, 1'b0);
    check(pr_configured == ~set, "blank image leaves the partition blank");
    send_data(d, mask);
    // the detector reacts in the same clock, the register one clock later
    check(error_detector == set, $sformatf("detector port %b expected %b", error_detector, set));
    read_result(dec, enc);
    check(dec == d, $sformatf("decoded %b expected %b", dec, d));
    check(enc == (mk(d) ^ mask), $sformatf("encoded %b expected %b", enc, mk(d) ^ mask));
    if ($countones(set) == 1) n_single++;
    if ($countones(set) == 2) n_double++;
    if (mask != 0 && $countones(mask) == 1) n_flip++;
    recover(set);
  endtask

  initial begin
    int rounds;
    watch_out = 0; cur_data = '0; cur_mask = '0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    check(pr_configured == '1 && error_detector == '0 && !irq, "start: all modules configured, no error");
    rounds = 0;
    while (n_recover < int'(N_REPAIRS)) begin
      logic [N_MOD-1:0] set;
      logic [3:0] d;
      logic [7:0] mask;
      int a, b;
      a = $urandom % N_MOD;
      do b = $urandom % N_MOD; while (b == a);
      set = '0; set[a] = 1'b1;
      if (rounds % 3 == 2) set[b] = 1'b1;
      do d = 4'($urandom); while (d == 0);
      mask = ($urandom % 4 == 0) ? (8'b1 << ($urandom % 8)) : 8'b0;
      round(set, d, mask);
      rounds++;
    end
    $display("rounds=%0d repairs=%0d single=%0d double=%0d bitflip=%0d irq=%0d held_clocks=%0d",
             rounds, n_recover, n_single, n_double, n_flip, n_irq, n_held);
    check(n_recover >= int'(N_REPAIRS), "3600 repairs done");
    check(n_single > 0 && n_double > 0 && n_flip > 0, "single, double and bit-flip rounds all occurred");
    check(n_irq == rounds, "one interrupt per round");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
