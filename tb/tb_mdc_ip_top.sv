// tb_mdc_ip_top: end-to-end test of the edge-detection coprocessor IP at its
// default parameters, driven only through its two AXI4-Lite slaves as a
// processor driver would: load a 32x32 block into local memory, program
// ID and sizes, start, poll for done, read back the edge image and the
// monitor registers. Every output pixel is compared with edge_ref_pkg.
// Mechanisms exercised and counted: Sobel runs, Roberts runs, switching
// between the two configurations, monitor read-out (cycles, input and
// output tokens), a run with an unknown ID that must not consume pixels,
// and a stalled run (more output tokens expected than produced) that the
// monitors expose - output tokens below the expected count after more than
// three times the expected cycles - and that a new start recovers from.
module tb_mdc_ip_top;
  import mdc_pkg::*;
  import edge_ref_pkg::*;
  localparam int W = 32, N = 1024;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  axil_bus #(.ADDR_W(6))  rb (.clk);
  axil_bus #(.ADDR_W(14)) mb (.clk);

  mdc_ip_top dut (
    .clk, .rst_n,
    .s_axil_awaddr(rb.awaddr), .s_axil_awvalid(rb.awvalid), .s_axil_awready(rb.awready),
    .s_axil_wdata(rb.wdata), .s_axil_wstrb(rb.wstrb), .s_axil_wvalid(rb.wvalid), .s_axil_wready(rb.wready),
    .s_axil_bresp(rb.bresp), .s_axil_bvalid(rb.bvalid), .s_axil_bready(rb.bready),
    .s_axil_araddr(rb.araddr), .s_axil_arvalid(rb.arvalid), .s_axil_arready(rb.arready),
    .s_axil_rdata(rb.rdata), .s_axil_rresp(rb.rresp), .s_axil_rvalid(rb.rvalid), .s_axil_rready(rb.rready),
    .s_axim_awaddr(mb.awaddr), .s_axim_awvalid(mb.awvalid), .s_axim_awready(mb.awready),
    .s_axim_wdata(mb.wdata), .s_axim_wstrb(mb.wstrb), .s_axim_wvalid(mb.wvalid), .s_axim_wready(mb.wready),
    .s_axim_bresp(mb.bresp), .s_axim_bvalid(mb.bvalid), .s_axim_bready(mb.bready),
    .s_axim_araddr(mb.araddr), .s_axim_arvalid(mb.arvalid), .s_axim_arready(mb.arready),
    .s_axim_rdata(mb.rdata), .s_axim_rresp(mb.rresp), .s_axim_rvalid(mb.rvalid), .s_axim_rready(mb.rready));

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [13:0] maddr(int bank, int word);
    return 14'((bank << 12) | (word << 2));
  endfunction

  int n_sobel = 0, n_roberts = 0, n_switch = 0, n_bad_id = 0, n_stall = 0, n_recover = 0;
  int last_id = -1;
  byte unsigned img[];

  task automatic load_block(int seed);
    img = new[N];
    for (int i = 0; i < N; i++) begin
      img[i] = test_pixel(i % W, i / W, seed);
      mb.write(maddr(1, i), {24'd0, img[i]});
    end
    mb.write(maddr(0, 0), 32'(W));
  endtask

  task automatic start_run(int id, int size_out);
    rb.write(6'(4 * REG_ID), 32'(id));
    rb.write(6'(4 * REG_SIZE_ISZ), 32'd1);
    rb.write(6'(4 * REG_SIZE_IDAT), 32'(N));
    rb.write(6'(4 * REG_SIZE_ODAT), 32'(size_out));
    rb.write(6'(4 * REG_CTRL), 32'd1);
  endtask

  task automatic wait_done(int max_polls, output bit ok);
    logic [31:0] d;
    ok = 0;
    for (int p = 0; p < max_polls && !ok; p++) begin
      rb.read(6'(4 * REG_CTRL), d);
      ok = d[0];
    end
  endtask

  task automatic run_block(bit roberts, int seed);
    logic [31:0] d, cyc, itok, otok, ffull;
    bit ok;
    int errs = 0;
    int id = roberts ? int'(ID_ROBERTS) : int'(ID_SOBEL);
    load_block(seed);
    start_run(id, N);
    wait_done(2000, ok);
    check(ok, "run completes");
    for (int i = 0; i < N; i++) begin
      mb.read(maddr(2, i), d);
      if (int'(d) != edge_out(img, i, W, roberts)) errs++;
    end
    check(errs == 0, $sformatf("%s block %0d: %0d wrong pixels", roberts ? "roberts" : "sobel", seed, errs));
    rb.read(6'(4 * REG_CYCLES), cyc);
    rb.read(6'(4 * REG_IN_TOK), itok);
    rb.read(6'(4 * REG_OUT_TOK), otok);
    rb.read(6'(4 * REG_FIFO_FULL), ffull);
    $display("%s block %0d: cycles=%0d in_tokens=%0d out_tokens=%0d fifo_full=%0d",
             roberts ? "roberts" : "sobel", seed, cyc, itok, otok, ffull);
    check(itok == 32'(N + 1), "input tokens = pixels + in_size");
    check(otok == 32'(N), "output tokens = pixels");
    // one token per cycle: 1024 tokens, 2 cycles to first read, 7-cycle datapath
    check(cyc >= 32'(N) && cyc <= 32'(N + 12), $sformatf("cycle count %0d", cyc));
    if (roberts) n_roberts++; else n_sobel++;
    if (last_id != -1 && last_id != id) n_switch++;
    last_id = id;
  endtask

  initial begin
    logic [31:0] d, otok, cyc;
    bit ok;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_block(0, 1);
    run_block(1, 2);
    run_block(0, 3);
    run_block(1, 4);

    // Unknown configuration ID: the accelerator must take no pixel.
    load_block(5);
    start_run(9, N);
    repeat (2000) @(posedge clk);
    rb.read(6'(4 * REG_IN_TOK), d);
    rb.read(6'(4 * REG_OUT_TOK), otok);
    check(d == 32'd1 && otok == 32'd0, $sformatf("unknown ID: in=%0d out=%0d", d, otok));
    rb.read(6'(4 * REG_CTRL), d);
    check(d[0] == 1'b0 && d[1] == 1'b1, "unknown ID: not done, busy");
    n_bad_id++;

    // Stalled run: the driver expects more tokens than the block produces.
    start_run(int'(ID_ROBERTS), N + 10);
    repeat (3 * (N + 10)) @(posedge clk);
    rb.read(6'(4 * REG_CYCLES), cyc);
    rb.read(6'(4 * REG_OUT_TOK), otok);
    rb.read(6'(4 * REG_CTRL), d);
    if (cyc > 32'(3 * N) && otok < 32'(N + 10) && !d[0]) n_stall++;
    check(n_stall == 1, $sformatf("stall visible: cycles=%0d out=%0d", cyc, otok));
    // manager reaction: restart with the right sizes
    run_block(1, 6);
    n_recover++;
    run_block(0, 7);

    check(n_sobel > 0, "Sobel configuration used");
    check(n_roberts > 0, "Roberts configuration used");
    check(n_switch > 0, "configuration switched");
    check(n_bad_id > 0, "unknown ID run");
    check(n_stall > 0 && n_recover > 0, "stall detected and recovered");
    check(rb.resp_err == 0 && mb.resp_err == 0, "OKAY responses");
    $display("mechanisms: sobel=%0d roberts=%0d switches=%0d bad_id=%0d stall=%0d recover=%0d",
             n_sobel, n_roberts, n_switch, n_bad_id, n_stall, n_recover);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
