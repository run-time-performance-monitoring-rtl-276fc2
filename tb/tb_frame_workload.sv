// tb_frame_workload: the evaluated workload, one CIF luma frame of 352x288
// pixels cut into 99 blocks of 32x32 (11 x 9), each sent through the
// coprocessor in turn with the Roberts and then the Sobel configuration,
// at default parameters. Every block's output is compared with
// edge_ref_pkg, and after every block the monitor registers are read as a
// PAPI component would (clock cycles, output tokens). Prints the per-frame
// totals of the hardware events and the cycles per frame.
module tb_frame_workload;
  import mdc_pkg::*;
  import edge_ref_pkg::*;
  localparam int FW = 352, FH = 288, B = 32, N = B * B;
  localparam int NBX = FW / B, NBY = FH / B;
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
    repeat (5000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [13:0] maddr(int bank, int word);
    return 14'((bank << 12) | (word << 2));
  endfunction

  task automatic run_frame(bit roberts);
    byte unsigned blk[];
    logic [31:0] d;
    longint tot_cycles = 0, tot_out = 0;
    int bad_blocks = 0, errs;
    bit done;
    blk = new[N];
    for (int by = 0; by < NBY; by++) begin
      for (int bx = 0; bx < NBX; bx++) begin
        for (int i = 0; i < N; i++) begin
          blk[i] = test_pixel(bx * B + i % B, by * B + i / B, 11);
          mb.write(maddr(1, i), {24'd0, blk[i]});
        end
        mb.write(maddr(0, 0), 32'(B));
        rb.write(6'(4 * REG_ID), roberts ? 32'(ID_ROBERTS) : 32'(ID_SOBEL));
        rb.write(6'(4 * REG_SIZE_ISZ), 32'd1);
        rb.write(6'(4 * REG_SIZE_IDAT), 32'(N));
        rb.write(6'(4 * REG_SIZE_ODAT), 32'(N));
        rb.write(6'(4 * REG_CTRL), 32'd1);
        done = 0;
        for (int p = 0; p < 2000 && !done; p++) begin rb.read(6'(4 * REG_CTRL), d); done = d[0]; end
        errs = done ? 0 : 1;
        for (int i = 0; i < N; i++) begin
          mb.read(maddr(2, i), d);
          if (int'(d) != edge_out(blk, i, B, roberts)) errs++;
        end
        if (errs != 0) bad_blocks++;
        rb.read(6'(4 * REG_CYCLES), d);  tot_cycles += d;
        rb.read(6'(4 * REG_OUT_TOK), d); tot_out += d;
      end
    end
    check(bad_blocks == 0, $sformatf("%s frame: %0d wrong blocks", roberts ? "roberts" : "sobel", bad_blocks));
    check(tot_out == longint'(FW * FH), $sformatf("output tokens per frame %0d", tot_out));
    check(tot_cycles <= longint'(NBX * NBY * (N + 12)), "accelerator cycles per frame");
    $display("%s frame %0dx%0d: %0d blocks, MDC_CLOCK_CYCLE total=%0d, output tokens=%0d",
             roberts ? "roberts" : "sobel", FW, FH, NBX * NBY, tot_cycles, tot_out);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    check(NBX * NBY == 99, "99 blocks per frame");
    run_frame(1);
    run_frame(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
