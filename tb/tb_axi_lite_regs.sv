// tb_axi_lite_regs: self-checking test of the configuration register bank
// through AXI4-Lite: write/read back of ID and the three sizes (with byte
// strobes), the one-cycle start pulse on a write of 1 to reg_slv1 (and none
// for a write of 0), status bits, the read-only monitor registers, unmapped
// offsets reading 0, and OKAY responses.
module tb_axi_lite_regs;
  import mdc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  regs_cfg_t cfg;
  regs_stat_t stat;
  int starts = 0;
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && cfg.start) starts++;

  axil_bus #(.ADDR_W(6)) bus (.clk);
  axi_lite_regs #(.ADDR_W(6)) dut (
    .clk, .rst_n,
    .s_awaddr(bus.awaddr), .s_awvalid(bus.awvalid), .s_awready(bus.awready),
    .s_wdata(bus.wdata), .s_wstrb(bus.wstrb), .s_wvalid(bus.wvalid), .s_wready(bus.wready),
    .s_bresp(bus.bresp), .s_bvalid(bus.bvalid), .s_bready(bus.bready),
    .s_araddr(bus.araddr), .s_arvalid(bus.arvalid), .s_arready(bus.arready),
    .s_rdata(bus.rdata), .s_rresp(bus.rresp), .s_rvalid(bus.rvalid), .s_rready(bus.rready),
    .cfg, .stat);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    stat = '0;
    stat.done = 1; stat.busy = 0;
    stat.cycles = 32'd1037; stat.in_tokens = 32'd1025; stat.out_tokens = 32'd1024;
    stat.fifo_full_total = 32'd55;
    stat.fifo_full_cnt[0] = 32'd5; stat.fifo_full_cnt[1] = 32'd20; stat.fifo_full_cnt[2] = 32'd30;
    repeat (2) @(posedge clk);
    rst_n = 1;
    bus.write(6'(4 * REG_ID), 32'd1);
    bus.write(6'(4 * REG_SIZE_ISZ), 32'd1);
    bus.write(6'(4 * REG_SIZE_IDAT), 32'd1024);
    bus.write(6'(4 * REG_SIZE_ODAT), 32'h1234_5678);
    bus.write(6'(4 * REG_SIZE_ODAT), 32'h0000_0400, 4'b0011);
    check(cfg.id == 8'd1 && cfg.size_in_size == 1 && cfg.size_in_data == 1024, "config outputs");
    check(cfg.size_out_data == 32'h1234_0400, "byte strobes");
    bus.read(6'(4 * REG_SIZE_ODAT), d);  check(d == 32'h1234_0400, "read back size_out_data");
    bus.read(6'(4 * REG_ID), d);         check(d == 32'd1, "read back ID");
    check(starts == 0, "no start yet");
    bus.write(6'(4 * REG_CTRL), 32'd0);
    check(starts == 0, "write 0 does not start");
    bus.write(6'(4 * REG_CTRL), 32'd1);
    repeat (3) @(posedge clk);
    check(starts == 1, "exactly one start pulse");
    bus.read(6'(4 * REG_CTRL), d);       check(d == 32'd1, "status done");
    stat.done = 0; stat.busy = 1;
    bus.read(6'(4 * REG_CTRL), d);       check(d == 32'd2, "status busy");
    bus.read(6'(4 * REG_CYCLES), d);     check(d == 32'd1037, "cycles");
    bus.read(6'(4 * REG_IN_TOK), d);     check(d == 32'd1025, "input tokens");
    bus.read(6'(4 * REG_OUT_TOK), d);    check(d == 32'd1024, "output tokens");
    bus.read(6'(4 * REG_FIFO_FULL), d);  check(d == 32'd55, "fifo full total");
    for (int f = 0; f < 3; f++) begin
      bus.read(6'(4 * (REG_FIFO0 + f)), d); check(d == stat.fifo_full_cnt[f], "fifo monitor");
    end
    bus.write(6'(4 * REG_CYCLES), 32'd0);
    bus.read(6'(4 * REG_CYCLES), d);     check(d == 32'd1037, "monitor is read-only");
    bus.read(6'(4 * 14), d);             check(d == 32'd0, "unmapped reads 0");
    check(bus.resp_err == 0, "OKAY responses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
