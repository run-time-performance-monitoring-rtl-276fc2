// tb_axi_mem_bridge: self-checking test of the memory bridge with three
// behavioural one-cycle-latency banks: random AXI4-Lite writes and reads
// over all banks are checked against a model, and each access must reach
// exactly the bank its address selects.
module tb_axi_mem_bridge;
  localparam int NMEM = 3, AW = 6;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [NMEM-1:0] mem_en, mem_we;
  logic [NMEM-1:0][AW-1:0] mem_addr;
  logic [31:0] mem_wdata;
  logic [NMEM-1:0][31:0] mem_rdata;
  logic [31:0] banks[NMEM][1 << AW];
  logic [31:0] model[NMEM][1 << AW];
  always #5 clk = ~clk;

  for (genvar b = 0; b < NMEM; b++) begin : g_bank
    always_ff @(posedge clk) if (mem_en[b]) begin
      mem_rdata[b] <= banks[b][mem_addr[b]];
      if (mem_we[b]) banks[b][mem_addr[b]] <= mem_wdata;
    end
  end

  axil_bus #(.ADDR_W(AW + 4)) bus (.clk);
  axi_mem_bridge #(.NMEM(NMEM), .AW(AW)) dut (
    .clk, .rst_n,
    .s_awaddr(bus.awaddr), .s_awvalid(bus.awvalid), .s_awready(bus.awready),
    .s_wdata(bus.wdata), .s_wstrb(bus.wstrb), .s_wvalid(bus.wvalid), .s_wready(bus.wready),
    .s_bresp(bus.bresp), .s_bvalid(bus.bvalid), .s_bready(bus.bready),
    .s_araddr(bus.araddr), .s_arvalid(bus.arvalid), .s_arready(bus.arready),
    .s_rdata(bus.rdata), .s_rresp(bus.rresp), .s_rvalid(bus.rvalid), .s_rready(bus.rready),
    .mem_en, .mem_we, .mem_addr, .mem_wdata, .mem_rdata);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    int b, w;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (b = 0; b < NMEM; b++) for (w = 0; w < (1 << AW); w++) begin
      model[b][w] = $urandom;
      bus.write(10'((b << (AW + 2)) | (w << 2)), model[b][w]);
    end
    for (b = 0; b < NMEM; b++) for (w = 0; w < (1 << AW); w++)
      check(banks[b][w] == model[b][w], "write reached its bank");
    for (int i = 0; i < 400; i++) begin
      b = $urandom_range(0, NMEM - 1); w = $urandom_range(0, (1 << AW) - 1);
      if ($urandom_range(0, 1)) begin
        model[b][w] = $urandom;
        bus.write(10'((b << (AW + 2)) | (w << 2)), model[b][w]);
      end else begin
        bus.read(10'((b << (AW + 2)) | (w << 2)), d);
        check(d == model[b][w], $sformatf("read bank %0d word %0d", b, w));
      end
    end
    check(bus.resp_err == 0, "OKAY responses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
