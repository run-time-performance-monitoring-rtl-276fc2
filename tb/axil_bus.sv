// axil_bus: AXI4-Lite bus bundle with the master-side tasks the testbenches
// use to access a slave: write(addr, data) and read(addr, data). Both
// drive on the falling clock edge, wait for the handshakes and the
// response, and check the response code is OKAY (counted in `resp_err`).
interface axil_bus #(parameter int unsigned ADDR_W = 6) (input logic clk);
  logic [ADDR_W-1:0] awaddr = '0;
  logic              awvalid = 1'b0, awready;
  logic [31:0]       wdata = '0;
  logic [3:0]        wstrb = 4'hF;
  logic              wvalid = 1'b0, wready;
  logic [1:0]        bresp;
  logic              bvalid, bready = 1'b0;
  logic [ADDR_W-1:0] araddr = '0;
  logic              arvalid = 1'b0, arready;
  logic [31:0]       rdata;
  logic [1:0]        rresp;
  logic              rvalid, rready = 1'b0;
  int                resp_err = 0;

  task automatic write(input logic [ADDR_W-1:0] a, input logic [31:0] d, input logic [3:0] be = 4'hF);
    @(negedge clk);
    awaddr = a; awvalid = 1'b1; wdata = d; wstrb = be; wvalid = 1'b1; bready = 1'b1;
    do @(posedge clk); while (!(awvalid && awready));
    @(negedge clk);
    awvalid = 1'b0; wvalid = 1'b0;
    while (!bvalid) @(negedge clk);
    if (bresp != 2'b00) resp_err++;
    @(posedge clk);
    @(negedge clk);
    bready = 1'b0;
  endtask

  task automatic read(input logic [ADDR_W-1:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1'b1; rready = 1'b1;
    do @(posedge clk); while (!(arvalid && arready));
    @(negedge clk);
    arvalid = 1'b0;
    while (!rvalid) @(negedge clk);
    d = rdata;
    if (rresp != 2'b00) resp_err++;
    @(posedge clk);
    @(negedge clk);
    rready = 1'b0;
  endtask
endinterface
