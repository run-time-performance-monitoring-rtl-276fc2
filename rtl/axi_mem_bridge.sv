// axi_mem_bridge: system-bus slave that maps the local memory banks into the
// processor's address space (port A of every bank).
//
// AXI4-Lite, 32-bit data. Byte address = bank << (AW+2) | word << 2. A
// write needs AWVALID and WVALID together, is written in the cycle it is
// accepted (full words; WSTRB is ignored) and answered the next cycle. A
// read issues the bank read in the cycle ARVALID is accepted and returns
// RDATA two cycles later (one cycle RAM latency, one output register).
// One transaction of each kind at a time; responses OKAY, accesses to a
// bank number >= NMEM are answered OKAY and read 0. A bus bridge in front
// of the local memory follows the paper's block diagram; the AXI4-Lite
// profile and address layout are this design's choice.
module axi_mem_bridge #(
  parameter int unsigned NMEM = 3,
  parameter int unsigned AW   = 10,
  localparam int unsigned BW  = (NMEM > 1) ? $clog2(NMEM) : 1,
  localparam int unsigned ADDR_W = AW + 2 + BW
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [ADDR_W-1:0]        s_awaddr,
  input  logic                     s_awvalid,
  output logic                     s_awready,
  input  logic [31:0]              s_wdata,
  input  logic [3:0]               s_wstrb,
  input  logic                     s_wvalid,
  output logic                     s_wready,
  output logic [1:0]               s_bresp,
  output logic                     s_bvalid,
  input  logic                     s_bready,
  input  logic [ADDR_W-1:0]        s_araddr,
  input  logic                     s_arvalid,
  output logic                     s_arready,
  output logic [31:0]              s_rdata,
  output logic [1:0]               s_rresp,
  output logic                     s_rvalid,
  input  logic                     s_rready,
  // port A of each bank
  output logic [NMEM-1:0]          mem_en,
  output logic [NMEM-1:0]          mem_we,
  output logic [NMEM-1:0][AW-1:0]  mem_addr,
  output logic [31:0]              mem_wdata,
  input  logic [NMEM-1:0][31:0]    mem_rdata
);
  logic          wr, rd, rd_pend;
  logic [BW-1:0] wbank, rbank, rbank_q;

  assign wbank     = s_awaddr[AW+2 +: BW];
  assign rbank     = s_araddr[AW+2 +: BW];
  assign s_awready = s_awvalid && s_wvalid && !s_bvalid;
  assign s_wready  = s_awready;
  assign wr        = s_awready;
  assign s_arready = !s_rvalid && !rd_pend && !wr;
  assign rd        = s_arvalid && s_arready;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign mem_wdata = s_wdata;

  always_comb begin
    for (int i = 0; i < NMEM; i++) begin
      mem_en[i]   = (wr && int'(wbank) == i) || (rd && int'(rbank) == i);
      mem_we[i]   = wr && int'(wbank) == i;
      mem_addr[i] = wr ? s_awaddr[AW+1:2] : s_araddr[AW+1:2];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid <= 1'b0;
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
      rd_pend  <= 1'b0;
      rbank_q  <= '0;
    end else begin
      if (wr)                        s_bvalid <= 1'b1;
      else if (s_bvalid && s_bready) s_bvalid <= 1'b0;

      rd_pend <= rd;
      if (rd) rbank_q <= rbank;
      if (rd_pend) begin
        s_rvalid <= 1'b1;
        s_rdata  <= (int'(rbank_q) < NMEM) ? mem_rdata[rbank_q] : '0;
      end else if (s_rvalid && s_rready) begin
        s_rvalid <= 1'b0;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) s_bvalid && !s_bready |=> s_bvalid);
  assert property (@(posedge clk) disable iff (!rst_n)
                   s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
endmodule
