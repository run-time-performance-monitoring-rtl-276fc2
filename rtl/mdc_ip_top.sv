// mdc_ip_top: the memory-mapped edge-detection coprocessor with its
// performance monitoring counters, as one IP with two AXI4-Lite slaves.
//
// The processor programs the IP through the configuration register slave
// (s_axil_*: configuration ID, port sizes, start, status and monitors, see
// axi_lite_regs) and exchanges data through the local memory slave
// (s_axim_*: three banks, see axi_mem_bridge):
//   bank 0  port in_size   one word, the row length of the block
//   bank 1  port in_data   the pixels of the block, one per word (bits 7:0)
//   bank 2  port out_data  the edge pixels, one per word (0 or 255)
// A run: write the pixels to bank 1 and the row length to bank 0, write
// the ID (0 Sobel, 1 Roberts) and the three sizes, write 1 to reg_slv1,
// poll reg_slv1 until done, read bank 2 and, if wanted, the monitors. On
// start two front-ends stream banks 0 and 1 into the accelerator's in_size
// and in_data ports, the back-end writes its out_data tokens to bank 2, and
// the monitors count cycles, input tokens, output tokens and FIFO-full
// cycles of that run. A 32x32 block takes about 1030 cycles from start to
// done. The partitioning into register bank, local memory, front-end,
// back-end, accelerator and monitors follows the paper; the number of banks,
// their mapping to ports and all bus details are this design's choices.
module mdc_ip_top
  import mdc_pkg::*;
#(
  parameter int unsigned MEM_DEPTH = 1024,
  parameter int unsigned MAX_LINE  = 32,
  localparam int unsigned NMEM   = 3,
  localparam int unsigned MAW    = $clog2(MEM_DEPTH),
  localparam int unsigned MADDR_W = MAW + 2 + $clog2(NMEM),
  localparam int unsigned RADDR_W = 6
) (
  input  logic               clk,
  input  logic               rst_n,
  // configuration registers (AXI_lite)
  input  logic [RADDR_W-1:0] s_axil_awaddr,
  input  logic               s_axil_awvalid,
  output logic               s_axil_awready,
  input  logic [31:0]        s_axil_wdata,
  input  logic [3:0]         s_axil_wstrb,
  input  logic               s_axil_wvalid,
  output logic               s_axil_wready,
  output logic [1:0]         s_axil_bresp,
  output logic               s_axil_bvalid,
  input  logic               s_axil_bready,
  input  logic [RADDR_W-1:0] s_axil_araddr,
  input  logic               s_axil_arvalid,
  output logic               s_axil_arready,
  output logic [31:0]        s_axil_rdata,
  output logic [1:0]         s_axil_rresp,
  output logic               s_axil_rvalid,
  input  logic               s_axil_rready,
  // local memories (AXI_ipif)
  input  logic [MADDR_W-1:0] s_axim_awaddr,
  input  logic               s_axim_awvalid,
  output logic               s_axim_awready,
  input  logic [31:0]        s_axim_wdata,
  input  logic [3:0]         s_axim_wstrb,
  input  logic               s_axim_wvalid,
  output logic               s_axim_wready,
  output logic [1:0]         s_axim_bresp,
  output logic               s_axim_bvalid,
  input  logic               s_axim_bready,
  input  logic [MADDR_W-1:0] s_axim_araddr,
  input  logic               s_axim_arvalid,
  output logic               s_axim_arready,
  output logic [31:0]        s_axim_rdata,
  output logic [1:0]         s_axim_rresp,
  output logic               s_axim_rvalid,
  input  logic               s_axim_rready
);
  regs_cfg_t  cfg;
  regs_stat_t stat;

  axi_lite_regs #(.ADDR_W(RADDR_W)) u_regs (
    .clk, .rst_n,
    .s_awaddr(s_axil_awaddr), .s_awvalid(s_axil_awvalid), .s_awready(s_axil_awready),
    .s_wdata(s_axil_wdata), .s_wstrb(s_axil_wstrb), .s_wvalid(s_axil_wvalid), .s_wready(s_axil_wready),
    .s_bresp(s_axil_bresp), .s_bvalid(s_axil_bvalid), .s_bready(s_axil_bready),
    .s_araddr(s_axil_araddr), .s_arvalid(s_axil_arvalid), .s_arready(s_axil_arready),
    .s_rdata(s_axil_rdata), .s_rresp(s_axil_rresp), .s_rvalid(s_axil_rvalid), .s_rready(s_axil_rready),
    .cfg, .stat);

  // ------------------------------------------------------- local memories
  logic [NMEM-1:0]           a_en, a_we;
  logic [NMEM-1:0][MAW-1:0]  a_addr;
  logic [31:0]               a_wdata;
  logic [NMEM-1:0][31:0]     a_rdata;
  logic [NMEM-1:0]           b_en, b_we;
  logic [NMEM-1:0][MAW-1:0]  b_addr;
  logic [NMEM-1:0][31:0]     b_wdata, b_rdata;

  axi_mem_bridge #(.NMEM(NMEM), .AW(MAW)) u_ipif (
    .clk, .rst_n,
    .s_awaddr(s_axim_awaddr), .s_awvalid(s_axim_awvalid), .s_awready(s_axim_awready),
    .s_wdata(s_axim_wdata), .s_wstrb(s_axim_wstrb), .s_wvalid(s_axim_wvalid), .s_wready(s_axim_wready),
    .s_bresp(s_axim_bresp), .s_bvalid(s_axim_bvalid), .s_bready(s_axim_bready),
    .s_araddr(s_axim_araddr), .s_arvalid(s_axim_arvalid), .s_arready(s_axim_arready),
    .s_rdata(s_axim_rdata), .s_rresp(s_axim_rresp), .s_rvalid(s_axim_rvalid), .s_rready(s_axim_rready),
    .mem_en(a_en), .mem_we(a_we), .mem_addr(a_addr), .mem_wdata(a_wdata), .mem_rdata(a_rdata));

  for (genvar i = 0; i < NMEM; i++) begin : g_mem
    local_memory #(.DEPTH(MEM_DEPTH), .DW(32)) u_local_memory (
      .clk,
      .a_en(a_en[i]), .a_we(a_we[i]), .a_addr(a_addr[i]), .a_wdata(a_wdata), .a_rdata(a_rdata[i]),
      .b_en(b_en[i]), .b_we(b_we[i]), .b_addr(b_addr[i]), .b_wdata(b_wdata[i]), .b_rdata(b_rdata[i]));
  end

  // ------------------------------------------------ front-ends, back-end
  logic [31:0] isz_tok, idat_tok;
  logic        isz_valid, isz_ready, idat_valid, idat_ready;
  logic        fe0_busy, fe1_busy;
  pixel_t      odat_tok;
  logic        odat_valid, odat_ready;
  logic        be_last, be_done;

  assign b_we[0]    = 1'b0;
  assign b_we[1]    = 1'b0;
  assign b_wdata[0] = '0;
  assign b_wdata[1] = '0;

  front_end #(.AW(MAW), .DW(32)) u_front_end_in_size (
    .clk, .rst_n, .start(cfg.start), .size(cfg.size_in_size),
    .mem_en(b_en[0]), .mem_addr(b_addr[0]), .mem_rdata(b_rdata[0]),
    .tok_data(isz_tok), .tok_valid(isz_valid), .tok_ready(isz_ready), .busy(fe0_busy));

  front_end #(.AW(MAW), .DW(32)) u_front_end_in_data (
    .clk, .rst_n, .start(cfg.start), .size(cfg.size_in_data),
    .mem_en(b_en[1]), .mem_addr(b_addr[1]), .mem_rdata(b_rdata[1]),
    .tok_data(idat_tok), .tok_valid(idat_valid), .tok_ready(idat_ready), .busy(fe1_busy));

  back_end #(.AW(MAW), .DW(32)) u_back_end (
    .clk, .rst_n, .start(cfg.start), .size(cfg.size_out_data),
    .tok_data({24'd0, odat_tok}), .tok_valid(odat_valid), .tok_ready(odat_ready),
    .mem_en(b_en[2]), .mem_we(b_we[2]), .mem_addr(b_addr[2]), .mem_wdata(b_wdata[2]),
    .last(be_last), .done(be_done));

  // ------------------------------------------------------- accelerator
  logic [NFIFO-1:0]       fifo_full;
  logic [NFIFO-1:0][31:0] fifo_full_cnt;
  logic                   running, cfg_valid;

  mdc_cgr_accel #(.MAX_LINE(MAX_LINE)) u_accel (
    .clk, .rst_n, .start(cfg.start), .running, .id(cfg.id),
    .in_size_data(isz_tok), .in_size_valid(isz_valid), .in_size_ready(isz_ready),
    .in_data_data(idat_tok[PIX_W-1:0]), .in_data_valid(idat_valid), .in_data_ready(idat_ready),
    .out_data_data(odat_tok), .out_data_valid(odat_valid), .out_data_ready(odat_ready),
    .fifo_full, .fifo_full_cnt, .cfg_valid);

  // ------------------------------------------------------- monitors
  pmc_monitors #(.NIN(2), .NFIFO(NFIFO)) u_pmc (
    .clk, .rst_n, .start(cfg.start), .done(be_done),
    .in_tok({isz_valid && isz_ready, idat_valid && idat_ready}),
    .out_tok(odat_valid && odat_ready), .fifo_full,
    .running, .cycles(stat.cycles), .in_tokens(stat.in_tokens),
    .out_tokens(stat.out_tokens), .fifo_full_total(stat.fifo_full_total));

  assign stat.done          = be_done;
  assign stat.busy          = running || fe0_busy || fe1_busy;
  assign stat.fifo_full_cnt = fifo_full_cnt;
endmodule
