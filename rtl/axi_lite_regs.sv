// axi_lite_regs: the coprocessor's configuration register bank
// (reg_slv0 .. reg_slv(M-1)) behind an AXI4-Lite slave.
//
// Register map, byte offset = 4 x index (see mdc_pkg):
//   0 reg_slv0  configuration ID (R/W)
//   1 reg_slv1  control/status: write bit0 = 1 starts an execution;
//               read bit0 = done, bit1 = busy
//   2..4        size_in_size, size_in_data, size_out_data (R/W): number of
//               tokens of each accelerator port
//   5..8        monitors: # clock cycles, # input tokens, # output tokens,
//               total FIFO full (read only)
//   9..11       FIFO monitor, full cycles of edge FIFO 0..2 (read only)
// Writes need AWVALID and WVALID together and honour WSTRB; the response
// comes the next cycle. A read returns data the cycle after ARVALID is
// accepted. One transaction of each kind at a time, responses always OKAY,
// unmapped offsets read 0. `cfg.start` is a one-cycle pulse in the cycle
// after the write to reg_slv1. Configuration, start and monitor values
// travelling through this bank follow the paper; offsets and bit
// assignments are this design's choice.
module axi_lite_regs
  import mdc_pkg::*;
#(
  parameter int unsigned ADDR_W = 6
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] s_awaddr,
  input  logic              s_awvalid,
  output logic              s_awready,
  input  logic [31:0]       s_wdata,
  input  logic [3:0]        s_wstrb,
  input  logic              s_wvalid,
  output logic              s_wready,
  output logic [1:0]        s_bresp,
  output logic              s_bvalid,
  input  logic              s_bready,
  input  logic [ADDR_W-1:0] s_araddr,
  input  logic              s_arvalid,
  output logic              s_arready,
  output logic [31:0]       s_rdata,
  output logic [1:0]        s_rresp,
  output logic              s_rvalid,
  input  logic              s_rready,
  output regs_cfg_t         cfg,
  input  regs_stat_t        stat
);
  logic [31:0] id_q;
  logic        wr, rd;
  logic [ADDR_W-3:0] widx, ridx;

  assign widx      = s_awaddr[ADDR_W-1:2];
  assign ridx      = s_araddr[ADDR_W-1:2];
  assign s_awready = s_awvalid && s_wvalid && !s_bvalid;
  assign s_wready  = s_awready;
  assign wr        = s_awready;
  assign s_arready = !s_rvalid;
  assign rd        = s_arvalid && s_arready;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign cfg.id    = id_q[7:0];

  function automatic logic [31:0] merge(logic [31:0] old, logic [31:0] d, logic [3:0] be);
    for (int b = 0; b < 4; b++) if (be[b]) old[8*b +: 8] = d[8*b +: 8];
    return old;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      id_q              <= '0;
      cfg.start         <= 1'b0;
      cfg.size_in_size  <= '0;
      cfg.size_in_data  <= '0;
      cfg.size_out_data <= '0;
      s_bvalid          <= 1'b0;
    end else begin
      cfg.start <= 1'b0;
      if (wr) begin
        s_bvalid <= 1'b1;
        unique case (int'(widx))
          REG_ID:        id_q              <= merge(id_q, s_wdata, s_wstrb);
          REG_CTRL:      cfg.start         <= s_wstrb[0] && s_wdata[0];
          REG_SIZE_ISZ:  cfg.size_in_size  <= merge(cfg.size_in_size, s_wdata, s_wstrb);
          REG_SIZE_IDAT: cfg.size_in_data  <= merge(cfg.size_in_data, s_wdata, s_wstrb);
          REG_SIZE_ODAT: cfg.size_out_data <= merge(cfg.size_out_data, s_wdata, s_wstrb);
          default: ;
        endcase
      end else if (s_bvalid && s_bready) begin
        s_bvalid <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else if (rd) begin
      s_rvalid <= 1'b1;
      unique case (int'(ridx))
        REG_ID:        s_rdata <= id_q;
        REG_CTRL:      s_rdata <= {30'd0, stat.busy, stat.done};
        REG_SIZE_ISZ:  s_rdata <= cfg.size_in_size;
        REG_SIZE_IDAT: s_rdata <= cfg.size_in_data;
        REG_SIZE_ODAT: s_rdata <= cfg.size_out_data;
        REG_CYCLES:    s_rdata <= stat.cycles;
        REG_IN_TOK:    s_rdata <= stat.in_tokens;
        REG_OUT_TOK:   s_rdata <= stat.out_tokens;
        REG_FIFO_FULL: s_rdata <= stat.fifo_full_total;
        REG_FIFO0:     s_rdata <= stat.fifo_full_cnt[0];
        REG_FIFO0 + 1: s_rdata <= stat.fifo_full_cnt[1];
        REG_FIFO0 + 2: s_rdata <= stat.fifo_full_cnt[2];
        default:       s_rdata <= '0;
      endcase
    end else if (s_rvalid && s_rready) begin
      s_rvalid <= 1'b0;
    end
  end

  // AXI rule: a response, once offered, is held until accepted.
  assert property (@(posedge clk) disable iff (!rst_n) s_bvalid && !s_bready |=> s_bvalid);
  assert property (@(posedge clk) disable iff (!rst_n)
                   s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
endmodule
