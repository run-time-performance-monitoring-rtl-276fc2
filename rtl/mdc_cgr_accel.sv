// mdc_cgr_accel: the coarse-grain reconfigurable accelerator that merges the
// Sobel and Roberts edge-detection dataflows into one datapath.
//
// Datapath, from the pixel input to the output:
//   * window stage: the actors common to both detectors (one line buffer
//     and two delays) fire for every pixel; the Sobel-only second line
//     buffer and three delays fire only in the Sobel configuration. Their
//     outputs and the incoming pixel form a 3x3 window (Roberts uses its
//     lower-right 2x2), registered once.
//   * SBox 1x2 sends the window to the sobel x / sobel y actors or to the
//     roberts x / roberts y actors; each pair fires together.
//   * SBox 2x1 passes the selected gradient pair to the shared abs sum
//     actor, through edge FIFO 0; abs sum feeds thr through edge FIFO 1;
//     thr feeds the output port through edge FIFO 2.
//   * The FIFO monitor counts the full cycles of the three edge FIFOs.
// Ports: in_size takes one token, the row length of the block, before any
// pixel is accepted; in_data takes pixels; out_data gives one binary edge
// pixel (0 or 255) per input pixel. All three use valid/ready. `start`
// restores the initial state (initial tokens of the delays and line
// buffers, empty FIFOs and pipeline stages, row length unknown) and
// latches the configuration of `id`.
// Timing: one pixel per cycle when the output is not stalled; a pixel
// accepted at clock edge t leaves out_data at edge t+7 (window register,
// conv, FIFO 0, abs sum, FIFO 1, thr and FIFO 2 add one cycle each).
// Structure, kernels and threshold follow the paper; the sharing pattern,
// handshake, FIFO placement and depth and the meaning of in_size are this
// design's choices.
module mdc_cgr_accel
  import mdc_pkg::*;
#(
  parameter int unsigned MAX_LINE   = 32,
  parameter int unsigned FIFO_DEPTH = 4,
  parameter int unsigned THRESHOLD  = THRESHOLD_DEF,
  localparam int unsigned LW = $clog2(MAX_LINE + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic                    running,
  input  logic [7:0]              id,
  // port in_size
  input  logic [WORD_W-1:0]       in_size_data,
  input  logic                    in_size_valid,
  output logic                    in_size_ready,
  // port in_data
  input  pixel_t                  in_data_data,
  input  logic                    in_data_valid,
  output logic                    in_data_ready,
  // port out_data
  output pixel_t                  out_data_data,
  output logic                    out_data_valid,
  input  logic                    out_data_ready,
  // low-level monitoring
  output logic [NFIFO-1:0]        fifo_full,
  output logic [NFIFO-1:0][31:0]  fifo_full_cnt,
  output logic                    cfg_valid
);
  cfg_t lut_cfg, cfg;
  cfg_lut u_lut (.id(id), .cfg(lut_cfg));

  // ---------------------------------------------------------------- in_size
  logic          size_loaded;
  logic [LW-1:0] line_len;

  assign in_size_ready = !size_loaded;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      size_loaded <= 1'b0;
      line_len    <= LW'(MAX_LINE);
      cfg         <= '0;
    end else if (start) begin
      size_loaded <= 1'b0;
      cfg         <= lut_cfg;
    end else if (in_size_valid && in_size_ready) begin
      size_loaded <= 1'b1;
      // clamp to 1..MAX_LINE
      if (in_size_data == '0)                      line_len <= LW'(1);
      else if (in_size_data > WORD_W'(MAX_LINE))   line_len <= LW'(MAX_LINE);
      else                                         line_len <= LW'(in_size_data);
    end
  end

  assign cfg_valid = cfg.valid;

  // ----------------------------------------------------------- window stage
  window_t win_d, win_q;
  logic    win_valid, win_ready;   // registered window and its consumer
  logic    fire, fire_sobel;

  assign in_data_ready = size_loaded && cfg.valid && (!win_valid || win_ready);
  assign fire          = in_data_valid && in_data_ready;
  assign fire_sobel    = fire && cfg.sobel_only;

  pixel_t d21, lb12, d11;               // shared actors
  pixel_t d20, d10, lb02, d01, d00;     // Sobel-only actors

  // Shared between the two detectors.
  delay_actor #(.WIDTH(PIX_W)) u_delay_21 (.clk, .rst_n, .clear(start), .fire(fire),
                                           .din(in_data_data), .dout(d21));
  line_buffer #(.WIDTH(PIX_W), .MAX_LINE(MAX_LINE)) u_line_buffer_1 (
    .clk, .rst_n, .clear(start), .line_len, .fire(fire), .din(in_data_data), .dout(lb12));
  delay_actor #(.WIDTH(PIX_W)) u_delay_11 (.clk, .rst_n, .clear(start), .fire(fire),
                                           .din(lb12), .dout(d11));
  // Sobel only.
  delay_actor #(.WIDTH(PIX_W)) u_delay_20 (.clk, .rst_n, .clear(start), .fire(fire_sobel),
                                           .din(d21), .dout(d20));
  delay_actor #(.WIDTH(PIX_W)) u_delay_10 (.clk, .rst_n, .clear(start), .fire(fire_sobel),
                                           .din(d11), .dout(d10));
  line_buffer #(.WIDTH(PIX_W), .MAX_LINE(MAX_LINE)) u_line_buffer_0 (
    .clk, .rst_n, .clear(start), .line_len, .fire(fire_sobel), .din(lb12), .dout(lb02));
  delay_actor #(.WIDTH(PIX_W)) u_delay_01 (.clk, .rst_n, .clear(start), .fire(fire_sobel),
                                           .din(lb02), .dout(d01));
  delay_actor #(.WIDTH(PIX_W)) u_delay_00 (.clk, .rst_n, .clear(start), .fire(fire_sobel),
                                           .din(d01), .dout(d00));

  always_comb begin
    win_d       = '0;
    win_d[2][2] = in_data_data;
    win_d[2][1] = d21;
    win_d[1][2] = lb12;
    win_d[1][1] = d11;
    if (cfg.sobel_only) begin
      win_d[2][0] = d20;
      win_d[1][0] = d10;
      win_d[0][2] = lb02;
      win_d[0][1] = d01;
      win_d[0][0] = d00;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win_valid <= 1'b0;
      win_q     <= '0;
    end else if (start) begin
      win_valid <= 1'b0;
    end else if (!win_valid || win_ready) begin
      win_valid <= fire;
      if (fire) win_q <= win_d;
    end
  end

  // ------------------------------------------------------- SBox 1x2 (window)
  window_t sw_data, rw_data;
  logic    sw_valid, sw_ready, rw_valid, rw_ready;

  sbox_1x2 #(.T(window_t)) u_sb_window (
    .sel(cfg.sb_window),
    .in_data(win_q), .in_valid(win_valid), .in_ready(win_ready),
    .out0_data(sw_data), .out0_valid(sw_valid), .out0_ready(sw_ready),
    .out1_data(rw_data), .out1_valid(rw_valid), .out1_ready(rw_ready));

  // ------------------------------------------------ convolution actor pairs
  grad_t sx_q, sy_q, rx_q, ry_q;
  logic  sx_ir, sy_ir, rx_ir, ry_ir;      // input ready
  logic  sx_ov, sy_ov, rx_ov, ry_ov;      // output valid
  logic  s_pair_ready, r_pair_ready;

  assign sw_ready = sx_ir && sy_ir;
  assign rw_ready = rx_ir && ry_ir;

  conv_actor #(.COEF(K_SOBEL_X)) u_sobel_x (
    .clk, .rst_n, .clear(start), .in_data(sw_data), .in_valid(sw_valid && sy_ir), .in_ready(sx_ir),
    .out_data(sx_q), .out_valid(sx_ov), .out_ready(s_pair_ready && sy_ov));
  conv_actor #(.COEF(K_SOBEL_Y)) u_sobel_y (
    .clk, .rst_n, .clear(start), .in_data(sw_data), .in_valid(sw_valid && sx_ir), .in_ready(sy_ir),
    .out_data(sy_q), .out_valid(sy_ov), .out_ready(s_pair_ready && sx_ov));
  conv_actor #(.COEF(K_ROBERTS_X)) u_roberts_x (
    .clk, .rst_n, .clear(start), .in_data(rw_data), .in_valid(rw_valid && ry_ir), .in_ready(rx_ir),
    .out_data(rx_q), .out_valid(rx_ov), .out_ready(r_pair_ready && ry_ov));
  conv_actor #(.COEF(K_ROBERTS_Y)) u_roberts_y (
    .clk, .rst_n, .clear(start), .in_data(rw_data), .in_valid(rw_valid && rx_ir), .in_ready(ry_ir),
    .out_data(ry_q), .out_valid(ry_ov), .out_ready(r_pair_ready && rx_ov));

  // ------------------------------------------------------ SBox 2x1 (grads)
  grad_pair_t g_data;
  logic       g_valid, g_ready;

  sbox_2x1 #(.T(grad_pair_t)) u_sb_grad (
    .sel(cfg.sb_grad),
    .in0_data('{gx: sx_q, gy: sy_q}), .in0_valid(sx_ov && sy_ov), .in0_ready(s_pair_ready),
    .in1_data('{gx: rx_q, gy: ry_q}), .in1_valid(rx_ov && ry_ov), .in1_ready(r_pair_ready),
    .out_data(g_data), .out_valid(g_valid), .out_ready(g_ready));

  // ------------------------------------------- edge FIFO 0 -> abs sum -> ...
  grad_pair_t e0_data;
  logic       e0_valid, e0_ready;
  mag_t       as_data, e1_data;
  logic       as_valid, as_ready, e1_valid, e1_ready;
  pixel_t     th_data;
  logic       th_valid, th_ready;

  edge_fifo #(.WIDTH($bits(grad_pair_t)), .DEPTH(FIFO_DEPTH)) u_edge0 (
    .clk, .rst_n, .clear(start),
    .in_data(g_data), .in_valid(g_valid), .in_ready(g_ready),
    .out_data(e0_data), .out_valid(e0_valid), .out_ready(e0_ready), .full(fifo_full[0]));

  abs_sum_actor u_abs_sum (
    .clk, .rst_n, .clear(start), .shift(cfg.shift),
    .in_data(e0_data), .in_valid(e0_valid), .in_ready(e0_ready),
    .out_data(as_data), .out_valid(as_valid), .out_ready(as_ready));

  edge_fifo #(.WIDTH(MAG_W), .DEPTH(FIFO_DEPTH)) u_edge1 (
    .clk, .rst_n, .clear(start),
    .in_data(as_data), .in_valid(as_valid), .in_ready(as_ready),
    .out_data(e1_data), .out_valid(e1_valid), .out_ready(e1_ready), .full(fifo_full[1]));

  thr_actor #(.THRESHOLD(THRESHOLD)) u_thr (
    .clk, .rst_n, .clear(start),
    .in_data(e1_data), .in_valid(e1_valid), .in_ready(e1_ready),
    .out_data(th_data), .out_valid(th_valid), .out_ready(th_ready));

  edge_fifo #(.WIDTH(PIX_W), .DEPTH(FIFO_DEPTH)) u_edge2 (
    .clk, .rst_n, .clear(start),
    .in_data(th_data), .in_valid(th_valid), .in_ready(th_ready),
    .out_data(out_data_data), .out_valid(out_data_valid), .out_ready(out_data_ready),
    .full(fifo_full[2]));

  // ------------------------------------------------------- FIFO monitor
  fifo_monitor #(.N(NFIFO)) u_fifo_monitor (
    .clk, .rst_n, .clear(start), .enable(running), .full(fifo_full), .count(fifo_full_cnt));

endmodule
