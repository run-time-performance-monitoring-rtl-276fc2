// mdc_pkg: types and constants shared by the Sobel/Roberts coarse-grain
// reconfigurable edge-detection coprocessor and its monitoring counters.
//
// Holds the pixel, window and gradient types carried between the actors,
// the two kernels' coefficients, the configuration record that the
// configuration LUT hands to the switching boxes, and the register map of
// the AXI4-Lite configuration register bank.
//
// The coefficients are the ones printed in the schematic of the two edge
// detectors, leading minus signs included (see the README on this point);
// the threshold of 80 also follows the paper. Widths, ID encodings, shift
// amounts and register offsets are this design's own choices.
package mdc_pkg;

  localparam int unsigned PIX_W  = 8;   // pixel width
  localparam int unsigned GRAD_W = 12;  // signed gradient width
  localparam int unsigned MAG_W  = 13;  // |gx|+|gy| width
  localparam int unsigned WORD_W = 32;  // bus / memory word

  typedef logic [PIX_W-1:0]         pixel_t;
  typedef logic signed [GRAD_W-1:0] grad_t;
  typedef logic [MAG_W-1:0]         mag_t;

  // 3x3 window, w[r][c] (r,c = 0..2, listed top-left first): w[2][2] is the
  // newest pixel; the row index goes back through line buffers and the
  // column index through delays. Roberts uses the 2x2 sub-window with rows
  // 1..2 and columns 1..2.
  typedef pixel_t [0:2][0:2] window_t;

  typedef struct packed {
    grad_t gx;
    grad_t gy;
  } grad_pair_t;

  // Kernel coefficients k[r][c], 3-bit signed, printed matrix order: k[r][c]
  // multiplies window pixel w[r][c].
  typedef logic signed [2:0] coef_t;
  typedef coef_t [0:2][0:2] kernel_t;

  localparam kernel_t K_SOBEL_X = '{'{ 3'sd1,  3'sd0, -3'sd1},
                                    '{ 3'sd2,  3'sd0, -3'sd2},
                                    '{ 3'sd1,  3'sd0, -3'sd1}};
  localparam kernel_t K_SOBEL_Y = '{'{-3'sd1,  3'sd2,  3'sd1},
                                    '{ 3'sd0,  3'sd0,  3'sd0},
                                    '{-3'sd1, -3'sd2, -3'sd1}};
  // Roberts 2x2 kernels placed in rows/columns 1..2 (row 0, column 0 zero).
  localparam kernel_t K_ROBERTS_X = '{'{ 3'sd0,  3'sd0,  3'sd0},
                                      '{ 3'sd0, -3'sd1,  3'sd0},
                                      '{ 3'sd0,  3'sd0, -3'sd1}};
  localparam kernel_t K_ROBERTS_Y = '{'{ 3'sd0,  3'sd0,  3'sd0},
                                      '{ 3'sd0,  3'sd0,  3'sd1},
                                      '{ 3'sd0, -3'sd1,  3'sd0}};

  localparam int unsigned THRESHOLD_DEF = 80;

  // Configuration IDs (value written to reg_slv0).
  localparam logic [7:0] ID_SOBEL   = 8'd0;
  localparam logic [7:0] ID_ROBERTS = 8'd1;

  typedef enum logic { KSEL_SOBEL = 1'b0, KSEL_ROBERTS = 1'b1 } ksel_e;

  // What the configuration LUT drives.
  typedef struct packed {
    logic       valid;      // ID is a known configuration
    ksel_e      sb_window;  // SBox 1x2: window to sobel (0) or roberts (1) actors
    ksel_e      sb_grad;    // SBox 2x1: gradients from sobel (0) or roberts (1)
    logic       sobel_only; // fire the Sobel-only line buffer and delays
    logic [3:0] shift;      // abs sum scaling factor n
  } cfg_t;

  localparam logic [3:0] SHIFT_SOBEL   = 4'd2;
  localparam logic [3:0] SHIFT_ROBERTS = 4'd1;

  // Register map of the configuration register bank (word index).
  localparam int unsigned REG_ID        = 0;   // reg_slv0
  localparam int unsigned REG_CTRL      = 1;   // reg_slv1
  localparam int unsigned REG_SIZE_ISZ  = 2;   // size_in_size
  localparam int unsigned REG_SIZE_IDAT = 3;   // size_in_data
  localparam int unsigned REG_SIZE_ODAT = 4;   // size_out_data
  localparam int unsigned REG_CYCLES    = 5;   // # clock cycles
  localparam int unsigned REG_IN_TOK    = 6;   // # input tokens
  localparam int unsigned REG_OUT_TOK   = 7;   // # output tokens
  localparam int unsigned REG_FIFO_FULL = 8;   // total FIFO full
  localparam int unsigned REG_FIFO0     = 9;   // FIFO monitor, edge 0..2
  localparam int unsigned NREGS         = 12;

  localparam int unsigned NFIFO = 3;           // edge FIFOs in the datapath

  typedef struct packed {
    logic [7:0]        id;
    logic              start;      // one-cycle pulse
    logic [WORD_W-1:0] size_in_size;
    logic [WORD_W-1:0] size_in_data;
    logic [WORD_W-1:0] size_out_data;
  } regs_cfg_t;

  typedef struct packed {
    logic                         done;
    logic                         busy;
    logic [WORD_W-1:0]            cycles;
    logic [WORD_W-1:0]            in_tokens;
    logic [WORD_W-1:0]            out_tokens;
    logic [WORD_W-1:0]            fifo_full_total;
    logic [NFIFO-1:0][WORD_W-1:0] fifo_full_cnt;
  } regs_stat_t;

endpackage
