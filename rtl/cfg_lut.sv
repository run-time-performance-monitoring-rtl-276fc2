// cfg_lut: the configuration table of the merged Sobel/Roberts datapath.
//
// Translates the configuration ID written by the processor (reg_slv0) into
// the settings of the switching boxes and of the shared actors: which
// convolution actors receive the window, whose gradients reach abs sum,
// whether the Sobel-only line buffer and delays fire, and the abs sum
// scaling factor. An unknown ID yields valid = 0, and the accelerator then
// accepts no pixels. Combinational. A table programming the switching
// boxes per configuration is the paper's; the encodings are this design's.
module cfg_lut
  import mdc_pkg::*;
(
  input  logic [7:0] id,
  output cfg_t       cfg
);
  always_comb begin
    unique case (id)
      ID_SOBEL: cfg = '{valid: 1'b1, sb_window: KSEL_SOBEL, sb_grad: KSEL_SOBEL,
                        sobel_only: 1'b1, shift: SHIFT_SOBEL};
      ID_ROBERTS: cfg = '{valid: 1'b1, sb_window: KSEL_ROBERTS, sb_grad: KSEL_ROBERTS,
                          sobel_only: 1'b0, shift: SHIFT_ROBERTS};
      default: cfg = '{valid: 1'b0, sb_window: KSEL_SOBEL, sb_grad: KSEL_SOBEL,
                       sobel_only: 1'b0, shift: 4'd0};
    endcase
  end
endmodule
