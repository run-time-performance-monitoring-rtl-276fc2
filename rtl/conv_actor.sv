// conv_actor: one convolution actor of the edge detectors (sobel x, sobel y,
// roberts x or roberts y, chosen by the COEF parameter).
//
// Each firing takes one 3x3 pixel window and produces the gradient
// sum(w[r][c] * COEF[r][c]). The Roberts actors use the same module with
// their 2x2 kernel placed in rows/columns 1..2 of COEF (zeros elsewhere).
// The result is registered: one pipeline stage with a valid/ready
// handshake on both sides, latency one cycle, one window per cycle;
// `clear` drops a token held in the stage. The operation and
// coefficients follow the paper's figure; the pipeline stage and 12-bit
// signed result are this design's choice.
module conv_actor
  import mdc_pkg::*;
#(
  parameter kernel_t COEF = K_SOBEL_X
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    clear,
  input  window_t in_data,
  input  logic    in_valid,
  output logic    in_ready,
  output grad_t   out_data,
  output logic    out_valid,
  input  logic    out_ready
);
  grad_t acc;

  always_comb begin
    acc = '0;
    for (int r = 0; r < 3; r++) begin
      for (int c = 0; c < 3; c++) begin
        acc += grad_t'($signed({1'b0, in_data[r][c]})) * grad_t'(COEF[r][c]);
      end
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (clear) begin
      out_valid <= 1'b0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_data <= acc;
    end
  end
endmodule
