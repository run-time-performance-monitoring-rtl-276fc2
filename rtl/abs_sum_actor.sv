// abs_sum_actor: the "abs sum" actor shared by both edge detectors.
//
// Each firing takes a gradient pair (gx, gy) and produces
// (|gx| + |gy|) >> shift, where `shift` is the scaling factor n of the
// active configuration. One registered stage with a valid/ready
// handshake, latency one cycle, one pair per cycle; `clear` empties it.
// The function follows the paper; the values of n are set by the
// configuration LUT and are this design's choice, as is the pipeline stage.
module abs_sum_actor
  import mdc_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  input  logic [3:0] shift,
  input  grad_pair_t in_data,
  input  logic       in_valid,
  output logic       in_ready,
  output mag_t       out_data,
  output logic       out_valid,
  input  logic       out_ready
);
  mag_t ax, ay, sum;

  always_comb begin
    ax  = in_data.gx[GRAD_W-1] ? mag_t'(-in_data.gx) : mag_t'(in_data.gx);
    ay  = in_data.gy[GRAD_W-1] ? mag_t'(-in_data.gy) : mag_t'(in_data.gy);
    sum = (ax + ay) >> shift;
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
      if (in_valid) out_data <= sum;
    end
  end
endmodule
