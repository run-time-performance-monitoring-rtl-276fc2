// thr_actor: the thresholding actor "thr" shared by both edge detectors.
//
// Each firing outputs 255 if the magnitude is above THRESHOLD and 0
// otherwise. One registered stage with a valid/ready handshake, latency
// one cycle, one pixel per cycle; `clear` empties it. The threshold of 80
// is the paper's; "above" is taken as strictly greater, and the pipeline
// stage is this design's.
module thr_actor
  import mdc_pkg::*;
#(
  parameter int unsigned THRESHOLD = THRESHOLD_DEF
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,
  input  mag_t   in_data,
  input  logic   in_valid,
  output logic   in_ready,
  output pixel_t out_data,
  output logic   out_valid,
  input  logic   out_ready
);
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (clear) begin
      out_valid <= 1'b0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_data <= (in_data > mag_t'(THRESHOLD)) ? 8'd255 : 8'd0;
    end
  end
endmodule
