// fifo_monitor: low-level performance counter placed inside the accelerator.
//
// For each of the N edge FIFOs it counts the clock cycles in which that FIFO
// is full while `enable` is high, i.e. how often the consumer actor of that
// edge stalls its producer. `clear` zeroes all counters. Counters are 32
// bits and saturate. Outputs are registered. A FIFO monitor inside the
// accelerator is drawn in the paper; what it counts is this design's
// choice.
module fifo_monitor #(
  parameter int unsigned N = 3
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic                enable,
  input  logic [N-1:0]        full,
  output logic [N-1:0][31:0]  count
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
    end else if (clear) begin
      count <= '0;
    end else if (enable) begin
      for (int i = 0; i < N; i++) begin
        if (full[i] && count[i] != '1) count[i] <= count[i] + 1'b1;
      end
    end
  end
endmodule
