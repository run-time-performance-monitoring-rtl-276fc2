// delay_actor: the "delay" actor of the edge detectors. It memorises one
// pixel: each firing outputs the pixel stored by the previous firing and
// stores the new input.
//
// The actor behaves like a dataflow edge holding one initial token of value
// 0: after `clear` (or reset) the first firing outputs 0. It has no notion
// of image rows, so across a row boundary it returns the last pixel of the
// previous row. `dout` is valid combinationally whenever `fire` is high and
// the state advances on the clock edge of that cycle (zero latency, one
// cycle per firing). The delay function follows the paper; the lock-step
// `fire` interface and the zero initial token are this design's choice.
module delay_actor #(
  parameter int unsigned WIDTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             fire,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);
  logic [WIDTH-1:0] held;

  assign dout = held;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     held <= '0;
    else if (clear) held <= '0;
    else if (fire)  held <= din;
  end
endmodule
