// sbox_2x1: switching box that selects which of two predecessor actors feeds
// a shared actor.
//
// With sel = 0 tokens from in0 pass to the output, with sel = 1 tokens from
// in1; the unselected input sees ready low and is held. Combinational, no
// added latency. `sel` comes from the configuration LUT and must only
// change between blocks. The mechanism follows the paper; the handshake is
// this design's.
module sbox_2x1 #(
  parameter type T = logic [7:0]
) (
  input  logic sel,
  input  T     in0_data,
  input  logic in0_valid,
  output logic in0_ready,
  input  T     in1_data,
  input  logic in1_valid,
  output logic in1_ready,
  output T     out_data,
  output logic out_valid,
  input  logic out_ready
);
  assign out_data  = sel ? in1_data  : in0_data;
  assign out_valid = sel ? in1_valid : in0_valid;
  assign in0_ready = out_ready && !sel;
  assign in1_ready = out_ready &&  sel;
endmodule
