// sbox_1x2: switching box that steers one token stream to one of two
// successor actors.
//
// With sel = 0 the input tokens go to out0, with sel = 1 to out1; the other
// output offers nothing. Purely combinational: valid and ready pass through
// the selected branch with no added latency. `sel` comes from the
// configuration LUT and must only change between blocks. Switching boxes
// are the paper's mechanism for sharing actors between merged dataflows;
// the handshake is this design's.
module sbox_1x2 #(
  parameter type T = logic [7:0]
) (
  input  logic sel,
  input  T     in_data,
  input  logic in_valid,
  output logic in_ready,
  output T     out0_data,
  output logic out0_valid,
  input  logic out0_ready,
  output T     out1_data,
  output logic out1_valid,
  input  logic out1_ready
);
  assign out0_data  = in_data;
  assign out1_data  = in_data;
  assign out0_valid = in_valid && !sel;
  assign out1_valid = in_valid &&  sel;
  assign in_ready   = sel ? out1_ready : out0_ready;
endmodule
