// local_memory: one bank of the coprocessor's local memory, through which
// the processor and the accelerator exchange data.
//
// True dual-port RAM of DEPTH words of DW bits. Port A is driven by the
// system-bus memory bridge, port B by the accelerator side (a front-end
// reads input tokens from it, the back-end writes results into it). Both
// ports are synchronous: a read issued with en=1, we=0 in cycle t returns
// the word in rdata in cycle t+1 (read-first when the same port writes).
// Writing one address from both ports in one cycle leaves port B's word.
// A dual-ported bank per accelerator port follows the paper's block
// diagram; depth, width and timing are this design's choice.
module local_memory #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned DW    = 32,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  // port A (system bus)
  input  logic          a_en,
  input  logic          a_we,
  input  logic [AW-1:0] a_addr,
  input  logic [DW-1:0] a_wdata,
  output logic [DW-1:0] a_rdata,
  // port B (accelerator side)
  input  logic          b_en,
  input  logic          b_we,
  input  logic [AW-1:0] b_addr,
  input  logic [DW-1:0] b_wdata,
  output logic [DW-1:0] b_rdata
);
  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      a_rdata <= mem[a_addr];
      if (a_we && !(b_en && b_we && b_addr == a_addr)) mem[a_addr] <= a_wdata;
    end
    if (b_en) begin
      b_rdata <= mem[b_addr];
      if (b_we) mem[b_addr] <= b_wdata;
    end
  end
endmodule
