// edge_fifo: the FIFO that implements one dataflow edge between two actors.
//
// A synchronous FIFO of DEPTH entries with a valid/ready handshake on both
// sides: a token is written when in_valid && in_ready and read when
// out_valid && out_ready. Reading the head is combinational (first-word
// fall-through), so a token written in cycle t can leave in cycle t+1.
// Writing into a full FIFO is allowed in the cycle a token leaves.
// `full` is exported to the FIFO monitor. `clear` empties it synchronously.
// That edges are FIFOs follows the paper; depth and handshake are this
// design's choice.
module edge_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic [WIDTH-1:0] in_data,
  input  logic             in_valid,
  output logic             in_ready,
  output logic [WIDTH-1:0] out_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic             full
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    rd_ptr, wr_ptr;
  logic [PW:0]      count;
  logic             push, pop;

  assign full      = (count == (PW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign in_ready  = !full || out_ready;
  assign pop       = out_valid && out_ready;
  assign push      = in_valid && in_ready;

  function automatic logic [PW-1:0] incr(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else if (clear) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= incr(wr_ptr);
      if (pop)  rd_ptr <= incr(rd_ptr);
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  // A token offered must stay until taken.
  assert property (@(posedge clk) disable iff (!rst_n || clear)
                   out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
