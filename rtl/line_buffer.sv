// line_buffer: the "line buffer" actor of the edge detectors. It stores the
// previous image row: each firing outputs the pixel received `line_len`
// firings earlier and stores the new one.
//
// A circular buffer of MAX_LINE pixels is read and written at the same
// address (read before write); the address wraps at `line_len`. Until one
// full row has been stored after `clear`, the output is 0, which plays the
// role of the actor's initial tokens. `dout` is combinational from the
// stored state and valid in the cycle `fire` is high; the state advances on
// that clock edge. `line_len` must be 1..MAX_LINE and held while a block is
// processed. The row buffering follows the paper; MAX_LINE = 32 is the
// paper's block width; zero fill and the lock-step interface are this
// design's choice.
module line_buffer #(
  parameter int unsigned WIDTH    = 8,
  parameter int unsigned MAX_LINE = 32,
  localparam int unsigned AW = (MAX_LINE > 1) ? $clog2(MAX_LINE) : 1,
  localparam int unsigned LW = $clog2(MAX_LINE + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic [LW-1:0]    line_len,
  input  logic             fire,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);
  logic [WIDTH-1:0] mem [MAX_LINE];
  logic [AW-1:0]    ptr;
  logic             filled;   // a full row has been stored

  assign dout = filled ? mem[ptr] : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr    <= '0;
      filled <= 1'b0;
    end else if (clear) begin
      ptr    <= '0;
      filled <= 1'b0;
    end else if (fire) begin
      if (LW'(ptr) == line_len - 1'b1 || LW'(ptr) >= LW'(MAX_LINE - 1)) begin
        ptr    <= '0;
        filled <= 1'b1;
      end else begin
        ptr <= ptr + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (fire) mem[ptr] <= din;
  end
endmodule
