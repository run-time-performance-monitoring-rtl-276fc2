// front_end: feeds one input port of the accelerator from its local memory
// bank.
//
// A `start` pulse loads the number of words to send (the size word that
// the processor wrote for this port) and resets the read address to 0.
// The front-end then reads consecutive words from port B of the bank and
// offers each as a token on a valid/ready stream. Reads are issued ahead
// into a two-entry buffer, so once running it sends one token per cycle
// while the accelerator accepts them; the first token leaves two cycles
// after the start pulse. `busy` is high from the start pulse until the
// last token has been accepted. Streaming a port's data from local memory
// on a start command follows the paper; the prefetch scheme is this
// design's.
module front_end #(
  parameter int unsigned AW = 10,
  parameter int unsigned DW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [31:0]   size,
  // memory port B, read only
  output logic          mem_en,
  output logic [AW-1:0] mem_addr,
  input  logic [DW-1:0] mem_rdata,
  // token stream to the accelerator
  output logic [DW-1:0] tok_data,
  output logic          tok_valid,
  input  logic          tok_ready,
  output logic          busy
);
  logic [31:0] remaining;   // words not yet read
  logic [1:0]  occ;         // words read or in flight, not yet sent
  logic        inflight;    // a read was issued last cycle
  logic        pop, issue;

  assign pop      = tok_valid && tok_ready;
  assign issue    = (remaining != '0) && (occ < 2'd2 || pop) && !start;
  assign mem_en   = issue;
  assign busy     = (remaining != '0) || (occ != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      remaining <= '0;
      occ       <= '0;
      inflight  <= 1'b0;
      mem_addr  <= '0;
    end else if (start) begin
      remaining <= size;
      occ       <= '0;
      inflight  <= 1'b0;
      mem_addr  <= '0;
    end else begin
      inflight <= issue;
      if (issue) begin
        remaining <= remaining - 1'b1;
        mem_addr  <= mem_addr + 1'b1;
      end
      occ <= occ + 2'(issue) - 2'(pop);
    end
  end

  // The read address is registered: a read issued in cycle t uses the
  // address counter value of cycle t, which then advances.
  edge_fifo #(.WIDTH(DW), .DEPTH(2)) u_buf (
    .clk, .rst_n, .clear(start),
    .in_data(mem_rdata), .in_valid(inflight), .in_ready(),
    .out_data(tok_data), .out_valid(tok_valid), .out_ready(tok_ready), .full());
endmodule
