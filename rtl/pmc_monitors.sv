// pmc_monitors: the accelerator-level performance monitoring counters.
//
// Four 32-bit counters, zeroed by `start` and counting from the next cycle
// until `done` is seen high: the number of clock cycles of the execution,
// the number of input tokens accepted on all accelerator input ports, the
// number of output tokens produced, and the total FIFO-full count (the sum
// over all edge FIFOs of the cycles each is full). The cycle in which the
// last output token is written is counted; counting stops the cycle done
// is seen, and the values hold until the next start. Counters saturate.
// These four monitors are the ones the paper places around the
// accelerator; the exact start/stop points are this design's choice.
module pmc_monitors #(
  parameter int unsigned NIN   = 2,
  parameter int unsigned NFIFO = 3
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             done,
  input  logic [NIN-1:0]   in_tok,
  input  logic             out_tok,
  input  logic [NFIFO-1:0] fifo_full,
  output logic             running,
  output logic [31:0]      cycles,
  output logic [31:0]      in_tokens,
  output logic [31:0]      out_tokens,
  output logic [31:0]      fifo_full_total
);
  function automatic logic [31:0] sat_add(logic [31:0] a, logic [31:0] b);
    logic [32:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[32] ? '1 : s[31:0];
  endfunction

  logic [31:0] n_in, n_full;

  always_comb begin
    n_in   = '0;
    n_full = '0;
    for (int i = 0; i < NIN; i++)   n_in   += 32'(in_tok[i]);
    for (int i = 0; i < NFIFO; i++) n_full += 32'(fifo_full[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running         <= 1'b0;
      cycles          <= '0;
      in_tokens       <= '0;
      out_tokens      <= '0;
      fifo_full_total <= '0;
    end else if (start) begin
      running         <= 1'b1;
      cycles          <= '0;
      in_tokens       <= '0;
      out_tokens      <= '0;
      fifo_full_total <= '0;
    end else if (running) begin
      if (done) begin
        running <= 1'b0;
      end else begin
        cycles          <= sat_add(cycles, 32'd1);
        in_tokens       <= sat_add(in_tokens, n_in);
        out_tokens      <= sat_add(out_tokens, 32'(out_tok));
        fifo_full_total <= sat_add(fifo_full_total, n_full);
      end
    end
  end
endmodule
