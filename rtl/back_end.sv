// back_end: collects the tokens of the accelerator's output port into its
// local memory bank.
//
// A `start` pulse loads the number of tokens expected (size_out_data) and
// resets the write address to 0. Each token accepted on the valid/ready
// stream is written in the same cycle to consecutive words of port B of
// the bank; the back-end is always ready while tokens are expected. `done`
// rises the cycle after the last token is written (at once for a size of
// 0) and stays high until the next start; `last` pulses in the cycle the
// last token is written. Writing output tokens to local memory follows the
// paper; the rest is this design's choice.
module back_end #(
  parameter int unsigned AW = 10,
  parameter int unsigned DW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [31:0]   size,
  input  logic [DW-1:0] tok_data,
  input  logic          tok_valid,
  output logic          tok_ready,
  // memory port B, write only
  output logic          mem_en,
  output logic          mem_we,
  output logic [AW-1:0] mem_addr,
  output logic [DW-1:0] mem_wdata,
  output logic          last,
  output logic          done
);
  logic [31:0] remaining;
  logic        armed;

  assign tok_ready = armed && (remaining != '0);
  assign mem_en    = tok_valid && tok_ready;
  assign mem_we    = mem_en;
  assign mem_wdata = tok_data;
  assign last      = mem_en && (remaining == 32'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      remaining <= '0;
      mem_addr  <= '0;
      armed     <= 1'b0;
      done      <= 1'b0;
    end else if (start) begin
      remaining <= size;
      mem_addr  <= '0;
      armed     <= 1'b1;
      done      <= 1'b0;
    end else if (armed) begin
      if (mem_en) begin
        remaining <= remaining - 1'b1;
        mem_addr  <= mem_addr + 1'b1;
      end
      if (remaining == '0 || last) begin
        done  <= 1'b1;
        armed <= 1'b0;
      end
    end
  end
endmodule
