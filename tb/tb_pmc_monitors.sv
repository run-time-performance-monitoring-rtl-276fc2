// tb_pmc_monitors: self-checking test of pmc_monitors: during a run of
// known length with random token and FIFO-full activity, the four counters
// must equal the cycles, input handshakes, output handshakes and summed
// full flags counted here; they must hold after done and reset on start.
module tb_pmc_monitors;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, done = 0, out_tok = 0, running;
  logic [1:0] in_tok = 0;
  logic [2:0] fifo_full = 0;
  logic [31:0] cycles, in_tokens, out_tokens, fifo_full_total;
  always #5 clk = ~clk;
  pmc_monitors #(.NIN(2), .NFIFO(3)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int len);
    int e_in = 0, e_out = 0, e_full = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    for (int t = 0; t < len; t++) begin
      in_tok = 2'($urandom); out_tok = $urandom_range(0, 1); fifo_full = 3'($urandom);
      e_in += int'(in_tok[0]) + int'(in_tok[1]); e_out += int'(out_tok);
      e_full += int'(fifo_full[0]) + int'(fifo_full[1]) + int'(fifo_full[2]);
      @(negedge clk);
    end
    done = 1; in_tok = 2'b11; out_tok = 1; fifo_full = 3'b111;
    repeat (5) @(negedge clk);
    done = 0;
    check(!running, "stopped at done");
    check(cycles == 32'(len), $sformatf("cycles %0d exp %0d", cycles, len));
    check(in_tokens == 32'(e_in), "input tokens");
    check(out_tokens == 32'(e_out), "output tokens");
    check(fifo_full_total == 32'(e_full), "total FIFO full");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(100);
    run(1037);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
