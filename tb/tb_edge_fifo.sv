// tb_edge_fifo: self-checking test of edge_fifo.
// Pushes a counting sequence with random valid/ready patterns on both
// sides, checks the order of the tokens against a queue model, the full
// flag against the model's occupancy, that a full FIFO still takes a token
// in the cycle one leaves, and that clear empties it.
module tb_edge_fifo;
  localparam int DEPTH = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0;
  logic [7:0] in_data = 0, out_data;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, full;
  logic [7:0] model[$];
  int nfull = 0;
  bit do_pop, do_push;

  always #5 clk = ~clk;

  edge_fifo #(.WIDTH(8), .DEPTH(DEPTH)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      in_valid  = ($urandom_range(0, 3) != 0);
      out_ready = (cyc < 1500) ? ($urandom_range(0, 3) == 0) : ($urandom_range(0, 3) != 0);
      #1;
      check(full == (model.size() == DEPTH), "full flag");
      check(out_valid == (model.size() != 0), "out_valid");
      check(in_ready == (model.size() < DEPTH || out_ready), "in_ready");
      if (out_valid) check(out_data == model[0], $sformatf("order: got %0d exp %0d", out_data, model[0]));
      if (full) nfull++;
      do_pop  = out_valid && out_ready;
      do_push = in_valid && in_ready;
      @(posedge clk);
      if (do_pop) void'(model.pop_front());
      if (do_push) model.push_back(in_data);
      #1;
      if (do_push) in_data++;
    end
    check(nfull > 10, "FIFO became full");
    // clear
    @(negedge clk); in_valid = 1; out_ready = 0;
    repeat (DEPTH) @(posedge clk);
    @(negedge clk); in_valid = 0; clear = 1;
    @(negedge clk); clear = 0; #1;
    check(!out_valid && !full, "clear empties FIFO");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
