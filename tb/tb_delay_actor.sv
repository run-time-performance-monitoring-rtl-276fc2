// tb_delay_actor: self-checking test of delay_actor. Fires the actor with
// random pixels at random times and checks that every firing returns the
// pixel of the previous firing, 0 for the first one after reset or clear.
module tb_delay_actor;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, fire = 0;
  logic [7:0] din = 0, dout, prev;
  always #5 clk = ~clk;
  delay_actor #(.WIDTH(8)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    prev = 0;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      fire = $urandom_range(0, 1);
      din  = 8'($urandom);
      if (i == 250) begin clear = 1; fire = 0; end else clear = 0;
      #1;
      if (fire) begin
        check(dout == prev, $sformatf("delay out %0d exp %0d", dout, prev));
        prev = din;
      end
      if (clear) prev = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
