// tb_line_buffer: self-checking test of line_buffer. For several row
// lengths (1, 5, 32) it fires the actor with random pixels at random times
// and checks that each firing returns the pixel of line_len firings
// earlier, 0 during the first row after clear.
module tb_line_buffer;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, fire = 0;
  logic [5:0] line_len = 32;
  logic [7:0] din = 0, dout;
  logic [7:0] hist[$];
  always #5 clk = ~clk;
  line_buffer #(.WIDTH(8), .MAX_LINE(32)) dut (.*);

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

  initial begin
    int lens[3] = '{1, 5, 32};
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (lens[k]) begin
      @(negedge clk); clear = 1; fire = 0; line_len = 6'(lens[k]);
      @(negedge clk); clear = 0;
      hist.delete();
      for (int i = 0; i < 300; i++) begin
        @(negedge clk);
        fire = ($urandom_range(0, 3) != 0);
        din  = 8'($urandom);
        #1;
        if (fire) begin
          logic [7:0] exp;
          exp = (hist.size() >= lens[k]) ? hist[hist.size() - lens[k]] : 8'd0;
          check(dout == exp, $sformatf("len %0d: out %0d exp %0d", lens[k], dout, exp));
          hist.push_back(din);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
