// tb_fifo_monitor: self-checking test of fifo_monitor: random full flags
// with enable toggling; the per-FIFO counts must equal the numbers of
// enabled full cycles counted here; clear must zero them.
module tb_fifo_monitor;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, enable = 0;
  logic [2:0] full = 0;
  logic [2:0][31:0] count;
  int exp[3] = '{0, 0, 0};
  always #5 clk = ~clk;
  fifo_monitor #(.N(3)) dut (.*);

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
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      enable = (i % 200) < 150;
      full   = 3'($urandom);
      @(posedge clk);
      for (int f = 0; f < 3; f++) if (enable && full[f]) exp[f]++;
      #1;
      if (i % 50 == 49)
        for (int f = 0; f < 3; f++) check(count[f] == 32'(exp[f]), $sformatf("fifo %0d: %0d exp %0d", f, count[f], exp[f]));
    end
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    check(count == '0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
