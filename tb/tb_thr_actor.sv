// tb_thr_actor: self-checking test of thr_actor with the default threshold
// of 80: values around the threshold (79, 80, 81) and random magnitudes
// must give 255 when above 80 and 0 otherwise, in order, under random
// output stalls.
module tb_thr_actor;
  import mdc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0;
  mag_t in_data = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  pixel_t out_data;
  always #5 clk = ~clk;
  thr_actor dut (.*);

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
    int exp_q[$];
    int v;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      in_valid  = ($urandom_range(0, 3) != 0);
      out_ready = ($urandom_range(0, 3) != 0);
      v = (i < 30) ? 79 + (i % 3) : $urandom_range(0, 300);
      in_data = mag_t'(v);
      #1;
      if (out_valid && out_ready) begin
        check(exp_q.size() > 0 && int'(out_data) == exp_q[0], $sformatf("got %0d exp %0d", out_data, exp_q[0]));
        void'(exp_q.pop_front());
      end
      @(posedge clk);
      if (in_valid && in_ready) exp_q.push_back(v > 80 ? 255 : 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
