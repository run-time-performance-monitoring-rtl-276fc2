// tb_abs_sum_actor: self-checking test of abs_sum_actor. Random gradient
// pairs (including the extremes) and shift values; each output is compared
// with (|gx| + |gy|) >> n computed with integers here. Also checks the
// one-cycle latency and that a stalled output holds its value.
module tb_abs_sum_actor;
  import mdc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0;
  logic [3:0] shift = 0;
  grad_pair_t in_data;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  mag_t out_data;
  always #5 clk = ~clk;
  abs_sum_actor dut (.*);

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
    int gx, gy;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 800; i++) begin
      @(negedge clk);
      if (i % 100 == 0) shift = 4'($urandom_range(0, 3));
      in_valid  = ($urandom_range(0, 3) != 0);
      out_ready = ($urandom_range(0, 3) != 0);
      gx = (i < 4) ? ((i & 1) ? -2040 : 2040) : $urandom_range(0, 4080) - 2040;
      gy = (i < 4) ? ((i & 2) ? -2040 : 2040) : $urandom_range(0, 4080) - 2040;
      in_data.gx = grad_t'(gx);
      in_data.gy = grad_t'(gy);
      #1;
      if (out_valid && out_ready) begin
        check(exp_q.size() > 0 && int'(out_data) == exp_q[0],
              $sformatf("got %0d exp %0d", out_data, exp_q[0]));
        void'(exp_q.pop_front());
      end
      @(posedge clk);
      if (in_valid && in_ready) exp_q.push_back(((gx < 0 ? -gx : gx) + (gy < 0 ? -gy : gy)) >> shift);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
