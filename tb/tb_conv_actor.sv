// tb_conv_actor: self-checking test of conv_actor, instantiated with each of
// the four kernels. Random windows are pushed through with random output
// stalls; each result is compared with a sum of products computed here
// from the kernel tables written out independently below, and the
// one-cycle latency is checked.
module tb_conv_actor;
  import mdc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0;
  always #5 clk = ~clk;

  // Reference kernels, printed matrix order, Roberts in rows/cols 1..2.
  int kref[4][3][3] = '{
    '{'{1, 0, -1}, '{2, 0, -2}, '{1, 0, -1}},
    '{'{-1, 2, 1}, '{0, 0, 0}, '{-1, -2, -1}},
    '{'{0, 0, 0}, '{0, -1, 0}, '{0, 0, -1}},
    '{'{0, 0, 0}, '{0, 0, 1}, '{0, -1, 0}}};

  window_t in_data;
  logic    in_valid = 0, out_ready = 1;
  logic [3:0] in_ready, out_valid;
  grad_t   out_data[4];

  conv_actor #(.COEF(K_SOBEL_X))   u0 (.clk, .rst_n, .clear, .in_data, .in_valid, .in_ready(in_ready[0]),
                                       .out_data(out_data[0]), .out_valid(out_valid[0]), .out_ready);
  conv_actor #(.COEF(K_SOBEL_Y))   u1 (.clk, .rst_n, .clear, .in_data, .in_valid, .in_ready(in_ready[1]),
                                       .out_data(out_data[1]), .out_valid(out_valid[1]), .out_ready);
  conv_actor #(.COEF(K_ROBERTS_X)) u2 (.clk, .rst_n, .clear, .in_data, .in_valid, .in_ready(in_ready[2]),
                                       .out_data(out_data[2]), .out_valid(out_valid[2]), .out_ready);
  conv_actor #(.COEF(K_ROBERTS_Y)) u3 (.clk, .rst_n, .clear, .in_data, .in_valid, .in_ready(in_ready[3]),
                                       .out_data(out_data[3]), .out_valid(out_valid[3]), .out_ready);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic int ref_conv(int k, window_t w);
    int s = 0;
    for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) s += kref[k][r][c] * int'(w[r][c]);
    return s;
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_q[4][$];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      in_valid  = ($urandom_range(0, 3) != 0);
      out_ready = ($urandom_range(0, 3) != 0);
      for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++)
        in_data[r][c] = (i < 20) ? 8'd255 * 8'(((r + c + i) & 1)) : 8'($urandom);
      #1;
      for (int k = 0; k < 4; k++)
        if (out_valid[k] && out_ready) begin
          check(exp_q[k].size() > 0 && int'(out_data[k]) == exp_q[k][0],
                $sformatf("kernel %0d: got %0d exp %0d", k, out_data[k], exp_q[k][0]));
          void'(exp_q[k].pop_front());
        end
      @(posedge clk);
      for (int k = 0; k < 4; k++) if (in_valid && in_ready[k]) exp_q[k].push_back(ref_conv(k, in_data));
    end
    // latency: one window into an empty stage, result visible next cycle
    @(negedge clk); in_valid = 0; out_ready = 1;
    repeat (3) @(negedge clk);
    in_valid = 1;
    for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) in_data[r][c] = 8'(10 * r + c);
    @(negedge clk); in_valid = 0; #1;
    check(out_valid == 4'hF, "latency 1 cycle");
    check(int'(out_data[0]) == ref_conv(0, '{'{0, 1, 2}, '{10, 11, 12}, '{20, 21, 22}}), "sobel x value");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
