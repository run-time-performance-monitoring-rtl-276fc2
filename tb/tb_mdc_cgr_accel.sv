// tb_mdc_cgr_accel: self-checking test of the merged Sobel/Roberts
// accelerator. Runs 32x32 blocks in both configurations (and a 12-pixel
// row length), with random gaps on the pixel input and random stalls on
// the output, and compares every output pixel with edge_ref_pkg. Also
// checks: no pixel is accepted before in_size, an unknown ID accepts no
// pixel, one pixel per cycle and a 7-cycle first-pixel latency without
// stalls, the edge FIFOs fill under output back-pressure and the FIFO
// monitor counts it.
module tb_mdc_cgr_accel;
  import mdc_pkg::*;
  import edge_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, running = 0;
  logic [7:0] id = 0;
  logic [31:0] in_size_data = 0;
  logic in_size_valid = 0, in_size_ready;
  pixel_t in_data_data = 0;
  logic in_data_valid = 0, in_data_ready;
  pixel_t out_data_data;
  logic out_data_valid, out_data_ready = 1;
  logic [NFIFO-1:0] fifo_full;
  logic [NFIFO-1:0][31:0] fifo_full_cnt;
  logic cfg_valid;
  always #5 clk = ~clk;

  mdc_cgr_accel dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int full_seen = 0;
  always @(posedge clk) if (|fifo_full) full_seen++;

  // Runs one block; gaps/stalls = random handshake idling.
  task automatic run_block(bit roberts, int w, int n, bit gaps, bit stalls, int seed,
                           output int first_lat, output int cycles);
    byte unsigned img[];
    int sent = 0, got = 0, errs = 0, t = 0, t_first_in = -1, t_first_out = -1;
    img = new[n];
    for (int i = 0; i < n; i++) img[i] = test_pixel(i % w, i / w, seed);
    @(negedge clk);
    id = roberts ? ID_ROBERTS : ID_SOBEL;
    start = 1; running = 1;
    @(negedge clk);
    start = 0;
    // pixels offered before in_size must wait
    in_data_valid = 1; in_data_data = img[0];
    #1;
    check(!in_data_ready, "no pixel before in_size");
    in_size_data = 32'(w); in_size_valid = 1;
    @(posedge clk); #1;
    check(!in_size_ready, "in_size taken once");
    in_size_valid = 0;
    while (got < n && t < 20 * n + 100) begin
      @(negedge clk);
      in_data_valid = (sent < n) && (!gaps || $urandom_range(0, 3) != 0);
      in_data_data  = (sent < n) ? img[sent] : 8'd0;
      out_data_ready = !stalls || ($urandom_range(0, 2) == 0);
      #1;
      @(posedge clk);
      t++;
      if (in_data_valid && in_data_ready) begin
        if (sent == 0) t_first_in = t;
        sent++;
      end
      if (out_data_valid && out_data_ready) begin
        if (got == 0) t_first_out = t;
        if (int'(out_data_data) != edge_out(img, got, w, roberts)) errs++;
        got++;
      end
    end
    check(got == n, $sformatf("all %0d pixels out (got %0d)", n, got));
    check(errs == 0, $sformatf("%s w=%0d: %0d wrong pixels", roberts ? "roberts" : "sobel", w, errs));
    first_lat = t_first_out - t_first_in;
    cycles = t;
    running = 0;
    in_data_valid = 0;
    out_data_ready = 1;
  endtask

  initial begin
    int lat, cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // unknown ID: nothing accepted
    @(negedge clk); id = 8'd7; start = 1;
    @(negedge clk); start = 0; in_size_valid = 1; in_size_data = 32;
    @(negedge clk); in_size_valid = 0; in_data_valid = 1;
    repeat (5) @(negedge clk);
    check(!cfg_valid && !in_data_ready, "unknown ID accepts no pixel");
    in_data_valid = 0;

    run_block(0, 32, 1024, 0, 0, 1, lat, cyc);
    check(lat == 7, $sformatf("sobel first-pixel latency %0d", lat));
    check(cyc <= 1024 + 8, $sformatf("sobel one pixel per cycle (%0d cycles)", cyc));
    run_block(1, 32, 1024, 0, 0, 2, lat, cyc);
    check(lat == 7, $sformatf("roberts first-pixel latency %0d", lat));
    check(cyc <= 1024 + 8, $sformatf("roberts one pixel per cycle (%0d cycles)", cyc));
    full_seen = 0;
    run_block(0, 32, 1024, 1, 1, 3, lat, cyc);
    check(full_seen > 0, "edge FIFOs fill under back-pressure");
    check(fifo_full_cnt[2] > 0, "FIFO monitor counts full cycles");
    run_block(1, 32, 1024, 1, 1, 4, lat, cyc);
    run_block(0, 12, 144, 1, 0, 5, lat, cyc);
    run_block(1, 12, 144, 0, 1, 6, lat, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
