// tb_back_end: self-checking test of back_end: tokens offered at random
// times must be written in order to addresses 0..size-1 of a memory model,
// with `last` on the final write and `done` the cycle after; extra tokens
// beyond size are not accepted; a size of 0 is done at once.
module tb_back_end;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic [31:0] size = 0, tok_data = 0, mem_wdata;
  logic tok_valid = 0, tok_ready, mem_en, mem_we, last, done;
  logic [9:0] mem_addr;
  logic [31:0] mem[1024];
  always #5 clk = ~clk;
  always_ff @(posedge clk) if (mem_en && mem_we) mem[mem_addr] <= mem_wdata;
  back_end #(.AW(10), .DW(32)) dut (.*);

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

  task automatic run(int n);
    logic [31:0] vals[$];
    int sent = 0, nlast = 0, errs = 0;
    @(negedge clk); size = 32'(n); start = 1;
    @(negedge clk); start = 0;
    for (int t = 0; t < 4 * n + 10; t++) begin
      tok_valid = $urandom_range(0, 1);
      tok_data = $urandom;
      #1;
      if (last) nlast++;
      @(posedge clk);
      if (tok_valid && tok_ready) begin vals.push_back(tok_data); sent++; end
      @(negedge clk);
    end
    tok_valid = 0;
    check(sent == n, $sformatf("size %0d: accepted %0d", n, sent));
    check(nlast == (n > 0 ? 1 : 0), "one last pulse");
    check(done, "done");
    for (int i = 0; i < n; i++) if (mem[i] != vals[i]) errs++;
    check(errs == 0, "memory contents");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(0);
    run(1);
    run(50);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
