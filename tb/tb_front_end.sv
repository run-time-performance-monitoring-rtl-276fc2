// tb_front_end: self-checking test of front_end with a behavioural
// one-cycle-latency memory. Sends blocks of several sizes (0, 1, 7, 100)
// with random consumer stalls and checks that the tokens are the memory
// words 0..size-1 in order, that busy drops after the last one, and that
// without stalls the front-end sends one token per cycle.
module tb_front_end;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic [31:0] size = 0;
  logic mem_en;
  logic [9:0] mem_addr;
  logic [31:0] mem_rdata, tok_data;
  logic tok_valid, tok_ready = 0, busy;
  logic [31:0] mem[1024];
  always #5 clk = ~clk;
  always_ff @(posedge clk) if (mem_en) mem_rdata <= mem[mem_addr];

  front_end #(.AW(10), .DW(32)) dut (.*);

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

  task automatic run(int n, bit stalls, output int cycles);
    int got = 0, t = 0, errs = 0;
    @(negedge clk); size = 32'(n); start = 1;
    @(negedge clk); start = 0;
    while (got < n && t < 10 * n + 20) begin
      tok_ready = !stalls || $urandom_range(0, 1);
      @(posedge clk); t++;
      if (tok_valid && tok_ready) begin
        if (tok_data != mem[got]) errs++;
        got++;
      end
      @(negedge clk);
    end
    tok_ready = 0;
    check(got == n && errs == 0, $sformatf("size %0d: %0d tokens, %0d wrong", n, got, errs));
    #1;
    check(!busy && !tok_valid, "idle after last token");
    cycles = t;
  endtask

  initial begin
    int cyc;
    for (int i = 0; i < 1024; i++) mem[i] = $urandom;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(0, 0, cyc);
    run(1, 1, cyc);
    run(7, 1, cyc);
    run(100, 1, cyc);
    run(100, 0, cyc);
    check(cyc == 102, $sformatf("100 tokens in %0d cycles, expected 102", cyc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
