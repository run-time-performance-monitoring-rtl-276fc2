// tb_local_memory: self-checking test of local_memory. Random reads and
// writes on both ports against an array model: read data one cycle after
// the request, read-first on a port that writes, and port B winning when
// both ports write one address.
module tb_local_memory;
  localparam int DEPTH = 64;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic a_en = 0, a_we = 0, b_en = 0, b_we = 0;
  logic [5:0] a_addr = 0, b_addr = 0;
  logic [31:0] a_wdata = 0, b_wdata = 0, a_rdata, b_rdata;
  logic [31:0] model[DEPTH];
  always #5 clk = ~clk;
  local_memory #(.DEPTH(DEPTH), .DW(32)) dut (.*);

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
    logic [31:0] ea, eb;
    logic ra, rb;
    // fill through port A
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); a_en = 1; a_we = 1; a_addr = 6'(i); a_wdata = $urandom; model[i] = a_wdata;
    end
    @(negedge clk); a_en = 0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      a_en = $urandom_range(0, 1); a_we = $urandom_range(0, 1); a_addr = 6'($urandom); a_wdata = $urandom;
      b_en = $urandom_range(0, 1); b_we = $urandom_range(0, 1); b_addr = (i % 7 == 0) ? a_addr : 6'($urandom);
      b_wdata = $urandom;
      ra = a_en; rb = b_en;
      ea = model[a_addr]; eb = model[b_addr];
      if (a_en && a_we && !(b_en && b_we && b_addr == a_addr)) model[a_addr] = a_wdata;
      if (b_en && b_we) model[b_addr] = b_wdata;
      @(posedge clk); #1;
      if (ra) check(a_rdata == ea, "port A read");
      if (rb) check(b_rdata == eb, "port B read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
