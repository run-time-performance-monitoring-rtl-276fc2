// tb_sbox_1x2: self-checking test of sbox_1x2: for both settings of sel and
// all combinations of valid and the two readies, checks that only the
// selected output offers the token, with the input data, and that the
// input's ready is the selected branch's ready.
module tb_sbox_1x2;
  int checks = 0, failures = 0;
  logic sel, in_valid, in_ready, out0_valid, out0_ready, out1_valid, out1_ready;
  logic [7:0] in_data, out0_data, out1_data;
  sbox_1x2 #(.T(logic [7:0])) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 64; i++) begin
      {sel, in_valid, out0_ready, out1_ready} = 4'(i);
      in_data = 8'($urandom);
      #1;
      check(out0_valid == (in_valid && !sel), "out0_valid");
      check(out1_valid == (in_valid && sel), "out1_valid");
      check(in_ready == (sel ? out1_ready : out0_ready), "in_ready");
      check((sel ? out1_data : out0_data) == in_data, "data");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
