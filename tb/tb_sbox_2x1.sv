// tb_sbox_2x1: self-checking test of sbox_2x1: for both settings of sel and
// all combinations of the input valids and the output ready, checks that
// the selected input's token and valid reach the output and that only the
// selected input sees ready.
module tb_sbox_2x1;
  int checks = 0, failures = 0;
  logic sel, in0_valid, in0_ready, in1_valid, in1_ready, out_valid, out_ready;
  logic [7:0] in0_data, in1_data, out_data;
  sbox_2x1 #(.T(logic [7:0])) dut (.*);

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
      {sel, in0_valid, in1_valid, out_ready} = 4'(i);
      in0_data = 8'($urandom);
      in1_data = ~in0_data;
      #1;
      check(out_valid == (sel ? in1_valid : in0_valid), "out_valid");
      check(out_data == (sel ? in1_data : in0_data), "out_data");
      check(in0_ready == (out_ready && !sel), "in0_ready");
      check(in1_ready == (out_ready && sel), "in1_ready");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
