// tb_cfg_lut: self-checking test of cfg_lut: the Sobel and Roberts IDs give
// the switching box settings, Sobel-only firing and scaling factors
// expected for each detector; every other ID is flagged invalid.
module tb_cfg_lut;
  import mdc_pkg::*;
  int checks = 0, failures = 0;
  logic [7:0] id;
  cfg_t cfg;
  cfg_lut dut (.*);

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
    for (int i = 0; i < 256; i++) begin
      id = 8'(i);
      #1;
      if (i == 0) begin
        check(cfg.valid && cfg.sb_window == KSEL_SOBEL && cfg.sb_grad == KSEL_SOBEL, "sobel routing");
        check(cfg.sobel_only && cfg.shift == 4'd2, "sobel settings");
      end else if (i == 1) begin
        check(cfg.valid && cfg.sb_window == KSEL_ROBERTS && cfg.sb_grad == KSEL_ROBERTS, "roberts routing");
        check(!cfg.sobel_only && cfg.shift == 4'd1, "roberts settings");
      end else begin
        check(!cfg.valid, $sformatf("id %0d must be invalid", i));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
