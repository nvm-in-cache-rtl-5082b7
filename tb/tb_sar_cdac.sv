// Self-checking testbench of sar_cdac: all 64 codes at the calibrated and
// the uncalibrated reference settings.
`timescale 1ns/1ps
module tb_sar_cdac;
  logic [5:0] code; int va, vb;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #1 clk = ~clk;
  sar_cdac #(.BITS(6)) dut_a (.code(code), .vdac_uv(va));
  sar_cdac #(.BITS(6), .VREFP_MV(800), .VREFN_MV(0)) dut_b (.code(code), .vdac_uv(vb));
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int c = 0; c < 64; c++) begin
      code = 6'(c); #1;
      checks++;
      if (va != 155000 + (c * 415000) / 64) begin failures++; $display("FAIL cal c=%0d %0d", c, va); end
      checks++;
      if (vb != c * 12500) begin failures++; $display("FAIL uncal c=%0d %0d", c, vb); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
