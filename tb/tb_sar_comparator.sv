// Self-checking testbench of sar_comparator: random and edge-case inputs.
`timescale 1ns/1ps
module tb_sar_comparator;
  int vp, vn; logic out;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #1 clk = ~clk;
  sar_comparator dut (.vp_uv(vp), .vn_uv(vn), .out(out));
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int n = 0; n < 300; n++) begin
      vp = $urandom_range(0, 800000);
      vn = (n % 3 == 0) ? vp : (n % 3 == 1) ? vp + 1 : $urandom_range(0, 800000);
      #1;
      checks++;
      if (out !== (vp >= vn)) begin failures++; $display("FAIL vp=%0d vn=%0d out=%b", vp, vn, out); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
