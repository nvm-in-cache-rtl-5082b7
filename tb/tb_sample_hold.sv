// Self-checking testbench of sample_hold: tracking follows the linear
// VDD - MAC transfer, the value is held while track is low, clipping at 0 V.
`timescale 1ns/1ps
module tb_sample_hold;
  localparam int unsigned IW = 13;
  logic clk = 0, rst_n = 0, track = 0;
  logic [IW-1:0] iin; int vout_uv;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;
  sample_hold #(.IW(IW)) dut (.*);
  function automatic int ref_v(int i);
    longint d;
    d = longint'(i) * longint'(600000 - 87500) / 1920;
    return (d >= 600000) ? 0 : int'(600000 - d);
  endfunction
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    iin = '0;
    #3 rst_n = 1;
    checks++; if (vout_uv != 600000) begin failures++; $display("FAIL reset value %0d", vout_uv); end
    for (int n = 0; n < 200; n++) begin
      int i, held;
      i = (n == 0) ? 0 : (n == 1) ? 1920 : (n == 2) ? 4000 : $urandom_range(0, 1920);
      @(negedge clk); track = 1; iin = IW'(i);
      @(negedge clk); track = 0;
      checks++;
      if (vout_uv != ref_v(i)) begin failures++; if (failures < 10) $display("FAIL i=%0d v=%0d exp %0d", i, vout_uv, ref_v(i)); end
      held = vout_uv;
      iin = IW'($urandom_range(0, 1920));
      repeat (3) @(negedge clk);
      checks++;
      if (vout_uv != held) begin failures++; $display("FAIL hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
