// Self-checking testbench of sar_adc: random held voltages, codes against an
// independent ideal quantiser floor((v - VREFN) * 64 / (VREFP - VREFN)) clipped
// to 0..63, and the 160 ns (8 x 20 ns) conversion time at a 0.5 ns tick.
`timescale 1ns/1ps
module tb_sar_adc;
  localparam int DIV = 40;
  logic clk = 0, rst_n = 0, ce, start, done, busy;
  logic [5:0] result;
  int vin, checks = 0, failures = 0, div = 0;
  always #0.25 clk = ~clk;
  always @(posedge clk) div <= (div == DIV - 1) ? 0 : div + 1;
  assign ce = (div == DIV - 1);
  sar_adc dut (.clk, .rst_n, .ce, .start, .vin_uv(vin), .result, .done, .busy);
  function automatic int ref_code(int v);
    int c;
    c = 0;
    for (int k = 0; k < 64; k++) if (155000 + (k * 415000) / 64 <= v) c = k;
    return c;
  endfunction
  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    realtime t0, t1;
    start = 0; vin = 0;
    #2 rst_n = 1;
    for (int n = 0; n < 150; n++) begin
      vin = (n == 0) ? 0 : (n == 1) ? 800000 : (n == 2) ? 155000 : (n == 3) ? 570000 : $urandom_range(100000, 650000);
      start = 1;
      do @(posedge clk); while (!ce);
      t0 = $realtime;
      #0.01 start = 0;
      do @(posedge clk); while (!done);
      t1 = $realtime;
      @(posedge clk);
      checks++;
      if (result != 6'(ref_code(vin))) begin failures++; $display("FAIL v=%0d code=%0d exp %0d", vin, result, ref_code(vin)); end
      checks++;
      if (t1 - t0 != 160.0) begin failures++; $display("FAIL conversion time %0t", t1 - t0); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
