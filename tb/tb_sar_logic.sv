// Self-checking testbench of sar_logic: an ideal comparator against a random
// target code; checks the result, the MSB-first trial order and that one
// conversion takes 8 ADC clocks (back-to-back conversions included).
`timescale 1ns/1ps
module tb_sar_logic;
  localparam int DIV = 4;
  logic clk = 0, rst_n = 0, ce, start, cmp, done, busy;
  logic [5:0] code, result;
  int checks = 0, failures = 0, target, div = 0;
  always #1 clk = ~clk;
  always @(posedge clk) div <= (div == DIV - 1) ? 0 : div + 1;
  assign ce  = (div == DIV - 1);
  assign cmp = (target >= int'(code));
  sar_logic #(.BITS(6)) dut (.*);
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int ces, first_trial;
    start = 0; target = 0;
    #5 rst_n = 1;
    for (int n = 0; n < 120; n++) begin
      target = (n < 64) ? n : $urandom_range(0, 63);
      start = 1;
      // wait for the ce edge that accepts start
      do @(posedge clk); while (!(ce && (!busy || done)));
      #0.1;
      if (!(n % 5 == 4)) start = 1; else start = 0;
      ces = 0; first_trial = -1;
      while (1) begin
        @(posedge clk);
        if (ce) ces++;
        if (first_trial < 0 && ces == 2) first_trial = (code == 6'b100000) ? 1 : 0;
        if (done) break;
      end
      checks++;
      if (result != 6'(target)) begin failures++; $display("FAIL target=%0d result=%0d", target, result); end
      checks++;
      if (ces != 8) begin failures++; $display("FAIL conversion took %0d ADC clocks", ces); end
      checks++;
      if (first_trial != 1) begin failures++; $display("FAIL MSB trial at cycle %0d", first_trial); end
      #0.1 start = 0;
      if (n % 5 == 4) repeat ($urandom_range(1, 12)) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
