// Self-checking testbench of post_proc: random sequences of 8 conversions
// (4 IA bits x left/right), result = sum of (63 - code) << bit.
`timescale 1ns/1ps
module tb_post_proc;
  logic clk = 0, rst_n = 0, clear, valid, last, result_valid;
  logic [5:0] code; logic [1:0] bit_idx; logic [11:0] result;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;
  post_proc #(.IA_BITS(4), .ADC_BITS(6)) dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    clear = 0; valid = 0; last = 0; code = 0; bit_idx = 0;
    #3 rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      int e;
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      e = 0;
      for (int k = 0; k < 8; k++) begin
        int c;
        c = (n == 0) ? 0 : (n == 1) ? 63 : $urandom_range(0, 63);
        e += (63 - c) << (k % 4);
        valid = 1; code = 6'(c); bit_idx = 2'(k % 4); last = (k == 7);
        @(negedge clk);
        valid = 0; last = 0;
        checks++;
        if (result_valid !== (k == 7)) begin failures++; $display("FAIL result_valid at k=%0d", k); end
        repeat ($urandom_range(0, 3)) @(negedge clk);
      end
      checks++;
      if (int'(result) != e) begin failures++; $display("FAIL result=%0d exp %0d", result, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
