`timescale 1ns/1ps
// Testbench of the partial-sum combiner with three bank pairs and four word
// columns.  Random positive- and negative-bank results, keep and shift values
// are applied; each registered sum is compared with a model that keeps its
// own running value (sum = keep ? sum : 0, plus the pair differences shifted;
// in wide mode even outputs join word 2j (upper bits) and 2j+1, odd ones are 0).
// Also checks that out_valid follows in_valid by exactly one clock and that a
// cycle without in_valid leaves the sums unchanged.
module tb_psum_bank_combiner;
  localparam int unsigned NPAIR = 3, WORDS = 4, RW = 12, OW = 32;
  logic clk = 0, rst_n = 0, in_valid = 0, keep = 0, wide = 0, out_valid;
  logic [3:0] shift = '0;
  logic [RW-1:0] pos [NPAIR][WORDS];
  logic [RW-1:0] neg [NPAIR][WORDS];
  logic signed [OW-1:0] sum [WORDS];
  longint model [WORDS];
  longint dd [WORDS];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  psum_bank_combiner #(.NPAIR(NPAIR), .WORDS(WORDS), .RW(RW), .OW(OW)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < NPAIR; p++) for (int w = 0; w < WORDS; w++) begin pos[p][w] = '0; neg[p][w] = '0; end
    for (int w = 0; w < WORDS; w++) model[w] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      bit k, wd; int sh;
      @(negedge clk);
      k  = (n % 5 != 0) && $urandom_range(0, 1);
      sh = (n % 7 == 3) ? 0 : $urandom_range(0, 8);
      wd = (n % 3 == 2);
      for (int p = 0; p < NPAIR; p++) for (int w = 0; w < WORDS; w++) begin
        pos[p][w] = RW'($urandom_range(0, 1890));
        neg[p][w] = RW'($urandom_range(0, 1890));
      end
      for (int w = 0; w < WORDS; w++) begin
        longint d;
        d = 0;
        for (int p = 0; p < NPAIR; p++) d += longint'(pos[p][w]) - longint'(neg[p][w]);
        dd[w] = d;
      end
      for (int w = 0; w < WORDS; w++) begin
        longint d;
        d = !wd ? dd[w] : (w % 2 == 1) ? 0 : (dd[w] << 4) + dd[w+1];
        model[w] = (k ? model[w] : 0) + (d << sh);
        model[w] = longint'(int'(model[w]));       // OW = 32 wraps like the RTL
      end
      in_valid = 1; keep = k; shift = 4'(sh); wide = wd;
      @(negedge clk);
      in_valid = 0;
      checks++; if (!out_valid) begin failures++; $display("FAIL out_valid latency"); end
      for (int w = 0; w < WORDS; w++) begin
        checks++;
        if (longint'(sum[w]) != model[w]) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d w=%0d got %0d exp %0d", n, w, sum[w], model[w]);
        end
      end
      @(negedge clk);                              // idle cycle: sums hold
      checks++; if (out_valid) begin failures++; $display("FAIL out_valid stuck"); end
      for (int w = 0; w < WORDS; w++) begin
        checks++; if (longint'(sum[w]) != model[w]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
