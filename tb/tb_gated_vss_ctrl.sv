// Self-checking testbench of gated_vss_ctrl: V1/V2 of every row for every
// phase and side, including the staggered restore order of the PIM cycle.
`timescale 1ns/1ps
module tb_gated_vss_ctrl;
  import nvm_pkg::*;
  localparam int unsigned ROWS = 8;
  phase_t phase; side_t side; logic [ROWS-1:0] v1, v2;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #1 clk = ~clk;
  gated_vss_ctrl #(.ROWS(ROWS)) dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int p = 0; p <= 10; p++)
      for (int s = 0; s < 2; s++) begin
        logic e1, e2;
        phase = phase_t'(p); side = side_t'(s);
        #1;
        e1 = 1; e2 = 1;
        if (p == 3 || p == 4 || p == 5 || p == 8) begin e1 = 0; e2 = 0; end
        if (p == 9) begin e1 = (s == 0); e2 = (s == 1); end
        checks++;
        if (v1 !== {ROWS{e1}} || v2 !== {ROWS{e2}}) begin
          failures++;
          $display("FAIL p=%0d s=%0d v1=%b v2=%b", p, s, v1, v2);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
