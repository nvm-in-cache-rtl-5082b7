// Self-checking testbench of wl_driver: every phase, both sides, every row
// address and random IA patterns, against a table of the expected WL levels.
`timescale 1ns/1ps
module tb_wl_driver;
  import nvm_pkg::*;
  localparam int unsigned ROWS = 16;
  phase_t phase; side_t side; logic [3:0] row; logic [ROWS-1:0] ia_bits;
  lvl_t wl1 [ROWS]; lvl_t wl2 [ROWS];
  int checks = 0, failures = 0;
  logic clk = 0;
  always #1 clk = ~clk;

  wl_driver #(.ROWS(ROWS)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p <= 10; p++)
      for (int s = 0; s < 2; s++)
        for (int a = 0; a < ROWS; a++) begin
          phase = phase_t'(p); side = side_t'(s); row = 4'(a); ia_bits = 16'($urandom);
          #1;
          for (int r = 0; r < ROWS; r++) begin
            lvl_t e1, e2;
            e1 = LV_GND; e2 = LV_GND;
            if ((p == 1 || p == 2) && r == a) begin e1 = LV_NOM; e2 = LV_NOM; end
            if (p >= 3 && p <= 5 && r == a) begin e1 = LV_OD; e2 = LV_OD; end
            if (p == 6 && r == a) begin if (s == 0) e1 = LV_NOM; else e2 = LV_NOM; end
            if (p == 8 && ia_bits[r]) begin if (s == 0) e1 = LV_NOM; else e2 = LV_NOM; end
            checks++;
            if (wl1[r] !== e1 || wl2[r] !== e2) begin
              failures++;
              if (failures < 10) $display("FAIL p=%0d s=%0d row=%0d r=%0d wl1=%0d wl2=%0d exp %0d %0d", p, s, a, r, wl1[r], wl2[r], e1, e2);
            end
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
