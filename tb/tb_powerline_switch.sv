// Self-checking testbench of powerline_switch: VDD1/VDD2 states for every
// phase and side, the S_L/S_R routing and the verify current sense.
`timescale 1ns/1ps
module tb_powerline_switch;
  import nvm_pkg::*;
  localparam int unsigned COLS = 8, CW = 5;
  phase_t phase; side_t side; logic pim_active;
  logic [CW-1:0] cur1 [COLS]; logic [CW-1:0] cur2 [COLS];
  pl_t vdd1 [COLS]; pl_t vdd2 [COLS];
  logic s_l, s_r; logic [COLS-1:0] sense;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #1 clk = ~clk;
  powerline_switch #(.COLS(COLS), .CW(CW)) dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int p = 0; p <= 10; p++)
      for (int s = 0; s < 2; s++)
        for (int a = 0; a < 2; a++) begin
          pl_t e1, e2;
          phase = phase_t'(p); side = side_t'(s); pim_active = a[0];
          for (int c = 0; c < COLS; c++) begin
            cur1[c] = ($urandom % 3 == 0) ? '0 : CW'($urandom);
            cur2[c] = ($urandom % 3 == 0) ? '0 : CW'($urandom);
          end
          #1;
          e1 = PL_NOM; e2 = PL_NOM;
          case (p)
            3: begin e1 = PL_OD; e2 = PL_OD; end
            4, 5: begin e1 = PL_GND; e2 = PL_GND; end
            6: if (s == 0) e1 = PL_SENSE; else e2 = PL_SENSE;
            7, 8: if (s == 0) e1 = PL_REF; else e2 = PL_REF;
            default: ;
          endcase
          for (int c = 0; c < COLS; c++) begin
            logic es;
            es = (s == 0) ? (cur1[c] != 0) : (cur2[c] != 0);
            checks++;
            if (vdd1[c] !== e1 || vdd2[c] !== e2 || sense[c] !== es) begin
              failures++;
              if (failures < 10) $display("FAIL p=%0d s=%0d c=%0d vdd1=%0d vdd2=%0d sense=%b", p, s, c, vdd1[c], vdd2[c], sense[c]);
            end
          end
          checks++;
          if (s_l !== (a == 1 && s == 0) || s_r !== (a == 1 && s == 1)) begin
            failures++; $display("FAIL switches a=%0d s=%0d s_l=%b s_r=%b", a, s, s_l, s_r);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
