`timescale 1ns/1ps
// Self-checking testbench of the sub-array model: per-row programming and
// SRAM writes, single-row reads, and PIM column currents for random IA
// vectors, checked against an independent sum over rows of IA & side & weight.
module tb_nvsram_subarray;
  import nvm_pkg::*;
  localparam int unsigned ROWS = 12, COLS = 8, CW = $clog2(ROWS + 1);
  logic clk = 0;
  lvl_t wl1 [ROWS]; lvl_t wl2 [ROWS]; logic [ROWS-1:0] v1, v2;
  lvl_t bl [COLS]; lvl_t blb [COLS]; pl_t vdd1 [COLS]; pl_t vdd2 [COLS];
  logic [CW-1:0] cur1 [COLS]; logic [CW-1:0] cur2 [COLS]; logic [COLS-1:0] rd;
  logic [COLS-1:0] d_ref [ROWS]; logic [COLS-1:0] w_ref [ROWS];
  int checks = 0, failures = 0;
  always #0.25 clk = ~clk;
  nvsram_subarray #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  task automatic set(int sel, lvl_t w1, lvl_t w2, logic g1, logic g2, pl_t p1, pl_t p2,
                     logic [COLS-1:0] hi, lvl_t bh, lvl_t blo, logic [COLS-1:0] hib, lvl_t bbh, lvl_t bblo);
    @(negedge clk);
    for (int r = 0; r < ROWS; r++) begin
      wl1[r] = (sel < 0 || r == sel) ? w1 : LV_GND;
      wl2[r] = (sel < 0 || r == sel) ? w2 : LV_GND;
    end
    v1 = {ROWS{g1}}; v2 = {ROWS{g2}};
    for (int c = 0; c < COLS; c++) begin
      vdd1[c] = p1; vdd2[c] = p2;
      bl[c] = hi[c] ? bh : blo; blb[c] = hib[c] ? bbh : bblo;
    end
  endtask
  task automatic hold();
    set(0, LV_GND, LV_GND, 1, 1, PL_NOM, PL_NOM, '1, LV_NOM, LV_NOM, '1, LV_NOM, LV_NOM);
  endtask

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hold();
    for (int r = 0; r < ROWS; r++) begin
      w_ref[r] = (r == 0) ? '1 : COLS'($urandom);
      repeat (8) set(r, LV_OD, LV_OD, 0, 0, PL_OD, PL_OD, '0, LV_GND, LV_GND, '0, LV_GND, LV_GND);
      repeat (8) set(r, LV_OD, LV_OD, 0, 0, PL_GND, PL_GND, w_ref[r], LV_OD, LV_GND, '0, LV_GND, LV_GND);
      repeat (8) set(r, LV_OD, LV_OD, 0, 0, PL_GND, PL_GND, '0, LV_GND, LV_GND, w_ref[r], LV_OD, LV_GND);
      hold();
    end
    for (int r = 0; r < ROWS; r++) begin
      d_ref[r] = COLS'($urandom);
      set(r, LV_NOM, LV_NOM, 1, 1, PL_NOM, PL_NOM, d_ref[r], LV_NOM, LV_GND, ~d_ref[r], LV_NOM, LV_GND);
      hold();
    end
    for (int r = 0; r < ROWS; r++) begin
      set(r, LV_NOM, LV_NOM, 1, 1, PL_NOM, PL_NOM, '1, LV_NOM, LV_NOM, '1, LV_NOM, LV_NOM);
      #0.1 checks++;
      if (rd !== d_ref[r]) begin failures++; $display("FAIL read row %0d %b exp %b", r, rd, d_ref[r]); end
      hold();
    end
    for (int n = 0; n < 30; n++) begin
      logic [ROWS-1:0] ia;
      ia = (n == 0) ? '1 : ROWS'($urandom);
      for (int s = 0; s < 2; s++) begin
        logic l;
        l = (s == 0);
        repeat (3) set(-1, LV_GND, LV_GND, 1, 1, l ? PL_REF : PL_NOM, l ? PL_NOM : PL_REF, '1, l ? LV_NOM : LV_GND, LV_GND, '1, l ? LV_GND : LV_NOM, LV_GND);
        @(negedge clk);
        for (int r = 0; r < ROWS; r++) begin
          wl1[r] = (l && ia[r]) ? LV_NOM : LV_GND;
          wl2[r] = (!l && ia[r]) ? LV_NOM : LV_GND;
        end
        v1 = '0; v2 = '0;
        #0.1;
        for (int c = 0; c < COLS; c++) begin
          int e;
          e = 0;
          for (int r = 0; r < ROWS; r++)
            if (ia[r] && w_ref[r][c] && (l ? d_ref[r][c] : !d_ref[r][c])) e++;
          checks++;
          if (int'(l ? cur1[c] : cur2[c]) != e) begin
            failures++;
            if (failures < 10) $display("FAIL side %0d col %0d cur=%0d exp %0d", s, c, l ? cur1[c] : cur2[c], e);
          end
        end
        set(-1, LV_GND, LV_GND, l, !l, PL_NOM, PL_NOM, '1, l ? LV_NOM : LV_GND, LV_GND, '1, l ? LV_GND : LV_NOM, LV_GND);
        set(-1, LV_GND, LV_GND, 1, 1, PL_NOM, PL_NOM, '1, l ? LV_NOM : LV_GND, LV_GND, '1, l ? LV_GND : LV_NOM, LV_GND);
        hold();
      end
    end
    // cache data still intact after all PIM cycles
    for (int r = 0; r < ROWS; r++) begin
      set(r, LV_NOM, LV_NOM, 1, 1, PL_NOM, PL_NOM, '1, LV_NOM, LV_NOM, '1, LV_NOM, LV_NOM);
      #0.1 checks++;
      if (rd !== d_ref[r]) begin failures++; $display("FAIL retention row %0d", r); end
      hold();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
