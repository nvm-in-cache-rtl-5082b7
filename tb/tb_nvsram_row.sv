// Self-checking testbench of the 6T-2R row model: SRAM write/read, RRAM
// programming (HRS, LRS left, LRS right) with verify reads, PIM cell currents
// on both sides for IA = 0/1, cache-data retention through the paper's PIM
// sequence, and the data flip when the gated grounds are restored in the
// wrong order.  Expected values come from a small reference model here.
`timescale 1ns/1ps
module tb_nvsram_row;
  import nvm_pkg::*;
  localparam int unsigned COLS = 16;
  logic clk = 0;
  lvl_t wl1, wl2; logic v1, v2;
  lvl_t bl [COLS]; lvl_t blb [COLS]; pl_t vdd1 [COLS]; pl_t vdd2 [COLS];
  logic [COLS-1:0] i1, i2, rd;
  int checks = 0, failures = 0;
  logic [COLS-1:0] d_ref, w_ref;
  always #1 clk = ~clk;
  nvsram_row #(.COLS(COLS)) dut (.*);

  task automatic chk(input logic [COLS-1:0] got, input logic [COLS-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %b exp %b", what, got, exp);
    end
  endtask

  task automatic lines(lvl_t w1, lvl_t w2, logic g1, logic g2, pl_t p1, pl_t p2,
                       logic [COLS-1:0] blhi, lvl_t blv, lvl_t bllo,
                       logic [COLS-1:0] blbhi, lvl_t blbv, lvl_t blblo);
    @(negedge clk);
    wl1 = w1; wl2 = w2; v1 = g1; v2 = g2;
    for (int c = 0; c < COLS; c++) begin
      vdd1[c] = p1; vdd2[c] = p2;
      bl[c]  = blhi[c]  ? blv  : bllo;
      blb[c] = blbhi[c] ? blbv : blblo;
    end
  endtask

  task automatic hold();
    lines(LV_GND, LV_GND, 1, 1, PL_NOM, PL_NOM, '1, LV_NOM, LV_NOM, '1, LV_NOM, LV_NOM);
  endtask
  task automatic write(logic [COLS-1:0] d);
    lines(LV_NOM, LV_NOM, 1, 1, PL_NOM, PL_NOM, d, LV_NOM, LV_GND, ~d, LV_NOM, LV_GND);
    hold();
  endtask
  task automatic read(logic [COLS-1:0] exp);
    lines(LV_NOM, LV_NOM, 1, 1, PL_NOM, PL_NOM, '1, LV_NOM, LV_NOM, '1, LV_NOM, LV_NOM);
    #0.5 chk(rd, exp, "sram read");
    hold();
  endtask
  task automatic prog_row(logic [COLS-1:0] w);
    repeat (8) lines(LV_OD, LV_OD, 0, 0, PL_OD, PL_OD, '0, LV_GND, LV_GND, '0, LV_GND, LV_GND);
    repeat (8) lines(LV_OD, LV_OD, 0, 0, PL_GND, PL_GND, w, LV_OD, LV_GND, '0, LV_GND, LV_GND);
    repeat (8) lines(LV_OD, LV_OD, 0, 0, PL_GND, PL_GND, '0, LV_GND, LV_GND, w, LV_OD, LV_GND);
    hold();
  endtask
  task automatic verify(logic [COLS-1:0] w);
    lines(LV_NOM, LV_GND, 1, 1, PL_SENSE, PL_NOM, '1, LV_NOM, LV_NOM, '1, LV_NOM, LV_NOM);
    #0.5 chk(i1, w, "verify left");
    lines(LV_GND, LV_NOM, 1, 1, PL_NOM, PL_SENSE, '1, LV_NOM, LV_NOM, '1, LV_NOM, LV_NOM);
    #0.5 chk(i2, w, "verify right");
    hold();
  endtask
  // one PIM cycle; good_order = paper's restore order
  task automatic pim(side_t s, logic ia, logic good_order, logic [COLS-1:0] exp_cur);
    lvl_t wia;
    logic l;
    l = (s == SIDE_L);
    wia = ia ? LV_NOM : LV_GND;
    repeat (3) lines(LV_GND, LV_GND, 1, 1, l ? PL_REF : PL_NOM, l ? PL_NOM : PL_REF,
                     '1, l ? LV_NOM : LV_GND, LV_GND, '1, l ? LV_GND : LV_NOM, LV_GND);
    repeat (2) begin
      lines(l ? wia : LV_GND, l ? LV_GND : wia, 0, 0, l ? PL_REF : PL_NOM, l ? PL_NOM : PL_REF,
            '1, l ? LV_NOM : LV_GND, LV_GND, '1, l ? LV_GND : LV_NOM, LV_GND);
      #0.5 chk(l ? i1 : i2, exp_cur, l ? "pim current left" : "pim current right");
      chk(l ? i2 : i1, '0, "pim current on idle side");
    end
    lines(LV_GND, LV_GND, good_order ? l : !l, good_order ? !l : l, PL_NOM, PL_NOM,
          '1, l ? LV_NOM : LV_GND, LV_GND, '1, l ? LV_GND : LV_NOM, LV_GND);
    #0.5 chk(i1 | i2, '0, "no current after sampling");
    lines(LV_GND, LV_GND, 1, 1, PL_NOM, PL_NOM,
          '1, l ? LV_NOM : LV_GND, LV_GND, '1, l ? LV_GND : LV_NOM, LV_GND);
    hold();
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hold();
    hold();
    for (int n = 0; n < 20; n++) begin
      d_ref = COLS'($urandom);
      write(d_ref);
      read(d_ref);
    end
    for (int n = 0; n < 12; n++) begin
      w_ref = (n == 0) ? '1 : (n == 1) ? '0 : COLS'($urandom);
      prog_row(w_ref);
      verify(w_ref);
      read('0);                       // programming destroys the SRAM data
      d_ref = COLS'($urandom);
      write(d_ref);
      pim(SIDE_L, 1, 1, d_ref & w_ref);
      read(d_ref);
      pim(SIDE_R, 1, 1, ~d_ref & w_ref);
      read(d_ref);
      pim(SIDE_L, 0, 1, '0);
      pim(SIDE_R, 0, 1, '0);
      read(d_ref);
      verify(w_ref);                  // PIM does not disturb the weights
      // wrong restore order: cells whose node on the active side was low flip
      pim(SIDE_L, 1, 0, d_ref & w_ref);
      read('1);
      write(d_ref);
      pim(SIDE_R, 1, 0, ~d_ref & w_ref);
      read('0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
