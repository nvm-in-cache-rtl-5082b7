// Behavioural model of one row of 6T-2R bit-cells (analog; not synthesizable
// as a real circuit, written as a cycle-level state model).
//
// Each cell is a 6T SRAM latch (Q / QB) whose two pull-up PMOS (M2, M4) are fed
// through an RRAM device each: R_LEFT from the column powerline VDD1 and
// R_RIGHT from VDD2.  The pull-down sources of the whole row go through two
// shared gated-GND transistors driven by V1 (left) and V2 (right).  WL1 gates
// the left access transistor to BL, WL2 the right one to BLB.
//
// On every clock edge (one 0.5 ns bias tick) the model looks at the line
// levels and applies one of these effects per column:
//   * SRAM write: WL1=WL2=NOM, V1=V2 on, BL/BLB complementary -> Q = BL.
//   * SRAM read : WL1=WL2=NOM, BL=BLB=NOM -> rd = Q (no state change).
//   * LRS program: WL1=WL2=OD, VDD1=VDD2=GND, BL=OD and BLB=GND -> R_LEFT=LRS;
//     BL=GND and BLB=OD -> R_RIGHT=LRS.  Q is left at the driven side.
//   * HRS program: WL1=WL2=OD, VDD1=VDD2=OD, BL=BLB=GND -> both RRAMs HRS, Q=0.
//   * Verify read: WLx on with VDDx in SENSE -> current unit = RRAM state.
//   * PIM sample: VDDx at the WCC reference, WLx = IA, V1=V2 off -> one current
//     unit on VDDx when IA=1, the cell's storage node on that side is high
//     (Q=1 for left, QB=1 for right) and the RRAM on that side is LRS.
// Cache-data retention through the PIM cycle is modelled: in a left cycle a
// cell holding Q=0 has Q charged through M1 while both gated grounds are off.
// If V1 is restored before (or with) V2, M3 pulls Q back down and the data is
// kept; if V2 is restored first, M5 discharges QB and the cell flips.  The
// right cycle is the mirror image.  These are the paper's rules; the exact
// final Q after a programming pulse, ideal HRS (zero current) and the scope of
// programming disturb (only the programmed row) are this model's choices.
//
// Current outputs i1/i2 and read data rd are combinational from the present
// line levels and the stored state.
module nvsram_row
  import nvm_pkg::*;
#(
  parameter int unsigned COLS = 512
) (
  input  logic            clk,
  input  lvl_t            wl1,
  input  lvl_t            wl2,
  input  logic            v1,
  input  logic            v2,
  input  lvl_t            bl   [COLS],
  input  lvl_t            blb  [COLS],
  input  pl_t             vdd1 [COLS],
  input  pl_t             vdd2 [COLS],
  output logic [COLS-1:0] i1,
  output logic [COLS-1:0] i2,
  output logic [COLS-1:0] rd
);

  // The model starts with all RRAMs in HRS and Q=0 (the paper assumes an
  // initial HRS state; a real array powers up with random SRAM data).
  logic [COLS-1:0] q       = '0; // SRAM latch node Q (QB = ~Q when settled)
  logic [COLS-1:0] r_left  = '0; // 1 = LRS, 0 = HRS
  logic [COLS-1:0] r_right = '0;
  logic [COLS-1:0] pend_l  = '0; // Q charged high in a left PIM cycle, unresolved
  logic [COLS-1:0] pend_r  = '0; // QB charged high in a right PIM cycle

  wire prog   = (wl1 == LV_OD) && (wl2 == LV_OD);
  wire access = (wl1 == LV_NOM) && (wl2 == LV_NOM) && v1 && v2;
  wire gnd_off = !v1 && !v2;

  always_ff @(posedge clk) begin
    for (int unsigned c = 0; c < COLS; c++) begin
      if (prog) begin
        if (vdd1[c] == PL_GND && vdd2[c] == PL_GND) begin
          if (bl[c] == LV_OD && blb[c] == LV_GND) begin
            r_left[c] <= 1'b1;
            q[c]      <= 1'b1;
          end else if (bl[c] == LV_GND && blb[c] == LV_OD) begin
            r_right[c] <= 1'b1;
            q[c]       <= 1'b0;
          end else begin
            q[c] <= 1'b0;           // latch unpowered: data lost
          end
        end else if (vdd1[c] == PL_OD && vdd2[c] == PL_OD &&
                     bl[c] == LV_GND && blb[c] == LV_GND) begin
          r_left[c]  <= 1'b0;
          r_right[c] <= 1'b0;
          q[c]       <= 1'b0;
        end
        pend_l[c] <= 1'b0;
        pend_r[c] <= 1'b0;
      end else if (access && vdd1[c] == PL_NOM && vdd2[c] == PL_NOM) begin
        if (bl[c] == LV_NOM && blb[c] == LV_GND)      q[c] <= 1'b1;
        else if (bl[c] == LV_GND && blb[c] == LV_NOM) q[c] <= 1'b0;
      end else begin
        // PIM: charge of the low storage node through the access transistor
        if (gnd_off && wl1 == LV_NOM && bl[c] == LV_NOM && !q[c])
          pend_l[c] <= 1'b1;
        if (gnd_off && wl2 == LV_NOM && blb[c] == LV_NOM && q[c])
          pend_r[c] <= 1'b1;
        // restore order decides whether the latch keeps its data
        if (pend_l[c]) begin
          if (v1) pend_l[c] <= 1'b0;                  // M3 pulls Q back low
          else if (v2) begin                          // M5 discharges QB: flip
            q[c]      <= 1'b1;
            pend_l[c] <= 1'b0;
          end
        end
        if (pend_r[c]) begin
          if (v2) pend_r[c] <= 1'b0;                  // M5 pulls QB back low
          else if (v1) begin                          // M3 discharges Q: flip
            q[c]      <= 1'b0;
            pend_r[c] <= 1'b0;
          end
        end
      end
    end
  end

  always_comb begin
    for (int unsigned c = 0; c < COLS; c++) begin
      i1[c] = ((vdd1[c] == PL_REF) && (wl1 == LV_NOM) && gnd_off && q[c] && r_left[c]) ||
              ((vdd1[c] == PL_SENSE) && (wl1 != LV_GND) && r_left[c]);
      i2[c] = ((vdd2[c] == PL_REF) && (wl2 == LV_NOM) && gnd_off && !q[c] && r_right[c]) ||
              ((vdd2[c] == PL_SENSE) && (wl2 != LV_GND) && r_right[c]);
      rd[c] = (wl1 == LV_NOM) && (wl2 == LV_NOM) && (bl[c] == LV_NOM) &&
              (blb[c] == LV_NOM) && q[c];
    end
  end

endmodule
