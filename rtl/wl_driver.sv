// Row decoder and wordline drivers of the sub-array.
//
// For SRAM access, programming and verify the row address is decoded and only
// the selected row's wordlines move; for PIM every row takes part at once and
// the row's current input-activation bit (bit-serial IA) decides whether its
// WL pulses.  Levels per phase, following the paper's bias description:
//   SRAM write / read : WL1 = WL2 = 0.8 V on the selected row
//   program HRS / LRS : WL1 = WL2 = 2 V overdrive on the selected row
//   verify            : WL of the side being read at 0.8 V on the selected row
//   PIM phase B       : WL of the active side = IA (0.8 V for 1, 0 V for 0)
//   all other phases  : 0 V
// Purely combinational; outputs follow the controller's registered phase.
module wl_driver
  import nvm_pkg::*;
#(
  parameter int unsigned ROWS = 128,
  localparam int unsigned AW  = $clog2(ROWS)
) (
  input  phase_t          phase,
  input  side_t           side,
  input  logic [AW-1:0]   row,
  input  logic [ROWS-1:0] ia_bits,
  output lvl_t            wl1 [ROWS],
  output lvl_t            wl2 [ROWS]
);

  always_comb begin
    for (int unsigned r = 0; r < ROWS; r++) begin
      logic sel;
      sel    = (AW'(r) == row);
      wl1[r] = LV_GND;
      wl2[r] = LV_GND;
      unique case (phase)
        PH_SRAM_WR, PH_SRAM_RD: if (sel) begin
          wl1[r] = LV_NOM;
          wl2[r] = LV_NOM;
        end
        PH_PROG_HRS, PH_PROG_LRS_L, PH_PROG_LRS_R: if (sel) begin
          wl1[r] = LV_OD;
          wl2[r] = LV_OD;
        end
        PH_VERIFY: if (sel) begin
          if (side == SIDE_L) wl1[r] = LV_NOM;
          else                wl2[r] = LV_NOM;
        end
        PH_PIM_B: if (ia_bits[r]) begin
          if (side == SIDE_L) wl1[r] = LV_NOM;
          else                wl2[r] = LV_NOM;
        end
        default: ;
      endcase
    end
  end

endmodule
