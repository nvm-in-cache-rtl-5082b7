// Powerline (VDD1/VDD2) switching block with the WCC input switches S_L/S_R
// and the verify-read current sense.
//
// Each column's VDD1 and VDD2 line is switched per phase:
//   hold, SRAM access    : both at nominal 0.8 V
//   program HRS          : both at 2 V
//   program LRS (L or R) : both grounded
//   verify side x        : VDDx in sense mode (current measured), the other nominal
//   PIM phases A and B   : VDDx at the WCC reference, the other nominal
//   PIM phases C and D   : both back at nominal
// S_L closes during left-side PIM and S_R during right-side PIM, routing the
// VDD1 or VDD2 currents into the word's weighted configuration circuit.
// During verify, sense[c] reports whether column c draws the LRS current.
// The per-column sense comparator is this design's abstraction of the
// paper's powerline current measurement.  Combinational.
module powerline_switch
  import nvm_pkg::*;
#(
  parameter int unsigned COLS = 512,
  parameter int unsigned CW   = 8
) (
  input  phase_t          phase,
  input  side_t           side,
  input  logic            pim_active,
  input  logic [CW-1:0]   cur1 [COLS],
  input  logic [CW-1:0]   cur2 [COLS],
  output pl_t             vdd1 [COLS],
  output pl_t             vdd2 [COLS],
  output logic            s_l,
  output logic            s_r,
  output logic [COLS-1:0] sense
);

  pl_t p1, p2;

  always_comb begin
    p1 = PL_NOM;
    p2 = PL_NOM;
    unique case (phase)
      PH_PROG_HRS: begin
        p1 = PL_OD;
        p2 = PL_OD;
      end
      PH_PROG_LRS_L, PH_PROG_LRS_R: begin
        p1 = PL_GND;
        p2 = PL_GND;
      end
      PH_VERIFY: begin
        if (side == SIDE_L) p1 = PL_SENSE;
        else                p2 = PL_SENSE;
      end
      PH_PIM_A, PH_PIM_B: begin
        if (side == SIDE_L) p1 = PL_REF;
        else                p2 = PL_REF;
      end
      default: ;
    endcase
    for (int unsigned c = 0; c < COLS; c++) begin
      vdd1[c] = p1;
      vdd2[c] = p2;
    end
  end

  always_comb
    for (int unsigned c = 0; c < COLS; c++)
      sense[c] = (side == SIDE_L) ? (cur1[c] != '0) : (cur2[c] != '0);

  assign s_l = pim_active && (side == SIDE_L);
  assign s_r = pim_active && (side == SIDE_R);

endmodule
