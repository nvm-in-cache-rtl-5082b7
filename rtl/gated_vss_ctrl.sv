// Gated-VSS control: drives the row-shared gated-GND transistors V1 (left
// pull-down, M3 side) and V2 (right pull-down, M5 side) of every row.
//
// Hold, SRAM access and verify: both on (0.8 V), as in a normal 6T cell.
// Programming: both off (0 V), so only the 2T-2R part of the cell conducts.
// PIM cycle of side x: on during phase A, both off during sampling (B), then
// Vx comes back first (C) and the other side's V last (D) - this order is
// what lets the latch keep its cache data.  Keeping V1/V2 on during verify is
// this design's choice; the paper does not state it.
// Combinational; every row gets the same value.
module gated_vss_ctrl
  import nvm_pkg::*;
#(
  parameter int unsigned ROWS = 128
) (
  input  phase_t          phase,
  input  side_t           side,
  output logic [ROWS-1:0] v1,
  output logic [ROWS-1:0] v2
);

  logic g1, g2;

  always_comb begin
    g1 = 1'b1;
    g2 = 1'b1;
    unique case (phase)
      PH_PROG_HRS, PH_PROG_LRS_L, PH_PROG_LRS_R, PH_PIM_B: begin
        g1 = 1'b0;
        g2 = 1'b0;
      end
      PH_PIM_C: begin
        g1 = (side == SIDE_L);
        g2 = (side == SIDE_R);
      end
      default: ;
    endcase
  end

  assign v1 = {ROWS{g1}};
  assign v2 = {ROWS{g2}};

endmodule
