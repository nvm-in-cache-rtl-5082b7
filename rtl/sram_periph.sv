// SRAM read/write peripherals: bitline drivers and read-data latch.
//
// BL/BLB levels per phase:
//   hold, SRAM read, verify : both precharged to 0.8 V
//   SRAM write              : BL = data, BLB = ~data (0.8 V / 0 V)
//   program HRS             : both 0 V
//   program LRS left        : BL = 2 V where the weight bit is 1, else 0 V; BLB = 0 V
//   program LRS right       : BLB = 2 V where the weight bit is 1, else 0 V; BL = 0 V
//   PIM (all phases)        : BL (left cycle) or BLB (right cycle) at 0.8 V, the
//                             other bitline at 0 V
// Grounding both bitlines of weight-0 columns during LRS programming (so they
// see no SET voltage) and the 0 V on the unused bitline in PIM are this
// design's choices.  Read data from the array is registered at the end of
// every SRAM read phase tick; rdata holds it until the next read.
module sram_periph
  import nvm_pkg::*;
#(
  parameter int unsigned COLS = 512
) (
  input  logic            clk,
  input  logic            rst_n,
  input  phase_t          phase,
  input  side_t           side,
  input  logic [COLS-1:0] wdata,
  input  logic [COLS-1:0] rd_in,
  output lvl_t            bl  [COLS],
  output lvl_t            blb [COLS],
  output logic [COLS-1:0] rdata
);

  always_comb begin
    for (int unsigned c = 0; c < COLS; c++) begin
      bl[c]  = LV_NOM;
      blb[c] = LV_NOM;
      unique case (phase)
        PH_SRAM_WR: begin
          bl[c]  = wdata[c] ? LV_NOM : LV_GND;
          blb[c] = wdata[c] ? LV_GND : LV_NOM;
        end
        PH_PROG_HRS: begin
          bl[c]  = LV_GND;
          blb[c] = LV_GND;
        end
        PH_PROG_LRS_L: begin
          bl[c]  = wdata[c] ? LV_OD : LV_GND;
          blb[c] = LV_GND;
        end
        PH_PROG_LRS_R: begin
          bl[c]  = LV_GND;
          blb[c] = wdata[c] ? LV_OD : LV_GND;
        end
        PH_PIM_A, PH_PIM_B, PH_PIM_C, PH_PIM_D: begin
          bl[c]  = (side == SIDE_L) ? LV_NOM : LV_GND;
          blb[c] = (side == SIDE_R) ? LV_NOM : LV_GND;
        end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  rdata <= '0;
    else if (phase == PH_SRAM_RD) rdata <= rd_in;
  end

endmodule
