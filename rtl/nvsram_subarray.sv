// Behavioural model of the 128 x 512 6T-2R sub-array (128 x 128 four-bit
// words, 8 KB of SRAM plus 8 KB of RRAM weights).
//
// WL1/WL2 and the gated-GND controls V1/V2 run along each row; BL/BLB and the
// powerlines VDD1/VDD2 run along each column.  The array is built from
// nvsram_row instances.  Because every cell of a column hangs on the same
// VDD1/VDD2 line, the currents of all rows add on that line: cur1[c] / cur2[c]
// give the number of cells that draw an LRS current unit on column c (0..ROWS).
// This ideal, linear current sum is the model's abstraction of the analog
// accumulation; the paper reports mild nonlinearity across corners that is not
// modelled.  Read data of a column is the OR over rows being read (one row is
// read at a time).  Everything is combinational except the cell state, which
// changes on clk (one 0.5 ns bias tick).
module nvsram_subarray
  import nvm_pkg::*;
#(
  parameter int unsigned ROWS = 128,
  parameter int unsigned COLS = 512,
  localparam int unsigned CW  = $clog2(ROWS + 1)
) (
  input  logic            clk,
  input  lvl_t            wl1  [ROWS],
  input  lvl_t            wl2  [ROWS],
  input  logic [ROWS-1:0] v1,
  input  logic [ROWS-1:0] v2,
  input  lvl_t            bl   [COLS],
  input  lvl_t            blb  [COLS],
  input  pl_t             vdd1 [COLS],
  input  pl_t             vdd2 [COLS],
  output logic [CW-1:0]   cur1 [COLS],
  output logic [CW-1:0]   cur2 [COLS],
  output logic [COLS-1:0] rd
);

  logic [COLS-1:0] i1 [ROWS];
  logic [COLS-1:0] i2 [ROWS];
  logic [COLS-1:0] rr [ROWS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    nvsram_row #(.COLS(COLS)) u_row (
      .clk  (clk),
      .wl1  (wl1[r]),
      .wl2  (wl2[r]),
      .v1   (v1[r]),
      .v2   (v2[r]),
      .bl   (bl),
      .blb  (blb),
      .vdd1 (vdd1),
      .vdd2 (vdd2),
      .i1   (i1[r]),
      .i2   (i2[r]),
      .rd   (rr[r])
    );
  end

  // Current summation on the shared column powerlines.
  always_comb begin
    rd = '0;
    for (int unsigned c = 0; c < COLS; c++) begin
      cur1[c] = '0;
      cur2[c] = '0;
    end
    for (int unsigned r = 0; r < ROWS; r++) begin
      rd = rd | rr[r];
      for (int unsigned c = 0; c < COLS; c++) begin
        cur1[c] = cur1[c] + CW'(i1[r][c]);
        cur2[c] = cur2[c] + CW'(i2[r][c]);
      end
    end
  end

endmodule
