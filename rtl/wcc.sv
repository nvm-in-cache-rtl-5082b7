// Behavioural model of the weighted configuration circuit (WCC) of one 4-bit
// word (analog current mirrors; this model is ideal integer arithmetic).
//
// The four VDD1 lines (left) and four VDD2 lines (right) of a word reach the
// WCC through switches S_L and S_R.  NMOS current mirrors scale the line
// currents 8:4:2:1 from the word's first column (MSB of the weight) to its
// last (LSB) and add them on the OUT node that feeds the sample-and-hold.
// Currents are in units of one LRS cell current.  The bit order (first
// column = x8) is read from the array figure; exact mirror ratios and no
// mismatch are this model's idealisation.  Combinational.
module wcc
  import nvm_pkg::*;
#(
  parameter int unsigned CW = 8,
  localparam int unsigned OW = CW + WBITS + 1
) (
  input  logic [CW-1:0] cur1 [WBITS],
  input  logic [CW-1:0] cur2 [WBITS],
  input  logic          s_l,
  input  logic          s_r,
  output logic [OW-1:0] iout
);

  always_comb begin
    iout = '0;
    for (int unsigned b = 0; b < WBITS; b++) begin
      if (s_l) iout = iout + (OW'(cur1[b]) << (WBITS - 1 - b));
      if (s_r) iout = iout + (OW'(cur2[b]) << (WBITS - 1 - b));
    end
  end

endmodule
