// Behavioural model of the 6-bit capacitive DAC of the SAR ADC (analog).
//
// Gives the comparison voltage for the SAR trial code:
//   vdac = VREFN + code * (VREFP - VREFN) / 2^BITS   (microvolts, floor)
// The default references are the calibrated values reported for the macro,
// VREFP = 570 mV and VREFN = 155 mV; the uncalibrated setting is VREFP = 800 mV,
// VREFN = 0.  The DAC is ideal (no capacitor mismatch).  Combinational.
module sar_cdac #(
  parameter int unsigned BITS     = 6,
  parameter int          VREFP_MV = 570,
  parameter int          VREFN_MV = 155
) (
  input  logic [BITS-1:0] code,
  output int              vdac_uv
);

  localparam int SPAN_UV = (VREFP_MV - VREFN_MV) * 1000;

  assign vdac_uv = VREFN_MV * 1000 + int'((longint'(code) * longint'(SPAN_UV)) >>> BITS);

endmodule
