// Behavioural model of the strong-arm latch comparator of the SAR ADC (analog).
//
// The held sample drives the + input and the CDAC the - input; the latch
// resolves to 1 when the sample is at or above the DAC voltage.  Offset,
// noise and metastability are not modelled, and the decision is available
// within the same ADC clock cycle (combinational here).
module sar_comparator (
  input  int   vp_uv,
  input  int   vn_uv,
  output logic out
);

  assign out = (vp_uv >= vn_uv);

endmodule
