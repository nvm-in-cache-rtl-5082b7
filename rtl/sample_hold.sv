// Behavioural model of the sample-and-hold in front of each SAR ADC (analog).
//
// The WCC pulls its mirrored current from the precharged OUT node, so the
// sampled voltage falls as the MAC value grows ("VDD - MAC").  The model uses
// a linear transfer V = V_ZERO - I * (V_ZERO - V_FS) / I_FS in microvolts,
// clipped at 0 V.  While track is high the held value follows the input on
// every clock edge; when track drops the last value is held for the ADC.
// The end points (600 mV at zero current, 87.5 mV at the full-scale current
// of 15 x 128 LRS units) are derived from the reported uncalibrated ADC code
// span 7..48 with an 800 mV reference; the linear shape is this model's
// simplification of the measured, mildly nonlinear curve.
module sample_hold #(
  parameter int unsigned IW        = 13,
  parameter int          V_ZERO_UV = 600000,
  parameter int          V_FS_UV   = 87500,
  parameter int          I_FS      = 1920
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          track,
  input  logic [IW-1:0] iin,
  output int            vout_uv
);

  int vin;

  always_comb begin
    longint drop;
    drop = (longint'(iin) * (longint'(V_ZERO_UV) - longint'(V_FS_UV))) / longint'(I_FS);
    vin  = (drop >= longint'(V_ZERO_UV)) ? 0 : int'(longint'(V_ZERO_UV) - drop);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     vout_uv <= V_ZERO_UV;
    else if (track) vout_uv <= vin;
  end

endmodule
