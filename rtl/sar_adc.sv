// Behavioural model of the 6-bit SAR ADC of one word column: CDAC, strong-arm
// comparator and SAR logic (Fig. 6(d) structure: S&H to the + input, CDAC to
// the - input, SAR logic setting the CDAC code).  The analog parts are ideal
// models, the SAR logic is synthesizable.  One conversion is 8 ADC clocks
// (160 ns at 50 MHz); see sar_logic for the cycle split.  The result is
// floor((vin - VREFN) * 64 / (VREFP - VREFN)) clipped to 0..63.
module sar_adc #(
  parameter int unsigned BITS     = 6,
  parameter int          VREFP_MV = 570,
  parameter int          VREFN_MV = 155
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            ce,
  input  logic            start,
  input  int              vin_uv,
  output logic [BITS-1:0] result,
  output logic            done,
  output logic            busy
);

  logic [BITS-1:0] code;
  int              vdac_uv;
  logic            cmp;

  sar_cdac #(.BITS(BITS), .VREFP_MV(VREFP_MV), .VREFN_MV(VREFN_MV)) u_cdac (
    .code    (code),
    .vdac_uv (vdac_uv)
  );

  sar_comparator u_cmp (
    .vp_uv (vin_uv),
    .vn_uv (vdac_uv),
    .out   (cmp)
  );

  sar_logic #(.BITS(BITS)) u_sar (
    .clk    (clk),
    .rst_n  (rst_n),
    .ce     (ce),
    .start  (start),
    .cmp    (cmp),
    .code   (code),
    .result (result),
    .done   (done),
    .busy   (busy)
  );

endmodule
