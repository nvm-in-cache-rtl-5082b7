// 6T-2R NVM-in-cache PIM macro: one 128 x 512 sub-array of 6T-2R bit-cells
// with its peripherals, usable both as an ordinary SRAM cache sub-array and
// as an analog processing-in-memory engine whose weights live in the RRAM
// devices on the cell powerlines.
//
// Structure (the array-level figure of the paper):
//   pim_ctrl          command sequencer and shared bias FSM
//   wl_driver         row decoder / WL1-WL2 drivers (IA onto the wordlines)
//   gated_vss_ctrl    V1/V2 gated-GND controls shared along each row
//   sram_periph       BL/BLB drivers and read latch
//   powerline_switch  VDD1/VDD2 column switching, WCC switches S_L/S_R, verify sense
//   nvsram_subarray   the 6T-2R cells and the column current sums
//   per 4-bit word (WORDS of them): wcc -> sample_hold -> sar_adc -> post_proc
//                      (weighted current, S&H, 6-bit SAR ADC, subtractor /
//                       shift-add / output register)
// Interface: a command port (cmd_valid/cmd_ready, cmd, row, wdata, ia) and
// the results rdata/rd_valid (SRAM read), prog_done/prog_ok (NVM program) and
// result/result_valid (one MAC value per word: sum over rows of IA x weight,
// as quantised by the ADC; up to 2 x 15 x 63).  Clock: 0.5 ns bias tick;
// the ADCs advance at 50 MHz via a clock enable.  Timing per command is given
// in pim_ctrl.  All 128 word chains run in lockstep; the controller follows
// the done pulse of word 0.
module nvm_in_cache_macro
  import nvm_pkg::*;
#(
  parameter int unsigned ROWS     = 128,
  parameter int unsigned WORDS    = 128,
  parameter int unsigned IAB      = 4,
  parameter int unsigned ADC_DIV  = 40,
  parameter int          VREFP_MV = 570,
  parameter int          VREFN_MV = 155,
  localparam int unsigned COLS    = WORDS * WBITS,
  localparam int unsigned AW      = $clog2(ROWS),
  localparam int unsigned CW      = $clog2(ROWS + 1),
  localparam int unsigned IW      = CW + WBITS + 1,
  localparam int unsigned RW      = ADC_BITS + IAB + 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  input  cmd_t                     cmd,
  input  logic [AW-1:0]            row,
  input  logic [COLS-1:0]          wdata,
  input  logic [ROWS-1:0][IAB-1:0] ia,
  output logic [COLS-1:0]          rdata,
  output logic                     rd_valid,
  output logic                     prog_done,
  output logic                     prog_ok,
  output logic [WORDS-1:0][RW-1:0] result,
  output logic                     result_valid
);

  phase_t            phase;
  side_t             side;
  logic [AW-1:0]     row_q;
  logic [COLS-1:0]   data_q;
  logic [ROWS-1:0]   ia_bits;
  logic              pim_active;
  logic [COLS-1:0]   sense;
  logic              adc_ce, adc_start, track, pp_clear, pp_last;
  logic [$clog2(IAB)-1:0] pp_bit_idx;

  lvl_t              wl1 [ROWS];
  lvl_t              wl2 [ROWS];
  logic [ROWS-1:0]   v1, v2;
  lvl_t              bl  [COLS];
  lvl_t              blb [COLS];
  pl_t               vdd1 [COLS];
  pl_t               vdd2 [COLS];
  logic [CW-1:0]     cur1 [COLS];
  logic [CW-1:0]     cur2 [COLS];
  logic [COLS-1:0]   rd_arr;
  logic              s_l, s_r;
  logic [WORDS-1:0]  adc_done, res_v;

  pim_ctrl #(.ROWS(ROWS), .COLS(COLS), .IAB(IAB), .ADC_DIV(ADC_DIV)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .row, .wdata, .ia,
    .rd_valid, .prog_done, .prog_ok,
    .phase, .side, .row_q, .data_q, .ia_bits, .pim_active, .sense,
    .adc_ce, .adc_start, .adc_done(adc_done[0]), .track,
    .pp_clear, .pp_bit_idx, .pp_last
  );

  wl_driver #(.ROWS(ROWS)) u_wl (
    .phase, .side, .row(row_q), .ia_bits, .wl1, .wl2
  );

  gated_vss_ctrl #(.ROWS(ROWS)) u_vss (
    .phase, .side, .v1, .v2
  );

  sram_periph #(.COLS(COLS)) u_io (
    .clk, .rst_n, .phase, .side, .wdata(data_q), .rd_in(rd_arr), .bl, .blb, .rdata
  );

  powerline_switch #(.COLS(COLS), .CW(CW)) u_pl (
    .phase, .side, .pim_active, .cur1, .cur2, .vdd1, .vdd2, .s_l, .s_r, .sense
  );

  nvsram_subarray #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .wl1, .wl2, .v1, .v2, .bl, .blb, .vdd1, .vdd2, .cur1, .cur2, .rd(rd_arr)
  );

  for (genvar w = 0; w < WORDS; w++) begin : g_word
    logic [CW-1:0]       wc1 [WBITS];
    logic [CW-1:0]       wc2 [WBITS];
    logic [IW-1:0]       iout;
    int                  vsh;
    logic [ADC_BITS-1:0] code;

    for (genvar b = 0; b < WBITS; b++) begin : g_bit
      assign wc1[b] = cur1[w*WBITS + b];
      assign wc2[b] = cur2[w*WBITS + b];
    end

    wcc #(.CW(CW)) u_wcc (
      .cur1(wc1), .cur2(wc2), .s_l, .s_r, .iout
    );

    sample_hold #(.IW(IW), .I_FS(15 * ROWS)) u_sh (
      .clk, .rst_n, .track, .iin(iout), .vout_uv(vsh)
    );

    sar_adc #(.BITS(ADC_BITS), .VREFP_MV(VREFP_MV), .VREFN_MV(VREFN_MV)) u_adc (
      .clk, .rst_n, .ce(adc_ce), .start(adc_start), .vin_uv(vsh),
      .result(code), .done(adc_done[w]), .busy()
    );

    post_proc #(.IA_BITS(IAB), .ADC_BITS(ADC_BITS)) u_pp (
      .clk, .rst_n, .clear(pp_clear), .valid(adc_done[w]), .code,
      .bit_idx(pp_bit_idx), .last(pp_last), .result(result[w]), .result_valid(res_v[w])
    );
  end

  assign result_valid = &res_v;

endmodule
