// Signed-weight PIM system built from NVM-in-cache sub-array macros.
// NPAIR pairs of 6T-2R macros are instantiated: bank 2p holds the positive
// weights and bank 2p+1 the magnitudes of the negative weights of pair p.
// Each pair has its own input-activation vector ia[p] (both banks of a pair
// see the same one), so that every kernel position of a convolution can be
// fed its own slice of the input feature map; all banks run every PIM
// operation in lockstep; their per-word results go to the partial-sum combiner, which
// subtracts negative from positive banks, adds the pairs and optionally
// accumulates shifted passes; in wide mode it joins neighbouring word
// columns into 8-bit weights.  SRAM and NVM-program commands go to the one
// bank named by `bank`; a PIM command goes to all banks.
// Interface: cmd_valid/cmd_ready handshake (ready only when every bank is
// idle); cmd, bank, row, wdata, ia, keep, shift and wide are sampled on the
// accepting edge.  rdata/rd_valid and prog_done/prog_ok come from the
// addressed bank; sum/sum_valid from the combiner, one clock after the
// banks' results (one PIM operation: 2 sides x 4 IA bits x 160 ns).
// Positive/negative banks and digital combining follow the paper; the bank
// addressing and the keep/shift/wide controls are this design's own choices.
module nvm_pim_system
  import nvm_pkg::*;
#(
  parameter int unsigned ROWS     = 128,
  parameter int unsigned WORDS    = 128,
  parameter int unsigned IAB      = 4,
  parameter int unsigned ADC_DIV  = 40,
  parameter int          VREFP_MV = 570,
  parameter int          VREFN_MV = 155,
  parameter int unsigned NPAIR    = 1,
  localparam int unsigned NB      = 2 * NPAIR,
  localparam int unsigned BW      = (NB > 1) ? $clog2(NB) : 1,
  localparam int unsigned COLS    = WORDS * WBITS,
  localparam int unsigned AW      = $clog2(ROWS),
  localparam int unsigned RW      = ADC_BITS + IAB + 2,
  localparam int unsigned OW      = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  input  cmd_t                     cmd,
  input  logic [BW-1:0]            bank,
  input  logic [AW-1:0]            row,
  input  logic [COLS-1:0]          wdata,
  input  logic [ROWS-1:0][IAB-1:0] ia [NPAIR],
  input  logic                     keep,
  input  logic [3:0]               shift,
  input  logic                     wide,
  output logic [COLS-1:0]          rdata,
  output logic                     rd_valid,
  output logic                     prog_done,
  output logic                     prog_ok,
  output logic signed [OW-1:0]     sum [WORDS],
  output logic                     sum_valid
);

  logic [NB-1:0]          m_valid, m_ready, m_rd_valid, m_prog_done, m_prog_ok, m_res_v;
  logic [COLS-1:0]        m_rdata [NB];
  logic [WORDS-1:0][RW-1:0] m_result [NB];
  logic [RW-1:0]          pos [NPAIR][WORDS];
  logic [RW-1:0]          neg [NPAIR][WORDS];
  logic [BW-1:0]          bank_q;
  logic                   keep_q;
  logic [3:0]             shift_q;
  logic                   wide_q;
  logic                   accept;

  assign cmd_ready = &m_ready;
  assign accept    = cmd_valid && cmd_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bank_q  <= '0;
      keep_q  <= 1'b0;
      shift_q <= '0;
      wide_q  <= 1'b0;
    end else if (accept) begin
      bank_q <= bank;
      if (cmd == CMD_PIM) begin
        keep_q  <= keep;
        shift_q <= shift;
        wide_q  <= wide;
      end
    end
  end

  for (genvar b = 0; b < NB; b++) begin : g_bank
    assign m_valid[b] = accept && ((cmd == CMD_PIM) || (bank == BW'(b)));
    nvm_in_cache_macro #(
      .ROWS(ROWS), .WORDS(WORDS), .IAB(IAB), .ADC_DIV(ADC_DIV),
      .VREFP_MV(VREFP_MV), .VREFN_MV(VREFN_MV)
    ) u_macro (
      .clk, .rst_n,
      .cmd_valid(m_valid[b]), .cmd_ready(m_ready[b]), .cmd, .row, .wdata, .ia(ia[b/2]),
      .rdata(m_rdata[b]), .rd_valid(m_rd_valid[b]),
      .prog_done(m_prog_done[b]), .prog_ok(m_prog_ok[b]),
      .result(m_result[b]), .result_valid(m_res_v[b])
    );
  end

  always_comb begin
    for (int p = 0; p < NPAIR; p++)
      for (int w = 0; w < WORDS; w++) begin
        pos[p][w] = m_result[2*p][w];
        neg[p][w] = m_result[2*p+1][w];
      end
  end

  assign rdata     = m_rdata[bank_q];
  assign rd_valid  = m_rd_valid[bank_q];
  assign prog_done = m_prog_done[bank_q];
  assign prog_ok   = m_prog_ok[bank_q];

  psum_bank_combiner #(.NPAIR(NPAIR), .WORDS(WORDS), .RW(RW), .SHW(4), .OW(OW), .WB(WBITS)) u_comb (
    .clk, .rst_n, .in_valid(m_res_v[0]), .pos, .neg, .keep(keep_q), .shift(shift_q), .wide(wide_q),
    .sum, .out_valid(sum_valid)
  );

  // every bank runs the same PIM sequence, so all results arrive together
  // (the valid flags are low during reset, so no disable is needed)
  a_lockstep: assert property (@(posedge clk) m_res_v[0] |-> &m_res_v);

endmodule
