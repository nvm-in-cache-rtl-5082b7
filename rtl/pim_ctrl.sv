// Controller of the 6T-2R PIM macro: command sequencing and the shared FSM
// that walks the array, the powerlines and the ADCs through their phases.
//
// The macro runs on one bias clock, a 0.5 ns tick.  The 50 MHz ADC clock is a
// clock enable (adc_ce) every ADC_DIV ticks, generated here.  Commands are
// accepted when cmd_ready is high:
//   CMD_SRAM_WR  row <- wdata                         T_SRAM ticks
//   CMD_SRAM_RD  rdata <- row; rd_valid pulses         T_SRAM ticks
//   CMD_PROG     weight bits wdata into R_LEFT and R_RIGHT of row:
//                HRS reset, LRS-left, LRS-right pulses of T_PROG ticks (4 ns)
//                each, then verify reads of both sides of T_VERIFY ticks (1 ns);
//                prog_done pulses and prog_ok tells whether both sides read
//                back as written.  The row's SRAM data is destroyed.
//   CMD_PIM      4b x 4b MAC of the 128-row IA vector ia with every word:
//                bit-serial over IA_BITS bits for the left side, then again
//                for the right side.  Each (side, bit) is one ADC conversion of
//                8 ADC clocks; its PIM cycle (phases A 1.5 ns, B 1 ns, C and D
//                0.5 ns each) runs in the conversion's sample cycle, with the
//                sample-and-hold tracking during phase B.  The next conversion
//                starts on the edge that ends the previous one, so a side takes
//                4 x 160 ns = 640 ns and the whole MAC 1280 ns (2 x IA_BITS x 8
//                x ADC_DIV ticks from the first conversion start).
// Post-processing is steered by pp_bit_idx / pp_last (the bit and last flag of
// the conversion that is finishing) and pp_clear at the start of a PIM.
// The phase durations are the paper's; the tick, the ordering left-then-right,
// the split of the final 1 ns into C and D and the command set are this
// design's choices.
module pim_ctrl
  import nvm_pkg::*;
#(
  parameter int unsigned ROWS     = 128,
  parameter int unsigned COLS     = 512,
  parameter int unsigned IAB      = 4,
  parameter int unsigned ADC_DIV  = 40,
  parameter int unsigned T_SRAM   = 2,
  parameter int unsigned T_PROG   = 8,
  parameter int unsigned T_VERIFY = 2,
  parameter int unsigned T_PA     = 3,
  parameter int unsigned T_PB     = 2,
  parameter int unsigned T_PC     = 1,
  parameter int unsigned T_PD     = 1,
  localparam int unsigned AW      = $clog2(ROWS),
  localparam int unsigned BW      = $clog2(IAB)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // command port
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  input  cmd_t                     cmd,
  input  logic [AW-1:0]            row,
  input  logic [COLS-1:0]          wdata,
  input  logic [ROWS-1:0][IAB-1:0] ia,
  output logic                     rd_valid,
  output logic                     prog_done,
  output logic                     prog_ok,
  // array side
  output phase_t                   phase,
  output side_t                    side,
  output logic [AW-1:0]            row_q,
  output logic [COLS-1:0]          data_q,
  output logic [ROWS-1:0]          ia_bits,
  output logic                     pim_active,
  input  logic [COLS-1:0]          sense,
  // ADC / sample-and-hold / post-processing
  output logic                     adc_ce,
  output logic                     adc_start,
  input  logic                     adc_done,
  output logic                     track,
  output logic                     pp_clear,
  output logic [BW-1:0]            pp_bit_idx,
  output logic                     pp_last
);

  typedef enum logic [2:0] {
    C_IDLE, C_SRAM, C_PROG, C_VERIFY, C_PIM
  } cstate_t;

  localparam int unsigned NCONV = 2 * IAB;            // conversions per MAC
  localparam int unsigned NW    = $clog2(NCONV + 1);
  localparam int unsigned SEQ_T = T_PA + T_PB + T_PC + T_PD;

  cstate_t                  st;
  cmd_t                     cmd_q;
  logic [ROWS-1:0][IAB-1:0] ia_q;
  logic [7:0]               tcnt;          // ticks left in the current phase
  logic [$clog2(ADC_DIV)-1:0] div;
  logic [NW-1:0]            next_n;        // next conversion to start
  logic [NW-1:0]            fin_n;         // conversion now in the ADC
  logic                     seq_on;        // PIM bias sequence running
  logic [7:0]               seq_t;         // tick within the PIM sequence
  logic                     ok_acc;
  logic                     adc_idle;      // no conversion in flight
  logic                     conv_go;       // a conversion starts on this edge

  // 50 MHz ADC clock enable
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      div <= '0;
    else if (div == ($clog2(ADC_DIV))'(ADC_DIV - 1))     div <= '0;
    else                             div <= div + 1'b1;
  end
  assign adc_ce = (div == ($clog2(ADC_DIV))'(ADC_DIV - 1));

  assign cmd_ready  = (st == C_IDLE);
  assign pim_active = (st == C_PIM);
  assign track      = (phase == PH_PIM_B);
  // The SAR accepts start when it is idle or on the edge that ends the
  // previous conversion (adc_done), so conversions run back-to-back.
  assign adc_start  = (st == C_PIM) && (next_n < NW'(NCONV)) && !seq_on &&
                      (adc_idle || adc_done);
  assign conv_go    = adc_ce && adc_start;
  assign pp_bit_idx = BW'(fin_n % NW'(IAB));
  assign pp_last    = (fin_n == NW'(NCONV - 1));

  // IA bit of every row for the conversion being sampled
  wire [BW-1:0] cur_bit = BW'(fin_n % NW'(IAB));
  always_comb
    for (int unsigned r = 0; r < ROWS; r++) ia_bits[r] = ia_q[r][cur_bit];

  // PIM sequence phase from the tick counter
  function automatic phase_t seq_phase(logic [7:0] t);
    if (t < 8'(T_PA))                      return PH_PIM_A;
    else if (t < 8'(T_PA + T_PB))          return PH_PIM_B;
    else if (t < 8'(T_PA + T_PB + T_PC))   return PH_PIM_C;
    else                                   return PH_PIM_D;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= C_IDLE;
      cmd_q     <= CMD_SRAM_WR;
      row_q     <= '0;
      data_q    <= '0;
      ia_q      <= '0;
      phase     <= PH_HOLD;
      side      <= SIDE_L;
      tcnt      <= '0;
      next_n    <= '0;
      fin_n     <= '0;
      seq_on    <= 1'b0;
      seq_t     <= '0;
      ok_acc    <= 1'b0;
      adc_idle  <= 1'b1;
      prog_ok   <= 1'b0;
      prog_done <= 1'b0;
      rd_valid  <= 1'b0;
      pp_clear  <= 1'b0;
    end else begin
      prog_done <= 1'b0;
      rd_valid  <= 1'b0;
      pp_clear  <= 1'b0;
      unique case (st)
        C_IDLE: begin
          phase <= PH_HOLD;
          if (cmd_valid) begin
            cmd_q  <= cmd;
            row_q  <= row;
            data_q <= wdata;
            unique case (cmd)
              CMD_SRAM_WR: begin
                st <= C_SRAM; phase <= PH_SRAM_WR; tcnt <= 8'(T_SRAM - 1);
              end
              CMD_SRAM_RD: begin
                st <= C_SRAM; phase <= PH_SRAM_RD; tcnt <= 8'(T_SRAM - 1);
              end
              CMD_PROG: begin
                st <= C_PROG; phase <= PH_PROG_HRS; tcnt <= 8'(T_PROG - 1);
              end
              CMD_PIM: begin
                st       <= C_PIM;
                ia_q     <= ia;
                next_n   <= '0;
                fin_n    <= '0;
                side     <= SIDE_L;
                adc_idle <= 1'b1;
                pp_clear <= 1'b1;
              end
            endcase
          end
        end

        C_SRAM: begin
          if (tcnt != 0) tcnt <= tcnt - 1'b1;
          else begin
            rd_valid <= (cmd_q == CMD_SRAM_RD);
            phase    <= PH_HOLD;
            st       <= C_IDLE;
          end
        end

        C_PROG: begin
          if (tcnt != 0) tcnt <= tcnt - 1'b1;
          else if (phase == PH_PROG_HRS) begin
            phase <= PH_PROG_LRS_L; tcnt <= 8'(T_PROG - 1);
          end else if (phase == PH_PROG_LRS_L) begin
            phase <= PH_PROG_LRS_R; tcnt <= 8'(T_PROG - 1);
          end else begin
            st     <= C_VERIFY;
            phase  <= PH_VERIFY;
            side   <= SIDE_L;
            tcnt   <= 8'(T_VERIFY - 1);
            ok_acc <= 1'b1;
          end
        end

        C_VERIFY: begin
          if (tcnt != 0) tcnt <= tcnt - 1'b1;
          else if (side == SIDE_L) begin
            ok_acc <= ok_acc && (sense == data_q);
            side   <= SIDE_R;
            tcnt   <= 8'(T_VERIFY - 1);
          end else begin
            prog_ok   <= ok_acc && (sense == data_q);
            prog_done <= 1'b1;
            side      <= SIDE_L;
            phase     <= PH_HOLD;
            st        <= C_IDLE;
          end
        end

        C_PIM: begin
          // start of a conversion: the SAR enters its sample cycle
          if (conv_go) begin
            adc_idle <= 1'b0;
            seq_on <= 1'b1;
            seq_t  <= '0;
            phase  <= PH_PIM_A;
            fin_n  <= next_n;
            side   <= (next_n >= NW'(IAB)) ? SIDE_R : SIDE_L;
            next_n <= next_n + 1'b1;
          end else if (seq_on) begin
            if (seq_t == 8'(SEQ_T - 1)) begin
              seq_on <= 1'b0;
              phase  <= PH_HOLD;
            end else begin
              seq_t <= seq_t + 1'b1;
              phase <= seq_phase(seq_t + 1'b1);
            end
          end
          if (adc_done && !conv_go) adc_idle <= 1'b1;
          if (adc_done && fin_n == NW'(NCONV - 1) && !conv_go) begin
            st   <= C_IDLE;
            side <= SIDE_L;
          end
        end

        default: st <= C_IDLE;
      endcase
    end
  end

  // The bias sequence of a PIM cycle must fit in the ADC sample cycle.
  initial assert (SEQ_T < ADC_DIV) else $error("PIM cycle longer than ADC sample cycle");

endmodule
