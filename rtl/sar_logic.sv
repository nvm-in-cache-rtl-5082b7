// Successive-approximation register logic of the 6-bit SAR ADC.
//
// Runs a binary search, MSB first, against the comparator.  The ADC clock is
// 50 MHz; the macro clock is a faster bias tick, so the logic advances only on
// ticks where ce (ADC clock enable) is high.  A conversion takes 8 ADC clocks,
// 160 ns:
//   cycle 0      SAMPLE  - the sample-and-hold acquires (the PIM cycle runs here)
//   cycles 1..6  TRIAL   - bit BITS-1 .. 0 is tried: code has it set, and it is
//                          kept if the comparator says the sample is >= CDAC
//   cycle 7      RESULT  - result is valid
// done is a one-tick pulse on the ce edge that ends RESULT; start may be high
// on that same edge to begin the next conversion back-to-back.  The split of
// the 8 cycles is this design's choice: the paper gives only 160 ns at 50 MHz.
module sar_logic #(
  parameter int unsigned BITS = 6
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            ce,
  input  logic            start,
  input  logic            cmp,
  output logic [BITS-1:0] code,
  output logic [BITS-1:0] result,
  output logic            done,
  output logic            busy
);

  typedef enum logic [1:0] {S_IDLE, S_SAMPLE, S_TRIAL, S_RESULT} state_t;

  state_t                    state;
  logic [$clog2(BITS)-1:0]   idx;
  logic [BITS-1:0]           sar;

  // Trial code: bits above idx decided, bit idx set, lower bits clear.
  assign code = (state == S_TRIAL) ? (sar | (BITS'(1) << idx)) : sar;
  assign done = (state == S_RESULT) && ce;
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      idx    <= '0;
      sar    <= '0;
      result <= '0;
    end else if (ce) begin
      unique case (state)
        S_IDLE, S_RESULT: if (start) state <= S_SAMPLE;
                          else       state <= S_IDLE;
        S_SAMPLE: begin
          state <= S_TRIAL;
          sar   <= '0;
          idx   <= $clog2(BITS)'(BITS - 1);
        end
        S_TRIAL: begin
          if (cmp) sar[idx] <= 1'b1;
          if (idx == '0) begin
            state  <= S_RESULT;
            result <= cmp ? (sar | BITS'(1)) : sar;
          end else begin
            idx <= idx - 1'b1;
          end
        end
      endcase
    end
  end

endmodule
