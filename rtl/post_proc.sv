// Digital post-processing of one word column: subtractor, shift-and-add and
// output register.
//
// Every ADC conversion of a PIM operation delivers a 6-bit code for one IA bit
// of one side (left = R_LEFT / VDD1, right = R_RIGHT / VDD2).  Because the
// sampled voltage falls as the MAC value rises, the subtractor first inverts
// the code (2^ADC_BITS - 1 - code).  The shift-and-add unit weights it by the
// IA bit position (<< bit_idx) and accumulates; left and right conversions
// add into the same sum, since each cell contributes on exactly one side
// (the side whose storage node is high).  On the conversion flagged last the
// sum is written to the output register and result_valid pulses for one tick.
// clear restarts the accumulation.  The inversion, weighting and left+right
// sum follow the paper; the exact register timing is this design's choice.
module post_proc #(
  parameter int unsigned IA_BITS  = 4,
  parameter int unsigned ADC_BITS = 6,
  localparam int unsigned BW  = $clog2(IA_BITS),
  localparam int unsigned RW  = ADC_BITS + IA_BITS + 2
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic                valid,
  input  logic [ADC_BITS-1:0] code,
  input  logic [BW-1:0]       bit_idx,
  input  logic                last,
  output logic [RW-1:0]       result,
  output logic                result_valid
);

  logic [ADC_BITS-1:0] inv;     // subtractor output
  logic [RW-1:0]       term;    // shifted partial product
  logic [RW-1:0]       acc;

  assign inv  = ADC_BITS'((1 << ADC_BITS) - 1) - code;
  assign term = RW'(inv) << bit_idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc          <= '0;
      result       <= '0;
      result_valid <= 1'b0;
    end else begin
      result_valid <= 1'b0;
      if (clear) begin
        acc <= '0;
      end else if (valid) begin
        if (last) begin
          result       <= acc + term;
          result_valid <= 1'b1;
          acc          <= '0;
        end else begin
          acc <= acc + term;
        end
      end
    end
  end

endmodule
