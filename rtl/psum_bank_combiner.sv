// Digital partial-sum combiner placed after a group of PIM sub-arrays.
// Signed weights are held as two unsigned banks: a positive-weight sub-array
// and a negative-weight sub-array that see the same input activations.  For
// every word column this block subtracts the negative bank's result from the
// positive bank's, adds the differences of all NPAIR bank pairs (the partial
// sums of one kernel spread over several sub-arrays), and, when keep is set,
// adds the new value shifted left by shift onto the value already held, so
// that several passes (higher input or weight precision, or successive
// kernel positions) accumulate into one output.
// Interface: in_valid qualifies pos/neg (one cycle, all banks together);
// keep and shift are sampled with in_valid.  sum is registered and
// out_valid pulses one clock after in_valid.
// The subtractor and the shift-and-add follow the paper; the number of bank
// pairs, the output width and the keep/shift control are this design's own.
module psum_bank_combiner #(
  parameter int unsigned NPAIR = 1,
  parameter int unsigned WORDS = 128,
  parameter int unsigned RW    = 12,
  parameter int unsigned SHW   = 4,
  parameter int unsigned OW    = 32,
  parameter int unsigned WB    = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [RW-1:0]          pos [NPAIR][WORDS],
  input  logic [RW-1:0]          neg [NPAIR][WORDS],
  input  logic                   keep,
  input  logic [SHW-1:0]         shift,
  input  logic                   wide,
  output logic signed [OW-1:0]   sum [WORDS],
  output logic                   out_valid
);

  logic signed [OW-1:0] diff [WORDS];
  logic signed [OW-1:0] comb [WORDS];

  always_comb begin
    for (int w = 0; w < WORDS; w++) begin
      diff[w] = '0;
      for (int p = 0; p < NPAIR; p++)
        diff[w] = diff[w] + $signed(OW'(pos[p][w])) - $signed(OW'(neg[p][w]));
    end
    for (int w = 0; w < WORDS; w++) begin
      if (!wide)                comb[w] = diff[w];
      else if (w % 2 == 1)      comb[w] = '0;
      else if (w + 1 < WORDS)   comb[w] = (diff[w] <<< WB) + diff[w+1];
      else                      comb[w] = diff[w] <<< WB;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int w = 0; w < WORDS; w++) sum[w] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int w = 0; w < WORDS; w++)
          sum[w] <= (keep ? sum[w] : OW'(0)) + (comb[w] <<< shift);
    end
  end

endmodule
