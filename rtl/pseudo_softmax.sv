// pseudo_softmax: second pass of the Pseudo-Softmax (the paper's Fig. 15).
//
// With the row sum written as 2^exp_sum * mant_sum, the Pseudo-Softmax of
// score x is 2^(x - exp_sum) / mant_sum. Following Fig. 15: the score is
// turned into a biased exponent (x + 127), subtracted from the sum's biased
// exponent plus one (fp_sum[30:23] + 1), and the reciprocal mantissa with its
// hidden one, {1, recip[22:0]}, is shifted right by that amount. Bits [22:15]
// of the shifted value are the result: an unsigned 8-bit fraction of one
// (Softmax values lie in [0, 1)). Shifts of 24 or more give 0.
//
// One unit per row of a row block. Timing: one register stage; out_valid one
// cycle after in_valid.
//
// Lint note: only the exponent field of fp_sum and the mantissa field of
// fp_recip are needed, and only bits [22:15] of the shifted value form the
// output (the paper's 'upper 8 bits'); the other bits are unused by design.
module pseudo_softmax (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [31:0]       fp_recip,
  input  logic [31:0]       fp_sum,
  input  logic signed [7:0] score,
  output logic              out_valid,
  output logic [7:0]        p
);
  logic signed [10:0] biased_x;
  logic signed [10:0] sh;
  logic [23:0]        mant;
  logic [23:0]        shifted;

  always_comb begin
    biased_x = 11'(score) + 11'sd127;
    sh       = $signed({3'b000, fp_sum[30:23]}) + 11'sd1 - biased_x;
    mant     = {1'b1, fp_recip[22:0]};
    if (sh < 11'sd0)        shifted = 24'hFF_FFFF;  // cannot occur for a true sum
    else if (sh > 11'sd23)  shifted = 24'd0;
    else                    shifted = mant >> sh;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      p         <= '0;
    end else begin
      out_valid <= in_valid;
      p         <= shifted[22:15];
    end
  end
endmodule
