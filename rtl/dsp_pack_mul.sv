// dsp_pack_mul: two multiplications on one DSP-style 18x27 multiplier.
//
// The shared operand A goes to the 18-bit port and the two other operands are
// packed into the 27-bit port as (B << 18) + C. The 45-bit product then holds
// A*C in its low 18 bits and A*B above them. Because A*C may be negative, its
// sign borrows one from the upper field; the upper product is corrected by
// adding back bit 17. This follows the DSP packing scheme of the paper
// (Sec. II-C.1); the paper quotes 16-bit products for 8x8 operands, here A is
// 9 bits wide (so that unsigned 8-bit Softmax values can be multiplied too)
// and the products are 17 bits wide, which still fit the 18-bit field.
//
// Timing: one register stage (the DSP's M register); outputs are valid one
// cycle after the inputs.
//
// Lint note: only bits [16:0] of the upper 27-bit field are a product; the
// remaining bits of 'hi' are unused by construction.
module dsp_pack_mul #(
  parameter int A_W = 9,   // shared operand width (<= 18)
  parameter int B_W = 8    // packed operand width
) (
  input  logic                     clk,
  input  logic signed [A_W-1:0]    a,
  input  logic signed [B_W-1:0]    b,
  input  logic signed [B_W-1:0]    c,
  output logic signed [A_W+B_W-1:0] p_ab,
  output logic signed [A_W+B_W-1:0] p_ac
);
  logic signed [17:0] a18;
  logic signed [26:0] bc27;
  logic signed [44:0] p45;
  logic signed [26:0] hi;

  always_comb begin
    a18  = 18'(a);
    bc27 = (27'(b) <<< 18) + 27'(c);
    p45  = 45'(a18) * 45'(bc27);
    hi   = p45[44:18] + 27'(p45[17]);
  end

  always_ff @(posedge clk) begin
    p_ac <= p45[A_W+B_W-1:0];
    p_ab <= hi[A_W+B_W-1:0];
  end
endmodule
