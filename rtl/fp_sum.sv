// fp_sum: first pass of the Pseudo-Softmax ("FP Sum" in the paper's Fig. 10/11).
//
// Accumulates sum_k 2^x_k for one score row as a binary floating-point number.
// Every addend is an exact power of two, so an add is: align the smaller
// operand's 24-bit mantissa (hidden one included) to the larger exponent,
// add, and renormalise by at most one right shift. Alignment truncates. The
// paper gives the use of a floating-point sum; this adder is this design's
// own minimal version of it.
//
// Interface: clr empties the sum, en adds 2^x for the int8 x. sum is the
// float32 bit pattern (sign 0, biased exponent, 23 mantissa bits) of the
// running sum, updated one cycle after each en. An empty sum reads as 0.
//
// Lint note: the biased exponent is formed 10 bits wide for the range check
// and only its low 8 bits go into the float32 result.
// The sign bit of sum is constant 0, since 2^x is always positive.
module fp_sum (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              en,
  input  logic signed [7:0] x,
  output logic [31:0]       sum
);
  logic              empty;
  logic signed [9:0] e;      // unbiased exponent
  logic [23:0]       m;      // mantissa with hidden one

  logic signed [9:0] xe, e_n, d;
  logic [24:0]       m_add;
  logic [23:0]       m_n;
  always_comb begin
    xe = 10'(x);
    if (xe > e) begin
      d     = xe - e;
      m_add = ((d > 10'sd23) ? 25'd0 : (25'(m) >> d)) + 25'h080_0000;
      e_n   = xe;
    end else begin
      d     = e - xe;
      m_add = 25'(m) + ((d > 10'sd23) ? 25'd0 : (25'h080_0000 >> d));
      e_n   = e;
    end
    if (m_add[24]) begin
      m_n = m_add[24:1];
      e_n = e_n + 10'sd1;
    end else begin
      m_n = m_add[23:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      empty <= 1'b1;
      e     <= '0;
      m     <= '0;
    end else if (clr) begin
      empty <= 1'b1;
      e     <= '0;
      m     <= '0;
    end else if (en) begin
      empty <= 1'b0;
      if (empty) begin
        e <= xe;
        m <= 24'h80_0000;
      end else begin
        e <= e_n;
        m <= m_n;
      end
    end
  end

  logic [9:0] eb;
  always_comb begin
    eb  = 10'(e + 10'sd127);
    sum = empty ? 32'd0 : {1'b0, eb[7:0], m[22:0]};
  end
endmodule
