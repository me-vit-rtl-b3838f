// fp_recip: reciprocal of the Pseudo-Softmax sum mantissa ("FP Reciprocal" in
// the paper's Fig. 10/11).
//
// For a sum 2^e * m with m = 1.f in [1, 2), the Pseudo-Softmax needs 1/m. The
// result is returned as a float32 whose 23 mantissa bits are those of 2/m,
// i.e. the float 2^-1 * (2/m); the Softmax stage (Fig. 15) uses only these
// mantissa bits, with the hidden one prepended. 2/m is computed by a 25-step
// restoring division of 2^47 by the 24-bit mantissa. For m = 1 exactly, 2/m = 2
// has no 1.f form; the mantissa then saturates to all ones (2 - 2^-23), which
// keeps the Softmax output just below 1 instead of halving it. That case and
// the division method are this design's own choices.
//
// Interface: start with fp_in (the float32 sum) begins a division; done pulses
// 26 cycles later with recip valid until the next start.
//
// Lint note: only the mantissa of fp_in is used (the exponent is handled by
// pseudo_softmax); the top remainder bit is never read after the last step.
// The sign and exponent bits of recip are constant ({0, 126}): only the
// mantissa carries information, the word is kept float32-shaped on purpose.
module fp_recip (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] fp_in,
  output logic [31:0] recip,
  output logic        done
);
  logic        busy;
  logic [4:0]  cnt;
  logic [23:0] div;
  logic [24:0] rem;
  logic [24:0] quo;
  logic [24:0] rem_next;

  // dividend 2^47: a one followed by 47 zeros, shifted in MSB first
  always_comb rem_next = {rem[23:0], 1'b0};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      cnt   <= '0;
      div   <= '0;
      rem   <= '0;
      quo   <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        cnt  <= '0;
        div  <= {1'b1, fp_in[22:0]};
        // the top 23 dividend bits (a one and 22 zeros) are below any div
        rem  <= 25'h040_0000;
        quo  <= '0;
      end else if (busy) begin
        if (rem_next >= {1'b0, div}) begin
          rem <= rem_next - {1'b0, div};
          quo <= {quo[23:0], 1'b1};
        end else begin
          rem <= rem_next;
          quo <= {quo[23:0], 1'b0};
        end
        cnt <= cnt + 5'd1;
        if (cnt == 5'd24) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  always_comb recip = {1'b0, 8'd126, (quo[24] ? 23'h7F_FFFF : quo[22:0])};
endmodule
