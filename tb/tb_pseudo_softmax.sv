// tb_pseudo_softmax: random sums and scores; the output fraction p/256 must
// match 2^x / sum to within 1/256 (plus the reciprocal's truncation), and the
// latency is one cycle.
// How: one score per cycle with in_valid; outputs are compared one cycle
// later against the real value 2^(x - e) / m. The shift formula follows the
// paper's Fig. 15; the saturation at negative shifts is own choice.
module tb_pseudo_softmax;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  logic [31:0] fp_recip, fp_sum;
  logic signed [7:0] score;
  logic [7:0] p;
  int checks = 0, failures = 0;
  function automatic real fabs(input real v); return (v < 0.0) ? -v : v; endfunction

  pseudo_softmax dut (.clk, .rst_n, .in_valid, .fp_recip, .fp_sum, .score, .out_valid, .p);

  initial begin
    #200000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; fp_recip = 0; fp_sum = 0; score = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      int e, x;
      logic [22:0] f, r;
      real m, ref_p, q;
      e = $signed($urandom_range(0, 120)) - 60;
      f = 23'($urandom);
      m = 1.0 + real'(f) / 8388608.0;
      q = 2.0 / m;
      r = (f == 0) ? 23'h7F_FFFF : 23'($rtoi((q - 1.0) * 8388608.0));
      x = e - $urandom_range(0, 12);
      if (x < -64) x = -64;
      fp_sum = {1'b0, 8'(e + 127), f};
      fp_recip = {1'b0, 8'd126, r};
      score = 8'(x);
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      ref_p = (2.0 ** (x - e)) / m;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL latency"); end
      checks++;
      if (fabs(real'(p) / 256.0 - ref_p) > 1.05 / 256.0) begin
        failures++; $display("FAIL x=%0d e=%0d p=%0d exp %f", x, e, p, ref_p * 256.0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
