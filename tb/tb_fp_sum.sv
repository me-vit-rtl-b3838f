// tb_fp_sum: random score rows; the float sum of 2^x is compared with an
// exact real-number sum (relative error below 2^-23 per addition).
// How: clr, then one element per cycle with en; the sum is read after the
// last element (one-cycle update). Float accumulation of 2^x follows the
// paper; truncation of the smaller addend is this design's own choice.
module tb_fp_sum;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr, en;
  logic signed [7:0] x;
  logic [31:0] sum;
  int checks = 0, failures = 0;
  function automatic real fabs(input real v); return (v < 0.0) ? -v : v; endfunction

  fp_sum dut (.clk, .rst_n, .clr, .en, .x, .sum);

  function automatic real f32(input logic [31:0] b);
    if (b == 0) return 0.0;
    return (1.0 + real'(b[22:0]) / 8388608.0) * $pow(2.0, real'(int'(b[30:23]) - 127));
  endfunction

  initial begin
    #500000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    clr = 0; en = 0; x = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      real ref_s;
      int n, lo, hi;
      n = 1 + $urandom_range(0, 300);
      lo = -64 + $urandom_range(0, 60);
      hi = lo + $urandom_range(0, 127 - (lo + 64));
      clr = 1; @(negedge clk); clr = 0;
      checks++;
      if (sum != 0) begin failures++; $display("FAIL clear"); end
      ref_s = 0;
      for (int k = 0; k < n; k++) begin
        int v;
        v = $urandom_range(0, hi - lo) + lo;
        en = 1; x = 8'(v); ref_s += $pow(2.0, real'(v));
        @(negedge clk);
      end
      en = 0;
      checks++;
      if (fabs(f32(sum) - ref_s) > ref_s * real'(n) * 1.2e-7) begin
        failures++; $display("FAIL sum %e exp %e", f32(sum), ref_s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
