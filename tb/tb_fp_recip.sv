// tb_fp_recip: random mantissas; the returned mantissa must equal 2/m to
// within one unit in the last place, the m = 1 case saturates, and done
// arrives 26 cycles after start.
// How: start is pulsed per mantissa and done must come exactly 26 cycles
// later. That the reciprocal is taken of the sum mantissa follows the paper;
// the division method and its latency are this design's own.
module tb_fp_recip;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, done;
  logic [31:0] fp_in, recip;
  int checks = 0, failures = 0;
  function automatic real fabs(input real v); return (v < 0.0) ? -v : v; endfunction

  fp_recip dut (.clk, .rst_n, .start, .fp_in, .recip, .done);

  initial begin
    #500000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    start = 0; fp_in = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      logic [22:0] f;
      real m, q, got;
      int lat;
      f = (t == 0) ? 23'd0 : ((t == 1) ? 23'h7F_FFFF : 23'($urandom));
      fp_in = {1'b0, 8'($urandom_range(100, 200)), f};
      start = 1; @(negedge clk); start = 0;
      lat = 1;
      while (!done && lat < 60) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 26) begin failures++; $display("FAIL latency %0d", lat); end
      m = 1.0 + real'(f) / 8388608.0;
      q = 2.0 / m;
      got = 1.0 + real'(recip[22:0]) / 8388608.0;
      checks++;
      if (t == 0) begin
        if (recip[22:0] != 23'h7F_FFFF) begin failures++; $display("FAIL m=1 case"); end
      end else if (fabs(got - q) > 1.5 / 8388608.0) begin
        failures++; $display("FAIL 2/m %f got %f", q, got);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
