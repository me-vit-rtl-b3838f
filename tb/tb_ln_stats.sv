// tb_ln_stats: random rows; mean and 1/sqrt(var) are compared with real-number
// values computed here (tolerances cover the fixed-point rounding), and the
// finalisation must finish within 45 cycles.
// How: clr, N values with acc_en, then start; done is awaited and counted.
// The sum / square-sum passes and the variance form follow the paper; the
// fixed-point formats, square root and division are this design's own.
module tb_ln_stats;
  localparam int N = 24;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr, acc_en, start, done;
  logic signed [15:0] x;
  logic signed [23:0] mean_q8;
  logic [15:0] rstd_q12;
  int checks = 0, failures = 0;
  function automatic real fabs(input real v); return (v < 0.0) ? -v : v; endfunction

  ln_stats #(.N_COLS(N)) dut (.clk, .rst_n, .clr, .acc_en, .x, .start, .mean_q8, .rstd_q12, .done);

  initial begin
    #500000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    clr = 0; acc_en = 0; start = 0; x = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      real s, s2, mean, var_r, rstd;
      int spread, lat;
      spread = (t % 4 == 0) ? 3 : ((t % 4 == 1) ? 20 : 127);
      @(negedge clk); clr = 1;
      @(negedge clk); clr = 0;
      s = 0; s2 = 0;
      for (int k = 0; k < N; k++) begin
        int v;
        v = $signed($urandom_range(0, 2 * spread)) - spread;
        if (v > 127) v = 127;
        acc_en = 1; x = 16'(v);
        s += v; s2 += v * v;
        @(negedge clk);
      end
      acc_en = 0;
      mean = s / N;
      var_r = s2 / N - mean * mean;
      rstd = 1.0 / $sqrt(var_r + 1.0 / 65536.0);
      start = 1; @(negedge clk); start = 0;
      lat = 1;
      while (!done && lat < 100) begin @(negedge clk); lat++; end
      checks++;
      if (lat > 45) begin failures++; $display("FAIL latency %0d", lat); end
      checks++;
      if (fabs(real'(mean_q8) / 256.0 - mean) > 2.0 / 256.0) begin
        failures++; $display("FAIL mean %f exp %f", real'(mean_q8) / 256.0, mean);
      end
      checks++;
      if (rstd * 4096.0 < 65000.0 &&
          fabs(real'(rstd_q12) / 4096.0 - rstd) > 0.01 * rstd + 2.0 / 4096.0) begin
        failures++; $display("FAIL rstd %f exp %f (var %f)", real'(rstd_q12) / 4096.0, rstd, var_r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
