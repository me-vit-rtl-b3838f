// tb_layernorm_unit: random inputs against the real-valued LayerNorm formula
// ((x - mean) * rstd * gamma + beta, saturated to int8, within one LSB of
// truncation error), plus the four-cycle pipeline latency with a gap-free
// stream of inputs.
// How: one element per cycle; each result must appear exactly 4 cycles after
// its input. The operation order follows the paper's LayerNorm module; the
// fixed-point formats and the tolerance of one int8 step are own choices.
module tb_layernorm_unit;
  localparam int GF = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  logic signed [7:0] x, gamma, beta, y;
  logic signed [23:0] mean_q8;
  logic [15:0] rstd_q12;
  int checks = 0, failures = 0;
  function automatic real fabs(input real v); return (v < 0.0) ? -v : v; endfunction
  real expq[$];
  int  sent = 0, got = 0;

  layernorm_unit #(.GAMMA_FRAC(GF)) dut (.clk, .rst_n, .in_valid, .x, .mean_q8, .rstd_q12,
    .gamma, .beta, .out_valid, .y);

  initial begin
    #200000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // output checker
  always @(posedge clk) if (rst_n && out_valid) begin
    real e;
    e = expq.pop_front();
    got++;
    checks++;
    if (fabs(real'(y) - e) > 1.01) begin failures++; $display("FAIL y=%0d exp %f", y, e); end
  end

  initial begin
    int first_out;
    in_valid = 0; x = 0; gamma = 0; beta = 0; mean_q8 = 0; rstd_q12 = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < 300; n++) begin
      real d, r;
      in_valid = 1;
      x = 8'($urandom); gamma = 8'($urandom); beta = 8'($urandom_range(0, 60) - 30);
      mean_q8 = 24'($signed($urandom_range(0, 8000)) - 4000);
      rstd_q12 = 16'($urandom_range(100, 20000));
      d = real'(x) - real'(mean_q8) / 256.0;
      r = d * real'(rstd_q12) / 4096.0 * real'(gamma) / 32.0 + real'(beta);
      // truncation of two shifts: the hardware value lies in [r - 1, r]
      r = r - 0.5;
      if (r > 127.0) r = 127.0;
      if (r < -128.0) r = -128.0;
      expq.push_back(r);
      sent++;
      @(negedge clk);
      if (n == 0) first_out = 0;
    end
    in_valid = 0;
    // latency: feed one more item alone and time it
    repeat (8) @(negedge clk);
    begin
      int lat;
      in_valid = 1; x = 8'sd10; gamma = 8'sd32; beta = 8'sd0; mean_q8 = 0; rstd_q12 = 16'd4096;
      expq.push_back(9.5);
      @(negedge clk); in_valid = 0; lat = 1;
      while (!out_valid && lat < 20) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 4) begin failures++; $display("FAIL latency %0d", lat); end
    end
    repeat (3) @(negedge clk);
    checks++;
    if (got != sent + 1) begin failures++; $display("FAIL count %0d %0d", got, sent); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
