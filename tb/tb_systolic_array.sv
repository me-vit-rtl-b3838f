// tb_systolic_array: random P x K by K x 2P block products against a reference
// matrix product, for several K, and the two-cycle latency of out_valid.
// How: each tile is K beats with in_first on the first and in_last on the
// last; out_valid must rise exactly 2 cycles after the in_last beat. The
// P x 2P output per P x P array follows the paper's DSP packing; broadcasting
// and the output-stationary accumulation are this design's own.
module tb_systolic_array;
  localparam int P = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_first, in_last, out_valid;
  logic signed [8:0]  a_vec [P];
  logic signed [7:0]  b_vec [2*P];
  logic signed [31:0] acc [P][2*P];
  int checks = 0, failures = 0;

  systolic_array #(.P(P)) dut (.clk, .rst_n, .in_valid, .in_first, .in_last,
                               .a_vec, .b_vec, .acc, .out_valid);

  int A [P][64];
  int B [64][2*P];

  initial begin
    #200000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; in_first = 0; in_last = 0;
    foreach (a_vec[r]) a_vec[r] = 0;
    foreach (b_vec[c]) b_vec[c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int t = 0; t < 12; t++) begin
      int K, lat;
      K = 1 + (t * 7) % 40;
      for (int k = 0; k < K; k++) begin
        for (int r = 0; r < P; r++) A[r][k] = $signed($urandom_range(0, 511)) - 256;
        for (int c = 0; c < 2*P; c++) B[k][c] = $signed($urandom_range(0, 255)) - 128;
      end
      for (int k = 0; k < K; k++) begin
        // occasional bubble between inputs
        if (t % 3 == 1 && k == K / 2) begin in_valid = 0; @(posedge clk); #1; end
        in_valid = 1; in_first = (k == 0); in_last = (k == K - 1);
        for (int r = 0; r < P; r++) a_vec[r] = 9'(A[r][k]);
        for (int c = 0; c < 2*P; c++) b_vec[c] = 8'(B[k][c]);
        @(posedge clk); #1;
      end
      in_valid = 0; in_first = 0; in_last = 0;
      lat = 1;
      while (!out_valid && lat < 10) begin @(posedge clk); #1; lat++; end
      checks++;
      if (lat != 2) begin failures++; $display("FAIL latency %0d t=%0d K=%0d", lat, t, K); end
      for (int r = 0; r < P; r++)
        for (int c = 0; c < 2*P; c++) begin
          int ref_v;
          ref_v = 0;
          for (int k = 0; k < K; k++) ref_v += A[r][k] * B[k][c];
          checks++;
          if (acc[r][c] != ref_v) begin
            failures++; $display("FAIL t=%0d r=%0d c=%0d got %0d exp %0d", t, r, c, acc[r][c], ref_v);
          end
        end
      repeat (2) @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
