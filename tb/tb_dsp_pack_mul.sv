// tb_dsp_pack_mul: checks both packed products against plain multiplications
// for random and corner operands, and the one-cycle latency.
// How: every operand pair is applied for one cycle and both outputs are
// compared one clock later. The packing (A on the 18-bit port, (B<<18)+C on
// the 27-bit port) follows the paper; the sign-borrow correction checked by
// the negative corner cases is this design's own.
module tb_dsp_pack_mul;
  logic clk = 0;
  always #5 clk = ~clk;
  logic signed [8:0]  a;
  logic signed [7:0]  b, c;
  logic signed [16:0] p_ab, p_ac;
  int checks = 0, failures = 0;

  dsp_pack_mul #(.A_W(9), .B_W(8)) dut (.clk, .a, .b, .c, .p_ab, .p_ac);

  task automatic try(input int ta, input int tb_, input int tc);
    a = 9'(ta); b = 8'(tb_); c = 8'(tc);
    @(posedge clk); #1;
    checks += 2;
    if (p_ab !== 17'(ta * tb_)) begin failures++; $display("FAIL ab %0d*%0d=%0d", ta, tb_, p_ab); end
    if (p_ac !== 17'(ta * tc))  begin failures++; $display("FAIL ac %0d*%0d=%0d", ta, tc, p_ac); end
  endtask

  initial begin
    #20000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    @(posedge clk); #1;
    try(-256, -128, -128); try(255, 127, -128); try(-1, 1, -1); try(0, 5, -7);
    try(255, -128, 127); try(-256, 127, 1);
    for (int n = 0; n < 500; n++)
      try($signed($urandom_range(0, 511)) - 256, $signed($urandom_range(0, 255)) - 128,
          $signed($urandom_range(0, 255)) - 128);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
