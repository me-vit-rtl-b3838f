// tb_buffer_ram: random lane-masked writes and reads against a shadow array;
// checks the one-cycle read latency and that rdata holds while re is low.
// Interface/timing exercised: per-lane write enables, one-cycle read latency,
// read data held while re is low. The RAM behaviour is this design's own; the
// paper only fixes the buffer sizes and the P-wide parallel access.
module tb_buffer_ram;
  localparam int LANES = 4, LW = 8, DEPTH = 20;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, re;
  logic [4:0] waddr, raddr;
  logic [LANES-1:0] wlane;
  logic [LANES-1:0][LW-1:0] wdata, rdata;
  logic [LANES-1:0][LW-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  buffer_ram #(.LANES(LANES), .LW(LW), .DEPTH(DEPTH)) dut (.clk, .we, .waddr, .wlane,
    .wdata, .re, .raddr, .rdata);

  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wlane = 0; wdata = 0;
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = 5'(a); wlane = '1; wdata = {$urandom, $urandom} ;
      shadow[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 400; n++) begin
      logic [LANES-1:0][LW-1:0] expect_v;
      int ra;
      @(negedge clk);
      we = $urandom_range(0, 1);
      waddr = 5'($urandom_range(0, DEPTH - 1));
      wlane = 4'($urandom);
      wdata = $urandom;
      ra = $urandom_range(0, DEPTH - 1);
      re = 1; raddr = 5'(ra);
      expect_v = shadow[ra];      // read-before-write in the same cycle
      if (we) for (int l = 0; l < LANES; l++) if (wlane[l]) shadow[waddr][l] = wdata[l];
      @(negedge clk);
      we = 0; re = 0;
      checks++;
      if (rdata !== expect_v) begin failures++; $display("FAIL read %0d", ra); end
      @(negedge clk);
      checks++;
      if (rdata !== expect_v) begin failures++; $display("FAIL hold %0d", ra); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
