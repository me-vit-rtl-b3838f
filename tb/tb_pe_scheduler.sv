// tb_pe_scheduler: three PEs pull parameter streams and push result beats
// through the scheduler. The memory model serves one ordered stream per PE,
// tagged with the PE number. Checks: each PE gets only its own beats, in
// order and all of them; at most one PE is served at a time; a PE holds the
// read channel for at most BURST beats while another waits; every result beat
// reaches memory tagged with the right PE, in order.
// The scheduling policy checked here (bursts of at most BURST read beats,
// per-beat write round-robin, no latency) is this design's own; the paper
// only names the scheduler. Beats move on valid && ready in the same cycle.
module tb_pe_scheduler;
  localparam int N = 3, DW = 16, BURST = 4, BEATS = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] ld_need, ld_ready, ld_valid, st_valid, st_ready;
  logic [DW-1:0] ld_data, st_data [N];
  logic mem_rd_req, mem_rd_valid, mem_rd_ready, mem_wr_valid, mem_wr_ready;
  logic [1:0] mem_rd_pe, mem_wr_pe;
  logic [DW-1:0] mem_rd_data, mem_wr_data;
  int checks = 0, failures = 0;

  pe_scheduler #(.NUM_PE(N), .DW(DW), .BURST(BURST)) dut (.clk, .rst_n,
    .pe_ld_need(ld_need), .pe_ld_ready(ld_ready), .pe_ld_valid(ld_valid), .pe_ld_data(ld_data),
    .pe_st_valid(st_valid), .pe_st_data(st_data), .pe_st_ready(st_ready),
    .mem_rd_req, .mem_rd_pe, .mem_rd_valid, .mem_rd_ready, .mem_rd_data,
    .mem_wr_valid, .mem_wr_pe, .mem_wr_ready, .mem_wr_data);

  int rx [N];      // beats received per PE
  int mem_sent [N];
  int tx [N];      // result beats sent per PE
  int mem_got [N];
  int run_len = 0, max_run_while_waiting = 0, switches = 0;
  logic [1:0] last_pe = 0;

  // PEs
  always_comb for (int p = 0; p < N; p++) begin
    ld_need[p]  = rx[p] < BEATS;
    st_valid[p] = tx[p] < BEATS / 2 && rx[p] > 4 * tx[p] / 2;
    st_data[p]  = DW'((p << 12) | tx[p]);
  end
  logic [N-1:0] rdy_rand;
  always_ff @(posedge clk) rdy_rand <= N'($urandom);
  assign ld_ready = ld_need & rdy_rand;
  // memory
  assign mem_rd_data  = DW'((int'(mem_rd_pe) << 12) | mem_sent[mem_rd_pe]);
  logic vr, wr;
  always_ff @(posedge clk) begin vr <= ($urandom_range(0, 4) != 0); wr <= $urandom_range(0, 1); end
  assign mem_rd_valid = mem_rd_req && vr;
  assign mem_wr_ready = wr;

  always_ff @(posedge clk) if (rst_n) begin
    checks++;
    if (!$onehot0(ld_valid)) begin failures++; $display("FAIL two PEs served"); end
    for (int p = 0; p < N; p++) if (ld_valid[p] && ld_ready[p]) begin
      checks++;
      if (ld_data !== DW'((p << 12) | rx[p])) begin
        failures++; $display("FAIL PE%0d got %h exp %h", p, ld_data, (p << 12) | rx[p]);
      end
      rx[p] <= rx[p] + 1;
      if (p == last_pe) run_len = run_len + 1;
      else begin switches++; run_len = 1; end
      last_pe <= 2'(p);
      if ((ld_need & ~(N'(1) << p)) != 0 && run_len > max_run_while_waiting)
        max_run_while_waiting = run_len;
    end
    if (mem_rd_valid && mem_rd_ready) mem_sent[mem_rd_pe] <= mem_sent[mem_rd_pe] + 1;
    for (int p = 0; p < N; p++) if (st_valid[p] && st_ready[p]) tx[p] <= tx[p] + 1;
    if (mem_wr_valid && mem_wr_ready) begin
      checks++;
      if (mem_wr_data !== DW'((int'(mem_wr_pe) << 12) | mem_got[mem_wr_pe])) begin
        failures++; $display("FAIL write from PE%0d: %h", mem_wr_pe, mem_wr_data);
      end
      mem_got[mem_wr_pe] <= mem_got[mem_wr_pe] + 1;
    end
  end

  initial begin
    #200000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int p = 0; p < N; p++) begin rx[p] = 0; mem_sent[p] = 0; tx[p] = 0; mem_got[p] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (!(rx[0] == BEATS && rx[1] == BEATS && rx[2] == BEATS &&
             mem_got[0] == BEATS / 2 && mem_got[1] == BEATS / 2 && mem_got[2] == BEATS / 2))
      @(posedge clk);
    checks++;
    if (max_run_while_waiting > BURST) begin failures++; $display("FAIL run %0d > BURST", max_run_while_waiting); end
    checks++;
    if (switches < 3) begin failures++; $display("FAIL grant never rotated"); end
    $display("switches=%0d max_run=%0d", switches, max_run_while_waiting);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
