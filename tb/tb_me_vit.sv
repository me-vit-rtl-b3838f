// tb_me_vit: end-to-end test of the Multi-PE accelerator at reduced size.
// Two ME-PEs behind the scheduler each run a complete encoder layer on their
// own random image and weights, at the same time: LOAD_F, LOAD_L, LP, MSA,
// LP, MLP, STORE. A DRAM model keeps one ordered beat stream per PE, served
// to whichever PE the scheduler names, with random bubbles; the write side
// applies random back-pressure. Each PE's stored output is compared word for
// word with the same bit-exact reference model used for the single-PE test.
//
// Mechanism counters, each of which must be non-zero: read-grant changes
// between PEs, cycles in which both PEs compute, cycles in which both want
// parameter data, write beats of each PE, read bubbles, write back-pressure,
// ReLU clipping, saturation, key masking, and every sequencer step in each PE.
module tb_me_vit;
  import mevit_pkg::*;
  localparam int NUM_PE = 2;
  localparam int P     = 2;
  localparam int D     = 16;
  localparam int N_TOK = 7;
  localparam int H     = 2;
  localparam int DFF   = 32;
  localparam int BURST = 8;
  localparam int WATCHDOG = 2000000;
  localparam int DH   = D / H;
  localparam int CB   = D / (2*P);
  localparam int DHB  = DH / (2*P);
  localparam int HB   = DFF / (2*P);
  localparam int NB   = (N_TOK + P - 1) / P;
  localparam int NPAD = NB * P;
  localparam int MM = 7, SC = 11, AT = 8, GF = 5;
  localparam int DW = 16 * P;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NUM_PE-1:0] cmd_valid, cmd_ready, done;
  cmd_e cmd [NUM_PE];
  logic mem_rd_req, mem_rd_valid, mem_rd_ready, mem_wr_valid, mem_wr_ready;
  logic [0:0] mem_rd_pe, mem_wr_pe;
  logic [DW-1:0] mem_rd_data, mem_wr_data;

  me_vit #(.NUM_PE(NUM_PE), .P(P), .D(D), .N_TOK(N_TOK), .H(H), .DFF(DFF), .BURST(BURST)) dut (
    .clk, .rst_n, .cmd_valid, .cmd, .cmd_ready, .done,
    .mem_rd_req, .mem_rd_pe, .mem_rd_valid, .mem_rd_ready, .mem_rd_data,
    .mem_wr_valid, .mem_wr_pe, .mem_wr_ready, .mem_wr_data);

  int checks = 0, failures = 0;

  // ------------------------------------------------------------ model data
  int X    [NPAD][D];
  int POS  [NPAD][D];
  int WE   [D][D];
  int WO   [D][D];
  int WQ   [H][D][DH];
  int WK   [H][D][DH];
  int WV   [H][D][DH];
  int WH   [D][DFF];
  int BH   [DFF];
  int W2   [DFF][D];
  int BO   [D];
  int G    [3][D];
  int BE   [3][D];
  int F    [NPAD][D];
  int L    [NPAD][D];
  int n_relu = 0, n_sat = 0, n_masked = 0;

  function automatic int s8(input longint v);
    if (v > 127) begin n_sat++; return 127; end
    if (v < -128) begin n_sat++; return -128; end
    return int'(v);
  endfunction
  function automatic int rqm(input longint a, input int sh);
    return s8(a >>> sh);
  endfunction
  function automatic int rnd(input int mag);
    return $signed($urandom_range(0, 2 * mag)) - mag;
  endfunction

  // LayerNorm of one row, the fixed-point recipe of ln_stats / layernorm_unit
  function automatic void ln_row(input int s [D], input int which, output int y [D]);
    longint sum, sq, recip, mean, ex2, vr, root, rstd;
    sum = 0; sq = 0;
    for (int j = 0; j < D; j++) begin sum += s[j]; sq += s[j] * s[j]; end
    recip = ((longint'(1) << 24) + D / 2) / D;
    mean = (sum * recip) >>> 16;
    ex2  = (sq * recip) >>> 8;
    vr   = ex2 - mean * mean + 1;
    if (vr < 1) vr = 1;
    root = 0;
    while ((root + 1) * (root + 1) <= vr) root++;
    rstd = (longint'(1) << 20) / root;
    if (rstd > 65535) rstd = 65535;
    for (int j = 0; j < D; j++) begin
      longint d, n, g;
      d = (longint'(s[j]) <<< 8) - mean;
      n = (d * rstd) >>> 12;
      g = n * G[which][j];
      y[j] = s8((g >>> (8 + GF)) + BE[which][j]);
    end
  endfunction

  // LP mode: F x W + L, LayerNorm
  function automatic void ref_lp(input int which, input bit use_wo);
    for (int r = 0; r < NPAD; r++) begin
      int s [D];
      int y [D];
      for (int j = 0; j < D; j++) begin
        longint a;
        a = 0;
        for (int k = 0; k < D; k++) a += F[r][k] * (use_wo ? WO[k][j] : WE[k][j]);
        s[j] = s8(rqm(a, MM) + L[r][j]);
      end
      ln_row(s, which, y);
      for (int j = 0; j < D; j++) begin L[r][j] = y[j]; F[r][j] = s[j]; end
    end
  endfunction

  // Pseudo-Softmax of one score row (truncating float sum, 2/m reciprocal)
  function automatic void softmax_row(input int sc [N_TOK], output int p [N_TOK]);
    int e;
    longint m, q;
    e = sc[0]; m = 64'h80_0000;
    for (int k = 1; k < N_TOK; k++) begin
      longint add;
      if (sc[k] > e) begin
        add = (sc[k] - e > 23) ? 0 : (m >> (sc[k] - e));
        m = add + 64'h80_0000; e = sc[k];
      end else begin
        m = m + ((e - sc[k] > 23) ? 0 : (64'h80_0000 >> (e - sc[k])));
      end
      if (m >= 64'h100_0000) begin m = m >> 1; e++; end
    end
    q = (longint'(1) << 47) / m;
    if (q >= 64'h100_0000) q = 64'hFF_FFFF;
    q = q | 64'h80_0000;
    for (int k = 0; k < N_TOK; k++) begin
      int sh;
      sh = e - sc[k] + 1;
      p[k] = (sh > 23) ? 0 : int'((q >> sh) >> 15) & 255;
    end
  endfunction

  function automatic void ref_msa();
    int Z [NPAD][D];
    for (int h = 0; h < H; h++) begin
      int Q [NPAD][DH];
      int K [NPAD][DH];
      int V [NPAD][DH];
      for (int r = 0; r < NPAD; r++)
        for (int c = 0; c < DH; c++) begin
          longint aq, ak, av;
          aq = 0; ak = 0; av = 0;
          for (int k = 0; k < D; k++) begin
            aq += L[r][k] * WQ[h][k][c];
            ak += L[r][k] * WK[h][k][c];
            av += L[r][k] * WV[h][k][c];
          end
          Q[r][c] = rqm(aq, MM); K[r][c] = rqm(ak, MM); V[r][c] = rqm(av, MM);
        end
      for (int r = 0; r < NPAD; r++) begin
        int sc [N_TOK];
        int p [N_TOK];
        for (int j = 0; j < N_TOK; j++) begin
          longint a;
          a = 0;
          for (int c = 0; c < DH; c++) a += Q[r][c] * K[j][c];
          a = a >>> SC;
          sc[j] = (a > 63) ? 63 : ((a < -64) ? -64 : int'(a));
        end
        softmax_row(sc, p);
        for (int c = 0; c < DH; c++) begin
          longint a;
          a = 0;
          for (int j = 0; j < N_TOK; j++) a += p[j] * V[j][c];
          Z[r][h * DH + c] = rqm(a, AT);
        end
      end
    end
    n_masked += (2 * P * ((N_TOK + 2 * P - 1) / (2 * P)) - N_TOK);
    for (int r = 0; r < NPAD; r++)
      for (int j = 0; j < D; j++) begin L[r][j] = F[r][j]; F[r][j] = Z[r][j]; end
  endfunction

  function automatic void ref_mlp();
    int acc [NPAD][D];
    for (int r = 0; r < NPAD; r++) for (int j = 0; j < D; j++) acc[r][j] = BO[j];
    for (int c = 0; c < HB; c++)
      for (int r = 0; r < NPAD; r++) begin
        int M [2*P];
        for (int t = 0; t < 2 * P; t++) begin
          longint a;
          int hs;
          a = 0;
          for (int k = 0; k < D; k++) a += L[r][k] * WH[k][c * 2 * P + t];
          hs = s8(rqm(a, MM) + BH[c * 2 * P + t]);
          if (hs < 0) n_relu++;
          M[t] = (hs < 0) ? 0 : hs;
        end
        for (int j = 0; j < D; j++) begin
          longint a;
          a = 0;
          for (int t = 0; t < 2 * P; t++) a += M[t] * W2[c * 2 * P + t][j];
          acc[r][j] = s8(acc[r][j] + rqm(a, MM));
        end
      end
    for (int r = 0; r < NPAD; r++) begin
      int s [D];
      int y [D];
      for (int j = 0; j < D; j++) s[j] = s8(acc[r][j] + F[r][j]);
      ln_row(s, 2, y);
      for (int j = 0; j < D; j++) begin L[r][j] = y[j]; F[r][j] = s[j]; end
    end
  endfunction

  // ------------------------------------------------------------ DRAM model
  logic [2*P-1:0][7:0] q_beats [$];
  logic [2*P-1:0][7:0] b;

  task automatic push_left(input int M [NPAD][D]);
    for (int rb = 0; rb < NB; rb++)
      for (int j = 0; j < D; j += 2) begin
        for (int r = 0; r < P; r++) begin
          b[r]     = 8'(M[rb * P + r][j]);
          b[P + r] = 8'(M[rb * P + r][j + 1]);
        end
        q_beats.push_back(b);
      end
  endtask
  task automatic push_ln(input int which);
    for (int bb = 0; bb < D / P; bb++) begin
      for (int r = 0; r < P; r++) begin
        b[r] = 8'(G[which][bb * P + r]); b[P + r] = 8'(BE[which][bb * P + r]);
      end
      q_beats.push_back(b);
    end
  endtask

  // one stream per PE, built from q_beats by gen_stream()
  logic [2*P-1:0][7:0] mq [NUM_PE][$];
  int expl [NUM_PE][NPAD][D];

  task automatic push_w(input int M [D][D], input int ncb);
    for (int k = 0; k < D; k++) for (int cb = 0; cb < ncb; cb++) begin
      for (int c = 0; c < 2 * P; c++) b[c] = 8'(M[k][cb * 2 * P + c]);
      q_beats.push_back(b);
    end
  endtask

  // random layer for one PE: reference result and its full parameter stream
  task automatic gen_stream(input int pe);
    for (int r = 0; r < NPAD; r++) for (int j = 0; j < D; j++) begin
      X[r][j] = rnd(110); POS[r][j] = rnd(60);
    end
    for (int k = 0; k < D; k++) for (int j = 0; j < D; j++) begin
      WE[k][j] = rnd(110); WO[k][j] = rnd(60);
    end
    for (int h = 0; h < H; h++) for (int k = 0; k < D; k++) for (int c = 0; c < DH; c++) begin
      WQ[h][k][c] = rnd(50); WK[h][k][c] = rnd(50); WV[h][k][c] = rnd(60);
    end
    for (int k = 0; k < D; k++) for (int c = 0; c < DFF; c++) WH[k][c] = rnd(50);
    for (int c = 0; c < DFF; c++) begin BH[c] = rnd(20); for (int j = 0; j < D; j++) W2[c][j] = rnd(50); end
    for (int j = 0; j < D; j++) BO[j] = rnd(10);
    for (int w = 0; w < 3; w++) for (int j = 0; j < D; j++) begin
      G[w][j] = 16 + $urandom_range(0, 32); BE[w][j] = rnd(8);
    end
    for (int r = 0; r < NPAD; r++) for (int j = 0; j < D; j++) begin
      F[r][j] = X[r][j]; L[r][j] = POS[r][j];
    end
    ref_lp(0, 0);
    ref_msa();
    ref_lp(1, 1);
    ref_mlp();
    for (int r = 0; r < NPAD; r++) for (int j = 0; j < D; j++) expl[pe][r][j] = L[r][j];
    q_beats.delete();
    push_left(X);
    push_left(POS);
    push_w(WE, CB); push_ln(0);
    for (int h = 0; h < H; h++) begin
      for (int k = 0; k < D; k++) for (int cb = 0; cb < DHB; cb++) begin
        for (int c = 0; c < 2 * P; c++) b[c] = 8'(WV[h][k][cb * 2 * P + c]);
        q_beats.push_back(b);
      end
      for (int k = 0; k < D; k++) for (int cb = 0; cb < DHB; cb++) begin
        for (int c = 0; c < 2 * P; c++) b[c] = 8'(WK[h][k][cb * 2 * P + c]);
        q_beats.push_back(b);
      end
      for (int k = 0; k < D; k++) for (int cb = 0; cb < DHB; cb++) begin
        for (int c = 0; c < 2 * P; c++) b[c] = 8'(WQ[h][k][cb * 2 * P + c]);
        q_beats.push_back(b);
      end
    end
    push_w(WO, CB); push_ln(1);
    for (int bb = 0; bb < D / (2 * P); bb++) begin
      for (int c = 0; c < 2 * P; c++) b[c] = 8'(BO[bb * 2 * P + c]);
      q_beats.push_back(b);
    end
    for (int hc = 0; hc < HB; hc++) begin
      for (int k = 0; k < D; k++) begin
        for (int c = 0; c < 2 * P; c++) b[c] = 8'(WH[k][hc * 2 * P + c]);
        q_beats.push_back(b);
      end
      for (int c = 0; c < 2 * P; c++) b[c] = 8'(BH[hc * 2 * P + c]);
      q_beats.push_back(b);
      for (int r = 0; r < 2 * P; r++) for (int cb = 0; cb < CB; cb++) begin
        for (int c = 0; c < 2 * P; c++) b[c] = 8'(W2[hc * 2 * P + r][cb * 2 * P + c]);
        q_beats.push_back(b);
      end
    end
    push_ln(2);
    mq[pe] = q_beats;
  endtask

  // ------------------------------------------------------------ memory side
  logic bubble, wr_rdy;
  always_ff @(posedge clk) begin
    bubble <= ($urandom_range(0, 4) == 0);
    wr_rdy <= ($urandom_range(0, 2) != 0);
  end
  // read pointers advance with non-blocking updates, so every process sampling
  // this clock edge sees the same beat
  int rp [NUM_PE];
  assign mem_rd_valid = mem_rd_req && rp[mem_rd_pe] < mq[mem_rd_pe].size() && !bubble;
  assign mem_rd_data  = (rp[mem_rd_pe] < mq[mem_rd_pe].size()) ? mq[mem_rd_pe][rp[mem_rd_pe]] : '0;
  assign mem_wr_ready = wr_rdy;

  int got [NUM_PE][NPAD][D];
  int nst [NUM_PE];
  int n_switch = 0, n_both_busy = 0, n_both_need = 0, n_bubble = 0, n_bp = 0;
  logic [0:0] last_rd_pe = 0;
  bit seen [NUM_PE][string];

  always_ff @(posedge clk) if (rst_n) begin
    if (mem_rd_valid && mem_rd_ready) begin
      rp[mem_rd_pe] <= rp[mem_rd_pe] + 1;
      if (mem_rd_pe != last_rd_pe) n_switch++;
      last_rd_pe <= mem_rd_pe;
    end
    if (mem_rd_req && bubble) n_bubble++;
    if (mem_wr_valid && !mem_wr_ready) n_bp++;
    if (dut.g_pe[0].u_pe.sa_valid && dut.g_pe[1].u_pe.sa_valid) n_both_busy++;
    if (dut.ld_need == '1) n_both_need++;
    seen[0][dut.g_pe[0].u_pe.step.name()] = 1'b1;
    seen[1][dut.g_pe[1].u_pe.step.name()] = 1'b1;
    if (mem_wr_valid && mem_wr_ready) begin
      int pe, rb, j;
      pe = int'(mem_wr_pe);
      rb = (2 * nst[pe]) / D; j = (2 * nst[pe]) % D;
      for (int r = 0; r < P; r++) begin
        got[pe][rb * P + r][j]     <= int'($signed(mem_wr_data[8*r +: 8]));
        got[pe][rb * P + r][j + 1] <= int'($signed(mem_wr_data[8*(P+r) +: 8]));
      end
      nst[pe] <= nst[pe] + 1;
    end
  end

  task automatic run(input int pe, input cmd_e c);
    @(negedge clk);
    while (!cmd_ready[pe]) @(negedge clk);
    cmd[pe] = c; cmd_valid[pe] = 1;
    @(negedge clk);
    cmd_valid[pe] = 0;
    while (!done[pe]) @(negedge clk);
  endtask

  task automatic host(input int pe);
    // the second PE starts a little later so that the streams interleave
    repeat (pe * 37) @(negedge clk);
    run(pe, CMD_LOAD_F); run(pe, CMD_LOAD_L); run(pe, CMD_LP); run(pe, CMD_MSA);
    run(pe, CMD_LP); run(pe, CMD_MLP);
    checks++;
    if (rp[pe] != mq[pe].size()) begin failures++; $display("FAIL PE%0d left %0d beats", pe, mq[pe].size() - rp[pe]); end
    run(pe, CMD_STORE);
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++; $display("watchdog: steps %s %s left %0d %0d stored %0d %0d", dut.g_pe[0].u_pe.step.name(), dut.g_pe[1].u_pe.step.name(), mq[0].size() - rp[0], mq[1].size() - rp[1], nst[0], nst[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cmd_valid = '0;
    for (int pe = 0; pe < NUM_PE; pe++) begin cmd[pe] = CMD_LOAD_F; nst[pe] = 0; rp[pe] = 0; gen_stream(pe); end
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      host(0);
      host(1);
    join
    repeat (4) @(negedge clk);
    for (int pe = 0; pe < NUM_PE; pe++) begin
      checks++;
      if (nst[pe] != NB * D / 2) begin failures++; $display("FAIL PE%0d stored %0d beats", pe, nst[pe]); end
      for (int r = 0; r < NPAD; r++) for (int j = 0; j < D; j++) begin
        checks++;
        if (got[pe][r][j] != expl[pe][r][j]) begin
          failures++;
          if (failures < 20) $display("FAIL PE%0d out[%0d][%0d]=%0d exp %0d", pe, r, j, got[pe][r][j], expl[pe][r][j]);
        end
      end
    end
    begin
      string need [] = '{"ST_LDF", "ST_LDL", "ST_STORE", "LP_LDW", "LP_LDG", "LP_TILE", "LP_LNFIN",
        "LP_LNPASS", "MSA_LDW", "MSA_V", "MSA_K", "MSA_RES", "MSA_Q", "MSA_S", "MSA_FPSUM",
        "MSA_RECIP", "MSA_SMAX", "MSA_Z", "MSA_RESLD", "MLP_RES", "MLP_LDBO", "MLP_LDWH",
        "MLP_LDBH", "MLP_LDWO", "MLP_STAGE", "MLP_M", "MLP_ACC", "MLP_STORE", "MLP_RESLD",
        "MLP_LDG", "MLP_ADD", "MLP_LNFIN", "MLP_LNPASS"};
      for (int pe = 0; pe < NUM_PE; pe++) foreach (need[k]) begin
        checks++;
        if (!seen[pe].exists(need[k])) begin failures++; $display("FAIL PE%0d step %s never ran", pe, need[k]); end
      end
    end
    checks++; if (n_switch == 0)    begin failures++; $display("FAIL read grant never changed PE"); end
    checks++; if (n_both_busy == 0) begin failures++; $display("FAIL PEs never computed together"); end
    checks++; if (n_both_need == 0) begin failures++; $display("FAIL PEs never competed for data"); end
    checks++; if (n_bubble == 0)    begin failures++; $display("FAIL no read bubble"); end
    checks++; if (n_bp == 0)        begin failures++; $display("FAIL no write back-pressure"); end
    checks++; if (n_relu == 0)      begin failures++; $display("FAIL no ReLU clipping"); end
    checks++; if (n_sat == 0)       begin failures++; $display("FAIL no saturation"); end
    checks++; if (n_masked == 0)    begin failures++; $display("FAIL no masked keys"); end
    $display("switches=%0d both_busy=%0d both_need=%0d bubbles=%0d backpressure=%0d relu=%0d sat=%0d masked=%0d",
             n_switch, n_both_busy, n_both_need, n_bubble, n_bp, n_relu, n_sat, n_masked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
