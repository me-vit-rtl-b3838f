// tb_me_vit_full: the top at its default size (5 ME-PEs, P_SYS = 32, D = 768,
// 257 tokens, 12 heads, MLP hidden size 3072) takes PE 0 through a complete
// encoder layer: LOAD_F (patches), LOAD_L (position embedding), LP (patch
// embedding + LayerNorm), MSA (12 heads), LP (output projection + residual +
// LayerNorm), MLP (partial sums, residual, LayerNorm), STORE. The streamed
// result is compared word for word with a bit-exact reference model of the
// arithmetic the RTL documents (int8 data, 32-bit sums, shift-and-saturate,
// fixed-point LayerNorm statistics, truncating float sum, Pseudo-Softmax).
// The other four PEs stay idle behind the scheduler; the read stream has
// random bubbles and the write stream random back-pressure. The test also
// checks that every sequencer step ran, that each parameter beat was read
// exactly once, that LP keeps the array busy exactly one cycle per
// contraction step (ceil(257/32) * 768/64 * 768 cycles), and that ReLU
// clipping, saturation and key masking happened.
module tb_me_vit_full;
  import mevit_pkg::*;
  localparam int P     = 32;
  localparam int D     = 768;
  localparam int N_TOK = 257;
  localparam int H     = 12;
  localparam int DFF   = 3072;
  localparam int WATCHDOG = 6000000;
  localparam int DH   = D / H;
  localparam int CB   = D / (2*P);
  localparam int DHB  = DH / (2*P);
  localparam int HB   = DFF / (2*P);
  localparam int NB   = (N_TOK + P - 1) / P;
  localparam int NPAD = NB * P;
  localparam int MM = 7, SC = 11, AT = 8, GF = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, done;
  cmd_e cmd;
  logic ld_need, ld_valid, ld_ready, st_valid, st_ready;
  logic [2*P-1:0][7:0] ld_data, st_data;

  // the default top; PE 0 is driven, the others stay idle
  localparam int NUM_PE = 5;
  logic [NUM_PE-1:0] cmd_valid_v, cmd_ready_v, done_v;
  cmd_e cmd_v [NUM_PE];
  logic mem_rd_req, mem_rd_valid, mem_rd_ready, mem_wr_valid, mem_wr_ready;
  logic [2:0] mem_rd_pe, mem_wr_pe;
  logic [16*P-1:0] mem_rd_data, mem_wr_data;
  me_vit dut (.clk, .rst_n, .cmd_valid(cmd_valid_v), .cmd(cmd_v), .cmd_ready(cmd_ready_v), .done(done_v),
    .mem_rd_req, .mem_rd_pe, .mem_rd_valid, .mem_rd_ready, .mem_rd_data,
    .mem_wr_valid, .mem_wr_pe, .mem_wr_ready, .mem_wr_data);
  always_comb begin
    cmd_valid_v = '0; cmd_valid_v[0] = cmd_valid;
    for (int p = 0; p < NUM_PE; p++) cmd_v[p] = cmd;
  end
  assign cmd_ready    = cmd_ready_v[0];
  assign done         = done_v[0];
  assign ld_need      = mem_rd_req && mem_rd_pe == 0;
  assign ld_ready     = mem_rd_ready && mem_rd_pe == 0;
  assign mem_rd_valid = ld_valid && mem_rd_pe == 0;
  assign mem_rd_data  = ld_data;
  assign st_valid     = mem_wr_valid;
  assign mem_wr_ready = st_ready;
  assign st_data      = mem_wr_data;

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

  int Z [NPAD][D];
  int Q [NPAD][DH];
  int K [NPAD][DH];
  int V [NPAD][DH];
  function automatic void ref_msa();
    for (int h = 0; h < H; h++) begin
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

  int acc [NPAD][D];
  function automatic void ref_mlp();
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

  // the read pointer advances with a non-blocking update, so every process
  // sampling this clock edge sees the same beat
  int rp = 0;
  always_ff @(posedge clk) begin
    if (ld_valid && ld_ready) rp <= rp + 1;
  end
  // random bubbles on the read stream
  always_comb begin
    ld_data = (rp < q_beats.size()) ? q_beats[rp] : '0;
  end
  logic bubble;
  always_ff @(posedge clk) bubble <= ($urandom_range(0, 3) == 0);
  assign ld_valid = (rp < q_beats.size()) && !bubble;
  int n_bubble_hit = 0, n_bp_hit = 0;
  always_ff @(posedge clk) begin
    if (ld_need && ld_ready && bubble && rp < q_beats.size()) n_bubble_hit++;
    if (st_valid && !st_ready) n_bp_hit++;
  end

  // ------------------------------------------------------------ step coverage
  bit seen [string];
  int lp_array_cycles = 0;
  bit in_lp = 0;
  always_ff @(posedge clk) begin
    seen[dut.g_pe[0].u_pe.step.name()] = 1'b1;
    if (in_lp && dut.g_pe[0].u_pe.sa_valid) lp_array_cycles++;
  end

  task automatic run(input cmd_e c);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    while (!done) @(negedge clk);
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int got [NPAD][D];
    int nst;
    cmd_valid = 0; cmd = CMD_LOAD_F; st_ready = 0;
    // model
    for (int r = 0; r < NPAD; r++) for (int j = 0; j < D; j++) begin
      X[r][j] = rnd(110); POS[r][j] = rnd(60);
    end
    for (int k = 0; k < D; k++) for (int j = 0; j < D; j++) begin
      WE[k][j] = rnd(12); WO[k][j] = rnd(10);
    end
    for (int h = 0; h < H; h++) for (int k = 0; k < D; k++) for (int c = 0; c < DH; c++) begin
      WQ[h][k][c] = rnd(10); WK[h][k][c] = rnd(10); WV[h][k][c] = rnd(10);
    end
    for (int k = 0; k < D; k++) for (int c = 0; c < DFF; c++) WH[k][c] = rnd(10);
    for (int c = 0; c < DFF; c++) begin BH[c] = rnd(20); for (int j = 0; j < D; j++) W2[c][j] = rnd(12); end
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

    repeat (3) @(negedge clk);
    rst_n = 1;

    push_left(X);   run(CMD_LOAD_F);
    push_left(POS); run(CMD_LOAD_L);
    // LP: W_E rows, then LN parameters
    for (int k = 0; k < D; k++) for (int cb = 0; cb < CB; cb++) begin
      for (int c = 0; c < 2 * P; c++) b[c] = 8'(WE[k][cb * 2 * P + c]);
      q_beats.push_back(b);
    end
    push_ln(0);
    in_lp = 1; run(CMD_LP); in_lp = 0;
    checks++;
    if (lp_array_cycles != NB * CB * D) begin
      failures++; $display("FAIL LP array cycles %0d exp %0d", lp_array_cycles, NB * CB * D);
    end
    // MSA: per head W_V, W_K, W_Q
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
    run(CMD_MSA);
    // LP with the MSA output projection
    for (int k = 0; k < D; k++) for (int cb = 0; cb < CB; cb++) begin
      for (int c = 0; c < 2 * P; c++) b[c] = 8'(WO[k][cb * 2 * P + c]);
      q_beats.push_back(b);
    end
    push_ln(1);
    run(CMD_LP);
    // MLP
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
    run(CMD_MLP);
    checks++;
    if (rp != q_beats.size()) begin failures++; $display("FAIL %0d beats left unread", q_beats.size() - rp); end

    // STORE with back-pressure
    fork
      run(CMD_STORE);
      begin
        nst = 0;
        while (nst < NB * D / 2) begin
          @(negedge clk);
          st_ready = ($urandom_range(0, 2) != 0);
          @(posedge clk);
          if (st_valid && st_ready) begin
            int rb, j;
            rb = (2 * nst) / D; j = (2 * nst) % D;
            for (int r = 0; r < P; r++) begin
              got[rb * P + r][j]     = int'($signed(st_data[r]));
              got[rb * P + r][j + 1] = int'($signed(st_data[P + r]));
            end
            nst++;
          end
        end
      end
    join
    for (int r = 0; r < NPAD; r++) for (int j = 0; j < D; j++) begin
      checks++;
      if (got[r][j] != L[r][j]) begin
        failures++;
        if (failures < 20) $display("FAIL out[%0d][%0d]=%0d exp %0d", r, j, got[r][j], L[r][j]);
      end
    end
    // every step of every mode ran, and the mechanisms were exercised
    foreach (seen[s]) ;
    begin
      string need [] = '{"ST_LDF", "ST_LDL", "ST_STORE", "LP_LDW", "LP_LDG", "LP_TILE", "LP_LNFIN",
        "LP_LNPASS", "MSA_LDW", "MSA_V", "MSA_K", "MSA_RES", "MSA_Q", "MSA_S", "MSA_FPSUM",
        "MSA_RECIP", "MSA_SMAX", "MSA_Z", "MSA_RESLD", "MLP_RES", "MLP_LDBO", "MLP_LDWH",
        "MLP_LDBH", "MLP_LDWO", "MLP_STAGE", "MLP_M", "MLP_ACC", "MLP_STORE", "MLP_RESLD",
        "MLP_LDG", "MLP_ADD", "MLP_LNFIN", "MLP_LNPASS"};
      foreach (need[k]) begin
        checks++;
        if (!seen.exists(need[k])) begin failures++; $display("FAIL step %s never ran", need[k]); end
      end
    end
    checks++; if (n_relu == 0)       begin failures++; $display("FAIL no ReLU clipping"); end
    checks++; if (n_sat == 0)        begin failures++; $display("FAIL no saturation"); end
    checks++; if (n_masked == 0)     begin failures++; $display("FAIL no masked keys"); end
    checks++; if (n_bubble_hit == 0) begin failures++; $display("FAIL no read bubble"); end
    checks++; if (n_bp_hit == 0)     begin failures++; $display("FAIL no store back-pressure"); end
    $display("relu=%0d sat=%0d masked=%0d bubbles=%0d backpressure=%0d", n_relu, n_sat, n_masked,
             n_bubble_hit, n_bp_hit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
