// me_pe: the Memory-Efficient Processing Element of ME-ViT.
//
// One ME-PE runs a whole ViT encoder on a single systolic array while keeping
// every intermediate result on chip: parameters are read from DRAM exactly once
// and nothing is written back until the final result. It is built around a
// P x P packed-DSP systolic array (P x 2P output block) and a fixed set of
// multi-purpose buffers whose roles change from mode to mode:
//
//   buffer   lanes x bits  words              LP mode        MSA mode              MLP mode
//   Weight   2P x 8        D*D/2P             W              W_Q,W_K,W_V +residual W_H block +residual
//   Feature  P x 8         ceil(N/P)*D        input / sums   residual, then heads Z staged partial sums
//   Layer    P x 8         ceil(N/P)*D        residual / LN  LN input, then resid. LN input, then resid.
//   Q        P x 8         DH                 -              Q row block           M = ReLU(L W_H + B_H)
//   K        2P x 8        D*DH/2P            -              K^T                   W_O row block
//   V        2P x 8        D*DH/2P            gamma, beta    V                     B_H block
//   S1, S2   P x 8         D                  residual sums  scores / softmax      staged sums / B_O
//   Result   P x 2P x 32   registers          every matrix block leaves the array through it
//
// Left-operand buffers (P lanes) hold one column of a P-row block per word;
// right-operand buffers (2P lanes) hold one row of a 2P-column block per word,
// so one read of each feeds the array for one cycle.
//
// Modes (commands):
//   LP   (Linear Projection) Feature x Weight, plus the residual from the
//        Layer buffer, into S1; row sums for LayerNorm on the fly; then per row
//        block LayerNorm into the Layer buffer and the un-normalised sums back
//        into the Feature buffer. Used for the patch embedding (the "residual"
//        is then the position embedding) and for the MSA output projection.
//   MSA  per head h: V = L W_V and K = L W_K for all rows; then per row block
//        Q = L_rb W_Q, scores S = Q K^T, Pseudo-Softmax (FP sum, FP
//        reciprocal, shift), Z = softmax V into the head's columns of the
//        Feature buffer. At head 1 each residual row block is first moved from
//        the Feature buffer into the free part of the Weight buffer; after the
//        last head it is moved to the Layer buffer.
//   MLP  the residual moves to the Weight buffer, B_O is staged; per hidden
//        column block c: M = ReLU(L W_H,c + B_H,c) (one P x 2P block per row
//        block) and the partial sums S += M W_O,c are staged through S1 and
//        kept in the Feature buffer (partial sum method). At the end the
//        residual returns to the Layer buffer and residual add + LayerNorm
//        leave the state an MSA (next layer) or final output expects.
//   LOAD_F / LOAD_L / STORE move whole Feature / Layer buffers from / to DRAM.
//
// What follows the paper: the buffer set and sizes, the mode split and the
// order of computation inside each mode, the residual moves, DSP packing, the
// two-pass LayerNorm and the Pseudo-Softmax datapath, ReLU instead of GeLU,
// loading each parameter once. This design's own choices: all steps run one
// after another (the paper overlaps loads, BMMs, Softmax and LayerNorm, e.g.
// two S buffers ping-pong in MLP mode; here S1 is used alone and S2 holds the
// broadcast B_O, and LayerNorm parameters sit in the V buffer in LP mode as
// the paper's LP figure draws them); number formats and shifts; the DRAM
// stream order; the MLP epilogue (residual add + LayerNorm) that closes a layer.
//
// DRAM stream order per command (each beat is 2P bytes, lane 0 first):
//   LOAD_F/LOAD_L/STORE  ceil(N/P)*D words in order rb, column; two P-byte
//                        words (rows of the block) per beat
//   LP   W rows k=0..D-1, each as D/2P beats; then D/P beats of LN parameters,
//        beat b = {beta[bP +: P], gamma[bP +: P]}
//   MSA  per head: W_V, W_K, W_Q (each D rows x DH/2P beats)
//   MLP  B_O (D/2P beats); per hidden block c: W_H[:, c] (D beats), B_H,c
//        (1 beat), W_O[c rows, :] (2P rows x D/2P beats); then LN parameters
//
// Handshakes: cmd_valid/cmd_ready start a command, done pulses at its end.
// ld_* is valid/ready; ld_need tells the scheduler this PE is waiting for
// parameter data. st_* is valid/ready, data held while not accepted.
//
// Lint notes: the per-row LayerNorm / reciprocal units run in lock-step, so
// only lane 0's done flag is used and the out_valid flags of layernorm_unit
// and pseudo_softmax are unused (the sequencer tracks their fixed latency).
// Comparisons such as cb < DHB - 1 are constant when a head is a single 2P
// column block (DH = 2P = 64 at the defaults); they are kept for other sizes.
module me_pe
  import mevit_pkg::*;
#(
  parameter int P           = 32,    // systolic array size P_SYS
  parameter int D           = 768,   // model dimension
  parameter int N_TOK       = 257,   // tokens, N + 1 (class token)
  parameter int H           = 12,    // heads
  parameter int DFF         = 3072,  // MLP hidden dimension
  parameter int MM_SHIFT    = 7,     // activation x weight requantisation
  parameter int SCORE_SHIFT = 11,    // Q K^T to score (includes 1/sqrt(DH))
  parameter int ATT_SHIFT   = 8,     // softmax (Q0.8) x V requantisation
  parameter int GAMMA_FRAC  = 5
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // command
  input  logic                    cmd_valid,
  input  cmd_e                    cmd,
  output logic                    cmd_ready,
  output logic                    done,
  // DRAM read stream
  output logic                    ld_need,
  input  logic                    ld_valid,
  output logic                    ld_ready,
  input  logic [2*P-1:0][7:0]     ld_data,
  // DRAM write stream
  output logic                    st_valid,
  input  logic                    st_ready,
  output logic [2*P-1:0][7:0]     st_data
);
  // ---------------------------------------------------------------- sizes
  localparam int DH       = D / H;
  localparam int CB       = D / (2*P);          // column blocks of D
  localparam int DHB      = DH / (2*P);         // column blocks of a head
  localparam int HB       = DFF / (2*P);        // hidden column blocks
  localparam int NB       = (N_TOK + P - 1) / P;           // row blocks
  localparam int NKB      = (N_TOK + 2*P - 1) / (2*P);     // key blocks
  localparam int NKEY     = NKB * 2 * P;
  localparam int LDEPTH   = NB * D;
  localparam int RES_BASE = 3 * D * DHB;
  localparam int WDEPTH   = (D * CB > RES_BASE + LDEPTH) ? D * CB : RES_BASE + LDEPTH;
  localparam int KV0      = (D * DHB > DH * NKB) ? D * DHB : DH * NKB;
  localparam int KVDEPTH  = (KV0 > NKEY * DHB) ? KV0 : NKEY * DHB;
  localparam int QDEPTH   = (DH > 2*P) ? DH : 2*P;
  localparam int SDEPTH   = (D > NKEY) ? D : NKEY;
  localparam int WAW  = $clog2(WDEPTH);
  localparam int LAW  = $clog2(LDEPTH);
  localparam int KAW  = $clog2(KVDEPTH);
  localparam int QAW  = $clog2(QDEPTH);
  localparam int SAW  = $clog2(SDEPTH);

  if ((D % (2*P)) != 0 || (DH % (2*P)) != 0 || (DFF % (2*P)) != 0 || (D % H) != 0) begin : g_bad_size
    $error("me_pe: D, D/H and DFF must be multiples of 2*P");
  end

  // ---------------------------------------------------------------- steps
  typedef enum logic [5:0] {
    ST_IDLE, ST_LDF, ST_LDL, ST_STORE,
    LP_LDW, LP_LDG, LP_TILE, LP_LNFIN, LP_LNPASS,
    MSA_LDW, MSA_V, MSA_K, MSA_RES, MSA_Q, MSA_S, MSA_FPSUM, MSA_RECIP, MSA_SMAX,
    MSA_Z, MSA_RESLD,
    MLP_RES, MLP_LDBO, MLP_LDWH, MLP_LDBH, MLP_LDWO, MLP_STAGE, MLP_M, MLP_ACC,
    MLP_STORE, MLP_RESLD, MLP_LDG, MLP_ADD, MLP_LNFIN, MLP_LNPASS
  } step_e;

  typedef enum logic [2:0] {PH_INIT, PH_RUN, PH_WAIT, PH_DRAIN} phase_e;
  typedef enum logic [1:0] {LS_F, LS_L, LS_Q, LS_S2} lsel_e;
  typedef enum logic [1:0] {RS_W, RS_K, RS_V} rsel_e;
  typedef enum logic [1:0] {LD_NONE, LD_RIGHT, LD_LEFT, LD_BCAST} ldkind_e;

  step_e  step;
  phase_e ph;
  int unsigned i;                 // issue index of the current loop
  int unsigned h, rb, cb, hc;     // head, row block, column block, hidden block
  localparam int PD = 5;          // pass pipeline depth
  logic [PD-1:0] pv;
  int unsigned   pidx [PD];

  // ---------------------------------------------------------------- buffers
  logic            w_we, w_re;   logic [WAW-1:0] w_waddr, w_raddr;
  logic [2*P-1:0]  w_wlane;      logic [2*P-1:0][7:0] w_wdata, w_rdata;
  logic            f_we, f_re;   logic [LAW-1:0] f_waddr, f_raddr;
  logic [P-1:0][7:0] f_wdata, f_rdata;
  logic            l_we, l_re;   logic [LAW-1:0] l_waddr, l_raddr;
  logic [P-1:0][7:0] l_wdata, l_rdata;
  logic            q_we, q_re;   logic [QAW-1:0] q_waddr, q_raddr;
  logic [P-1:0][7:0] q_wdata, q_rdata;
  logic            k_we, k_re;   logic [KAW-1:0] k_waddr, k_raddr;
  logic [2*P-1:0]  k_wlane;      logic [2*P-1:0][7:0] k_wdata, k_rdata;
  logic            v_we, v_re;   logic [KAW-1:0] v_waddr, v_raddr;
  logic [2*P-1:0][7:0] v_wdata, v_rdata;
  logic            s1_we, s1_re; logic [SAW-1:0] s1_waddr, s1_raddr;
  logic [P-1:0][7:0] s1_wdata, s1_rdata;
  logic            s2_we, s2_re; logic [SAW-1:0] s2_waddr, s2_raddr;
  logic [P-1:0][7:0] s2_wdata, s2_rdata;

  buffer_ram #(.LANES(2*P), .LW(8), .DEPTH(WDEPTH)) u_weight_buf (
    .clk, .we(w_we), .waddr(w_waddr), .wlane(w_wlane), .wdata(w_wdata),
    .re(w_re), .raddr(w_raddr), .rdata(w_rdata));
  buffer_ram #(.LANES(P), .LW(8), .DEPTH(LDEPTH)) u_feature_buf (
    .clk, .we(f_we), .waddr(f_waddr), .wlane({P{1'b1}}), .wdata(f_wdata),
    .re(f_re), .raddr(f_raddr), .rdata(f_rdata));
  buffer_ram #(.LANES(P), .LW(8), .DEPTH(LDEPTH)) u_layer_buf (
    .clk, .we(l_we), .waddr(l_waddr), .wlane({P{1'b1}}), .wdata(l_wdata),
    .re(l_re), .raddr(l_raddr), .rdata(l_rdata));
  buffer_ram #(.LANES(P), .LW(8), .DEPTH(QDEPTH)) u_q_buf (
    .clk, .we(q_we), .waddr(q_waddr), .wlane({P{1'b1}}), .wdata(q_wdata),
    .re(q_re), .raddr(q_raddr), .rdata(q_rdata));
  buffer_ram #(.LANES(2*P), .LW(8), .DEPTH(KVDEPTH)) u_k_buf (
    .clk, .we(k_we), .waddr(k_waddr), .wlane(k_wlane), .wdata(k_wdata),
    .re(k_re), .raddr(k_raddr), .rdata(k_rdata));
  buffer_ram #(.LANES(2*P), .LW(8), .DEPTH(KVDEPTH)) u_v_buf (
    .clk, .we(v_we), .waddr(v_waddr), .wlane({(2*P){1'b1}}), .wdata(v_wdata),
    .re(v_re), .raddr(v_raddr), .rdata(v_rdata));
  buffer_ram #(.LANES(P), .LW(8), .DEPTH(SDEPTH)) u_s1_buf (
    .clk, .we(s1_we), .waddr(s1_waddr), .wlane({P{1'b1}}), .wdata(s1_wdata),
    .re(s1_re), .raddr(s1_raddr), .rdata(s1_rdata));
  buffer_ram #(.LANES(P), .LW(8), .DEPTH(SDEPTH)) u_s2_buf (
    .clk, .we(s2_we), .waddr(s2_waddr), .wlane({P{1'b1}}), .wdata(s2_wdata),
    .re(s2_re), .raddr(s2_raddr), .rdata(s2_rdata));

  // Result buffer: the finished block of the systolic array
  logic signed [31:0] rbuf [P][2*P];

  // ---------------------------------------------------------------- array
  logic               sa_valid, sa_first, sa_last, sa_done;
  logic signed [8:0]  sa_a [P];
  logic signed [7:0]  sa_b [2*P];
  logic signed [31:0] sa_acc [P][2*P];

  systolic_array #(.P(P), .A_W(9), .B_W(8), .ACC_W(32)) u_sa (
    .clk, .rst_n, .in_valid(sa_valid), .in_first(sa_first), .in_last(sa_last),
    .a_vec(sa_a), .b_vec(sa_b), .acc(sa_acc), .out_valid(sa_done));

  // ---------------------------------------------------------------- LN / softmax units
  logic               lns_clr, lns_acc, lns_start;
  logic signed [15:0] lns_x   [P];
  logic signed [23:0] ln_mean [P];
  logic        [15:0] ln_rstd [P];
  logic        [P-1:0] lns_done;
  logic               ln_in_valid;
  logic        [P-1:0] ln_out_valid;
  logic signed [7:0]  ln_y [P];
  logic signed [7:0]  ln_gamma, ln_beta;
  logic               fps_clr, fps_en, rcp_start;
  logic [31:0]        fps_sum [P];
  logic [31:0]        rcp_val [P];
  logic [P-1:0]       rcp_done;
  logic               sm_in_valid;
  logic [P-1:0]       sm_out_valid;
  logic [7:0]         sm_p [P];

  for (genvar r = 0; r < P; r++) begin : g_row_units
    ln_stats #(.N_COLS(D)) u_ln_stats (
      .clk, .rst_n, .clr(lns_clr), .acc_en(lns_acc), .x(lns_x[r]), .start(lns_start),
      .mean_q8(ln_mean[r]), .rstd_q12(ln_rstd[r]), .done(lns_done[r]));
    layernorm_unit #(.GAMMA_FRAC(GAMMA_FRAC)) u_layernorm (
      .clk, .rst_n, .in_valid(ln_in_valid), .x(s1_rdata[r]), .mean_q8(ln_mean[r]),
      .rstd_q12(ln_rstd[r]), .gamma(ln_gamma), .beta(ln_beta),
      .out_valid(ln_out_valid[r]), .y(ln_y[r]));
    fp_sum u_fp_sum (
      .clk, .rst_n, .clr(fps_clr), .en(fps_en), .x(s1_rdata[r]), .sum(fps_sum[r]));
    fp_recip u_fp_recip (
      .clk, .rst_n, .start(rcp_start), .fp_in(fps_sum[r]), .recip(rcp_val[r]),
      .done(rcp_done[r]));
    pseudo_softmax u_softmax (
      .clk, .rst_n, .in_valid(sm_in_valid), .fp_recip(rcp_val[r]), .fp_sum(fps_sum[r]),
      .score(s1_rdata[r]), .out_valid(sm_out_valid[r]), .p(sm_p[r]));
  end

  // ---------------------------------------------------------------- step attributes
  function automatic bit is_tile(step_e s);
    return s inside {LP_TILE, MSA_V, MSA_K, MSA_Q, MSA_S, MSA_Z, MLP_M, MLP_ACC};
  endfunction
  function automatic bit is_wait(step_e s);
    return s inside {LP_LNFIN, MLP_LNFIN, MSA_RECIP};
  endfunction
  function automatic ldkind_e ld_kind(step_e s);
    case (s)
      ST_LDF, ST_LDL: return LD_LEFT;
      MLP_LDBO:       return LD_BCAST;
      LP_LDW, LP_LDG, MSA_LDW, MLP_LDWH, MLP_LDBH, MLP_LDWO, MLP_LDG: return LD_RIGHT;
      default:        return LD_NONE;
    endcase
  endfunction

  // loop length of the current step and phase
  int unsigned len;
  int unsigned tk;         // contraction length of a tile
  lsel_e       t_lsel;
  rsel_e       t_rsel;
  int unsigned t_lbase, t_rbase, t_rstride;
  always_comb begin
    t_lsel = LS_L; t_rsel = RS_W; t_lbase = rb * D; t_rbase = cb; t_rstride = 1; tk = D;
    case (step)
      LP_TILE: begin t_lsel = LS_F; t_rstride = CB; end
      MSA_V:   begin t_rstride = DHB; end
      MSA_K:   begin t_rbase = D * DHB + cb; t_rstride = DHB; end
      MSA_Q:   begin t_rbase = 2 * D * DHB + cb; t_rstride = DHB; end
      MSA_S:   begin t_lsel = LS_Q; t_lbase = 0; tk = DH; t_rsel = RS_K; t_rstride = NKB; end
      MSA_Z:   begin t_lsel = LS_S2; t_lbase = 0; tk = NKEY; t_rsel = RS_V; t_rstride = DHB; end
      MLP_M:   begin t_rbase = 0; end
      MLP_ACC: begin t_lsel = LS_Q; t_lbase = 0; tk = 2*P; t_rsel = RS_K; t_rstride = CB; end
      default: ;
    endcase
    len = 0;
    if (is_tile(step)) len = (ph == PH_DRAIN) ? ((step == MSA_V) ? P : 2*P) : tk;
    else case (step)
      ST_LDF, ST_LDL, ST_STORE:   len = LDEPTH;
      LP_LDW:                     len = D * CB;
      LP_LDG, MLP_LDG:            len = D / P;
      MSA_LDW:                    len = 3 * D * DHB;
      MLP_LDWH, MLP_LDWO:         len = D;
      MLP_LDBH:                   len = 1;
      MLP_LDBO:                   len = D;
      LP_LNPASS, MLP_LNPASS, MSA_RES, MLP_STAGE, MLP_STORE, MLP_ADD: len = D;
      MLP_RES, MSA_RESLD, MLP_RESLD: len = LDEPTH;
      MSA_FPSUM:                  len = N_TOK;
      MSA_SMAX:                   len = NKEY;
      default:                    len = 0;
    endcase
  end

  // ---------------------------------------------------------------- load / store handling
  ldkind_e            lk;
  logic [2*P-1:0][7:0] hold;       // beat being split into several words
  int unsigned        hold_cnt;    // words still to write from hold
  int unsigned        hold_pos;
  logic               ld_fire;
  logic [1:0]         sc;          // store sub-step
  logic [P-1:0][7:0]  st_lo;

  always_comb begin
    lk       = ld_kind(step);
    ld_need  = (lk != LD_NONE) && (ph == PH_RUN) && (i < len);
    ld_ready = ld_need && (hold_cnt == 0);
    ld_fire  = ld_valid && ld_ready;
  end

  // ---------------------------------------------------------------- issue
  logic issue;
  always_comb begin
    issue = 1'b0;
    if (lk == LD_NONE && step != ST_STORE && !is_wait(step) && step != ST_IDLE)
      issue = (ph == PH_RUN || ph == PH_DRAIN) && (i < len);
  end

  // drain and pass values
  int unsigned j0, j1, j4;
  always_comb begin
    j0 = pidx[0];
    j1 = pidx[1];
    j4 = pidx[4];
  end

  function automatic logic signed [7:0] rq(input logic signed [31:0] a, input int sh);
    return sat8(40'(a >>> sh));
  endfunction

  // ---------------------------------------------------------------- buffer port control
  always_comb begin
    w_we = 0; w_re = 0; w_waddr = '0; w_raddr = '0; w_wlane = '0; w_wdata = '0;
    f_we = 0; f_re = 0; f_waddr = '0; f_raddr = '0; f_wdata = '0;
    l_we = 0; l_re = 0; l_waddr = '0; l_raddr = '0; l_wdata = '0;
    q_we = 0; q_re = 0; q_waddr = '0; q_raddr = '0; q_wdata = '0;
    k_we = 0; k_re = 0; k_waddr = '0; k_raddr = '0; k_wlane = '0; k_wdata = '0;
    v_we = 0; v_re = 0; v_waddr = '0; v_raddr = '0; v_wdata = '0;
    s1_we = 0; s1_re = 0; s1_waddr = '0; s1_raddr = '0; s1_wdata = '0;
    s2_we = 0; s2_re = 0; s2_waddr = '0; s2_raddr = '0; s2_wdata = '0;
    sa_valid = 0; sa_first = 0; sa_last = 0;
    for (int r = 0; r < P; r++) sa_a[r] = '0;
    for (int c = 0; c < 2*P; c++) sa_b[c] = '0;
    lns_clr = 0; lns_acc = 0; lns_start = 0;
    for (int r = 0; r < P; r++) lns_x[r] = '0;
    ln_in_valid = 0; ln_gamma = '0; ln_beta = '0;
    fps_clr = 0; fps_en = 0; rcp_start = 0; sm_in_valid = 0;

    // ---- loads from DRAM
    if (lk != LD_NONE) begin
      logic do_w;
      logic [2*P-1:0][7:0] word;
      do_w = 1'b0;
      word = ld_data;
      if (hold_cnt != 0) begin
        do_w = 1'b1;
        word = hold;
      end else if (ld_fire) begin
        do_w = 1'b1;
      end
      if (do_w) begin
        case (step)
          ST_LDF: begin
            f_we = 1; f_waddr = LAW'(i);
            for (int r = 0; r < P; r++) f_wdata[r] = word[(hold_cnt != 0 ? P : 0) + r];
          end
          ST_LDL: begin
            l_we = 1; l_waddr = LAW'(i);
            for (int r = 0; r < P; r++) l_wdata[r] = word[(hold_cnt != 0 ? P : 0) + r];
          end
          LP_LDW, MSA_LDW, MLP_LDWH: begin
            w_we = 1; w_waddr = WAW'(i); w_wlane = '1; w_wdata = word;
          end
          LP_LDG, MLP_LDG, MLP_LDBH: begin
            v_we = 1; v_waddr = KAW'(i); v_wdata = word;
          end
          MLP_LDWO: begin
            k_we = 1; k_waddr = KAW'(i); k_wlane = '1; k_wdata = word;
          end
          MLP_LDBO: begin
            s2_we = 1; s2_waddr = SAW'(i);
            for (int r = 0; r < P; r++) s2_wdata[r] = word[(hold_cnt != 0) ? hold_pos : 0];
          end
          default: ;
        endcase
      end
    end

    // ---- store to DRAM
    if (step == ST_STORE && ph == PH_RUN && i < len) begin
      if (sc == 2'd0) begin l_re = 1; l_raddr = LAW'(i); end
      if (sc == 2'd1) begin l_re = 1; l_raddr = LAW'(i + 1); end
    end

    // ---- one-shot actions at step entry
    if (ph == PH_INIT) begin
      if (step == LP_TILE && cb == 0) lns_clr = 1;
      if (step == MLP_ADD)            lns_clr = 1;
      if (step == LP_LNFIN || step == MLP_LNFIN) lns_start = 1;
      if (step == MSA_FPSUM)          fps_clr = 1;
      if (step == MSA_RECIP)          rcp_start = 1;
    end

    // ---- tile: operand reads and array feed
    if (is_tile(step) && ph == PH_RUN && issue) begin
      case (t_lsel)
        LS_F:  begin f_re = 1;  f_raddr  = LAW'(t_lbase + i); end
        LS_L:  begin l_re = 1;  l_raddr  = LAW'(t_lbase + i); end
        LS_Q:  begin q_re = 1;  q_raddr  = QAW'(t_lbase + i); end
        LS_S2: begin s2_re = 1; s2_raddr = SAW'(t_lbase + i); end
        default: ;
      endcase
      case (t_rsel)
        RS_W: begin w_re = 1; w_raddr = WAW'(t_rbase + i * t_rstride); end
        RS_K: begin k_re = 1; k_raddr = KAW'(t_rbase + i * t_rstride); end
        RS_V: begin v_re = 1; v_raddr = KAW'(t_rbase + i * t_rstride); end
        default: ;
      endcase
    end
    if (step == MLP_M && ph == PH_INIT) begin
      v_re = 1; v_raddr = '0;     // B_H block, held in v_rdata for the drain
    end
    if (is_tile(step) && (ph == PH_RUN || ph == PH_WAIT) && pv[0]) begin
      sa_valid = 1;
      sa_first = (j0 == 0);
      sa_last  = (j0 == tk - 1);
      for (int r = 0; r < P; r++)
        case (t_lsel)
          LS_F:    sa_a[r] = 9'(signed'(f_rdata[r]));
          LS_L:    sa_a[r] = 9'(signed'(l_rdata[r]));
          LS_Q:    sa_a[r] = 9'(signed'(q_rdata[r]));
          default: sa_a[r] = {1'b0, s2_rdata[r]};   // softmax: unsigned fraction
        endcase
      for (int c = 0; c < 2*P; c++)
        case (t_rsel)
          RS_W:    sa_b[c] = w_rdata[c];
          RS_K:    sa_b[c] = k_rdata[c];
          default: sa_b[c] = v_rdata[c];
        endcase
    end

    // ---- tile drains: reads at issue, writes when the data is back
    if (ph == PH_DRAIN) begin
      if (issue && step == LP_TILE) begin
        l_re = 1; l_raddr = LAW'(rb * D + cb * 2 * P + i);
      end
      if (issue && step == MLP_ACC) begin
        s1_re = 1; s1_raddr = SAW'(cb * 2 * P + i);
      end
      if (pv[0]) begin
        case (step)
          LP_TILE: begin
            s1_we = 1; s1_waddr = SAW'(cb * 2 * P + j0);
            lns_acc = 1;
            for (int r = 0; r < P; r++) begin
              s1_wdata[r] = sat8(40'(rq(rbuf[r][j0], MM_SHIFT)) + 40'(signed'(l_rdata[r])));
              lns_x[r]    = 16'(signed'(s1_wdata[r]));
            end
          end
          MSA_V: begin
            v_we = 1; v_waddr = KAW'((rb * P + j0) * DHB + cb);
            for (int c = 0; c < 2*P; c++) v_wdata[c] = rq(rbuf[j0][c], MM_SHIFT);
          end
          MSA_K: begin
            k_we = 1; k_waddr = KAW'((cb * 2 * P + j0) * NKB + (rb * P) / (2 * P));
            for (int r = 0; r < P; r++) begin
              k_wlane[(rb * P) % (2 * P) + r] = 1'b1;
              k_wdata[(rb * P) % (2 * P) + r] = rq(rbuf[r][j0], MM_SHIFT);
            end
          end
          MSA_Q: begin
            q_we = 1; q_waddr = QAW'(cb * 2 * P + j0);
            for (int r = 0; r < P; r++) q_wdata[r] = rq(rbuf[r][j0], MM_SHIFT);
          end
          MSA_S: begin
            s1_we = 1; s1_waddr = SAW'(cb * 2 * P + j0);
            for (int r = 0; r < P; r++) s1_wdata[r] = sat_score(40'(rbuf[r][j0] >>> SCORE_SHIFT));
          end
          MSA_Z: begin
            f_we = 1; f_waddr = LAW'(rb * D + h * DH + cb * 2 * P + j0);
            for (int r = 0; r < P; r++) f_wdata[r] = rq(rbuf[r][j0], ATT_SHIFT);
          end
          MLP_M: begin
            q_we = 1; q_waddr = QAW'(j0);
            for (int r = 0; r < P; r++) begin
              logic signed [7:0] hsum;
              hsum = sat8(40'(rq(rbuf[r][j0], MM_SHIFT)) + 40'(signed'(v_rdata[j0])));
              q_wdata[r] = (hsum < 0) ? 8'sd0 : hsum;     // ReLU
            end
          end
          MLP_ACC: begin
            s1_we = 1; s1_waddr = SAW'(cb * 2 * P + j0);
            for (int r = 0; r < P; r++)
              s1_wdata[r] = sat8(40'(signed'(s1_rdata[r])) + 40'(rq(rbuf[r][j0], MM_SHIFT)));
          end
          default: ;
        endcase
      end
    end

    // ---- streaming passes
    if (ph == PH_RUN && !is_tile(step)) begin
      case (step)
        LP_LNPASS, MLP_LNPASS: begin
          if (issue) begin
            s1_re = 1; s1_raddr = SAW'(i);
            v_re  = 1; v_raddr  = KAW'(i / P);
          end
          if (pv[0]) begin
            ln_in_valid = 1;
            ln_gamma = v_rdata[j0 % P];
            ln_beta  = v_rdata[P + j0 % P];
            f_we = 1; f_waddr = LAW'(rb * D + j0); f_wdata = s1_rdata;
          end
          if (pv[4]) begin
            l_we = 1; l_waddr = LAW'(rb * D + j4);
            for (int r = 0; r < P; r++) l_wdata[r] = ln_y[r];
          end
        end
        MSA_RES, MLP_RES: begin
          if (issue) begin
            f_re = 1; f_raddr = LAW'((step == MSA_RES ? rb * D : 0) + i);
          end
          if (pv[0]) begin
            w_we = 1; w_waddr = WAW'(RES_BASE + (step == MSA_RES ? rb * D : 0) + j0);
            w_wlane = {{P{1'b0}}, {P{1'b1}}};
            for (int r = 0; r < P; r++) w_wdata[r] = f_rdata[r];
          end
        end
        MSA_RESLD, MLP_RESLD: begin
          if (issue) begin
            w_re = 1; w_raddr = WAW'(RES_BASE + i);
          end
          if (pv[0]) begin
            l_we = 1; l_waddr = LAW'(j0);
            for (int r = 0; r < P; r++) l_wdata[r] = w_rdata[r];
          end
        end
        MSA_FPSUM: begin
          if (issue) begin s1_re = 1; s1_raddr = SAW'(i); end
          if (pv[0]) fps_en = 1;
        end
        MSA_SMAX: begin
          if (issue) begin s1_re = 1; s1_raddr = SAW'(i); end
          if (pv[0]) sm_in_valid = 1;
          if (pv[1]) begin
            s2_we = 1; s2_waddr = SAW'(j1);
            for (int r = 0; r < P; r++) s2_wdata[r] = (j1 < N_TOK) ? sm_p[r] : 8'd0;
          end
        end
        MLP_STAGE: begin
          if (issue) begin
            if (hc == 0) begin s2_re = 1; s2_raddr = SAW'(i); end
            else begin f_re = 1; f_raddr = LAW'(rb * D + i); end
          end
          if (pv[0]) begin
            s1_we = 1; s1_waddr = SAW'(j0);
            s1_wdata = (hc == 0) ? s2_rdata : f_rdata;
          end
        end
        MLP_STORE: begin
          if (issue) begin s1_re = 1; s1_raddr = SAW'(i); end
          if (pv[0]) begin f_we = 1; f_waddr = LAW'(rb * D + j0); f_wdata = s1_rdata; end
        end
        MLP_ADD: begin
          if (issue) begin
            f_re = 1; f_raddr = LAW'(rb * D + i);
            l_re = 1; l_raddr = LAW'(rb * D + i);
          end
          if (pv[0]) begin
            s1_we = 1; s1_waddr = SAW'(j0);
            lns_acc = 1;
            for (int r = 0; r < P; r++) begin
              s1_wdata[r] = sat8(40'(signed'(f_rdata[r])) + 40'(signed'(l_rdata[r])));
              lns_x[r]    = 16'(signed'(s1_wdata[r]));
            end
          end
        end
        default: ;
      endcase
    end
  end

  // ---------------------------------------------------------------- sequencing
  logic step_end;      // current step (all its phases) finishes this cycle
  always_comb begin
    step_end = 1'b0;
    if (ph != PH_INIT) begin
      if (lk != LD_NONE)                step_end = (i >= len) && (hold_cnt == 0);
      else if (step == ST_STORE)        step_end = (i >= len);
      else if (step == LP_LNFIN || step == MLP_LNFIN) step_end = lns_done[0];
      else if (step == MSA_RECIP)       step_end = rcp_done[0];
      else if (is_tile(step))           step_end = (ph == PH_DRAIN) && (i >= len) && (pv == '0);
      else                              step_end = (i >= len) && (pv == '0);
    end
  end

  assign cmd_ready = (step == ST_IDLE);

  task automatic go(input step_e s);
    step <= s;
    ph   <= PH_INIT;
    i    <= 0;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step     <= ST_IDLE;
      ph       <= PH_INIT;
      i        <= 0;
      h        <= 0;
      rb       <= 0;
      cb       <= 0;
      hc       <= 0;
      pv       <= '0;
      for (int k = 0; k < PD; k++) pidx[k] <= 0;
      hold     <= '0;
      hold_cnt <= 0;
      hold_pos <= 0;
      done     <= 1'b0;
      sc       <= '0;
      st_valid <= 1'b0;
      st_lo    <= '0;
      st_data  <= '0;
    end else begin
      done <= 1'b0;
      pv   <= {pv[PD-2:0], issue};
      pidx[0] <= i;
      for (int k = 1; k < PD; k++) pidx[k] <= pidx[k-1];
      if (issue) i <= i + 1;

      // loads: a beat may carry several words
      if (lk != LD_NONE) begin
        if (hold_cnt != 0) begin
          hold_cnt <= hold_cnt - 1;
          hold_pos <= hold_pos + 1;
          i        <= i + 1;
        end else if (ld_fire) begin
          hold <= ld_data;
          i    <= i + 1;
          case (lk)
            LD_LEFT:  begin hold_cnt <= 1;         hold_pos <= 1; end
            LD_BCAST: begin hold_cnt <= 2 * P - 1; hold_pos <= 1; end
            default:  begin hold_cnt <= 0;         hold_pos <= 0; end
          endcase
        end
      end

      // store: two Layer-buffer words per beat
      if (step == ST_STORE && ph == PH_RUN && i < len) begin
        case (sc)
          2'd0: sc <= 2'd1;
          2'd1: begin st_lo <= l_rdata; sc <= 2'd2; end
          2'd2: begin st_data <= {l_rdata, st_lo}; st_valid <= 1'b1; sc <= 2'd3; end
          default: if (st_ready) begin
            st_valid <= 1'b0;
            sc       <= 2'd0;
            i        <= i + 2;
          end
        endcase
      end

      // tile: wait for the array, capture the block into the Result buffer
      if (is_tile(step) && ph == PH_RUN && i >= len && !issue) ph <= PH_WAIT;
      if (is_tile(step) && ph == PH_WAIT && sa_done) begin
        rbuf <= sa_acc;
        ph   <= PH_DRAIN;
        i    <= 0;
      end

      if (ph == PH_INIT) ph <= PH_RUN;

      if (cmd_valid && cmd_ready) begin
        h <= 0; rb <= 0; cb <= 0; hc <= 0;
        case (cmd)
          CMD_LOAD_F: go(ST_LDF);
          CMD_LOAD_L: go(ST_LDL);
          CMD_LP:     go(LP_LDW);
          CMD_MSA:    go(MSA_LDW);
          CMD_MLP:    go(MLP_RES);
          default:    go(ST_STORE);
        endcase
      end else if (step_end) begin
        case (step)
          // ---- single-step commands
          ST_LDF, ST_LDL, ST_STORE: begin step <= ST_IDLE; done <= 1'b1; end
          // ---- LP mode
          LP_LDW: go(LP_LDG);
          LP_LDG: go(LP_TILE);
          LP_TILE:
            if (cb < CB - 1) begin cb <= cb + 1; go(LP_TILE); end
            else go(LP_LNFIN);
          LP_LNFIN: go(LP_LNPASS);
          LP_LNPASS:
            if (rb < NB - 1) begin rb <= rb + 1; cb <= 0; go(LP_TILE); end
            else begin step <= ST_IDLE; done <= 1'b1; end
          // ---- MSA mode
          MSA_LDW: begin rb <= 0; cb <= 0; go(MSA_V); end
          MSA_V, MSA_K:
            if (cb < DHB - 1) begin cb <= cb + 1; go(step); end
            else if (rb < NB - 1) begin cb <= 0; rb <= rb + 1; go(step); end
            else begin
              cb <= 0; rb <= 0;
              if (step == MSA_V) go(MSA_K);
              else if (h == 0)   go(MSA_RES);
              else               go(MSA_Q);
            end
          MSA_RES: begin cb <= 0; go(MSA_Q); end
          MSA_Q:
            if (cb < DHB - 1) begin cb <= cb + 1; go(MSA_Q); end
            else begin cb <= 0; go(MSA_S); end
          MSA_S:
            if (cb < NKB - 1) begin cb <= cb + 1; go(MSA_S); end
            else begin cb <= 0; go(MSA_FPSUM); end
          MSA_FPSUM: go(MSA_RECIP);
          MSA_RECIP: go(MSA_SMAX);
          MSA_SMAX:  begin cb <= 0; go(MSA_Z); end
          MSA_Z:
            if (cb < DHB - 1) begin cb <= cb + 1; go(MSA_Z); end
            else if (rb < NB - 1) begin
              cb <= 0; rb <= rb + 1;
              if (h == 0) go(MSA_RES); else go(MSA_Q);
            end else if (h < H - 1) begin
              cb <= 0; rb <= 0; h <= h + 1; go(MSA_LDW);
            end else go(MSA_RESLD);
          MSA_RESLD: begin step <= ST_IDLE; done <= 1'b1; end
          // ---- MLP mode
          MLP_RES:  go(MLP_LDBO);
          MLP_LDBO: begin hc <= 0; go(MLP_LDWH); end
          MLP_LDWH: go(MLP_LDBH);
          MLP_LDBH: go(MLP_LDWO);
          MLP_LDWO: begin rb <= 0; go(MLP_STAGE); end
          MLP_STAGE: go(MLP_M);
          MLP_M:     begin cb <= 0; go(MLP_ACC); end
          MLP_ACC:
            if (cb < CB - 1) begin cb <= cb + 1; go(MLP_ACC); end
            else go(MLP_STORE);
          MLP_STORE:
            if (rb < NB - 1) begin rb <= rb + 1; go(MLP_STAGE); end
            else if (hc < HB - 1) begin hc <= hc + 1; rb <= 0; go(MLP_LDWH); end
            else go(MLP_RESLD);
          MLP_RESLD: go(MLP_LDG);
          MLP_LDG:   begin rb <= 0; go(MLP_ADD); end
          MLP_ADD:   go(MLP_LNFIN);
          MLP_LNFIN: go(MLP_LNPASS);
          MLP_LNPASS:
            if (rb < NB - 1) begin rb <= rb + 1; go(MLP_ADD); end
            else begin step <= ST_IDLE; done <= 1'b1; end
          default: begin step <= ST_IDLE; end
        endcase
      end
    end
  end

  // ---------------------------------------------------------------- handshake rules
  a_st_hold: assert property (@(posedge clk) disable iff (!rst_n)
    st_valid && !st_ready |=> st_valid && $stable(st_data));
  a_ld_only_when_needed: assert property (@(posedge clk) disable iff (!rst_n)
    ld_ready |-> ld_need);
endmodule
