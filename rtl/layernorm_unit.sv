// layernorm_unit: the pipelined LayerNorm datapath of the paper's Fig. 14.
//
// A row element x(i,j) passes four operator stages in order: subtract the row
// mean, scale by the row's 1/sqrt(var), scale by gamma(j), add beta(j). The
// row constants come from ln_stats, gamma and beta from the buffer that holds
// the LayerNorm parameters. The ME-PE places P of these units side by side,
// one per row of a row block (the stacked outlines indexed by i in Fig. 14).
//
// Formats (own choice): x, beta and the output are int8 activations with
// OUT_FRAC fractional bits; mean has 8 fractional bits beyond x's, rstd 12,
// gamma is int8 with GAMMA_FRAC fractional bits. The output saturates to int8.
// Timing: fully pipelined, one element per cycle, out_valid four cycles after
// in_valid.
module layernorm_unit #(
  parameter int GAMMA_FRAC = 5
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic signed [7:0]  x,
  input  logic signed [23:0] mean_q8,
  input  logic        [15:0] rstd_q12,
  input  logic signed [7:0]  gamma,
  input  logic signed [7:0]  beta,
  output logic               out_valid,
  output logic signed [7:0]  y
);
  import mevit_pkg::*;

  logic [3:0] v;
  logic signed [25:0] d1;          // x - mean, 8 fractional bits
  logic signed [7:0]  g1, b1, b2, b3;
  logic signed [7:0]  g2;
  logic signed [25:0] n2;          // normalised, 8 fractional bits
  logic signed [39:0] n_full;
  logic signed [39:0] s3;          // * gamma, 8 + GAMMA_FRAC fractional bits
  logic        [15:0] r1;

  always_comb n_full = 40'(d1) * 40'($signed({1'b0, r1}));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else        v <= {v[2:0], in_valid};
  end

  always_ff @(posedge clk) begin
    // stage 1: subtract the mean
    d1 <= (26'(x) <<< 8) - 26'(mean_q8);
    r1 <= rstd_q12;
    g1 <= gamma;
    b1 <= beta;
    // stage 2: multiply by 1/sqrt(var)
    n2 <= 26'(n_full >>> 12);
    g2 <= g1;
    b2 <= b1;
    // stage 3: multiply by gamma
    s3 <= 40'(n2) * 40'(g2);
    b3 <= b2;
    // stage 4: add beta, back to int8
    y  <= sat8((s3 >>> (8 + GAMMA_FRAC)) + 40'(b3));
  end

  assign out_valid = v[3];
endmodule
