// ln_stats: per-row LayerNorm statistics ("LN Sum" and "LN Mean & Var" in the
// paper's Fig. 8/9).
//
// First pass: while a row's values stream by (acc_en), the unit keeps the sum
// and the sum of squares. Then, on start, it evaluates the variance form
//   mean = S1 / n,   var = S2 / n - mean^2
// and returns mean and 1/sqrt(var + eps) in fixed point. The paper specifies
// the two-pass approach and the variance form; the fixed-point arithmetic is
// this design's own: the division by n is a multiplication by a constant
// reciprocal 2^24/n, the square root is a 16-step restoring integer square
// root, and 1/sqrt is a 21-step restoring division of 2^20.
//
// Interface: x is the int8 row value (sign-extended to 16 bits). clr resets
// the sums. start begins the finalisation; done pulses after about 40 cycles,
// after which mean_q8 (signed, 8 fractional bits) and rstd_q12 (unsigned,
// 12 fractional bits, saturating at 65535) are valid until the next start.
//
// Lint note: the top remainder bits of the square-root and division steps
// are kept for the comparison width only and never read.
module ln_stats #(
  parameter int N_COLS  = 768,  // row length n (the model dimension D)
  parameter int EPS_Q16 = 1     // epsilon, 16 fractional bits
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clr,
  input  logic               acc_en,
  input  logic signed [15:0] x,
  input  logic               start,
  output logic signed [23:0] mean_q8,
  output logic        [15:0] rstd_q12,
  output logic               done
);
  localparam int RSH = 24;
  localparam longint RECIP = ((longint'(1) << RSH) + longint'(N_COLS) / 2) / longint'(N_COLS);

  typedef enum logic [1:0] {ST_IDLE, ST_SQRT, ST_DIV} st_e;
  st_e st;

  logic signed [31:0] s1;
  logic        [39:0] s2;
  logic        [31:0] rad;      // remaining radicand
  logic        [33:0] rem_s;    // sqrt partial remainder
  logic        [15:0] root;
  logic        [21:0] rem_d;    // division partial remainder
  logic        [20:0] quo;
  logic        [4:0]  cnt;

  // finalisation arithmetic (combinational, used on start)
  logic signed [63:0] mean_full;
  logic signed [63:0] ex2_full;
  logic signed [63:0] var_full;
  always_comb begin
    mean_full = (64'(s1) * 64'(RECIP)) >>> (RSH - 8);
    ex2_full  = (64'(s2) * 64'(RECIP)) >>> (RSH - 16);
    var_full  = ex2_full - mean_full * mean_full + 64'(EPS_Q16);
    if (var_full < 64'sd1)                  var_full = 64'sd1;
    if (var_full > 64'sh0000_0000_FFFF_FFFF) var_full = 64'sh0000_0000_FFFF_FFFF;
  end

  // one restoring square-root step: try bit (15-cnt) of the root
  logic [33:0] trial_s;
  logic [33:0] rem_s_next;
  always_comb begin
    rem_s_next = {rem_s[31:0], rad[31:30]};
    trial_s    = {16'd0, root, 2'b01};
  end

  // one restoring division step of 2^20 / root
  logic [21:0] rem_d_next;
  always_comb rem_d_next = {rem_d[20:0], (cnt == 5'd0) ? 1'b1 : 1'b0};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= ST_IDLE;
      s1       <= '0;
      s2       <= '0;
      done     <= 1'b0;
      mean_q8  <= '0;
      cnt      <= '0;
      rad      <= '0;
      rem_s    <= '0;
      root     <= '0;
      rem_d    <= '0;
      quo      <= '0;
    end else begin
      done <= 1'b0;
      if (clr) begin
        s1 <= '0;
        s2 <= '0;
      end else if (acc_en) begin
        s1 <= s1 + 32'(x);
        s2 <= s2 + 40'(32'(x) * 32'(x));
      end
      unique case (st)
        ST_IDLE: if (start) begin
          mean_q8 <= mean_full[23:0];
          rad     <= var_full[31:0];
          rem_s   <= '0;
          root    <= '0;
          cnt     <= '0;
          st      <= ST_SQRT;
        end
        ST_SQRT: begin
          if (rem_s_next >= trial_s) begin
            rem_s <= rem_s_next - trial_s;
            root  <= {root[14:0], 1'b1};
          end else begin
            rem_s <= rem_s_next;
            root  <= {root[14:0], 1'b0};
          end
          rad <= {rad[29:0], 2'b00};
          cnt <= cnt + 5'd1;
          if (cnt == 5'd15) begin
            cnt   <= '0;
            rem_d <= '0;
            quo   <= '0;
            st    <= ST_DIV;
          end
        end
        ST_DIV: begin
          // dividend 2^20 shifted in MSB first: its only 1 is bit 20
          if (rem_d_next >= {6'd0, root}) begin
            rem_d <= rem_d_next - {6'd0, root};
            quo   <= {quo[19:0], 1'b1};
          end else begin
            rem_d <= rem_d_next;
            quo   <= {quo[19:0], 1'b0};
          end
          cnt <= cnt + 5'd1;
          if (cnt == 5'd20) st <= ST_IDLE;
        end
        default: st <= ST_IDLE;
      endcase
      if (st == ST_DIV && cnt == 5'd20) begin
        done <= 1'b1;
      end
    end
  end

  // done and the last quotient bit are written on the same edge
  always_comb rstd_q12 = (quo > 21'd65535) ? 16'hFFFF : quo[15:0];
endmodule
