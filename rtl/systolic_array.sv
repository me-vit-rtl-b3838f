// systolic_array: P x P grid of packed DSP cells producing a P x 2P block.
//
// Cell (i, j) multiplies the left-matrix element of row i by the two
// right-matrix elements of columns 2j and 2j+1 (DSP packing, one DSP per
// cell, two products per cycle) and accumulates both. Each cycle the array
// takes one column k of a P-row left block and row k of a 2P-column right
// block, as drawn in the paper's Fig. 3, where each left-matrix row line and
// each right-matrix column line reaches every cell of its row or column. After
// K cycles the accumulators hold the P x 2P block product.
//
// Interface: in_valid qualifies a_vec/b_vec; in_first clears the
// accumulators before adding; in_last marks the final k. out_valid pulses when
// acc holds the finished block, two cycles after the in_last input (one cycle
// in the multiplier, one in the accumulator). acc keeps its value until the
// next in_first.
module systolic_array #(
  parameter int P     = 32,   // P_SYS
  parameter int A_W   = 9,
  parameter int B_W   = 8,
  parameter int ACC_W = 32
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic                          in_first,
  input  logic                          in_last,
  input  logic signed [A_W-1:0]         a_vec [P],
  input  logic signed [B_W-1:0]         b_vec [2*P],
  output logic signed [ACC_W-1:0]       acc   [P][2*P],
  output logic                          out_valid
);
  logic v_q, first_q, last_q;
  logic signed [A_W+B_W-1:0] prod [P][2*P];

  for (genvar i = 0; i < P; i++) begin : g_row
    for (genvar j = 0; j < P; j++) begin : g_col
      dsp_pack_mul #(.A_W(A_W), .B_W(B_W)) u_dsp (
        .clk  (clk),
        .a    (a_vec[i]),
        .b    (b_vec[2*j+1]),
        .c    (b_vec[2*j]),
        .p_ab (prod[i][2*j+1]),
        .p_ac (prod[i][2*j])
      );
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q       <= 1'b0;
      first_q   <= 1'b0;
      last_q    <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v_q       <= in_valid;
      first_q   <= in_valid & in_first;
      last_q    <= in_valid & in_last;
      out_valid <= v_q & last_q;
    end
  end

  always_ff @(posedge clk) begin
    if (v_q) begin
      for (int i = 0; i < P; i++)
        for (int j = 0; j < 2*P; j++)
          acc[i][j] <= (first_q ? '0 : acc[i][j]) + ACC_W'(prod[i][j]);
    end
  end
endmodule
