// buffer_ram: one on-chip buffer of the ME-PE (Weight, Feature, Layer, Q, K,
// V and S buffers all use it).
//
// A word is LANES lanes of LW bits. "Left-operand" buffers (Feature, Layer,
// Q, S) have P lanes, one per row of a row block, and are addressed by column;
// "right-operand" buffers (Weight, K, V) have 2P lanes, one per column of a
// column block, and are addressed by row. Either way one read delivers what
// the systolic array consumes in one cycle, which is the parallel access the
// paper sizes its BRAM allocations for.
//
// One write port with per-lane enables and one read port. Reads are
// synchronous: rdata shows the word addressed in the cycle re was high, one
// cycle later, and holds it while re is low.
module buffer_ram #(
  parameter int LANES = 64,
  parameter int LW    = 8,
  parameter int DEPTH = 1024,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                         clk,
  input  logic                         we,
  input  logic [AW-1:0]                waddr,
  input  logic [LANES-1:0]             wlane,
  input  logic [LANES-1:0][LW-1:0]     wdata,
  input  logic                         re,
  input  logic [AW-1:0]                raddr,
  output logic [LANES-1:0][LW-1:0]     rdata
);
  logic [LANES-1:0][LW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int l = 0; l < LANES; l++)
        if (wlane[l]) mem[waddr][l] <= wdata[l];
    end
    if (re) rdata <= mem[raddr];
  end
endmodule
