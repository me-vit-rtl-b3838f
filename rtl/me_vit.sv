// me_vit: the Multi-PE ME-ViT accelerator (the paper's Fig. 16).
//
// NUM_PE independent ME-PEs, each able to run a complete ViT encoder on its
// own image with all intermediate data on chip, share the DRAM read and write
// streams through pe_scheduler. The paper places five ME-PEs with
// P_SYS = 32 on an Alveo U200 (two per outer SLR, one in the middle SLR next
// to the scheduler); the SLR placement has no logical meaning and is not
// modelled.
//
// Ports: per-PE command handshake (cmd_valid/cmd/cmd_ready/done; the host
// that issues the mode sequence LOAD_F, LOAD_L, LP, then MSA, LP, MLP per
// layer, then STORE is outside this design); the shared DRAM read and write
// channels of pe_scheduler, whose beats are 2*P_SYS bytes.
//
// Lint note: rst_n feeds asynchronous resets and the assertions' disable
// condition inside the PEs and the scheduler; lint reports this mixed use,
// which does not reach hardware.
module me_vit
  import mevit_pkg::*;
#(
  parameter int NUM_PE = 5,
  parameter int P      = 32,
  parameter int D      = 768,
  parameter int N_TOK  = 257,
  parameter int H      = 12,
  parameter int DFF    = 3072,
  parameter int BURST  = 64,
  localparam int DW    = 16 * P,
  localparam int IW    = (NUM_PE > 1) ? $clog2(NUM_PE) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NUM_PE-1:0]    cmd_valid,
  input  cmd_e                 cmd [NUM_PE],
  output logic [NUM_PE-1:0]    cmd_ready,
  output logic [NUM_PE-1:0]    done,
  output logic                 mem_rd_req,
  output logic [IW-1:0]        mem_rd_pe,
  input  logic                 mem_rd_valid,
  output logic                 mem_rd_ready,
  input  logic [DW-1:0]        mem_rd_data,
  output logic                 mem_wr_valid,
  output logic [IW-1:0]        mem_wr_pe,
  input  logic                 mem_wr_ready,
  output logic [DW-1:0]        mem_wr_data
);
  logic [NUM_PE-1:0] ld_need, ld_ready, ld_valid, st_valid, st_ready;
  logic [DW-1:0]     ld_data;
  logic [DW-1:0]     st_data [NUM_PE];

  for (genvar g = 0; g < NUM_PE; g++) begin : g_pe
    me_pe #(.P(P), .D(D), .N_TOK(N_TOK), .H(H), .DFF(DFF)) u_pe (
      .clk, .rst_n,
      .cmd_valid(cmd_valid[g]), .cmd(cmd[g]), .cmd_ready(cmd_ready[g]), .done(done[g]),
      .ld_need(ld_need[g]), .ld_valid(ld_valid[g]), .ld_ready(ld_ready[g]), .ld_data(ld_data),
      .st_valid(st_valid[g]), .st_ready(st_ready[g]), .st_data(st_data[g]));
  end

  pe_scheduler #(.NUM_PE(NUM_PE), .DW(DW), .BURST(BURST)) u_sched (
    .clk, .rst_n,
    .pe_ld_need(ld_need), .pe_ld_ready(ld_ready), .pe_ld_valid(ld_valid), .pe_ld_data(ld_data),
    .pe_st_valid(st_valid), .pe_st_data(st_data), .pe_st_ready(st_ready),
    .mem_rd_req, .mem_rd_pe, .mem_rd_valid, .mem_rd_ready, .mem_rd_data,
    .mem_wr_valid, .mem_wr_pe, .mem_wr_ready, .mem_wr_data);
endmodule
