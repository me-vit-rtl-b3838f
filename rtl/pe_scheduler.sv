// pe_scheduler: shares the FPGA's DRAM streams among the ME-PEs of a Multi-PE
// ME-ViT (the "Scheduler" block of the paper's Fig. 16).
//
// The paper names the scheduler and says it coordinates data traffic between
// the PEs; how it does so is this design's own, kept minimal: every PE works
// on its own image and asks for parameter data with ld_need. The read channel
// is granted to one PE at a time, round-robin, and a grant lasts while the PE
// keeps asking, for at most BURST beats, so that PEs progress together. The
// write channel (final results) is granted per beat, round-robin among the
// PEs holding st_valid.
//
// Memory side: mem_rd_pe names the PE whose stream the memory must deliver
// (for instance one DMA queue per PE); a beat moves when mem_rd_valid and
// mem_rd_ready are both high. mem_wr_* carries a result beat and its PE.
// The grant changes only in cycles without a transfer; after BURST beats the
// channel pauses for one cycle to let it change. Latency: none; the
// scheduler is combinational between the grant register and the channels.
//
// Lint note: rst_n also disables the two assertions (a synchronous use of an
// asynchronous reset, flagged by lint but harmless; assertions are not
// synthesised). The round-robin index variable is wider than needed.
// pe_ld_data is mem_rd_data itself, shared by all PEs; only the valid/ready
// of the granted PE are active, so it needs no multiplexer.
module pe_scheduler #(
  parameter int NUM_PE = 5,
  parameter int DW     = 512,   // beat width in bits (2 * P_SYS bytes)
  parameter int BURST  = 64,
  localparam int IW    = (NUM_PE > 1) ? $clog2(NUM_PE) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // PE side, read
  input  logic [NUM_PE-1:0]     pe_ld_need,
  input  logic [NUM_PE-1:0]     pe_ld_ready,
  output logic [NUM_PE-1:0]     pe_ld_valid,
  output logic [DW-1:0]         pe_ld_data,
  // PE side, write
  input  logic [NUM_PE-1:0]     pe_st_valid,
  input  logic [DW-1:0]         pe_st_data [NUM_PE],
  output logic [NUM_PE-1:0]     pe_st_ready,
  // memory side, read
  output logic                  mem_rd_req,
  output logic [IW-1:0]         mem_rd_pe,
  input  logic                  mem_rd_valid,
  output logic                  mem_rd_ready,
  input  logic [DW-1:0]         mem_rd_data,
  // memory side, write
  output logic                  mem_wr_valid,
  output logic [IW-1:0]         mem_wr_pe,
  input  logic                  mem_wr_ready,
  output logic [DW-1:0]         mem_wr_data
);
  logic [IW-1:0] rd_g, wr_g;
  logic          rd_active;
  int unsigned   beats;

  // next requester after 'cur', round-robin
  function automatic logic [IW-1:0] rr_next(input logic [NUM_PE-1:0] req,
                                            input logic [IW-1:0] cur);
    logic [IW-1:0] n;
    n = cur;
    for (int k = 1; k <= NUM_PE; k++) begin
      int idx;
      idx = (int'(cur) + k) % NUM_PE;
      if (req[idx]) begin
        n = IW'(idx);
        break;
      end
    end
    return n;
  endfunction

  logic rd_xfer;
  always_comb begin
    // a used-up burst blocks the channel for one cycle so the grant can move
    mem_rd_req   = rd_active && pe_ld_need[rd_g] && beats < BURST;
    mem_rd_pe    = rd_g;
    mem_rd_ready = mem_rd_req && pe_ld_ready[rd_g];
    rd_xfer      = mem_rd_valid && mem_rd_ready;
    pe_ld_data   = mem_rd_data;
    pe_ld_valid  = '0;
    if (mem_rd_req) pe_ld_valid[rd_g] = mem_rd_valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_g      <= '0;
      rd_active <= 1'b0;
      beats     <= 0;
    end else if (!rd_xfer) begin
      // regrant when idle, when the holder stopped asking or used its burst
      if (!rd_active || !pe_ld_need[rd_g] || beats >= BURST) begin
        if (|pe_ld_need) begin
          rd_g      <= rr_next(pe_ld_need, rd_g);
          rd_active <= 1'b1;
          beats     <= 0;
        end else begin
          rd_active <= 1'b0;
        end
      end
    end else begin
      beats <= beats + 1;
    end
  end

  // write channel: per-beat round-robin
  logic wr_active;
  always_comb begin
    mem_wr_valid = wr_active && pe_st_valid[wr_g];
    mem_wr_pe    = wr_g;
    mem_wr_data  = pe_st_data[wr_g];
    pe_st_ready  = '0;
    if (wr_active) pe_st_ready[wr_g] = mem_wr_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_g      <= '0;
      wr_active <= 1'b0;
    end else if (!(mem_wr_valid && !mem_wr_ready)) begin
      // move on after a transfer or when the holder has nothing
      if (|pe_st_valid) begin
        wr_g      <= rr_next(pe_st_valid, wr_g);
        wr_active <= 1'b1;
      end else begin
        wr_active <= 1'b0;
      end
    end
  end

  a_one_reader: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(pe_ld_valid));
  a_one_writer: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(pe_st_ready));
endmodule
