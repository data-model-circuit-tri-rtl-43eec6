// weight_buffer -- on-chip store of the pruned 3x3 kernels.
//
// For every (filter, input channel) pair it holds the K x K weights and the
// K x K binary sparsity pattern of that channel (1 = weight kept). The paper
// applies one fixed pattern to a whole channel and removes whole channels by
// kernel-wise pruning; a channel whose pattern is all zero is such a removed
// channel. Alongside the arrays the buffer keeps one "pruned" bit per pair,
// updated on every write, so the engine sees at once which channels of the
// current filter it may skip (ch_pruned).
//
// Interface. One write per cycle of a whole kernel plus its pattern (we,
// wr_filt, wr_ch, wr_kernel, wr_mask). Reads are combinational: rd_filt
// selects the filter, rd_ch the channel. After reset every pair reads as
// pruned, so a channel that was never written is never computed. Storing the
// pattern per channel, rather than an index into a pattern table, and the
// asynchronous read are this design's choices.
module weight_buffer
  import tri_pkg::*;
#(
  parameter int unsigned N_FILT = 512,
  parameter int unsigned C_MAX  = 512,
  parameter int unsigned KW     = K,
  localparam int unsigned FW    = $clog2(N_FILT),
  localparam int unsigned CW    = $clog2(C_MAX+1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // write port
  input  logic             we,
  input  logic [FW-1:0]    wr_filt,
  input  logic [CW-1:0]    wr_ch,
  input  wgt_t             wr_kernel [KW*KW],
  input  logic [KW*KW-1:0] wr_mask,
  // read port
  input  logic [FW-1:0]    rd_filt,
  input  logic [CW-1:0]    rd_ch,
  output wgt_t             rd_kernel [KW*KW],
  output logic [KW*KW-1:0] rd_mask,
  output logic [C_MAX-1:0] ch_pruned
);
  wgt_t             kern_mem [N_FILT][C_MAX][KW*KW];
  logic [KW*KW-1:0] mask_mem [N_FILT][C_MAX];
  logic [C_MAX-1:0] pruned   [N_FILT];

  always_ff @(posedge clk)
    if (we && int'(wr_ch) < int'(C_MAX)) begin
      kern_mem[wr_filt][wr_ch[$clog2(C_MAX)-1:0]] <= wr_kernel;
      mask_mem[wr_filt][wr_ch[$clog2(C_MAX)-1:0]] <= wr_mask;
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)
      for (int f = 0; f < int'(N_FILT); f++) pruned[f] <= '1;
    else if (we && int'(wr_ch) < int'(C_MAX))
      pruned[wr_filt][wr_ch[$clog2(C_MAX)-1:0]] <= (wr_mask == '0);

  logic [$clog2(C_MAX)-1:0] rd_idx;
  assign rd_idx    = rd_ch[$clog2(C_MAX)-1:0];
  assign rd_kernel = kern_mem[rd_filt][rd_idx];
  assign rd_mask   = mask_mem[rd_filt][rd_idx];
  assign ch_pruned = pruned[rd_filt];
endmodule
