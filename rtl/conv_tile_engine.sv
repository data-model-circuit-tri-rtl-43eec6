// conv_tile_engine -- one output channel of one tile, row- and column-parallel,
// channel-sequential with pruned-channel skipping.
//
// How it works. A tile of T_H x T_W output pixels needs T_H+K-1 padded input
// rows per input channel. Each input row that arrives is multiplied, in one
// cycle, with all K rows of that channel's kernel (K row_conv_pe instances:
// the paper's row-level parallelism); kernel row kr adds its T_W partial sums
// into output row (row - kr) of the on-chip T_H x T_W accumulator tile (the
// "self-accumulation" of the paper). Inside each row_conv_pe the T_W output
// columns are computed at once (column-level parallelism). Channels are
// processed one after another. A channel whose K x K pattern mask is all zero
// was removed by kernel-wise pruning: the engine never requests its rows and
// never computes it, and the next kept channel is found in the same cycle, so
// a pruned channel costs no cycle at all. Pattern-pruned weights inside a kept
// channel are gated in row_conv_pe.
//
// Interface. start (one cycle, in IDLE) with n_ch = number of input channels
// of the layer. ch_pruned[c] tells which channels are pruned for the current
// filter; w_kernel/w_mask give channel w_ch's kernel combinationally (the
// weight buffer's read port). Row reads go out on req_* (valid/ready, tagged
// with channel and row) and come back on rsp_* with the same tags, one row per
// cycle at most, in any order and with any latency; the engine always accepts
// a response. When every requested row has returned, the tile is streamed out
// row by row on out_* (valid/ready), then done pulses for one cycle.
//
// Timing. With A kept channels and no memory stalls, request issue takes
// A*(T_H+K-1) cycles, the last response is accumulated as it arrives, and the
// drain takes T_H cycles. The request/response split, tags and the one-cycle
// pruned-channel look-ahead are this design's choices; the paper only states
// the parallelism and that pruned channels are skipped in load and compute.
module conv_tile_engine
  import tri_pkg::*;
#(
  parameter int unsigned T_H   = TILE,
  parameter int unsigned T_W   = TILE,
  parameter int unsigned KW    = K,
  parameter int unsigned C_MAX = 512,
  localparam int unsigned CW   = $clog2(C_MAX+1),
  localparam int unsigned RW   = $clog2(T_H+KW),
  localparam int unsigned OW   = $clog2(T_H+1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // control
  input  logic             start,
  input  logic [CW-1:0]    n_ch,
  output logic             busy,
  output logic             done,
  output logic [CW-1:0]    kept_ch,      // kept channels of the last run
  // weight buffer read port
  input  logic [C_MAX-1:0] ch_pruned,
  output logic [CW-1:0]    w_ch,
  input  wgt_t             w_kernel [KW*KW],
  input  logic [KW*KW-1:0] w_mask,
  // input-row read requests (to off-chip memory)
  output logic             req_valid,
  input  logic             req_ready,
  output logic [CW-1:0]    req_ch,
  output logic [RW-1:0]    req_row,
  // input-row responses
  input  logic             rsp_valid,
  input  logic [CW-1:0]    rsp_ch,
  input  logic [RW-1:0]    rsp_row,
  input  act_t             rsp_data [T_W+KW-1],
  // output tile stream
  output logic             out_valid,
  input  logic             out_ready,
  output logic [OW-1:0]    out_row,
  output acc_t             out_data [T_W],
  output logic             out_last
);
  localparam int unsigned ROWS = T_H + KW - 1;  // input rows per channel

  eng_state_e            state;
  acc_t                  acc [T_H][T_W];
  logic [CW-1:0]         cur_ch;
  logic [RW-1:0]         cur_row;
  logic                  issue_done;
  logic [31:0]           n_issued, n_recv;
  logic [OW-1:0]         drain_row;

  // ---- next kept channel at or after a given index --------------------------
  function automatic logic [CW:0] next_kept(input logic [CW:0] from,
                                            input logic [CW-1:0] n,
                                            input logic [C_MAX-1:0] pruned);
    logic [CW:0] r;
    r = {1'b0, n};                          // "none left"
    for (int c = C_MAX-1; c >= 0; c--)
      if (c >= int'(from) && c < int'(n) && !pruned[c]) r = (CW+1)'(c);
    return r;
  endfunction

  logic [CW:0] first_kept, after_cur;
  assign first_kept = next_kept('0, n_ch, ch_pruned);
  assign after_cur  = next_kept({1'b0, cur_ch} + 1'b1, n_ch, ch_pruned);

  logic [CW-1:0] kept_ch_next;
  always_comb begin
    kept_ch_next = '0;
    for (int c = 0; c < int'(C_MAX); c++)
      if (c < int'(n_ch) && !ch_pruned[c]) kept_ch_next = kept_ch_next + 1'b1;
  end

  // ---- row-level parallel compute: K kernel rows in one cycle ---------------
  acc_t psum [KW][T_W];
  assign w_ch = rsp_ch;

  for (genvar kr = 0; kr < KW; kr++) begin : g_row
    wgt_t          w_row [KW];
    logic [KW-1:0] m_row;
    for (genvar j = 0; j < KW; j++) begin : g_w
      assign w_row[j] = w_kernel[kr*KW + j];
      assign m_row[j] = w_mask[kr*KW + j];
    end
    row_conv_pe #(.T_W(T_W), .KW(KW), .SUM_W(ACC_W)) u_pe (
      .in_row  (rsp_data),
      .w_row   (w_row),
      .mask_row(m_row),
      .psum    (psum[kr])
    );
  end

  // ---- control ----------------------------------------------------------------
  assign busy      = (state != ENG_IDLE);
  assign req_valid = (state == ENG_RUN) && !issue_done;
  assign req_ch    = cur_ch;
  assign req_row   = cur_row;
  assign out_valid = (state == ENG_DRAIN);
  assign out_row   = drain_row;
  assign out_last  = (drain_row == OW'(T_H-1));
  always_comb
    for (int x = 0; x < int'(T_W); x++) out_data[x] = acc[drain_row][x];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= ENG_IDLE;
      cur_ch     <= '0;
      cur_row    <= '0;
      issue_done <= 1'b0;
      n_issued   <= '0;
      n_recv     <= '0;
      drain_row  <= '0;
      done       <= 1'b0;
      kept_ch    <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        ENG_IDLE: if (start) begin
          state      <= ENG_RUN;
          cur_row    <= '0;
          cur_ch     <= CW'(first_kept);
          issue_done <= (first_kept >= {1'b0, n_ch});
          n_issued   <= '0;
          n_recv     <= '0;
          drain_row  <= '0;
          kept_ch    <= kept_ch_next;
        end
        ENG_RUN: begin
          if (req_valid && req_ready) begin
            n_issued <= n_issued + 1;
            if (cur_row == RW'(ROWS-1)) begin
              cur_row <= '0;
              cur_ch  <= CW'(after_cur);
              if (after_cur >= {1'b0, n_ch}) issue_done <= 1'b1;
            end else begin
              cur_row <= cur_row + 1'b1;
            end
          end
          if (rsp_valid) n_recv <= n_recv + 1;
          if (issue_done && (n_recv + (rsp_valid ? 1 : 0)) == n_issued)
            state <= ENG_DRAIN;
        end
        ENG_DRAIN: if (out_ready) begin
          if (out_last) begin
            state <= ENG_IDLE;
            done  <= 1'b1;
          end
          drain_row <= drain_row + 1'b1;
        end
        default: state <= ENG_IDLE;
      endcase
    end
  end

  // accumulator tile: cleared on start, K rows updated per response
  always_ff @(posedge clk) begin
    if (state == ENG_IDLE && start) begin
      for (int r = 0; r < int'(T_H); r++)
        for (int x = 0; x < int'(T_W); x++) acc[r][x] <= '0;
    end else if (state == ENG_RUN && rsp_valid) begin
      for (int kr = 0; kr < int'(KW); kr++) begin
        if (int'(rsp_row) - kr >= 0 && int'(rsp_row) - kr < int'(T_H))
          for (int x = 0; x < int'(T_W); x++)
            acc[int'(rsp_row) - kr][x] <= acc[int'(rsp_row) - kr][x] + psum[kr][x];
      end
    end
  end

  // a response may only arrive for a row that was requested
  a_rsp_in_run: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid |-> (state == ENG_RUN && n_recv < n_issued))
    else $error("response without request: state %0d received %0d issued %0d",
                state, n_recv, n_issued);
  // output is held stable while stalled
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && !out_ready) |=> (out_valid && $stable(out_row)));
endmodule
