// tri_top -- one accelerator stage of the frame/patch/channel-skipping pipeline.
//
// What it does. For every video frame the stage is told (frame_keep) whether
// the temporal frame filter kept it. A dropped frame is not loaded and not
// computed at all. For a kept frame the luma samples are streamed once through
// sobel_saliency, which returns a keep/drop bit per 60x60 patch. The patches
// are the accelerator's tiles: the scheduler then walks the tile grid in
// raster order and, for a dropped tile, neither loads nor computes anything.
// Each kept tile is convolved with every filter of the layer, one filter at a
// time, on conv_tile_engine, which itself skips kernel-wise pruned channels
// and gates pattern-pruned weights. The finished output rows of each tile
// leave at once through link_fifo, the stream toward the next dataflow stage,
// so the next stage can start on the first tile before the frame is done, and
// this stage may start the next frame while the link still drains the last
// one (the frame overlap of the paper's multi-FPGA dataflow).
//
// Interface.
//   cfg_n_ch, cfg_n_filt   input channels and filters of the layer (runtime)
//   wt_*                   weight/pattern loading into weight_buffer
//   frame_start/frame_keep start a frame; frame_done pulses when its last
//                          output row has entered the link (rows may still
//                          be in the link while the next frame starts)
//   pix_*                  luma stream for the saliency pass (raster order)
//   mem_req_* / mem_rsp_*  padded input-row reads from off-chip memory,
//                          tagged with tile, channel and tile-relative row
//                          (row 0 is the halo row above the tile)
//   out_*                  output rows: tile, filter, row, T_W accumulators
//   tile_keep              the saliency mask of the current frame
//   cnt_*                  event counters (dropped frames, skipped tiles,
//                          skipped channels, cycles the link stalled)
//
// Design choices: the layer runs at stride 1 with same padding, the tile grid
// of the layer equals the patch grid of the frame (the paper interpolates the
// mask to each layer's resolution; here the resolutions match), input rows are
// fetched again for every filter, and a dropped tile produces no output beats
// (the receiver holds the same mask). Memory contents outside the frame and in
// dropped patches are expected to be zero, as in the masked input frame.
module tri_top
  import tri_pkg::*;
#(
  parameter int unsigned FW     = FRAME_W,
  parameter int unsigned FH     = FRAME_H,
  parameter int unsigned T      = TILE,
  parameter int unsigned C_MAX  = 512,
  parameter int unsigned N_FILT = 512,
  parameter int unsigned DEPTH  = 16,
  localparam int unsigned NTX   = (FW + T - 1) / T,
  localparam int unsigned NTY   = (FH + T - 1) / T,
  localparam int unsigned NT    = NTX * NTY,
  localparam int unsigned CW    = $clog2(C_MAX+1),
  localparam int unsigned FIW   = $clog2(N_FILT),
  localparam int unsigned XW    = $clog2(NTX+1),
  localparam int unsigned YW    = $clog2(NTY+1),
  localparam int unsigned RW    = $clog2(T+K),
  localparam int unsigned OW    = $clog2(T+1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // layer configuration
  input  logic [CW-1:0]    cfg_n_ch,
  input  logic [FIW:0]     cfg_n_filt,
  // weight loading
  input  logic             wt_we,
  input  logic [FIW-1:0]   wt_filt,
  input  logic [CW-1:0]    wt_ch,
  input  wgt_t             wt_kernel [K*K],
  input  logic [K*K-1:0]   wt_mask,
  // frame control
  input  logic             frame_start,
  input  logic             frame_keep,
  output logic             busy,
  output logic             frame_done,
  // luma stream for the saliency pass
  input  logic             pix_valid,
  output logic             pix_ready,
  input  logic [PIX_W-1:0] pix_data,
  // off-chip row reads
  output logic             mem_req_valid,
  input  logic             mem_req_ready,
  output logic [YW-1:0]    mem_req_ty,
  output logic [XW-1:0]    mem_req_tx,
  output logic [CW-1:0]    mem_req_ch,
  output logic [RW-1:0]    mem_req_row,
  input  logic             mem_rsp_valid,
  input  logic [CW-1:0]    mem_rsp_ch,
  input  logic [RW-1:0]    mem_rsp_row,
  input  act_t             mem_rsp_data [T+K-1],
  // output stream to the next stage
  output logic             out_valid,
  input  logic             out_ready,
  output logic [YW-1:0]    out_ty,
  output logic [XW-1:0]    out_tx,
  output logic [FIW-1:0]   out_filt,
  output logic [OW-1:0]    out_row,
  output logic             out_last,
  output acc_t             out_data [T],
  // observability
  output logic [NT-1:0]    tile_keep,
  output logic [31:0]      cnt_frames_dropped,
  output logic [31:0]      cnt_tiles_skipped,
  output logic [31:0]      cnt_ch_skipped,
  output logic [31:0]      cnt_link_stall
);
  top_state_e       state;
  logic [YW-1:0]    ty;
  logic [XW-1:0]    tx;
  logic [FIW-1:0]   filt;
  logic             tile_kept;

  // ---- saliency -------------------------------------------------------------
  logic sal_start, sal_done;
  assign sal_start = (state == TOP_IDLE) && frame_start && frame_keep;
  sobel_saliency #(.FW(FW), .FH(FH), .PATCH(T), .DROP(DROP_PCT)) u_sal (
    .clk, .rst_n,
    .start    (sal_start),
    .pix_valid(pix_valid),
    .pix_ready(pix_ready),
    .pix_data (pix_data),
    .busy     (),
    .done     (sal_done),
    .keep_mask(tile_keep)
  );

  // ---- weights ----------------------------------------------------------------
  logic [CW-1:0]    w_ch;
  wgt_t             w_kernel [K*K];
  logic [K*K-1:0]   w_mask;
  logic [C_MAX-1:0] ch_pruned;
  weight_buffer #(.N_FILT(N_FILT), .C_MAX(C_MAX), .KW(K)) u_wbuf (
    .clk, .rst_n,
    .we       (wt_we),
    .wr_filt  (wt_filt),
    .wr_ch    (wt_ch),
    .wr_kernel(wt_kernel),
    .wr_mask  (wt_mask),
    .rd_filt  (filt),
    .rd_ch    (w_ch),
    .rd_kernel(w_kernel),
    .rd_mask  (w_mask),
    .ch_pruned(ch_pruned)
  );

  // ---- conv engine ------------------------------------------------------------
  logic          eng_start, eng_done, eng_busy;
  logic [CW-1:0] eng_kept;
  logic          eo_valid, eo_ready, eo_last;
  logic [OW-1:0] eo_row;
  acc_t          eo_data [T];
  assign eng_start = (state == TOP_TILE) && tile_kept;

  conv_tile_engine #(.T_H(T), .T_W(T), .KW(K), .C_MAX(C_MAX)) u_eng (
    .clk, .rst_n,
    .start    (eng_start),
    .n_ch     (cfg_n_ch),
    .busy     (eng_busy),
    .done     (eng_done),
    .kept_ch  (eng_kept),
    .ch_pruned(ch_pruned),
    .w_ch     (w_ch),
    .w_kernel (w_kernel),
    .w_mask   (w_mask),
    .req_valid(mem_req_valid),
    .req_ready(mem_req_ready),
    .req_ch   (mem_req_ch),
    .req_row  (mem_req_row),
    .rsp_valid(mem_rsp_valid),
    .rsp_ch   (mem_rsp_ch),
    .rsp_row  (mem_rsp_row),
    .rsp_data (mem_rsp_data),
    .out_valid(eo_valid),
    .out_ready(eo_ready),
    .out_row  (eo_row),
    .out_data (eo_data),
    .out_last (eo_last)
  );
  assign mem_req_ty = ty;
  assign mem_req_tx = tx;

  // ---- link to the next stage -------------------------------------------------
  localparam int unsigned BW = YW + XW + FIW + OW + 1 + T*ACC_W;
  logic [BW-1:0] beat_in, beat_out;
  logic [T*ACC_W-1:0] data_in;
  always_comb
    for (int x = 0; x < int'(T); x++) data_in[x*ACC_W +: ACC_W] = eo_data[x];
  assign beat_in = {ty, tx, filt, eo_row, eo_last, data_in};

  link_fifo #(.W(BW), .DEPTH(DEPTH)) u_link (
    .clk, .rst_n,
    .in_valid (eo_valid),
    .in_ready (eo_ready),
    .in_data  (beat_in),
    .out_valid(out_valid),
    .out_ready(out_ready),
    .out_data (beat_out),
    .level    ()
  );
  logic [T*ACC_W-1:0] data_out;
  assign {out_ty, out_tx, out_filt, out_row, out_last, data_out} = beat_out;
  always_comb
    for (int x = 0; x < int'(T); x++) out_data[x] = data_out[x*ACC_W +: ACC_W];

  // ---- tile / filter scheduler ------------------------------------------------
  assign tile_kept  = tile_keep[int'(ty)*int'(NTX) + int'(tx)];
  assign busy       = (state != TOP_IDLE);

  logic last_tile;
  assign last_tile = (tx == XW'(NTX-1)) && (ty == YW'(NTY-1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= TOP_IDLE;
      ty <= '0; tx <= '0; filt <= '0;
      frame_done <= 1'b0;
      cnt_frames_dropped <= '0;
      cnt_tiles_skipped  <= '0;
      cnt_ch_skipped     <= '0;
      cnt_link_stall     <= '0;
    end else begin
      frame_done <= 1'b0;
      if (eo_valid && !eo_ready) cnt_link_stall <= cnt_link_stall + 1;
      unique case (state)
        TOP_IDLE: if (frame_start) begin
          if (frame_keep) state <= TOP_SAL;
          else begin                       // temporal filter dropped it
            cnt_frames_dropped <= cnt_frames_dropped + 1;
            frame_done <= 1'b1;
          end
        end
        TOP_SAL: if (sal_done) begin
          state <= TOP_TILE;
          ty <= '0; tx <= '0; filt <= '0;
        end
        TOP_TILE: begin
          if (tile_kept && cfg_n_filt != '0) state <= TOP_WAIT;
          else begin                       // dropped patch: skip the tile
            cnt_tiles_skipped <= cnt_tiles_skipped + 1;
            state <= TOP_NEXT;
          end
        end
        TOP_WAIT: if (eng_done) begin
          cnt_ch_skipped <= cnt_ch_skipped + 32'(cfg_n_ch - eng_kept);
          if ({1'b0, filt} == cfg_n_filt - 1'b1) state <= TOP_NEXT;
          else begin
            filt  <= filt + 1'b1;
            state <= TOP_TILE;
          end
        end
        TOP_NEXT: begin
          filt <= '0;
          if (last_tile) begin           // every beat is in the link now
            state      <= TOP_IDLE;
            frame_done <= 1'b1;
          end
          else begin
            state <= TOP_TILE;
            if (tx == XW'(NTX-1)) begin tx <= '0; ty <= ty + 1'b1; end
            else tx <= tx + 1'b1;
          end
        end
        default: state <= TOP_IDLE;
      endcase
    end
  end

  a_engine_idle_on_start: assert property (@(posedge clk) disable iff (!rst_n)
    eng_start |-> !eng_busy);
endmodule
