// tb_tri_top -- end-to-end test of the accelerator stage.
//
// Runs a sequence of frames through tri_top: kept frames go through the
// saliency pass and the tiled, filter-by-filter convolution; a frame marked
// as dropped by the temporal filter must produce nothing. Everything the
// design computes is recomputed here independently:
//   - the patch mask (Sobel, patch sums, four-neighbour smoothing, rank drop);
//   - every output row of every kept tile and filter, by direct 3x3 'same'
//     convolution of the masked input frame, using only kept pattern weights.
// The off-chip memory is modelled here (in-order answers, random latency) and
// holds the masked frame; the receiving end of the link is modelled with
// long not-ready phases so that the link fills and stalls the engine.
// After each frame the receiver is held off for a while, so the next frame
// starts while the link still carries the previous one; the testbench keeps
// two copies of the frame data for that reason and assigns output rows to
// frames by their order.
// Each mechanism must happen at least once: frame drop, tile skip,
// kernel-wise channel skip, pattern gating of a non-zero weight, link stall,
// frame overlap.
module tb_tri_top;
  import tri_pkg::*;
  // ---- test size -------------------------------------------------------------
  localparam int FWD = 14, FHD = 12, TT = 4, CM = 4, NF = 2, DP = 4;
  localparam int NCH = 3, NFILT = 2;           // layer actually run
  localparam int NFRAMES = 3;
  localparam bit KEEP [NFRAMES] = '{1'b1, 1'b0, 1'b1};
  localparam int WATCHDOG = 200000;
  localparam int STALL_LEN = 30;

  localparam int NTX = (FWD+TT-1)/TT, NTY = (FHD+TT-1)/TT, NT = NTX*NTY;
  localparam int NDROP = (NT*DROP_PCT)/100;
  localparam int CW = $clog2(CM+1), FIW = $clog2(NF);
  localparam int XW = $clog2(NTX+1), YW = $clog2(NTY+1);
  localparam int RW = $clog2(TT+K), OW = $clog2(TT+1);

  logic clk = 0, rst_n = 0;
  logic [CW-1:0] cfg_n_ch = CW'(NCH);
  logic [FIW:0] cfg_n_filt = (FIW+1)'(NFILT);
  logic wt_we = 0;
  logic [FIW-1:0] wt_filt = '0;
  logic [CW-1:0] wt_ch = '0;
  wgt_t wt_kernel [K*K];
  logic [K*K-1:0] wt_mask = '0;
  logic frame_start = 0, frame_keep = 0, busy, frame_done;
  logic pix_valid = 0, pix_ready;
  logic [PIX_W-1:0] pix_data = '0;
  logic mem_req_valid, mem_req_ready = 0;
  logic [YW-1:0] mem_req_ty;
  logic [XW-1:0] mem_req_tx;
  logic [CW-1:0] mem_req_ch;
  logic [RW-1:0] mem_req_row;
  logic mem_rsp_valid = 0;
  logic [CW-1:0] mem_rsp_ch = '0;
  logic [RW-1:0] mem_rsp_row = '0;
  act_t mem_rsp_data [TT+K-1];
  logic out_valid, out_ready = 0, out_last;
  logic [YW-1:0] out_ty;
  logic [XW-1:0] out_tx;
  logic [FIW-1:0] out_filt;
  logic [OW-1:0] out_row;
  acc_t out_data [TT];
  logic [NT-1:0] tile_keep;
  logic [31:0] cnt_frames_dropped, cnt_tiles_skipped, cnt_ch_skipped, cnt_link_stall;

  tri_top #(.FW(FWD), .FH(FHD), .T(TT), .C_MAX(CM), .N_FILT(NF), .DEPTH(DP)) dut (.*);
  always #5 clk = ~clk;

  // ---- model state -------------------------------------------------------------
  byte unsigned luma [FHD][FWD];
  // two buffers: the link may still carry frame k while frame k+1 is loaded
  byte          act  [2][NCH][FHD][FWD];  // masked input feature map
  wgt_t         kern [NFILT][NCH][K*K];
  logic [K*K-1:0] pat [NFILT][NCH];
  logic [NT-1:0] emask [2];
  int exp_beats [2];
  int kin = 0;                 // kept frames started
  int kdone = 0;               // kept frames whose output has fully arrived
  int beats_cur = 0;
  bit hold = 0;                // receiver forced not ready
  int ev_overlap = 0;
  int checks = 0, failures = 0;
  int cyc = 0;
  int beats = 0, frames_done = 0;
  int ev_frame_drop = 0, ev_tile_skip = 0, ev_ch_skip = 0, ev_gate = 0, ev_stall = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // ---- reference saliency mask -----------------------------------------------
  function automatic logic [NT-1:0] ref_mask();
    longint sc [NT], sm [NT];
    logic [NT-1:0] m;
    for (int p = 0; p < NT; p++) sc[p] = 0;
    for (int y = 1; y < FHD-1; y++)
      for (int x = 1; x < FWD-1; x++) begin
        int gx, gy;
        gx = luma[y-1][x+1] + 2*luma[y][x+1] + luma[y+1][x+1]
           - luma[y-1][x-1] - 2*luma[y][x-1] - luma[y+1][x-1];
        gy = luma[y+1][x-1] + 2*luma[y+1][x] + luma[y+1][x+1]
           - luma[y-1][x-1] - 2*luma[y-1][x] - luma[y-1][x+1];
        sc[(y/TT)*NTX + x/TT] += (gx < 0 ? -gx : gx) + (gy < 0 ? -gy : gy);
      end
    for (int py = 0; py < NTY; py++)
      for (int px = 0; px < NTX; px++) begin
        int p;
        p = py*NTX + px;
        sm[p] = sc[p] + sc[(py == 0) ? p : p - NTX] + sc[(py == NTY-1) ? p : p + NTX]
                      + sc[(px == 0) ? p : p - 1]   + sc[(px == NTX-1) ? p : p + 1];
      end
    for (int p = 0; p < NT; p++) begin
      int rank;
      rank = 0;
      for (int q = 0; q < NT; q++)
        if (sm[q] < sm[p] || (sm[q] == sm[p] && q < p)) rank++;
      m[p] = (rank >= NDROP);
    end
    return m;
  endfunction

  function automatic int px_in(input int b, input int c, input int y, input int x);
    if (y < 0 || y >= FHD || x < 0 || x >= FWD) return 0;
    return int'(act[b][c][y][x]);
  endfunction

  function automatic longint ref_out(input int b, input int f, input int y, input int x);
    longint s;
    s = 0;
    for (int c = 0; c < NCH; c++)
      for (int kr = 0; kr < K; kr++)
        for (int kc = 0; kc < K; kc++)
          if (pat[f][c][kr*K+kc])
            s += longint'(px_in(b, c, y+kr-1, x+kc-1)) * longint'(kern[f][c][kr*K+kc]);
    return s;
  endfunction

  // ---- off-chip memory model -----------------------------------------------------
  typedef struct { int ty; int tx; int ch; int row; int due; } req_s;
  req_s pend [$];
  initial begin
    for (int i = 0; i < TT+K-1; i++) mem_rsp_data[i] = '0;
    forever begin
      @(negedge clk);
      mem_rsp_valid = 0;
      if (pend.size() > 0 && pend[0].due <= cyc) begin
        req_s r;
        r = pend.pop_front();
        mem_rsp_valid = 1;
        mem_rsp_ch  = CW'(r.ch);
        mem_rsp_row = RW'(r.row);
        for (int i = 0; i < TT+K-1; i++)
          mem_rsp_data[i] = act_t'(px_in((kin - 1) % 2, r.ch, r.ty*TT + r.row - 1, r.tx*TT + i - 1));
      end
      mem_req_ready = ($urandom_range(0, 7) != 0);
      #4;
      if (mem_req_valid && mem_req_ready) begin
        req_s r;
        r.ty = int'(mem_req_ty); r.tx = int'(mem_req_tx);
        r.ch = int'(mem_req_ch); r.row = int'(mem_req_row);
        r.due = cyc + $urandom_range(1, 3);
        pend.push_back(r);
        chk(emask[(kin - 1) % 2][r.ty*NTX + r.tx], "dropped tile loaded");
        chk(pat[int'(dut.filt)][r.ch] != '0, "pruned channel loaded");
      end
    end
  end

  // ---- receiving end of the link -------------------------------------------------
  initial begin
    forever begin
      @(negedge clk);
      out_ready = (hold || (cyc / STALL_LEN) % 3 == 0) ? 1'b0 : ($urandom_range(0, 3) != 0);
      #4;
      if (dut.eo_valid && !dut.eo_ready) ev_stall++;
      if (out_valid && pix_ready) ev_overlap++;   // old frame leaves, new one is read
      if (out_valid && out_ready) begin
        int ty, tx, f, r, b;
        b = kdone % 2;
        ty = int'(out_ty); tx = int'(out_tx); f = int'(out_filt); r = int'(out_row);
        beats++;
        chk(kdone < kin, "output with no frame in flight");
        chk(emask[b][ty*NTX + tx], "output for a dropped tile");
        chk(out_last == (r == TT-1), "out_last");
        for (int x = 0; x < TT; x++)
          chk(longint'(out_data[x]) == ref_out(b, f, ty*TT + r, tx*TT + x),
              $sformatf("tile (%0d,%0d) f%0d row %0d col %0d: %0d vs %0d", ty, tx, f, r, x,
                        out_data[x], ref_out(b, f, ty*TT + r, tx*TT + x)));
        beats_cur++;
        if (beats_cur == exp_beats[b]) begin
          beats_cur = 0;
          kdone++;
        end
      end
    end
  end

  // ---- main sequence ---------------------------------------------------------------
  initial begin
    for (int i = 0; i < K*K; i++) wt_kernel[i] = '0;
    emask[0] = '1; emask[1] = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // weights: filter 0 channel 1 kernel-wise pruned, the rest pattern-pruned
    for (int f = 0; f < NFILT; f++)
      for (int c = 0; c < NCH; c++) begin
        for (int i = 0; i < K*K; i++) kern[f][c][i] = wgt_t'($urandom);
        case ((f + c) % 3)
          0: pat[f][c] = 9'b010_111_000;
          1: pat[f][c] = 9'b010_110_010;
          default: pat[f][c] = 9'b110_110_000;
        endcase
        if (f == 0 && c == 1 && NCH > 1) pat[f][c] = '0;
        if (pat[f][c] != '0)
          for (int i = 0; i < K*K; i++) if (!pat[f][c][i] && kern[f][c][i] != 0) ev_gate++;
        @(negedge clk);
        wt_we = 1; wt_filt = FIW'(f); wt_ch = CW'(c);
        wt_kernel = kern[f][c]; wt_mask = pat[f][c];
      end
    @(negedge clk);
    wt_we = 0;

    for (int fr = 0; fr < NFRAMES; fr++) begin
      int t0, kept_tiles, b;
      t0 = cyc;
      if (KEEP[fr]) begin
        for (int y = 0; y < FHD; y++)
          for (int x = 0; x < FWD; x++) begin
            // textured lower-right region, flat elsewhere, plus a little noise
            luma[y][x] = byte'(((y*3 + fr) % FHD > FHD/2 && (x + fr) % FWD > FWD/3)
                               ? $urandom_range(0, 255) : 100 + $urandom_range(0, 3));
          end
        // buffer b may be reused once frame kin-2 has fully arrived
        while (kdone < kin - 1) @(negedge clk);
        b = kin % 2;
        emask[b] = ref_mask();
        exp_beats[b] = $countones(emask[b]) * NFILT * TT;
        for (int c = 0; c < NCH; c++)
          for (int y = 0; y < FHD; y++)
            for (int x = 0; x < FWD; x++)
              act[b][c][y][x] = emask[b][(y/TT)*NTX + x/TT] ? byte'($urandom) : 8'sd0;
        kin++;
      end
      @(negedge clk);
      frame_start = 1;
      frame_keep  = KEEP[fr];
      @(negedge clk);
      frame_start = 0;
      if (KEEP[fr]) begin
        for (int y = 0; y < FHD; y++)
          for (int x = 0; x < FWD; x++) begin
            pix_valid = 1;
            pix_data  = luma[y][x];
            #4;
            while (!pix_ready) begin @(negedge clk); #4; end
            @(negedge clk);
          end
        pix_valid = 0;
      end
      while (!frame_done) @(negedge clk);
      frames_done++;
      // hold the receiver for a while so the link is still busy with this
      // frame when the next one starts (frame overlap)
      hold = 1;
      fork begin repeat (3*STALL_LEN) @(negedge clk); hold = 0; end join_none
      @(negedge clk);
      if (!KEEP[fr]) begin
        ev_frame_drop++;
        chk(cyc - t0 < 5, "dropped frame took time");
      end else begin
        kept_tiles = $countones(emask[b]);
        chk(tile_keep == emask[b], $sformatf("mask %b vs %b", tile_keep, emask[b]));
        $display("frame %0d: %0d of %0d tiles kept, %0d cycles", fr, kept_tiles, NT, cyc - t0);
      end
    end
    // let the link drain, then every kept frame must have arrived in full
    while (kdone < kin) @(negedge clk);
    chk(beats_cur == 0, "partial frame at the end");
    begin
      int total;
      total = 0;
      for (int fr = 0; fr < NFRAMES; fr++) if (KEEP[fr]) total++;
      chk(kdone == total, "kept frames received");
    end
    ev_tile_skip = int'(cnt_tiles_skipped);
    ev_ch_skip   = int'(cnt_ch_skipped);
    chk(int'(cnt_frames_dropped) == ev_frame_drop, "frame drop counter");
    $display("events: frame_drop=%0d tile_skip=%0d ch_skip=%0d pattern_gated_weights=%0d link_stall_cycles=%0d (dut %0d) frame_overlap_cycles=%0d",
             ev_frame_drop, ev_tile_skip, ev_ch_skip, ev_gate, ev_stall, cnt_link_stall, ev_overlap);
    chk(ev_frame_drop > 0, "no frame dropped");
    chk(ev_tile_skip > 0, "no tile skipped");
    chk(ev_ch_skip > 0, "no channel skipped");
    chk(ev_gate > 0, "no pattern-gated weight");
    chk(ev_stall > 0, "link never stalled");
    chk(ev_overlap > 0, "frames never overlapped");
    chk(int'(cnt_link_stall) == ev_stall, "stall counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
