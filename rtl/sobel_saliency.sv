// sobel_saliency -- patch saliency mask for spatial data reduction.
//
// The frame is cut into PATCH x PATCH patches (the accelerator's tiles). Each
// patch gets a saliency score, the sum over its pixels of the Sobel gradient
// magnitude |Gx|+|Gy| (two 3x3 kernels, as in the paper). The score map is
// then smoothed with each patch's four neighbours, and the DROP_PCT percent of
// patches with the lowest smoothed score are marked as dropped in the binary
// mask (keep_mask bit = 1 means the tile is kept and computed).
//
// How it works. Luma pixels arrive in raster order, one per cycle. Two line
// buffers and a 3x3 window register give the Sobel window; the magnitude of
// the window centre is added, one cycle later, to the score of the patch that
// holds the centre. After the last pixel, SMOOTH visits one patch per cycle
// and forms score(self)+score(N)+score(S)+score(W)+score(E); a neighbour
// outside the frame is replaced by the patch itself. RANK then visits one
// patch per cycle and compares its smoothed score with all others in
// parallel: a patch whose rank from the bottom (ties broken by index) is
// below floor(N*DROP_PCT/100) is dropped.
//
// Design choices (the paper gives only Sobel, patch scores, four-neighbour
// smoothing and a drop ratio): gradients only at pixels whose 3x3 window lies
// inside the frame; edge patches narrower than PATCH are scored as they are;
// smoothing is an unweighted five-term sum; the drop set is chosen by rank.
//
// Interface: start (one cycle) arms a new frame; pix_valid/pix_ready/pix_data
// stream the FRAME_H*FRAME_W pixels; done pulses when keep_mask is valid. It
// stays valid until the next start. Timing: FRAME_W*FRAME_H + 2*N + 2 cycles
// for N patches when pixels are never stalled.
module sobel_saliency
  import tri_pkg::*;
#(
  parameter int unsigned FW       = FRAME_W,
  parameter int unsigned FH       = FRAME_H,
  parameter int unsigned PATCH    = TILE,
  parameter int unsigned DROP     = DROP_PCT,
  localparam int unsigned NPX     = (FW + PATCH - 1) / PATCH,
  localparam int unsigned NPY     = (FH + PATCH - 1) / PATCH,
  localparam int unsigned NP      = NPX * NPY,
  localparam int unsigned NDROP   = (NP * DROP) / 100
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               pix_valid,
  output logic               pix_ready,
  input  logic [PIX_W-1:0]   pix_data,
  output logic               busy,
  output logic               done,
  output logic [NP-1:0]      keep_mask
);
  typedef enum logic [2:0] {S_IDLE, S_STREAM, S_FLUSH, S_SMOOTH, S_RANK} sal_state_e;
  localparam int unsigned XW = $clog2(FW);
  localparam int unsigned YW = $clog2(FH);
  localparam int unsigned PW = $clog2(PATCH);
  localparam int unsigned NW = $clog2(NP+1);
  localparam int unsigned IW = $clog2(NPX+1);
  localparam int unsigned JW = $clog2(NPY+1);

  sal_state_e state;
  logic [PIX_W-1:0] lb1 [FW];     // row r-1
  logic [PIX_W-1:0] lb2 [FW];     // row r-2
  logic [PIX_W-1:0] win [3][3];   // [row][col], row 0 = r-2, col 2 = newest
  logic [XW-1:0] c;
  logic [YW-1:0] r;
  logic [IW-1:0] pc;  logic [PW-1:0] pcc;   // patch column of pixel, offset in it
  logic [JW-1:0] pr;  logic [PW-1:0] prr;   // patch row of pixel, offset in it
  // stage 2 (registered window)
  logic          s2_valid;
  logic [IW-1:0] s2_pc;
  logic [JW-1:0] s2_pr;
  logic [31:0]   score  [NP];
  logic [31:0]   smooth [NP];
  logic [NW-1:0] idx;

  assign pix_ready = (state == S_STREAM);
  assign busy      = (state != S_IDLE);

  // ---- Sobel magnitude of the registered window --------------------------
  logic signed [12:0] gx, gy;
  logic [12:0]        mag;
  always_comb begin
    gx = 13'(signed'({1'b0, win[0][2]})) + 13'(signed'({1'b0, win[1][2]}))*2 + 13'(signed'({1'b0, win[2][2]}))
       - 13'(signed'({1'b0, win[0][0]})) - 13'(signed'({1'b0, win[1][0]}))*2 - 13'(signed'({1'b0, win[2][0]}));
    gy = 13'(signed'({1'b0, win[2][0]})) + 13'(signed'({1'b0, win[2][1]}))*2 + 13'(signed'({1'b0, win[2][2]}))
       - 13'(signed'({1'b0, win[0][0]})) - 13'(signed'({1'b0, win[0][1]}))*2 - 13'(signed'({1'b0, win[0][2]}));
    mag = (gx < 0 ? 13'(-gx) : 13'(gx)) + (gy < 0 ? 13'(-gy) : 13'(gy));
  end

  // ---- neighbour lookup for smoothing ------------------------------------
  logic [IW-1:0] sx;  logic [JW-1:0] sy;
  logic [31:0]   sm_val;
  always_comb begin
    logic [NW-1:0] p, n, s, w, e;
    sx = IW'(int'(idx) % int'(NPX));
    sy = JW'(int'(idx) / int'(NPX));
    p  = idx;
    n  = (sy == 0)                 ? p : p - NW'(NPX);
    s  = (int'(sy) == int'(NPY)-1) ? p : p + NW'(NPX);
    w  = (sx == 0)                 ? p : p - 1'b1;
    e  = (int'(sx) == int'(NPX)-1) ? p : p + 1'b1;
    sm_val = score[p] + score[n] + score[s] + score[w] + score[e];
  end

  // ---- rank of patch idx among all smoothed scores -----------------------
  logic [NW-1:0] rank;
  always_comb begin
    rank = '0;
    for (int q = 0; q < int'(NP); q++)
      if (smooth[q] < smooth[idx] || (smooth[q] == smooth[idx] && q < int'(idx)))
        rank = rank + 1'b1;
  end

  // centre pixel (r-1, c-1) lies in patch column pc or pc-1 (likewise rows)
  logic [IW-1:0] ctr_pc;  logic [JW-1:0] ctr_pr;
  assign ctr_pc = (pcc == '0) ? pc - 1'b1 : pc;
  assign ctr_pr = (prr == '0) ? pr - 1'b1 : pr;

  always_ff @(posedge clk) begin
    if (state == S_STREAM && pix_valid) begin
      lb1[c] <= pix_data;
      lb2[c] <= lb1[c];
      for (int i = 0; i < 3; i++) begin
        win[i][0] <= win[i][1];
        win[i][1] <= win[i][2];
      end
      win[0][2] <= lb2[c];
      win[1][2] <= lb1[c];
      win[2][2] <= pix_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      c <= '0; r <= '0; pc <= '0; pcc <= '0; pr <= '0; prr <= '0;
      s2_valid <= 1'b0; s2_pc <= '0; s2_pr <= '0;
      idx <= '0;
      keep_mask <= '1;
      for (int i = 0; i < int'(NP); i++) begin
        score[i]  <= '0;
        smooth[i] <= '0;
      end
    end else begin
      done     <= 1'b0;
      s2_valid <= 1'b0;
      // stage 2: accumulate the magnitude into its patch
      if (s2_valid)
        score[int'(s2_pr)*int'(NPX) + int'(s2_pc)] <=
          score[int'(s2_pr)*int'(NPX) + int'(s2_pc)] + 32'(mag);
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_STREAM;
          c <= '0; r <= '0; pc <= '0; pcc <= '0; pr <= '0; prr <= '0;
          for (int i = 0; i < int'(NP); i++) score[i] <= '0;
        end
        S_STREAM: if (pix_valid) begin
          s2_valid <= (r >= 2) && (c >= 2);
          s2_pc    <= ctr_pc;
          s2_pr    <= ctr_pr;
          if (c == XW'(FW-1)) begin
            c <= '0; pc <= '0; pcc <= '0;
            if (prr == PW'(PATCH-1)) begin prr <= '0; pr <= pr + 1'b1; end
            else prr <= prr + 1'b1;
            if (r == YW'(FH-1)) state <= S_FLUSH;
            r <= r + 1'b1;
          end else begin
            c <= c + 1'b1;
            if (pcc == PW'(PATCH-1)) begin pcc <= '0; pc <= pc + 1'b1; end
            else pcc <= pcc + 1'b1;
          end
        end
        S_FLUSH: begin          // last magnitude is added this cycle
          state <= S_SMOOTH;
          idx   <= '0;
        end
        S_SMOOTH: begin
          smooth[idx] <= sm_val;
          if (idx == NW'(NP-1)) begin idx <= '0; state <= S_RANK; end
          else idx <= idx + 1'b1;
        end
        S_RANK: begin
          keep_mask[idx] <= (rank >= NW'(NDROP));
          if (idx == NW'(NP-1)) begin state <= S_IDLE; done <= 1'b1; end
          else idx <= idx + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
