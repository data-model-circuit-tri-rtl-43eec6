// tb_sobel_saliency -- self-checking test of the patch saliency mask.
//
// A 22x14 frame cut into 5x5 patches (5x3 patches, the right-hand column
// only 2 pixels wide) is streamed in with random gaps in pix_valid. Frames
// are random noise, noise with a few bright edges, and a flat frame (all
// scores tie, so the index tie-break decides). The mask is compared with one
// computed here from the same pixels: Sobel |Gx|+|Gy| at every pixel whose
// 3x3 window is inside the frame, per-patch sums, five-term smoothing with
// edge replication, and dropping the floor(N*20/100) lowest-ranked patches.
// The cycle count of an unstalled frame is checked against W*H + 2*N + 2.
module tb_sobel_saliency;
  import tri_pkg::*;
  localparam int FW = 22, FH = 14, P = 5;
  localparam int NPX = (FW+P-1)/P, NPY = (FH+P-1)/P, NP = NPX*NPY;
  localparam int NDROP = (NP*DROP_PCT)/100;

  logic clk = 0, rst_n = 0;
  logic start = 0, pix_valid = 0, pix_ready, busy, done;
  logic [PIX_W-1:0] pix_data = '0;
  logic [NP-1:0] keep_mask;
  int checks = 0, failures = 0;
  int img [FH][FW];

  sobel_saliency #(.FW(FW), .FH(FH), .PATCH(P), .DROP(DROP_PCT)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [NP-1:0] ref_mask();
    longint sc [NP], sm [NP];
    logic [NP-1:0] m;
    for (int p = 0; p < NP; p++) sc[p] = 0;
    for (int y = 1; y < FH-1; y++)
      for (int x = 1; x < FW-1; x++) begin
        int gx, gy;
        gx = img[y-1][x+1] + 2*img[y][x+1] + img[y+1][x+1]
           - img[y-1][x-1] - 2*img[y][x-1] - img[y+1][x-1];
        gy = img[y+1][x-1] + 2*img[y+1][x] + img[y+1][x+1]
           - img[y-1][x-1] - 2*img[y-1][x] - img[y-1][x+1];
        sc[(y/P)*NPX + x/P] += (gx < 0 ? -gx : gx) + (gy < 0 ? -gy : gy);
      end
    for (int py = 0; py < NPY; py++)
      for (int px = 0; px < NPX; px++) begin
        int p;
        p = py*NPX + px;
        sm[p] = sc[p]
              + sc[(py == 0)     ? p : p - NPX]
              + sc[(py == NPY-1) ? p : p + NPX]
              + sc[(px == 0)     ? p : p - 1]
              + sc[(px == NPX-1) ? p : p + 1];
      end
    for (int p = 0; p < NP; p++) begin
      int rank;
      rank = 0;
      for (int q = 0; q < NP; q++)
        if (sm[q] < sm[p] || (sm[q] == sm[p] && q < p)) rank++;
      m[p] = (rank >= NDROP);
    end
    return m;
  endfunction

  task automatic run_frame(input int kind, input bit gaps);
    logic [NP-1:0] exp_m;
    int cycles;
    for (int y = 0; y < FH; y++)
      for (int x = 0; x < FW; x++)
        case (kind)
          0: img[y][x] = $urandom_range(0, 255);
          1: img[y][x] = $urandom_range(0, 15) + ((x > 8 && y > 6 && ((x + y) % 3 == 0)) ? 200 : 0);
          default: img[y][x] = 77;
        endcase
    exp_m = ref_mask();
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    for (int y = 0; y < FH; y++)
      for (int x = 0; x < FW; x++) begin
        pix_valid = 0;
        while (gaps && $urandom_range(0, 3) == 0) begin
          @(negedge clk); cycles++;
        end
        pix_valid = 1;
        pix_data  = PIX_W'(img[y][x]);
        #4;
        checks++;
        if (!pix_ready) failures++;
        @(negedge clk); cycles++;
      end
    pix_valid = 0;
    while (!done) begin @(negedge clk); cycles++; end
    checks++;
    if (keep_mask != exp_m) begin
      failures++;
      $display("mask kind %0d: got %b exp %b", kind, keep_mask, exp_m);
    end
    checks++;
    if ($countones(keep_mask) != NP - NDROP) failures++;
    if (!gaps) begin
      checks++;
      if (cycles != FW*FH + 2*NP + 2) begin
        failures++;
        $display("frame took %0d cycles, expected %0d", cycles, FW*FH + 2*NP + 2);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_frame(0, 0);
    run_frame(1, 1);
    run_frame(2, 0);
    for (int i = 0; i < 4; i++) run_frame(i % 2, i[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
