// tb_weight_buffer -- self-checking test of the kernel and pattern store.
//
// Checks that every pair reads as pruned after reset, writes random kernels
// and patterns (about a quarter of them all-zero, i.e. kernel-wise pruned),
// then reads every written pair back and compares kernel, pattern and the
// per-filter pruned vector with a copy kept here.
module tb_weight_buffer;
  import tri_pkg::*;
  localparam int NF = 8, CM = 16, CW = $clog2(CM+1), FW = $clog2(NF);
  logic clk = 0, rst_n = 0;
  logic we = 0;
  logic [FW-1:0] wr_filt = '0, rd_filt = '0;
  logic [CW-1:0] wr_ch = '0, rd_ch = '0;
  wgt_t wr_kernel [K*K];
  logic [K*K-1:0] wr_mask = '0;
  wgt_t rd_kernel [K*K];
  logic [K*K-1:0] rd_mask;
  logic [CM-1:0] ch_pruned;
  wgt_t ref_k [NF][CM][K*K];
  logic [K*K-1:0] ref_m [NF][CM];
  int checks = 0, failures = 0;

  weight_buffer #(.N_FILT(NF), .C_MAX(CM), .KW(K)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    for (int i = 0; i < K*K; i++) wr_kernel[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int f = 0; f < NF; f++) begin
      rd_filt = FW'(f); #1;
      chk(ch_pruned == '1, "pruned after reset");
    end
    for (int f = 0; f < NF; f++)
      for (int c = 0; c < CM; c++) begin
        @(negedge clk);
        we = 1; wr_filt = FW'(f); wr_ch = CW'(c);
        for (int i = 0; i < K*K; i++) begin
          wr_kernel[i] = wgt_t'($urandom);
          ref_k[f][c][i] = wr_kernel[i];
        end
        wr_mask = ($urandom_range(0, 3) == 0) ? '0 : (K*K)'($urandom);
        ref_m[f][c] = wr_mask;
      end
    @(negedge clk); we = 0;
    for (int f = 0; f < NF; f++)
      for (int c = 0; c < CM; c++) begin
        rd_filt = FW'(f); rd_ch = CW'(c); #1;
        chk(rd_mask == ref_m[f][c], "mask");
        chk(ch_pruned[c] == (ref_m[f][c] == '0), "pruned bit");
        for (int i = 0; i < K*K; i++) chk(rd_kernel[i] == ref_k[f][c][i], "kernel");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
