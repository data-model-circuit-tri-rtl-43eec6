// row_conv_pe -- column-level parallel row convolution.
//
// One input feature-map row, already padded to T_W+K-1 samples, meets one
// kernel row of K weights. In the same cycle every one of the T_W output
// positions x forms its K products in[x+j]*w[j] and reduces them with a
// K-to-1 adder tree, giving T_W partial sums. This is the paper's column-level
// parallelism. A weight whose pattern-mask bit is 0 was pruned by the
// pattern-aware pruning: its product is forced to zero, so a pruned weight
// never contributes even if the stored value is not zero (the gating is this
// design's way of applying one fixed pattern to a whole channel).
//
// Purely combinational: psum is valid in the cycle the inputs are.
module row_conv_pe
  import tri_pkg::*;
#(
  parameter int unsigned T_W   = TILE,
  parameter int unsigned KW    = K,
  parameter int unsigned SUM_W = ACC_W
) (
  input  act_t                    in_row [T_W+KW-1],
  input  wgt_t                    w_row  [KW],
  input  logic [KW-1:0]           mask_row,
  output logic signed [SUM_W-1:0] psum   [T_W]
);
  always_comb begin
    for (int x = 0; x < int'(T_W); x++) begin
      logic signed [SUM_W-1:0] s;
      s = '0;
      // K-to-1 adder tree (written as a sum; synthesis balances it)
      for (int j = 0; j < int'(KW); j++) begin
        if (mask_row[j])
          s = s + (SUM_W'(in_row[x+j]) * SUM_W'(w_row[j]));
      end
      psum[x] = s;
    end
  end
endmodule
