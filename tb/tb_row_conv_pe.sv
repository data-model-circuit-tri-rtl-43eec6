// tb_row_conv_pe -- self-checking test of the column-parallel row convolution.
//
// Random input rows, kernel rows and pattern masks (including all-zero and
// all-one masks, and non-zero weights under zero mask bits) are applied; every
// one of the T_W partial sums is compared with a sum computed here from the
// same values. The block is combinational, so each vector is checked after a
// settle delay.
module tb_row_conv_pe;
  import tri_pkg::*;
  localparam int TW = 60;
  act_t   in_row [TW+K-1];
  wgt_t   w_row  [K];
  logic [K-1:0] mask_row;
  acc_t   psum   [TW];
  int checks = 0, failures = 0;

  row_conv_pe #(.T_W(TW), .KW(K), .SUM_W(ACC_W)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 200; v++) begin
      for (int i = 0; i < TW+K-1; i++) in_row[i] = act_t'($urandom);
      for (int j = 0; j < K; j++)      w_row[j]  = wgt_t'($urandom);
      if (v == 0) begin
        for (int i = 0; i < TW+K-1; i++) in_row[i] = -128;
        for (int j = 0; j < K; j++)      w_row[j]  = -128;
      end
      mask_row = (v < 8) ? K'(v) : K'($urandom);
      #1;
      for (int x = 0; x < TW; x++) begin
        longint exp_s;
        exp_s = 0;
        for (int j = 0; j < K; j++)
          if (mask_row[j]) exp_s += longint'(in_row[x+j]) * longint'(w_row[j]);
        checks++;
        if (longint'(psum[x]) != exp_s) begin
          failures++;
          if (failures < 10) $display("mismatch v=%0d x=%0d got %0d exp %0d", v, x, psum[x], exp_s);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
