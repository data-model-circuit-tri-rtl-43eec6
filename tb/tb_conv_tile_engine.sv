// tb_conv_tile_engine -- self-checking test of the tile convolution engine.
//
// A small tile (6x6, 8 channels) is convolved in several runs with random
// activations, random kernels and random per-channel patterns. Some channels
// have an all-zero pattern (kernel-wise pruned) and some weights are non-zero
// under a zero pattern bit, so both kinds of pruning must be honoured. The
// off-chip memory is modelled here: it answers row requests in order after a
// random delay (or after exactly one cycle in the timing runs). Checked:
//   - every output value against a direct convolution computed here;
//   - a pruned channel is never requested;
//   - with a one-cycle memory the request phase lasts exactly
//     kept_channels*(T_H+K-1) cycles (no cycle spent on pruned channels) and
//     the whole run ends within that plus the T_H drain cycles and 3 more.
module tb_conv_tile_engine;
  import tri_pkg::*;
  localparam int TH = 6, TW = 6, CM = 8;
  localparam int CW = $clog2(CM+1), RW = $clog2(TH+K), OW = $clog2(TH+1);
  localparam int ROWS = TH + K - 1;

  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [CW-1:0] n_ch = '0;
  logic busy, done;
  logic [CW-1:0] kept_ch;
  logic [CM-1:0] ch_pruned;
  logic [CW-1:0] w_ch;
  wgt_t w_kernel [K*K];
  logic [K*K-1:0] w_mask;
  logic req_valid, req_ready = 0;
  logic [CW-1:0] req_ch;
  logic [RW-1:0] req_row;
  logic rsp_valid = 0;
  logic [CW-1:0] rsp_ch = '0;
  logic [RW-1:0] rsp_row = '0;
  act_t rsp_data [TW+K-1];
  logic out_valid, out_ready = 0, out_last;
  logic [OW-1:0] out_row;
  acc_t out_data [TW];

  conv_tile_engine #(.T_H(TH), .T_W(TW), .KW(K), .C_MAX(CM)) dut (.*);
  always #5 clk = ~clk;

  // model data
  act_t in_t [CM][ROWS][TW+K-1];
  wgt_t kern [CM][K*K];
  logic [K*K-1:0] pat [CM];
  int checks = 0, failures = 0;
  int fixed_lat = 0;           // 1: memory answers after exactly one cycle
  int req_cycles, run_cycles, req_pruned;

  // weight buffer model (combinational read)
  always_comb begin
    for (int c = 0; c < CM; c++) ch_pruned[c] = (pat[c] == '0);
    w_kernel = kern[int'(w_ch) % CM];
    w_mask   = pat[int'(w_ch) % CM];
  end

  // memory model: in-order responses with random latency
  typedef struct { int ch; int row; int due; } req_s;
  req_s pend [$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // driver of the memory side, evaluated just before each rising edge
  initial begin
    for (int i = 0; i < TW+K-1; i++) rsp_data[i] = '0;
    forever begin
      @(negedge clk);
      // present a response if one is due
      rsp_valid = 0;
      if (pend.size() > 0 && pend[0].due <= cyc) begin
        req_s r;
        r = pend.pop_front();
        rsp_valid = 1;
        rsp_ch  = CW'(r.ch);
        rsp_row = RW'(r.row);
        for (int i = 0; i < TW+K-1; i++) rsp_data[i] = in_t[r.ch][r.row][i];
      end
      req_ready = fixed_lat ? 1'b1 : ($urandom_range(0, 3) != 0);
      #4;
      if (req_valid && req_ready) begin
        req_s r;
        r.ch = int'(req_ch); r.row = int'(req_row);
        r.due = cyc + (fixed_lat ? 1 : $urandom_range(1, 4));
        pend.push_back(r);
        req_cycles++;
        if (pat[r.ch] == '0) req_pruned++;
      end
    end
  end

  task automatic run_one(input int nch, input int mode);
    longint ref_o [TH][TW];
    int nrows, kept;
    for (int c = 0; c < CM; c++) begin
      for (int r = 0; r < ROWS; r++)
        for (int i = 0; i < TW+K-1; i++) in_t[c][r][i] = act_t'($urandom);
      for (int i = 0; i < K*K; i++) kern[c][i] = wgt_t'($urandom);
      case ($urandom_range(0, 3))
        0: pat[c] = '0;                       // kernel-wise pruned
        1: pat[c] = 9'b000_111_010;           // pattern masks
        2: pat[c] = 9'b010_011_010;
        default: pat[c] = (K*K)'($urandom);
      endcase
      if (mode == 1 && c < nch) pat[c] = (c % 2 == 0) ? '0 : 9'b000_011_011;
    end
    kept = 0;
    for (int c = 0; c < nch; c++) if (pat[c] != '0) kept++;
    for (int r = 0; r < TH; r++)
      for (int x = 0; x < TW; x++) begin
        ref_o[r][x] = 0;
        for (int c = 0; c < nch; c++)
          for (int kr = 0; kr < K; kr++)
            for (int kc = 0; kc < K; kc++)
              if (pat[c][kr*K+kc])
                ref_o[r][x] += longint'(in_t[c][r+kr][x+kc]) * longint'(kern[c][kr*K+kc]);
      end
    fixed_lat = (mode == 1);
    req_cycles = 0; req_pruned = 0;
    @(negedge clk);
    n_ch = CW'(nch);
    start = 1;
    @(negedge clk);
    start = 0;
    run_cycles = 1;
    nrows = 0;
    while (!done) begin
      out_ready = fixed_lat ? 1'b1 : ($urandom_range(0, 2) != 0);
      #4;
      if (out_valid && out_ready) begin
        for (int x = 0; x < TW; x++)
          chk(longint'(out_data[x]) == ref_o[out_row][x], $sformatf("out r%0d x%0d", out_row, x));
        chk(out_last == (int'(out_row) == TH-1), "out_last");
        nrows++;
      end
      @(negedge clk);
      run_cycles++;
    end
    chk(nrows == TH, "row count");
    chk(int'(kept_ch) == kept, "kept count");
    chk(req_pruned == 0, "pruned channel requested");
    chk(req_cycles == kept * ROWS, $sformatf("requests %0d vs %0d", req_cycles, kept*ROWS));
    if (mode == 1) begin
      chk(run_cycles <= kept * ROWS + TH + 3, $sformatf("latency %0d > %0d", run_cycles, kept*ROWS+TH+3));
      $display("run n_ch=%0d kept=%0d: %0d cycles", nch, kept, run_cycles);
    end
  endtask

  initial begin
    for (int c = 0; c < CM; c++) pat[c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) run_one($urandom_range(1, CM), 0);
    run_one(CM, 1);        // half the channels pruned, fixed memory latency
    run_one(CM, 0);
    for (int c = 0; c < CM; c++) pat[c] = '0;
    run_one(0, 0);         // empty layer
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
