// tb_link_fifo -- self-checking test of the inter-stage link buffer.
//
// Random push and pop pressure (including long periods with the far end not
// ready, so the FIFO fills and must stall the producer) against a queue kept
// here. Every beat that leaves must be the oldest one that entered; the test
// also checks that the FIFO really fills (in_ready low) at DEPTH entries.
module tb_link_fifo;
  localparam int W = 16, DEPTH = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = '0, out_data;
  logic [$clog2(DEPTH):0] level;
  logic [W-1:0] q [$];
  int checks = 0, failures = 0, full_seen = 0, n_out = 0;

  link_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      in_valid  = ($urandom_range(0, 3) != 0);
      in_data   = W'($urandom);
      // phases: far end stalled, then draining fast
      out_ready = ((cyc / 200) % 2 == 0) ? ($urandom_range(0, 7) == 0) : ($urandom_range(0, 3) != 0);
      #4;  // sample just before the rising edge
      if (!in_ready) begin
        full_seen++;
        checks++;
        if (q.size() != DEPTH) failures++;
      end
      if (out_valid && out_ready) begin
        checks++;
        n_out++;
        if (q.size() == 0 || out_data != q[0]) begin
          failures++;
          if (failures < 10) $display("bad beat %h", out_data);
        end
        if (q.size() != 0) void'(q.pop_front());
      end
      if (in_valid && in_ready) q.push_back(in_data);
      @(posedge clk);
    end
    checks++;
    if (full_seen == 0 || n_out < 1000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
