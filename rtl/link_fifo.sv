// link_fifo -- output buffer toward the next dataflow stage.
//
// The paper splits the network over several FPGAs that work as a dataflow
// pipeline: a stage forwards each finished tile of its feature map at once so
// the next stage can start on it before the whole frame is done. This FIFO is
// the sending end of such a link. It holds DEPTH beats of W bits, takes one
// beat per cycle on the in_* side and gives one per cycle on the out_* side,
// both with valid/ready. When the far end stops accepting, the FIFO fills and
// in_ready falls, which stalls the producer. The depth and the handshake are
// this design's choices; the paper does not describe the link itself.
//
// Timing: a beat written in cycle t can leave in cycle t+1 (registered
// storage, first-word fall-through on the output).
module link_fifo #(
  parameter int unsigned W     = 64,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic [AW:0]  level
);
  logic [W-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic push, pop;

  assign in_ready  = (level != (AW+1)'(DEPTH));
  assign out_valid = (level != '0);
  assign out_data  = mem[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) if (push) mem[wp] <= in_data;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      wp <= '0; rp <= '0; level <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      level <= level + (AW+1)'(push) - (AW+1)'(pop);
    end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    level <= (AW+1)'(DEPTH));
endmodule
