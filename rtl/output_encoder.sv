// output_encoder: turns the edge marks of one system period into bin positions.
//
// The oscillation period is kept above 5 ns, so a 10 ns system period holds at
// most two leading edges. The encoder finds the highest-index mark (the
// earliest edge) and the next one, and gives each as a position counted in
// 625 ps bins from the start of the period: pos = N-1-k. n is the number of
// edges found, 0, 1 or 2; a third mark, which the timing rules out, is ignored.
// The paper names this stage and says it converts the marks to binary; the
// priority search and the edge-pair output are this design's.
//
// Interface: clk, rst (asynchronous), mark (from one_out_n), edges
// (tdc_pkg::edge_pair_t). Timing: one clk of latency.
`timescale 1ps / 1fs
module output_encoder
  import tdc_pkg::*;
#(
  parameter int unsigned N = CODE_W
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [N-1:0] mark,
  output edge_pair_t   edges
);

  edge_pair_t nxt;

  always_comb begin
    nxt = '0;
    for (int k = int'(N) - 1; k >= 0; k--) begin
      if (mark[k]) begin
        if (nxt.n == 2'd0) begin
          nxt.pos0 = POS_W'(int'(N) - 1 - k);
          nxt.n    = 2'd1;
        end else if (nxt.n == 2'd1) begin
          nxt.pos1 = POS_W'(int'(N) - 1 - k);
          nxt.n    = 2'd2;
        end
      end
    end
  end

  always_ff @(posedge clk or posedge rst) begin
    if (rst) edges <= '0;
    else     edges <= nxt;
  end

endmodule
