// one_out_n: the one-out-of-N edge marker of the encoder.
//
// Each of the N = 16 code bits has one three-input gate,
//   mark[k] = in[k] & ~in[k+1] & ~in[k+2],
// which is 1 where a sample is high and the two samples before it are low, i.e.
// at a 0-to-1 transition, the leading edge. Requiring two zeros suppresses a
// single-bit bubble. The gate inputs follow the paper's encoder figure (gate k:
// ~In[k+2], ~In[k+1], In[k]; gate n: ~In[0], ~In[1], In[n]). For gates 14 and
// 15 the indices 16 and 17 wrap to bits 0 and 1; this design takes those two
// bits from the previous system period's code (the samples just before bit 15
// in time) rather than from the current one, so a pulse that began in the
// previous period is not taken for a new edge. The result is registered, as in
// the figure. The paper's text calls the gates NAND; the figure's marks are
// active high, which is what is built here.
//
// Interface: clk, rst (asynchronous), code (bit N-1 earliest), mark. Timing:
// one clk of latency.
`timescale 1ps / 1fs
module one_out_n #(
  parameter int unsigned N = tdc_pkg::CODE_W
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [N-1:0] code,
  output logic [N-1:0] mark
);

  logic [1:0]     prev;  // code[1:0] of the previous period
  logic [N+1:0]   ext;   // code extended by the two preceding samples
  logic [N-1:0]   mk;

  assign ext = {prev, code};

  always_comb begin
    for (int k = 0; k < int'(N); k++) begin
      mk[k] = ext[k] & ~ext[k+1] & ~ext[k+2];
    end
  end

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      prev <= '0;
      mark <= '0;
    end else begin
      prev <= code[1:0];
      mark <= mk;
    end
  end

endmodule
