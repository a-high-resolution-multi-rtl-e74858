// iserdes_os: the ISERDES input block in oversample mode, used as a 4-phase TDC.
//
// Stage 1 samples the delayed hit (ddly) on the rising edges of four clocks
// 90 degrees apart: clk (0 deg), oclk (90), clkb (180) and oclkb (270). With
// 400 MHz clocks this is one sample every 625 ps, bin = 1/(f * P). Stages 2 and
// 3 re-register the four samples on clk, so q holds the four samples of one
// 2.5 ns clk period as a thermometer slice. The three-column, four-row flip-flop
// array and the four clocks follow the paper's figure of the ISERDES; the clocks
// of the second and third columns cannot be read there and are both taken as clk
// here. Bit order is this design's: q[P-1] is the 0-degree (earliest) sample and
// q[0] the 270-degree (latest) one, so that words concatenated in time order
// read earliest-first from the MSB.
//
// Interface: ddly (asynchronous data), clk/clkb/oclk/oclkb, rst (asynchronous),
// q (4 bits, clk domain). Timing: the samples of the clk period [t, t + 2.5 ns)
// appear on q after the clk edge at t + 5 ns.
`timescale 1ps / 1fs
module iserdes_os #(
  parameter int unsigned P = tdc_pkg::PHASES
) (
  input  logic         rst,
  input  logic         ddly,
  input  logic         clk,
  input  logic         oclk,
  input  logic         clkb,
  input  logic         oclkb,
  output logic [P-1:0] q
);

  logic s0, s90, s180, s270;  // stage 1, one flip-flop per phase
  logic [P-1:0] r2;           // stage 2

  always_ff @(posedge clk or posedge rst)   if (rst) s0   <= 1'b0; else s0   <= ddly;
  always_ff @(posedge oclk or posedge rst)  if (rst) s90  <= 1'b0; else s90  <= ddly;
  always_ff @(posedge clkb or posedge rst)  if (rst) s180 <= 1'b0; else s180 <= ddly;
  always_ff @(posedge oclkb or posedge rst) if (rst) s270 <= 1'b0; else s270 <= ddly;

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      r2 <= '0;
      q  <= '0;
    end else begin
      r2 <= {s0, s90, s180, s270};
      q  <= r2;
    end
  end

endmodule
