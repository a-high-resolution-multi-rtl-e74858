// hit_latch: catches the leading edge of the TDC input pulse.
//
// A flip-flop clocked by the input signal itself with its D input at 1: the
// first rising edge of sig_in sets HIT, whatever the width of the input pulse.
// HIT stays high until clr is asserted. In the channel, clr is the MUX select
// of the oscillation launcher (plus reset): once the launcher has taken the
// edge and switched its MUX to the feedback path, HIT is cleared, and while the
// launcher is busy the held clear makes further input edges invisible, which is
// the dead time of the TDC. The paper says only that the edge "is latched by the
// flip-flops"; the clear by SEL is this design's choice.
//
// Interface: sig_in (input pulse, asynchronous), clr (asynchronous clear, high
// active), hit (to MUX input 0). Timing: hit rises one clock-to-Q after sig_in.
`timescale 1ps / 1fs
module hit_latch (
  input  logic sig_in,
  input  logic clr,
  output logic hit
);

  always_ff @(posedge sig_in or posedge clr) begin
    if (clr) hit <= 1'b0;
    else     hit <= 1'b1;
  end

endmodule
