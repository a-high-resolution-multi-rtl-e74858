// selector: controls the MUX of the oscillation launcher.
//
// While idle, SEL = 0 and the MUX passes HIT to the IDELAY. The first rising
// edge of the delayed signal (osc) sets SEL, so the MUX takes the inverted
// delayed signal and the loop oscillates. The selector counts the falling edges
// of osc, one per oscillation cycle, and clears SEL on the M-th, i.e. at the end
// of the M-th cycle, so M rising edges t_0 .. t_{M-1} reach the ISERDES per hit.
// Clearing on a falling edge stops the ring while its output is low, with no
// runt pulse.
//
// SEL is kept as the XOR of two toggle flip-flops, one in the rising-edge and
// one in the falling-edge domain of osc, so that each is written by one clock
// only. The paper gives the selector's task (count M cycles, switch SEL back
// to HIT); the toggle pair and edge choice are this design's.
//
// Interface: rst (asynchronous), osc (IDELAY output), m_cycles (M, 1..2^M_W-1),
// sel. Timing: SEL rises at the first osc rising edge, falls at the M-th osc
// falling edge. m_cycles must be stable while SEL is high.
`timescale 1ps / 1fs
module selector #(
  parameter int unsigned M_W = tdc_pkg::M_W
) (
  input  logic           rst,
  input  logic           osc,
  input  logic [M_W-1:0] m_cycles,
  output logic           sel
);

  logic           start_tog;  // toggles when a hit starts the ring
  logic           stop_tog;   // toggles when the M-th cycle ends
  logic [M_W-1:0] ncnt;       // falling edges seen in this hit

  always_ff @(posedge osc or posedge rst) begin
    if (rst)                         start_tog <= 1'b0;
    else if (start_tog == stop_tog)  start_tog <= ~start_tog;
  end

  always_ff @(negedge osc or posedge rst) begin
    if (rst) begin
      stop_tog <= 1'b0;
      ncnt     <= '0;
    end else if (start_tog != stop_tog) begin
      if (ncnt == m_cycles - M_W'(1)) begin
        ncnt     <= '0;
        stop_tog <= ~stop_tog;
      end else begin
        ncnt <= ncnt + M_W'(1);
      end
    end
  end

  assign sel = start_tog ^ stop_tog;

endmodule
