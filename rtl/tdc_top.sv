// tdc_top: two TDC channels on one FPGA sharing the clocks and the coarse timer.
//
// The PLL is outside this module: it supplies the two 400 MHz quadrature clocks
// clk0 and clk90 and the 100 MHz clk_sys, all edge aligned. Two inverters make
// clk180 and clk270 from them, as in the paper's architecture figure, and the
// four phases drive the ISERDES of every channel. One 40-bit coarse counter
// serves all channels, so their event words share one time base and can be
// subtracted directly (the paper's evaluation uses two channels, TDC1 and TDC2,
// fed from one split pulse). Each channel's buffered events leave through its
// own valid/ready stream, towards the readout link. per carries each channel's
// measured oscillation periods, unbuffered, for monitoring T_OSC.
//
// Reset: rst is asynchronous but must be released in the first quarter of a
// clk_sys period (after a clk_sys rising edge, before the next clk0 edge), which
// fixes the phase of the 4-word grouping. The latch-MUX-IDELAY-INV ring in each
// channel is a behavioural model (see osc_delay_loop); everything else is
// synthesizable.
`timescale 1ps / 1fs
module tdc_top
  import tdc_pkg::*;
#(
  parameter int unsigned NUM_CH     = 2,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                rst,
  input  logic                clk0,
  input  logic                clk90,
  input  logic                clk_sys,
  input  logic [M_W-1:0]      m_cycles,
  input  logic [TAP_W-1:0]    tap       [NUM_CH],
  input  logic [NUM_CH-1:0]   sig_in,
  output logic [NUM_CH-1:0]   out_valid,
  input  logic [NUM_CH-1:0]   out_ready,
  output tdc_event_t          out_ev    [NUM_CH],
  output logic [NUM_CH-1:0]   overflow,
  output logic [NUM_CH-1:0]   busy,
  output osc_period_t         per       [NUM_CH]
);

  logic                clk180, clk270;
  logic [COARSE_W-1:0] coarse;

  assign clk180 = ~clk0;
  assign clk270 = ~clk90;

  coarse_counter u_coarse (
    .clk   (clk_sys),
    .rst   (rst),
    .count (coarse)
  );

  for (genvar c = 0; c < int'(NUM_CH); c++) begin : g_ch
    tdc_channel #(.FIFO_DEPTH(FIFO_DEPTH)) u_ch (
      .rst       (rst),
      .clk0      (clk0),
      .clk90     (clk90),
      .clk180    (clk180),
      .clk270    (clk270),
      .clk_sys   (clk_sys),
      .m_cycles  (m_cycles),
      .tap       (tap[c]),
      .sig_in    (sig_in[c]),
      .coarse    (coarse),
      .out_valid (out_valid[c]),
      .out_ready (out_ready[c]),
      .out_ev    (out_ev[c]),
      .overflow  (overflow[c]),
      .busy      (busy[c]),
      .per       (per[c])
    );
  end

endmodule
