// fine_sum: adds the M measurements of one hit into the fine time.
//
// A hit reaches the ISERDES as M rising edges t_0 .. t_{M-1}, one oscillation
// period T_OSC apart. Each edge's position is known in 625 ps bins from the
// start of its own 10 ns system period. fine_sum refers every edge to the
// system period of the first edge: it adds 16 bins (one T_CLK) for every system
// period that has passed since then,
//   t_fine = sum_{i=0}^{M-1} ( pos_i + 16 * w_i ),
// where w_i counts the system periods between edge 0 and edge i. This is the
// paper's Eq. (2) with the T_CLK compensation m(i) taken cumulatively: by the
// paper's Eq. (3), m(i) = 1 means edge i+1 falls in the next system period, so
// edge i's period offset is m(0) + ... + m(i-1). The sum has 625/M ps LSB: with
// M = 8 the fine code spans 128 values (7 bits) on top of a constant offset of
// about T_OSC * M(M-1)/2.
//
// Up to two edges per system period are taken in order; one measurement may
// end and the next begin in the same period. When the M-th edge has been
// added, valid pulses for one clk with ev.fine = t_fine and ev.coarse = the
// coarse counter value of the cycle in which edge 0 was added (a fixed latency
// after the system period holding edge 0). The first edge seen while idle
// starts a measurement; there is no timeout, since the selector always
// delivers M edges.
//
// The same edge times also give the oscillation period (the paper's Eq. 3,
// t_{i+1} - t_i = T_OSC - m(i) * T_CLK): the distance from edge i to edge i+1,
// both counted from edge 0's period, is one T_OSC in 625 ps bins. per reports
// these M-1 distances per hit as they arise, up to two per system period, so
// that T_OSC can be histogrammed from the TDC itself; its mean converges to
// T_OSC, its spread is the 625 ps quantisation.
//
// Interface: clk (100 MHz), rst (asynchronous), m_cycles (M, at least 2),
// edges (from output_encoder), coarse (coarse counter), valid, ev, per.
// Timing: ev is registered, one clk after the cycle holding the M-th edge; per
// is registered, one clk after the cycle holding the edges it spans.
`timescale 1ps / 1fs
module fine_sum
  import tdc_pkg::*;
(
  input  logic                clk,
  input  logic                rst,
  input  logic [M_W-1:0]      m_cycles,
  input  edge_pair_t          edges,
  input  logic [COARSE_W-1:0] coarse,
  output logic                valid,
  output tdc_event_t          ev,
  output osc_period_t         per
);

  logic                busy_q, busy_d;
  logic [M_W-1:0]      cnt_q, cnt_d;      // edges added so far
  logic [WREL_W-1:0]   wrel_q, wrel_d;    // system periods since edge 0
  logic [FINE_W-1:0]   acc_q, acc_d;
  logic [COARSE_W-1:0] c0_q, c0_d;        // coarse value of edge 0
  logic [WREL_W+POS_W-1:0] last_q, last_d;  // time of the previous edge, in bins
  logic [WREL_W+POS_W-1:0] t_e;
  osc_period_t         per_d;
  logic                valid_d;
  tdc_event_t          ev_d;
  logic [POS_W-1:0]    pos;

  always_comb begin
    busy_d  = busy_q;
    cnt_d   = cnt_q;
    acc_d   = acc_q;
    c0_d    = c0_q;
    wrel_d  = busy_q ? wrel_q + 1'b1 : '0;
    valid_d = 1'b0;
    ev_d    = '0;
    pos     = '0;
    last_d  = last_q;
    per_d   = '0;
    t_e     = '0;
    for (int e = 0; e < 2; e++) begin
      if (2'(e) < edges.n) begin
        pos = (e == 0) ? edges.pos0 : edges.pos1;
        if (!busy_d) begin
          busy_d = 1'b1;
          cnt_d  = '0;
          acc_d  = '0;
          wrel_d = '0;
          c0_d   = coarse;
        end
        t_e   = {wrel_d, pos};
        acc_d = acc_d + FINE_W'(t_e);
        if (cnt_d != '0) begin
          if (per_d.n == 2'd0) per_d.d0 = PER_W'(t_e - last_d);
          else                 per_d.d1 = PER_W'(t_e - last_d);
          per_d.n = per_d.n + 1'b1;
        end
        last_d = t_e;
        cnt_d = cnt_d + 1'b1;
        if (cnt_d == m_cycles) begin
          valid_d   = 1'b1;
          ev_d.fine = acc_d;
          ev_d.coarse = c0_d;
          busy_d    = 1'b0;
        end
      end
    end
  end

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      busy_q <= 1'b0;
      cnt_q  <= '0;
      wrel_q <= '0;
      acc_q  <= '0;
      c0_q   <= '0;
      last_q <= '0;
      valid  <= 1'b0;
      ev     <= '0;
      per    <= '0;
    end else begin
      busy_q <= busy_d;
      cnt_q  <= cnt_d;
      wrel_q <= wrel_d;
      acc_q  <= acc_d;
      c0_q   <= c0_d;
      last_q <= last_d;
      valid  <= valid_d;
      ev     <= ev_d;
      per    <= per_d;
    end
  end

endmodule
