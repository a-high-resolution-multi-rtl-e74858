// osc_delay_loop: BEHAVIOURAL MODEL (not synthesizable) of the MUX, IDELAY and
// INV ring of the oscillation launcher.
//
// MUX input 0 is HIT, input 1 is HIT_INV, the inverted IDELAY output. The MUX
// output passes the routing and the IDELAY and drives the ISERDES DDLY input
// (ddly). While SEL = 0 a HIT edge reaches ddly after t_MUX + t_routing +
// t_IDELAY; while SEL = 1 the loop is a ring oscillator with period
//   T_OSC = 2 * (t_IDELAY + t_INV + t_MUX + t_routing).
// The IDELAY delay is T_IDELAY0 + tap * TAP, TAP = 1/(64 * 300 MHz) = 52.083 ps
// as for a 300 MHz IDELAY reference. All delays are transport delays; the
// default numbers (other than TAP) are this model's own and give T_OSC close to
// 5.08 ns with tap = 24. On the FPGA these are a LUT MUX, a LUT inverter and an
// IDELAYE2 primitive, placed by constraints; the period is their real delay.
//
// Interface: hit, sel, tap (IDELAY tap value, TAP_W bits), ddly (to the ISERDES
// and selector), hit_inv (feedback, observable).
// The IDELAY delay is a run-time value (tap 0 with T_IDELAY0 = 0 gives zero),
// so lint cannot prove that delay non-zero and says so; a zero delay is legal.
`timescale 1ps / 1fs
module osc_delay_loop #(
  parameter real T_MUX     = 250.0,   // ps, MUX propagation delay
  parameter real T_INV     = 250.0,   // ps, inverter propagation delay
  parameter real T_ROUTE   = 789.5,   // ps, all routing in the loop
  parameter real T_IDELAY0 = 0.0,     // ps, IDELAY delay at tap 0
  parameter real TAP       = 52.083,  // ps per IDELAY tap
  parameter int unsigned TAP_W = tdc_pkg::TAP_W
) (
  input  logic             hit,
  input  logic             sel,
  input  logic [TAP_W-1:0] tap,
  output logic             ddly,
  output logic             hit_inv
);

  logic mux_o;
  logic route_o;
  real  t_idelay;

  // Power-on state of the idle ring: HIT low, so every node is settled.
  initial begin
    mux_o   = 1'b0;
    route_o = 1'b0;
    ddly    = 1'b0;
    hit_inv = 1'b1;
  end

  assign t_idelay = T_IDELAY0 + real'(tap) * TAP;

  // Transport delays: each input change launches its own delayed update with
  // the value computed at the time of the change.
  always begin
    @(hit or sel or hit_inv);
    fork
      begin
        automatic logic v = sel ? hit_inv : hit;
        #(T_MUX) mux_o = v;
      end
    join_none
  end

  always begin
    @(mux_o);
    fork
      begin
        automatic logic v = mux_o;
        #(T_ROUTE) route_o = v;
      end
    join_none
  end

  always begin
    @(route_o);
    fork
      begin
        automatic logic v = route_o;
        automatic real  d = t_idelay;
        #(d) ddly = v;
      end
    join_none
  end

  always begin
    @(ddly);
    fork
      begin
        automatic logic v = ~ddly;
        #(T_INV) hit_inv = v;
      end
    join_none
  end

endmodule
