// tdc_channel: one complete TDC channel, input pulse to buffered event words.
//
// Signal path: hit_latch catches the input edge as HIT; the oscillation
// launcher (osc_delay_loop ring and selector) sends it to the ISERDES DDLY
// input and then, with the MUX switched to the inverted feedback, makes it
// oscillate for M cycles, so the ISERDES sees M rising edges one T_OSC apart.
// iserdes_os samples DDLY with four 400 MHz phases (625 ps bins); buffer4x4,
// one_out_n and output_encoder form the pipelined encoder, which turns each
// 10 ns system period into up to two edge positions; fine_sum adds the M
// positions into the fine time (78.125 ps LSB for M = 8) and tags it with the
// coarse time and reports the measured oscillation periods; packager buffers
// the events. The MUX select doubles as the latch clear, so input edges during
// the M cycles are ignored (dead time).
//
// The ring (osc_delay_loop) is a behavioural model with delays; the rest is
// synthesizable. Interface: see ports. m_cycles and tap are static settings.
// hit_inv, the ring's inverter output, is brought out of the ring model only so
// that the MUX input 1 path is visible; it feeds back inside the model.
`timescale 1ps / 1fs
module tdc_channel
  import tdc_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 16,
  parameter real         T_MUX      = 250.0,
  parameter real         T_INV      = 250.0,
  parameter real         T_ROUTE    = 789.5,
  parameter real         T_IDELAY0  = 0.0,
  parameter real         TAP        = 52.083
) (
  input  logic                rst,
  input  logic                clk0,      // 400 MHz, 0 deg
  input  logic                clk90,     // 400 MHz, 90 deg
  input  logic                clk180,    // 400 MHz, 180 deg
  input  logic                clk270,    // 400 MHz, 270 deg
  input  logic                clk_sys,   // 100 MHz, 0 deg
  input  logic [M_W-1:0]      m_cycles,  // M, measurements per hit
  input  logic [TAP_W-1:0]    tap,       // IDELAY tap setting
  input  logic                sig_in,    // input pulse
  input  logic [COARSE_W-1:0] coarse,    // shared coarse counter
  output logic                out_valid,
  input  logic                out_ready,
  output tdc_event_t          out_ev,
  output logic                overflow,
  output logic                busy,      // launcher oscillating (SEL)
  output osc_period_t         per        // measured T_OSC values (Eq. 3)
);

  logic             hit, sel, ddly, hit_inv;
  logic [PHASES-1:0] q;
  logic [CODE_W-1:0] code, mark;
  edge_pair_t        edges;
  logic              sum_valid;
  tdc_event_t        sum_ev;

  hit_latch u_latch (
    .sig_in (sig_in),
    .clr    (rst | sel),
    .hit    (hit)
  );

  osc_delay_loop #(
    .T_MUX(T_MUX), .T_INV(T_INV), .T_ROUTE(T_ROUTE),
    .T_IDELAY0(T_IDELAY0), .TAP(TAP)
  ) u_loop (
    .hit     (hit),
    .sel     (sel),
    .tap     (tap),
    .ddly    (ddly),
    .hit_inv (hit_inv)
  );

  selector u_sel (
    .rst      (rst),
    .osc      (ddly),
    .m_cycles (m_cycles),
    .sel      (sel)
  );

  iserdes_os u_iserdes (
    .rst   (rst),
    .ddly  (ddly),
    .clk   (clk0),
    .oclk  (clk90),
    .clkb  (clk180),
    .oclkb (clk270),
    .q     (q)
  );

  buffer4x4 u_buf (
    .rst      (rst),
    .clk_fast (clk0),
    .clk_sys  (clk_sys),
    .q        (q),
    .code     (code)
  );

  one_out_n u_one (
    .clk  (clk_sys),
    .rst  (rst),
    .code (code),
    .mark (mark)
  );

  output_encoder u_enc (
    .clk   (clk_sys),
    .rst   (rst),
    .mark  (mark),
    .edges (edges)
  );

  fine_sum u_sum (
    .clk      (clk_sys),
    .rst      (rst),
    .m_cycles (m_cycles),
    .edges    (edges),
    .coarse   (coarse),
    .valid    (sum_valid),
    .ev       (sum_ev),
    .per      (per)
  );

  packager #(.DEPTH(FIFO_DEPTH)) u_pack (
    .clk       (clk_sys),
    .rst       (rst),
    .in_valid  (sum_valid),
    .in_ev     (sum_ev),
    .out_valid (out_valid),
    .out_ready (out_ready),
    .out_ev    (out_ev),
    .overflow  (overflow)
  );

  assign busy = sel;

endmodule
