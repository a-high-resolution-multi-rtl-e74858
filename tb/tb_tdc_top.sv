// tb_tdc_top: end-to-end test of the two-channel TDC at its default sizes.
//
// The clocks are generated as by the PLL: clk0 and clk90 at 400 MHz, 90 degrees
// apart, and clk_sys at 100 MHz, all edge aligned. Input pulses go to both
// channels, channel 1 behind channel 0 by a cable delay, with its own IDELAY
// tap. For every accepted pulse the testbench works out the M DDLY edge times
// from the loop delays, t_i = t_hit + t_MUX + t_route + t_IDELAY + i * T_OSC
// with T_OSC = 2 (t_MUX + t_route + t_IDELAY + t_INV), turns them into 625 ps
// sample numbers n_i = ceil(t_i / 625 ps), and from these the expected coarse
// and fine values; each event read from the channel's stream must match.
//
// Mechanisms made to happen and counted: pulses ignored during the dead time,
// M = 8 and M = 4 modes, periods with two edges, a measurement ending and the
// next one starting in the same 10 ns period, back-to-back hits at the paper's
// 20 Mevent/s (50 ns apart), and FIFO overflow with the reader stalled. The
// oscillation periods on per are checked one by one against n_{i+1} - n_i.
`timescale 1ps / 1fs
module tb_tdc_top;
  import tdc_pkg::*;
  localparam real T_MUX = 250.0, T_INV = 250.0, T_ROUTE = 789.5, TAP = 52.083;
  localparam real BIN = 625.0;
  localparam int  W0  = 2;         // reset released 300 ps after clk_sys edge W0
  localparam int  COARSE_OFS = 5;  // pipeline: coarse = window + COARSE_OFS - W0

  logic rst = 1'b1, clk0 = 1'b0, clk90 = 1'b0, clk_sys = 1'b0;
  // Reset is high from time 0; the short low pulse gives the asynchronous
  // resets a real rising edge even in a two-state simulation.
  initial begin #1 rst = 1'b0; #1 rst = 1'b1; end
  logic [M_W-1:0]   m_cycles = M_W'(M_DEFAULT);
  logic [TAP_W-1:0] tap [2];
  logic [1:0] sig_in = '0, out_valid, out_ready = 2'b11, overflow, busy;
  tdc_event_t out_ev [2];
  osc_period_t per [2];
  int perq [2][$];
  int n_per [2] = '{0, 0};
  real sum_per [2] = '{0.0, 0.0}, sumsq_per [2] = '{0.0, 0.0};

  tdc_event_t expq [2][$];
  real  ready_at [2];     // time after which the channel accepts a new pulse
  int   checks = 0, failures = 0;
  int   n_events = 0, n_ignored = 0, n_two = 0, n_endstart = 0, n_m4 = 0, n_m8 = 0;
  int   n_b2b = 0, n_dropped = 0;
  int   last_win [2] = '{-100, -100};
  bit   stall1 = 1'b0;
  real  last_hit [2] = '{-1.0e9, -1.0e9};

  tdc_top dut (.rst(rst), .clk0(clk0), .clk90(clk90), .clk_sys(clk_sys), .m_cycles(m_cycles),
               .tap(tap), .sig_in(sig_in), .out_valid(out_valid), .out_ready(out_ready),
               .out_ev(out_ev), .overflow(overflow), .busy(busy), .per(per));

  // Clocks: one step every 625 ps; clk0 rises at steps 4k, clk90 at 4k+1,
  // clk_sys at 16k.
  initial begin
    forever begin
      for (int s = 0; s < 16; s++) begin
        clk0    = (s % 4) < 2;
        clk90   = ((s + 3) % 4) < 2;
        clk_sys = s < 8;
        #625;
      end
    end
  end

  function automatic real dly(input int c);
    return T_MUX + T_ROUTE + real'(tap[c]) * TAP;
  endfunction

  function automatic bit near_grid(input real t);
    real r = t - BIN * $floor(t / BIN);
    return (r < 2.0) || (r > BIN - 2.0);
  endfunction

  // Expected result of a pulse at time t on channel c; false if it falls on
  // the dead time.
  function automatic bit predict(input int c, input real t);
    real tosc = 2.0 * (dly(c) + T_INV);
    int  m = int'(m_cycles);
    int  n, w, wfirst, fine, nprev;
    if (t < ready_at[c]) begin
      n_ignored++;
      return 1'b0;
    end
    fine = 0;
    wfirst = 0;
    nprev = 0;
    for (int i = 0; i < m; i++) begin
      n = int'($ceil((t + dly(c) + real'(i) * tosc) / BIN));
      if (i > 0) perq[c].push_back(n - nprev);
      nprev = n;
      w = int'($floor(real'(n - 8) / 16.0));
      if (i == 0) begin
        wfirst = w;
        if (w == last_win[c]) n_endstart++;
      end else if (w == last_win[c]) n_two++;
      last_win[c] = w;
      fine += n - 8 - 16 * wfirst;
    end
    expq[c].push_back({COARSE_W'(wfirst + COARSE_OFS - W0), FINE_W'(fine)});
    if (m == 4) n_m4++; else n_m8++;
    if (t - last_hit[c] < 50_001.0) n_b2b++;
    last_hit[c] = t;
    ready_at[c] = t + dly(c) + (real'(m) - 0.5) * tosc + 20.0;
    return 1'b1;
  endfunction

  // One input pulse at the current time plus cable delay on channel 1.
  task automatic pulse(input real cable);
    real t0 = $realtime;
    real t1 = t0 + cable;
    if (t1 < ready_at[1] + 30.0 && t1 > ready_at[1] - 30.0) t1 += 61.0;
    if (t0 < ready_at[0] + 30.0 && t0 > ready_at[0] - 30.0) return;
    void'(predict(0, t0));
    void'(predict(1, t1));
    fork
      begin sig_in[0] = 1'b1; #(1500) sig_in[0] = 1'b0; end
      begin #(t1 - t0) sig_in[1] = 1'b1; #(1500) sig_in[1] = 1'b0; end
    join_none
  endtask

  // A pulse time that keeps every DDLY edge of both channels off the sample grid.
  task automatic wait_clean(input real gap, input real cable);
    #(gap);
    for (int tries = 0; tries < 200; tries++) begin
      bit bad = 1'b0;
      for (int c = 0; c < 2; c++)
        for (int i = 0; i < 8; i++)
          if (near_grid($realtime + (c == 1 ? cable : 0.0) + dly(c) + real'(i) * 2.0 * (dly(c) + T_INV)))
            bad = 1'b1;
      if (!bad) break;
      #7;
    end
  endtask

  // Readout.
  // Oscillation periods: each reported distance must be the next n_{i+1} - n_i.
  always @(posedge clk_sys) begin
    for (int c = 0; c < 2; c++) begin
      for (int k = 0; !rst && k < int'(per[c].n); k++) begin
        int d, e;
        d = (k == 0) ? int'(per[c].d0) : int'(per[c].d1);
        e = (perq[c].size() != 0) ? perq[c].pop_front() : -1;
        checks++;
        n_per[c]++;
        sum_per[c] += real'(d);
        sumsq_per[c] += real'(d) * real'(d);
        if (d != e) begin
          failures++;
          if (failures < 10) $display("FAIL ch%0d period %0d bins, expected %0d", c, d, e);
        end
      end
    end
  end

  always @(posedge clk_sys) begin
    for (int c = 0; c < 2; c++) begin
      if (!rst && out_valid[c] && out_ready[c]) begin
        tdc_event_t e;
        checks++;
        n_events++;
        if (expq[c].size() == 0) begin
          failures++;
          $display("FAIL ch%0d unexpected event coarse=%0d fine=%0d", c, out_ev[c].coarse, out_ev[c].fine);
        end else begin
          e = expq[c].pop_front();
          if (out_ev[c] !== e) begin
            failures++;
            if (failures < 12)
              $display("FAIL ch%0d event coarse=%0d fine=%0d expected coarse=%0d fine=%0d at %0t",
                       c, out_ev[c].coarse, out_ev[c].fine, e.coarse, e.fine, $time);
          end
        end
      end
    end
  end

  task automatic run_phase(input int hits, input real cable);
    for (int h = 0; h < hits; h++) begin
      real gap;
      case ($urandom_range(0, 3))
        0: gap = 50_000.0;                                   // 20 Mevent/s
        1: gap = 10_000.0 + real'($urandom_range(0, 28_000)); // inside the dead time
        2: gap = 40_500.0 + real'($urandom_range(0, 5_000));  // just after it
        default: gap = 50_000.0 + real'($urandom_range(0, 250_000));
      endcase
      wait_clean(gap, cable);
      pulse(cable);
    end
    #400_000;   // let the pipeline drain before settings change
  endtask

  initial begin
    real cable;
    cable = 2539.0;
    tap[0] = 5'd24;
    tap[1] = 5'd24;
    ready_at[0] = 0.0;
    ready_at[1] = 0.0;
    #(W0 * 10_000 + 300) rst = 1'b0;
    #100_000;
    // Phase 1: M = 8, equal taps.
    run_phase(150, cable);
    // Phase 2: M = 4, channel 1 on a different tap.
    m_cycles = 4'd4;
    tap[1] = 5'd27;
    #1000;
    run_phase(100, cable + 417.0);
    // Phase 3: M = 8 again, reader of channel 1 stalled until its FIFO overflows.
    m_cycles = 4'd8;
    tap[1] = 5'd24;
    #1000;
    out_ready[1] = 1'b0;
    stall1 = 1'b1;
    for (int h = 0; h < 24; h++) begin
      wait_clean(60_000.0, cable);
      pulse(cable);
    end
    #100_000;
    checks++;
    if (!overflow[1]) begin failures++; $display("FAIL channel 1 overflow not flagged"); end
    checks++;
    if (overflow[0]) begin failures++; $display("FAIL channel 0 overflow flagged"); end
    // Only the first 16 queued events of channel 1 were kept.
    n_dropped = expq[1].size() - 16;
    while (expq[1].size() > 16) void'(expq[1].pop_back());
    out_ready[1] = 1'b1;
    #1_000_000;
    for (int c = 0; c < 2; c++) begin
      checks++;
      if (expq[c].size() != 0) begin
        failures++;
        $display("FAIL ch%0d: %0d expected events never read", c, expq[c].size());
      end
      checks++;
      if (perq[c].size() != 0 || n_per[c] == 0) begin
        failures++;
        $display("FAIL ch%0d: %0d periods reported, %0d missing", c, n_per[c], perq[c].size());
      end
    end
    $display("oscillation periods reported: ch0 %0d, ch1 %0d", n_per[0], n_per[1]);
    $display("events %0d, ignored in dead time %0d, back-to-back %0d, M=8 %0d, M=4 %0d",
             n_events, n_ignored, n_b2b, n_m8, n_m4);
    $display("two edges in a period %0d, end and start in one period %0d, dropped on overflow %0d",
             n_two, n_endstart, n_dropped);
    checks++;
    if (n_events == 0 || n_ignored == 0 || n_b2b == 0 || n_m8 == 0 || n_m4 == 0 ||
        n_two == 0 || n_endstart == 0 || n_dropped <= 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #400_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
