// tb_code_density: code-density test of both channels at default sizes.
//
// Pulses at uniformly random times (at least 60 ns apart, so none falls in the
// dead time) go to both channels. Every event is checked against the fine and
// coarse values worked out from the DDLY edge times, as in tb_tdc_top; the
// fine-code histogram of each channel is then reduced to its range, number of
// codes, DNL and INL, which are printed. With M = 8 the fine code must take
// 127 to 129 distinct consecutive values, i.e. an effective bin of 625 ps / 8,
// and with the loop's T_OSC close to 8 * 625 + 625 / 8 ps the DNL must stay
// within +-0.6 LSB (the delays here have no jitter). Every oscillation period
// on per is checked too, and their mean and RMS are compared with the loop's
// T_OSC and with the spread that 625 ps quantisation alone gives.
`timescale 1ps / 1fs
module tb_code_density;
  import tdc_pkg::*;
  localparam real T_MUX = 250.0, T_INV = 250.0, T_ROUTE = 789.5, TAP = 52.083;
  localparam real BIN = 625.0;
  localparam int  W0 = 2, COARSE_OFS = 5, NHITS = 6000, NCODE = 1 << FINE_W;

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
  int hist [2][NCODE];
  int checks = 0, failures = 0, n_events = 0;

  tdc_top dut (.rst(rst), .clk0(clk0), .clk90(clk90), .clk_sys(clk_sys), .m_cycles(m_cycles),
               .tap(tap), .sig_in(sig_in), .out_valid(out_valid), .out_ready(out_ready),
               .out_ev(out_ev), .overflow(overflow), .busy(busy), .per(per));

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

  function automatic void predict(input int c, input real t);
    real tosc = 2.0 * (dly(c) + T_INV);
    int  n, w, wfirst = 0, fine = 0, nprev = 0;
    for (int i = 0; i < int'(m_cycles); i++) begin
      n = int'($ceil((t + dly(c) + real'(i) * tosc) / BIN));
      if (i > 0) perq[c].push_back(n - nprev);
      nprev = n;
      w = int'($floor(real'(n - 8) / 16.0));
      if (i == 0) wfirst = w;
      fine += n - 8 - 16 * wfirst;
    end
    expq[c].push_back({COARSE_W'(wfirst + COARSE_OFS - W0), FINE_W'(fine)});
  endfunction

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
      if (!rst && out_valid[c]) begin
        tdc_event_t e;
        checks++;
        n_events++;
        e = (expq[c].size() != 0) ? expq[c].pop_front() : '0;
        if (out_ev[c] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL ch%0d coarse=%0d fine=%0d expected coarse=%0d fine=%0d",
                                      c, out_ev[c].coarse, out_ev[c].fine, e.coarse, e.fine);
        end
        hist[c][out_ev[c].fine]++;
      end
    end
  end

  initial begin
    foreach (hist[c, k]) hist[c][k] = 0;
    tap[0] = 5'd24;
    tap[1] = 5'd24;
    #(W0 * 10_000 + 300) rst = 1'b0;
    #100_000;
    for (int h = 0; h < NHITS; h++) begin
      real t;
      #(60_000 + $urandom_range(0, 9_999));
      #($urandom_range(0, 999) * 0.001);
      t = $realtime;
      predict(0, t);
      predict(1, t + 3_001.0);
      fork
        begin sig_in[0] = 1'b1; #1500 sig_in[0] = 1'b0; end
        begin #3001 sig_in[1] = 1'b1; #1500 sig_in[1] = 1'b0; end
      join_none
    end
    #500_000;
    for (int c = 0; c < 2; c++) begin
      int lo, hi, ncodes, total;
      real mean, dnl, dmin, dmax, inl, imin, imax;
      lo = NCODE; hi = -1; ncodes = 0; total = 0;
      dmin = 9.0; dmax = -9.0; inl = 0.0; imin = 9.0; imax = -9.0;
      for (int k = 0; k < NCODE; k++)
        if (hist[c][k] != 0) begin
          if (k < lo) lo = k;
          hi = k;
          ncodes++;
          total += hist[c][k];
        end
      mean = real'(total) / real'(ncodes);
      for (int k = lo; k <= hi; k++) begin
        dnl = real'(hist[c][k]) / mean - 1.0;
        inl += dnl;
        if (dnl < dmin) dmin = dnl;
        if (dnl > dmax) dmax = dnl;
        if (inl < imin) imin = inl;
        if (inl > imax) imax = inl;
      end
      $display("ch%0d: %0d events, fine code %0d..%0d, %0d codes, DNL %0.2f..%0.2f LSB, INL %0.2f..%0.2f LSB",
               c, total, lo, hi, ncodes, dmin, dmax, imin, imax);
      checks++;
      if (ncodes < 127 || ncodes > 129 || hi - lo + 1 != ncodes) begin
        failures++;
        $display("FAIL ch%0d: fine code does not span 128 consecutive codes", c);
      end
      checks++;
      if (dmin < -0.6 || dmax > 0.6) begin
        failures++;
        $display("FAIL ch%0d: DNL out of +-0.6 LSB", c);
      end
      checks++;
      if (expq[c].size() != 0) begin failures++; $display("FAIL ch%0d events missing", c); end
      // T_OSC histogram from the channel's own period output.
      begin
        real tosc, pm, prms, p9, rms_q;
        tosc  = 2.0 * (dly(c) + T_INV);
        pm    = BIN * sum_per[c] / real'(n_per[c]);
        prms  = BIN * $sqrt(sumsq_per[c] / real'(n_per[c]) - (sum_per[c] / real'(n_per[c])) ** 2);
        p9    = tosc / BIN - $floor(tosc / BIN);
        rms_q = BIN * $sqrt(p9 * (1.0 - p9));
        $display("ch%0d: %0d T_OSC values, mean %0.1f ps (loop %0.1f ps), RMS %0.1f ps (quantisation %0.1f ps)",
                 c, n_per[c], pm, tosc, prms, rms_q);
        checks++;
        if (n_per[c] != (int'(m_cycles) - 1) * total || perq[c].size() != 0) begin
          failures++;
          $display("FAIL ch%0d: %0d periods for %0d events", c, n_per[c], total);
        end
        checks++;
        if (pm < tosc - 5.0 || pm > tosc + 5.0 || prms < rms_q - 10.0 || prms > rms_q + 10.0) begin
          failures++;
          $display("FAIL ch%0d: T_OSC histogram off", c);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2_000_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
