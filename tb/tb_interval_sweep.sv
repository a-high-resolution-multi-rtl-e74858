// tb_interval_sweep: time-interval sweeps between the two channels at default
// sizes. Channel 1 receives each pulse a set interval after channel 0; each
// event pair is turned into a time, t = (coarse * 16 * M + fine) * 625 ps / M,
// and the difference of the two channels' times is averaged over pulses at
// random phases. Sweep A: 0 to 2 ns in 100 ps steps; sweep B: 0 to 2 us in
// 50 ns steps. The mean measured interval must track the set one within 30 ps,
// and the RMS of the single-pulse error must stay below 45 ps (quantisation
// only: the model has no jitter). Mean and RMS per step are printed.
`timescale 1ps / 1fs
module tb_interval_sweep;
  import tdc_pkg::*;
  localparam int W0 = 2;

  logic rst = 1'b1, clk0 = 1'b0, clk90 = 1'b0, clk_sys = 1'b0;
  // Reset is high from time 0; the short low pulse gives the asynchronous
  // resets a real rising edge even in a two-state simulation.
  initial begin #1 rst = 1'b0; #1 rst = 1'b1; end
  logic [M_W-1:0]   m_cycles = M_W'(M_DEFAULT);
  logic [TAP_W-1:0] tap [2];
  logic [1:0] sig_in = '0, out_valid, out_ready = 2'b11, overflow, busy;
  tdc_event_t out_ev [2];
  osc_period_t per [2];
  real tq [2][$];
  int checks = 0, failures = 0, steps = 0;

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

  always @(posedge clk_sys)
    for (int c = 0; c < 2; c++)
      if (!rst && out_valid[c])
        tq[c].push_back((real'(out_ev[c].coarse) * 16.0 * real'(m_cycles) + real'(out_ev[c].fine))
                        * 625.0 / real'(m_cycles));

  // n pulse pairs with channel 1 'ival' ps behind channel 0; returns the mean
  // and RMS of measured minus set interval.
  task automatic step(input real ival, input int n, output real mean, output real rms);
    real s = 0.0, s2 = 0.0;
    for (int h = 0; h < n; h++) begin
      #(60_000 + $urandom_range(0, 9_999));
      #($urandom_range(0, 999) * 0.001);
      fork
        begin sig_in[0] = 1'b1; #1500 sig_in[0] = 1'b0; end
        begin #(ival) sig_in[1] = 1'b1; #1500 sig_in[1] = 1'b0; end
      join_none
      #(ival);
    end
    #300_000;
    checks++;
    if (tq[0].size() != n || tq[1].size() != n) begin
      failures++;
      $display("FAIL interval %0.0f ps: %0d/%0d events for %0d pulses", ival, tq[0].size(), tq[1].size(), n);
      n = 0;
    end
    for (int h = 0; h < n; h++) begin
      real e;
      e = tq[1][h] - tq[0][h] - ival;
      s += e;
      s2 += e * e;
    end
    tq[0].delete();
    tq[1].delete();
    mean = (n > 0) ? s / real'(n) : 1.0e9;
    rms  = (n > 0) ? $sqrt(s2 / real'(n) - mean * mean) : 1.0e9;
  endtask

  task automatic judge(input real ival, input real mean, input real rms);
    steps++;
    $display("interval %10.1f ps: mean error %6.1f ps, RMS %5.1f ps", ival, mean, rms);
    checks++;
    if (mean < -30.0 || mean > 30.0 || rms > 45.0) begin
      failures++;
      $display("FAIL interval %0.1f ps out of limits", ival);
    end
  endtask

  initial begin
    real mean, rms;
    tap[0] = 5'd24;
    tap[1] = 5'd24;
    #(W0 * 10_000 + 300) rst = 1'b0;
    #100_000;
    for (int k = 0; k <= 20; k++) begin
      step(real'(k) * 100.0, 100, mean, rms);
      judge(real'(k) * 100.0, mean, rms);
    end
    for (int k = 0; k <= 40; k++) begin
      step(real'(k) * 50_000.0 + 7.0, 25, mean, rms);
      judge(real'(k) * 50_000.0 + 7.0, mean, rms);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20_000_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
