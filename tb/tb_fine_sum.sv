// tb_fine_sum: builds a schedule of hits, each M edges one T_OSC apart with a
// random T_OSC between 8.05 and 9.5 bins (5.03 to 5.94 ns) and random start,
// presents the edges of every 16-bin system period as the output encoder would,
// and checks each result against sum(n_i - 16 * W_0) worked out from the edge
// bin numbers n_i (W_0: period of the first edge) and against the coarse value
// driven in that period. Runs M = 8 and M = 4, with hit gaps down to one
// T_OSC so that one measurement can end and the next begin in one period.
// The oscillation periods reported on per must equal n_{i+1} - n_i, in order.
`timescale 1ps / 1fs
module tb_fine_sum;
  import tdc_pkg::*;
  localparam int NWIN = 6000;
  logic clk = 1'b0, rst = 1'b1;
  // Reset is high from time 0; the short low pulse gives the asynchronous
  // resets a real rising edge even in a two-state simulation.
  initial begin #1 rst = 1'b0; #1 rst = 1'b1; end
  logic [M_W-1:0] m_cycles = M_W'(M_DEFAULT);
  edge_pair_t edges = '0;
  logic [COARSE_W-1:0] coarse = '0;
  logic valid;
  tdc_event_t ev;
  osc_period_t per;
  int perq [$];
  int n_per = 0;
  int npos [NWIN];
  int pos_a [NWIN];
  int pos_b [NWIN];
  bit ends_here [NWIN];
  bit starts_here [NWIN];
  tdc_event_t expq [$];
  int checks = 0, failures = 0, got = 0, n_two = 0, n_one = 0, n_endstart = 0;

  fine_sum dut (.clk(clk), .rst(rst), .m_cycles(m_cycles), .edges(edges), .coarse(coarse),
                .valid(valid), .ev(ev), .per(per));

  always #5000 clk = ~clk;

  // Schedule hits with M measurements each into windows [first, last).
  task automatic schedule(input int m, input int first, input int last);
    real x = real'(first * 16) + 3.0;
    forever begin
      real tosc;
      int n0, w0, fine;
      tosc = 8.05 + real'($urandom_range(0, 1450)) / 1000.0;
      n0 = int'($floor(x));
      w0 = n0 / 16;
      if ((n0 + int'(tosc * m)) / 16 + 2 >= last) break;
      fine = 0;
      for (int i = 0; i < m; i++) begin
        int n, w;
        n = int'($floor(x + real'(i) * tosc));
        if (i > 0) perq.push_back(n - int'($floor(x + real'(i - 1) * tosc)));
        w = n / 16;
        if (npos[w] == 0) pos_a[w] = n % 16; else pos_b[w] = n % 16;
        npos[w]++;
        if (i == 0) starts_here[w] = 1'b1;
        if (i == m - 1) ends_here[w] = 1'b1;
        fine += n - 16 * w0;
      end
      expq.push_back({COARSE_W'(w0), FINE_W'(fine)});
      // Next hit: a gap of one to three oscillation periods after the last edge.
      x = x + real'(m - 1) * tosc + tosc * (1.0 + real'($urandom_range(0, 2000)) / 1000.0);
    end
  endtask

  always @(posedge clk) if (!rst) begin
    for (int k = 0; k < int'(per.n); k++) begin
      int d, e;
      d = (k == 0) ? int'(per.d0) : int'(per.d1);
      e = (perq.size() != 0) ? perq.pop_front() : -1;
      n_per++;
      checks++;
      if (d != e) begin
        failures++;
        if (failures < 10) $display("FAIL period %0d bins, expected %0d", d, e);
      end
    end
  end

  always @(posedge clk) if (valid) begin
    tdc_event_t e;
    got++;
    checks++;
    if (expq.size() == 0) begin
      failures++;
      $display("FAIL unexpected event %h", ev);
    end else begin
      e = expq.pop_front();
      if (ev !== e) begin
        failures++;
        if (failures < 10) $display("FAIL event coarse=%0d fine=%0d expected coarse=%0d fine=%0d",
                                    ev.coarse, ev.fine, e.coarse, e.fine);
      end
    end
  end

  initial begin
    int total;
    foreach (npos[i]) begin npos[i] = 0; ends_here[i] = 0; starts_here[i] = 0; end
    schedule(8, 4, NWIN / 2);
    schedule(4, NWIN / 2 + 4, NWIN - 4);
    total = expq.size();
    for (int w = 0; w < NWIN; w++) begin
      if (npos[w] > 2) begin failures++; $display("FAIL schedule has %0d edges in window %0d", npos[w], w); end
      if (npos[w] == 2) n_two++;
      if (npos[w] == 1) n_one++;
      if (ends_here[w] && starts_here[w]) n_endstart++;
    end
    #12000 rst = 1'b0;
    for (int w = 0; w < NWIN; w++) begin
      @(negedge clk);
      m_cycles = M_W'((w < NWIN / 2) ? 8 : 4);
      coarse = COARSE_W'(w);
      edges.n = 2'(npos[w]);
      edges.pos0 = POS_W'(pos_a[w]);
      edges.pos1 = POS_W'(pos_b[w]);
    end
    @(negedge clk) edges = '0;
    repeat (4) @(negedge clk);
    checks++;
    if (got != total || expq.size() != 0 || perq.size() != 0) begin
      failures++;
      $display("FAIL %0d events of %0d, %0d periods missing", got, total, perq.size());
    end
    $display("windows with two edges %0d, one edge %0d, end and start together %0d", n_two, n_one, n_endstart);
    checks++;
    if (n_two == 0 || n_one == 0 || n_endstart == 0) begin failures++; $display("FAIL a case was not reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
