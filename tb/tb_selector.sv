// tb_selector: drives the selector's osc input with an ideal oscillator that
// starts on a hit and stops when SEL falls, and checks that SEL rises on the
// first rising edge, that exactly M rising edges happen while SEL is high, that
// SEL falls on the M-th falling edge, and that later hits restart it; for
// M = 8 and M = 3.
`timescale 1ps / 1fs
module tb_selector;
  import tdc_pkg::*;
  logic rst = 1'b1, osc = 1'b0, sel;
  // Reset is high from time 0; the short low pulse gives the asynchronous
  // resets a real rising edge even in a two-state simulation.
  initial begin #1 rst = 1'b0; #1 rst = 1'b1; end
  logic [M_W-1:0] m_cycles = M_W'(M_DEFAULT);
  int checks = 0, failures = 0;

  selector dut (.rst(rst), .osc(osc), .m_cycles(m_cycles), .sel(sel));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // One hit: osc rises, then the loop runs until SEL has been low at a
  // falling edge, as the real ring does. Returns the number of rising edges.
  task automatic run_hit(input int half, output int rises);
    rises = 0;
    osc = 1'b1; rises++;
    #1 check(sel == 1'b1, "sel set by first rising edge");
    #(half - 1);
    forever begin
      osc = 1'b0;
      #1;
      if (!sel) break;
      #(half - 1);
      osc = 1'b1; rises++;
      #(half);
    end
  endtask

  initial begin
    int r;
    #100 rst = 1'b0;
    #100 check(sel == 1'b0, "idle after reset");
    for (int t = 0; t < 12; t++) begin
      int mval;
      mval = (t < 6) ? 8 : 3;
      m_cycles = M_W'(mval);
      #500;
      run_hit(2500 + $urandom_range(0, 100), r);
      check(r == mval, $sformatf("rising edges %0d expected %0d", r, mval));
      check(sel == 1'b0, "sel low after M cycles");
      #3000 check(sel == 1'b0, "sel stays low while osc idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
