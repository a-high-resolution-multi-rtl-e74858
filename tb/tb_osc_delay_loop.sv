// tb_osc_delay_loop: checks the ring model's delays against the delay sum
// worked out here: HIT to DDLY is t_MUX + t_routing + t_IDELAY(tap), the
// oscillation period with SEL = 1 is twice that plus 2 t_INV, and the ring
// stops (DDLY stays low) when SEL falls while DDLY is low; for several taps.
`timescale 1ps / 1fs
module tb_osc_delay_loop;
  import tdc_pkg::*;
  localparam real TM = 250.0, TI = 250.0, TR = 789.5, TAPPS = 52.083;
  logic hit = 1'b0, sel = 1'b0, ddly, hit_inv;
  logic [TAP_W-1:0] tap;
  int checks = 0, failures = 0;
  realtime t0, t1, t2;

  osc_delay_loop #(.T_MUX(TM), .T_INV(TI), .T_ROUTE(TR), .T_IDELAY0(0.0), .TAP(TAPPS))
    dut (.hit(hit), .sel(sel), .tap(tap), .ddly(ddly), .hit_inv(hit_inv));

  task automatic near(input real got, input real exp, input string what);
    checks++;
    if (got < exp - 0.01 || got > exp + 0.01) begin
      failures++;
      $display("FAIL %s: %f ps expected %f ps", what, got, exp);
    end
  endtask

  initial begin
    for (int k = 0; k < 6; k++) begin
      real dl;
      tap = TAP_W'(k * 5 + 4);
      dl = TM + TR + real'(tap) * TAPPS;
      #20000;
      hit = 1'b1; t0 = $realtime;
      @(posedge ddly) t1 = $realtime;
      near(t1 - t0, dl, "hit to ddly delay");
      sel = 1'b1; hit = 1'b0;
      @(negedge ddly);
      @(posedge ddly) t1 = $realtime;
      @(posedge ddly) t2 = $realtime;
      near(t2 - t1, 2.0 * (dl + TI), "oscillation period");
      @(negedge ddly) sel = 1'b0;
      #20000;
      checks++;
      if (ddly !== 1'b0) begin failures++; $display("FAIL ring did not stop"); end
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
