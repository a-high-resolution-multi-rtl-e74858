// tb_packager: random writes and random read-ready against a queue model:
// every event read must be the oldest one written and not dropped, events
// offered while full are dropped and set the overflow flag, which stays set.
`timescale 1ps / 1fs
module tb_packager;
  import tdc_pkg::*;
  localparam int DEPTH = 16;
  logic clk = 1'b0, rst = 1'b1;
  // Reset is high from time 0; the short low pulse gives the asynchronous
  // resets a real rising edge even in a two-state simulation.
  initial begin #1 rst = 1'b0; #1 rst = 1'b1; end
  logic in_valid = 1'b0, out_valid, out_ready = 1'b0, overflow;
  tdc_event_t in_ev = '0, out_ev;
  tdc_event_t model [$];
  int checks = 0, failures = 0, drops = 0, reads = 0;
  bit exp_ovf = 1'b0, full_before;

  packager #(.DEPTH(DEPTH)) dut (.clk(clk), .rst(rst), .in_valid(in_valid), .in_ev(in_ev),
    .out_valid(out_valid), .out_ready(out_ready), .out_ev(out_ev), .overflow(overflow));

  always #5000 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #12000 rst = 1'b0;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      // Phase 1 fills (reader slow), phase 2 drains (reader fast).
      int wr_pct, rd_pct;
      wr_pct = (cyc % 1000 < 500) ? 70 : 30;
      rd_pct = (cyc % 1000 < 500) ? 20 : 90;
      @(negedge clk);
      in_valid  = ($urandom_range(0, 99) < wr_pct);
      in_ev     = {COARSE_W'({$urandom, $urandom}), FINE_W'($urandom)};
      out_ready = ($urandom_range(0, 99) < rd_pct);
      check(out_valid == (model.size() != 0), "out_valid matches fill");
      if (out_valid && model.size() != 0) check(out_ev == model[0], "read order");
      @(posedge clk);
      full_before = (model.size() == DEPTH);
      if (out_valid && out_ready) begin void'(model.pop_front()); reads++; end
      if (in_valid) begin
        if (!full_before) model.push_back(in_ev);
        else begin drops++; exp_ovf = 1'b1; end
      end
      #1 check(overflow == exp_ovf, "overflow flag");
    end
    check(drops > 0, "overflow case reached");
    check(reads > 100, "reads happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
