// tb_iserdes_os: drives DDLY with random edges (never on a clock edge) and four
// 400 MHz phase clocks, samples DDLY itself at every 625 ps phase instant, and
// checks that q after the clk edge two periods later holds the four samples of
// that period, earliest in the MSB.
`timescale 1ps / 1fs
module tb_iserdes_os;
  logic rst = 1'b1, ddly = 1'b0;
  // Reset is high from time 0; the short low pulse gives the asynchronous
  // resets a real rising edge even in a two-state simulation.
  initial begin #1 rst = 1'b0; #1 rst = 1'b1; end
  logic clk = 1'b0, oclk = 1'b0, clkb = 1'b1, oclkb = 1'b1;
  logic [3:0] q;
  logic [3:0] smp [0:1023];   // tb's own samples, one word per clk period
  int checks = 0, failures = 0;

  iserdes_os dut (.rst(rst), .ddly(ddly), .clk(clk), .oclk(oclk), .clkb(clkb),
                  .oclkb(oclkb), .q(q));

  // Phase clocks: step s every 625 ps; clk rises at s%4==0, oclk at 1, clkb at 2, oclkb at 3.
  initial begin
    for (int s = 0; s < 4 * 1000; s++) begin
      clk  = (s % 4) < 2;
      oclk = ((s + 3) % 4) < 2;
      clkb = ~clk;
      oclkb = ~oclk;
      #625;
    end
  end

  // The testbench's reference sampler, at the same instants; the period index
  // comes from the time itself.
  function automatic int period_now();
    return int'($floor($realtime / 2500.0)) % 1024;
  endfunction
  always @(posedge clk)   smp[period_now()][3] = ddly;
  always @(posedge oclk)  smp[period_now()][2] = ddly;
  always @(posedge clkb)  smp[period_now()][1] = ddly;
  always @(posedge oclkb) smp[period_now()][0] = ddly;

  // Random DDLY edges at times off the 625 ps grid.
  initial begin
    #5000 rst = 1'b0;
    repeat (800) begin
      int d;
      d = $urandom_range(1, 4000);
      if (d % 625 == 0) d++;
      #(d) ddly = ~ddly;
    end
  end

  // q after clk edge of period k+2 holds period k.
  initial begin
    @(negedge rst);
    repeat (4) @(posedge clk);
    repeat (900) begin
      int k;
      @(posedge clk);
      #100;
      k = (period_now() + 1024 - 2) % 1024;
      checks++;
      if (q !== smp[k]) begin
        failures++;
        $display("FAIL period %0d: q=%b expected %b at %0t", k, q, smp[k], $time);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
