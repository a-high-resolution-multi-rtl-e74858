// tb_coarse_counter: counts the clock edges after reset itself and compares,
// across two resets, and checks the 40-bit width.
`timescale 1ps / 1fs
module tb_coarse_counter;
  import tdc_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  // Reset is high from time 0; the short low pulse gives the asynchronous
  // resets a real rising edge even in a two-state simulation.
  initial begin #1 rst = 1'b0; #1 rst = 1'b1; end
  logic [COARSE_W-1:0] count;
  longint unsigned n = 0;
  int checks = 0, failures = 0;

  coarse_counter dut (.clk(clk), .rst(rst), .count(count));

  always #5000 clk = ~clk;

  initial begin
    checks++;
    if ($bits(count) != 40) begin failures++; $display("FAIL width %0d", $bits(count)); end
    for (int r = 0; r < 2; r++) begin
      #3 rst = 1'b0;
      #2 rst = 1'b1;
      #7000 rst = 1'b0;
      n = 0;
      repeat (1000 + r * 300) begin
        @(posedge clk) n++;
        #1;
        checks++;
        if (count !== COARSE_W'(n)) begin
          failures++;
          if (failures < 10) $display("FAIL count=%0d expected %0d", count, n);
        end
      end
      @(negedge clk);
    end
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
