// tb_hit_latch: checks that the latch sets on an input rising edge only, holds
// through the pulse and after it, clears asynchronously, and ignores input
// edges while the clear is held.
`timescale 1ps / 1fs
module tb_hit_latch;
  logic sig_in = 1'b0, clr = 1'b1, hit;
  initial begin #1 clr = 1'b0; #1 clr = 1'b1; end  // a real rising edge for the asynchronous clear
  int checks = 0, failures = 0;

  hit_latch dut (.sig_in(sig_in), .clr(clr), .hit(hit));

  task automatic expect_hit(input logic exp, input string what);
    checks++;
    if (hit !== exp) begin
      failures++;
      $display("FAIL %s: hit=%0b expected %0b at %0t", what, hit, exp, $time);
    end
  endtask

  initial begin
    #1000 expect_hit(1'b0, "cleared by clr");
    clr = 1'b0;
    #100  expect_hit(1'b0, "idle after clr release");
    for (int i = 0; i < 20; i++) begin
      int w;
      w = 200 + $urandom_range(0, 3000);
      sig_in = 1'b1; #10 expect_hit(1'b1, "set by rising edge");
      #(w)           expect_hit(1'b1, "held during pulse");
      sig_in = 1'b0; #100 expect_hit(1'b1, "held after pulse");
      clr = 1'b1;    #1   expect_hit(1'b0, "async clear");
      sig_in = 1'b1; #50  expect_hit(1'b0, "edge ignored while clear held");
      sig_in = 1'b0; #50;
      clr = 1'b0;    #50  expect_hit(1'b0, "no set on clear release");
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
