// tb_buffer4x4: feeds a known random 4-bit word every 400 MHz period and checks
// that each 100 MHz code holds the right four consecutive words, earliest in the
// top nibble, with the latency fixed by releasing reset just after a system
// clock edge.
`timescale 1ps / 1fs
module tb_buffer4x4;
  logic rst = 1'b1, clk_fast = 1'b0, clk_sys = 1'b0;
  // Reset is high from time 0; the short low pulse gives the asynchronous
  // resets a real rising edge even in a two-state simulation.
  initial begin #1 rst = 1'b0; #1 rst = 1'b1; end
  logic [3:0]  q = '0;
  logic [15:0] code;
  logic [3:0]  words [0:511];
  int checks = 0, failures = 0;

  buffer4x4 dut (.rst(rst), .clk_fast(clk_fast), .clk_sys(clk_sys), .q(q), .code(code));

  initial begin
    for (int s = 0; s < 4 * 2200; s++) begin
      clk_fast = (s % 4) < 2;
      clk_sys  = (s % 16) < 8;
      #625;
    end
  end

  initial foreach (words[i]) words[i] = 4'($urandom);

  // Word k is presented 100 ps after fast edge k (time 2500 k).
  initial begin
    for (int k = 0; k < 2000; k++) begin
      #(k == 0 ? 100 : 2500);
      q = words[k % 512];
    end
  end

  initial begin
    #300 rst = 1'b0;
    // Code at system edge 10000 (w + 2) holds words 4w .. 4w+3.
    for (int w = 0; w < 400; w++) begin
      logic [15:0] exp;
      #((w == 0) ? (20000 + 200 - 300) : 10000);
      exp = {words[(4*w) % 512], words[(4*w+1) % 512], words[(4*w+2) % 512], words[(4*w+3) % 512]};
      checks++;
      if (code !== exp) begin
        failures++;
        if (failures < 10) $display("FAIL window %0d: code=%h expected %h", w, code, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #6_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
