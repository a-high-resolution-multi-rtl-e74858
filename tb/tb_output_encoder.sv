// tb_output_encoder: random mark vectors with 0 to 3 marks; the reference walks
// the bin positions from 0 (earliest, bit 15) upwards and keeps the first two.
`timescale 1ps / 1fs
module tb_output_encoder;
  import tdc_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  // Reset is high from time 0; the short low pulse gives the asynchronous
  // resets a real rising edge even in a two-state simulation.
  initial begin #1 rst = 1'b0; #1 rst = 1'b1; end
  logic [15:0] mark = '0;
  edge_pair_t  edges, exp_e;
  int checks = 0, failures = 0;
  int seen [3] = '{0, 0, 0};

  output_encoder dut (.clk(clk), .rst(rst), .mark(mark), .edges(edges));

  always #5000 clk = ~clk;

  initial begin
    #12000 rst = 1'b0;
    repeat (3000) begin
      logic [15:0] m;
      int nm;
      m = '0;
      nm = $urandom_range(0, 3);
      for (int i = 0; i < nm; i++) m[$urandom_range(0, 15)] = 1'b1;
      exp_e = '0;
      for (int p = 0; p < 16; p++) begin
        if (m[15-p]) begin
          if (exp_e.n == 0)      begin exp_e.pos0 = 4'(p); exp_e.n = 1; end
          else if (exp_e.n == 1) begin exp_e.pos1 = 4'(p); exp_e.n = 2; end
        end
      end
      @(negedge clk) mark = m;
      @(posedge clk) #1;
      seen[exp_e.n]++;
      checks++;
      if (edges !== exp_e) begin
        failures++;
        if (failures < 10) $display("FAIL mark=%b edges=%h expected %h", m, edges, exp_e);
      end
    end
    for (int i = 0; i < 3; i++) begin
      checks++;
      if (seen[i] == 0) begin failures++; $display("FAIL case n=%0d never tested", i); end
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
