// tb_one_out_n: random 16-bit codes, with runs of ones and bubbles, one per
// clock. The reference lays the previous code's last two samples and the new
// code out as one time-ordered sample string and marks every sample that is 1
// after two 0s; the mark must appear one clock later.
`timescale 1ps / 1fs
module tb_one_out_n;
  logic clk = 1'b0, rst = 1'b1;
  // Reset is high from time 0; the short low pulse gives the asynchronous
  // resets a real rising edge even in a two-state simulation.
  initial begin #1 rst = 1'b0; #1 rst = 1'b1; end
  logic [15:0] code = '0, mark, exp_q;
  logic [1:0]  prev_tb = '0;
  int checks = 0, failures = 0;

  one_out_n dut (.clk(clk), .rst(rst), .code(code), .mark(mark));

  always #5000 clk = ~clk;

  function automatic logic [15:0] ref_marks(input logic [1:0] pv, input logic [15:0] c);
    logic s [0:17];   // s[0] earliest: pv[1], pv[0], c[15] .. c[0]
    logic [15:0] r = '0;
    s[0] = pv[1];
    s[1] = pv[0];
    for (int j = 0; j < 16; j++) s[j+2] = c[15-j];
    for (int j = 2; j < 18; j++)
      if (s[j] && !s[j-1] && !s[j-2]) r[15-(j-2)] = 1'b1;
    return r;
  endfunction

  function automatic logic [15:0] gen_code();
    logic [15:0] c;
    case ($urandom_range(0, 3))
      0: c = 16'($urandom);
      1: begin  // one pulse, 4 bins wide
        int p = $urandom_range(0, 15);
        c = '0;
        for (int b = 0; b < 4; b++) if (p - b >= 0) c[p-b] = 1'b1;
      end
      2: c = 16'($urandom) & 16'($urandom);   // sparse, with bubbles
      default: c = 16'hF0F0 >> $urandom_range(0, 7);
    endcase
    return c;
  endfunction

  initial begin
    #12000 rst = 1'b0;
    repeat (3000) begin
      logic [15:0] c;
      @(negedge clk);
      c = gen_code();
      exp_q = ref_marks(prev_tb, c);
      prev_tb = c[1:0];
      code = c;
      @(posedge clk);
      #1;
      checks++;
      if (mark !== exp_q) begin
        failures++;
        if (failures < 10) $display("FAIL code=%b mark=%b expected %b", c, mark, exp_q);
      end
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
