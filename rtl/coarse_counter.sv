// coarse_counter: the coarse timer, a free-running count of system clock periods.
//
// 40 bits at 100 MHz (paper's numbers) cover 2^40 * 10 ns, about 3.05 hours,
// before wrapping. It counts up by one on every clk rising edge after reset.
//
// Interface: clk (100 MHz), rst (asynchronous, clears to 0), count.
`timescale 1ps / 1fs
module coarse_counter #(
  parameter int unsigned WIDTH = tdc_pkg::COARSE_W
) (
  input  logic             clk,
  input  logic             rst,
  output logic [WIDTH-1:0] count
);

  always_ff @(posedge clk or posedge rst) begin
    if (rst) count <= '0;
    else     count <= count + 1'b1;
  end

endmodule
