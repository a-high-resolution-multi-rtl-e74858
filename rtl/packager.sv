// packager: packs coarse and fine time into one event word and buffers it.
//
// Each valid measurement from fine_sum is written, as a tdc_pkg::tdc_event_t
// (coarse in the upper 40 bits, fine below), into a DEPTH-entry FIFO. The read
// side is a valid/ready stream towards the readout link. When the FIFO is full
// a new event is dropped and the sticky overflow flag is set. The paper says
// only that the information is "packed and buffered"; the FIFO depth, the
// stream handshake and the drop-on-full rule are this design's.
//
// Interface: clk, rst (asynchronous), in_valid/in_ev (write), out_valid,
// out_ready, out_ev (first-word-fall-through read: out_ev is valid whenever
// out_valid is high, and is consumed on a clk edge with both high), overflow.
// Timing: an event written at edge E can be read from edge E on (one clk).
// The assertion a_fill_bound checks that the fill level never exceeds DEPTH;
// its reset disable makes lint see rst used synchronously as well, which only
// concerns the check, not the logic.
`timescale 1ps / 1fs
module packager
  import tdc_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       in_valid,
  input  tdc_event_t in_ev,
  output logic       out_valid,
  input  logic       out_ready,
  output tdc_event_t out_ev,
  output logic       overflow
);

  localparam int unsigned AW = $clog2(DEPTH);

  tdc_event_t   mem [DEPTH];
  logic [AW:0]  wp, rp;   // one extra bit tells full from empty
  logic         full, empty, wr, rd;

  assign empty     = (wp == rp);
  assign full      = (wp[AW-1:0] == rp[AW-1:0]) && (wp[AW] != rp[AW]);
  assign wr        = in_valid && !full;
  assign rd        = out_ready && !empty;
  assign out_valid = !empty;
  assign out_ev    = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (wr) mem[wp[AW-1:0]] <= in_ev;
  end

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      wp       <= '0;
      rp       <= '0;
      overflow <= 1'b0;
    end else begin
      if (wr) wp <= wp + 1'b1;
      if (rd) rp <= rp + 1'b1;
      if (in_valid && full) overflow <= 1'b1;
    end
  end

  // The FIFO never holds more than DEPTH events.
  a_fill_bound: assert property (@(posedge clk) disable iff (rst) (wp - rp) <= (AW+1)'(DEPTH));

endmodule
