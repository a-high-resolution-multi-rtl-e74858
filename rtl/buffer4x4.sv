// buffer4x4: turns the 400 MHz ISERDES words into one code per 100 MHz period.
//
// In the fast (clk0) domain a phase counter and a shift register collect W
// consecutive P-bit ISERDES words; every W-th fast clock the full P*W-bit word
// is moved to a holding register, which stays stable for W fast periods. The
// system-clock domain copies the holding register into code. Both clocks come
// from one PLL with aligned edges, so the transfer is synchronous. Earlier
// words go to higher bits: code[P*W-1] is the earliest sample of the period,
// code[0] the latest. The paper names the 4x4 flip-flop buffer; the shift and
// hold structure is this design's.
//
// Interface: clk_fast (400 MHz, 0 deg), clk_sys (100 MHz), rst (asynchronous,
// to be released just after a clk_sys rising edge so the word phase is fixed),
// q (ISERDES word), code (clk_sys domain). Timing: with reset released in the
// first quarter of a system period, code updated at a clk_sys edge E holds the
// samples of [E - 25 ns, E - 15 ns) given the two ISERDES stages.
`timescale 1ps / 1fs
module buffer4x4 #(
  parameter int unsigned P = tdc_pkg::PHASES,
  parameter int unsigned W = tdc_pkg::WORDS
) (
  input  logic           rst,
  input  logic           clk_fast,
  input  logic           clk_sys,
  input  logic [P-1:0]   q,
  output logic [P*W-1:0] code
);

  logic [$clog2(W)-1:0] ph;    // index of the word arriving this fast cycle
  logic [P*(W-1)-1:0]   sh;    // the earlier W-1 words of the period
  logic [P*W-1:0]       hold;  // complete period, stable for W fast cycles

  always_ff @(posedge clk_fast or posedge rst) begin
    if (rst) begin
      ph   <= '0;
      sh   <= '0;
      hold <= '0;
    end else begin
      sh <= {sh[P*(W-2)-1:0], q};
      ph <= ph + 1'b1;
      if (ph == $clog2(W)'(W - 1)) hold <= {sh, q};
    end
  end

  always_ff @(posedge clk_sys or posedge rst) begin
    if (rst) code <= '0;
    else     code <= hold;
  end

endmodule
