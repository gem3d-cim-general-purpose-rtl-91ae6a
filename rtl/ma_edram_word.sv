// ma_edram_word -- one 8-bit MA-eDRAM word: storage cell and LFSR counter.
//
// The word is eight 3T eDRAM cells whose extra clocked read/write stages join
// the R node of each cell to the W node of the next, so the word can shift in
// place: Q7..Q1 take the value of Q8..Q2 and Q8 takes Q1 XOR Q[LFSR_TAP].
// As ordinary memory it is written through wr_en/wdata (operand B in the four
// low bits for a multiply, or the LFSR start bits). During a conversion
// (adc_run) the "digital logic" block lets a reference-clock pulse through as
// CLK/CLKB whenever the comparator's DELAY is high; here that gating is a
// clock enable, so the word takes one LFSR step at each rising clock edge at
// which adc_run and delay are both high. The number of steps taken is the
// conversion result, read back as the LFSR state q = {Q8..Q1}.
// A write has priority over a step. The shift structure and the start state
// follow the paper; the tap default (see gem3d_pkg) and the clock-enable form
// of the gating are this design's choices.
module ma_edram_word #(
  parameter int LFSR_TAP = gem3d_pkg::DEFAULT_LFSR_TAP
) (
  input  logic                clk,
  input  logic                wr_en,
  input  gem3d_pkg::lfsr_t    wdata,
  input  logic                adc_run,
  input  logic                delay,
  output gem3d_pkg::lfsr_t    q
);
  import gem3d_pkg::*;

  wire step = adc_run && delay;  // one gated CLK pulse

  always_ff @(posedge clk) begin
    if (wr_en)     q <= wdata;
    else if (step) q <= lfsr_next(q, LFSR_TAP);
  end

endmodule
