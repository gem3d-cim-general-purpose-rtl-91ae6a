// lfsr_decode -- lookup table from an LFSR-coded conversion result to binary.
//
// A conversion leaves each MA-eDRAM word in the LFSR state reached after n
// steps from 00000001; the value is n. This table, applied on the read path,
// returns the position pos of the state in the LFSR cycle and the 6-bit
// value: pos itself for 0..63, 0 for the last 64 positions of the cycle
// (a calibrated word whose offset correction went below zero) and 63 for
// anything else, including states that are not on the cycle. Both tables are
// computed at elaboration from the LFSR definition in gem3d_pkg, so the table
// follows the tap parameter. Purely combinational. The LUT itself follows the
// paper; the saturation rule is this design's choice.
module lfsr_decode #(
  parameter int LFSR_TAP = gem3d_pkg::DEFAULT_LFSR_TAP
) (
  input  gem3d_pkg::lfsr_t                  code,
  output logic [7:0]                        pos,
  output logic [gem3d_pkg::ADC_OUT_W-1:0]   value
);
  import gem3d_pkg::*;

  localparam int         PERIOD = lfsr_period(LFSR_TAP);
  localparam pos_table_t POS    = lfsr_pos_table(LFSR_TAP);
  localparam int         VMAX   = (1 << ADC_OUT_W) - 1;

  always_comb begin
    pos = POS[code];
    if (int'(pos) <= VMAX)
      value = ADC_OUT_W'(pos);
    else if (pos != 8'hFF && int'(pos) >= PERIOD - (VMAX + 1))
      value = '0;
    else
      value = ADC_OUT_W'(VMAX);
  end

endmodule
