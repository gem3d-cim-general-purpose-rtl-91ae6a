// c2c_multiplier -- behavioural model of the 4-bit capacitive C-2C multiplier
// in each MA-eDRAM word (not synthesizable: analog).
//
// The four low bits Q4..Q1 of the eDRAM word (operand B) gate V_DAC (operand
// A, from Layer A) onto the C branches of a C-2C ladder; the ladder weights
// the bits by 1/2, 1/4, 1/8, 1/16, so its output is V_DAC * B / 16. A switch
// closed by the sampling signal (LFSR_EN) passes the ladder output onto the
// comparator input; when it opens the value is held, which lets the eDRAM
// word be overwritten with the LFSR start bits while the held voltage is
// converted. Ideal model: v_mul follows v_dac*b/16 while sample is high and
// keeps its last value while it is low. Ports: v_dac (V, real), b (Q4..Q1),
// sample, v_mul (V, real). The ladder follows the paper; the track/hold
// polarity of the switch is this model's choice.
module c2c_multiplier (
  input  real        v_dac,
  input  logic [3:0] b,
  input  logic       sample,
  output real        v_mul
);

  always_latch begin
    if (sample) v_mul = v_dac * real'(b) / 16.0;
  end

endmodule
