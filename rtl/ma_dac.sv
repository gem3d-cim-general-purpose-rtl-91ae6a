// ma_dac -- behavioural model of the 4-bit current DAC formed by one MA-SRAM
// word (not synthesizable: analog).
//
// In silicon each of the four 8T cells of a word has a pair of thick-oxide
// transistors (M7 gated by the stored bit through a 1.8 V buffer, M8 gated by
// EN) whose widths are weighted 8:4:2:1 from MSB to LSB. A cell storing 1
// draws a current from V_BIAS while EN is high, so the word's summed current
// is proportional to its value. This model is ideal and linear:
// i_out = I_LSB * q microamps while en is high, 0 otherwise. The binary
// weighting follows the paper; the current scale is this model's choice.
// Ports: en (EN), q (stored word, MSB first), i_out (current in uA, real).
module ma_dac #(
  parameter real I_LSB = 1.0  // uA per LSB
) (
  input  logic       en,
  input  logic [3:0] q,
  output real        i_out
);

  always_comb begin
    i_out = 0.0;
    if (en)
      i_out = I_LSB * (8.0 * real'(q[3]) + 4.0 * real'(q[2]) +
                       2.0 * real'(q[1]) + 1.0 * real'(q[0]));
  end

endmodule
