// mac_column_sum -- behavioural model of one MA-SRAM column used as a
// dot-product accumulator (not synthesizable: analog).
//
// In a dot product each row's DAC enable carries a binary input activation
// and the word DAC currents of all N rows of a column flow into one shared
// column line, so the line current is sum_i x_i * I_DAC(w_i). This model
// converts that current to a voltage with the ideal linear factor R_EQ (volts
// per microamp) so that it can be compared against the Layer B ramp like an
// element-wise result. The column-wise current summation follows the paper;
// the linear conversion and R_EQ are this model's choice (the top picks R_EQ
// so that the largest possible sum maps to the multiply full scale).
// Ports: i_in[N] (uA, real, one per row), v_out (V, real).
module mac_column_sum #(
  parameter int  N    = 32,
  parameter real R_EQ = 0.675 / 480.0  // V per uA
) (
  input  real i_in [N],
  output real v_out
);

  always_comb begin
    real s;
    s = 0.0;
    for (int i = 0; i < N; i++) s += i_in[i];
    v_out = R_EQ * s;
  end

endmodule
