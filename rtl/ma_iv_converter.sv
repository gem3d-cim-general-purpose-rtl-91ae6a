// ma_iv_converter -- behavioural model of the current-to-voltage network at
// the output of the MA-SRAM DACs (not synthesizable: analog).
//
// The weighted DAC currents are summed on one node and passed through a
// parallel transistor network that turns the current into a voltage, which
// then crosses to Layer B through a 3D bond. For a multiply only the A word's
// DAC feeds the node (V_DAC); for an add the currents of the neighbouring A
// and B words are summed first (current-domain addition, V_A+B). Ideal linear
// model: v_out = R_EQ * (i_a + i_b), with R_EQ in volts per microamp. The
// summing follows the paper; the linear transfer and its scale are this
// model's choice. Ports: i_a, i_b (uA, real), v_out (V, real).
module ma_iv_converter #(
  parameter real R_EQ = 0.048  // V per uA
) (
  input  real i_a,
  input  real i_b,
  output real v_out
);

  always_comb v_out = R_EQ * (i_a + i_b);

endmodule
