// diff_comparator -- behavioural model of the per-word differential-pair
// comparator of the LFSR ADC (not synthesizable: analog).
//
// The comparator turns the analog result into a time: its DELAY output stays
// high while the input is above the shared ramp, and the digital logic after
// it lets that many reference-clock pulses reach the LFSR counter. Multiply
// words use a PMOS-input pair (their input sits near ground) and add words an
// NMOS-input pair (input near VDD); PMOS_INPUT records which, it does not
// change the ideal behaviour. The pair is small and has an input offset,
// modelled as VOS: delay = v > v_ramp + VOS. For calibration cal_sel replaces
// the signal by the known input v_cal. The comparator roles follow the paper;
// the ideal threshold model and the calibration switch are this model's
// choice. Ports: v_in, v_cal, v_ramp (V, real), cal_sel, delay.
module diff_comparator #(
  parameter bit  PMOS_INPUT = 1'b1,
  parameter real VOS        = 0.0   // input-referred offset in V
) (
  input  real  v_in,
  input  real  v_cal,
  input  logic cal_sel,
  input  real  v_ramp,
  output logic delay
);

  real v;

  always_comb begin
    v     = cal_sel ? v_cal : v_in;
    delay = (v > v_ramp + VOS);
  end

endmodule
