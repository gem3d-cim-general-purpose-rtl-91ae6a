// ramp_generator -- behavioural model of the globally shared ramp generator
// of a MA-eDRAM sub-array (not synthesizable: analog).
//
// During a conversion the ramp climbs one step per reference-clock cycle:
// in the k-th cycle after run goes high (k = 0..STEPS-1) its level is
// (k + 0.5) * V_FS / STEPS, so an input of x*V_FS/STEPS is above the ramp
// for round(x) cycles. When run is low the step counter returns to 0.
// The shared ramp and the 64 conversion cycles follow the paper; the
// staircase shape and the half-step offset are this model's choice.
// Ports: clk (reference clock), run, v_ramp (V, real).
module ramp_generator #(
  parameter int  STEPS = 64,
  parameter real V_FS  = 0.675  // full-scale voltage in V
) (
  input  logic clk,
  input  logic run,
  output real  v_ramp
);

  logic [$clog2(STEPS):0] k;

  always_ff @(posedge clk) begin
    if (!run)                  k <= '0;
    else if (int'(k) < STEPS)  k <= k + 1'b1;
  end

  always_comb v_ramp = (real'(k) + 0.5) * V_FS / real'(STEPS);

endmodule
