// tb_ramp_generator -- checks the staircase: level (k+0.5)*V_FS/STEPS in the
// k-th cycle of run, back to step 0 when run falls.
module tb_ramp_generator;
  localparam int STEPS = 64;
  logic clk = 0, run; real v_ramp;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  ramp_generator #(.STEPS(STEPS), .V_FS(0.64)) dut (.*);
  task automatic chk(real e, string w);
    checks++;
    if (v_ramp > e + 1e-9 || v_ramp < e - 1e-9) begin
      failures++; $display("FAIL %s v=%f exp %f", w, v_ramp, e);
    end
  endtask
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    run = 0;
    repeat (2) @(posedge clk);
    #1 chk(0.005, "idle");
    run = 1;
    for (int k = 0; k < STEPS; k++) begin
      chk((k + 0.5) * 0.01, $sformatf("step %0d", k));
      @(posedge clk); #1;
    end
    run = 0;
    @(posedge clk); #1;
    chk(0.005, "reset after run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
