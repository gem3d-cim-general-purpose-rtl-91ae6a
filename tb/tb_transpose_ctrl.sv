// tb_transpose_ctrl -- checks the word-line and blocker sequence of the
// transpose sequencer cycle by cycle: step 1 (all A RWL, all B WWL, blockers
// off), N-1 step-2 cycles (pair k in both layers, Blocker 2 on), step 3 (all
// B RWL, all A WWL), exactly N+1 busy cycles, one done pulse, idle blockers.
// Run twice, for two sizes.
module tb_transpose_ctrl;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic clk = 0;
  always #5 clk = ~clk;

  tb_transpose_ctrl_run #(.N(5))  r5  (.clk);
  tb_transpose_ctrl_run #(.N(32)) r32 (.clk);

  initial begin
    wait (r5.finished && r32.finished);
    checks   += r5.checks + r32.checks;
    failures += r5.failures + r32.failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
