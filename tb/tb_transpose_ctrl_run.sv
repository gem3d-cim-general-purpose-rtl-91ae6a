// tb_transpose_ctrl_run -- one size of the transpose sequencer check, used
// by tb_transpose_ctrl.
module tb_transpose_ctrl_run #(parameter int N = 4) (input logic clk);
  logic rst_n, start, busy, done;
  logic [N-1:0] a_rwl, a_wwl, b_rwl, b_wwl;
  logic a_blk1_on, a_blk2_on, b_blk1_on, b_blk2_on;
  int checks = 0, failures = 0;
  bit finished = 0;

  transpose_ctrl #(.N(N)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL N=%0d %s", N, what);
    end
  endtask

  initial begin
    int busy_cycles, dones;
    rst_n = 0; start = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    check(!busy && a_blk1_on && b_blk1_on && a_rwl == 0 && a_wwl == 0 &&
          b_rwl == 0 && b_wwl == 0, "idle");
    start = 1;
    @(posedge clk); #1;
    start = 0;
    busy_cycles = 0; dones = 0;
    // step 1
    check(busy && !a_blk1_on && !a_blk2_on && !b_blk1_on && !b_blk2_on, "step1 blockers");
    check(a_rwl == '1 && b_wwl == '1 && a_wwl == 0 && b_rwl == 0, "step1 lines");
    busy_cycles++;
    @(posedge clk); #1;
    for (int k = 0; k < N - 1; k++) begin
      logic [N-1:0] onehot;
      onehot = '0; onehot[k] = 1'b1;
      check(busy && !a_blk1_on && a_blk2_on && !b_blk1_on && b_blk2_on, $sformatf("step2 blockers k=%0d", k));
      check(a_rwl == onehot && a_wwl == onehot && b_rwl == onehot && b_wwl == onehot,
            $sformatf("step2 lines k=%0d", k));
      busy_cycles++;
      @(posedge clk); #1;
    end
    check(busy && !a_blk1_on && !a_blk2_on, "step3 blockers");
    check(b_rwl == '1 && a_wwl == '1 && a_rwl == 0 && b_wwl == 0, "step3 lines");
    busy_cycles++;
    @(posedge clk); #1;
    check(!busy && done, "done after step 3");
    check(busy_cycles == N + 1, $sformatf("latency %0d cycles, expected N+1", busy_cycles));
    @(posedge clk); #1;
    check(!done && !busy && a_blk1_on, "back to idle");
    finished = 1;
  end
endmodule
