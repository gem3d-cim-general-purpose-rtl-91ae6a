// tb_control_unit -- issues every command code and checks that the right
// sequencer start fires (with cal for the calibration codes), that
// cmd_ready stays low until that sequencer's done, that done pulses once,
// and that NOP finishes by itself. OP_MAC must start the multiply
// sequencer with keep_dac and hold mac for the whole operation. Sequencer dones come after random delays.
module tb_control_unit;
  import gem3d_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, cmd_valid, cmd_ready, done, t_start, mul_start, add_start, cal, mac, keep_dac;
  logic t_done, mul_done, add_done;
  op_e cmd_op;
  int checks = 0, failures = 0;

  control_unit dut (.*);

  task automatic chk(bit ok, string w);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", w); end
  endtask

  task automatic issue(op_e op);
    int wait_c;
    bit exp_t, exp_m, exp_a;
    exp_t = op == OP_TRANSPOSE;
    exp_m = op == OP_MUL || op == OP_CAL_MUL || op == OP_MAC;
    exp_a = op == OP_ADD || op == OP_CAL_ADD;
    chk(cmd_ready, "ready before");
    cmd_valid = 1; cmd_op = op; #1;
    chk(t_start == exp_t && mul_start == exp_m && add_start == exp_a, $sformatf("start %s", op.name()));
    chk(cal == (op == OP_CAL_MUL || op == OP_CAL_ADD), $sformatf("cal %s", op.name()));
    chk(keep_dac == (op == OP_MAC), $sformatf("keep_dac %s", op.name()));
    @(posedge clk); #1; cmd_valid = 0;
    if (!(exp_t || exp_m || exp_a)) begin
      chk(done && cmd_ready, "nop done");
      @(posedge clk); #1;
      return;
    end
    wait_c = $urandom_range(1, 6);
    repeat (wait_c) begin
      chk(!cmd_ready && !done && !t_start && !mul_start && !add_start, "busy");
      chk(mac == (op == OP_MAC), $sformatf("mac held %s", op.name()));
      @(posedge clk); #1;
    end
    // a done from another unit must not end the command
    t_done = !exp_t; mul_done = !exp_m; add_done = !exp_a;
    @(posedge clk); #1;
    chk(!cmd_ready && !done, "foreign done ignored");
    t_done = exp_t; mul_done = exp_m; add_done = exp_a;
    @(posedge clk); #1;
    t_done = 0; mul_done = 0; add_done = 0;
    chk(done && cmd_ready, $sformatf("done %s", op.name()));
    @(posedge clk); #1;
    chk(!done, "done is a pulse");
    chk(!mac, "mac cleared");
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rst_n = 0; cmd_valid = 0; cmd_op = OP_NOP; t_done = 0; mul_done = 0; add_done = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    issue(OP_TRANSPOSE);
    issue(OP_MUL);
    issue(OP_ADD);
    issue(OP_CAL_MUL);
    issue(OP_CAL_ADD);
    issue(OP_MAC);
    issue(OP_MUL);
    issue(OP_NOP);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
