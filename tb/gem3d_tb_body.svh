// gem3d_tb_body.svh -- end-to-end stimulus and checks for gem3d_top, shared
// by the reduced-size and the full-size testbench. The including module
// defines localparams TN, TMA_N, TMA_M, TVOS (comparator offset unit in ramp
// steps, as given to the top) and instantiates the top as `dut`.
//
// Sequence: transpose of a random TN x TN matrix; element-wise multiply and
// add of random 4-bit matrices before calibration, calibration of both
// sub-arrays, and the same multiply and add again with calibrated start
// states. Each result is compared with a value worked out here in integer
// arithmetic from the ideal converter (ramp step k at (k+0.5)/64 of full
// scale, offset s steps per word, at most 64 counted pulses, start position
// from calibration, 6-bit saturation). A dot product (binary activations
// times the multiply sub-array's A words, summed per column) is run before
// and after calibration and checked the same way against 15*TMA_N full
// scale. Mechanisms are counted and each must occur at least once.

  import gem3d_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, cmd_valid, cmd_ready, cmd_done;
  op_e  cmd_op;
  logic host_en, host_we, host_rvalid;
  sel_e host_sel;
  logic [7:0] host_row, host_col, host_wdata, host_rdata;
  logic [5:0] host_rvalue;
  logic [TMA_N-1:0] mac_in;

  int checks = 0, failures = 0;
  int period_cnt;

  // mechanism counters
  int n_transpose = 0, n_copy_cycles = 0, n_mul = 0, n_add = 0, n_cal = 0;
  int n_seed_rows = 0, n_saturated = 0, n_offset_seen = 0, n_offset_fixed = 0;
  int n_mac = 0, n_mac_rows_off = 0;

  logic [3:0] ta [TN][TN];
  logic [3:0] ea [TMA_N][TMA_M];
  logic [3:0] eb [TMA_N][TMA_M];

  task automatic chk(bit ok, string w);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", w);
    end
  endtask

  task automatic host_write(sel_e s, int r, int c, logic [7:0] d);
    host_en = 1; host_we = 1; host_sel = s;
    host_row = 8'(r); host_col = 8'(c); host_wdata = d;
    @(posedge clk); #1;
    host_en = 0; host_we = 0;
  endtask

  task automatic host_read(sel_e s, int r, int c, output logic [7:0] d, output logic [5:0] v);
    host_en = 1; host_we = 0; host_sel = s; host_row = 8'(r); host_col = 8'(c);
    @(posedge clk); #1;
    host_en = 0;
    chk(host_rvalid, "rvalid");
    d = host_rdata; v = host_rvalue;
  endtask

  // Runs one command; returns the number of cycles until done.
  task automatic command(op_e op, output int cycles);
    chk(cmd_ready, "ready");
    cmd_valid = 1; cmd_op = op;
    @(posedge clk); #1;
    cmd_valid = 0;
    cycles = 1;
    while (!cmd_done) begin
      @(posedge clk); #1;
      cycles++;
      if (cycles > 100000) break;
    end
  endtask

  // Comparator offset of word (i,j) of sub-array u in ramp steps, as wired in the top.
  function automatic int offset(int u, int i, int j);
    return TVOS * (((i * 3 + j * 5 + u) % 7) - 3);
  endfunction

  // Pulses counted for an input of num/den of full scale (x = 64*num/den
  // steps) with offset s: cycles k in 0..63 with x > k + 0.5 + s.
  function automatic int pulses(int num, int den, int s);
    int n = 0;
    for (int k = 0; k < 64; k++)
      if (128 * num > den * (2 * k + 1 + 2 * s)) n++;
    return n;
  endfunction

  // Value read out for a start position p0 (signed) and n pulses.
  function automatic int readout(int p0, int n);
    int p = p0 + n;
    if (p < 0) return 0;
    if (p > 63) return 63;
    return p;
  endfunction

  bit calibrated [2];
  int cal_start [2][TMA_N][TMA_M];

  task automatic elementwise(bit is_add);
    int u, cyc, adc_cycles;
    logic [7:0] d;
    logic [5:0] v;
    sel_e ssel, esel;
    u = is_add ? 1 : 0;
    ssel = is_add ? SEL_ADD_SRAM : SEL_MUL_SRAM;
    esel = is_add ? SEL_ADD_EDRAM : SEL_MUL_EDRAM;
    for (int i = 0; i < TMA_N; i++)
      for (int j = 0; j < TMA_M; j++) begin
        ea[i][j] = 4'($urandom);
        eb[i][j] = 4'($urandom);
        if (i == 0 && j == 0) begin ea[i][j] = 15; eb[i][j] = 15; end
        if (i == 0 && j == 1) begin ea[i][j] = 0;  eb[i][j] = 9;  end
        host_write(ssel, i, 2 * j, 8'(ea[i][j]));
        host_write(ssel, i, 2 * j + 1, 8'(eb[i][j]));
        if (!is_add) host_write(esel, i, j, {4'h0, eb[i][j]});
      end
    adc_cycles = 0;
    fork
      command(is_add ? OP_ADD : OP_MUL, cyc);
      begin
        while (!cmd_done) begin
          @(posedge clk);
          if (u == 0 && dut.g_ma[0].adc_run) adc_cycles++;
          if (u == 1 && dut.g_ma[1].adc_run) adc_cycles++;
          if (u == 0 && dut.g_ma[0].row_we) n_seed_rows++;
          if (u == 1 && dut.g_ma[1].row_we) n_seed_rows++;
        end
      end
    join
    chk(adc_cycles == 64, $sformatf("conversion took %0d cycles", adc_cycles));
    if (is_add) n_add++; else n_mul++;
    for (int i = 0; i < TMA_N; i++)
      for (int j = 0; j < TMA_M; j++) begin
        int s, n, n0, p0, e, ideal;
        s = offset(u, i, j);
        if (is_add) begin
          n  = pulses(int'(ea[i][j]) + int'(eb[i][j]), 30, s);
          n0 = pulses(int'(ea[i][j]) + int'(eb[i][j]), 30, 0);
        end else begin
          n  = pulses(int'(ea[i][j]) * int'(eb[i][j]), 225, s);
          n0 = pulses(int'(ea[i][j]) * int'(eb[i][j]), 225, 0);
        end
        p0 = calibrated[u] ? cal_start[u][i][j] : 0;
        e = readout(p0, n);
        ideal = (n0 > 63) ? 63 : n0;
        host_read(esel, i, j, d, v);
        chk(int'(v) == e, $sformatf("%s (%0d,%0d) a=%0d b=%0d s=%0d got %0d exp %0d",
            is_add ? "add" : "mul", i, j, ea[i][j], eb[i][j], s, v, e));
        if (n0 >= 64) n_saturated++;
        if (!calibrated[u] && e != ideal) n_offset_seen++;
        if (calibrated[u] && s != 0 && e == ideal) n_offset_fixed++;
      end
  endtask

  // Dot product: random A words in the multiply MA-SRAM, random activations
  // (at least one row on and, if TMA_N > 1, one off); result in row 0 of the
  // multiply eDRAM.
  task automatic dot_product();
    int cyc, adc_cycles;
    logic [7:0] d;
    logic [5:0] v;
    logic [TMA_N-1:0] mac_in_q;
    mac_in = TMA_N'($urandom);
    mac_in[0] = 1'b1;
    if (TMA_N > 1) mac_in[TMA_N-1] = 1'b0;
    for (int i = 0; i < TMA_N; i++) begin
      if (!mac_in[i]) n_mac_rows_off++;
      for (int j = 0; j < TMA_M; j++) begin
        ea[i][j] = (j == 0) ? 4'd15 : 4'($urandom);
        host_write(SEL_MUL_SRAM, i, 2 * j, 8'(ea[i][j]));
      end
    end
    mac_in_q = mac_in;
    adc_cycles = 0;
    fork
      command(OP_MAC, cyc);
      begin
        while (!cmd_done) begin
          @(posedge clk);
          if (dut.g_ma[0].adc_run) adc_cycles++;
        end
      end
    join
    mac_in = '0;  // sampled at the command; changing it now must not matter
    chk(adc_cycles == 64, $sformatf("dot product conversion took %0d cycles", adc_cycles));
    n_mac++;
    for (int j = 0; j < TMA_M; j++) begin
      int sum, s, n, p0, e;
      sum = 0;
      for (int i = 0; i < TMA_N; i++) if (mac_in_q[i]) sum += int'(ea[i][j]);
      s  = offset(0, 0, j);
      n  = pulses(sum, 15 * TMA_N, s);
      p0 = calibrated[0] ? cal_start[0][0][j] : 0;
      e  = readout(p0, n);
      host_read(SEL_MUL_EDRAM, 0, j, d, v);
      chk(int'(v) == e, $sformatf("mac col %0d sum=%0d s=%0d got %0d exp %0d", j, sum, s, v, e));
    end
  endtask

  task automatic calibrate(bit is_add);
    int u, cyc;
    u = is_add ? 1 : 0;
    command(is_add ? OP_CAL_ADD : OP_CAL_MUL, cyc);
    n_cal++;
    // The known input is 32 steps; the counter started at position 0 and
    // counted c pulses; later conversions start at position 32 - c.
    for (int i = 0; i < TMA_N; i++)
      for (int j = 0; j < TMA_M; j++)
        cal_start[u][i][j] = 32 - pulses(1, 2, offset(u, i, j));
    calibrated[u] = 1;
  endtask

  task automatic transpose();
    int cyc, busy_cycles;
    logic [7:0] d;
    logic [5:0] v;
    for (int i = 0; i < TN; i++)
      for (int j = 0; j < TN; j++) begin
        ta[i][j] = 4'($urandom);
        host_write(SEL_TSRAM, i, j, 8'(ta[i][j]));
      end
    busy_cycles = 0;
    fork
      command(OP_TRANSPOSE, cyc);
      begin
        while (!cmd_done) begin
          @(posedge clk);
          if (dut.t_busy) busy_cycles++;
          if (dut.a_blk2_on) n_copy_cycles++;
        end
      end
    join
    chk(busy_cycles == TN + 1, $sformatf("transpose took %0d cycles, expected %0d", busy_cycles, TN + 1));
    n_transpose++;
    for (int i = 0; i < TN; i++)
      for (int j = 0; j < TN; j++) begin
        host_read(SEL_TSRAM, i, j, d, v);
        chk(d[3:0] == ta[j][i], $sformatf("transpose (%0d,%0d) got %0d exp %0d", i, j, d[3:0], ta[j][i]));
      end
  endtask

  initial begin
    #(10 * WATCHDOG_CYCLES);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; cmd_valid = 0; cmd_op = OP_NOP; mac_in = '0;
    host_en = 0; host_we = 0; host_sel = SEL_TSRAM; host_row = 0; host_col = 0; host_wdata = 0;
    calibrated[0] = 0; calibrated[1] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;

    transpose();
    transpose();            // transposing twice restores nothing hidden: fresh data
    elementwise(0);         // multiply, uncalibrated
    elementwise(1);         // add, uncalibrated
    dot_product();          // dot product, uncalibrated
    calibrate(0);
    calibrate(1);
    elementwise(0);         // multiply with calibrated start states
    elementwise(1);         // add with calibrated start states
    dot_product();          // dot product with calibrated start states
    elementwise(0);         // multiply again after a dot product

    $display("mechanisms: transpose=%0d step2_cycles=%0d mul=%0d add=%0d cal=%0d seed_rows=%0d saturated=%0d offset_seen=%0d offset_fixed=%0d mac=%0d mac_rows_off=%0d",
             n_transpose, n_copy_cycles, n_mul, n_add, n_cal, n_seed_rows, n_saturated,
             n_offset_seen, n_offset_fixed, n_mac, n_mac_rows_off);
    chk(n_mac > 0, "no dot product");
    if (TMA_N > 1) chk(n_mac_rows_off > 0, "no row switched off in a dot product");
    chk(n_transpose > 0, "no transpose");
    chk(n_copy_cycles > 0, "no in-array copy");
    chk(n_mul > 0, "no multiply");
    chk(n_add > 0, "no add");
    chk(n_cal > 0, "no calibration");
    chk(n_seed_rows > 0, "no calibrated start-bit write");
    chk(n_saturated > 0, "no saturated conversion");
    if (TVOS != 0) begin
      chk(n_offset_seen > 0, "comparator offset never visible");
      chk(n_offset_fixed > 0, "calibration never corrected an offset");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
