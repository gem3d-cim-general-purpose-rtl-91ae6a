// tb_ma_ctrl -- records the sequencer outputs every cycle of an operation
// and compares them with the expected phase list: one DAC/sample cycle, the
// start-bit write (one init_all cycle, or N row writes once calibrated),
// exactly 64 conversion cycles, and for a calibration run the known-input
// select and N capture cycles. Checks KEEP_DAC=0 (multiply) and the dac_en
// extension of KEEP_DAC=1 (add), and the same extension requested per
// operation with keep (held only during start).
module tb_ma_ctrl;
  localparam int N = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start, cal, calibrated, keep;
  logic busy [2], done [2], dac_en [2], sample [2], cal_sel [2], init_all [2];
  logic row_we [2], adc_run [2], cap_en [2];
  logic [1:0] row_idx [2];
  int checks = 0, failures = 0;

  for (genvar u = 0; u < 2; u++) begin : g
    ma_ctrl #(.N(N), .KEEP_DAC(u == 1)) dut (
      .clk, .rst_n, .start, .cal, .keep, .calibrated,
      .busy(busy[u]), .done(done[u]), .dac_en(dac_en[u]), .sample(sample[u]),
      .cal_sel(cal_sel[u]), .init_all(init_all[u]), .row_we(row_we[u]),
      .row_idx(row_idx[u]), .adc_run(adc_run[u]), .cap_en(cap_en[u])
    );
  end

  task automatic chk(bit ok, string w);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", w); end
  endtask

  // Runs one operation and checks each cycle.
  task automatic run(bit c, bit calib, bit k = 0);
    int adc_cycles = 0;
    cal = c; calibrated = calib; keep = k; start = 1;
    @(posedge clk); #1; start = 0; keep = 0;
    for (int u = 0; u < 2; u++)
      chk(busy[u] && dac_en[u] && sample[u] && !adc_run[u], $sformatf("DAC u=%0d", u));
    @(posedge clk); #1;
    if (calib && !c) begin
      for (int r = 0; r < N; r++) begin
        for (int u = 0; u < 2; u++)
          chk(row_we[u] && !init_all[u] && int'(row_idx[u]) == r && !sample[u] &&
              dac_en[u] == (u == 1 || k), $sformatf("row write %0d u=%0d", r, u));
        @(posedge clk); #1;
      end
    end else begin
      for (int u = 0; u < 2; u++)
        chk(init_all[u] && !row_we[u] && dac_en[u] == (u == 1 || k), $sformatf("init u=%0d", u));
      @(posedge clk); #1;
    end
    while (adc_run[0]) begin
      for (int u = 0; u < 2; u++)
        chk(adc_run[u] && cal_sel[u] == c && dac_en[u] == (u == 1 || k) && !init_all[u],
            $sformatf("adc u=%0d", u));
      adc_cycles++;
      @(posedge clk); #1;
    end
    chk(adc_cycles == 64, $sformatf("conversion took %0d cycles, expected 64", adc_cycles));
    if (c) begin
      for (int r = 0; r < N; r++) begin
        for (int u = 0; u < 2; u++)
          chk(cap_en[u] && int'(row_idx[u]) == r && !adc_run[u], $sformatf("capture %0d", r));
        @(posedge clk); #1;
      end
    end
    for (int u = 0; u < 2; u++) chk(done[u] && !busy[u], "done");
    @(posedge clk); #1;
    for (int u = 0; u < 2; u++) chk(!done[u] && !dac_en[u], "idle");
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rst_n = 0; start = 0; cal = 0; calibrated = 0; keep = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    run(0, 0);   // plain conversion
    run(1, 0);   // calibration run
    run(0, 1);   // conversion with calibrated start states
    run(1, 1);   // re-calibration starts from 00000001 again
    run(0, 1, 1); // DACs kept on for this operation only
    run(0, 0);    // ... and off again for the next one
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
