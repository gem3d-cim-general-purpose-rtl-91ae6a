// tb_ma_edram_subarray -- word writes/reads, all-word initialise to
// 00000001, row writes of start states, and a conversion window in which
// each word steps only in cycles where its own delay input is high. A
// reference array with its own LFSR step is kept here.
module tb_ma_edram_subarray;
  localparam int N = 4, M = 3;
  logic clk = 0;
  always #5 clk = ~clk;
  logic acc_en, acc_we, init_all, row_we, adc_run;
  logic [1:0] acc_row, acc_col, row_idx;
  logic [7:0] acc_wdata, acc_rdata;
  logic [7:0] row_wdata [M];
  logic delay [N][M];
  logic [7:0] q [N][M];
  logic [7:0] r [N][M];
  int checks = 0, failures = 0;

  ma_edram_subarray #(.N(N), .M(M)) dut (.*);

  function automatic logic [7:0] step(logic [7:0] s);
    return {s[0] ^ s[5], s[7:1]};
  endfunction
  task automatic chk_all(string w);
    for (int i = 0; i < N; i++)
      for (int j = 0; j < M; j++) begin
        checks++;
        if (q[i][j] !== r[i][j]) begin
          failures++; $display("FAIL %s (%0d,%0d) got %b exp %b", w, i, j, q[i][j], r[i][j]);
        end
      end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    acc_en = 0; acc_we = 0; init_all = 0; row_we = 0; adc_run = 0;
    acc_row = 0; acc_col = 0; row_idx = 0; acc_wdata = 0;
    for (int j = 0; j < M; j++) row_wdata[j] = 0;
    for (int i = 0; i < N; i++) for (int j = 0; j < M; j++) delay[i][j] = 0;
    @(posedge clk); #1;
    // word writes (operand B in the low nibble)
    for (int i = 0; i < N; i++)
      for (int j = 0; j < M; j++) begin
        r[i][j] = {4'h0, 4'($urandom)};
        acc_en = 1; acc_we = 1; acc_row = 2'(i); acc_col = 2'(j); acc_wdata = r[i][j];
        @(posedge clk); #1;
      end
    acc_en = 0; acc_we = 0;
    chk_all("word write");
    acc_en = 1; acc_row = 2; acc_col = 1; @(posedge clk); #1; acc_en = 0;
    checks++;
    if (acc_rdata !== r[2][1]) begin failures++; $display("FAIL read"); end
    // all-word initialise
    init_all = 1; @(posedge clk); #1; init_all = 0;
    for (int i = 0; i < N; i++) for (int j = 0; j < M; j++) r[i][j] = 8'h01;
    chk_all("init_all");
    // row write of row 1
    row_we = 1; row_idx = 1;
    for (int j = 0; j < M; j++) begin row_wdata[j] = 8'($urandom); r[1][j] = row_wdata[j]; end
    @(posedge clk); #1; row_we = 0;
    chk_all("row write");
    // conversion window with random per-word delay
    adc_run = 1;
    for (int n = 0; n < 64; n++) begin
      for (int i = 0; i < N; i++) for (int j = 0; j < M; j++) delay[i][j] = 1'($urandom);
      @(posedge clk); #1;
      for (int i = 0; i < N; i++) for (int j = 0; j < M; j++)
        if (delay[i][j]) r[i][j] = step(r[i][j]);
    end
    adc_run = 0;
    chk_all("conversion");
    // delay without adc_run does nothing
    for (int i = 0; i < N; i++) for (int j = 0; j < M; j++) delay[i][j] = 1;
    @(posedge clk); #1;
    chk_all("idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
