// tb_tedram_subarray -- self-checking test of the Layer B T-eDRAM sub-array.
// Loads a random matrix through the word port, then exercises the three
// transpose-line modes against a reference array kept here: bond writes of
// the upper diagonal (all WWL), the step-2 row copy (upper -> lower, one
// RWL/WWL pair per cycle) and bond reads of the lower diagonal (with and
// without RWL). Every word is read back through the word port after each phase.
module tb_tedram_subarray;
  localparam int N = 8;
  localparam int W = 4;

  logic clk = 0;
  always #5 clk = ~clk;

  logic                 acc_en, acc_we;
  logic [$clog2(N)-1:0] acc_row, acc_col;
  logic [W-1:0]         acc_wdata, acc_rdata;
  logic [N-1:0]         rwl, wwl;
  logic                 blk1_on, blk2_on;
  logic [W-1:0]         bond_r [N][N];
  logic [W-1:0]         bond_w [N][N];

  tedram_subarray #(.N(N), .W(W)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] ref_m [N][N];

  task automatic check(logic [W-1:0] got, logic [W-1:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  task automatic write_word(int r, int c, logic [W-1:0] d);
    acc_en = 1; acc_we = 1; acc_row = r[$clog2(N)-1:0]; acc_col = c[$clog2(N)-1:0]; acc_wdata = d;
    @(posedge clk); #1;
    acc_en = 0; acc_we = 0;
  endtask

  task automatic check_all(string phase);
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        acc_en = 1; acc_we = 0; acc_row = r[$clog2(N)-1:0]; acc_col = c[$clog2(N)-1:0];
        @(posedge clk); #1;
        acc_en = 0;
        check(acc_rdata, ref_m[r][c], $sformatf("%s (%0d,%0d)", phase, r, c));
      end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    acc_en = 0; acc_we = 0; acc_row = 0; acc_col = 0; acc_wdata = 0;
    rwl = 0; wwl = 0; blk1_on = 1; blk2_on = 0;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) bond_w[i][j] = 0;
    @(posedge clk); #1;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        ref_m[r][c] = W'($urandom);
        write_word(r, c, ref_m[r][c]);
      end
    check_all("load");

    // Step 1: bond write into the upper diagonal (all WWL).
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) bond_w[i][j] = W'($urandom);
    blk1_on = 0; blk2_on = 0; wwl = '1;
    @(posedge clk); #1;
    wwl = '0; blk1_on = 1;
    for (int i = 0; i < N; i++) for (int j = i + 1; j < N; j++) ref_m[i][j] = bond_w[i][j];
    check_all("bond write");

    // Step 2: copy upper -> lower, one row per cycle.
    blk1_on = 0; blk2_on = 1;
    for (int k = 0; k < N - 1; k++) begin
      rwl = '0; wwl = '0; rwl[k] = 1; wwl[k] = 1;
      @(posedge clk); #1;
      for (int i = k + 1; i < N; i++) ref_m[i][k] = ref_m[k][i];
    end
    rwl = '0; wwl = '0; blk2_on = 0; blk1_on = 1;
    check_all("copy");

    // Step 3 read: bond mode, no RWL reads 0; all RWL shows the lower cells.
    blk1_on = 0; #1;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++)
      check(bond_r[i][j], '0, "bond idle");
    rwl = '1; #1;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++)
      check(bond_r[i][j], (i > j) ? ref_m[i][j] : '0, $sformatf("bond read (%0d,%0d)", i, j));
    rwl = '0; rwl[5] = 1; #1;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++)
      check(bond_r[i][j], (i > j && i == 5) ? ref_m[i][j] : '0, "bond read row 5");
    rwl = '0; blk1_on = 1;
    @(posedge clk); #1;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
