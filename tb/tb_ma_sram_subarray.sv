// tb_ma_sram_subarray -- writes random a/b operands through the word port at
// the interleaved columns (2j = a, 2j+1 = b) and checks both the registered
// read-back and the word_a / word_b outputs that feed the DACs.
module tb_ma_sram_subarray;
  localparam int N = 4, M = 5;
  logic clk = 0;
  always #5 clk = ~clk;
  logic acc_en, acc_we;
  logic [$clog2(N)-1:0] acc_row;
  logic [$clog2(2*M)-1:0] acc_col;
  logic [3:0] acc_wdata, acc_rdata;
  logic [3:0] word_a [N][M];
  logic [3:0] word_b [N][M];
  logic [3:0] ra [N][M];
  logic [3:0] rb [N][M];
  int checks = 0, failures = 0;

  ma_sram_subarray #(.N(N), .M(M)) dut (.*);

  task automatic chk(logic [3:0] g, logic [3:0] e, string w);
    checks++;
    if (g !== e) begin failures++; $display("FAIL %s got %h exp %h", w, g, e); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    acc_en = 0; acc_we = 0; acc_row = 0; acc_col = 0; acc_wdata = 0;
    @(posedge clk); #1;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < M; j++)
        for (int h = 0; h < 2; h++) begin
          logic [3:0] d;
          d = 4'($urandom);
          if (h == 0) ra[i][j] = d; else rb[i][j] = d;
          acc_en = 1; acc_we = 1; acc_row = 2'(i); acc_col = 4'(2 * j + h); acc_wdata = d;
          @(posedge clk); #1;
        end
    acc_en = 0; acc_we = 0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < M; j++) begin
        chk(word_a[i][j], ra[i][j], $sformatf("word_a %0d %0d", i, j));
        chk(word_b[i][j], rb[i][j], $sformatf("word_b %0d %0d", i, j));
        for (int h = 0; h < 2; h++) begin
          acc_en = 1; acc_we = 0; acc_row = 2'(i); acc_col = 4'(2 * j + h);
          @(posedge clk); #1;
          acc_en = 0;
          chk(acc_rdata, h ? rb[i][j] : ra[i][j], $sformatf("read %0d %0d", i, 2 * j + h));
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
