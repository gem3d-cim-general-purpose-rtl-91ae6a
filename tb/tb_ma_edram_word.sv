// tb_ma_edram_word -- checks the LFSR word: a write loads the word, with
// adc_run high each cycle whose delay is high takes one LFSR step
// ({Q1^Q6, Q8..Q2}, reference written out here), delay low or adc_run low
// holds it, a write wins over a step; 64 steps from 00000001 visit 64
// distinct states.
module tb_ma_edram_word;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en, adc_run, delay;
  logic [7:0] wdata, q, r;
  int checks = 0, failures = 0;

  ma_edram_word dut (.*);

  function automatic logic [7:0] step(logic [7:0] s);
    return {s[0] ^ s[5], s[7:1]};
  endfunction
  task automatic chk(string w);
    checks++;
    if (q !== r) begin failures++; $display("FAIL %s got %b exp %b", w, q, r); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    bit seen [256];
    int distinct;
    wr_en = 1; wdata = 8'h01; adc_run = 0; delay = 0;
    @(posedge clk); #1;
    wr_en = 0; r = 8'h01; chk("load seed");
    adc_run = 1;
    for (int n = 0; n < 300; n++) begin
      delay = 1'($urandom);
      if (n % 50 == 49) begin adc_run = 0; end
      else adc_run = 1;
      @(posedge clk); #1;
      if (adc_run && delay) r = step(r);
      chk($sformatf("cycle %0d", n));
    end
    // write beats step
    wr_en = 1; wdata = 8'hA5; adc_run = 1; delay = 1;
    @(posedge clk); #1;
    wr_en = 0; r = 8'hA5; chk("write priority");
    // 64 distinct states from the seed
    wr_en = 1; wdata = 8'h01; @(posedge clk); #1; wr_en = 0;
    distinct = 0;
    for (int k = 0; k < 256; k++) seen[k] = 0;
    for (int n = 0; n < 64; n++) begin
      if (!seen[q]) distinct++;
      seen[q] = 1;
      @(posedge clk); #1;
    end
    checks++;
    if (distinct != 64) begin failures++; $display("FAIL only %0d distinct states", distinct); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
