// tb_lfsr_calib_logic -- feeds rows of calibration codes (LFSR states at
// random positions p around the ideal 32) and checks that each stored start
// state, stepped p times (the calibration count of a later conversion of the
// same known input), lands on position 32, i.e. the offset is cancelled.
// Also checks 00000001 start states before any capture.
module tb_lfsr_calib_logic;
  localparam int N = 4, M = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, cap_en, valid;
  logic [1:0] cap_row, rd_row;
  logic [7:0] cap_codes [M];
  logic [7:0] seeds [M];
  int pos_of [N][M];
  int checks = 0, failures = 0;

  lfsr_calib_logic #(.N(N), .M(M)) dut (.*);

  function automatic logic [7:0] step(logic [7:0] s);
    return {s[0] ^ s[5], s[7:1]};
  endfunction
  function automatic logic [7:0] at(int p);
    logic [7:0] s = 8'h01;
    for (int k = 0; k < p; k++) s = step(s);
    return s;
  endfunction

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rst_n = 0; cap_en = 0; cap_row = 0; rd_row = 0;
    for (int j = 0; j < M; j++) cap_codes[j] = 0;
    @(posedge clk); #1 rst_n = 1;
    for (int j = 0; j < M; j++) begin
      checks++;
      if (seeds[j] !== 8'h01 || valid) begin failures++; $display("FAIL uncalibrated seed"); end
    end
    for (int i = 0; i < N; i++) begin
      cap_en = 1; cap_row = 2'(i);
      for (int j = 0; j < M; j++) begin
        pos_of[i][j] = $urandom_range(24, 40);
        cap_codes[j] = at(pos_of[i][j]);
      end
      @(posedge clk); #1;
    end
    cap_en = 0;
    for (int i = 0; i < N; i++) begin
      rd_row = 2'(i); #1;
      for (int j = 0; j < M; j++) begin
        logic [7:0] s;
        s = seeds[j];
        for (int k = 0; k < pos_of[i][j]; k++) s = step(s);
        checks++;
        if (s !== at(32)) begin
          failures++; $display("FAIL row %0d col %0d p=%0d seed %b", i, j, pos_of[i][j], seeds[j]);
        end
      end
    end
    checks++;
    if (!valid) begin failures++; $display("FAIL valid"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
