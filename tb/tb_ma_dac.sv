// tb_ma_dac -- checks the word DAC model: current = code * I_LSB with EN
// high (binary 8:4:2:1 weighting), zero with EN low.
module tb_ma_dac;
  logic en; logic [3:0] q; real i_out;
  int checks = 0, failures = 0;
  ma_dac #(.I_LSB(2.0)) dut (.*);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int e = 0; e < 2; e++)
      for (int c = 0; c < 16; c++) begin
        real exp_i;
        en = e[0]; q = c[3:0]; #1;
        exp_i = e ? 2.0 * c : 0.0;
        checks++;
        if (i_out > exp_i + 1e-9 || i_out < exp_i - 1e-9) begin
          failures++; $display("FAIL en=%0d q=%0d i=%f exp %f", e, c, i_out, exp_i);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
