// tb_ma_iv_converter -- checks the current-to-voltage model: the two input
// currents are summed before conversion, v = R_EQ * (i_a + i_b).
module tb_ma_iv_converter;
  real i_a, i_b, v_out;
  int checks = 0, failures = 0;
  ma_iv_converter #(.R_EQ(0.05)) dut (.*);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int a = 0; a < 16; a++)
      for (int b = 0; b < 16; b += 5) begin
        real e;
        i_a = a; i_b = b; #1;
        e = 0.05 * (a + b);
        checks++;
        if (v_out > e + 1e-9 || v_out < e - 1e-9) begin
          failures++; $display("FAIL a=%0d b=%0d v=%f exp %f", a, b, v_out, e);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
