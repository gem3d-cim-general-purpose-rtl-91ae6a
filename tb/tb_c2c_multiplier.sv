// tb_c2c_multiplier -- checks the C-2C multiplier model: v_mul = v_dac*b/16
// while sample is high, and that the value is held after sample falls even
// when b (the eDRAM word) and v_dac change.
module tb_c2c_multiplier;
  real v_dac, v_mul; logic [3:0] b; logic sample;
  int checks = 0, failures = 0;
  c2c_multiplier dut (.*);
  task automatic chk(real e, string w);
    checks++;
    if (v_mul > e + 1e-9 || v_mul < e - 1e-9) begin
      failures++; $display("FAIL %s v=%f exp %f", w, v_mul, e);
    end
  endtask
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int a = 0; a < 16; a += 3)
      for (int c = 0; c < 16; c++) begin
        real e;
        sample = 1; v_dac = 0.05 * a; b = c[3:0]; #1;
        e = 0.05 * a * c / 16.0;
        chk(e, $sformatf("track a=%0d b=%0d", a, c));
        sample = 0; #1;
        b = 4'(c + 5); v_dac = 0.3; #1;
        chk(e, $sformatf("hold a=%0d b=%0d", a, c));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
