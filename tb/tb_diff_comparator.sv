// tb_diff_comparator -- checks delay = (selected input > ramp + VOS), with the
// calibration switch selecting the known input.
module tb_diff_comparator;
  real v_in, v_cal, v_ramp; logic cal_sel, delay;
  int checks = 0, failures = 0;
  diff_comparator #(.PMOS_INPUT(1'b0), .VOS(0.02)) dut (.*);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int n = 0; n < 200; n++) begin
      bit e;
      v_in = $urandom_range(0, 1000) / 1000.0;
      v_cal = $urandom_range(0, 1000) / 1000.0;
      v_ramp = $urandom_range(0, 1000) / 1000.0 + 0.0005;
      cal_sel = n[0];
      #1;
      e = ((cal_sel ? v_cal : v_in) - v_ramp) > 0.02;
      checks++;
      if (delay !== e) begin
        failures++; $display("FAIL in=%f cal=%f sel=%0d ramp=%f", v_in, v_cal, cal_sel, v_ramp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
