// tb_mac_column_sum -- drives random row currents (including rows switched
// off, i.e. zero current) and checks v_out = R_EQ * sum of all row currents.
module tb_mac_column_sum;
  localparam int N = 5;
  real i_in [N];
  real v_out;
  int checks = 0, failures = 0;
  mac_column_sum #(.N(N), .R_EQ(0.01)) dut (.*);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 100; t++) begin
      real e;
      e = 0.0;
      for (int i = 0; i < N; i++) begin
        i_in[i] = ($urandom_range(0, 3) == 0) ? 0.0 : real'($urandom_range(0, 15));
        e += i_in[i];
      end
      e = 0.01 * e;
      #1;
      checks++;
      if (v_out > e + 1e-9 || v_out < e - 1e-9) begin
        failures++; $display("FAIL t=%0d v=%f exp %f", t, v_out, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
