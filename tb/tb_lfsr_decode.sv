// tb_lfsr_decode -- walks the LFSR cycle from 00000001 with a reference step
// written out here and checks, for every state, its position and the
// saturated 6-bit value (position for 0..63, 0 for the last 64 positions,
// 63 otherwise); a state off the cycle (00000000) decodes to 63.
module tb_lfsr_decode;
  logic [7:0] code, pos;
  logic [5:0] value;
  int checks = 0, failures = 0;
  lfsr_decode dut (.*);
  function automatic logic [7:0] step(logic [7:0] s);
    return {s[0] ^ s[5], s[7:1]};
  endfunction
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [7:0] s;
    int period;
    s = step(8'h01); period = 1;
    while (s != 8'h01) begin s = step(s); period++; end
    checks++;
    if (period != 217) begin failures++; $display("FAIL period %0d", period); end
    s = 8'h01;
    for (int p = 0; p < period; p++) begin
      int ev;
      ev = (p <= 63) ? p : (p >= period - 64) ? 0 : 63;
      code = s; #1;
      checks++;
      if (int'(pos) != p || int'(value) != ev) begin
        failures++; $display("FAIL code %b pos %0d val %0d exp %0d %0d", s, pos, value, p, ev);
      end
      s = step(s);
    end
    code = 8'h00; #1;
    checks++;
    if (value != 63 || pos != 8'hFF) begin failures++; $display("FAIL off-cycle"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
