// tb_gem3d_pkg -- checks the LFSR arithmetic of the shared package against a
// bit-by-bit shift model written here: the next-state function for every
// state and every tap, the cycle lengths (217 states from 00000001 for the
// default tap Q6, 30 for Q7), the state at each position, and the two tables
// that map between states and positions.
module tb_gem3d_pkg;
  import gem3d_pkg::*;
  int checks = 0, failures = 0;

  task automatic chk(bit ok, string w);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", w);
    end
  endtask

  // Reference step: Q7..Q1 <= Q8..Q2, Q8 <= Q1 xor Q[tap].
  function automatic logic [7:0] ref_next(logic [7:0] s, int tap);
    logic [7:0] n;
    for (int b = 0; b < 7; b++) n[b] = s[b+1];
    n[7] = s[0] ^ s[tap-1];
    return n;
  endfunction

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    pos_table_t   pt;
    state_table_t st;
    logic [7:0]   s;
    int           on_cycle;

    for (int tap = 2; tap <= 8; tap++)
      for (int v = 0; v < 256; v++)
        chk(lfsr_next(8'(v), tap) == ref_next(8'(v), tap), $sformatf("next tap=%0d s=%02h", tap, v));

    chk(lfsr_period(6) == 217, $sformatf("period tap 6 = %0d", lfsr_period(6)));
    chk(lfsr_period(7) == 30, $sformatf("period tap 7 = %0d", lfsr_period(7)));
    chk(lfsr_period(DEFAULT_LFSR_TAP) >= ADC_STEPS, "default cycle shorter than the ramp");

    pt = lfsr_pos_table(DEFAULT_LFSR_TAP);
    st = lfsr_state_table(DEFAULT_LFSR_TAP);
    s = LFSR_SEED;
    for (int k = 0; k < 256; k++) begin
      if (k < 217) begin
        chk(lfsr_state_at(k, DEFAULT_LFSR_TAP) == s, $sformatf("state_at %0d", k));
        chk(int'(pt[s]) == k, $sformatf("pos_table[%02h] = %0d, exp %0d", s, pt[s], k));
      end
      chk(st[k] == lfsr_state_at(k % 217, DEFAULT_LFSR_TAP), $sformatf("state_table %0d", k));
      s = ref_next(s, DEFAULT_LFSR_TAP);
      if ((k + 1) % 217 == 0) chk(s == LFSR_SEED, "cycle closes");
    end
    on_cycle = 0;
    for (int v = 0; v < 256; v++) if (pt[v] != 8'hFF) on_cycle++;
    chk(on_cycle == 217, $sformatf("%0d states on the cycle", on_cycle));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
