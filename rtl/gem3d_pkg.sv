// gem3d_pkg -- constants, operation codes and LFSR arithmetic shared by the
// GEM3D compute-in-memory-on-memory macro.
//
// The element-wise multiply/add path converts an analog result to digital by
// letting an 8-bit eDRAM word run as a linear feedback shift register (LFSR)
// for as many reference-clock cycles as the comparator reports the analog
// value above the ramp. The position of the final LFSR state in its sequence
// is the 6-bit result. The functions below step that LFSR, give the state at
// a position, and give the position of a state; the calibration logic and the
// read-out decoder use them.
//
// LFSR convention: q[7:0] = {Q8, Q7, ..., Q1}. One step moves every bit one
// place towards Q1 (Q7 <= Q8, ..., Q1 <= Q2) and writes Q8 <= Q1 ^ Q[tap].
// The shift direction and the Q1 tap follow the paper. The paper names Q7 as
// the second tap, but that register repeats after 30 states, fewer than the
// 64 output levels the converter needs, so the second tap is a parameter and
// this design uses Q6 (217-state cycle) by default. Start state 8'b00000001.
package gem3d_pkg;

  localparam int T_WORD_W   = 4;   // transpose sub-array word width
  localparam int MA_WORD_W  = 4;   // MA-SRAM word width (one operand)
  localparam int ED_WORD_W  = 8;   // MA-eDRAM word width
  localparam int ADC_STEPS  = 64;  // reference-clock cycles per conversion
  localparam int ADC_OUT_W  = 6;   // decoded result width
  localparam int DEFAULT_LFSR_TAP = 6;
  localparam logic [ED_WORD_W-1:0] LFSR_SEED = 8'b0000_0001;

  typedef logic [ED_WORD_W-1:0] lfsr_t;

  // Matrix operations accepted by the control unit.
  typedef enum logic [2:0] {
    OP_NOP       = 3'd0,
    OP_TRANSPOSE = 3'd1,  // Layer A T-SRAM matrix <- its transpose
    OP_MUL       = 3'd2,  // element-wise A .* B in the multiply sub-arrays
    OP_ADD       = 3'd3,  // element-wise A + B in the add sub-arrays
    OP_CAL_MUL   = 3'd4,  // offset calibration of the multiply comparators
    OP_CAL_ADD   = 3'd5,  // offset calibration of the add comparators
    OP_MAC       = 3'd6   // dot products: binary row activations x A words,
                          // accumulated per column, converted in Layer B
  } op_e;

  // One LFSR step. tap is the 1-based index (2..8) of the bit XORed with Q1.
  function automatic lfsr_t lfsr_next(lfsr_t s, int tap);
    return {s[0] ^ s[tap-1], s[7:1]};
  endfunction

  // Length of the cycle that starts at LFSR_SEED.
  function automatic int lfsr_period(int tap);
    lfsr_t s = lfsr_next(LFSR_SEED, tap);
    int n = 1;
    while (s != LFSR_SEED && n < 256) begin
      s = lfsr_next(s, tap);
      n++;
    end
    return n;
  endfunction

  // State reached from LFSR_SEED after pos steps.
  function automatic lfsr_t lfsr_state_at(int pos, int tap);
    lfsr_t s = LFSR_SEED;
    for (int k = 0; k < pos; k++) s = lfsr_next(s, tap);
    return s;
  endfunction

  // Table from state to position in the cycle; states off the cycle get 255.
  typedef logic [7:0] pos_table_t [256];

  function automatic pos_table_t lfsr_pos_table(int tap);
    pos_table_t t;
    lfsr_t s = LFSR_SEED;
    int p = lfsr_period(tap);
    for (int k = 0; k < 256; k++) t[k] = 8'hFF;
    for (int k = 0; k < p; k++) begin
      t[s] = 8'(k);
      s = lfsr_next(s, tap);
    end
    return t;
  endfunction

  // Table from position to state (positions at or past the period wrap).
  typedef lfsr_t state_table_t [256];

  // Sub-array selected by the host word port.
  typedef enum logic [2:0] {
    SEL_TSRAM     = 3'd0,  // Layer A transpose sub-array (4-bit words)
    SEL_TEDRAM    = 3'd1,  // Layer B transpose sub-array (4-bit words)
    SEL_MUL_SRAM  = 3'd2,  // Layer A multiply operands (col 2j = a, 2j+1 = b)
    SEL_ADD_SRAM  = 3'd3,  // Layer A add operands (col 2j = a, 2j+1 = b)
    SEL_MUL_EDRAM = 3'd4,  // Layer B multiply words (8-bit)
    SEL_ADD_EDRAM = 3'd5   // Layer B add words (8-bit)
  } sel_e;

  function automatic state_table_t lfsr_state_table(int tap);
    state_table_t t;
    lfsr_t s = LFSR_SEED;
    int p = lfsr_period(tap);
    for (int k = 0; k < 256; k++) begin
      t[k] = s;
      s = lfsr_next(s, tap);
      if ((k + 1) % p == 0) s = LFSR_SEED;
    end
    return t;
  endfunction

endpackage
