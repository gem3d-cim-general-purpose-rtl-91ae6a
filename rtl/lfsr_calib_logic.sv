// lfsr_calib_logic -- per-word offset calibration of the LFSR ADCs.
//
// Every MA-eDRAM word has its own small comparator, and each comparator has
// its own input offset. To cancel it, a calibration conversion is run with a
// known input on all comparators, starting every LFSR at 00000001. A word
// whose comparator is ideal ends at position CAL_CODE; a word that ends at
// position p is off by (p - CAL_CODE) steps. This block reads the resulting
// codes one row per cycle (cap_en, cap_row, cap_codes), and stores for each
// word the start state that lies (p - CAL_CODE) steps before 00000001 in the
// LFSR cycle, i.e. the state at position (CAL_CODE - p) mod period. Later
// conversions start each word from its own stored state (rd_row -> seeds, one
// row per cycle, used for the start-bit write), so the counter itself
// subtracts the offset and the read-out needs no correction. Until a
// calibration has been captured (valid low) every start state is 00000001.
// A code that is not on the LFSR cycle is stored as 00000001.
// Storage is N*M 8-bit registers; rst_n clears only valid.
// Calibration with a known input and per-word starting points follow the
// paper; the arithmetic and the value of the known input are this design's.
module lfsr_calib_logic #(
  parameter int N        = 32,
  parameter int M        = 32,
  parameter int LFSR_TAP = gem3d_pkg::DEFAULT_LFSR_TAP,
  parameter int CAL_CODE = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cap_en,
  input  logic [$clog2(N)-1:0] cap_row,
  input  gem3d_pkg::lfsr_t     cap_codes [M],
  input  logic [$clog2(N)-1:0] rd_row,
  output gem3d_pkg::lfsr_t     seeds [M],
  output logic                 valid
);
  import gem3d_pkg::*;

  localparam int           PERIOD = lfsr_period(LFSR_TAP);
  localparam pos_table_t   POS    = lfsr_pos_table(LFSR_TAP);
  localparam state_table_t STATE  = lfsr_state_table(LFSR_TAP);

  lfsr_t seed_mem [N][M];
  lfsr_t new_seed [M];

  always_comb begin
    for (int j = 0; j < M; j++) begin
      int p;
      p = int'(POS[cap_codes[j]]);
      if (p == 255) new_seed[j] = LFSR_SEED;
      else          new_seed[j] = STATE[((CAL_CODE - p) % PERIOD + PERIOD) % PERIOD];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      valid <= 1'b0;
    else if (cap_en) valid <= 1'b1;
  end

  always_ff @(posedge clk)
    if (cap_en) seed_mem[cap_row] <= new_seed;

  always_comb
    for (int j = 0; j < M; j++) seeds[j] = valid ? seed_mem[rd_row][j] : LFSR_SEED;

endmodule
