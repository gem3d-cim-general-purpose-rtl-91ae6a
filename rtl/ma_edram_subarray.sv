// ma_edram_subarray -- Layer B multiply/add eDRAM (MA-eDRAM) sub-array.
//
// N x M words of 8 bits, one per output element, each an ma_edram_word that
// doubles as an LFSR counter. For a multiply the word first holds operand B
// in its four low bits (q[3:0] feeds the word's C-2C multiplier); before a
// conversion every word is loaded with its LFSR start state, either all at
// once with 00000001 (init_all) or one row per cycle from row_wdata (start
// states produced by calibration); then for the conversion window adc_run is
// high and each word steps once per cycle in which its own comparator output
// delay[i][j] is high. All N*M words convert in parallel.
// Word port: acc_en/acc_we/acc_row/acc_col/acc_wdata write one word,
// a read returns acc_rdata one cycle later. Write priority: init_all, then
// the row write, then the word write. The word count, the start state and the
// parallel conversion follow the paper; the port arrangement is this design's.
module ma_edram_subarray #(
  parameter int N        = 32,
  parameter int M        = 32,
  parameter int LFSR_TAP = gem3d_pkg::DEFAULT_LFSR_TAP
) (
  input  logic                 clk,
  input  logic                 acc_en,
  input  logic                 acc_we,
  input  logic [$clog2(N)-1:0] acc_row,
  input  logic [$clog2(M)-1:0] acc_col,
  input  gem3d_pkg::lfsr_t     acc_wdata,
  output gem3d_pkg::lfsr_t     acc_rdata,
  input  logic                 init_all,
  input  logic                 row_we,
  input  logic [$clog2(N)-1:0] row_idx,
  input  gem3d_pkg::lfsr_t     row_wdata [M],
  input  logic                 adc_run,
  input  logic                 delay [N][M],
  output gem3d_pkg::lfsr_t     q [N][M]
);
  import gem3d_pkg::*;

  for (genvar i = 0; i < N; i++) begin : g_row
    for (genvar j = 0; j < M; j++) begin : g_col
      logic  wr_en;
      lfsr_t wdata;

      always_comb begin
        wr_en = 1'b0;
        wdata = acc_wdata;
        if (init_all) begin
          wr_en = 1'b1;
          wdata = LFSR_SEED;
        end else if (row_we && int'(row_idx) == i) begin
          wr_en = 1'b1;
          wdata = row_wdata[j];
        end else if (acc_en && acc_we && int'(acc_row) == i && int'(acc_col) == j) begin
          wr_en = 1'b1;
        end
      end

      ma_edram_word #(.LFSR_TAP(LFSR_TAP)) u_word (
        .clk    (clk),
        .wr_en  (wr_en),
        .wdata  (wdata),
        .adc_run(adc_run),
        .delay  (delay[i][j]),
        .q      (q[i][j])
      );
    end
  end

  always_ff @(posedge clk)
    if (acc_en && !acc_we) acc_rdata <= q[acc_row][acc_col];

endmodule
