// ma_sram_subarray -- Layer A multiply/add SRAM (MA-SRAM) sub-array storage.
//
// N rows of M element pairs. Each pair is two 4-bit words side by side, the
// element of matrix A followed by the matching element of matrix B, so row i
// holds a_i1 b_i1 a_i2 b_i2 ... (an 8-bit block per output element). Every
// word is an 8T-cell word whose two extra transistors per bit form a current
// DAC (modelled separately by ma_dac); this module holds the 6T storage and
// presents each stored word (the QC nodes) to its DAC on word_a / word_b.
// Word port: column 2j is a_ij, column 2j+1 is b_ij; acc_en with acc_we
// writes at the clock edge, a read returns acc_rdata one cycle later.
// The interleaved layout follows the paper; the port is this design's own.
module ma_sram_subarray #(
  parameter int N = 32,
  parameter int M = 32,
  parameter int W = gem3d_pkg::MA_WORD_W
) (
  input  logic                   clk,
  input  logic                   acc_en,
  input  logic                   acc_we,
  input  logic [$clog2(N)-1:0]   acc_row,
  input  logic [$clog2(2*M)-1:0] acc_col,
  input  logic [W-1:0]           acc_wdata,
  output logic [W-1:0]           acc_rdata,
  output logic [W-1:0]           word_a [N][M],
  output logic [W-1:0]           word_b [N][M]
);

  logic [W-1:0] mem [N][2*M];

  always_ff @(posedge clk) begin
    if (acc_en &&  acc_we) mem[acc_row][acc_col] <= acc_wdata;
    if (acc_en && !acc_we) acc_rdata <= mem[acc_row][acc_col];
  end

  always_comb begin
    for (int i = 0; i < N; i++)
      for (int j = 0; j < M; j++) begin
        word_a[i][j] = mem[i][2*j];
        word_b[i][j] = mem[i][2*j+1];
      end
  end

endmodule
