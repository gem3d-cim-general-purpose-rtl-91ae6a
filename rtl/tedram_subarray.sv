// tedram_subarray -- Layer B transposable eDRAM (T-eDRAM) sub-array.
//
// N x N words of W bits built from 3T eDRAM cells with a buffered transpose
// read path (buffer + transmission gate onto R, enabled by RWL) and a
// transpose write path (W onto the storage node QB, enabled by WWL). Here
// RWL runs horizontally (one per row) and WWL vertically (one per column),
// the mirror image of the Layer A sub-array, and the 3D bonds are mirrored
// too: upper-diagonal cells bond their W node, lower-diagonal cells their R.
//
//   blk1_on=0, blk2_on=0  bond mode (transpose steps 1 and 3): upper cells
//       (j>i) load bond_w[i][j] while WWL_j is high; lower cells (i>j) drive
//       bond_r[i][j] while RWL_i is high.
//   blk1_on=0, blk2_on=1  copy mode (step 2): RWL_k together with WWL_k
//       copies cell (k,i) into cell (i,k) for every i>k in one cycle
//       (upper diagonal -> lower diagonal).
//   blk1_on=1             plain eDRAM through the word port.
//
// Word port and timing as in tsram_subarray. The storage node is modelled as
// static: retention and refresh are outside this model. Copy rules and line
// orientation follow the paper; the blocker settings for this layer are
// taken to be the same as for Layer A.
module tedram_subarray #(
  parameter int N = 32,
  parameter int W = 4
) (
  input  logic                 clk,
  input  logic                 acc_en,
  input  logic                 acc_we,
  input  logic [$clog2(N)-1:0] acc_row,
  input  logic [$clog2(N)-1:0] acc_col,
  input  logic [W-1:0]         acc_wdata,
  output logic [W-1:0]         acc_rdata,
  input  logic [N-1:0]         rwl,
  input  logic [N-1:0]         wwl,
  input  logic                 blk1_on,
  input  logic                 blk2_on,
  input  logic [W-1:0]         bond_w [N][N],
  output logic [W-1:0]         bond_r [N][N]
);

  logic [W-1:0] mem [N][N];

  wire bond_mode = !blk1_on && !blk2_on;
  wire copy_mode = !blk1_on &&  blk2_on;

  // R nodes of lower-diagonal cells through their 3D bonds.
  always_comb begin
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        bond_r[i][j] = (bond_mode && i > j && rwl[i]) ? mem[i][j] : '0;
  end

  always_ff @(posedge clk) begin
    if (bond_mode) begin
      for (int i = 0; i < N; i++)
        for (int j = i + 1; j < N; j++)
          if (wwl[j]) mem[i][j] <= bond_w[i][j];
    end else if (copy_mode) begin
      for (int k = 0; k < N; k++)
        if (rwl[k] && wwl[k])
          for (int i = k + 1; i < N; i++) mem[i][k] <= mem[k][i];
    end else if (acc_en && acc_we) begin
      mem[acc_row][acc_col] <= acc_wdata;
    end
    if (acc_en && !acc_we) acc_rdata <= mem[acc_row][acc_col];
  end

  a_port_idle: assert property (@(posedge clk) (acc_en && acc_we) |-> (wwl == '0 && blk1_on));

endmodule
