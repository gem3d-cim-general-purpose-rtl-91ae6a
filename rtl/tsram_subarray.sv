// tsram_subarray -- Layer A transposable SRAM (T-SRAM) sub-array.
//
// N x N words of W bits. Besides the ordinary word port every cell has a
// second read path (inverter + transmission gate onto its R node, enabled by
// RWL) and a second write path (M7 onto QAB from its W node, enabled by WWL).
// RWL lines run vertically, one per column; WWL lines run horizontally, one
// per row. R and W lines run along the rows and can be cut into per-cell
// segments by two sets of transmission-gate blockers:
//
//   blk1_on=0, blk2_on=0  "bond mode" (transpose steps 1 and 3): each cell's
//       R/W segment reaches only its own 3D bond. Upper-diagonal cells (j>i)
//       drive bond_r[i][j] while RWL_j is high; lower-diagonal cells (i>j)
//       load bond_w[i][j] at the clock edge while WWL_i is high.
//   blk1_on=0, blk2_on=1  "copy mode" (step 2): the yellow straps join R_i to
//       W_k, so RWL_k together with WWL_k copies cell (i,k) into cell (k,i)
//       for every i>k in one cycle (lower diagonal -> upper diagonal).
//   blk1_on=1             the transpose lines are idle and the array behaves
//       as a plain SRAM through the word port.
//
// The read inverter and the write into QAB cancel, so words move uninverted.
// Word port: acc_en with acc_we writes acc_wdata at the clock edge; a read
// returns the word on acc_rdata one cycle later. The word port is only used
// while no WWL is high (checked by an assertion).
// The blocker modes and the copy rule follow the paper; the word port
// timing and the mode with Blocker 1 on are this design's choices.
module tsram_subarray #(
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
  output logic [W-1:0]         bond_r [N][N],
  input  logic [W-1:0]         bond_w [N][N]
);

  logic [W-1:0] mem [N][N];

  wire bond_mode = !blk1_on && !blk2_on;
  wire copy_mode = !blk1_on &&  blk2_on;

  // R nodes of upper-diagonal cells through their 3D bonds.
  always_comb begin
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        bond_r[i][j] = (bond_mode && j > i && rwl[j]) ? mem[i][j] : '0;
  end

  always_ff @(posedge clk) begin
    if (bond_mode) begin
      for (int i = 0; i < N; i++)
        for (int j = 0; j < i; j++)
          if (wwl[i]) mem[i][j] <= bond_w[i][j];
    end else if (copy_mode) begin
      for (int k = 0; k < N; k++)
        if (rwl[k] && wwl[k])
          for (int i = k + 1; i < N; i++) mem[k][i] <= mem[i][k];
    end else if (acc_en && acc_we) begin
      mem[acc_row][acc_col] <= acc_wdata;
    end
    if (acc_en && !acc_we) acc_rdata <= mem[acc_row][acc_col];
  end

  // The word port must not collide with a transpose write.
  a_port_idle: assert property (@(posedge clk) (acc_en && acc_we) |-> (wwl == '0 && blk1_on));

endmodule
