// gem3d_top -- two-layer SRAM-on-eDRAM compute-in-memory macro.
//
// Layer A (SRAM) and Layer B (eDRAM) are stacked and joined by one vertical
// bond per transpose cell and per multiply/add word. Each layer holds
// sub-arrays specialised for one job:
//
//   transpose   Layer A tsram_subarray  <-> Layer B tedram_subarray
//               The matrix in the T-SRAM is replaced by its transpose in N+1
//               cycles (transpose_ctrl): upper diagonal A->B, diagonal swap
//               inside both layers, lower diagonal B->A.
//   multiply    Layer A ma_sram_subarray (a,b pairs) + per-word ma_dac and
//               ma_iv_converter give V_DAC(a); Layer B ma_edram_subarray
//               holds b in each word's low nibble; per word a c2c_multiplier
//               forms V_DAC*b/16, a diff_comparator against the shared
//               ramp_generator gates reference-clock pulses into the word's
//               LFSR counter for 64 cycles (ma_ctrl).
//   add         the same with V_A+B = summed DAC currents of a and b, no
//               multiplier, NMOS-input comparators.
//   dot product OP_MAC uses the multiply pair: the A words of row i are
//               enabled only when input activation mac_in[i] is 1, the word
//               currents of each column are summed (mac_column_sum) and the
//               column voltage replaces the product at the comparator of
//               row 0 of the multiply eDRAM, so word (0,j) of that sub-array
//               ends with the code of sum_i mac_in[i]*a_ij, scaled so that
//               the largest sum (15*MA_N) is full scale. The other rows of
//               that sub-array hold no meaningful result after OP_MAC.
//
// Results stay in Layer B as 8-bit LFSR codes; the host read path decodes
// them with lfsr_decode into 6-bit values (host_rvalue). Comparator offsets
// are removed by per-word calibration (lfsr_calib_logic): OP_CAL_MUL /
// OP_CAL_ADD convert a known mid-scale input and store per-word start states
// used by every later conversion of that sub-array.
//
// Ports. Command: cmd_valid/cmd_ready handshake with cmd_op; cmd_done pulses
// when the operation has finished. Host word port (only while cmd_ready):
// host_en with host_we writes host_wdata (low 4 bits for 4-bit sub-arrays)
// into sub-array host_sel at (host_row, host_col); a read returns host_rdata
// and its decoded value host_rvalue one cycle later with host_rvalid. For
// the MA-SRAM sub-arrays column 2j is a_ij and 2j+1 is b_ij. mac_in is
// sampled when an OP_MAC command is taken.
//
// The analog parts are ideal behavioural models; COMP_VOS_LSB (default 0)
// gives the comparators deterministic per-word offsets of -3..+3 times that
// many ramp steps, to exercise calibration. Sizes follow the paper's 32 x 32
// evaluation; the use of one sub-array of each kind, the host port and the
// command set, and the dot-product routing to row 0 are this design's
// choices.
//
// Lint notes that stand: the two sub-array pairs are one generate loop, so
// signals only one pair uses (word_b, sample, v_mul, i_word, v_col) are
// reported unused in the other; t_busy and ma_busy are kept for observation;
// the 8-bit host address is wider than the default 32-word sub-arrays; the
// decoder's position output is left open because only the value is needed.
module gem3d_top #(
  parameter int  N            = 32,  // transpose matrix size
  parameter int  MA_N         = 32,  // multiply/add matrix rows
  parameter int  MA_M         = 32,  // multiply/add matrix columns
  parameter int  LFSR_TAP     = gem3d_pkg::DEFAULT_LFSR_TAP,
  parameter real COMP_VOS_LSB = 0.0
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          cmd_valid,
  input  gem3d_pkg::op_e                cmd_op,
  output logic                          cmd_ready,
  output logic                          cmd_done,
  input  logic [MA_N-1:0]               mac_in,
  input  logic                          host_en,
  input  logic                          host_we,
  input  gem3d_pkg::sel_e               host_sel,
  input  logic [7:0]                    host_row,
  input  logic [7:0]                    host_col,
  input  logic [7:0]                    host_wdata,
  output logic                          host_rvalid,
  output logic [7:0]                    host_rdata,
  output logic [gem3d_pkg::ADC_OUT_W-1:0] host_rvalue
);
  import gem3d_pkg::*;

  localparam real I_LSB   = 1.0;     // uA
  localparam real R_MUL   = 0.048;   // V/uA: V_DAC(15) = 0.72 V
  localparam real R_ADD   = 0.024;   // V/uA: V_A+B(15+15) = 0.72 V
  localparam real VFS_MUL = 225.0 / 16.0 * I_LSB * R_MUL;  // 15*15/16 LSB
  localparam real VFS_ADD = 30.0 * I_LSB * R_ADD;
  localparam real R_MAC   = VFS_MUL / (15.0 * real'(MA_N) * I_LSB);
  localparam int  CAL_CODE = ADC_STEPS / 2;
  localparam real VCAL_MUL = VFS_MUL * real'(CAL_CODE) / real'(ADC_STEPS);
  localparam real VCAL_ADD = VFS_ADD * real'(CAL_CODE) / real'(ADC_STEPS);
  localparam int  TAW = $clog2(N);
  localparam int  RAW = $clog2(MA_N);
  localparam int  CAW = $clog2(MA_M);

  // ---------------------------------------------------------------- control
  logic t_start, mul_start, add_start, cal_cmd, mac_mode, keep_dac;
  logic t_done, mul_done, add_done;
  logic [MA_N-1:0] mac_act;

  control_unit u_cu (
    .clk, .rst_n, .cmd_valid, .cmd_op, .cmd_ready, .done(cmd_done),
    .t_start, .mul_start, .add_start, .cal(cal_cmd), .mac(mac_mode), .keep_dac,
    .t_done, .mul_done, .add_done
  );

  // Input activations of a dot product, held for the whole operation.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         mac_act <= '0;
    else if (mul_start) mac_act <= mac_in;
  end

  // ---------------------------------------------------------------- host port
  wire host_wr = host_en && host_we;
  wire host_rd = host_en && !host_we;
  function automatic logic hit(sel_e s, sel_e want);
    return s == want;
  endfunction

  // ---------------------------------------------------------------- transpose
  logic [N-1:0]       a_rwl, a_wwl, b_rwl, b_wwl;
  logic               a_blk1_on, a_blk2_on, b_blk1_on, b_blk2_on;
  logic               t_busy;
  logic [T_WORD_W-1:0] bond_ab [N][N];  // Layer A R -> Layer B W (upper)
  logic [T_WORD_W-1:0] bond_ba [N][N];  // Layer B R -> Layer A W (lower)
  logic [T_WORD_W-1:0] tsram_rdata, tedram_rdata;

  transpose_ctrl #(.N(N)) u_tctrl (
    .clk, .rst_n, .start(t_start), .busy(t_busy), .done(t_done),
    .a_rwl, .a_wwl, .a_blk1_on, .a_blk2_on,
    .b_rwl, .b_wwl, .b_blk1_on, .b_blk2_on
  );

  tsram_subarray #(.N(N), .W(T_WORD_W)) u_tsram (
    .clk,
    .acc_en   (host_en && hit(host_sel, SEL_TSRAM)),
    .acc_we   (host_we),
    .acc_row  (host_row[TAW-1:0]),
    .acc_col  (host_col[TAW-1:0]),
    .acc_wdata(host_wdata[T_WORD_W-1:0]),
    .acc_rdata(tsram_rdata),
    .rwl(a_rwl), .wwl(a_wwl), .blk1_on(a_blk1_on), .blk2_on(a_blk2_on),
    .bond_r(bond_ab), .bond_w(bond_ba)
  );

  tedram_subarray #(.N(N), .W(T_WORD_W)) u_tedram (
    .clk,
    .acc_en   (host_en && hit(host_sel, SEL_TEDRAM)),
    .acc_we   (host_we),
    .acc_row  (host_row[TAW-1:0]),
    .acc_col  (host_col[TAW-1:0]),
    .acc_wdata(host_wdata[T_WORD_W-1:0]),
    .acc_rdata(tedram_rdata),
    .rwl(b_rwl), .wwl(b_wwl), .blk1_on(b_blk1_on), .blk2_on(b_blk2_on),
    .bond_w(bond_ab), .bond_r(bond_ba)
  );

  // ---------------------------------------------------------------- MA pairs
  // Index 0: multiply sub-arrays, index 1: add sub-arrays.
  logic [MA_WORD_W-1:0] ma_sram_rdata [2];
  lfsr_t                ma_edram_rdata [2];
  logic                 ma_done [2];
  logic                 ma_busy [2];

  for (genvar u = 0; u < 2; u++) begin : g_ma
    localparam bit  IS_ADD = (u == 1);
    localparam real VFS    = IS_ADD ? VFS_ADD : VFS_MUL;
    localparam real VCAL   = IS_ADD ? VCAL_ADD : VCAL_MUL;
    localparam real R_EQ   = IS_ADD ? R_ADD : R_MUL;
    localparam sel_e SSEL  = IS_ADD ? SEL_ADD_SRAM : SEL_MUL_SRAM;
    localparam sel_e ESEL  = IS_ADD ? SEL_ADD_EDRAM : SEL_MUL_EDRAM;

    logic                 dac_en, sample, cal_sel, init_all, row_we, adc_run, cap_en;
    logic [RAW-1:0]       row_idx;
    logic                 calibrated;
    logic [MA_WORD_W-1:0] word_a [MA_N][MA_M];
    logic [MA_WORD_W-1:0] word_b [MA_N][MA_M];
    lfsr_t                q      [MA_N][MA_M];
    logic                 delay  [MA_N][MA_M];
    lfsr_t                seeds  [MA_M];
    real                  v_ramp;
    real                  i_word [MA_M][MA_N];  // A-word DAC currents, per column
    real                  v_col  [MA_M];        // dot-product column voltages

    ma_ctrl #(.N(MA_N), .KEEP_DAC(IS_ADD)) u_ctrl (
      .clk, .rst_n,
      .start(IS_ADD ? add_start : mul_start), .cal(cal_cmd),
      .keep(!IS_ADD && keep_dac), .calibrated,
      .busy(ma_busy[u]), .done(ma_done[u]),
      .dac_en, .sample, .cal_sel, .init_all, .row_we, .row_idx, .adc_run, .cap_en
    );

    ma_sram_subarray #(.N(MA_N), .M(MA_M)) u_sram (
      .clk,
      .acc_en   (host_en && hit(host_sel, SSEL)),
      .acc_we   (host_we),
      .acc_row  (host_row[RAW-1:0]),
      .acc_col  (host_col[CAW:0]),
      .acc_wdata(host_wdata[MA_WORD_W-1:0]),
      .acc_rdata(ma_sram_rdata[u]),
      .word_a, .word_b
    );

    ma_edram_subarray #(.N(MA_N), .M(MA_M), .LFSR_TAP(LFSR_TAP)) u_edram (
      .clk,
      .acc_en   (host_en && hit(host_sel, ESEL)),
      .acc_we   (host_we),
      .acc_row  (host_row[RAW-1:0]),
      .acc_col  (host_col[CAW-1:0]),
      .acc_wdata(host_wdata),
      .acc_rdata(ma_edram_rdata[u]),
      .init_all, .row_we, .row_idx, .row_wdata(seeds),
      .adc_run, .delay, .q
    );

    lfsr_calib_logic #(.N(MA_N), .M(MA_M), .LFSR_TAP(LFSR_TAP), .CAL_CODE(CAL_CODE)) u_cal (
      .clk, .rst_n, .cap_en, .cap_row(row_idx), .cap_codes(q[row_idx]),
      .rd_row(row_idx), .seeds, .valid(calibrated)
    );

    ramp_generator #(.STEPS(ADC_STEPS), .V_FS(VFS)) u_ramp (
      .clk, .run(adc_run), .v_ramp
    );

    for (genvar i = 0; i < MA_N; i++) begin : g_r
      for (genvar j = 0; j < MA_M; j++) begin : g_c
        localparam real VOS =
          COMP_VOS_LSB * real'(((i * 3 + j * 5 + u) % 7) - 3) * VFS / real'(ADC_STEPS);
        real i_a, i_b, v_bond, v_cmp, v_mul;
        logic en_a;

        // Layer A: word DACs and current-to-voltage network. In a dot
        // product the row's activation gates the A word's DAC.
        assign en_a = dac_en && (IS_ADD || !mac_mode || mac_act[i]);
        ma_dac u_dac_a (.en(en_a), .q(word_a[i][j]), .i_out(i_a));
        assign i_word[j][i] = i_a;
        if (IS_ADD) begin : g_add
          ma_dac u_dac_b (.en(dac_en), .q(word_b[i][j]), .i_out(i_b));
        end else begin : g_mul
          assign i_b = 0.0;
        end
        ma_iv_converter #(.R_EQ(R_EQ)) u_iv (.i_a, .i_b, .v_out(v_bond));

        // Layer B: multiplier (multiply words only) and comparator; row 0
        // of the multiply sub-array converts the column sum in a dot product.
        if (IS_ADD) begin : g_add_in
          assign v_mul = 0.0;
          assign v_cmp = v_bond;
        end else begin : g_mul_in
          c2c_multiplier u_c2c (
            .v_dac(v_bond), .b(q[i][j][3:0]), .sample, .v_mul
          );
          if (i == 0) begin : g_mac_in
            assign v_cmp = mac_mode ? v_col[j] : v_mul;
          end else begin : g_prod_in
            assign v_cmp = v_mul;
          end
        end
        diff_comparator #(.PMOS_INPUT(!IS_ADD), .VOS(VOS)) u_cmp (
          .v_in(v_cmp), .v_cal(VCAL), .cal_sel, .v_ramp, .delay(delay[i][j])
        );
      end
    end

    for (genvar j = 0; j < MA_M; j++) begin : g_col
      if (IS_ADD) begin : g_none
        assign v_col[j] = 0.0;
      end else begin : g_sum
        mac_column_sum #(.N(MA_N), .R_EQ(R_MAC)) u_sum (.i_in(i_word[j]), .v_out(v_col[j]));
      end
    end
  end

  assign mul_done = ma_done[0];
  assign add_done = ma_done[1];

  // ---------------------------------------------------------------- read mux
  sel_e rd_sel;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      host_rvalid <= 1'b0;
      rd_sel      <= SEL_TSRAM;
    end else begin
      host_rvalid <= host_rd;
      if (host_rd) rd_sel <= host_sel;
    end
  end

  always_comb begin
    unique case (rd_sel)
      SEL_TSRAM:     host_rdata = 8'(tsram_rdata);
      SEL_TEDRAM:    host_rdata = 8'(tedram_rdata);
      SEL_MUL_SRAM:  host_rdata = 8'(ma_sram_rdata[0]);
      SEL_ADD_SRAM:  host_rdata = 8'(ma_sram_rdata[1]);
      SEL_MUL_EDRAM: host_rdata = ma_edram_rdata[0];
      SEL_ADD_EDRAM: host_rdata = ma_edram_rdata[1];
      default:       host_rdata = '0;
    endcase
  end

  lfsr_decode #(.LFSR_TAP(LFSR_TAP)) u_dec (
    .code(host_rdata), .pos(), .value(host_rvalue)
  );

  a_host_quiet: assert property (@(posedge clk) disable iff (!rst_n) host_wr |-> cmd_ready);

endmodule
