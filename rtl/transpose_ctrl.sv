// transpose_ctrl -- sequencer for the in-memory transpose across both layers.
//
// Drives the word lines and blockers of the Layer A T-SRAM and the Layer B
// T-eDRAM sub-arrays through the three steps of the transpose:
//
//   step 1 (1 cycle)     blockers off in both layers; every Layer A RWL and
//                        every Layer B WWL high: the upper diagonal of A is
//                        copied through the 3D bonds into the upper diagonal
//                        of B.
//   step 2 (N-1 cycles)  Blocker 1 off, Blocker 2 on in both layers; in cycle
//                        k (k = 1..N-1) RWL_k and WWL_k are high in both
//                        layers: A copies column k's lower part into row k's
//                        upper part, B copies row k's upper part into column
//                        k's lower part.
//   step 3 (1 cycle)     blockers off; every Layer B RWL and every Layer A
//                        WWL high: the lower diagonal of B is copied back into
//                        the lower diagonal of A.
//
// After these N+1 cycles the Layer A sub-array holds the transpose of what it
// held before. Interface: a one-cycle start pulse while idle; busy is high for
// exactly the N+1 cycles of the operation and done pulses in the cycle after.
// When idle both layers have Blocker 1 on (plain memory mode). The step order,
// the line pairs and the N+1 cycle count follow the paper; the handshake and
// the idle blocker setting are this design's choices.
module transpose_ctrl #(
  parameter int N = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  output logic         busy,
  output logic         done,
  output logic [N-1:0] a_rwl,
  output logic [N-1:0] a_wwl,
  output logic         a_blk1_on,
  output logic         a_blk2_on,
  output logic [N-1:0] b_rwl,
  output logic [N-1:0] b_wwl,
  output logic         b_blk1_on,
  output logic         b_blk2_on
);

  typedef enum logic [1:0] {S_IDLE, S_STEP1, S_STEP2, S_STEP3} state_e;

  state_e               state;
  logic [$clog2(N)-1:0] k;  // step-2 pair index, 0-based (pair k+1 of the paper)

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      k     <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE:  if (start) state <= S_STEP1;
        S_STEP1: begin
          k     <= '0;
          state <= (N > 1) ? S_STEP2 : S_STEP3;
        end
        S_STEP2: begin
          if (int'(k) == N - 2) state <= S_STEP3;
          k <= k + 1'b1;
        end
        S_STEP3: begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy      = (state != S_IDLE);
    a_rwl     = '0;
    a_wwl     = '0;
    b_rwl     = '0;
    b_wwl     = '0;
    a_blk1_on = 1'b1;
    a_blk2_on = 1'b0;
    unique case (state)
      S_STEP1: begin
        a_blk1_on = 1'b0;
        a_rwl     = '1;
        b_wwl     = '1;
      end
      S_STEP2: begin
        a_blk1_on = 1'b0;
        a_blk2_on = 1'b1;
        a_rwl[k]  = 1'b1;
        a_wwl[k]  = 1'b1;
        b_rwl[k]  = 1'b1;
        b_wwl[k]  = 1'b1;
      end
      S_STEP3: begin
        a_blk1_on = 1'b0;
        b_rwl     = '1;
        a_wwl     = '1;
      end
      default: ;
    endcase
    b_blk1_on = a_blk1_on;
    b_blk2_on = a_blk2_on;
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule
