// ma_ctrl -- sequencer for an element-wise multiply or add on one pair of
// MA sub-arrays (Layer A MA-SRAM with DACs, Layer B MA-eDRAM with ADCs).
//
// One operation, all N*M elements in parallel:
//   DAC    (1 cycle)    dac_en and sample high: the MA-SRAM words drive their
//                       DAC currents (the supply boost of the real circuit);
//                       in a multiply word the C-2C output is sampled.
//   INIT   (1 or N)     LFSR start bits: init_all writes 00000001 into every
//                       word in one cycle, or, once a calibration exists
//                       (calibrated high), row_we writes row row_idx's
//                       calibrated start states, one row per cycle.
//   ADC    (ADC_STEPS)  adc_run high: ramp runs, words count.
//   CAP    (N cycles)   calibration runs only: cap_en with row_idx = 0..N-1
//                       hands each row's codes to the calibration logic.
// A calibration run (cal high with start) applies the known input
// (cal_sel high during ADC) and always starts from 00000001.
// With KEEP_DAC = 1 (add sub-array, which has no sample-and-hold), or when
// keep is high with start (a dot product, whose column sums are converted
// live), the DACs stay on until the conversion ends; otherwise they are on
// only in DAC.
// Interface: one-cycle start (with cal) while idle; busy for the whole
// operation; done pulses one cycle after the last cycle; adc_cycles counts
// the cycles of the last conversion window. The step order follows the
// paper's operation flow; cycle counts other than the 64 conversion cycles
// and the handshake are this design's choices.
module ma_ctrl #(
  parameter int N         = 32,
  parameter int ADC_STEPS = gem3d_pkg::ADC_STEPS,
  parameter bit KEEP_DAC  = 1'b0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 cal,
  input  logic                 keep,
  input  logic                 calibrated,
  output logic                 busy,
  output logic                 done,
  output logic                 dac_en,
  output logic                 sample,
  output logic                 cal_sel,
  output logic                 init_all,
  output logic                 row_we,
  output logic [$clog2(N)-1:0] row_idx,
  output logic                 adc_run,
  output logic                 cap_en
);

  typedef enum logic [2:0] {S_IDLE, S_DAC, S_INIT, S_ADC, S_CAP} state_e;

  state_e                       state;
  logic                         cal_q;
  logic                         keep_q;
  logic                         use_seeds;
  logic [$clog2(ADC_STEPS)-1:0] cnt;
  logic [$clog2(N)-1:0]         row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cal_q     <= 1'b0;
      keep_q    <= 1'b0;
      use_seeds <= 1'b0;
      cnt       <= '0;
      row       <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          cal_q     <= cal;
          keep_q    <= keep;
          use_seeds <= calibrated && !cal;
          row       <= '0;
          state     <= S_DAC;
        end
        S_DAC: state <= S_INIT;
        S_INIT: begin
          if (!use_seeds || int'(row) == N - 1) begin
            row   <= '0;
            cnt   <= '0;
            state <= S_ADC;
          end else begin
            row <= row + 1'b1;
          end
        end
        S_ADC: begin
          cnt <= cnt + 1'b1;
          if (int'(cnt) == ADC_STEPS - 1) begin
            if (cal_q) state <= S_CAP;
            else begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end
        S_CAP: begin
          row <= row + 1'b1;
          if (int'(row) == N - 1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy     = (state != S_IDLE);
    sample   = (state == S_DAC);
    dac_en   = (state == S_DAC) ||
               ((KEEP_DAC || keep_q) && (state == S_INIT || state == S_ADC));
    init_all = (state == S_INIT) && !use_seeds;
    row_we   = (state == S_INIT) &&  use_seeds;
    adc_run  = (state == S_ADC);
    cal_sel  = (state == S_ADC) && cal_q;
    cap_en   = (state == S_CAP);
    row_idx  = row;
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule
