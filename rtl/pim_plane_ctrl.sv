// pim_plane_ctrl: sequencer of one PIM plane.
//
// PIM pass (Eq. 3 of the paper, Fig. 8): the target WL is decoded once and
// held for the whole pass; then, for each of the IN_BITS input bits, the
// bitlines are precharged while the BLS decoder applies the input bits,
// the bitline sums are sampled and converted by the SAR ADCs, the shift
// adder accumulates the codes, and bitlines and BLSs are discharged:
//   T_PIM = T_DECWL + IN_BITS * (max(T_DECBLS, T_PRE) + t_sense + T_ACCUM + T_DIS) + 1
// where t_sense = ADC_BITS + 3 cycles (sample, ADC start, ADC_BITS bit
// decisions, done). The final cycle latches the accumulators into the page
// buffer. With the default counts a pass is 502 cycles = 2.0 us at 250 MHz,
// the ~2 us the paper reports for Size A; the split into phases is this
// design's choice (the paper prints no per-phase times).
//
// Page read (Eq. 1): T_DECWL + max(T_DECBLS, T_PRE) + 1 sample + 1 latch
// + T_DIS. Program: T_DECWL + T_PROG, with T_PROG 19x shorter for SLC
// (BPC = 1) than for QLC, the ratio the paper quotes; absolute program
// times are assumed.
//
// Interface: `start` with `cmd` for one cycle while `busy` is low; `done`
// pulses when the operation has finished. The decode/sense/add strobes go
// to the decoders, cell array, ADC bank, shift adder and page buffer.
module pim_plane_ctrl
  import pim_pkg::*;
#(
  parameter int unsigned T_DECWL    = 100,
  parameter int unsigned T_DECBLS   = 8,
  parameter int unsigned T_PRE      = 20,
  parameter int unsigned T_ACCUM    = 2,
  parameter int unsigned T_DIS      = 16,
  parameter int unsigned T_PROG_SLC = 200,
  parameter int unsigned T_PROG_QLC = 19 * T_PROG_SLC,
  parameter int unsigned BPC        = 4,
  localparam int unsigned BIT_W     = clog2_min1(IN_BITS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  pcmd_e            cmd,
  output logic             busy,
  output logic             done,
  // strobes
  output logic             pim_mode,
  output logic             wl_en,
  output logic             bls_en,
  output logic [BIT_W-1:0] bitpos,
  output logic             sense,
  output logic             adc_start,
  input  logic             adc_done,
  output logic             acc_clear,
  output logic             acc_add,
  output logic             pb_load_acc,
  output logic             pb_load_page,
  output logic             prog
);
  localparam int unsigned T_PRE_PH = (T_DECBLS > T_PRE) ? T_DECBLS : T_PRE;
  localparam int unsigned T_PROG   = (BPC == 1) ? T_PROG_SLC : T_PROG_QLC;
  localparam int unsigned CNT_W    = $clog2(T_PROG_QLC + T_DECWL + 2);

  typedef enum logic [3:0] {
    S_IDLE, S_DECWL, S_PRE, S_SAMPLE, S_ADC_START, S_ADC_WAIT, S_ACCUM,
    S_DIS, S_LATCH, S_PROG
  } state_e;

  state_e           state;
  pcmd_e            op;
  logic [CNT_W-1:0] cnt;

  assign busy     = (state != S_IDLE);
  assign pim_mode = (op == PCMD_PIM);

  always_comb begin
    wl_en        = (state != S_IDLE);
    bls_en       = (state == S_PRE) || (state == S_SAMPLE) || (state == S_ADC_START) ||
                   (state == S_ADC_WAIT) || (state == S_ACCUM) || (state == S_PROG);
    sense        = (state == S_SAMPLE);
    adc_start    = (state == S_ADC_START);
    acc_add      = (state == S_ACCUM) && (cnt == '0);
    pb_load_acc  = (state == S_LATCH) && (op == PCMD_PIM);
    pb_load_page = (state == S_LATCH) && (op == PCMD_READ);
    prog         = (state == S_PROG) && (cnt == '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      op        <= PCMD_PIM;
      cnt       <= '0;
      bitpos    <= '0;
      done      <= 1'b0;
      acc_clear <= 1'b0;
    end else begin
      done      <= 1'b0;
      acc_clear <= 1'b0;
      cnt       <= cnt + 1'b1;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            op        <= cmd;
            state     <= S_DECWL;
            cnt       <= '0;
            bitpos    <= '0;
            acc_clear <= (cmd == PCMD_PIM);
          end
        end
        S_DECWL: if (cnt == CNT_W'(T_DECWL - 1)) begin
          cnt   <= '0;
          state <= (op == PCMD_PROG) ? S_PROG : S_PRE;
        end
        S_PRE: if (cnt == CNT_W'(T_PRE_PH - 1)) begin
          cnt   <= '0;
          state <= S_SAMPLE;
        end
        S_SAMPLE: begin
          cnt   <= '0;
          state <= (op == PCMD_PIM) ? S_ADC_START : S_LATCH;
        end
        S_ADC_START: state <= S_ADC_WAIT;
        S_ADC_WAIT: if (adc_done) begin
          cnt   <= '0;
          state <= S_ACCUM;
        end
        S_ACCUM: if (cnt == CNT_W'(T_ACCUM - 1)) begin
          cnt   <= '0;
          state <= S_DIS;
        end
        S_DIS: if (cnt == CNT_W'(T_DIS - 1)) begin
          cnt <= '0;
          if (op == PCMD_PIM && bitpos != BIT_W'(IN_BITS - 1)) begin
            bitpos <= bitpos + 1'b1;
            state  <= S_PRE;
          end else if (op == PCMD_PIM) begin
            state <= S_LATCH;
          end else begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        S_LATCH: begin
          cnt <= '0;
          if (op == PCMD_PIM) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_DIS;
          end
        end
        S_PROG: if (cnt == CNT_W'(T_PROG - 1)) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
