// sar_adc_bank: N_ADC successive-approximation ADCs with ADC_BITS (9) bits.
//
// Each ADC resolves one bit per clock, MSB first: the trial code with the
// current bit set is compared against the held bitline sample, and the bit
// is kept when the sample is at least trial * 2^LSB_SHIFT. After ADC_BITS
// cycles `done` pulses and `code` holds min(2^ADC_BITS-1, vin >> LSB_SHIFT)
// for every channel. The capacitor DAC and comparator are analog in silicon;
// here the held sample `vin` is an integer number of cell-current steps and
// the comparison is digital.
//
// The paper gives the 9-bit SAR ADC and the 4:1 column mux (N_ADC = N_COL/4
// ADCs); the LSB size is this design's choice: LSB_SHIFT = 2 maps the
// largest bitline sum of 128 QLC cells (128 * 15 = 1920) onto 480 < 511.
//
// Timing: `start` for one cycle, `done` one cycle after the last bit,
// ADC_BITS + 1 cycles from start to done.
module sar_adc_bank #(
  parameter int unsigned N_ADC     = 512,
  parameter int unsigned ADC_BITS  = 9,
  parameter int unsigned LVL_W     = 11,
  parameter int unsigned LSB_SHIFT = 2
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [N_ADC-1:0][LVL_W-1:0]   vin,
  output logic [N_ADC-1:0][ADC_BITS-1:0] code,
  output logic                          busy,
  output logic                          done
);
  localparam int unsigned CNT_W = $clog2(ADC_BITS + 1);
  localparam int unsigned CMP_W = ADC_BITS + LSB_SHIFT + 1;

  logic [CNT_W-1:0] bit_idx;  // bit being resolved, counts down

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      bit_idx <= '0;
      code    <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy    <= 1'b1;
        bit_idx <= CNT_W'(ADC_BITS - 1);
        code    <= '0;
      end else if (busy) begin
        for (int unsigned i = 0; i < N_ADC; i++) begin
          logic [ADC_BITS-1:0] trial;
          trial = code[i] | (ADC_BITS'(1) << bit_idx);
          if (CMP_W'(vin[i]) >= (CMP_W'(trial) << LSB_SHIFT))
            code[i] <= trial;
        end
        if (bit_idx == '0) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          bit_idx <= bit_idx - 1'b1;
        end
      end
    end
  end
endmodule
