// shift_adder: bit-serial accumulation of the ADC codes of one plane.
//
// An 8-bit weight occupies two neighbouring QLC cells on two bitlines: the
// even bitline of a pair holds bits 7..4, the odd one bits 3..0 (as in the
// paper's example, BL2 = w^{4-7}, BL3 = w^{0-3}). For input bit b the
// digitised bitline sums are combined as (code_even << 4) + code_odd and
// added, shifted left by b, into the output's accumulator. After the eight
// input bits the accumulators hold N_ADC/2 dot products
// o_k = sum_b 2^b * sum_n i_n^b * w_{k,n} (Eq. 2 of the paper), each scaled
// by the ADC LSB.
//
// Timing: `clear` zeroes all accumulators; `add` (one cycle) accumulates the
// current codes at bit position `bitpos`; results are valid the cycle after.
module shift_adder
  import pim_pkg::*;
#(
  parameter int unsigned N_ADC    = 512,
  parameter int unsigned ADC_BITS = 9,
  parameter int unsigned CELL_BITS = 4,
  localparam int unsigned N_OUT = N_ADC / 2,
  localparam int unsigned BIT_W = clog2_min1(IN_BITS)
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            clear,
  input  logic                            add,
  input  logic [BIT_W-1:0]                bitpos,
  input  logic [N_ADC-1:0][ADC_BITS-1:0]  code,
  output logic [N_OUT-1:0][ACC_W-1:0]     acc
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
    end else if (clear) begin
      acc <= '0;
    end else if (add) begin
      for (int unsigned k = 0; k < N_OUT; k++) begin
        logic [ACC_W-1:0] pair;
        pair = (ACC_W'(code[2*k]) << CELL_BITS) + ACC_W'(code[2*k+1]);
        acc[k] <= acc[k] + (pair << bitpos);
      end
    end
  end
endmodule
