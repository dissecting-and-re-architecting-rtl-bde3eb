// bls_decoder: bitline-select drive of one PIM plane.
//
// For a page read or program exactly one BLS row is turned on. For a PIM
// dot product the N_ACT rows of the active group carry the input vector:
// row group*N_ACT+n is driven high when bit `bitpos` of input n is 1, so the
// multi-bit inputs are applied one bit per PIM step (time-sequential input,
// as the paper describes). Rows outside the group stay off.
//
// Timing: combinational; the plane controller holds `en` for
// max(t_decBLS, t_pre). The inputs are held in the plane's input latch and
// treated as unsigned 8-bit values (sign handling is left to the host, a
// choice of this design).
module bls_decoder
  import pim_pkg::*;
#(
  parameter int unsigned N_ROW = 256,
  parameter int unsigned N_ACT = 128,
  localparam int unsigned N_GRP = N_ROW / N_ACT,
  localparam int unsigned ROW_W = clog2_min1(N_ROW),
  localparam int unsigned GRP_W = clog2_min1(N_GRP),
  localparam int unsigned BIT_W = clog2_min1(IN_BITS)
) (
  input  logic                             en,
  input  logic                             pim_mode,
  input  logic [ROW_W-1:0]                 row,
  input  logic [GRP_W-1:0]                 group,
  input  logic [BIT_W-1:0]                 bitpos,
  input  logic [N_ACT-1:0][IN_BITS-1:0]    inputs,
  output logic [N_ROW-1:0]                 bls
);
  always_comb begin
    bls = '0;
    if (en) begin
      if (pim_mode) begin
        for (int unsigned n = 0; n < N_ACT; n++)
          bls[int'(group) * N_ACT + n] = inputs[n][bitpos];
      end else begin
        bls[row] = 1'b1;
      end
    end
  end
endmodule
