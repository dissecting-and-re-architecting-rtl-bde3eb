// wl_decoder: word-line and block selection of one PIM plane.
//
// A page read or program drives the target WL layer with V_Read in exactly
// one block (the block holding the addressed BLS row). A PIM dot product
// drives the same WL layer in all blocks of the active row group at once
// (N_ACT rows = N_ACT/BLS_PER_BLK blocks), so that N_ACT cells accumulate on
// every bitline; all other WLs of the selected blocks see V_Pass. The
// outputs are the digital selects; the high-voltage drivers that turn them
// into V_Read/V_Pass are analog and not modelled here.
//
// Timing: purely combinational; the plane controller holds `en` for the
// t_decWL settling time. Geometry follows the paper (4 BLSs per block,
// 64 blocks, 128 layers, 128 rows per dot product); splitting the 256 rows
// into two fixed groups of 32 blocks is this design's own choice.
module wl_decoder
  import pim_pkg::*;
#(
  parameter int unsigned N_ROW       = 256,
  parameter int unsigned N_STACK     = 128,
  parameter int unsigned BLS_PER_BLK = 4,
  parameter int unsigned N_ACT       = 128,
  localparam int unsigned N_BLK   = N_ROW / BLS_PER_BLK,
  localparam int unsigned N_GRP   = N_ROW / N_ACT,
  localparam int unsigned ROW_W   = clog2_min1(N_ROW),
  localparam int unsigned LAYER_W = clog2_min1(N_STACK),
  localparam int unsigned GRP_W   = clog2_min1(N_GRP)
) (
  input  logic               en,
  input  logic               pim_mode,
  input  logic [LAYER_W-1:0] layer,
  input  logic [ROW_W-1:0]   row,
  input  logic [GRP_W-1:0]   group,
  output logic [N_STACK-1:0] wl_read,   // layer driven with V_Read (others: V_Pass)
  output logic [N_BLK-1:0]   blk_sel    // blocks whose target WL is at V_Read
);
  localparam int unsigned BLK_PER_GRP = N_ACT / BLS_PER_BLK;

  always_comb begin
    wl_read = '0;
    blk_sel = '0;
    if (en) begin
      wl_read[layer] = 1'b1;
      if (pim_mode) begin
        for (int unsigned b = 0; b < N_BLK; b++)
          blk_sel[b] = ((b / BLK_PER_GRP) == int'(group));
      end else begin
        blk_sel[row / BLS_PER_BLK] = 1'b1;
      end
    end
  end
endmodule
