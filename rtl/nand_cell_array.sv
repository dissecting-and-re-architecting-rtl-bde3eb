// nand_cell_array: behavioural model of the 3D NAND cell array of one plane,
// including the bitline current summation and the 4:1 column multiplexer.
// This is not synthesizable logic: the real part is the memory-cell stack
// and its analog bitlines.
//
// Geometry (paper's Size A): N_ROW BLS rows (4 per block, 64 blocks) x
// N_COL bitlines x N_STACK WL layers, BPC bits per cell (4 = QLC, 1 = SLC).
// A page is one (row, layer) string slice across all bitlines, N_COL*BPC
// bits. Only pages that were programmed are stored (an associative array),
// so the full-size plane costs memory only for what a test writes; a page
// never programmed reads as all-zero cell values.
//
// Operation, sampled on a clock edge with `sense` high (the end of the
// precharge/BLS-decode phase):
//  * pim_mode = 1: every selected string (BLS on, block selected, layer
//    driven with V_Read) conducts a current proportional to its cell value,
//    so each bitline carries sum_rows(bls[r] * cell(r, layer, bl)). Of the
//    N_COL bitlines, the column mux connects the quarter `mux` (bitlines
//    mux*N_ADC .. mux*N_ADC+N_ADC-1) to the N_ADC ADC inputs, `bl_level`.
//  * pim_mode = 0: the single selected string row is read into `page_out`.
// A clock edge with `prog` high writes `page_in` into the selected row.
// Currents are given as integers in units of one cell-value step.
module nand_cell_array
  import pim_pkg::*;
#(
  parameter int unsigned N_ROW       = 256,
  parameter int unsigned N_COL       = 2048,
  parameter int unsigned N_STACK     = 128,
  parameter int unsigned BLS_PER_BLK = 4,
  parameter int unsigned N_ACT       = 128,
  parameter int unsigned COL_MUX     = 4,
  parameter int unsigned BPC         = 4,
  localparam int unsigned N_BLK     = N_ROW / BLS_PER_BLK,
  localparam int unsigned N_ADC     = N_COL / COL_MUX,
  localparam int unsigned PAGE_BITS = N_COL * BPC,
  localparam int unsigned LVL_W     = $clog2(N_ACT * ((1 << BPC) - 1) + 1),
  localparam int unsigned MUX_W     = clog2_min1(COL_MUX)
) (
  input  logic                          clk,
  input  logic                          pim_mode,
  input  logic [N_STACK-1:0]            wl_read,
  input  logic [N_BLK-1:0]              blk_sel,
  input  logic [N_ROW-1:0]              bls,
  input  logic [MUX_W-1:0]              mux,
  input  logic                          sense,
  input  logic                          prog,
  input  logic [PAGE_BITS-1:0]          page_in,
  output logic [N_ADC-1:0][LVL_W-1:0]   bl_level,
  output logic [PAGE_BITS-1:0]          page_out
);
  logic [PAGE_BITS-1:0] pages [int unsigned];

  initial begin
    bl_level = '0;
    page_out = '0;
  end

  function automatic int unsigned sel_layer(input logic [N_STACK-1:0] w);
    int unsigned l = 0;
    for (int unsigned i = 0; i < N_STACK; i++) if (w[i]) l = i;
    return l;
  endfunction

  function automatic logic row_on(input int unsigned r);
    return bls[r] && blk_sel[r / BLS_PER_BLK];
  endfunction

  always @(posedge clk) begin
    int unsigned lay;
    int unsigned key;
    lay = sel_layer(wl_read);
    if (prog) begin
      for (int unsigned r = 0; r < N_ROW; r++)
        if (row_on(r) && (|wl_read)) pages[lay * N_ROW + r] = page_in;
    end
    if (sense && (|wl_read)) begin
      if (pim_mode) begin
        int unsigned acc [N_ADC];
        for (int unsigned j = 0; j < N_ADC; j++) acc[j] = 0;
        for (int unsigned r = 0; r < N_ROW; r++) begin
          key = lay * N_ROW + r;
          if (row_on(r) && pages.exists(key)) begin
            logic [PAGE_BITS-1:0] p;
            p = pages[key];
            for (int unsigned j = 0; j < N_ADC; j++)
              acc[j] += int'(p[(int'(mux) * N_ADC + j) * BPC +: BPC]);
          end
        end
        for (int unsigned j = 0; j < N_ADC; j++) bl_level[j] <= LVL_W'(acc[j]);
      end else begin
        logic [PAGE_BITS-1:0] p;
        p = '0;
        for (int unsigned r = 0; r < N_ROW; r++) begin
          key = lay * N_ROW + r;
          if (row_on(r) && pages.exists(key)) p = pages[key];
        end
        page_out <= p;
      end
    end
  end
endmodule
