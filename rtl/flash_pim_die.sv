// flash_pim_die: one 3D NAND flash PIM die (the design's top level).
//
// N_PLANES PIM planes (256 of Size A 256x2048x128 by default) hang off an
// H-tree of RPUs whose root is the die's word port. A host (the channel
// controller) sends packets down that port and receives results up it:
//  * inbound I/O: OP_PIM packets carry the 8-bit input slice of a plane;
//    a broadcast header sends one vector to many planes (column-wise
//    tiling), separate unicast packets scatter slices (row-wise tiling).
//    Each plane starts its PIM pass as soon as its inputs arrive, so PIM
//    passes of different planes overlap with the inbound transfers.
//  * outbound I/O: an OP_READ_OUT header addressed to a set of planes
//    configures each RPU level on its way down (pass, concatenate, add,
//    VVM, VSM) and the planes then stream their page buffers upward; with
//    UP_ADD the partial sums of all addressed planes arrive already summed.
//  * regular flash use: OP_PROGRAM / OP_READ write and read pages
//    (weights in QLC dies, KV cache in SLC dies).
// BPC selects the cell type: 4 for a QLC (PIM) die, 1 for an SLC die of the
// paper's QLC-SLC hybrid package, where q, k, v and the KV cache live and
// QK^T and SV run in the RPUs.
//
// Ports: root_* is the 64-bit word stream to and from the channel (one word
// per 250 MHz cycle, the rate of the paper's 2 GB/s flash bus); rpu_mode
// exposes the current upward mode of every RPU (node order).
module flash_pim_die
  import pim_pkg::*;
#(
  parameter int unsigned N_PLANES    = 256,
  parameter int unsigned N_ROW       = 256,
  parameter int unsigned N_COL       = 2048,
  parameter int unsigned N_STACK     = 128,
  parameter int unsigned BLS_PER_BLK = 4,
  parameter int unsigned N_ACT       = 128,
  parameter int unsigned COL_MUX     = 4,
  parameter int unsigned BPC         = 4,
  parameter int unsigned ADC_BITS    = 9,
  parameter int unsigned LSB_SHIFT   = 2,
  parameter int unsigned T_DECWL     = 100,
  parameter int unsigned T_DECBLS    = 8,
  parameter int unsigned T_PRE       = 20,
  parameter int unsigned T_ACCUM     = 2,
  parameter int unsigned T_DIS       = 16,
  parameter int unsigned T_PROG_SLC  = 200
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    root_dn_valid,
  input  flit_t                   root_dn_flit,
  output logic                    root_dn_ready,
  output logic                    root_up_valid,
  output flit_t                   root_up_flit,
  input  logic                    root_up_ready,
  output up_mode_e [N_PLANES-1:0] rpu_mode
);
  logic  [N_PLANES-1:0] leaf_dn_valid, leaf_dn_ready, leaf_up_valid, leaf_up_ready;
  flit_t [N_PLANES-1:0] leaf_dn_flit, leaf_up_flit;

  htree #(.N_PLANES(N_PLANES)) u_htree (
    .clk, .rst_n,
    .root_dn_valid, .root_dn_flit, .root_dn_ready,
    .root_up_valid, .root_up_flit, .root_up_ready,
    .leaf_dn_valid, .leaf_dn_flit, .leaf_dn_ready,
    .leaf_up_valid, .leaf_up_flit, .leaf_up_ready,
    .rpu_mode
  );

  for (genvar p = 0; p < N_PLANES; p++) begin : g_plane
    pim_plane #(
      .N_ROW(N_ROW), .N_COL(N_COL), .N_STACK(N_STACK), .BLS_PER_BLK(BLS_PER_BLK),
      .N_ACT(N_ACT), .COL_MUX(COL_MUX), .BPC(BPC), .ADC_BITS(ADC_BITS),
      .LSB_SHIFT(LSB_SHIFT), .T_DECWL(T_DECWL), .T_DECBLS(T_DECBLS), .T_PRE(T_PRE),
      .T_ACCUM(T_ACCUM), .T_DIS(T_DIS), .T_PROG_SLC(T_PROG_SLC)
    ) u_plane (
      .clk, .rst_n,
      .dn_valid(leaf_dn_valid[p]), .dn_flit(leaf_dn_flit[p]), .dn_ready(leaf_dn_ready[p]),
      .up_valid(leaf_up_valid[p]), .up_flit(leaf_up_flit[p]), .up_ready(leaf_up_ready[p])
    );
  end
endmodule
