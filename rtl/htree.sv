// htree: the H-tree network of RPUs that joins the planes of one die.
//
// N_PLANES leaves (a power of two, at least 2) are joined pairwise by
// N_PLANES-1 RPUs arranged as a complete binary tree. Nodes are numbered in
// heap order: node 1 is the root RPU, node i has children 2i and 2i+1, and
// leaf (plane) p is node N_PLANES+p, so bit l of a plane index selects the
// child at tree level l (level 0 = the RPUs next to the planes). The root
// connects to the die's word port. Each RPU adds one register stage on the
// way up; the way down is combinational.
//
// The paper gives the topology (an H-tree with an RPU at every branch, so
// outputs of two planes are combined before they travel on) and the 8-bit
// die bus; modelling each branch as a 64-bit word link at the RPU clock
// (250 MHz x 8 B = the 2 GB/s flash bus) is this design's choice.
//
// Because the way down is pure wiring, every leaf_dn_flit is the root's
// downward word itself (only the valids are routed), and rpu_mode[0] is a
// constant since node 0 does not exist; synthesis reports these bits as
// wired straight to an input or constant, which is intended.
module htree
  import pim_pkg::*;
#(
  parameter int unsigned N_PLANES = 256,
  localparam int unsigned LEVELS  = $clog2(N_PLANES)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // root (die I/O side)
  input  logic                       root_dn_valid,
  input  flit_t                      root_dn_flit,
  output logic                       root_dn_ready,
  output logic                       root_up_valid,
  output flit_t                      root_up_flit,
  input  logic                       root_up_ready,
  // leaves (planes)
  output logic  [N_PLANES-1:0]       leaf_dn_valid,
  output flit_t [N_PLANES-1:0]       leaf_dn_flit,
  input  logic  [N_PLANES-1:0]       leaf_dn_ready,
  input  logic  [N_PLANES-1:0]       leaf_up_valid,
  input  flit_t [N_PLANES-1:0]       leaf_up_flit,
  output logic  [N_PLANES-1:0]       leaf_up_ready,
  // RPU modes, node order (index 0 unused)
  output up_mode_e [N_PLANES-1:0]    rpu_mode
);
  localparam int unsigned N_NODES = 2 * N_PLANES;

  logic  [N_NODES-1:0] dn_valid, dn_ready, up_valid, up_ready;
  flit_t [N_NODES-1:0] dn_flit, up_flit;

  assign dn_valid[1]   = root_dn_valid;
  assign dn_flit[1]    = root_dn_flit;
  assign root_dn_ready = dn_ready[1];
  assign root_up_valid = up_valid[1];
  assign root_up_flit  = up_flit[1];
  assign up_ready[1]   = root_up_ready;

  // unused node 0
  assign dn_valid[0] = 1'b0;
  assign dn_flit[0]  = '0;
  assign dn_ready[0] = 1'b0;
  assign up_valid[0] = 1'b0;
  assign up_flit[0]  = '0;
  assign up_ready[0] = 1'b0;
  assign rpu_mode[0] = UP_PASS;

  for (genvar p = 0; p < N_PLANES; p++) begin : g_leaf
    assign leaf_dn_valid[p]       = dn_valid[N_PLANES + p];
    assign leaf_dn_flit[p]        = dn_flit[N_PLANES + p];
    assign dn_ready[N_PLANES + p] = leaf_dn_ready[p];
    assign up_valid[N_PLANES + p] = leaf_up_valid[p];
    assign up_flit[N_PLANES + p]  = leaf_up_flit[p];
    assign leaf_up_ready[p]       = up_ready[N_PLANES + p];
  end

  for (genvar i = 1; i < N_PLANES; i++) begin : g_rpu
    // node i sits at tree level LEVELS-1-floor(log2(i))
    flit_t c_flit;
    rpu #(.LEVEL(LEVELS - $clog2(i + 1))) u_rpu (
      .clk, .rst_n,
      .p_dn_valid(dn_valid[i]), .p_dn_flit(dn_flit[i]), .p_dn_ready(dn_ready[i]),
      .c_dn_valid({dn_valid[2*i+1], dn_valid[2*i]}), .c_dn_flit(c_flit),
      .c_dn_ready({dn_ready[2*i+1], dn_ready[2*i]}),
      .c_up_valid({up_valid[2*i+1], up_valid[2*i]}),
      .c_up_flit({up_flit[2*i+1], up_flit[2*i]}),
      .c_up_ready({up_ready[2*i+1], up_ready[2*i]}),
      .p_up_valid(up_valid[i]), .p_up_flit(up_flit[i]), .p_up_ready(up_ready[i]),
      .mode(rpu_mode[i])
    );
    assign dn_flit[2*i]   = c_flit;
    assign dn_flit[2*i+1] = c_flit;
  end
endmodule
