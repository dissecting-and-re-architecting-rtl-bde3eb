// rpu: reconfigurable processing unit at one branch point of the H-tree.
//
// An RPU joins two children (planes or lower RPUs) to its parent. It has
// a downward path and an upward path.
//
// Downward (stream mode, toward the planes): the header word of each packet
// is routed by this level's bit of the header: to both children when
// bcast[LEVEL] is set (broadcast or scatter of inputs), otherwise to child
// addr[LEVEL]. The rest of the packet follows the same route. A broadcast
// advances only when both children accept the word. The routing is
// combinational (no register on the downward path): c_dn_flit is the
// parent's word wired through to both children, only c_dn_valid is steered.
//
// Upward (toward the die I/O): the mode is taken from up_mode[LEVEL] of the
// last OP_READ_OUT header that passed through this RPU.
//   UP_PASS    stream mode: forward child addr[LEVEL].
//   UP_CONCAT  stream mode: child 0's packet, then child 1's packet.
//   UP_ADD     ALU mode: add the words of both children lane by lane as two
//              INT32 lanes (accumulating partial sums on the way out).
//   UP_VVM     ALU mode: dot product of two INT8 vectors, 8 elements per
//              word (child 0 = q, child 1 = one row of K); one INT32 result
//              word (lane 0) per packet.
//   UP_VSM     ALU mode: the first word of child 0 carries an INT8 scalar
//              S[l] in byte 0; each 8-element INT8 word of child 1 (a row of
//              V) is multiplied by it into the 256-bit product register
//              (8 x INT32) and sent out as 4 words of 2 INT32 lanes.
// The ALU result passes through one output register, so each RPU adds one
// cycle of latency and the tree is pipelined. The paper's RPU has 8 INT16
// multipliers (here: INT8 x INT8 products), INT32 adders, 64-bit registers
// and one 256-bit register; the word formats, the mode encoding and the
// routing rule are this design's own.
module rpu
  import pim_pkg::*;
#(
  parameter int unsigned LEVEL = 0
) (
  input  logic        clk,
  input  logic        rst_n,
  // downward
  input  logic        p_dn_valid,
  input  flit_t       p_dn_flit,
  output logic        p_dn_ready,
  output logic [1:0]  c_dn_valid,
  output flit_t       c_dn_flit,
  input  logic [1:0]  c_dn_ready,
  // upward
  input  logic [1:0]  c_up_valid,
  input  flit_t [1:0] c_up_flit,
  output logic [1:0]  c_up_ready,
  output logic        p_up_valid,
  output flit_t       p_up_flit,
  input  logic        p_up_ready,
  // observation
  output up_mode_e    mode
);
  localparam int unsigned LANES = WORD_W / IN_BITS;  // 8 INT8 elements per word

  // ---------------- downward routing ----------------
  logic       in_pkt;
  logic [1:0] route, route_now;
  hdr_t       hdr_in;
  logic       up_sel;

  assign hdr_in    = hdr_t'(p_dn_flit.data);
  assign route_now = in_pkt ? route :
                     (hdr_in.bcast[LEVEL] ? 2'b11 : (hdr_in.addr[LEVEL] ? 2'b10 : 2'b01));
  assign c_dn_flit = p_dn_flit;
  assign p_dn_ready = (!route_now[0] || c_dn_ready[0]) && (!route_now[1] || c_dn_ready[1]);
  assign c_dn_valid[0] = p_dn_valid && route_now[0] && (!route_now[1] || c_dn_ready[1]);
  assign c_dn_valid[1] = p_dn_valid && route_now[1] && (!route_now[0] || c_dn_ready[0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_pkt <= 1'b0;
      route  <= 2'b00;
      mode   <= UP_PASS;
      up_sel <= 1'b0;
    end else if (p_dn_valid && p_dn_ready) begin
      if (!in_pkt) begin
        route <= route_now;
        if (hdr_in.op == OP_READ_OUT) begin
          mode   <= up_mode_e'(hdr_in.up_mode[LEVEL]);
          up_sel <= hdr_in.addr[LEVEL];
        end
      end
      in_pkt <= !p_dn_flit.last;
    end
  end

  // ---------------- upward datapath ----------------
  logic                        can_load;
  logic                        phase;        // CONCAT: child in service; VSM: scalar held
  logic signed [IN_BITS-1:0]   scalar;
  logic signed [ACC_W-1:0]     acc;          // VVM accumulator
  logic [LANES-1:0][ACC_W-1:0] prod;         // 256-bit VSM product register
  logic                        prod_pending, prod_last;
  logic [1:0]                  emit;
  logic signed [ACC_W-1:0]     dot;

  assign can_load = !p_up_valid || p_up_ready;
  wire   both     = c_up_valid[0] && c_up_valid[1];

  always_comb begin
    dot = '0;
    for (int unsigned e = 0; e < LANES; e++)
      dot += ACC_W'($signed(c_up_flit[0].data[e*IN_BITS +: IN_BITS])) *
             ACC_W'($signed(c_up_flit[1].data[e*IN_BITS +: IN_BITS]));
  end

  always_comb begin
    c_up_ready = 2'b00;
    unique case (mode)
      UP_PASS:   c_up_ready[up_sel] = can_load;
      UP_CONCAT: c_up_ready[phase]  = can_load;
      UP_ADD:    c_up_ready = {2{can_load && both}};
      UP_VVM:    c_up_ready = {2{both && (!c_up_flit[0].last || can_load)}};
      UP_VSM:    c_up_ready = phase ? {!prod_pending, 1'b0} : 2'b01;
      default:   c_up_ready = 2'b00;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_up_valid   <= 1'b0;
      p_up_flit    <= '0;
      phase        <= 1'b0;
      scalar       <= '0;
      acc          <= '0;
      prod         <= '0;
      prod_pending <= 1'b0;
      prod_last    <= 1'b0;
      emit         <= '0;
    end else begin
      if (p_up_valid && p_up_ready) p_up_valid <= 1'b0;
      unique case (mode)
        UP_PASS: if (c_up_valid[up_sel] && can_load) begin
          p_up_valid <= 1'b1;
          p_up_flit  <= c_up_flit[up_sel];
        end
        UP_CONCAT: if (c_up_valid[phase] && can_load) begin
          p_up_valid     <= 1'b1;
          p_up_flit.data <= c_up_flit[phase].data;
          p_up_flit.last <= c_up_flit[phase].last && phase;
          if (c_up_flit[phase].last) phase <= !phase;
        end
        UP_ADD: if (both && can_load) begin
          p_up_valid <= 1'b1;
          for (int unsigned l = 0; l < WORD_W / ACC_W; l++)
            p_up_flit.data[l*ACC_W +: ACC_W] <= c_up_flit[0].data[l*ACC_W +: ACC_W] +
                                                c_up_flit[1].data[l*ACC_W +: ACC_W];
          p_up_flit.last <= c_up_flit[0].last;
        end
        UP_VVM: if (c_up_ready[0] && both) begin
          if (c_up_flit[0].last) begin
            p_up_valid <= 1'b1;
            p_up_flit  <= '{last: 1'b1, data: WORD_W'(unsigned'(acc + dot))};
            acc        <= '0;
          end else begin
            acc <= acc + dot;
          end
        end
        UP_VSM: begin
          if (!phase) begin
            if (c_up_valid[0]) begin
              scalar <= $signed(c_up_flit[0].data[IN_BITS-1:0]);
              phase  <= 1'b1;
            end
          end else if (!prod_pending) begin
            if (c_up_valid[1]) begin
              for (int unsigned e = 0; e < LANES; e++)
                prod[e] <= ACC_W'(scalar) * ACC_W'($signed(c_up_flit[1].data[e*IN_BITS +: IN_BITS]));
              prod_last    <= c_up_flit[1].last;
              prod_pending <= 1'b1;
              emit         <= '0;
            end
          end else if (can_load) begin
            p_up_valid     <= 1'b1;
            p_up_flit.data <= {prod[2*emit+1], prod[2*emit]};
            p_up_flit.last <= prod_last && (emit == 2'd3);
            emit           <= emit + 1'b1;
            if (emit == 2'd3) begin
              prod_pending <= 1'b0;
              if (prod_last) phase <= 1'b0;
            end
          end
        end
        default: ;
      endcase
    end
  end

  // Both children of an accumulating RPU must deliver packets of equal length.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (mode == UP_ADD || mode == UP_VVM) && c_up_ready[0] && both |->
                   c_up_flit[0].last == c_up_flit[1].last);
  // Upward words are held until taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   p_up_valid && !p_up_ready |=> p_up_valid && $stable(p_up_flit));
endmodule
