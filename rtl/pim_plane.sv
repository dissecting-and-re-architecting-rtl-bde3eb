// pim_plane: one PIM-enabled 3D NAND plane with its H-tree link.
//
// Inside: the cell array (behavioural), WL and BLS decoders, the bank of
// N_COL/4 9-bit SAR ADCs behind the 4:1 column mux, the shift adder, the
// page buffer, an input latch for the N_ACT 8-bit inputs, and the plane
// sequencer. Default size is the paper's Size A: 256 rows (4 BLSs x 64
// blocks) x 2048 bitlines x 128 layers, QLC cells.
//
// The plane talks to its leaf RPU over one 64-bit word-stream link in each
// direction. A downward packet is: header word, argument word, payload
// (see pim_pkg). The plane acts on it as follows:
//   OP_PIM      payload = N_ACT/8 words of 8-bit inputs (input n in byte
//               n%8 of word n/8). Runs one PIM pass on WL `layer`, row
//               group `group`, column-mux quarter `mux`, and leaves the
//               N_COL/8 INT32 results in the page buffer (result k in lane
//               k%2 of word k/2; lane 0 = bits 31:0).
//   OP_PROGRAM  payload = one page (N_COL*BPC bits, cell c at bits
//               c*BPC +: BPC); programs it into (row, layer).
//   OP_READ     senses (row, layer) into the page buffer.
//   OP_LOAD     writes the payload into page-buffer words offset ..
//               offset+len-1 without touching the cells (how the query q
//               and the scores S reach the planes for QK^T and SV).
//   OP_READ_OUT streams page-buffer words offset .. offset+count-1 upward,
//               `last` on the final word.
// While an operation runs the plane does not accept the next packet, so
// back-pressure stalls only this plane's branch of the tree. Weight layout
// for PIM: weight (row n, output k) of column-mux quarter m sits on
// bitlines m*N_COL/4 + 2k (bits 7..4) and +2k+1 (bits 3..0).
module pim_plane
  import pim_pkg::*;
#(
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
  input  logic  clk,
  input  logic  rst_n,
  input  logic  dn_valid,
  input  flit_t dn_flit,
  output logic  dn_ready,
  output logic  up_valid,
  output flit_t up_flit,
  input  logic  up_ready
);
  localparam int unsigned N_BLK     = N_ROW / BLS_PER_BLK;
  localparam int unsigned N_GRP     = N_ROW / N_ACT;
  localparam int unsigned N_ADC     = N_COL / COL_MUX;
  localparam int unsigned PAGE_BITS = N_COL * BPC;
  localparam int unsigned PB_WORDS  = (N_COL * 4) / WORD_W;
  localparam int unsigned PB_BITS   = PB_WORDS * WORD_W;
  localparam int unsigned IN_WORDS  = (N_ACT * IN_BITS) / WORD_W;
  localparam int unsigned LVL_W     = $clog2(N_ACT * ((1 << BPC) - 1) + 1);
  localparam int unsigned ROW_W     = clog2_min1(N_ROW);
  localparam int unsigned LAYER_W   = clog2_min1(N_STACK);
  localparam int unsigned GRP_W     = clog2_min1(N_GRP);
  localparam int unsigned MUX_W     = clog2_min1(COL_MUX);
  localparam int unsigned BIT_W     = clog2_min1(IN_BITS);
  localparam int unsigned PBA_W     = clog2_min1(PB_WORDS);

  // ---------------- packet receive / transmit ----------------
  typedef enum logic [2:0] {R_HDR, R_ARGS, R_PAY, R_EXEC, R_WAIT, R_TX} rx_e;
  rx_e         rx;
  hdr_t        hdr;
  args_t       args;
  logic [15:0] pay_idx;
  logic [7:0]  tx_idx;

  logic [N_ACT-1:0][IN_BITS-1:0] inputs;

  logic ctrl_start, ctrl_busy, ctrl_done;
  pcmd_e ctrl_cmd;

  assign dn_ready = (rx == R_HDR) || (rx == R_ARGS) || (rx == R_PAY);
  wire   dn_fire  = dn_valid && dn_ready;

  logic        pb_wr;
  logic [PBA_W-1:0] pb_rd_addr;
  word_t       pb_rd_data;

  assign pb_wr      = dn_fire && (rx == R_PAY) && (hdr.op == OP_PROGRAM || hdr.op == OP_LOAD);
  assign pb_rd_addr = PBA_W'(args.offset + tx_idx);
  // a page to program always starts at word 0; a load starts at `offset`
  wire [PBA_W-1:0] pb_wr_addr = PBA_W'((hdr.op == OP_LOAD) ? 16'(args.offset) + pay_idx : pay_idx);

  always_comb begin
    ctrl_start = (rx == R_EXEC) && (hdr.op == OP_PIM || hdr.op == OP_PROGRAM || hdr.op == OP_READ);
    unique case (hdr.op)
      OP_PROGRAM: ctrl_cmd = PCMD_PROG;
      OP_READ:    ctrl_cmd = PCMD_READ;
      default:    ctrl_cmd = PCMD_PIM;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx       <= R_HDR;
      hdr      <= '0;
      args     <= '0;
      pay_idx  <= '0;
      tx_idx   <= '0;
      inputs   <= '0;
      up_valid <= 1'b0;
      up_flit  <= '0;
    end else begin
      if (up_valid && up_ready) up_valid <= 1'b0;
      unique case (rx)
        R_HDR: if (dn_fire) begin
          hdr <= hdr_t'(dn_flit.data);
          rx  <= R_ARGS;
        end
        R_ARGS: if (dn_fire) begin
          args    <= args_t'(dn_flit.data);
          pay_idx <= '0;
          rx      <= dn_flit.last ? R_EXEC : R_PAY;
        end
        R_PAY: if (dn_fire) begin
          if (hdr.op == OP_PIM && pay_idx < 16'(IN_WORDS))
            inputs[int'(pay_idx) * (WORD_W / IN_BITS) +: (WORD_W / IN_BITS)] <= dn_flit.data;
          pay_idx <= pay_idx + 1'b1;
          if (dn_flit.last) rx <= R_EXEC;
        end
        R_EXEC: begin
          tx_idx <= '0;
          if (hdr.op == OP_READ_OUT)      rx <= (args.count == '0) ? R_HDR : R_TX;
          else if (ctrl_start)            rx <= R_WAIT;
          else                            rx <= R_HDR;
        end
        R_WAIT: if (ctrl_done) rx <= R_HDR;
        R_TX: if (!up_valid || up_ready) begin
          up_valid     <= 1'b1;
          up_flit.data <= pb_rd_data;
          up_flit.last <= (tx_idx == args.count - 1'b1);
          tx_idx       <= tx_idx + 1'b1;
          if (tx_idx == args.count - 1'b1) rx <= R_HDR;
        end
        default: rx <= R_HDR;
      endcase
    end
  end

  // ---------------- plane datapath ----------------
  logic             pim_mode, wl_en, bls_en, sense, adc_start, adc_done, adc_busy;
  logic             acc_clear, acc_add, pb_load_acc, pb_load_page, prog;
  logic [BIT_W-1:0] bitpos;

  logic [N_STACK-1:0]              wl_read;
  logic [N_BLK-1:0]                blk_sel;
  logic [N_ROW-1:0]                bls;
  logic [N_ADC-1:0][LVL_W-1:0]     bl_level;
  logic [PAGE_BITS-1:0]            page_out;
  logic [N_ADC-1:0][ADC_BITS-1:0]  code;
  logic [N_ADC/2-1:0][ACC_W-1:0]   acc;
  logic [PB_BITS-1:0]              pb_page, pb_load_data;

  pim_plane_ctrl #(
    .T_DECWL(T_DECWL), .T_DECBLS(T_DECBLS), .T_PRE(T_PRE), .T_ACCUM(T_ACCUM),
    .T_DIS(T_DIS), .T_PROG_SLC(T_PROG_SLC), .BPC(BPC)
  ) u_ctrl (
    .clk, .rst_n, .start(ctrl_start), .cmd(ctrl_cmd), .busy(ctrl_busy), .done(ctrl_done),
    .pim_mode, .wl_en, .bls_en, .bitpos, .sense, .adc_start, .adc_done,
    .acc_clear, .acc_add, .pb_load_acc, .pb_load_page, .prog
  );

  wl_decoder #(
    .N_ROW(N_ROW), .N_STACK(N_STACK), .BLS_PER_BLK(BLS_PER_BLK), .N_ACT(N_ACT)
  ) u_wldec (
    .en(wl_en), .pim_mode, .layer(args.layer[LAYER_W-1:0]), .row(args.row[ROW_W-1:0]),
    .group(GRP_W'(args.group)), .wl_read, .blk_sel
  );

  bls_decoder #(.N_ROW(N_ROW), .N_ACT(N_ACT)) u_blsdec (
    .en(bls_en), .pim_mode, .row(args.row[ROW_W-1:0]), .group(GRP_W'(args.group)),
    .bitpos, .inputs, .bls
  );

  nand_cell_array #(
    .N_ROW(N_ROW), .N_COL(N_COL), .N_STACK(N_STACK), .BLS_PER_BLK(BLS_PER_BLK),
    .N_ACT(N_ACT), .COL_MUX(COL_MUX), .BPC(BPC)
  ) u_array (
    .clk, .pim_mode, .wl_read, .blk_sel, .bls, .mux(args.mux[MUX_W-1:0]), .sense, .prog,
    .page_in(pb_page[PAGE_BITS-1:0]), .bl_level, .page_out
  );

  sar_adc_bank #(
    .N_ADC(N_ADC), .ADC_BITS(ADC_BITS), .LVL_W(LVL_W), .LSB_SHIFT(LSB_SHIFT)
  ) u_adc (
    .clk, .rst_n, .start(adc_start), .vin(bl_level), .code, .busy(adc_busy), .done(adc_done)
  );

  shift_adder #(.N_ADC(N_ADC), .ADC_BITS(ADC_BITS), .CELL_BITS(BPC)) u_sadd (
    .clk, .rst_n, .clear(acc_clear), .add(acc_add), .bitpos, .code, .acc
  );

  always_comb begin
    pb_load_data = '0;
    if (pb_load_acc) pb_load_data = PB_BITS'(acc);
    else             pb_load_data[PAGE_BITS-1:0] = page_out;
  end

  page_buffer #(.PB_WORDS(PB_WORDS)) u_pb (
    .clk, .rst_n, .wr_en(pb_wr), .wr_addr(pb_wr_addr), .wr_data(dn_flit.data),
    .load_en(pb_load_acc || pb_load_page), .load_data(pb_load_data),
    .rd_addr(pb_rd_addr), .rd_data(pb_rd_data), .page(pb_page)
  );

  // A word may only be written into the page buffer while no sensed page or
  // PIM result is being latched.
  assert property (@(posedge clk) disable iff (!rst_n) !(pb_wr && (pb_load_acc || pb_load_page)));
  assert property (@(posedge clk) disable iff (!rst_n) up_valid && !up_ready |=> up_valid && $stable(up_flit));
endmodule
