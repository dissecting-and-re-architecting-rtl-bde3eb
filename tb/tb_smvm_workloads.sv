// tb_smvm_workloads: the static matrix-vector products used to evaluate
// the H-tree, (1 x 1K)(1K x 1K), (1 x 1K)(1K x 4K) and (1 x 4K)(4K x 1K)
// with 8-bit operands, on a die of 128 full-size planes (256 rows x 2048
// bitlines x 128 layers, QLC).
//
// Mapping: the weight matrix is cut into unit tiles of 128 input rows x
// 256 outputs. Tile (r, c) goes to plane c*R + r, layer L, row group 0,
// column-mux quarter 0. Input slice r (128 bytes) is scattered to every
// plane of row tile r, and each plane runs its PIM pass as soon as its
// slice has arrived. One broadcast read-out then sets the RPUs of the
// lowest log2(R) levels to ADD (summing the R partial results of a column
// tile) and the next log2(C) levels to CONCAT (joining the column tiles in
// order); levels above the used planes PASS child 0.
//
// The 1K x 1K matrix is fully random: each of its 32 tiles is programmed
// page by page (4096 page programs through the single die link). For the
// two 4K-sized matrices, programming 128 distinct tiles through one link
// would take about 2 M cycles, so they repeat one random tile, programmed
// into all 128 planes with broadcast; inputs are random and different for
// every plane, so routing, pass overlap and reduction are exercised at the
// full size. The QLC program time is shortened (T_PROG_SLC = 10) because
// only the dataflow is of interest here. Each output is compared with the
// reference arithmetic of tb_pkg; the cycles from the first input word to
// the last output word are reported.
module tb_smvm_workloads;
  import pim_pkg::*;
  import tb_pkg::*;
  localparam int NP = 128, N_COL = 2048, N_ACT = 128, MUX = 4;
  localparam int N_ADC = N_COL / MUX, N_OUT = N_ADC / 2, PBW = N_COL / 16, INW = N_ACT / 8;
  logic clk = 0, rst_n = 0;
  logic root_dn_valid = 0, root_dn_ready, root_up_valid, root_up_ready = 1;
  flit_t root_dn_flit, root_up_flit;
  up_mode_e [NP-1:0] rpu_mode;
  int checks = 0, failures = 0;
  int unsigned modes [MAX_LEVELS];
  word_t outq[$];

  flash_pim_die #(.N_PLANES(NP), .T_PROG_SLC(10)) dut (.*);
  always #2 clk = ~clk;
  always @(posedge clk) if (root_up_valid && root_up_ready) outq.push_back(root_up_flit.data);

  task automatic send(word_t d, bit last);
    @(negedge clk);
    root_dn_flit = '{last: last, data: d};
    root_dn_valid = 1;
    @(posedge clk);
    while (!root_dn_ready) @(posedge clk);
    #1 root_dn_valid = 0;
  endtask

  task automatic pkt(opcode_e op, int addr, int bcast, word_t a, word_t pay[$]);
    send(mk_hdr(op, addr, bcast, pay.size(), modes), 0);
    send(a, pay.size() == 0);
    foreach (pay[i]) send(pay[i], i == pay.size() - 1);
  endtask

  // Program row n of a 128 x 256 tile (w[n*N_OUT + k]) into (plane, layer).
  task automatic prog_row(int plane, int bcast, int layer, int n, uvec_t w);
    logic [N_COL*4-1:0] pg;
    word_t pay[$];
    pg = '0;
    for (int k = 0; k < N_OUT; k++) begin
      pg[(2*k) * 4 +: 4]     = 4'(w[n*N_OUT + k] >> 4);
      pg[(2*k + 1) * 4 +: 4] = 4'(w[n*N_OUT + k]);
    end
    for (int i = 0; i < PBW; i++) pay.push_back(pg[i*64 +: 64]);
    pkt(OP_PROGRAM, plane, bcast, mk_args(n, layer, 0, 0, 0, 0), pay);
  endtask

  // (1 x 128R) x (128R x 256C): R row tiles, C column tiles (powers of two).
  task automatic run_mvm(string name, int R, int C, bit distinct, int layer);
    uvec_t w [];          // per tile (distinct) or one shared tile
    uvec_t x [];          // per row tile
    int lr, lc, nt, t0, t1, fails0;
    word_t pay[$];
    fails0 = failures;
    lr = $clog2(R); lc = $clog2(C);
    nt = distinct ? R * C : 1;
    w = new[nt];
    foreach (w[t]) begin
      w[t] = new[N_ACT * N_OUT];
      foreach (w[t][i]) w[t][i] = $urandom & 255;
    end
    // weights
    if (distinct) begin
      for (int n = 0; n < N_ACT; n++)
        for (int p = 0; p < R * C; p++) prog_row(p, 0, layer, n, w[p]);
    end else begin
      for (int n = 0; n < N_ACT; n++) prog_row(0, 8'hFF, layer, n, w[0]);
    end
    // inputs: scatter, PIM starts per plane
    x = new[R];
    foreach (x[r]) begin
      x[r] = new[N_ACT];
      foreach (x[r][n]) x[r][n] = $urandom & 255;
    end
    outq.delete();
    t0 = $time;
    for (int p = 0; p < R * C; p++) begin
      pay.delete();
      for (int i = 0; i < INW; i++) begin
        word_t d;
        for (int e = 0; e < 8; e++) d[e*8 +: 8] = 8'(x[p % R][i*8 + e]);
        pay.push_back(d);
      end
      pkt(OP_PIM, p, 0, mk_args(0, layer, 0, 0, 0, 0), pay);
    end
    // read-out: ADD below, CONCAT above, PASS beyond the used planes
    foreach (modes[l]) modes[l] = (l < lr) ? UP_ADD : (l < lr + lc) ? UP_CONCAT : UP_PASS;
    pkt(OP_READ_OUT, 0, (1 << (lr + lc)) - 1, mk_args(0, 0, 0, 0, 0, N_OUT / 2), '{});
    while (outq.size() < C * N_OUT / 2) @(posedge clk);
    t1 = $time;
    for (int c = 0; c < C; c++) begin
      int unsigned sum [N_OUT];
      foreach (sum[k]) sum[k] = 0;
      for (int r = 0; r < R; r++) begin
        uvec_t o;
        o = ref_pim(x[r], w[distinct ? c * R + r : 0], N_ACT, N_OUT, 9, 2);
        foreach (sum[k]) sum[k] += o[k];
      end
      for (int k = 0; k < N_OUT; k++) begin
        word_t d;
        d = outq[(c * N_OUT + k) / 2];
        checks++;
        if (d[(k % 2) * 32 +: 32] != sum[k]) begin
          failures++;
          if (failures < 10) $display("%s c=%0d k=%0d got %0d exp %0d", name, c, k, d[(k % 2) * 32 +: 32], sum[k]);
        end
      end
    end
    $display("%s: %0d planes, %0d outputs, %0d cycles from first input word to last output word, %0d failures",
             name, R * C, C * N_OUT, (t1 - t0) / 4, failures - fails0);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_mvm("sMVM 1Kx1K", 8, 4, 1, 0);
    run_mvm("sMVM 1Kx4K", 8, 16, 0, 1);
    run_mvm("sMVM 4Kx1K", 32, 4, 0, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
