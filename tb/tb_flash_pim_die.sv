// tb_flash_pim_die: end-to-end test of a reduced die (4 planes of
// 16 rows x 64 bitlines x 4 layers) through its word port, covering the
// paper's dataflows:
//   1. weight programming (unicast per plane) and page read-back (PASS);
//   2. static MVM, row-wise tiling: a different input slice is scattered to
//      each plane, PIM passes overlap with the inbound transfers of the next
//      planes, and the H-tree RPUs sum the four partial results (ADD);
//   3. static MVM, column-wise tiling: one input vector is broadcast and the
//      four result slices are concatenated (CONCAT);
//   4. QK^T: q is broadcast into the page buffers of planes 0/2 (LOAD, no
//      programming), planes 1/3 sense K rows; the leaf RPUs form
//      the dot products (VVM) and the root concatenates them;
//   5. SV: S[0]/S[1] are scattered into planes 0/2 (LOAD), planes 1/3 sense
//      V rows; the leaf RPUs
//      scale (VSM) and the root adds the two vectors (ADD).
// All results are checked against reference arithmetic. The root is
// randomly back-pressured during read-outs. Each mechanism is counted and a
// mechanism that never occurred counts as a failure.
module tb_flash_pim_die;
  import pim_pkg::*;
  import tb_pkg::*;
  localparam int NP = 4, N_ROW = 16, N_COL = 64, N_STACK = 4, N_ACT = 8, MUX = 4;
  localparam int N_ADC = N_COL / MUX, N_OUT = N_ADC / 2, PBW = N_COL / 16, INW = N_ACT / 8;
  localparam int DH = PBW * 8;  // INT8 elements per page
  logic clk = 0, rst_n = 0;
  logic root_dn_valid = 0, root_dn_ready, root_up_valid, root_up_ready;
  flit_t root_dn_flit, root_up_flit;
  up_mode_e [NP-1:0] rpu_mode;
  int checks = 0, failures = 0;
  int unsigned modes [MAX_LEVELS];
  word_t outq[$];
  bit bp = 0;
  int unsigned wref [NP][N_ACT*N_OUT];  // weights of layer 1, group 0, mux 0
  logic [N_COL*4-1:0] pg;

  typedef enum int {M_PROG, M_READ, M_PIM, M_SCATTER, M_BCAST, M_OVERLAP, M_PASS, M_CONCAT,
                    M_ADD, M_VVM, M_VSM, M_STALL, M_LOAD, M_NUM} mech_e;
  int mech [M_NUM];

  flash_pim_die #(.N_PLANES(NP), .N_ROW(N_ROW), .N_COL(N_COL), .N_STACK(N_STACK), .N_ACT(N_ACT),
                  .T_DECWL(10), .T_DECBLS(3), .T_PRE(4), .T_DIS(3), .T_PROG_SLC(5)) dut (.*);
  always #2 clk = ~clk;
  always @(negedge clk) root_up_ready = bp ? 1'($urandom) : 1'b1;

  logic [NP-1:0] pbusy;
  for (genvar p = 0; p < NP; p++) begin : g_busy
    assign pbusy[p] = dut.g_plane[p].u_plane.u_ctrl.busy;
  end

  always @(posedge clk) if (rst_n) begin
    if (root_up_valid && root_up_ready) outq.push_back(root_up_flit.data);
    if (root_up_valid && !root_up_ready) mech[M_STALL]++;
    if (root_dn_valid && root_dn_ready && (|pbusy)) mech[M_OVERLAP]++;
  end

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

  task automatic set_modes(up_mode_e l0, up_mode_e l1);
    foreach (modes[i]) modes[i] = 0;
    modes[0] = l0; modes[1] = l1;
    for (int l = 0; l < 2; l++) begin
      up_mode_e m;
      m = (l == 0) ? l0 : l1;
      case (m)
        UP_PASS: mech[M_PASS]++;  UP_CONCAT: mech[M_CONCAT]++; UP_ADD: mech[M_ADD]++;
        UP_VVM: mech[M_VVM]++;    UP_VSM: mech[M_VSM]++;       default: ;
      endcase
    end
  endtask

  task automatic collect(int n, string what, word_t e[$]);
    int t = 0;
    while (outq.size() < n && t < 20000) begin @(posedge clk); t++; end
    checks++;
    if (outq.size() != n) begin failures++; $display("%s: %0d of %0d words", what, outq.size(), n); end
    else foreach (e[i]) begin
      checks++;
      if (outq[i] != e[i]) begin failures++; $display("%s word %0d: %h exp %h", what, i, outq[i], e[i]); end
    end
    outq.delete();
  endtask

  function automatic word_t pack_x(uvec_t x, int w);
    word_t d;
    for (int e = 0; e < 8; e++) d[e*8 +: 8] = 8'(x[w*8 + e]);
    return d;
  endfunction

  initial begin
    word_t pay[$], e[$];
    uvec_t x [NP];
    logic [N_COL*4-1:0] kv [NP];
    foreach (mech[i]) mech[i] = 0;
    foreach (modes[i]) modes[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- 1. program weights: layer 1, rows 0..N_ACT-1 (group 0), per plane ----
    for (int p = 0; p < NP; p++)
      for (int r = 0; r < N_ACT; r++) begin
        pg = '0;
        for (int k = 0; k < N_OUT; k++) begin
          int unsigned w;
          w = $urandom & 255;
          wref[p][r * N_OUT + k] = w;
          pg[(2*k) * 4 +: 4] = 4'(w >> 4);
          pg[(2*k+1) * 4 +: 4] = 4'(w);
        end
        pay.delete();
        for (int i = 0; i < PBW; i++) pay.push_back(pg[i*64 +: 64]);
        pkt(OP_PROGRAM, p, 0, mk_args(r, 1, 0, 0, 0, 0), pay);
        mech[M_PROG]++;
        if (p == 2 && r == 3) kv[0] = pg;
      end
    // read back plane 2 row 3 through PASS routing
    set_modes(UP_PASS, UP_PASS);
    pkt(OP_READ, 2, 0, mk_args(3, 1, 0, 0, 0, 0), '{});
    mech[M_READ]++;
    pkt(OP_READ_OUT, 2, 0, mk_args(0, 0, 0, 0, 0, PBW), '{});
    e.delete(); for (int i = 0; i < PBW; i++) e.push_back(kv[0][i*64 +: 64]);
    collect(PBW, "readback", e);

    // ---- 2. row-wise tiling: scatter, PIM, accumulate ----
    for (int p = 0; p < NP; p++) begin
      x[p] = new[N_ACT];
      foreach (x[p][n]) x[p][n] = $urandom & 255;
      pay.delete();
      for (int w = 0; w < INW; w++) pay.push_back(pack_x(x[p], w));
      pkt(OP_PIM, p, 0, mk_args(0, 1, 0, 0, 0, 0), pay);
      mech[M_PIM]++; mech[M_SCATTER]++;
    end
    bp = 1;
    set_modes(UP_ADD, UP_ADD);
    pkt(OP_READ_OUT, 0, 8'hFF, mk_args(0, 0, 0, 0, 0, N_OUT / 2), '{});
    e.delete();
    begin
      uvec_t o [NP];
      for (int p = 0; p < NP; p++) o[p] = ref_pim(x[p], wref[p], N_ACT, N_OUT, 9, 2);
      for (int k = 0; k < N_OUT; k += 2) begin
        logic [31:0] s0, s1;
        s0 = 0; s1 = 0;
        for (int p = 0; p < NP; p++) begin s0 += o[p][k]; s1 += o[p][k+1]; end
        e.push_back({s1, s0});
      end
    end
    collect(N_OUT / 2, "row-wise", e);

    // ---- 3. column-wise tiling: broadcast, PIM, concatenate ----
    x[0] = new[N_ACT];
    foreach (x[0][n]) x[0][n] = $urandom & 255;
    pay.delete();
    for (int w = 0; w < INW; w++) pay.push_back(pack_x(x[0], w));
    pkt(OP_PIM, 0, 8'hFF, mk_args(0, 1, 0, 0, 0, 0), pay);
    mech[M_PIM]++; mech[M_BCAST]++;
    set_modes(UP_CONCAT, UP_CONCAT);
    pkt(OP_READ_OUT, 0, 8'hFF, mk_args(0, 0, 0, 0, 0, N_OUT / 2), '{});
    e.delete();
    for (int p = 0; p < NP; p++) begin
      uvec_t o;
      o = ref_pim(x[0], wref[p], N_ACT, N_OUT, 9, 2);
      for (int k = 0; k < N_OUT; k += 2) e.push_back({o[k+1], o[k]});
    end
    collect(NP * N_OUT / 2, "col-wise", e);

    // ---- 4. QK^T: P0 = q, P1 = K[0], P2 = q, P3 = K[1] (layer 3, row 5) ----
    for (int i = 0; i < N_COL * 4 / 32; i++) kv[0][i*32 +: 32] = $urandom;   // q
    for (int i = 0; i < N_COL * 4 / 32; i++) kv[1][i*32 +: 32] = $urandom;   // K[0]
    for (int i = 0; i < N_COL * 4 / 32; i++) kv[3][i*32 +: 32] = $urandom;   // K[1]
    kv[2] = kv[0];
    // K rows are programmed and sensed into the page buffers of P1/P3
    for (int p = 1; p < NP; p += 2) begin
      pay.delete();
      for (int i = 0; i < PBW; i++) pay.push_back(kv[p][i*64 +: 64]);
      pkt(OP_PROGRAM, p, 0, mk_args(5, 3, 0, 0, 0, 0), pay);
      mech[M_PROG]++;
    end
    pkt(OP_READ, 1, 8'h02, mk_args(5, 3, 0, 0, 0, 0), '{});
    mech[M_READ]++;
    // q is broadcast straight into the page buffers of P0/P2
    pay.delete();
    for (int i = 0; i < PBW; i++) pay.push_back(kv[0][i*64 +: 64]);
    pkt(OP_LOAD, 0, 8'h02, mk_args(0, 0, 0, 0, 0, 0), pay);
    mech[M_LOAD]++; mech[M_BCAST]++;
    set_modes(UP_VVM, UP_CONCAT);
    pkt(OP_READ_OUT, 0, 8'hFF, mk_args(0, 0, 0, 0, 0, PBW), '{});
    e.delete();
    for (int j = 1; j < NP; j += 2) begin
      int s;
      s = 0;
      for (int i = 0; i < DH; i++) s += int'($signed(kv[0][i*8 +: 8])) * int'($signed(kv[j][i*8 +: 8]));
      e.push_back(64'(unsigned'(s)));
    end
    collect(2, "QK^T", e);

    // ---- 5. SV: P0 = S[0], P1 = V[0], P2 = S[1], P3 = V[1] (layer 2, row 9) ----
    for (int p = 0; p < NP; p++)
      for (int i = 0; i < N_COL * 4 / 32; i++) kv[p][i*32 +: 32] = $urandom;
    for (int p = 1; p < NP; p += 2) begin
      pay.delete();
      for (int i = 0; i < PBW; i++) pay.push_back(kv[p][i*64 +: 64]);
      pkt(OP_PROGRAM, p, 0, mk_args(9, 2, 0, 0, 0, 0), pay);
      mech[M_PROG]++;
    end
    pkt(OP_READ, 1, 8'h02, mk_args(9, 2, 0, 0, 0, 0), '{});
    mech[M_READ]++;
    // S[0] and S[1] are scattered into the page buffers of P0 and P2
    for (int p = 0; p < NP; p += 2) begin
      pkt(OP_LOAD, p, 0, mk_args(0, 0, 0, 0, 0, 0), '{kv[p][63:0]});
      mech[M_LOAD]++; mech[M_SCATTER]++;
    end
    set_modes(UP_VSM, UP_ADD);
    // the S planes send one word, the V planes a whole row
    pkt(OP_READ_OUT, 0, 0, mk_args(0, 0, 0, 0, 0, 1), '{});
    pkt(OP_READ_OUT, 2, 0, mk_args(0, 0, 0, 0, 0, 1), '{});
    pkt(OP_READ_OUT, 1, 0, mk_args(0, 0, 0, 0, 0, PBW), '{});
    pkt(OP_READ_OUT, 3, 0, mk_args(0, 0, 0, 0, 0, PBW), '{});
    e.delete();
    for (int i = 0; i < DH; i += 2) begin
      int s0, s1, a0, a1;
      a0 = int'($signed(kv[0][7:0])); a1 = int'($signed(kv[2][7:0]));
      s0 = a0 * int'($signed(kv[1][i*8 +: 8])) + a1 * int'($signed(kv[3][i*8 +: 8]));
      s1 = a0 * int'($signed(kv[1][(i+1)*8 +: 8])) + a1 * int'($signed(kv[3][(i+1)*8 +: 8]));
      e.push_back({32'(s1), 32'(s0)});
    end
    collect(DH / 2, "SV", e);
    bp = 0;

    foreach (mech[i]) begin
      checks++;
      if (mech[i] == 0) begin failures++; $display("mechanism %s never happened", mech_e'(i)); end
    end
    $display("mechanisms: prog=%0d read=%0d pim=%0d scatter=%0d bcast=%0d overlap=%0d pass=%0d concat=%0d add=%0d vvm=%0d vsm=%0d stall=%0d load=%0d",
             mech[M_PROG], mech[M_READ], mech[M_PIM], mech[M_SCATTER], mech[M_BCAST], mech[M_OVERLAP],
             mech[M_PASS], mech[M_CONCAT], mech[M_ADD], mech[M_VVM], mech[M_VSM], mech[M_STALL], mech[M_LOAD]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
