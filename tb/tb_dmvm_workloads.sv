// tb_dmvm_workloads: the attention products of one head during token
// generation, QK^T (1 x d_h)(d_h x L) and SV (1 x L)(L x d_h), with INT8
// operands, d_h = 128 and context lengths L = 256, 512 and 1K, on an SLC
// die (BPC = 1) of 64 full-size planes.
//
// The KV cache is programmed as ordinary SLC pages: a 2048-bit page holds
// two 128-byte rows, so key/value row l sits in odd plane 2j+1 with
// j = l % 32, at row (l / 32) / 2 of layer 0 (K) or layer 1 (V), page-buffer
// words 16*((l / 32) % 2) .. +15. Plane pairs (2j, 2j+1) hang off one
// level-0 RPU.
//   QK^T: q is broadcast once into the page buffers of all even planes
//   (LOAD, both halves). Each round senses one page in every odd plane and
//   reads both sides out through VVM RPUs at level 0 and CONCAT above, so
//   32 scores arrive per round, in order of l.
//   SV: per round, the 32 scores S[l] of the round are scattered into the
//   even planes (LOAD, one word each) and the value rows are sensed in the
//   odd planes; VSM RPUs at level 0 scale the rows and ADD RPUs above sum
//   them, so each round returns one partial (1 x d_h) INT32 vector; the
//   rounds are summed here, as the host would.
// Every score and output element is compared with reference arithmetic,
// and the cycles of each product are reported.
module tb_dmvm_workloads;
  import pim_pkg::*;
  import tb_pkg::*;
  localparam int NP = 64, NPAIR = NP / 2, N_COL = 2048, DH = 128;
  localparam int PGW = N_COL / 64;      // words per SLC page (2 rows of d_h bytes)
  localparam int RW = DH / 8;           // words per row
  logic clk = 0, rst_n = 0;
  logic root_dn_valid = 0, root_dn_ready, root_up_valid, root_up_ready = 1;
  flit_t root_dn_flit, root_up_flit;
  up_mode_e [NP-1:0] rpu_mode;
  int checks = 0, failures = 0;
  int unsigned modes [MAX_LEVELS];
  word_t outq[$];

  flash_pim_die #(.N_PLANES(NP), .BPC(1)) dut (.*);
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

  function automatic word_t pack8(logic [7:0] v [], int base);
    word_t d;
    for (int e = 0; e < 8; e++) d[e*8 +: 8] = v[base + e];
    return d;
  endfunction

  // program rows 0..L-1 of a matrix (row-major INT8) into layer `layer`
  task automatic store(logic [7:0] m [], int L, int layer);
    word_t pay[$];
    for (int pr = 0; pr < L / NPAIR / 2; pr++)
      for (int j = 0; j < NPAIR; j++) begin
        pay.delete();
        for (int h = 0; h < 2; h++)
          for (int w = 0; w < RW; w++) pay.push_back(pack8(m, ((pr * 2 + h) * NPAIR + j) * DH + w * 8));
        pkt(OP_PROGRAM, 2 * j + 1, 0, mk_args(pr, layer, 0, 0, 0, 0), pay);
      end
  endtask

  task automatic run(int L);
    logic [7:0] q [], k [], v [], s [];
    int t0, t1, f0;
    word_t pay[$];
    int bc;
    bc = (NP - 1) & ~1;  // all levels but 0 broadcast: every even (or odd) plane
    f0 = failures;
    q = new[DH]; k = new[L * DH]; v = new[L * DH]; s = new[L];
    foreach (q[i]) q[i] = 8'($urandom);
    foreach (k[i]) k[i] = 8'($urandom);
    foreach (v[i]) v[i] = 8'($urandom);
    foreach (s[i]) s[i] = 8'($urandom);
    store(k, L, 0);
    store(v, L, 1);

    // ---- QK^T ----
    t0 = $time;
    outq.delete();
    pay.delete();
    for (int h = 0; h < 2; h++) for (int w = 0; w < RW; w++) pay.push_back(pack8(q, w * 8));
    pkt(OP_LOAD, 0, bc, mk_args(0, 0, 0, 0, 0, 0), pay);
    foreach (modes[l]) modes[l] = (l == 0) ? UP_VVM : UP_CONCAT;
    for (int r = 0; r < L / NPAIR; r++) begin
      pkt(OP_READ, 1, bc, mk_args(r / 2, 0, 0, 0, 0, 0), '{});
      pkt(OP_READ_OUT, 0, bc | 1, mk_args(0, 0, 0, 0, RW * (r % 2), RW), '{});
    end
    while (outq.size() < L) @(posedge clk);
    t1 = $time;
    for (int l = 0; l < L; l++) begin
      int e;
      e = 0;
      for (int i = 0; i < DH; i++) e += int'($signed(q[i])) * int'($signed(k[l * DH + i]));
      checks++;
      if (outq[l] != 64'(unsigned'(e))) begin
        failures++;
        if (failures < 10) $display("QK^T L=%0d l=%0d got %h exp %0d", L, l, outq[l], e);
      end
    end
    $display("QK^T d_h=%0d L=%0d: %0d cycles", DH, L, (t1 - t0) / 4);

    // ---- SV ----
    t0 = $time;
    begin
      int acc [DH];
      foreach (acc[i]) acc[i] = 0;
      foreach (modes[l]) modes[l] = (l == 0) ? UP_VSM : UP_ADD;
      for (int r = 0; r < L / NPAIR; r++) begin
        for (int j = 0; j < NPAIR; j++)
          pkt(OP_LOAD, 2 * j, 0, mk_args(0, 0, 0, 0, 0, 0), '{64'(s[r * NPAIR + j])});
        pkt(OP_READ, 1, bc, mk_args(r / 2, 1, 0, 0, 0, 0), '{});
        outq.delete();
        pkt(OP_READ_OUT, 0, bc, mk_args(0, 0, 0, 0, 0, 1), '{});
        pkt(OP_READ_OUT, 1, bc, mk_args(0, 0, 0, 0, RW * (r % 2), RW), '{});
        while (outq.size() < DH / 2) @(posedge clk);
        for (int i = 0; i < DH; i++) acc[i] += int'(outq[i / 2][(i % 2) * 32 +: 32]);
      end
      t1 = $time;
      for (int i = 0; i < DH; i++) begin
        int e;
        e = 0;
        for (int l = 0; l < L; l++) e += int'($signed(s[l])) * int'($signed(v[l * DH + i]));
        checks++;
        if (acc[i] != e) begin
          failures++;
          if (failures < 10) $display("SV L=%0d i=%0d got %0d exp %0d", L, i, acc[i], e);
        end
      end
    end
    $display("SV d_h=%0d L=%0d: %0d cycles, %0d failures in this size", DH, L, (t1 - t0) / 4, failures - f0);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(256);
    run(512);
    run(1024);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
