// tb_flash_pim_die_full: one complete static-MVM operation on a die at its
// default size (256 planes of 256 rows x 2048 bitlines x 128 layers).
// Four weight rows are programmed into every plane with one broadcast
// program each; a different 128-element input vector is scattered to every
// plane (row-wise tiling, PIM passes overlapping the inbound transfers);
// the partial results of all 256 planes are summed by the H-tree on the
// way out (ADD at all eight RPU levels). The 256 INT32 sums are checked
// against reference arithmetic, and the time from the last inbound word to
// the first result word is reported.
module tb_flash_pim_die_full;
  import pim_pkg::*;
  import tb_pkg::*;
  localparam int NP = 256, N_COL = 2048, N_ACT = 128, MUX = 4, NROWS_W = 4;
  localparam int N_ADC = N_COL / MUX, N_OUT = N_ADC / 2, PBW = N_COL / 16, INW = N_ACT / 8;
  logic clk = 0, rst_n = 0;
  logic root_dn_valid = 0, root_dn_ready, root_up_valid, root_up_ready = 1;
  flit_t root_dn_flit, root_up_flit;
  up_mode_e [NP-1:0] rpu_mode;
  int checks = 0, failures = 0;
  int unsigned modes [MAX_LEVELS];
  word_t outq[$];
  uvec_t wref;

  flash_pim_die dut (.*);
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

  initial begin
    word_t pay[$];
    logic [N_COL*4-1:0] pg;
    uvec_t x [NP];
    int unsigned sum [N_OUT];
    int t_in, t_out;
    foreach (modes[i]) modes[i] = UP_ADD;
    wref = new[N_ACT * N_OUT];
    foreach (wref[i]) wref[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // weights: rows 0..3 of layer 7, column-mux quarter 1, same in all planes
    for (int r = 0; r < NROWS_W; r++) begin
      pg = '0;
      for (int k = 0; k < N_OUT; k++) begin
        int unsigned w;
        w = $urandom & 255;
        wref[r * N_OUT + k] = w;
        pg[(N_ADC + 2*k) * 4 +: 4] = 4'(w >> 4);
        pg[(N_ADC + 2*k + 1) * 4 +: 4] = 4'(w);
      end
      pay.delete();
      for (int i = 0; i < PBW; i++) pay.push_back(pg[i*64 +: 64]);
      pkt(OP_PROGRAM, 0, 8'hFF, mk_args(r, 7, 0, 0, 0, 0), pay);
    end
    // scatter inputs and start PIM in every plane
    for (int p = 0; p < NP; p++) begin
      x[p] = new[N_ACT];
      foreach (x[p][n]) x[p][n] = (n < NROWS_W) ? ($urandom & 255) : ($urandom & 255);
      pay.delete();
      for (int w = 0; w < INW; w++) begin
        word_t d;
        for (int e = 0; e < 8; e++) d[e*8 +: 8] = 8'(x[p][w*8 + e]);
        pay.push_back(d);
      end
      pkt(OP_PIM, p, 0, mk_args(0, 7, 0, 1, 0, 0), pay);
    end
    t_in = $time;
    pkt(OP_READ_OUT, 0, 8'hFF, mk_args(0, 0, 0, 0, 0, N_OUT / 2), '{});
    while (outq.size() == 0) @(posedge clk);
    t_out = $time;
    while (outq.size() < N_OUT / 2) @(posedge clk);
    foreach (sum[k]) sum[k] = 0;
    for (int p = 0; p < NP; p++) begin
      uvec_t o;
      o = ref_pim(x[p], wref, N_ACT, N_OUT, 9, 2);
      foreach (sum[k]) sum[k] += o[k];
    end
    for (int k = 0; k < N_OUT; k++) begin
      checks++;
      if (outq[k / 2][(k % 2) * 32 +: 32] != sum[k]) begin
        failures++;
        if (failures < 10) $display("k=%0d got %0d exp %0d", k, outq[k / 2][(k % 2) * 32 +: 32], sum[k]);
      end
    end
    $display("last inbound word to first summed result: %0d cycles", (t_out - t_in) / 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
