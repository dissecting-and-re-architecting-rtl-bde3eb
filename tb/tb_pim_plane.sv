// tb_pim_plane: end-to-end test of one small plane through its link.
// Programs 8-bit weights into the two row groups of two layers (with the
// weight-to-bitline layout of the plane), runs PIM passes with random
// inputs for every column-mux quarter and reads the INT32 results out,
// comparing them with the reference model. Also checks a page read-back,
// the PIM pass latency measured at the link (result ready to read), and
// read-out under back-pressure (ready toggling).
module tb_pim_plane;
  import pim_pkg::*;
  import tb_pkg::*;
  localparam int N_ROW = 16, N_COL = 64, N_STACK = 4, BPB = 4, N_ACT = 8, MUX = 4;
  localparam int N_ADC = N_COL / MUX, N_OUT = N_ADC / 2, PB_WORDS = N_COL / 16;
  localparam int IN_WORDS = N_ACT / 8;
  localparam int T_DECWL = 10, T_DECBLS = 3, T_PRE = 4, T_ACCUM = 2, T_DIS = 3;
  localparam int T_PASS = T_DECWL + 8 * (T_PRE + 2 + 10 + T_ACCUM + T_DIS) + 2;

  logic clk = 0, rst_n = 0;
  logic dn_valid = 0, dn_ready, up_valid, up_ready = 1;
  flit_t dn_flit, up_flit;
  int checks = 0, failures = 0;
  bit bp_en = 0;
  // reference weights: [layer][group][mux][n*N_OUT+k]
  int unsigned wref [N_STACK][2][MUX][N_ACT*N_OUT];
  logic [N_COL*4-1:0] pages [N_STACK][N_ROW];
  int unsigned modes [MAX_LEVELS];

  pim_plane #(.N_ROW(N_ROW), .N_COL(N_COL), .N_STACK(N_STACK), .BLS_PER_BLK(BPB),
              .N_ACT(N_ACT), .COL_MUX(MUX), .T_DECWL(T_DECWL), .T_DECBLS(T_DECBLS),
              .T_PRE(T_PRE), .T_ACCUM(T_ACCUM), .T_DIS(T_DIS), .T_PROG_SLC(5)) dut (.*);
  always #2 clk = ~clk;
  always @(negedge clk) if (bp_en) up_ready = $urandom; else up_ready = 1;

  task automatic send(word_t d, bit last);
    @(negedge clk);
    dn_flit = '{last: last, data: d};
    dn_valid = 1;
    @(posedge clk);
    while (!dn_ready) @(posedge clk);
    #1 dn_valid = 0;
  endtask

  task automatic send_pkt(word_t h, word_t a, word_t pay[$]);
    send(h, 0);
    send(a, pay.size() == 0);
    foreach (pay[i]) send(pay[i], i == pay.size() - 1);
  endtask

  task automatic recv(int n, output word_t d[$]);
    d.delete();
    while (d.size() < n) begin
      @(posedge clk);
      if (up_valid && up_ready) begin
        d.push_back(up_flit.data);
        checks++;
        if (up_flit.last != (d.size() == n)) begin failures++; $display("last flag wrong"); end
      end
    end
  endtask

  initial begin
    word_t pay[$], got[$];
    foreach (modes[i]) modes[i] = 0;
    for (int l = 0; l < N_STACK; l++) for (int r = 0; r < N_ROW; r++) pages[l][r] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // program weights: layers 0 and 2, all rows
    for (int l = 0; l < N_STACK; l += 2)
      for (int r = 0; r < N_ROW; r++) begin
        for (int m = 0; m < MUX; m++)
          for (int k = 0; k < N_OUT; k++) begin
            int unsigned w;
            w = $urandom & 255;
            wref[l][r / N_ACT][m][(r % N_ACT) * N_OUT + k] = w;
            pages[l][r][(m * N_ADC + 2*k) * 4 +: 4]     = 4'(w >> 4);
            pages[l][r][(m * N_ADC + 2*k + 1) * 4 +: 4] = 4'(w);
          end
        pay.delete();
        for (int i = 0; i < PB_WORDS; i++) pay.push_back(pages[l][r][i*64 +: 64]);
        send_pkt(mk_hdr(OP_PROGRAM, 0, 0, PB_WORDS, modes), mk_args(r, l, 0, 0, 0, 0), pay);
      end
    // page read-back
    for (int t = 0; t < 4; t++) begin
      int l, r;
      l = ($urandom % 2) * 2; r = $urandom % N_ROW;
      send_pkt(mk_hdr(OP_READ, 0, 0, 0, modes), mk_args(r, l, 0, 0, 0, 0), '{});
      send_pkt(mk_hdr(OP_READ_OUT, 0, 0, 0, modes), mk_args(0, 0, 0, 0, 0, PB_WORDS), '{});
      recv(PB_WORDS, got);
      for (int i = 0; i < PB_WORDS; i++) begin
        checks++;
        if (got[i] != pages[l][r][i*64 +: 64]) begin failures++; $display("page word %0d got %h exp %h", i, got[i], pages[l][r][i*64 +: 64]); end
      end
    end
    // load operands into the page buffer without a cell access, then read them back
    for (int t = 0; t < 4; t++) begin
      int off, n;
      word_t ld[$];
      ld.delete();
      n = 1 + $urandom % PB_WORDS; off = $urandom % (PB_WORDS - n + 1);
      for (int i = 0; i < n; i++) ld.push_back({$urandom, $urandom});
      send_pkt(mk_hdr(OP_LOAD, 0, 0, n, modes), mk_args(0, 0, 0, 0, off, 0), ld);
      send_pkt(mk_hdr(OP_READ_OUT, 0, 0, 0, modes), mk_args(0, 0, 0, 0, off, n), '{});
      recv(n, got);
      for (int i = 0; i < n; i++) begin
        checks++;
        if (got[i] != ld[i]) begin failures++; $display("load word %0d got %h exp %h", i, got[i], ld[i]); end
      end
    end
    // PIM passes
    for (int t = 0; t < 16; t++) begin
      int l, g, m, t0, lat;
      uvec_t x, o;
      l = ($urandom % 2) * 2; g = $urandom % 2; m = t % MUX;
      x = new[N_ACT];
      foreach (x[n]) x[n] = $urandom & 255;
      if (t == 0) foreach (x[n]) x[n] = 255;  // densest inputs
      pay.delete();
      for (int i = 0; i < IN_WORDS; i++) begin
        word_t wd;
        for (int e = 0; e < 8; e++) wd[e*8 +: 8] = 8'(x[i*8 + e]);
        pay.push_back(wd);
      end
      send_pkt(mk_hdr(OP_PIM, 0, 0, IN_WORDS, modes), mk_args(0, l, g, m, 0, 0), pay);
      t0 = $time;
      bp_en = (t % 3) == 1;
      send_pkt(mk_hdr(OP_READ_OUT, 0, 0, 0, modes), mk_args(0, 0, 0, 0, 0, N_OUT / 2), '{});
      lat = ($time - t0) / 4;
      if (!bp_en) begin
        checks++;
        // the read-out header waits until the pass is over
        if (lat < T_PASS - 2 || lat > T_PASS + 4) begin failures++; $display("pass latency %0d exp ~%0d", lat, T_PASS); end
      end
      recv(N_OUT / 2, got);
      bp_en = 0;
      o = ref_pim(x, wref[l][g][m], N_ACT, N_OUT, 9, 2);
      for (int k = 0; k < N_OUT; k++) begin
        checks++;
        if (got[k / 2][(k % 2) * 32 +: 32] != o[k]) begin
          failures++;
          $display("t=%0d k=%0d got %0d exp %0d", t, k, got[k / 2][(k % 2) * 32 +: 32], o[k]);
        end
      end
    end
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
