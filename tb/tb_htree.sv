// tb_htree: an 8-leaf H-tree with behavioural leaves. Checks that unicast
// packets reach only the addressed leaf, that a full broadcast and a
// sub-tree broadcast reach exactly the expected leaves, and that upward
// streams come out passed from one leaf, concatenated in leaf order, and
// summed over all leaves (lane-wise INT32), with back-pressure at the root.
// Also checks the one-cycle-per-level upward pipeline latency.
module tb_htree;
  import pim_pkg::*;
  import tb_pkg::*;
  localparam int NP = 8, LV = 3;
  logic clk = 0, rst_n = 0;
  logic root_dn_valid = 0, root_dn_ready, root_up_valid, root_up_ready = 1;
  flit_t root_dn_flit, root_up_flit;
  logic [NP-1:0] leaf_dn_valid, leaf_dn_ready, leaf_up_valid, leaf_up_ready;
  flit_t [NP-1:0] leaf_dn_flit, leaf_up_flit;
  up_mode_e [NP-1:0] rpu_mode;
  int checks = 0, failures = 0;
  int unsigned modes [MAX_LEVELS];
  int rxcnt [NP];
  word_t src [NP][$];
  word_t outq[$];
  bit bp = 0;
  bit go = 0;

  htree #(.N_PLANES(NP)) dut (.*);
  always #2 clk = ~clk;

  always @(negedge clk) begin
    leaf_dn_ready = NP'($urandom);
    root_up_ready = bp ? 1'($urandom) : 1'b1;
  end
  always @(posedge clk) begin
    for (int p = 0; p < NP; p++) if (leaf_dn_valid[p] && leaf_dn_ready[p]) rxcnt[p]++;
    if (root_up_valid && root_up_ready) outq.push_back(root_up_flit.data);
  end
  always_comb
    for (int p = 0; p < NP; p++) begin
      leaf_up_valid[p] = go && src[p].size() > 0;
      leaf_up_flit[p]  = '{last: src[p].size() == 1, data: src[p].size() > 0 ? src[p][0] : '0};
    end
  always @(posedge clk)
    for (int p = 0; p < NP; p++) if (leaf_up_valid[p] && leaf_up_ready[p]) void'(src[p].pop_front());

  task automatic send(word_t d, bit last);
    @(negedge clk);
    root_dn_flit = '{last: last, data: d};
    root_dn_valid = 1;
    @(posedge clk);
    while (!root_dn_ready) @(posedge clk);
    #1 root_dn_valid = 0;
  endtask

  task automatic pkt(opcode_e op, int addr, int bcast, int npay, up_mode_e m);
    foreach (rxcnt[p]) rxcnt[p] = 0;
    for (int l = 0; l < MAX_LEVELS; l++) modes[l] = m;
    send(mk_hdr(op, addr, bcast, npay, modes), 0);
    send(mk_args(0, 0, 0, 0, 0, 0), npay == 0);
    for (int i = 0; i < npay; i++) send(64'(i), i == npay - 1);
    repeat (4) @(posedge clk);
  endtask

  task automatic expect_rx(int mask, int words);
    for (int p = 0; p < NP; p++) begin
      checks++;
      if (rxcnt[p] != (((mask >> p) & 1) ? words : 0)) begin
        failures++; $display("leaf %0d got %0d words (mask %b)", p, rxcnt[p], mask);
      end
    end
  endtask

  task automatic expect_out(word_t e[$], string what);
    int n = 0;
    while (outq.size() < e.size() && n < 2000) begin @(posedge clk); n++; end
    checks++;
    if (outq.size() != e.size()) begin failures++; $display("%s: %0d words", what, outq.size()); end
    else foreach (e[i]) begin
      checks++;
      if (outq[i] != e[i]) begin failures++; $display("%s word %0d: %h exp %h", what, i, outq[i], e[i]); end
    end
    outq.delete();
    go = 0;
  endtask

  initial begin
    word_t e[$];
    int t0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < NP; p++) begin
      pkt(OP_PIM, p, 0, 2, UP_PASS);
      expect_rx(1 << p, 4);
    end
    pkt(OP_PIM, 0, 8'hFF, 3, UP_PASS);   expect_rx(8'hFF, 5);
    pkt(OP_PIM, 6, 8'h01, 1, UP_PASS);   expect_rx(8'hC0, 3);   // leaves 6,7
    pkt(OP_PIM, 0, 8'h03, 1, UP_PASS);   expect_rx(8'h0F, 3);   // leaves 0..3
    pkt(OP_PIM, 0, 8'h06, 1, UP_PASS);   expect_rx(8'h55, 3);   // even leaves
    // upward latency: one register per level
    pkt(OP_READ_OUT, 5, 0, 0, UP_PASS);
    src[5].push_back(64'hABCD);
    @(negedge clk) go = 1;
    t0 = $time;
    while (!root_up_valid) @(posedge clk);
    checks++; if (($time - t0) / 4 != LV) begin failures++; $display("latency %0d", ($time - t0) / 4); end
    e = '{64'hABCD};
    expect_out(e, "pass");
    bp = 1;
    // concat over all leaves
    pkt(OP_READ_OUT, 0, 8'hFF, 0, UP_CONCAT);
    e.delete();
    for (int p = 0; p < NP; p++)
      for (int i = 0; i < 3; i++) begin word_t w = {32'(p), $urandom}; src[p].push_back(w); e.push_back(w); end
    go = 1;
    expect_out(e, "concat");
    // sum over all leaves
    pkt(OP_READ_OUT, 0, 8'hFF, 0, UP_ADD);
    e.delete();
    for (int i = 0; i < 5; i++) begin
      logic [31:0] s0, s1;
      s0 = 0; s1 = 0;
      for (int p = 0; p < NP; p++) begin
        word_t w = {$urandom, $urandom};
        src[p].push_back(w);
        s0 += w[31:0]; s1 += w[63:32];
      end
      e.push_back({s1, s0});
    end
    go = 1;
    expect_out(e, "add");
    checks++; if (rpu_mode[1] != UP_ADD || rpu_mode[7] != UP_ADD) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
