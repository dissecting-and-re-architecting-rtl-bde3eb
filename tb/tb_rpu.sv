// tb_rpu: drives one RPU (level 1) from behavioural children and parent.
// Downward: unicast to each child and broadcast to both, with a child that
// stalls. Upward: each mode in turn (PASS to child 1, CONCAT, ADD, VVM,
// VSM) with random data, random child valid gaps and parent back-pressure;
// results are checked against reference arithmetic written in the bench.
module tb_rpu;
  import pim_pkg::*;
  import tb_pkg::*;
  localparam int LVL = 1;
  logic clk = 0, rst_n = 0;
  logic p_dn_valid = 0, p_dn_ready;
  flit_t p_dn_flit;
  logic [1:0] c_dn_valid, c_dn_ready;
  flit_t c_dn_flit;
  logic [1:0] c_up_valid, c_up_ready;
  flit_t [1:0] c_up_flit;
  logic p_up_valid, p_up_ready;
  flit_t p_up_flit;
  up_mode_e mode;
  int checks = 0, failures = 0;
  int unsigned modes [MAX_LEVELS];
  word_t rx0[$], rx1[$], src0[$], src1[$], outq[$];
  bit    l_rx0[$], l_rx1[$];
  bit bp = 0;

  rpu #(.LEVEL(LVL)) dut (.*);
  always #2 clk = ~clk;

  // children: random ready downward; random-gap sources upward
  always @(negedge clk) begin
    c_dn_ready = {$urandom, $urandom};
    p_up_ready = bp ? 1'($urandom) : 1'b1;
  end
  always @(posedge clk) begin
    if (c_dn_valid[0] && c_dn_ready[0]) begin rx0.push_back(c_dn_flit.data); l_rx0.push_back(c_dn_flit.last); end
    if (c_dn_valid[1] && c_dn_ready[1]) begin rx1.push_back(c_dn_flit.data); l_rx1.push_back(c_dn_flit.last); end
    if (p_up_valid && p_up_ready) outq.push_back(p_up_flit.data);
  end
  // upward sources: present src queues with random gaps; last on the final word
  logic [1:0] gap;
  always @(negedge clk) gap = 2'($urandom);
  always_comb begin
    c_up_valid[0] = src0.size() > 0 && !gap[0];
    c_up_valid[1] = src1.size() > 0 && !gap[1];
    c_up_flit[0] = '{last: src0.size() == 1, data: src0.size() > 0 ? src0[0] : '0};
    c_up_flit[1] = '{last: src1.size() == 1, data: src1.size() > 0 ? src1[0] : '0};
  end
  always @(posedge clk) begin
    if (c_up_valid[0] && c_up_ready[0]) void'(src0.pop_front());
    if (c_up_valid[1] && c_up_ready[1]) void'(src1.pop_front());
  end

  task automatic send(word_t d, bit last);
    @(negedge clk);
    p_dn_flit = '{last: last, data: d};
    p_dn_valid = 1;
    @(posedge clk);
    while (!p_dn_ready) @(posedge clk);
    #1 p_dn_valid = 0;
  endtask

  task automatic down_pkt(opcode_e op, int addr, int bcast, int npay, up_mode_e m);
    modes[LVL] = m;
    send(mk_hdr(op, addr, bcast, npay, modes), 0);
    send(mk_args(0, 0, 0, 0, 0, 0), npay == 0);
    for (int i = 0; i < npay; i++) send(64'(i + 100), i == npay - 1);
    repeat (3) @(posedge clk);
  endtask

  task automatic expect_out(word_t e[$], string what);
    int n = 0;
    while (outq.size() < e.size() && n < 2000) begin @(posedge clk); n++; end
    checks++;
    if (outq.size() != e.size()) begin failures++; $display("%s: %0d words, exp %0d", what, outq.size(), e.size()); end
    else foreach (e[i]) begin
      checks++;
      if (outq[i] != e[i]) begin failures++; $display("%s word %0d: %h exp %h", what, i, outq[i], e[i]); end
    end
    outq.delete();
  endtask

  function automatic word_t rnd();
    return {$urandom, $urandom};
  endfunction

  initial begin
    word_t e[$];
    foreach (modes[i]) modes[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- downward routing ----
    down_pkt(OP_PIM, 2, 0, 3, UP_PASS);    // addr bit1 = 1 -> child 1
    checks++; if (rx1.size() != 5 || rx0.size() != 0 || !l_rx1[4]) failures++;
    rx0.delete(); rx1.delete(); l_rx0.delete(); l_rx1.delete();
    down_pkt(OP_PIM, 0, 0, 2, UP_PASS);    // child 0
    checks++; if (rx0.size() != 4 || rx1.size() != 0) failures++;
    rx0.delete(); rx1.delete(); l_rx0.delete(); l_rx1.delete();
    down_pkt(OP_PIM, 0, 2, 4, UP_PASS);    // broadcast at level 1
    checks++; if (rx0.size() != 6 || rx1.size() != 6 || rx0 != rx1) failures++;
    rx0.delete(); rx1.delete(); l_rx0.delete(); l_rx1.delete();

    bp = 1;
    // ---- PASS child 1 ----
    down_pkt(OP_READ_OUT, 2, 0, 0, UP_PASS);
    checks++; if (mode != UP_PASS) failures++;
    e.delete(); for (int i = 0; i < 6; i++) begin word_t w = rnd(); src1.push_back(w); e.push_back(w); end
    expect_out(e, "pass");
    // ---- CONCAT ----
    down_pkt(OP_READ_OUT, 0, 2, 0, UP_CONCAT);
    checks++; if (mode != UP_CONCAT) failures++;
    e.delete();
    for (int i = 0; i < 3; i++) begin word_t w = rnd(); src0.push_back(w); e.push_back(w); end
    for (int i = 0; i < 4; i++) begin word_t w = rnd(); src1.push_back(w); e.push_back(w); end
    expect_out(e, "concat");
    // ---- ADD ----
    down_pkt(OP_READ_OUT, 0, 2, 0, UP_ADD);
    e.delete();
    for (int i = 0; i < 8; i++) begin
      word_t a, b;
      a = rnd(); b = rnd();
      src0.push_back(a); src1.push_back(b);
      e.push_back({a[63:32] + b[63:32], a[31:0] + b[31:0]});
    end
    expect_out(e, "add");
    // ---- VVM: dot products of 16-element INT8 vectors, 3 packets ----
    down_pkt(OP_READ_OUT, 0, 2, 0, UP_VVM);
    for (int p = 0; p < 3; p++) begin
      int s;
      e.delete();
      s = 0;
      for (int i = 0; i < 2; i++) begin
        word_t a, b;
        a = rnd(); b = rnd();
        src0.push_back(a); src1.push_back(b);
        for (int k = 0; k < 8; k++) s += int'($signed(a[k*8 +: 8])) * int'($signed(b[k*8 +: 8]));
      end
      e.push_back(64'(unsigned'(s)));
      expect_out(e, "vvm");
    end
    // ---- VSM: scalar x 16-element vector ----
    down_pkt(OP_READ_OUT, 0, 2, 0, UP_VSM);
    for (int p = 0; p < 2; p++) begin
      word_t sw;
      int sc;
      e.delete();
      sw = rnd(); sc = int'($signed(sw[7:0]));
      src0.push_back(sw);
      for (int i = 0; i < 2; i++) begin
        word_t v;
        v = rnd(); src1.push_back(v);
        for (int k = 0; k < 8; k += 2)
          e.push_back({32'(sc * int'($signed(v[(k+1)*8 +: 8]))), 32'(sc * int'($signed(v[k*8 +: 8])))});
      end
      expect_out(e, "vsm");
    end
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
