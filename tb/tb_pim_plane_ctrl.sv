// tb_pim_plane_ctrl: runs a PIM pass, a page read and a program on the
// plane sequencer with the default phase times, with an ADC model that
// answers ADC_BITS+1 cycles after each start. Checks the pass latency
// (502 cycles = 2.0 us at 250 MHz), that the eight input bits are sensed
// and accumulated in order 0..7, that the WL stays selected through the
// whole pass, the result latch, and the read and program latencies.
module tb_pim_plane_ctrl;
  import pim_pkg::*;
  localparam int T_DECWL = 100, T_DECBLS = 8, T_PRE = 20, T_ACCUM = 2, T_DIS = 16, ADC_BITS = 9;
  localparam int T_PASS = T_DECWL + 8 * (T_PRE + 1 + 1 + (ADC_BITS + 1) + T_ACCUM + T_DIS) + 2;
  localparam int T_READ = T_DECWL + T_PRE + 1 + 1 + T_DIS + 1;
  localparam int T_PROG = T_DECWL + 19 * 200 + 1;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  pcmd_e cmd = PCMD_PIM;
  logic pim_mode, wl_en, bls_en, sense, adc_start, adc_done = 0, acc_clear, acc_add;
  logic pb_load_acc, pb_load_page, prog;
  logic [2:0] bitpos;
  int checks = 0, failures = 0;
  int n_sense, n_add, n_latch, n_prog, n_clear, wl_gap, adc_cnt;
  int add_bits[$];

  pim_plane_ctrl dut (.*);
  always #2 clk = ~clk;

  // ADC model: done pulses ADC_BITS+1 cycles after start
  always @(posedge clk) begin
    adc_done <= 1'b0;
    if (adc_start) adc_cnt <= ADC_BITS + 1;
    else if (adc_cnt > 0) begin
      adc_cnt <= adc_cnt - 1;
      if (adc_cnt == 2) adc_done <= 1'b1;
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (sense) n_sense++;
    if (acc_add) begin n_add++; add_bits.push_back(bitpos); end
    if (pb_load_acc || pb_load_page) n_latch++;
    if (prog) n_prog++;
    if (acc_clear) n_clear++;
    if (busy && !wl_en) wl_gap++;
  end

  task automatic run(pcmd_e c, output int lat);
    n_sense = 0; n_add = 0; n_latch = 0; n_prog = 0; n_clear = 0; wl_gap = 0;
    add_bits.delete();
    @(negedge clk); cmd = c; start = 1;
    @(negedge clk); start = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
  endtask

  initial begin
    int lat;
    adc_cnt = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(PCMD_PIM, lat);
    checks++; if (lat != T_PASS) begin failures++; $display("PIM latency %0d exp %0d", lat, T_PASS); end
    checks++; if (n_sense != 8 || n_add != 8 || n_latch != 1 || n_clear != 1) begin
      failures++; $display("PIM counts s%0d a%0d l%0d c%0d", n_sense, n_add, n_latch, n_clear); end
    checks++; if (wl_gap != 0) failures++;
    for (int b = 0; b < 8; b++) begin
      checks++;
      if (add_bits.size() != 8 || add_bits[b] != b) failures++;
    end
    run(PCMD_READ, lat);
    checks++; if (lat != T_READ) begin failures++; $display("READ latency %0d exp %0d", lat, T_READ); end
    checks++; if (n_sense != 1 || n_add != 0 || n_latch != 1) failures++;
    run(PCMD_PROG, lat);
    checks++; if (lat != T_PROG) begin failures++; $display("PROG latency %0d exp %0d", lat, T_PROG); end
    checks++; if (n_prog != 1 || n_sense != 0) failures++;
    $display("PIM pass %0d cycles = %0d ns at 250 MHz", T_PASS, T_PASS * 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
