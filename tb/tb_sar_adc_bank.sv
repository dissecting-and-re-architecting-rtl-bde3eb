// tb_sar_adc_bank: converts random bitline levels, including values above
// full scale, and checks every channel's code against min(511, vin >> 2)
// and the conversion latency of ADC_BITS + 1 cycles.
module tb_sar_adc_bank;
  localparam int N = 64, BITS = 9, LVL_W = 11, SH = 2;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [N-1:0][LVL_W-1:0] vin;
  logic [N-1:0][BITS-1:0] code;
  int checks = 0, failures = 0;

  sar_adc_bank #(.N_ADC(N), .ADC_BITS(BITS), .LVL_W(LVL_W), .LSB_SHIFT(SH)) dut (.*);
  always #2 clk = ~clk;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      int lat;
      for (int i = 0; i < N; i++) vin[i] = (i == 0) ? 11'h7FF : (i == 1) ? 0 : LVL_W'($urandom);
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (lat != BITS + 1) begin failures++; $display("latency %0d", lat); end
      for (int i = 0; i < N; i++) begin
        int e;
        e = vin[i] >> SH;
        if (e > 511) e = 511;
        checks++;
        if (code[i] != e) begin failures++; $display("ch%0d vin=%0d code=%0d exp=%0d", i, vin[i], code[i], e); end
      end
    end
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
