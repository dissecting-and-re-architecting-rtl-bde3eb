// tb_shift_adder: applies eight random sets of ADC codes at bit positions
// 0..7 and checks each output against sum_b 2^b * (16*code_even + code_odd),
// then checks that `clear` empties the accumulators.
module tb_shift_adder;
  localparam int N = 32, BITS = 9;
  logic clk = 0, rst_n = 0, clear = 0, add = 0;
  logic [2:0] bitpos;
  logic [N-1:0][BITS-1:0] code;
  logic [N/2-1:0][31:0] acc;
  longint exp [N/2];
  int checks = 0, failures = 0;

  shift_adder #(.N_ADC(N), .ADC_BITS(BITS)) dut (.*);
  always #2 clk = ~clk;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      @(negedge clk) clear = 1;
      @(negedge clk) clear = 0;
      foreach (exp[k]) exp[k] = 0;
      for (int b = 0; b < 8; b++) begin
        for (int i = 0; i < N; i++) code[i] = BITS'($urandom);
        for (int k = 0; k < N / 2; k++) exp[k] += longint'(code[2*k] * 16 + code[2*k+1]) << b;
        bitpos = 3'(b);
        add = 1;
        @(negedge clk) add = 0;
        @(negedge clk);
      end
      for (int k = 0; k < N / 2; k++) begin
        checks++;
        if (acc[k] != 32'(exp[k])) begin failures++; $display("k=%0d acc=%0d exp=%0d", k, acc[k], exp[k]); end
      end
    end
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    checks++;
    if (acc != '0) failures++;
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
