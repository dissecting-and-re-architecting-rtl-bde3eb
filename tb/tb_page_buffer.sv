// tb_page_buffer: writes words from the link side, loads whole pages from
// the sense/accumulator side, and checks word reads and the page output
// against a reference copy, including load-over-write priority.
module tb_page_buffer;
  localparam int W = 16;
  logic clk = 0, rst_n = 0, wr_en = 0, load_en = 0;
  logic [3:0] wr_addr, rd_addr;
  logic [63:0] wr_data, rd_data;
  logic [W*64-1:0] load_data, page, ref_page;
  int checks = 0, failures = 0;

  page_buffer #(.PB_WORDS(W)) dut (.*);
  always #2 clk = ~clk;

  initial begin
    ref_page = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      wr_en = $urandom; load_en = ($urandom % 8) == 0;
      wr_addr = $urandom; wr_data = {$urandom, $urandom};
      for (int i = 0; i < W * 2; i++) load_data[i*32 +: 32] = $urandom;
      @(posedge clk);
      if (load_en) ref_page = load_data;
      else if (wr_en) ref_page[wr_addr*64 +: 64] = wr_data;
      #1;
      wr_en = 0; load_en = 0;
      rd_addr = $urandom;
      #1;
      checks++;
      if (rd_data != ref_page[rd_addr*64 +: 64] || page != ref_page) begin
        failures++;
        $display("FAIL t=%0d", t);
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
