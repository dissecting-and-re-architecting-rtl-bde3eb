// tb_nand_cell_array: programs random pages into a small array through the
// decoder selects, reads them back one row at a time, and checks PIM
// bitline sums of random input bits against a reference copy of the cells
// for every column-mux quarter and both row groups.
module tb_nand_cell_array;
  localparam int N_ROW = 16, N_COL = 32, N_STACK = 4, BPB = 4, N_ACT = 8, MUX = 4, BPC = 4;
  localparam int N_BLK = N_ROW / BPB, N_ADC = N_COL / MUX, PB = N_COL * BPC, LVL_W = 7;
  logic clk = 0, pim_mode = 0, sense = 0, prog = 0;
  logic [N_STACK-1:0] wl_read = '0;
  logic [N_BLK-1:0] blk_sel = '0;
  logic [N_ROW-1:0] bls = '0;
  logic [1:0] mux = 0;
  logic [PB-1:0] page_in, page_out;
  logic [N_ADC-1:0][LVL_W-1:0] bl_level;
  logic [PB-1:0] ref_mem [N_STACK][N_ROW];
  int checks = 0, failures = 0;

  nand_cell_array #(.N_ROW(N_ROW), .N_COL(N_COL), .N_STACK(N_STACK), .BLS_PER_BLK(BPB),
                    .N_ACT(N_ACT), .COL_MUX(MUX), .BPC(BPC)) dut (.*);
  always #2 clk = ~clk;

  task automatic select_row(int layer, int row);
    wl_read = '0; wl_read[layer] = 1;
    blk_sel = '0; blk_sel[row / BPB] = 1;
    bls = '0; bls[row] = 1;
  endtask

  initial begin
    for (int l = 0; l < N_STACK; l++) for (int r = 0; r < N_ROW; r++) ref_mem[l][r] = '0;
    // program every page of layers 0..2 (layer 3 stays unprogrammed)
    for (int l = 0; l < 3; l++)
      for (int r = 0; r < N_ROW; r++) begin
        @(negedge clk);
        select_row(l, r);
        for (int i = 0; i < PB / 32; i++) page_in[i*32 +: 32] = $urandom;
        ref_mem[l][r] = page_in;
        prog = 1;
        @(negedge clk) prog = 0;
      end
    // page reads
    for (int t = 0; t < 40; t++) begin
      int l, r;
      l = $urandom % N_STACK; r = $urandom % N_ROW;
      @(negedge clk);
      pim_mode = 0; select_row(l, r); sense = 1;
      @(negedge clk) sense = 0;
      checks++;
      if (page_out != ref_mem[l][r]) begin failures++; $display("read l=%0d r=%0d", l, r); end
    end
    // PIM sums
    for (int t = 0; t < 60; t++) begin
      int l, g;
      l = $urandom % N_STACK; g = $urandom % 2; mux = $urandom;
      @(negedge clk);
      pim_mode = 1;
      wl_read = '0; wl_read[l] = 1;
      blk_sel = '0; for (int b = 0; b < N_BLK; b++) blk_sel[b] = (b / (N_ACT / BPB)) == g;
      bls = N_ROW'($urandom);
      sense = 1;
      @(negedge clk) sense = 0;
      for (int j = 0; j < N_ADC; j++) begin
        int e;
        e = 0;
        for (int r = 0; r < N_ROW; r++)
          if (bls[r] && (r / N_ACT) == g) e += ref_mem[l][r][(mux * N_ADC + j) * BPC +: BPC];
        checks++;
        if (bl_level[j] != LVL_W'(e)) begin failures++; $display("pim j=%0d got %0d exp %0d", j, bl_level[j], e); end
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
