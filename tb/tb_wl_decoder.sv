// tb_wl_decoder: checks WL-layer and block selection of the WL decoder for
// page accesses (one block) and PIM passes (the 32 blocks of a row group)
// against an independent reference, at the paper's plane size.
module tb_wl_decoder;
  localparam int N_ROW = 256, N_STACK = 128, BPB = 4, N_ACT = 128, N_BLK = N_ROW / BPB;
  logic en, pim_mode, group;
  logic [6:0] layer;
  logic [7:0] row;
  logic [N_STACK-1:0] wl_read;
  logic [N_BLK-1:0] blk_sel;
  int checks = 0, failures = 0;

  wl_decoder dut (.en, .pim_mode, .layer, .row, .group, .wl_read, .blk_sel);

  initial begin
    for (int t = 0; t < 2000; t++) begin
      logic [N_STACK-1:0] exp_wl;
      logic [N_BLK-1:0] exp_blk;
      en = ($urandom % 8) != 0; pim_mode = $urandom; group = $urandom;
      layer = $urandom; row = $urandom;
      #1;
      exp_wl = '0; exp_blk = '0;
      if (en) begin
        exp_wl[layer] = 1'b1;
        for (int b = 0; b < N_BLK; b++)
          exp_blk[b] = pim_mode ? (b >= group * 32 && b < group * 32 + 32) : (b == row / 4);
      end
      checks++;
      if (wl_read !== exp_wl || blk_sel !== exp_blk) begin
        failures++;
        $display("FAIL t=%0d en=%0d pim=%0d", t, en, pim_mode);
      end
      if (en && pim_mode) begin
        checks++;
        if ($countones(blk_sel) != N_ACT / BPB) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
