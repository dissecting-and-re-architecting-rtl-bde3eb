// tb_bls_decoder: checks that a page access turns on exactly the addressed
// BLS and that a PIM step drives each row of the active group with the
// selected bit of its input, at the paper's plane size.
module tb_bls_decoder;
  localparam int N_ROW = 256, N_ACT = 128;
  logic en, pim_mode, group;
  logic [7:0] row;
  logic [2:0] bitpos;
  logic [N_ACT-1:0][7:0] inputs;
  logic [N_ROW-1:0] bls;
  int checks = 0, failures = 0;

  bls_decoder dut (.en, .pim_mode, .row, .group, .bitpos, .inputs, .bls);

  initial begin
    for (int t = 0; t < 2000; t++) begin
      logic [N_ROW-1:0] exp;
      en = ($urandom % 8) != 0; pim_mode = $urandom; group = $urandom;
      row = $urandom; bitpos = $urandom;
      for (int n = 0; n < N_ACT; n++) inputs[n] = $urandom;
      #1;
      exp = '0;
      for (int r = 0; r < N_ROW; r++)
        if (en) exp[r] = pim_mode ? ((r / N_ACT) == group && ((inputs[r % N_ACT] >> bitpos) & 1))
                                  : (r == row);
      checks++;
      if (bls !== exp) begin
        failures++;
        $display("FAIL t=%0d", t);
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
