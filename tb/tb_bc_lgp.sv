// tb_bc_lgp: checks the LG periphery read port: every shift amount 0..NES,
// negation, both word modes and the disabled port, on random words.
module tb_bc_lgp;
  import bc_pkg::*;

  logic en, neg, mode2x8;
  logic [SH_W-1:0] shamt;
  word_t lbl, gbl, exp;
  int checks = 0, failures = 0;

  bc_lgp dut (.en(en), .shamt(shamt), .neg(neg), .mode2x8(mode2x8), .lbl(lbl), .gbl(gbl));

  initial begin
    for (int it = 0; it < 2000; it++) begin
      en = 1'($urandom_range(0, 7) != 0);
      neg = 1'($urandom());
      mode2x8 = 1'($urandom());
      shamt = SH_W'($urandom_range(0, NES));
      lbl = 16'($urandom());
      #1;
      if (mode2x8) exp = {8'($signed(lbl[15:8]) >>> shamt), 8'($signed(lbl[7:0]) >>> shamt)};
      else         exp = 16'($signed(lbl) >>> shamt);
      if (neg) exp = ~exp;
      if (!en) exp = '0;
      checks++;
      if (gbl !== exp) begin
        failures++;
        $display("FAIL lbl=%h shamt=%0d neg=%b m=%b got %h exp %h", lbl, shamt, neg, mode2x8, gbl, exp);
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
