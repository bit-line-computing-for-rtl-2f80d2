// tb_bc_bcu: drives the BCU with the AND/NOR rails of two random words and
// checks the sum (1x16 and 2x8 modes, with and without carry-in), the READ
// path and the write-amplifier source.
module tb_bc_bcu;
  import bc_pkg::*;

  word_t a, b, gbl_and, gbl_nor, data_in, result, wdata, exp;
  logic cin, mode2x8, add_sel, wsrc_ext;
  int checks = 0, failures = 0;

  bc_bcu dut (.gbl_and(gbl_and), .gbl_nor(gbl_nor), .cin(cin), .mode2x8(mode2x8),
              .add_sel(add_sel), .wsrc_ext(wsrc_ext), .data_in(data_in),
              .result(result), .wdata(wdata));

  assign gbl_and = a & b;
  assign gbl_nor = ~(a | b);

  initial begin
    for (int it = 0; it < 3000; it++) begin
      a = 16'($urandom()); b = 16'($urandom());
      if (it % 5 == 0) b = '0;
      cin = 1'($urandom()); mode2x8 = 1'($urandom());
      add_sel = 1'($urandom_range(0, 3) != 0); wsrc_ext = 1'($urandom_range(0, 3) == 0);
      data_in = 16'($urandom());
      #1;
      if (!add_sel) exp = a | b;
      else if (mode2x8) exp = {a[15:8] + b[15:8] + 8'(cin), a[7:0] + b[7:0] + 8'(cin)};
      else exp = a + b + 16'(cin);
      checks++;
      if (result !== exp) begin
        failures++;
        $display("FAIL a=%h b=%h cin=%b m=%b add=%b got %h exp %h", a, b, cin, mode2x8, add_sel, result, exp);
      end
      checks++;
      if (wdata !== (wsrc_ext ? data_in : exp)) begin
        failures++;
        $display("FAIL wdata");
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
