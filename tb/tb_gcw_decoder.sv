// tb_gcw_decoder: checks the GCW decoder against the coding table for every
// quantisation level 1..8 (random values encoded by the reference encoder,
// followed by random bits) and against the four worked examples for N = 6.
module tb_gcw_decoder;
  import bc_pkg::*;
  import tb_ref_pkg::*;

  logic [12:0] gcw;
  logic [3:0]  n;
  logic [7:0]  value;
  logic [3:0]  code_len;
  logic [1:0]  sel;
  int checks = 0, failures = 0;

  gcw_decoder dut (.gcw(gcw), .n(n), .value(value), .code_len(code_len), .sel(sel));

  task automatic expect_eq(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h (gcw=%b n=%0d)", what, got, exp, gcw, n);
    end
  endtask

  initial begin
    // Worked examples, N = 6.
    n = 6;
    gcw = 13'b0101101100010; #1; expect_eq(code_len, 1, "ex1 len"); expect_eq(value[5:0], 6'b000000, "ex1 val");
    gcw = 13'b1011011000100; #1; expect_eq(code_len, 5, "ex2 len"); expect_eq(value[5:0], 6'b000110, "ex2 val");
    gcw = 13'b1100010000010; #1; expect_eq(code_len, 5, "ex3 len"); expect_eq(value[5:0], 6'b111000, "ex3 val");
    gcw = 13'b1000001000100; #1; expect_eq(code_len, 11, "ex4 len"); expect_eq(value[5:0], 6'b010001, "ex4 val");
    expect_eq(sel, 2'b11, "ex4 sel");
    for (int nn = 1; nn <= 8; nn++) begin
      for (int it = 0; it < 300; it++) begin
        logic [7:0] w;
        logic [12:0] code;
        int len;
        logic [7:0] mask;
        w = rand_weight(nn);
        gcw_encode(w, nn, len, code);
        n = 4'(nn);
        gcw = 13'($urandom());
        for (int i = 0; i < len; i++) gcw[12 - i] = code[len - 1 - i];
        #1;
        mask = 8'((1 << nn) - 1);
        expect_eq(code_len, len, "len");
        expect_eq(value & mask, w & mask, "value");
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
