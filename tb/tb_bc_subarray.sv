// tb_bc_subarray: loads all 320 words through DATA_IN, then runs random BC
// operations add(OP1, OP2) with operands in different local groups, random
// shifts (0..NES), negation with carry-in, both word modes and write-back,
// against a word-level model. Also runs the worked multiplication example
// (NES = 1 sequence and NES = 3 sequence) in the array itself.
module tb_bc_subarray;
  import bc_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0;
  bc_op_t op;
  word_t data_in, dout;
  word_t shadow [WORDS];
  int checks = 0, failures = 0;

  bc_subarray dut (.clk(clk), .op(op), .data_in(data_in), .dout(dout));

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic word_t opval(bc_operand_t o, bit m2x8);
    word_t w;
    if (!o.en) return '0;
    w = shadow[o.addr];
    if (m2x8) w = {8'($signed(w[15:8]) >>> o.shamt), 8'($signed(w[7:0]) >>> o.shamt)};
    else      w = 16'($signed(w) >>> o.shamt);
    return o.neg ? ~w : w;
  endfunction

  function automatic addr_t addr_in_lg(int lg);
    return addr_t'(lg * LG_ROWS * WAYS + $urandom_range(0, LG_ROWS * WAYS - 1));
  endfunction

  task automatic issue(bc_op_t o, output word_t res);
    word_t a, b;
    a = opval(o.op1, o.mode2x8);
    b = opval(o.op2, o.mode2x8);
    res = add_ref(add_ref(a, b, o.mode2x8), o.mode2x8 ? {8'(o.cin), 8'(o.cin)} : 16'(o.cin), o.mode2x8);
    @(negedge clk);
    op = o;
    @(posedge clk);
    #1;
    op = '0;
    if (o.wb) shadow[o.wb_addr] = o.wsrc_ext ? data_in : res;
    check(dout == res, $sformatf("op result got %h exp %h", dout, res));
  endtask

  initial begin
    word_t r;
    bc_op_t o;
    op = '0; data_in = 0;
    for (int a = 0; a < WORDS; a++) begin
      @(negedge clk);
      data_in = 16'($urandom());
      op = '0; op.valid = 1; op.wb = 1; op.wsrc_ext = 1; op.wb_addr = addr_t'(a);
      shadow[a] = data_in;
    end
    @(negedge clk); op = '0;
    // read back every word
    for (int a = 0; a < WORDS; a++) begin
      o = '0; o.valid = 1; o.op1.en = 1; o.op1.addr = addr_t'(a);
      issue(o, r);
    end
    // random operations
    for (int it = 0; it < 2000; it++) begin
      int l1, l2;
      l1 = $urandom_range(0, N_LG - 1);
      l2 = (l1 + $urandom_range(1, N_LG - 1)) % N_LG;
      o = '0;
      o.valid = 1;
      o.op1 = '{en: 1'($urandom_range(0, 7) != 0), addr: addr_in_lg(l1), shamt: SH_W'($urandom_range(0, NES)), neg: 1'b0};
      o.op2 = '{en: 1'($urandom_range(0, 7) != 0), addr: addr_in_lg(l2), shamt: SH_W'($urandom_range(0, NES)), neg: 1'($urandom())};
      o.cin = o.op2.neg;
      o.mode2x8 = 1'($urandom());
      o.wb = 1'($urandom());
      o.wb_addr = $urandom_range(0, 1) ? o.op1.addr : addr_t'($urandom_range(0, WORDS - 1));
      issue(o, r);
    end
    // Worked example in Q1.7 (2x8 mode, low sub-word): IMO at word 0 (LG 0),
    // P at word 64 (LG 1). NES = 3 sequence from the instruction table.
    begin
      addr_t imo, p;
      imo = 0; p = 64;
      @(negedge clk);
      data_in = 16'h0026; op = '0; op.valid = 1; op.wb = 1; op.wsrc_ext = 1; op.wb_addr = imo;
      shadow[imo] = data_in;
      // add(RSh(0), RSh(IMO))
      o = '0; o.valid = 1; o.mode2x8 = 1; o.wb = 1; o.wb_addr = p;
      o.op2 = '{en: 1, addr: imo, shamt: 1, neg: 0};
      issue(o, r);
      o.op1 = '{en: 1, addr: p, shamt: 1, neg: 0};
      issue(o, r);
      // add(2x RSh(P), 2sComp(IMO))
      o.op1.shamt = 2; o.op2 = '{en: 1, addr: imo, shamt: 0, neg: 1}; o.cin = 1;
      issue(o, r);
      check(r[7:0] == 8'b11100001, $sformatf("worked example product %b", r[7:0]));
      check(shadow[p][7:0] == 8'b11100001, "worked example written back");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
