// tb_bc_instr_decoder: feeds random N-bit BOs (N = 1..8) and executes the
// emitted instructions on a behavioural model of the P and S words, then
// compares S with the bit-by-bit reference product sum. Also checks the
// worked example (IMO 0.296875 x BO -0.8125 with NES = 3: three shift-add
// instructions giving 11100001 in Q1.7), zero skipping (no instruction for a
// zero BO) and the cycle count of every product.
module tb_bc_instr_decoder;
  import bc_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [3:0] n;
  logic bo_valid, bo_take, zero_skip, busy;
  logic [7:0] bo_value;
  bc_instr_t instr;
  int checks = 0, failures = 0;

  bc_instr_decoder dut (.clk(clk), .rst_n(rst_n), .n(n), .bo_valid(bo_valid), .bo_value(bo_value),
                        .bo_take(bo_take), .instr(instr), .zero_skip(zero_skip), .busy(busy));

  always #5 clk = ~clk;

  // behavioural P/S words; the IMO of the current product
  logic signed [15:0] p, s, imo_cur, imo_q [$];
  logic [7:0] bo_q [$];
  int n_ops, n_skips;

  // Instructions consume IMOs in order of non-zero BOs.
  always @(posedge clk) if (rst_n) begin
    if (instr.valid) begin
      if (instr.accum) begin
        s <= s + p;
      end else begin
        logic signed [15:0] op1, op2;
        op1 = instr.acc_en ? (p >>> instr.rsh) : 16'sd0;
        op2 = !instr.add ? 16'sd0 : instr.twos ? -imo_cur : (imo_cur >>> instr.imo_sh);
        p <= op1 + op2;
        n_ops++;
      end
    end
    if (zero_skip) n_skips++;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // Run a list of BOs against IMOs, return S.
  task automatic run(input logic [7:0] bos [], input logic [15:0] imos [], input int nn,
                     output logic [15:0] s_out, output int cycles);
    int i;
    n = 4'(nn);
    s = 0; p = 0; i = 0; cycles = 0;
    @(negedge clk);
    while (i < bos.size() || busy) begin
      bo_valid = (i < bos.size());
      bo_value = (i < bos.size()) ? bos[i] : 8'h00;
      #1;
      if (bo_take) begin
        if ((bos[i] & 8'((1 << nn) - 1)) != 0) imo_cur = imos[i];
        i++;
      end
      @(negedge clk);
      cycles++;
    end
    bo_valid = 0;
    @(negedge clk);
    s_out = s;
  endtask

  initial begin
    logic [15:0] s_got, s_exp;
    int cyc;
    bo_valid = 0; bo_value = 0; n = 8; n_ops = 0; n_skips = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // Worked example: IMO = 00100110 (Q1.7) placed in the high byte of a
    // Q1.15 word, BO = 10011 (Q1.4).
    begin
      logic [7:0] bos [] = '{8'b11110011};
      logic [15:0] imos [] = '{16'h2600};
      int ops0;
      ops0 = n_ops;
      run(bos, imos, 5, s_got, cyc);
      check(s_got[15:8] == 8'b11100001, $sformatf("worked example product %b", s_got[15:8]));
      check(n_ops - ops0 == 3, $sformatf("worked example uses 3 shift-adds, got %0d", n_ops - ops0));
    end
    // Random filters for every N.
    for (int nn = 1; nn <= 8; nn++) begin
      for (int f = 0; f < 20; f++) begin
        int len, sk0, ops0, nz;
        logic [7:0] bos [];
        logic [15:0] imos [];
        len = $urandom_range(1, 12);
        bos = new[len]; imos = new[len];
        s_exp = 0; nz = 0;
        foreach (bos[i]) begin
          bos[i] = rand_weight(nn);
          imos[i] = 16'($urandom());
          s_exp = s_exp + mul16(imos[i], bos[i], nn);
          if ((bos[i] & 8'((1 << nn) - 1)) == 0) nz++;
        end
        sk0 = n_skips; ops0 = n_ops;
        run(bos, imos, nn, s_got, cyc);
        check(s_got == s_exp, $sformatf("N=%0d sum got %h exp %h", nn, s_got, s_exp));
        check(n_skips - sk0 == nz, "zero BOs skipped");
        // every non-zero BO costs at most N-1+1 shift-adds with NES >= 1 and
        // at least ceil((N)/NES) of them; total cycles = shift-adds +
        // accumulates + zero hand-offs (+1 tail)
        check(cyc <= (n_ops - ops0) + (len - nz) + nz + 1, $sformatf("cycle count %0d", cyc));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
