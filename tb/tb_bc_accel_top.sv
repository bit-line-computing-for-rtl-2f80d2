// tb_bc_accel_top: end-to-end test of the accelerator with 8 subarrays.
// Each subarray receives its own activations (IMOs) through host writes; a
// filter of GCW-encoded weights is streamed from a behavioural weight memory
// with random gaps; after done every subarray's sum is read back and compared
// with the reference dot product. Runs cover N = 8, 6 and 3 (all three code
// lengths), 1x16 and 2x8 word modes, an FC run with activations streamed as
// BOs, and a host in-memory operation merging two partial sums. The test
// counts each mechanism (memory stall, zero skip, 1/5/5+N-bit codes, merged
// multi-bit shifts, two's complement step, 2x8 mode, FC mode, merge) and
// fails if one never happened. The cycle count of each run is checked
// against the instruction count implied by the weights.
module tb_bc_accel_top;
  import bc_pkg::*;
  import tb_ref_pkg::*;
  localparam int NS = 8;

  logic clk = 0, rst_n = 0;
  logic start, mode_fc, mode2x8, busy, done;
  logic [3:0] quant_n;
  logic [ADDR_W:0] num_bo;
  addr_t imo_base, p_addr, s_addr;
  logic wmem_valid, wmem_last, wmem_ready, bo_valid, bo_ready;
  logic [31:0] wmem_data;
  logic [7:0] bo_data;
  logic host_valid, host_bcast;
  bc_op_t host_op;
  logic [2:0] host_sel;
  word_t host_wdata, host_rdata;
  logic stall, zero_skip;
  int checks = 0, failures = 0;
  int c_stall = 0, c_zero = 0, c_len1 = 0, c_len5 = 0, c_lenlong = 0, c_multish = 0,
      c_twos = 0, c_2x8 = 0, c_fc = 0, c_merge = 0;

  bc_accel_top #(.NSUB(NS)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    if (stall) c_stall++;
    if (zero_skip) c_zero++;
    if (dut.bo_take && !mode_fc) begin
      if (dut.code_len == 1) c_len1++;
      else if (dut.code_len == 5) c_len5++;
      else c_lenlong++;
    end
    if (dut.instr.valid && !dut.instr.accum && dut.instr.acc_en && dut.instr.rsh > 1) c_multish++;
    if (dut.instr.valid && dut.instr.twos) c_twos++;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic host_write(int s, addr_t a, word_t d);
    @(negedge clk);
    host_op = '0; host_op.valid = 1; host_op.wb = 1; host_op.wsrc_ext = 1; host_op.wb_addr = a;
    host_valid = 1; host_bcast = 0; host_sel = 3'(s); host_wdata = d;
    @(negedge clk); host_valid = 0;
  endtask

  task automatic host_read(int s, addr_t a, output word_t d);
    @(negedge clk);
    host_op = '0; host_op.valid = 1; host_op.op1.en = 1; host_op.op1.addr = a;
    host_valid = 1; host_bcast = 0; host_sel = 3'(s);
    @(negedge clk); host_valid = 0;
    d = host_rdata;
  endtask

  // One run: K BOs against IMOs at word 0.. (LG 0), P = word 64 (LG 1),
  // S = s_word (LG 2 or above).
  task automatic run(int nn, int k, bit fc, bit m2x8, addr_t s_word, output word_t exp [NS]);
    logic [7:0] w [];
    word_t imo [NS][];
    bit stream [$];
    int nw, wi, bi, cyc, stalls, min_cyc, max_cyc;
    w = new[k];
    foreach (imo[s]) imo[s] = new[k];
    foreach (exp[s]) exp[s] = '0;
    min_cyc = 1; max_cyc = 3;
    for (int j = 0; j < k; j++) begin
      int len; logic [12:0] code;
      w[j] = rand_weight(nn);
      gcw_encode(w[j], nn, len, code);
      for (int b = len - 1; b >= 0; b--) stream.push_back(code[b]);
      if (len == 1) max_cyc += 1;
      else begin
        min_cyc += n_shift_adds(w[j], nn, NES) + 1;
        max_cyc += n_shift_adds(w[j], nn, NES) + 1;
      end
    end
    while (stream.size() % 32 != 0) stream.push_back(1'b0);
    nw = stream.size() / 32;
    for (int s = 0; s < NS; s++)
      for (int j = 0; j < k; j++) begin
        imo[s][j] = 16'($urandom());
        host_write(s, addr_t'(j), imo[s][j]);
        exp[s] = add_ref(exp[s], mul_ref(imo[s][j], w[j], nn, m2x8), m2x8);
      end
    @(negedge clk);
    quant_n = 4'(nn); mode_fc = fc; mode2x8 = m2x8; num_bo = (ADDR_W+1)'(k);
    imo_base = 0; p_addr = 9'd64; s_addr = s_word;
    start = 1;
    @(negedge clk); start = 0;
    wi = 0; bi = 0; cyc = 1; stalls = 0;
    while (!done) begin
      wmem_valid = !fc && wi < nw && ($urandom_range(0, 4) != 0);
      wmem_last = (wi == nw - 1);
      for (int b = 0; b < 32; b++) wmem_data[31 - b] = (wi < nw) ? stream[wi * 32 + b] : 1'b0;
      bo_valid = fc && bi < k && ($urandom_range(0, 4) != 0);
      bo_data = (bi < k) ? w[bi] : 8'h0;
      #1;
      if (stall) stalls++;
      if (!fc && !dut.gcw_valid && dut.bo_enable && !wmem_valid) stalls += 0;
      @(posedge clk);
      if (wmem_valid && wmem_ready) wi++;
      if (bo_valid && bo_ready) bi++;
      @(negedge clk);
      wmem_valid = 0; bo_valid = 0;
      cyc++;
      if (cyc > 20000) break;
    end
    check(done, "run finished");
    // FC input stalls are not reported on the stall output; count them apart
    check(cyc >= min_cyc, $sformatf("cycles %0d >= %0d", cyc, min_cyc));
    if (!fc) check(cyc <= max_cyc + stalls, $sformatf("cycles %0d <= %0d + %0d stalls", cyc, max_cyc, stalls));
    if (m2x8) c_2x8++;
    if (fc) c_fc++;
  endtask

  initial begin
    word_t exp [NS], exp2 [NS], r;
    start = 0; mode_fc = 0; mode2x8 = 0; quant_n = 8; num_bo = 0; imo_base = 0; p_addr = 0; s_addr = 0;
    wmem_valid = 0; wmem_last = 0; wmem_data = 0; bo_valid = 0; bo_data = 0;
    host_valid = 0; host_bcast = 0; host_op = '0; host_sel = 0; host_wdata = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 8; rep++) begin
      int nn;
      bit fc, m2;
      nn = (rep % 4 == 0) ? 8 : (rep % 4 == 1) ? 6 : (rep % 4 == 2) ? 3 : $urandom_range(1, 8);
      fc = (rep % 3 == 2);
      m2 = (rep % 2 == 1);
      run(nn, $urandom_range(10, 50), fc, m2, 9'd130, exp);
      for (int s = 0; s < NS; s++) begin
        host_read(s, 9'd130, r);
        check(r == exp[s], $sformatf("rep %0d N=%0d fc=%0d 2x8=%0d subarray %0d: got %h exp %h", rep, nn, fc, m2, s, r, exp[s]));
      end
      // second partial result, then merge S(130) <= S(130) + S(200)
      run(nn, $urandom_range(3, 20), 0, m2, 9'd200, exp2);
      @(negedge clk);
      host_op = '0; host_op.valid = 1; host_op.mode2x8 = m2;
      host_op.op1 = '{en: 1, addr: 9'd130, shamt: 0, neg: 0};
      host_op.op2 = '{en: 1, addr: 9'd200, shamt: 0, neg: 0};
      host_op.wb = 1; host_op.wb_addr = 9'd130;
      host_valid = 1; host_bcast = 1;
      @(negedge clk); host_valid = 0;
      c_merge++;
      for (int s = 0; s < NS; s++) begin
        host_read(s, 9'd130, r);
        check(r == add_ref(exp[s], exp2[s], m2), $sformatf("merge subarray %0d", s));
      end
    end
    check(c_stall > 0, "memory stall happened");
    check(c_zero > 0, "zero BO skipped");
    check(c_len1 > 0 && c_len5 > 0 && c_lenlong > 0, "all three code lengths decoded");
    check(c_multish > 0, "multi-bit embedded shift used");
    check(c_twos > 0, "two's complement step used");
    check(c_2x8 > 0 && c_fc > 0 && c_merge > 0, "2x8 mode, FC mode and merge used");
    $display("mechanisms: stall=%0d zero=%0d len1=%0d len5=%0d long=%0d multishift=%0d twos=%0d 2x8=%0d fc=%0d merge=%0d",
             c_stall, c_zero, c_len1, c_len5, c_lenlong, c_multish, c_twos, c_2x8, c_fc, c_merge);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
