// tb_bc_accel_top_full: one complete CONV filter on the accelerator at its
// default size (128 subarrays). Each subarray gets its own 3x3x3 = 27
// activations (Q1.15) as IMOs; a filter of 27 GCW-encoded 8-bit weights is
// streamed once from a behavioural weight memory and broadcast as BC
// instructions; all 128 dot products are read back and compared with the
// reference, and the run's cycle count is checked against the instruction
// count implied by the weights.
module tb_bc_accel_top_full;
  import bc_pkg::*;
  import tb_ref_pkg::*;
  localparam int NS = 128;
  localparam int K  = 27;
  localparam int NN = 8;

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
  logic [6:0] host_sel;
  word_t host_wdata, host_rdata;
  logic stall, zero_skip;
  int checks = 0, failures = 0;

  bc_accel_top dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    logic [7:0] w [K];
    word_t imo, r, exp [NS];
    bit stream [$];
    int nw, wi, cyc, exp_cyc;
    start = 0; mode_fc = 0; mode2x8 = 0; quant_n = 4'(NN); num_bo = 0; imo_base = 0; p_addr = 0; s_addr = 0;
    wmem_valid = 0; wmem_last = 0; wmem_data = 0; bo_valid = 0; bo_data = 0;
    host_valid = 0; host_bcast = 0; host_op = '0; host_sel = 0; host_wdata = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    exp_cyc = 1;
    for (int j = 0; j < K; j++) begin
      int len; logic [12:0] code;
      w[j] = rand_weight(NN);
      gcw_encode(w[j], NN, len, code);
      for (int b = len - 1; b >= 0; b--) stream.push_back(code[b]);
      exp_cyc += (len == 1) ? 1 : n_shift_adds(w[j], NN, NES) + 1;
    end
    while (stream.size() % 32 != 0) stream.push_back(1'b0);
    nw = stream.size() / 32;
    foreach (exp[s]) exp[s] = '0;
    for (int s = 0; s < NS; s++)
      for (int j = 0; j < K; j++) begin
        imo = 16'($urandom());
        @(negedge clk);
        host_op = '0; host_op.valid = 1; host_op.wb = 1; host_op.wsrc_ext = 1; host_op.wb_addr = addr_t'(j);
        host_valid = 1; host_sel = 7'(s); host_wdata = imo;
        exp[s] = exp[s] + mul16(imo, w[j], NN);
      end
    @(negedge clk); host_valid = 0;
    num_bo = (ADDR_W+1)'(K); imo_base = 0; p_addr = 9'd64; s_addr = 9'd130;
    start = 1;
    @(negedge clk); start = 0;
    wi = 0; cyc = 1;
    while (!done && cyc < 5000) begin
      wmem_valid = wi < nw; wmem_last = (wi == nw - 1);
      for (int b = 0; b < 32; b++) wmem_data[31 - b] = (wi < nw) ? stream[wi * 32 + b] : 1'b0;
      @(posedge clk);
      if (wmem_valid && wmem_ready) wi++;
      @(negedge clk);
      cyc++;
    end
    wmem_valid = 0;
    check(done, "filter finished");
    check(cyc >= exp_cyc - 1 && cyc <= exp_cyc + 2, $sformatf("cycles %0d, expected about %0d", cyc, exp_cyc));
    for (int s = 0; s < NS; s++) begin
      @(negedge clk);
      host_op = '0; host_op.valid = 1; host_op.op1.en = 1; host_op.op1.addr = 9'd130;
      host_valid = 1; host_sel = 7'(s);
      @(negedge clk); host_valid = 0;
      r = host_rdata;
      check(r == exp[s], $sformatf("subarray %0d got %h exp %h", s, r, exp[s]));
    end
    $display("filter of %0d weights on %0d subarrays in %0d cycles", K, NS, cyc);
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
