// tb_bc_controller: checks the host pass-through while idle, the CLEAR
// operation at start, the address mapping of product and accumulate
// instructions (P, S and consecutive IMO words), the BO count and done.
module tb_bc_controller;
  import bc_pkg::*;
  localparam int NS = 4;

  logic clk = 0, rst_n = 0;
  logic start, busy, done, flush, bo_enable, bo_take, dec_busy, host_valid, host_bcast, arr_bcast;
  logic [ADDR_W:0] num_bo;
  addr_t imo_base, p_addr, s_addr;
  logic mode2x8;
  bc_instr_t instr;
  bc_op_t host_op, arr_op;
  logic [1:0] host_sel, arr_sel;
  int checks = 0, failures = 0;

  bc_controller #(.NSUB(NS)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    start = 0; num_bo = 0; imo_base = 0; p_addr = 0; s_addr = 0; mode2x8 = 0;
    bo_take = 0; dec_busy = 0; host_valid = 0; host_bcast = 0; host_sel = 0;
    instr = '0; host_op = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // host pass-through
    @(negedge clk);
    host_op = bc_op_t'({$urandom(), $urandom(), $urandom()});
    host_valid = 1; host_bcast = 0; host_sel = 2;
    #1;
    check(arr_op.valid && arr_op.op1 == host_op.op1 && arr_sel == 2 && !arr_bcast, "host op");
    @(negedge clk); host_valid = 0;
    // start a run of 3 BOs
    num_bo = 3; imo_base = 9'd10; p_addr = 9'd70; s_addr = 9'd140; mode2x8 = 1;
    start = 1; #1; check(flush, "flush at start");
    @(negedge clk); start = 0; #1;
    check(busy && arr_op.valid && arr_op.wb && arr_op.wb_addr == 9'd140 && !arr_op.op1.en && !arr_op.op2.en,
          "clear S");
    @(negedge clk); #1;
    for (int j = 0; j < 3; j++) begin
      check(bo_enable, "wants BO");
      bo_take = 1; instr = '0;
      if (j > 0) begin instr.valid = 1; instr.accum = 1; instr.wb = 1; end
      #1;
      if (j > 0) check(arr_op.op1.addr == 9'd140 && arr_op.op2.addr == 9'd70 && arr_op.wb_addr == 9'd140, "accum");
      @(negedge clk);
      bo_take = 0; dec_busy = 1;
      instr = '0; instr.valid = 1; instr.acc_en = 1; instr.rsh = 2; instr.add = 1; instr.twos = 1; instr.wb = 1;
      #1;
      check(arr_op.op1.en && arr_op.op1.addr == 9'd70 && arr_op.op1.shamt == 2, "product op1 = P");
      check(arr_op.op2.addr == addr_t'(10 + j) && arr_op.op2.neg && arr_op.cin && arr_op.mode2x8, "product op2 = IMO");
      check(arr_op.wb_addr == 9'd70 && arr_bcast, "product to P, broadcast");
      @(negedge clk);
    end
    check(!bo_enable, "no more BOs");
    instr = '0; instr.valid = 1; instr.accum = 1; instr.wb = 1; dec_busy = 0;
    #1; check(done, "done");
    @(negedge clk); instr = '0; #1;
    check(!busy, "idle after done");
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
