// tb_bc_array: with 4 subarrays, writes different words into each subarray,
// broadcasts one add with write-back, and reads every result back through
// the H-tree (one-cycle read latency).
module tb_bc_array;
  import bc_pkg::*;
  import tb_ref_pkg::*;
  localparam int NS = 4;

  logic clk = 0;
  bc_op_t op;
  word_t data_in, dout;
  logic bcast;
  logic [1:0] sel;
  word_t a_val [NS], b_val [NS];
  int checks = 0, failures = 0;

  bc_array #(.NSUB(NS)) dut (.clk(clk), .op(op), .data_in(data_in), .bcast(bcast), .sel(sel), .dout(dout));

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic write(int s, addr_t a, word_t d);
    @(negedge clk);
    op = '0; op.valid = 1; op.wb = 1; op.wsrc_ext = 1; op.wb_addr = a;
    bcast = 0; sel = 2'(s); data_in = d;
    @(negedge clk); op = '0;
  endtask

  task automatic read(int s, addr_t a, output word_t d);
    @(negedge clk);
    op = '0; op.valid = 1; op.op1.en = 1; op.op1.addr = a; bcast = 0; sel = 2'(s);
    @(negedge clk); op = '0;
    d = dout;
  endtask

  initial begin
    word_t r;
    op = '0; data_in = 0; bcast = 0; sel = 0;
    for (int rep = 0; rep < 20; rep++) begin
      for (int s = 0; s < NS; s++) begin
        a_val[s] = 16'($urandom()); b_val[s] = 16'($urandom());
        write(s, 9'd3, a_val[s]);
        write(s, 9'd70, b_val[s]);
      end
      // broadcast: word 200 <= word3 - word70 in every subarray
      @(negedge clk);
      op = '0; op.valid = 1; bcast = 1;
      op.op1 = '{en: 1, addr: 9'd3, shamt: 0, neg: 0};
      op.op2 = '{en: 1, addr: 9'd70, shamt: 0, neg: 1};
      op.cin = 1; op.wb = 1; op.wb_addr = 9'd200;
      @(negedge clk); op = '0;
      for (int s = 0; s < NS; s++) begin
        read(s, 9'd200, r);
        check(r == a_val[s] - b_val[s], $sformatf("subarray %0d got %h exp %h", s, r, a_val[s] - b_val[s]));
        read(s, 9'd3, r);
        check(r == a_val[s], "transfer to one subarray only");
      end
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
