// tb_bc_htree: with 16 leaves, checks that a broadcast reaches every
// subarray, that a transfer reaches only the selected one, that data_in is
// forwarded, and that the return tree delivers the selected leaf's word.
module tb_bc_htree;
  import bc_pkg::*;
  localparam int NS = 16;

  bc_op_t op, sub_op [NS];
  word_t data_in, sub_data_in [NS], sub_dout [NS], dout;
  logic bcast;
  logic [3:0] sel;
  int checks = 0, failures = 0;

  bc_htree #(.NSUB(NS)) dut (.op(op), .data_in(data_in), .bcast(bcast), .sel(sel),
    .sub_op(sub_op), .sub_data_in(sub_data_in), .sub_dout(sub_dout), .dout(dout));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int it = 0; it < 500; it++) begin
      op = bc_op_t'({$urandom(), $urandom(), $urandom()});
      data_in = 16'($urandom());
      bcast = 1'($urandom());
      sel = 4'($urandom());
      foreach (sub_dout[s]) sub_dout[s] = 16'($urandom());
      #1;
      check(dout == sub_dout[sel], "return path");
      foreach (sub_op[s]) begin
        check(sub_op[s].valid == (op.valid && (bcast || sel == 4'(s))), "valid gating");
        check(sub_op[s].op1 == op.op1 && sub_op[s].wb_addr == op.wb_addr, "op fields");
        check(sub_data_in[s] == data_in, "data_in");
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
