// bc_subarray: one bit-line computing subarray.
//
// N_LG local groups (each with its own LG periphery read port) share the
// global bit-lines of every bit column; a bit-line computing unit (BCU) at the
// bottom adds what the global bit-lines carry. In one clock cycle the subarray
// executes add(OP1, OP2): the word lines of OP1 and OP2 are raised in two
// different local groups, each LG periphery shifts and/or negates its word,
// the global bit-lines form AND and NOR of the two words, the BCU adds them
// with the operation's carry-in, and the result is written back through the
// write amplifier (if wb) and registered on the output port dout.
// A normal read is add(X, 0) without write-back; a normal write is a
// write-back with the write amplifier taking DATA_IN (wsrc_ext).
//
// Timing: op is sampled at the rising edge; the write-back lands at that edge
// and dout holds the result from the next cycle on (one-cycle read latency).
//
// Rule (checked by an assertion): two enabled operands must lie in different
// local groups, since words of one LG share the local bit-lines.
//
// From the paper: 5 LGs of 32 rows, 2 interleaved 16-bit words per row, LGP
// shift/negate, AND/NOR on the global bit-lines, BCU adder, 1x16/2x8 modes.
// This design's choices: an operand that is not enabled reads as zero, and
// the write-back happens in the same cycle as the addition (the paper counts
// one cycle per shift-add iteration).
module bc_subarray
  import bc_pkg::*;
(
  input  logic   clk,
  input  bc_op_t op,
  input  word_t  data_in,
  output word_t  dout
);

  word_t lbl [N_LG];
  word_t gbl [N_LG];
  word_t opa, opb;
  word_t gbl_and, gbl_nor, result, wdata;
  logic  add_sel;

  for (genvar g = 0; g < N_LG; g++) begin : g_lg
    logic sel1, sel2;
    bc_operand_t opnd;
    assign sel1 = op.valid && op.op1.en && (lg_of(op.op1.addr) == LG_W'(g));
    assign sel2 = op.valid && op.op2.en && (lg_of(op.op2.addr) == LG_W'(g));
    assign opnd = sel1 ? op.op1 : op.op2;

    bc_local_group u_lg (
      .clk     (clk),
      .rd_en   (sel1 || sel2),
      .rd_row  (lrow_of(opnd.addr)),
      .rd_way  (way_of(opnd.addr)),
      .rd_data (lbl[g]),
      .wr_en   (op.valid && op.wb && (lg_of(op.wb_addr) == LG_W'(g))),
      .wr_row  (lrow_of(op.wb_addr)),
      .wr_way  (way_of(op.wb_addr)),
      .wr_data (wdata)
    );

    bc_lgp u_lgp (
      .en      (sel1 || sel2),
      .shamt      (opnd.shamt),
      .neg     (opnd.neg),
      .mode2x8 (op.mode2x8),
      .lbl     (lbl[g]),
      .gbl     (gbl[g])
    );
  end

  // Operand words as seen on the global bit-lines (zero when not enabled).
  always_comb begin
    opa = '0;
    opb = '0;
    for (int g = 0; g < N_LG; g++) begin
      if (op.op1.en && lg_of(op.op1.addr) == LG_W'(g)) opa = gbl[g];
      if (op.op2.en && lg_of(op.op2.addr) == LG_W'(g)) opb = gbl[g];
    end
    gbl_and = opa & opb;
    gbl_nor = ~(opa | opb);
    add_sel = (op.op1.en && op.op2.en) || op.cin;
  end

  bc_bcu u_bcu (
    .gbl_and  (gbl_and),
    .gbl_nor  (gbl_nor),
    .cin      (op.cin),
    .mode2x8  (op.mode2x8),
    .add_sel  (add_sel),
    .wsrc_ext (op.wsrc_ext),
    .data_in  (data_in),
    .result   (result),
    .wdata    (wdata)
  );

  always_ff @(posedge clk)
    if (op.valid) dout <= result;

  a_diff_lg: assert property (@(posedge clk)
    op.valid && op.op1.en && op.op2.en |-> lg_of(op.op1.addr) != lg_of(op.op2.addr))
    else $error("bc_subarray: both operands in local group %0d", lg_of(op.op1.addr));

endmodule
