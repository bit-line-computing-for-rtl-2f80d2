// bc_array: NSUB bit-line computing subarrays joined by an H-tree.
//
// The array executes one BC operation per cycle. With bcast set, every
// subarray performs it on its own words (SIMD over subarrays, the broadcasted
// operand being implicit in the operation sequence); with bcast clear only
// subarray sel does, which is how operands are loaded and results read back.
// dout is the output register of subarray sel (one-cycle read latency, see
// bc_subarray); sel must be held for the cycle after a read.
//
// From the paper: subarray organisation and H-tree. NSUB = 128 is the largest
// configuration the paper evaluates.
module bc_array
  import bc_pkg::*;
#(
  parameter int unsigned NSUB = 128
) (
  input  logic                    clk,
  input  bc_op_t                  op,
  input  word_t                   data_in,
  input  logic                    bcast,
  input  logic [$clog2(NSUB)-1:0] sel,
  output word_t                   dout
);

  bc_op_t sub_op      [NSUB];
  word_t  sub_data_in [NSUB];
  word_t  sub_dout    [NSUB];

  bc_htree #(.NSUB(NSUB)) u_htree (
    .op          (op),
    .data_in     (data_in),
    .bcast       (bcast),
    .sel         (sel),
    .sub_op      (sub_op),
    .sub_data_in (sub_data_in),
    .sub_dout    (sub_dout),
    .dout        (dout)
  );

  for (genvar s = 0; s < NSUB; s++) begin : g_sub
    bc_subarray u_sub (
      .clk     (clk),
      .op      (sub_op[s]),
      .data_in (sub_data_in[s]),
      .dout    (sub_dout[s])
    );
  end

endmodule
