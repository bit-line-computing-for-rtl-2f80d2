// bc_htree: H-tree interconnect between the array periphery and NSUB
// subarrays.
//
// During computation the tree broadcasts the same BC operation to every
// subarray each cycle. Before and after computation it carries data
// transfers: an operation (write of DATA_IN, or read) goes to the single
// subarray named by sel, and that subarray's output word travels back.
// The return path is built as the tree itself: a binary tree of 2-to-1
// multiplexers, LEVELS = log2(NSUB) deep, so every leaf is the same number of
// stages away from the root, as the H-tree layout intends.
//
// Interface: op/data_in/bcast/sel from the periphery; sub_op/sub_data_in to the
// subarrays; sub_dout from the subarrays; dout to the periphery.
// Combinational. NSUB must be a power of two.
//
// From the paper: broadcast of BC operations during computation, transfer of
// operands and results before and after. The select encoding and the
// multiplexer tree are this design's choices.
module bc_htree
  import bc_pkg::*;
#(
  parameter int unsigned NSUB = 128
) (
  input  bc_op_t                          op,
  input  word_t                           data_in,
  input  logic                            bcast,
  input  logic [$clog2(NSUB)-1:0]         sel,
  output bc_op_t                          sub_op      [NSUB],
  output word_t                           sub_data_in [NSUB],
  input  word_t                           sub_dout    [NSUB],
  output word_t                           dout
);

  localparam int unsigned LEVELS = $clog2(NSUB);

  for (genvar s = 0; s < NSUB; s++) begin : g_leaf
    always_comb begin
      sub_op[s]       = op;
      sub_op[s].valid = op.valid && (bcast || sel == ($clog2(NSUB))'(s));
      sub_data_in[s]  = data_in;
    end
  end

  // Return tree: level l has NSUB>>l nodes; node i of level l+1 merges
  // nodes 2i and 2i+1 of level l using select bit l.
  always_comb begin
    word_t node [NSUB];
    for (int s = 0; s < NSUB; s++) node[s] = sub_dout[s];
    for (int l = 0; l < LEVELS; l++)
      for (int i = 0; i < (NSUB >> (l + 1)); i++)
        node[i] = sel[l] ? node[2*i+1] : node[2*i];
    dout = node[0];
  end

endmodule
