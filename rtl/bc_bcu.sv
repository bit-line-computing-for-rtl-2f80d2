// bc_bcu: bit-line computing unit at the bottom of a subarray.
//
// When two word lines of different local groups are activated, each global
// bit-line pair carries the bit-wise AND of the two words on GBL and their NOR
// on GBLbar. From these two signals every bit column forms a 1-bit full adder:
//   p = ~(AND | NOR)      (propagate, the XOR of the two bits)
//   s = p ^ cin,  cout = AND | (p & cin)
// The carry ripples from bit 0 to bit WORD_W-1. The carry-in of bit 0 is the
// operation's carry (asserted to complete a two's complement negation done in
// the LG periphery). Between bit 7 and bit 8 sits the H2 multiplexer: in
// 1x16-bit mode bit 8 takes bit 7's carry, in 2x8-bit mode it takes the
// operation's carry, so the two 8-bit sub-words are independent.
// The ADD/READ multiplexer chooses the sum or the plain word read
// (~NOR, i.e. the OR of the activated words), and the write amplifier chooses
// between that result and external data (DATA_IN).
//
// Interface: gbl_and, gbl_nor (one bit per column), cin, mode2x8, add_sel
// (1 = ADD, 0 = READ), wsrc_ext, data_in; outputs result (to the subarray
// output) and wdata (to the write port). Combinational.
//
// From the paper: AND/NOR outputs of the GBL sense amplifiers, 1-bit adder per
// column with ripple carry, H2, ADD/READ mux, write amplifier with DATA_IN.
// The gate-level form of the adder above is a standard full adder chosen by
// this design; the figure's gates are not copied.
module bc_bcu
  import bc_pkg::*;
(
  input  word_t gbl_and,
  input  word_t gbl_nor,
  input  logic  cin,
  input  logic  mode2x8,
  input  logic  add_sel,
  input  logic  wsrc_ext,
  input  word_t data_in,
  output word_t result,
  output word_t wdata
);

  word_t sum;
  logic [WORD_W:0] c;

  assign c[0] = cin;
  for (genvar k = 0; k < WORD_W; k++) begin : g_col
    logic p, ci;
    if (k == HALF_W) begin : g_h2
      assign ci = mode2x8 ? cin : c[k];   // H2
    end else begin : g_rip
      assign ci = c[k];
    end
    assign p      = ~(gbl_and[k] | gbl_nor[k]);
    assign sum[k] = p ^ ci;
    assign c[k+1] = gbl_and[k] | (p & ci);
  end

  assign result = add_sel ? sum : ~gbl_nor;
  assign wdata  = wsrc_ext ? data_in : result;

endmodule
