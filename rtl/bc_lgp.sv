// bc_lgp: read port of the local group periphery (LGP) for one word.
//
// The LGP of the paper turns the sense-amplifier outputs of its LG into a
// discharge pattern on the global bit-lines. Two features make it a compute
// element:
//  * negation: a 2-to-1 multiplexer swaps LBL and LBLbar, so the word leaves
//    bit-wise inverted;
//  * embedded shift (ES): besides the RD_EN discharge path of its own column,
//    column k has SH_EN paths driven by column k+s (s = 1..NES), so the word
//    leaves arithmetically right-shifted by s, the sign bit being replicated.
// In 2x8-bit mode the H1 multiplexer cuts the shift path from bit 8 into bit 7
// and feeds bit 7 from itself instead, so both 8-bit sub-words are shifted and
// sign-extended separately.
//
// Interface: en (word line of this LG active for the operation), shamt (0..NES),
// neg, mode2x8, the word from the local bit-line multiplexer, and the word
// driven onto the global bit-lines. A disabled port drives zero, which is how
// the paper's "OP2 set to zero" is represented. Purely combinational.
//
// From the paper: ES paths, NES = 3, negation multiplexer, H1. The choice to
// negate after shifting is this design's; both orders give the same word.
module bc_lgp
  import bc_pkg::*;
(
  input  logic            en,
  input  logic [SH_W-1:0] shamt,
  input  logic            neg,
  input  logic            mode2x8,
  input  word_t           lbl,
  output word_t           gbl
);

  word_t shifted;

  always_comb begin
    for (int k = 0; k < WORD_W; k++) begin
      int src;
      int top;
      // Column whose sense amplifier discharges column k's GBL.
      top = (mode2x8 && k < HALF_W) ? HALF_W - 1 : WORD_W - 1;  // H1
      src = k + int'(shamt);
      if (src > top) src = top;  // sign extension
      shifted[k] = lbl[src];
    end
    gbl = en ? (neg ? ~shifted : shifted) : '0;
  end

endmodule
