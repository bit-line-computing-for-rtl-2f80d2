// gcw_decoder: decoder of Generic Convolutional Weights (GCW) code-words.
//
// GCW is a variable-length code for N-bit quantised weights (values in
// [-1, 1) as Q1.(N-1)):
//   0                      -> value 0                          (1 bit)
//   1 & bin4(A)            -> small values, A in [-8,-1]u[1,7] (5 bits)
//   10000 & binN(A)        -> every other value                (5+N bits)
// The decoder looks at the 13 leading bits of the shift register, GCW<12:0>,
// with GCW<12> the first bit of the code-word. sel<0> = GCW<12>,
// sel<1> = NOR(GCW<11:8>). Two 3-to-1 multiplexers share this select:
// M1 gives the code length (1, 5 or 5+N) and M2 the value: 0,
// GCW<11:8> sign-extended, or GCW<7:8-N>.
//
// Interface: gcw (13 bits), n (quantisation level 1..8); outputs value
// (the N-bit weight, sign-extended to BO_MAX_W bits) and code_len.
// Combinational.
//
// Follows the paper's decoder structure exactly. Sign-extending the output
// beyond N bits (so every N shares one output width) is this design's choice;
// only the low N bits are used downstream.
module gcw_decoder
  import bc_pkg::*;
(
  input  logic [GCW_WIN-1:0]  gcw,
  input  logic [N_W-1:0]      n,
  output logic [BO_MAX_W-1:0] value,
  output logic [3:0]          code_len,
  output logic [1:0]          sel        // {sel<1>, sel<0>} for observation
);

  logic sel0, sel1;
  logic [BO_MAX_W-1:0] long_val;

  always_comb begin
    sel0 = gcw[12];
    sel1 = ~|gcw[11:8];
    sel  = {sel1, sel0};
    // GCW<7:8-N>, right-aligned and sign-extended from bit N-1.
    long_val = '0;
    for (int i = 0; i < BO_MAX_W; i++) begin
      if (i < int'(n)) long_val[i] = gcw[8 - int'(n) + i];
      else             long_val[i] = gcw[7];
    end
    if (!sel0) begin                 // A: zero
      value    = '0;
      code_len = 4'd1;
    end else if (!sel1) begin        // B: SigExt & GCW<11:8>
      value    = {{(BO_MAX_W-4){gcw[11]}}, gcw[11:8]};
      code_len = 4'd5;
    end else begin                   // C: GCW<7:8-N>
      value    = long_val;
      code_len = 4'd5 + 4'(n);
    end
  end

endmodule
