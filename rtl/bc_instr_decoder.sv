// bc_instr_decoder: turns broadcasted operands (BOs) into BC instructions.
//
// A BO is an N-bit two's complement number in Q1.(N-1), bits b0 (LSb) to
// b(N-1) (sign). Its product with an in-memory operand (IMO) is built in a
// partial-product word P, LSb first, by shift-adds that never grow the word:
//   non-sign bit b : P <= RSh(P) + (b ? RSh(IMO) : 0)
//   sign bit b     : P <=     P  + (b ? 2sComp(IMO) : 0)
// With NES embedded shifts, a run of m zero bits followed by one more bit t
// (m + 1 <= NES) is merged into one instruction:
//   t non-sign : P <= RSh^(m+1)(P) + (t ? RSh(IMO) : 0)
//   t sign     : P <= RSh^m(P)     + (t ? 2sComp(IMO) : 0)
// The first instruction of a product takes zero in place of P. A last
// instruction that would leave P unchanged (sign bit 0, no shift) is dropped.
// Each product ends with one accumulate instruction S <= S + P.
// A BO equal to zero issues no instruction at all (zero skipping).
//
// Interface: bo_valid/bo_take is the weight hand-off (bo_take is the paper's
// "New weight" signal; it may fire in the same cycle as the accumulate of the
// previous product, so products follow each other without a gap). n is the
// quantisation level. instr is valid for one instruction per cycle.
// zero_skip pulses for each zero BO taken, busy is high while a product is
// in progress. Cycle cost per non-zero BO: groups + 1; per zero BO: one
// hand-off cycle and no array activity.
//
// From the paper: the two shift-add instruction forms, the NES grouping of
// "00..01" runs, skipping zero BOs, the Add/RightShift/2sComp/Write back
// signals. The separate accumulate step, the zero first operand and dropping
// a no-op last instruction are this design's choices.
module bc_instr_decoder
  import bc_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N_W-1:0]      n,
  input  logic                bo_valid,
  input  logic [BO_MAX_W-1:0] bo_value,
  output logic                bo_take,
  output bc_instr_t           instr,
  output logic                zero_skip,
  output logic                busy
);

  logic                active_q, first_q, accum_q;
  logic [BO_MAX_W-1:0] bits_q;
  logic [3:0]          k_q;        // next bit to process
  logic [BO_MAX_W-1:0] bo_masked;

  // Group starting at bit k: m zeros, terminal bit t = k + m.
  logic [3:0] m, t, msb;
  logic       t_bit, t_is_msb, drop;

  always_comb begin
    msb = 4'(n) - 4'd1;
    m = '0;
    for (int j = 0; j < int'(NES) - 1; j++) begin
      if (m == 4'(j) && (k_q + m) < msb && !bits_q[3'(k_q + m)]) m = m + 4'd1;
    end
    t        = k_q + m;
    t_bit    = bits_q[3'(t)];
    t_is_msb = (t == msb);
    drop     = t_is_msb && !t_bit && (m == 0) && !first_q;

    for (int i = 0; i < BO_MAX_W; i++) bo_masked[i] = (i < int'(n)) ? bo_value[i] : 1'b0;

    instr = '0;
    if (active_q && (accum_q || drop)) begin
      instr.valid = 1'b1;
      instr.accum = 1'b1;
      instr.wb    = 1'b1;
    end else if (active_q) begin
      instr.valid  = 1'b1;
      instr.acc_en = !first_q;
      instr.rsh    = SH_W'(t_is_msb ? m : m + 4'd1);
      instr.add    = t_bit;
      instr.imo_sh = !t_is_msb;
      instr.twos   = t_is_msb && t_bit;
      instr.wb     = 1'b1;
    end
    // A new BO is taken when idle or while the accumulate is issued.
    bo_take   = bo_valid && (!active_q || instr.accum);
    zero_skip = bo_take && (bo_masked == '0);
    busy      = active_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_q <= 1'b0;
      first_q  <= 1'b0;
      accum_q  <= 1'b0;
      bits_q   <= '0;
      k_q      <= '0;
    end else begin
      if (active_q && !instr.accum) begin
        first_q <= 1'b0;
        k_q     <= t + 4'd1;
        if (t_is_msb) accum_q <= 1'b1;
      end
      if (instr.accum) active_q <= 1'b0;
      if (bo_take && !zero_skip) begin
        active_q <= 1'b1;
        first_q  <= 1'b1;
        accum_q  <= 1'b0;
        bits_q   <= bo_masked;
        k_q      <= '0;
      end
    end
  end

endmodule
