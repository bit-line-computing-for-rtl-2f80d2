// tb_ref_pkg: reference models shared by the testbenches, written
// independently of the RTL.
//  * mul_ref: product of an in-memory operand (16-bit word, or two 8-bit
//    sub-words) and an N-bit broadcasted operand, computed bit by bit with
//    one right shift per bit (NES = 1), exactly as the shift-add algorithm
//    truncates: P = RSh(P) + b*RSh(IMO) for each non-sign bit, then
//    P = P - b*IMO for the sign bit.
//  * gcw_encode: GCW code of an N-bit value (length and bits, first bit at
//    position len-1).
package tb_ref_pkg;

  function automatic logic [7:0] mul8(logic [7:0] imo, logic [7:0] bo, int n);
    logic signed [7:0] p, x;
    p = '0;
    x = imo;
    for (int k = 0; k < n - 1; k++)
      p = (p >>> 1) + (bo[k] ? (x >>> 1) : 8'sd0);
    if (bo[n-1]) p = p - x;
    return p;
  endfunction

  function automatic logic [15:0] mul16(logic [15:0] imo, logic [7:0] bo, int n);
    logic signed [15:0] p, x;
    p = '0;
    x = imo;
    for (int k = 0; k < n - 1; k++)
      p = (p >>> 1) + (bo[k] ? (x >>> 1) : 16'sd0);
    if (bo[n-1]) p = p - x;
    return p;
  endfunction

  function automatic logic [15:0] mul_ref(logic [15:0] imo, logic [7:0] bo, int n, bit m2x8);
    if (m2x8) return {mul8(imo[15:8], bo, n), mul8(imo[7:0], bo, n)};
    return mul16(imo, bo, n);
  endfunction

  function automatic logic [15:0] add_ref(logic [15:0] a, logic [15:0] b, bit m2x8);
    if (m2x8) return {a[15:8] + b[15:8], a[7:0] + b[7:0]};
    return a + b;
  endfunction

  // Value v holds an N-bit two's complement number in its low n bits.
  function automatic void gcw_encode(logic [7:0] v, int n, output int len, output logic [12:0] code);
    int a;
    a = 0;
    for (int i = 0; i < n; i++) if (v[i]) a += (1 << i);
    if (v[n-1]) a -= (1 << n);          // signed value
    code = '0;
    if (a == 0) begin
      len = 1;
    end else if (a >= -8 && a <= 7) begin
      len = 5;
      code[4] = 1'b1;
      code[3:0] = 4'(a);
    end else begin
      len = 5 + n;
      code[n+4] = 1'b1;
      for (int i = 0; i < n; i++) code[i] = v[i];
    end
  endfunction

  // Random N-bit weight with many zeros and small values, like the weight
  // distributions the GCW code is made for.
  function automatic logic [7:0] rand_weight(int n);
    int r, a;
    r = $urandom_range(0, 9);
    if (r < 4) a = 0;
    else if (r < 8) a = $urandom_range(0, 15) - 8;
    else a = $urandom_range(0, (1 << n) - 1) - (1 << (n - 1));
    if (a >= (1 << (n - 1)) || a < -(1 << (n - 1))) a = 1 - (n == 1 ? 2 : 0);
    return 8'(a);
  endfunction

  // Number of shift-add instructions for one non-zero BO with NES embedded
  // shifts: runs of up to NES-1 zeros merge with the bit that follows them;
  // a final group that is only the sign bit 0 needs no instruction.
  function automatic int n_shift_adds(logic [7:0] bo, int n, int nes);
    int k, cnt, m;
    k = 0; cnt = 0;
    while (k <= n - 1) begin
      m = 0;
      while (m < nes - 1 && k + m < n - 1 && !bo[k + m]) m++;
      if (!(k + m == n - 1 && m == 0 && !bo[k] && cnt > 0)) cnt++;
      k = k + m + 1;
    end
    return cnt;
  endfunction

endpackage
