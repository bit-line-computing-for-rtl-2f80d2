// bc_pkg: sizes, address helpers and the BC operation type shared by the
// bit-line computing (BC) array and its instruction pipeline.
//
// A BC subarray holds N_LG local groups (LGs) of LG_ROWS rows. Every row keeps
// WAYS words of WORD_W bits, bit-interleaved across the row. A word address
// counts words: address a lives in row a/WAYS, way a%WAYS, and row r belongs to
// local group r/LG_ROWS. The sizes (5 LGs x 32 rows, two interleaved 16-bit
// words per row, 320 words, 640 in 2x8-bit mode) are the test-vehicle sizes of
// the paper's circuit characterisation.
//
// Every BC operation has the form add(OP1, OP2): each operand is one word,
// may be disabled (then it reads as zero), arithmetically right-shifted by 0 to
// NES bit positions and bit-wise negated in the LG periphery. The carry-in of
// the adder is asserted to complete a two's complement negation. The result
// can be written back to a word (one write per cycle) and is always presented
// at the subarray output, which is also how a plain read is done. A write of
// external data goes through the same write amplifier with wsrc_ext set.
package bc_pkg;

  localparam int unsigned WORD_W   = 16;  // bits per word (Q1.15, or 2 x Q1.7)
  localparam int unsigned HALF_W   = WORD_W / 2;
  localparam int unsigned WAYS     = 2;   // words interleaved per row
  localparam int unsigned LG_ROWS  = 32;  // rows per local group
  localparam int unsigned N_LG     = 5;   // local groups per subarray
  localparam int unsigned ROWS     = LG_ROWS * N_LG;          // 160
  localparam int unsigned ROW_W    = WORD_W * WAYS;           // 32 columns
  localparam int unsigned WORDS    = ROWS * WAYS;             // 320
  localparam int unsigned ADDR_W   = $clog2(WORDS);           // 9
  localparam int unsigned LG_W     = $clog2(N_LG);            // 3
  localparam int unsigned LROW_W   = $clog2(LG_ROWS);         // 5
  localparam int unsigned WAY_W    = $clog2(WAYS);            // 1

  // Number of embedded shifts supported by the read ports (paper: NES = 3).
  localparam int unsigned NES      = 3;
  localparam int unsigned SH_W     = $clog2(NES + 1);         // 2

  // Largest broadcasted-operand (weight) bitwidth: 8-bit BOs are the
  // starting point of the quantisation flow, so N <= 8.
  localparam int unsigned BO_MAX_W = 8;
  localparam int unsigned N_W      = $clog2(BO_MAX_W + 1);    // 4

  // GCW code window and memory word width.
  localparam int unsigned GCW_WIN  = 13;
  localparam int unsigned MEM_W    = 32;

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [WORD_W-1:0] word_t;

  // One operand of add(OP1, OP2) as issued to the LG read ports.
  typedef struct packed {
    logic              en;    // word line activated; disabled reads as zero
    addr_t             addr;  // word address
    logic [SH_W-1:0]   shamt;    // embedded right shifts (0..NES)
    logic              neg;   // bit-wise negation in the LG periphery
  } bc_operand_t;

  // One BC operation, broadcast by the controller to the subarrays.
  typedef struct packed {
    logic        valid;
    bc_operand_t op1;
    bc_operand_t op2;
    logic        cin;       // carry-in of bit 0 (and of bit 8 in 2x8-bit mode)
    logic        mode2x8;   // word-level parallelism: two 8-bit sub-words
    logic        wb;        // write the selected source back to wb_addr
    logic        wsrc_ext;  // write amplifier source: 1 = DATA_IN, 0 = result
    addr_t       wb_addr;
  } bc_op_t;

  // One BC instruction as produced by the BC instruction decoder for the
  // multiplication of the current in-memory operand (IMO) by the current
  // broadcasted operand (BO), accumulating into a product word P and a
  // sum word S:
  //   accum = 0: P <= add(acc_en ? RSh^rsh(P) : 0,
  //                       add ? (twos ? 2sComp(IMO) : RSh^imo_sh(IMO)) : 0)
  //   accum = 1: S <= add(S, P)
  typedef struct packed {
    logic            valid;
    logic            acc_en;   // OP1 = partial product P (else zero)
    logic [SH_W-1:0] rsh;      // RightShift of P
    logic            add;      // Add: OP2 = IMO (else zero)
    logic            imo_sh;   // IMO right-shifted by one
    logic            twos;     // 2sComp: OP2 = two's complement of IMO
    logic            accum;    // S <= S + P (end of one MAC)
    logic            wb;       // Write back
  } bc_instr_t;

  function automatic logic [LG_W-1:0] lg_of(addr_t a);
    return LG_W'((int'(a) / WAYS) / LG_ROWS);
  endfunction

  function automatic logic [LROW_W-1:0] lrow_of(addr_t a);
    return LROW_W'((int'(a) / WAYS) % LG_ROWS);
  endfunction

  function automatic logic [WAY_W-1:0] way_of(addr_t a);
    return WAY_W'(int'(a) % WAYS);
  endfunction

endpackage
