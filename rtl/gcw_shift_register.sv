// gcw_shift_register: bit buffer between the weight memory and the GCW
// decoder.
//
// GCW code-words of one filter form a continuous bit-stream packed into 32-bit
// memory words, first bit in Data<31>; a code-word may straddle two words.
// The register holds up to 64 bits, oldest bit in buf_q[63], and always shows
// the 13 oldest bits as gcw (GCW<12:0>). When the decoder takes a weight
// (shift), the buffer advances by the code length of that code-word. Whenever
// fewer than 13 bits would remain, a new memory word is accepted in the same
// cycle and appended behind the remaining bits, so at most 12 + 32 = 44 bits
// are ever held.
//
// Interface: flush empties the buffer (start of a filter). mem_valid/mem_ready
// is a valid-ready stream of memory words; mem_last marks the final word of a
// filter, after which gcw_valid is given with fewer than 13 bits left (the
// missing bits read as zero). gcw_valid low with the stream not finished is a
// stall: the decoder must wait for memory.
//
// From the paper: 32-bit memory words, the 13-bit window, advance by the code
// length, refill below 13 bits, code-words crossing word boundaries. The
// 64-bit buffer, the bit order in a word and the stream handshake are this
// design's choices.
module gcw_shift_register
  import bc_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               flush,
  input  logic               mem_valid,
  input  logic [MEM_W-1:0]   mem_data,
  input  logic               mem_last,
  output logic               mem_ready,
  output logic [GCW_WIN-1:0] gcw,
  output logic               gcw_valid,
  input  logic               shift,
  input  logic [3:0]         code_len
);

  localparam int unsigned BUF_W = 64;

  logic [BUF_W-1:0] buf_q, buf_shifted, buf_d;
  logic [6:0]       cnt_q, cnt_after, cnt_d;
  logic             last_q, last_d;

  assign gcw       = buf_q[BUF_W-1 -: GCW_WIN];
  assign gcw_valid = (cnt_q >= 7'(GCW_WIN)) || (last_q && cnt_q != 0);

  always_comb begin
    if (shift && gcw_valid) begin
      buf_shifted = buf_q << code_len;
      cnt_after   = (cnt_q > 7'(code_len)) ? cnt_q - 7'(code_len) : '0;
    end else begin
      buf_shifted = buf_q;
      cnt_after   = cnt_q;
    end
    mem_ready = !flush && !last_q && (cnt_after < 7'(GCW_WIN));
    buf_d  = buf_shifted;
    cnt_d  = cnt_after;
    last_d = last_q;
    if (mem_ready && mem_valid) begin
      buf_d  = buf_shifted | ({mem_data, 32'b0} >> cnt_after);
      cnt_d  = cnt_after + 7'(MEM_W);
      last_d = mem_last;
    end
    if (flush) begin
      buf_d  = '0;
      cnt_d  = '0;
      last_d = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q  <= '0;
      cnt_q  <= '0;
      last_q <= 1'b0;
    end else begin
      buf_q  <= buf_d;
      cnt_q  <= cnt_d;
      last_q <= last_d;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) cnt_q <= 7'(BUF_W));

endmodule
