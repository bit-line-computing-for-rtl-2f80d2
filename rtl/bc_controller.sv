// bc_controller: array controller between the BC instruction decoder and the
// subarrays.
//
// It maps each BC instruction onto word addresses, i.e. onto the word lines to
// raise, and sequences one filter (or one FC input vector):
//   START  : latch the configuration, flush the weight shift register.
//   CLEAR  : S <= 0 in every subarray (add(0, 0) written back).
//   RUN    : forward BC instructions, broadcast to all subarrays. The IMO of
//            the j-th BO is word imo_base + j of every subarray; P and S are
//            fixed words. A product instruction becomes
//              P <= add(RSh^rsh(P) | 0, RSh^imo_sh(IMO) | ~IMO + cin | 0)
//            and an accumulate S <= add(S, P).
//            RUN ends when num_bo BOs have been taken and the decoder is idle.
//   IDLE   : the host may issue any BC operation (host_op) to one subarray
//            or to all of them: operand loads, result reads, and extra
//            in-memory operations such as merging partial convolutions.
// done pulses for one cycle at the end of RUN.
//
// Layout rule: P must lie in a local group other than those of S and of the
// IMO words (two operands of one operation may not share a local group).
//
// From the paper: a small controller global to the array that decodes BC
// operations and activates word lines; weights/activations broadcast as BC
// instructions; S/P words as partial-product and accumulation words. The
// address layout (consecutive IMO words in BO order), the CLEAR step and the
// host interface are this design's choices.
module bc_controller
  import bc_pkg::*;
#(
  parameter int unsigned NSUB = 128
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // configuration, sampled at start
  input  logic                    start,
  input  logic [ADDR_W:0]         num_bo,    // BOs in this run
  input  addr_t                   imo_base,
  input  addr_t                   p_addr,
  input  addr_t                   s_addr,
  input  logic                    mode2x8,
  output logic                    busy,
  output logic                    done,
  output logic                    flush,     // to the GCW shift register
  // BC instruction decoder side
  output logic                    bo_enable, // more BOs wanted
  input  logic                    bo_take,
  input  bc_instr_t               instr,
  input  logic                    dec_busy,
  // host side (used while idle)
  input  logic                    host_valid,
  input  bc_op_t                  host_op,
  input  logic                    host_bcast,
  input  logic [$clog2(NSUB)-1:0] host_sel,
  // to the array
  output bc_op_t                  arr_op,
  output logic                    arr_bcast,
  output logic [$clog2(NSUB)-1:0] arr_sel
);

  typedef enum logic [1:0] {S_IDLE, S_CLEAR, S_RUN} state_t;
  state_t state_q;

  logic [ADDR_W:0] taken_q, num_q;
  addr_t           imo_next_q, imo_cur_q, p_q, s_q;
  logic            m2x8_q;

  assign busy      = (state_q != S_IDLE);
  assign flush     = start && state_q == S_IDLE;
  assign bo_enable = (state_q == S_RUN) && (taken_q < num_q);

  always_comb begin
    arr_op    = '0;
    arr_bcast = 1'b1;
    arr_sel   = host_sel;
    done      = 1'b0;
    unique case (state_q)
      S_IDLE: begin
        arr_op       = host_op;
        arr_op.valid = host_valid && !start;
        arr_bcast    = host_bcast;
      end
      S_CLEAR: begin
        arr_op.valid   = 1'b1;
        arr_op.mode2x8 = m2x8_q;
        arr_op.wb      = 1'b1;
        arr_op.wb_addr = s_q;
      end
      S_RUN: begin
        arr_op.valid   = instr.valid;
        arr_op.mode2x8 = m2x8_q;
        arr_op.wb      = instr.wb;
        if (instr.accum) begin
          arr_op.op1     = '{en: 1'b1, addr: s_q, shamt: '0, neg: 1'b0};
          arr_op.op2     = '{en: 1'b1, addr: p_q, shamt: '0, neg: 1'b0};
          arr_op.wb_addr = s_q;
        end else begin
          arr_op.op1     = '{en: instr.acc_en, addr: p_q, shamt: instr.rsh, neg: 1'b0};
          arr_op.op2     = '{en: instr.add, addr: imo_cur_q,
                             shamt: SH_W'(instr.imo_sh), neg: instr.twos};
          arr_op.cin     = instr.twos;
          arr_op.wb_addr = p_q;
        end
        done = (taken_q == num_q) && !dec_busy;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      taken_q    <= '0;
      num_q      <= '0;
      imo_next_q <= '0;
      imo_cur_q  <= '0;
      p_q        <= '0;
      s_q        <= '0;
      m2x8_q     <= 1'b0;
    end else begin
      unique case (state_q)
        S_IDLE: if (start) begin
          state_q    <= S_CLEAR;
          taken_q    <= '0;
          num_q      <= num_bo;
          imo_next_q <= imo_base;
          imo_cur_q  <= imo_base;
          p_q        <= p_addr;
          s_q        <= s_addr;
          m2x8_q     <= mode2x8;
        end
        S_CLEAR: state_q <= S_RUN;
        S_RUN: begin
          if (bo_take) begin
            taken_q    <= taken_q + 1'b1;
            imo_cur_q  <= imo_next_q;
            imo_next_q <= imo_next_q + 1'b1;
          end
          if (done) state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_layout: assert property (@(posedge clk) disable iff (!rst_n)
    state_q == S_CLEAR |-> lg_of(p_q) != lg_of(s_q))
    else $error("bc_controller: P and S share a local group");

endmodule
