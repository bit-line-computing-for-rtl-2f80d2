// bc_accel_top: bit-line computing CNN accelerator with run-time GCW weight
// decoding.
//
// Datapath, in the order data flows:
//   weight memory words (32 bit) -> gcw_shift_register -> gcw_decoder
//     -> [BO source mux] -> bc_instr_decoder -> bc_controller -> bc_array
// CONV layers (mode_fc = 0): weights are the broadcasted operands. They are
// read as a GCW-encoded bit-stream, decoded to N-bit values and turned into
// shift-add BC instructions that every subarray executes on its own
// activations (the in-memory operands).
// FC layers (mode_fc = 1): activations are the broadcasted operands, arriving
// as plain N-bit values on the bo_* stream (GCW is not used), while each
// subarray holds the weights of one output.
// Both modes accumulate sum_j IMO[imo_base + j] * BO_j into word s_addr of
// every subarray, using p_addr as partial-product word.
//
// Use: load operands with host_* operations while idle, set the
// configuration inputs (hold them stable until done), pulse start, wait for
// done, then read results with host read operations (result on host_rdata
// one cycle after the read operation, host_sel held).
//
// Status outputs for observation: stall (a BO is wanted but the weight
// memory has not delivered enough bits), zero_skip (a zero BO was skipped).
//
// From the paper: the three-stage decoding pipeline, the BC array with
// H-tree, the CONV/FC operand assignment. The host interface and the
// configuration ports are this design's choices.
module bc_accel_top
  import bc_pkg::*;
#(
  parameter int unsigned NSUB = 128
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // run configuration
  input  logic                    start,
  input  logic                    mode_fc,
  input  logic                    mode2x8,
  input  logic [N_W-1:0]          quant_n,
  input  logic [ADDR_W:0]         num_bo,
  input  addr_t                   imo_base,
  input  addr_t                   p_addr,
  input  addr_t                   s_addr,
  output logic                    busy,
  output logic                    done,
  // weight memory stream (CONV)
  input  logic                    wmem_valid,
  input  logic [MEM_W-1:0]        wmem_data,
  input  logic                    wmem_last,
  output logic                    wmem_ready,
  // activation stream (FC)
  input  logic                    bo_valid,
  input  logic [BO_MAX_W-1:0]     bo_data,
  output logic                    bo_ready,
  // host access to the array
  input  logic                    host_valid,
  input  bc_op_t                  host_op,
  input  logic                    host_bcast,
  input  logic [$clog2(NSUB)-1:0] host_sel,
  input  word_t                   host_wdata,
  output word_t                   host_rdata,
  // status
  output logic                    stall,
  output logic                    zero_skip
);

  logic [GCW_WIN-1:0]  gcw;
  logic                gcw_valid, flush;
  logic [BO_MAX_W-1:0] gcw_value, bo_value;
  logic [3:0]          code_len;
  logic [1:0]          gcw_sel;
  logic                src_valid, bo_enable, bo_take, dec_busy;
  bc_instr_t           instr;
  bc_op_t              arr_op;
  logic                arr_bcast;
  logic [$clog2(NSUB)-1:0] arr_sel;

  gcw_shift_register u_sreg (
    .clk       (clk),
    .rst_n     (rst_n),
    .flush     (flush),
    .mem_valid (wmem_valid && !mode_fc),
    .mem_data  (wmem_data),
    .mem_last  (wmem_last),
    .mem_ready (wmem_ready),
    .gcw       (gcw),
    .gcw_valid (gcw_valid),
    .shift     (bo_take && !mode_fc),
    .code_len  (code_len)
  );

  gcw_decoder u_gcw (
    .gcw      (gcw),
    .n        (quant_n),
    .value    (gcw_value),
    .code_len (code_len),
    .sel      (gcw_sel)
  );

  // BO source: decoded weights (CONV) or streamed activations (FC).
  assign src_valid = bo_enable && (mode_fc ? bo_valid : gcw_valid);
  assign bo_value  = mode_fc ? bo_data : gcw_value;
  assign bo_ready  = mode_fc && bo_take;
  assign stall     = bo_enable && !mode_fc && !gcw_valid;

  bc_instr_decoder u_idec (
    .clk       (clk),
    .rst_n     (rst_n),
    .n         (quant_n),
    .bo_valid  (src_valid),
    .bo_value  (bo_value),
    .bo_take   (bo_take),
    .instr     (instr),
    .zero_skip (zero_skip),
    .busy      (dec_busy)
  );

  bc_controller #(.NSUB(NSUB)) u_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (start),
    .num_bo     (num_bo),
    .imo_base   (imo_base),
    .p_addr     (p_addr),
    .s_addr     (s_addr),
    .mode2x8    (mode2x8),
    .busy       (busy),
    .done       (done),
    .flush      (flush),
    .bo_enable  (bo_enable),
    .bo_take    (bo_take),
    .instr      (instr),
    .dec_busy   (dec_busy),
    .host_valid (host_valid),
    .host_op    (host_op),
    .host_bcast (host_bcast),
    .host_sel   (host_sel),
    .arr_op     (arr_op),
    .arr_bcast  (arr_bcast),
    .arr_sel    (arr_sel)
  );

  bc_array #(.NSUB(NSUB)) u_array (
    .clk     (clk),
    .op      (arr_op),
    .data_in (host_wdata),
    .bcast   (arr_bcast),
    .sel     (arr_sel),
    .dout    (host_rdata)
  );

endmodule
