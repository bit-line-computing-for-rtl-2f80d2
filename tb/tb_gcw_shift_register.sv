// tb_gcw_shift_register: encodes random weights into a GCW bit-stream, packs
// it into 32-bit words (first bit in bit 31), feeds the words with random
// gaps and consumes code-words using the reference code lengths. The 13-bit
// window must always start at the next code-word; code-words cross word
// boundaries. Also checks the refill rule (a word is only accepted when
// fewer than 13 bits would remain) and flush.
module tb_gcw_shift_register;
  import bc_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic flush, mem_valid, mem_last, mem_ready, gcw_valid, shift;
  logic [31:0] mem_data;
  logic [12:0] gcw;
  logic [3:0] code_len;
  int checks = 0, failures = 0;

  gcw_shift_register dut (.clk(clk), .rst_n(rst_n), .flush(flush), .mem_valid(mem_valid),
    .mem_data(mem_data), .mem_last(mem_last), .mem_ready(mem_ready), .gcw(gcw),
    .gcw_valid(gcw_valid), .shift(shift), .code_len(code_len));

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    bit stream [$];
    int lens [$];
    logic [12:0] codes [$];
    int held;
    flush = 0; mem_valid = 0; mem_last = 0; mem_data = 0; shift = 0; code_len = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 30; f++) begin
      int nn, nw, wi, ci, pos;
      nn = $urandom_range(1, 8);
      stream.delete(); lens.delete(); codes.delete();
      for (int i = 0; i < $urandom_range(5, 60); i++) begin
        int len; logic [12:0] code;
        gcw_encode(rand_weight(nn), nn, len, code);
        lens.push_back(len); codes.push_back(code);
        for (int b = len - 1; b >= 0; b--) stream.push_back(code[b]);
      end
      nw = (stream.size() + 31) / 32;
      while (stream.size() < nw * 32) stream.push_back(1'b0);
      // flush
      @(negedge clk); flush = 1; @(negedge clk); flush = 0;
      wi = 0; ci = 0; pos = 0; held = 0;
      while (ci < lens.size()) begin
        mem_valid = (wi < nw) && ($urandom_range(0, 3) != 0);
        mem_last  = (wi == nw - 1);
        for (int b = 0; b < 32; b++) mem_data[31 - b] = (wi < nw) ? stream[wi * 32 + b] : 1'b0;
        shift = gcw_valid && ($urandom_range(0, 2) != 0);
        code_len = 4'(lens[ci]);
        #1;
        if (gcw_valid) begin
          logic [12:0] exp;
          for (int b = 0; b < 13; b++) exp[12 - b] = (pos + b < stream.size()) ? stream[pos + b] : 1'b0;
          check(gcw[12 -: 5] == exp[12 -: 5], $sformatf("window at bit %0d: got %b exp %b", pos, gcw, exp));
          check(held - pos >= 13 || wi == nw, "window complete unless stream ended");
        end
        if (mem_ready && mem_valid)
          check(held - pos - (shift ? lens[ci] : 0) < 13, "refill only below 13 bits");
        @(posedge clk);
        if (shift) begin pos += lens[ci]; ci++; end
        if (mem_ready && mem_valid) begin held += 32; wi++; end
        @(negedge clk);
        shift = 0; mem_valid = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
