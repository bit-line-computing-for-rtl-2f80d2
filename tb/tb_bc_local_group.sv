// tb_bc_local_group: random writes and reads of both ways of every row,
// checked against a word-level shadow copy; a write to one way must leave
// the other way of the row untouched; a disabled read returns zero.
module tb_bc_local_group;
  import bc_pkg::*;

  logic clk = 0;
  logic rd_en, wr_en;
  logic [4:0] rd_row, wr_row;
  logic [0:0] rd_way, wr_way;
  word_t rd_data, wr_data;
  word_t shadow [LG_ROWS][WAYS];
  int checks = 0, failures = 0;

  bc_local_group dut (.clk(clk), .rd_en(rd_en), .rd_row(rd_row), .rd_way(rd_way), .rd_data(rd_data),
                      .wr_en(wr_en), .wr_row(wr_row), .wr_way(wr_way), .wr_data(wr_data));

  always #5 clk = ~clk;

  initial begin
    rd_en = 0; wr_en = 0; rd_row = 0; rd_way = 0; wr_row = 0; wr_way = 0; wr_data = 0;
    // fill
    for (int r = 0; r < LG_ROWS; r++)
      for (int w = 0; w < WAYS; w++) begin
        @(negedge clk);
        wr_en = 1; wr_row = 5'(r); wr_way = 1'(w); wr_data = 16'($urandom());
        shadow[r][w] = wr_data;
      end
    @(negedge clk); wr_en = 0;
    for (int it = 0; it < 1500; it++) begin
      @(negedge clk);
      wr_en = 1'($urandom());
      wr_row = 5'($urandom()); wr_way = 1'($urandom()); wr_data = 16'($urandom());
      rd_en = 1'($urandom_range(0, 5) != 0);
      rd_row = 5'($urandom()); rd_way = 1'($urandom());
      #1;
      checks++;
      if (rd_data !== (rd_en ? shadow[rd_row][rd_way] : 16'h0)) begin
        failures++;
        $display("FAIL read row %0d way %0d got %h exp %h", rd_row, rd_way, rd_data, shadow[rd_row][rd_way]);
      end
      @(posedge clk);
      if (wr_en) shadow[wr_row][wr_way] = wr_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
