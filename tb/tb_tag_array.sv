// tb_tag_array: a reduced tag array (4 ways x 16 sets, 8-bit tags) against a
// reference model: all ways invalid after reset, random single-way writes,
// whole-set reads one cycle after rd_en.
module tb_tag_array;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic rd_en = 0, wr_en = 0, wr_valid = 0, wr_dirty = 0;
  logic [3:0] rd_set = 0, wr_set = 0;
  logic [1:0] wr_way = 0;
  logic [7:0] wr_tag = 0;
  logic [3:0] rd_valid, rd_dirty;
  logic [3:0][7:0] rd_tag;
  int checks = 0, failures = 0;
  bit rv [16][4]; bit rd_ [16][4]; bit [7:0] rt [16][4];

  tag_array #(.WAYS(4), .SETS(16), .TAG_W(8)) dut (.*);

  task automatic check_set(int s);
    @(negedge clk); rd_en = 1; rd_set = 4'(s);
    @(negedge clk); rd_en = 0;
    for (int w = 0; w < 4; w++) begin
      checks++;
      if (rd_valid[w] !== rv[s][w] || (rv[s][w] && (rd_dirty[w] !== rd_[s][w] || rd_tag[w] !== rt[s][w]))) begin
        failures++; $display("FAIL set %0d way %0d", s, w);
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int s = 0; s < 16; s++) check_set(s);
    for (int i = 0; i < 600; i++) begin
      int s, w;
      s = $urandom_range(15); w = $urandom_range(3);
      @(negedge clk);
      wr_en = 1; wr_set = 4'(s); wr_way = 2'(w); wr_valid = ($urandom_range(3) != 0);
      wr_dirty = 1'($urandom); wr_tag = 8'($urandom);
      rv[s][w] = wr_valid; rd_[s][w] = wr_dirty; rt[s][w] = wr_tag;
      @(negedge clk); wr_en = 0;
      if (i % 4 == 0) check_set($urandom_range(15));
    end
    for (int s = 0; s < 16; s++) check_set(s);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
