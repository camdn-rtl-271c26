// tb_data_array: random writes and reads of a reduced data array (4 ways x
// 32 sets) against a reference array; read data must appear exactly one
// clock after the read is issued.
module tb_data_array;
  import camdn_pkg::*;
  import tb_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en = 0, we = 0;
  logic [1:0] way = 0;
  logic [4:0] set = 0;
  line_t wdata = '0, rdata;
  int checks = 0, failures = 0;
  line_t refm [128];
  bit    written [128];

  data_array #(.WAYS(4), .SETS(32)) dut (.*);

  initial begin
    for (int i = 0; i < 3000; i++) begin
      int w, s;
      bit is_wr;
      w = $urandom_range(3); s = $urandom_range(31);
      is_wr = ($urandom_range(1) == 1) || !written[{2'(w), 5'(s)}];
      @(negedge clk);
      en = 1; we = is_wr; way = 2'(w); set = 5'(s); wdata = rnd_line();
      if (is_wr) begin refm[{2'(w), 5'(s)}] = wdata; written[{2'(w), 5'(s)}] = 1; end
      @(negedge clk);
      en = 0;
      if (!is_wr) begin
        checks++;
        if (rdata !== refm[{2'(w), 5'(s)}]) begin failures++; $display("FAIL way %0d set %0d", w, s); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
