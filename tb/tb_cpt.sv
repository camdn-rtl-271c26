// tb_cpt: checks the cache page table against a reference array: the four
// mappings of the paper's example (vcpn 0,1,2,3 -> pcpn 2,3,7,8), random
// writes and invalidations over all 512 entries, one-cycle lookup latency,
// and that every entry reads invalid after reset.
module tb_cpt;
  import camdn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       wr_en = 0, wr_valid = 0, lk_en = 0, lk_hit;
  logic [8:0] wr_vcpn = 0, wr_pcpn = 0, lk_vcpn = 0, lk_pcpn;
  int checks = 0, failures = 0;

  cpt dut (.*);

  bit       ref_v [512];
  bit [8:0] ref_p [512];

  task automatic wr(int v, bit val, int p);
    @(negedge clk); wr_en = 1; wr_vcpn = 9'(v); wr_valid = val; wr_pcpn = 9'(p);
    @(negedge clk); wr_en = 0;
    ref_v[v] = val; ref_p[v] = 9'(p);
  endtask

  task automatic lk(int v);
    @(negedge clk); lk_en = 1; lk_vcpn = 9'(v);
    @(negedge clk); lk_en = 0;   // result registered at the edge in between
    checks++;
    if (lk_hit !== ref_v[v] || (ref_v[v] && lk_pcpn !== ref_p[v])) begin
      failures++;
      $display("FAIL vcpn %0d: hit %0b pcpn %0d, want %0b %0d", v, lk_hit, lk_pcpn, ref_v[v], ref_p[v]);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int v = 0; v < 512; v += 37) lk(v);          // all invalid after reset
    wr(0, 1, 2); wr(1, 1, 3); wr(2, 1, 7); wr(3, 1, 8);
    for (int v = 0; v < 4; v++) lk(v);
    for (int i = 0; i < 400; i++) wr($urandom_range(511), ($urandom_range(3) != 0), $urandom_range(511));
    for (int v = 0; v < 512; v++) lk(v);
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
