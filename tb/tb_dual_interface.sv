// tb_dual_interface: random normal and NPU requests are offered with random
// back-pressure on both sides; each must reach the side its kind names,
// unchanged and in order, and be accepted only when that side is ready.
// Responses from both sides, offered at random, must all come out once,
// unchanged, with neither side starved.
module tb_dual_interface;
  import camdn_pkg::*;
  import tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  req_t in_req = '0; resp_t out_resp;
  logic cc_req_valid, cc_req_ready = 1, cc_resp_valid = 0, cc_resp_ready;
  logic nec_req_valid, nec_req_ready = 1, nec_resp_valid = 0, nec_resp_ready;
  req_t cc_req, nec_req; resp_t cc_resp = '0, nec_resp = '0;

  dual_interface dut (.*);

  req_t  exp_cc [$], exp_nec [$];
  resp_t exp_out [$];
  int    n_cc = 0, n_nec = 0;

  always @(posedge clk) if (rst_n) begin
    if (cc_req_valid && cc_req_ready) begin
      checks++;
      if (exp_cc.size() == 0 || cc_req !== exp_cc.pop_front()) begin failures++; $display("FAIL cc req"); end
    end
    if (nec_req_valid && nec_req_ready) begin
      checks++;
      if (exp_nec.size() == 0 || nec_req !== exp_nec.pop_front()) begin failures++; $display("FAIL nec req"); end
    end
    if (cc_req_valid && nec_req_valid) begin failures++; $display("FAIL both sides valid"); end
    if (out_valid && out_ready) begin
      automatic int k = -1;
      checks++;
      foreach (exp_out[i]) if (exp_out[i] === out_resp && k < 0) k = i;
      if (k < 0) begin failures++; $display("FAIL unexpected response"); end
      else exp_out.delete(k);
    end
  end

  // request driver
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      req_t r;
      r = '0; r.kind = kind_e'($urandom_range(1)); r.op = op_e'($urandom_range(9));
      r.src = 5'($urandom); r.pcaddr = 24'($urandom); r.paddr = $urandom; r.data = rnd_line();
      @(negedge clk); in_valid = 1; in_req = r;
      if (r.kind == KIND_NPU) exp_nec.push_back(r); else exp_cc.push_back(r);
      do @(posedge clk); while (!in_ready);
      @(negedge clk); in_valid = 0;
    end
  end

  // side ready and response drivers
  always @(negedge clk) begin
    cc_req_ready  <= ($urandom_range(2) != 0);
    nec_req_ready <= ($urandom_range(2) != 0);
    out_ready     <= ($urandom_range(3) != 0);
  end
  initial begin
    repeat (3) @(negedge clk);
    fork
      for (int i = 0; i < 300; i++) begin
        automatic resp_t r = '0; r.dst = $urandom; r.tag = 16'(i); r.data = rnd_line(); r.op = OP_CPU_RD;
        @(negedge clk); cc_resp_valid = 1; cc_resp = r; exp_out.push_back(r);
        do @(posedge clk); while (!cc_resp_ready);
        n_cc++;
        @(negedge clk); cc_resp_valid = 0;
      end
      for (int i = 0; i < 300; i++) begin
        automatic resp_t r = '0; r.dst = $urandom; r.tag = 16'(i + 1000); r.data = rnd_line(); r.op = OP_READ;
        @(negedge clk); nec_resp_valid = 1; nec_resp = r; exp_out.push_back(r);
        do @(posedge clk); while (!nec_resp_ready);
        n_nec++;
        @(negedge clk); nec_resp_valid = 0;
      end
    join
    repeat (50) @(negedge clk);
    checks++;
    if (exp_out.size() != 0 || exp_cc.size() != 0 || exp_nec.size() != 0) begin
      failures++; $display("FAIL leftovers %0d %0d %0d", exp_out.size(), exp_cc.size(), exp_nec.size());
    end
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
