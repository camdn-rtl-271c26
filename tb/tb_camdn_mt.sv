// tb_camdn_mt: the multi-tenant pattern of the evaluated configuration at
// the default size (16 NPUs, 16 MB in 8 slices, ways 4-15 for NPUs, 32 KB
// pages). Eight models run at once, each on a group of two NPUs (NPU 2m is
// the group leader, NPU 2m+1 the follower), with two private pages per model
// placed in different ways. Every model runs the data movements of one layer
// at the same time as the others and as CPU traffic:
// the leader loads 128 lines of weights into page 0, multicasts them to the
// group, and multicast-bypass-reads 64 input lines from memory; then each
// NPU writes 64 output lines into its half of page 1, reads them back, stores
// them to memory and bypass-writes 32 partial-sum lines straight to memory.
// At the end every leader reads its weights again from its own page
// (isolation: no other model may have changed them) and every follower
// bypass-reads the leader's stored outputs. Data is checked against the
// memory model and the written values; per-model cycle counts are printed.
// Model sizes, layer shapes and the two-NPUs-per-model split are choices of
// this testbench; the paper runs whole networks, which need the NPU compute.
module tb_camdn_mt;
  import camdn_pkg::*;
  import tb_pkg::*;
  localparam int NN = NUM_NPUS, NC = NUM_CPUS, NS = NUM_SLICES, W = NUM_WAYS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wm_we = 0; logic [W-1:0] wm_wdata = '0;
  logic [NN-1:0] npu_desc_valid = '0, npu_desc_ready, npu_done, npu_fault;
  dma_desc_t npu_desc [NN];
  logic [NN-1:0] npu_cpt_wr_en = '0, npu_cpt_wr_valid = '0;
  logic [8:0] npu_cpt_wr_vcpn [NN], npu_cpt_wr_pcpn [NN];
  logic [NN-1:0] npu_wdata_valid = '0, npu_wdata_ready;
  line_t npu_wdata [NN];
  logic [NN-1:0] npu_rd_valid; logic [TAGF_W-1:0] npu_rd_tag [NN]; line_t npu_rd_data [NN];
  logic [NC-1:0] cpu_req_valid = '0, cpu_req_ready, cpu_resp_valid;
  req_t cpu_req [NC]; resp_t cpu_resp [NC];
  logic [NS-1:0] mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t mem_req [NS]; line_t mem_resp_data [NS];

  camdn_top dut (.*);
  mem_multi #(.NP(NS)) u_mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
                              .req(mem_req), .resp_valid(mem_resp_valid), .resp_data(mem_resp_data));

  line_t rdbuf [NN][int];
  line_t wq [NN][$];
  for (genvar n = 0; n < NN; n++) begin : g_rd
    always @(posedge clk) if (rst_n && npu_rd_valid[n]) rdbuf[n][int'(npu_rd_tag[n])] = npu_rd_data[n];
  end

  task automatic cpt_map(int n, int v, int p);
    @(negedge clk);
    npu_cpt_wr_en[n] = 1; npu_cpt_wr_vcpn[n] = 9'(v); npu_cpt_wr_valid[n] = 1; npu_cpt_wr_pcpn[n] = 9'(p);
    @(negedge clk);
    npu_cpt_wr_en[n] = 0;
  endtask

  task automatic xfer(int n, op_e op, caddr_t vc, paddr_t pa, int nl, mmask_t mc);
    automatic dma_desc_t d = '0;
    automatic int t = 0;
    d.op = op; d.vcaddr = vc; d.paddr = pa; d.nlines = 16'(nl); d.mcast = mc;
    @(negedge clk); npu_desc_valid[n] = 1; npu_desc[n] = d;
    do @(posedge clk); while (!npu_desc_ready[n]);
    @(negedge clk); npu_desc_valid[n] = 0;
    fork
      begin
        while (carries_data(op) && wq[n].size() != 0) begin
          npu_wdata_valid[n] = 1; npu_wdata[n] = wq[n][0];
          do @(posedge clk); while (!npu_wdata_ready[n]);
          @(negedge clk);
          void'(wq[n].pop_front());
        end
        npu_wdata_valid[n] = 0;
      end
      begin
        while (!npu_done[n] && t < 50000) begin @(posedge clk); t++; end
      end
    join
    checks++;
    if (t >= 50000 || npu_fault[n]) begin failures++; $display("FAIL NPU%0d %s", n, op.name()); end
    else $display("  NPU%0d %-14s %0d lines in %0d cycles", n, op.name(), nl, t);
  endtask

  task automatic expect_mem(int n, int nl, paddr_t pa, string what);
    checks++;
    for (int i = 0; i < nl; i++)
      if (!rdbuf[n].exists(i) || rdbuf[n][i] !== u_mem.peek(pa + paddr_t'(i * 64))) begin
        failures++; $display("FAIL %s: NPU%0d line %0d", what, n, i); break;
      end
  endtask

  // CPU port 0: reads and writes in the general-purpose ways
  bit cpu_run = 1;
  line_t cref [paddr_t];
  initial begin
    cpu_req[0] = '0; cpu_req[1] = '0;
    @(posedge rst_n);
    for (int i = 0; cpu_run; i++) begin
      automatic req_t r = '0;
      automatic line_t expv;
      automatic int t = 0;
      r.kind = KIND_NORMAL; r.op = ($urandom_range(1) == 1) ? OP_CPU_WR : OP_CPU_RD;
      r.paddr = 32'h4000_0000 | paddr_t'({$urandom_range(255), 6'b0});
      r.data = rnd_line(); r.tag = 16'(i);
      expv = cref.exists(r.paddr) ? cref[r.paddr] : pat(r.paddr);
      if (r.op == OP_CPU_WR) cref[r.paddr] = r.data;
      @(negedge clk); cpu_req_valid[0] = 1; cpu_req[0] = r;
      do @(posedge clk); while (!cpu_req_ready[0]);
      @(negedge clk); cpu_req_valid[0] = 0;
      while (!cpu_resp_valid[0] && t < 5000) begin @(negedge clk); t++; end
      checks++;
      if (t >= 5000 || cpu_resp[0].tag != r.tag || (r.op == OP_CPU_RD && cpu_resp[0].data !== expv)) begin
        failures++; $display("FAIL CPU %s %h", r.op.name(), r.paddr);
      end
    end
  end

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int model_cycles [8];
  line_t outs [NN][$];
  line_t psum [NN][$];

  task automatic check_buf(int n, int nl, paddr_t pa, string what);
    checks++;
    for (int i = 0; i < nl; i++)
      if (!rdbuf[n].exists(i) || rdbuf[n][i] !== u_mem.peek(pa + paddr_t'(i * 64))) begin
        failures++; $display("FAIL %s: NPU%0d line %0d", what, n, i); break;
      end
  endtask

  task automatic run_model(int m);
    automatic int ld = 2 * m, fo = 2 * m + 1, t0;
    automatic paddr_t wbase = 32'h1000_0000 + paddr_t'(m) * 32'h0010_0000;
    automatic paddr_t ibase = 32'h2000_0000 + paddr_t'(m) * 32'h0010_0000;
    automatic paddr_t obase = 32'h3000_0000 + paddr_t'(m) * 32'h0010_0000;
    automatic paddr_t pbase = 32'h5000_0000 + paddr_t'(m) * 32'h0010_0000;
    automatic mmask_t grp = mmask_t'(3) << ld;
    t0 = cyc;
    xfer(ld, OP_LOAD, 24'h0, wbase, 128, '0);
    rdbuf[ld].delete(); rdbuf[fo].delete();
    xfer(ld, OP_MC_READ, 24'h0, wbase, 128, grp);
    check_buf(ld, 128, wbase, "weights leader");
    check_buf(fo, 128, wbase, "weights follower");
    rdbuf[ld].delete(); rdbuf[fo].delete();
    xfer(ld, OP_MC_BYP_READ, 24'h0, ibase, 64, grp);
    check_buf(ld, 64, ibase, "inputs leader");
    check_buf(fo, 64, ibase, "inputs follower");
    fork
      npu_layer(ld, 0, obase, pbase);
      npu_layer(fo, 1, obase, pbase);
    join
    model_cycles[m] = cyc - t0;
  endtask

  // one NPU's outputs: half h of page 1 (64 lines = 4 KB)
  task automatic npu_layer(int n, int h, paddr_t obase, paddr_t pbase);
    automatic caddr_t vc = 24'h8000 + caddr_t'(h * 64 * 64);
    automatic paddr_t oa = obase + paddr_t'(h * 64 * 64);
    automatic paddr_t pa = pbase + paddr_t'(h * 32 * 64);
    for (int i = 0; i < 64; i++) begin outs[n].push_back(rnd_line()); wq[n].push_back(outs[n][i]); end
    xfer(n, OP_WRITE, vc, 32'h0, 64, '0);
    rdbuf[n].delete();
    xfer(n, OP_READ, vc, 32'h0, 64, '0);
    checks++;
    for (int i = 0; i < 64; i++) if (rdbuf[n][i] !== outs[n][i]) begin failures++; $display("FAIL NPU%0d output read-back %0d", n, i); break; end
    xfer(n, OP_STORE, vc, oa, 64, '0);
    checks++;
    for (int i = 0; i < 64; i++) if (u_mem.peek(oa + paddr_t'(i * 64)) !== outs[n][i]) begin failures++; $display("FAIL NPU%0d store %0d", n, i); break; end
    for (int i = 0; i < 32; i++) begin psum[n].push_back(rnd_line()); wq[n].push_back(psum[n][i]); end
    xfer(n, OP_BYP_WRITE, 24'h0, pa, 32, '0);
    checks++;
    for (int i = 0; i < 32; i++) if (u_mem.peek(pa + paddr_t'(i * 64)) !== psum[n][i]) begin failures++; $display("FAIL NPU%0d bypass-write %0d", n, i); break; end
  endtask

  initial begin
    int t0;
    repeat (3) @(negedge clk); rst_n = 1;
    // model m: virtual pages 0 and 1 -> physical pages 128+48m and 153+48m
    // (pcpn = {way, set[10:6]}: way 4 holds pages 128..159, way 15 480..511)
    for (int m = 0; m < 8; m++) begin
      cpt_map(2 * m, 0, 128 + 48 * m);      cpt_map(2 * m + 1, 0, 128 + 48 * m);
      cpt_map(2 * m, 1, 128 + 48 * m + 25); cpt_map(2 * m + 1, 1, 128 + 48 * m + 25);
    end
    t0 = cyc;
    fork
      run_model(0); run_model(1); run_model(2); run_model(3);
      run_model(4); run_model(5); run_model(6); run_model(7);
    join
    $display("  all 8 models: %0d cycles", cyc - t0);
    for (int m = 0; m < 8; m++) $display("  model %0d: %0d cycles", m, model_cycles[m]);
    // isolation and hand-over between the NPUs of a group
    fork
      for (int m = 0; m < 8; m++) begin
        rdbuf[2 * m].delete();
        xfer(2 * m, OP_READ, 24'h0, 32'h0, 128, '0);
        check_buf(2 * m, 128, 32'h1000_0000 + paddr_t'(m) * 32'h0010_0000, "weights still in place");
      end
      for (int m = 0; m < 8; m++) begin
        rdbuf[2 * m + 1].delete();
        xfer(2 * m + 1, OP_BYP_READ, 24'h0, 32'h3000_0000 + paddr_t'(m) * 32'h0010_0000, 64, '0);
        checks++;
        for (int i = 0; i < 64; i++) if (rdbuf[2 * m + 1][i] !== outs[2 * m][i]) begin failures++; $display("FAIL model %0d hand-over %0d", m, i); break; end
      end
    join
    cpu_run = 0;
    repeat (100) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
