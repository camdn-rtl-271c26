// tb_camdn_top: end-to-end run of a reduced system: 4 NPUs, 2 CPU ports, 2
// slices of 4 ways x 16 sets (8 KB), way 0 general purpose and ways 1-3 the
// NPU subspace at reset, 1 KB cache pages (so pcpn = {way, set[3]} and the
// NPU subspace holds pages 2..7), one shared memory behind the slices.
// Two "models" share the NPU subspace: model A on NPUs 0 and 1 (a multicast
// group) owns pages 2 and 3, model B on NPU 2 owns pages 4 and 5; NPU 3 runs
// bypass traffic. While both CPU ports hammer the general-purpose way with
// random reads and writes (checked against a reference of memory), the NPUs
// run every semantic: LOAD, MC_READ to the group, WRITE/READ, STORE then
// BYP_READ of what was stored, BYP_WRITE then MC_BYP_READ, a transfer
// through an unmapped page, and, after model A releases its pages, a way-mask
// switch that gives way 1 back to the CPUs. Memory back-pressure is applied
// for a while. Each mechanism is counted and must occur at least once.
module tb_camdn_top;
  import camdn_pkg::*;
  import tb_pkg::*;
  localparam int NN = 4, NC = 2, NS = 2, W = 4, S = 16, ENT = 8, PGW = 10;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wm_we = 0; logic [W-1:0] wm_wdata = '0;
  logic [NN-1:0] npu_desc_valid = '0, npu_desc_ready, npu_done, npu_fault;
  dma_desc_t npu_desc [NN];
  logic [NN-1:0] npu_cpt_wr_en = '0, npu_cpt_wr_valid = '0;
  logic [2:0] npu_cpt_wr_vcpn [NN], npu_cpt_wr_pcpn [NN];
  logic [NN-1:0] npu_wdata_valid = '0, npu_wdata_ready;
  line_t npu_wdata [NN];
  logic [NN-1:0] npu_rd_valid; logic [TAGF_W-1:0] npu_rd_tag [NN]; line_t npu_rd_data [NN];
  logic [NC-1:0] cpu_req_valid = '0, cpu_req_ready, cpu_resp_valid;
  req_t cpu_req [NC]; resp_t cpu_resp [NC];
  logic [NS-1:0] mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t mem_req [NS]; line_t mem_resp_data [NS];

  camdn_top #(.N_NPUS(NN), .N_CPUS(NC), .N_SLICES(NS), .WAYS(W), .SETS(S), .CPT_ENT(ENT),
              .PGOFF_W_P(PGW), .WAY_MASK_RST(4'b0001)) dut (.*);
  mem_multi #(.NP(NS)) u_mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
                              .req(mem_req), .resp_valid(mem_resp_valid), .resp_data(mem_resp_data));

  // ---- mechanism counters ----
  int n_op [op_e];
  int n_mcast_fanout = 0, n_fault = 0, n_mask_switch = 0, n_xbar_stall = 0, n_mem_stall = 0;
  int n_cpu_hit = 0, n_cpu_miss = 0, n_writeback = 0, n_da_conflict = 0;

  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < NS; s++) begin
      if (dut.s_req_valid[s] && dut.s_req_ready[s] && dut.s_req[s].kind == KIND_NPU)
        n_op[dut.s_req[s].op]++;
      if (dut.s_resp_valid[s] && dut.s_resp_ready[s] && $countones(dut.s_resp[s].dst) > 1)
        n_mcast_fanout++;
    end
    if ((dut.m_req_valid & ~dut.m_req_ready) != '0) n_xbar_stall++;
    if (mem_req_valid != '0 && mem_req_ready == '0) n_mem_stall++;
  end
  // controller-side memory traffic: reads are misses, writes are write-backs
  for (genvar s = 0; s < NS; s++) begin : g_mon
    wire       cc_mem = dut.g_slice[s].u_slice.m_req_valid[0] && dut.g_slice[s].u_slice.m_req_ready[0];
    wire       cc_we  = dut.g_slice[s].u_slice.m_req[0].we;
    wire [1:0] da_req = dut.g_slice[s].u_slice.da_req;
    always @(posedge clk) if (rst_n) begin
      if (cc_mem && !cc_we) n_cpu_miss++;
      if (cc_mem &&  cc_we) n_writeback++;
      if (da_req == 2'b11)  n_da_conflict++;
    end
  end
  always @(posedge clk) if (rst_n) n_cpu_hit += $countones(cpu_resp_valid);

  // ---- NPU side ----
  line_t rdbuf [NN][int];
  line_t wq [NN][$];
  for (genvar n = 0; n < NN; n++) begin : g_rd
    always @(posedge clk) if (rst_n && npu_rd_valid[n]) rdbuf[n][int'(npu_rd_tag[n])] = npu_rd_data[n];
  end

  task automatic cpt_map(int n, int v, bit val, int p);
    @(negedge clk);
    npu_cpt_wr_en[n] = 1; npu_cpt_wr_vcpn[n] = 3'(v); npu_cpt_wr_valid[n] = val; npu_cpt_wr_pcpn[n] = 3'(p);
    @(negedge clk);
    npu_cpt_wr_en[n] = 0;
  endtask

  // one DMA transfer on NPU n; write data is taken from wq[n]
  task automatic xfer(int n, op_e op, caddr_t vc, paddr_t pa, int nl, mmask_t mc, bit want_fault = 0);
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
        while (!npu_done[n] && t < 20000) begin @(posedge clk); t++; end
      end
    join
    checks++;
    if (t >= 20000 || npu_fault[n] != want_fault) begin
      failures++; $display("FAIL NPU%0d %s: t=%0d fault=%0b", n, op.name(), t, npu_fault[n]);
    end
    if (npu_fault[n]) n_fault++;
  endtask

  task automatic expect_rd(int n, int nl, paddr_t pa, string what);
    checks++;
    for (int i = 0; i < nl; i++) begin
      if (!rdbuf[n].exists(i) || rdbuf[n][i] !== u_mem.peek(pa + paddr_t'(i * 64))) begin
        failures++; $display("FAIL %s: NPU%0d line %0d", what, n, i); break;
      end
    end
  endtask

  // ---- CPU side ----
  line_t cref [paddr_t];
  bit    cpu_run = 1;
  for (genvar c = 0; c < NC; c++) begin : g_cpu
    initial begin
      cpu_req[c] = '0;
      @(posedge rst_n);
      for (int i = 0; cpu_run; i++) begin
        automatic req_t r = '0;
        automatic line_t expv;
        automatic int t = 0;
        // CPU c owns tags c*8 .. c*8+7 in region 0x0008_0000+, all sets of both slices
        r.kind = KIND_NORMAL; r.op = $urandom_range(1) ? OP_CPU_WR : OP_CPU_RD;
        r.paddr = 32'h0008_0000 | paddr_t'({4'(c * 8 + $urandom_range(7)), 4'($urandom), 1'($urandom), 6'b0});
        r.data = rnd_line(); r.tag = 16'(i);
        expv = cref.exists(r.paddr) ? cref[r.paddr] : pat(r.paddr);
        if (r.op == OP_CPU_WR) cref[r.paddr] = r.data;
        @(negedge clk); cpu_req_valid[c] = 1; cpu_req[c] = r;
        do @(posedge clk); while (!cpu_req_ready[c]);
        @(negedge clk); cpu_req_valid[c] = 0;
        while (!cpu_resp_valid[c] && t < 5000) begin @(negedge clk); t++; end
        checks++;
        if (t >= 5000 || cpu_resp[c].tag != r.tag || cpu_resp[c].dst != mmask_t'(1 << (NN + c)) ||
            (r.op == OP_CPU_RD && cpu_resp[c].data !== expv)) begin
          failures++; $display("FAIL CPU%0d %s %h", c, r.op.name(), r.paddr);
        end
      end
    end
  end

  initial begin
    line_t bw [$];
    repeat (3) @(negedge clk); rst_n = 1;
    // runtime: model A (NPU0, NPU1) gets pages 2,3; model B (NPU2) pages 4,5
    for (int n = 0; n < 2; n++) begin cpt_map(n, 0, 1, 2); cpt_map(n, 1, 1, 3); end
    cpt_map(2, 0, 1, 4); cpt_map(2, 1, 1, 5);

    fork
      begin  // model A: load weights into the cache, multicast them to both NPUs
        xfer(0, OP_LOAD, 24'h0, 32'h0010_0000, 32, '0);
        rdbuf[0].delete(); rdbuf[1].delete();
        xfer(0, OP_MC_READ, 24'h0, 32'h0010_0000, 32, 32'h3);
        expect_rd(0, 32, 32'h0010_0000, "multicast-read A");
        expect_rd(1, 32, 32'h0010_0000, "multicast-read peer");
      end
      begin  // model B: write, read back, store to memory
        for (int i = 0; i < 32; i++) begin bw.push_back(rnd_line()); wq[2].push_back(bw[i]); end
        xfer(2, OP_WRITE, 24'h0, 32'h0, 32, '0);
        rdbuf[2].delete();
        xfer(2, OP_READ, 24'h0, 32'h0, 32, '0);
        checks++;
        for (int i = 0; i < 32; i++) if (rdbuf[2][i] !== bw[i]) begin failures++; $display("FAIL B read %0d", i); break; end
        xfer(2, OP_STORE, 24'h0, 32'h0020_0000, 32, '0);
        checks++;
        for (int i = 0; i < 32; i++) if (u_mem.peek(32'h0020_0000 + paddr_t'(i * 64)) !== bw[i]) begin
          failures++; $display("FAIL B store %0d", i); break;
        end
      end
      begin  // NPU3: bypass traffic, with a spell of memory back-pressure
        repeat (40) @(negedge clk);
        u_mem.stall = 1; repeat (30) @(negedge clk); u_mem.stall = 0;
        for (int i = 0; i < 16; i++) wq[3].push_back(rnd_line());
        xfer(3, OP_BYP_WRITE, 24'h0, 32'h0030_0000, 16, '0);
        rdbuf[3].delete();
        xfer(3, OP_BYP_READ, 24'h0, 32'h0030_0000, 16, '0);
        expect_rd(3, 16, 32'h0030_0000, "bypass-read");
      end
    join
    // what B stored, read around the cache by NPU3
    rdbuf[3].delete();
    xfer(3, OP_BYP_READ, 24'h0, 32'h0020_0000, 32, '0);
    expect_rd(3, 32, 32'h0020_0000, "bypass-read of stored lines");
    // multicast-bypass-read of NPU3's lines to group A
    rdbuf[0].delete(); rdbuf[1].delete();
    xfer(1, OP_MC_BYP_READ, 24'h0, 32'h0030_0000, 16, 32'h1);
    expect_rd(0, 16, 32'h0030_0000, "multicast-bypass-read");
    expect_rd(1, 16, 32'h0030_0000, "multicast-bypass-read issuer");
    // unmapped page: NPU3 has no pages
    xfer(3, OP_READ, 24'h0, 32'h0, 4, '0, 1);
    // model A finishes and releases pages 2,3 (way 1); way 1 goes to the CPUs
    for (int n = 0; n < 2; n++) begin cpt_map(n, 0, 0, 0); cpt_map(n, 1, 0, 0); end
    @(negedge clk); wm_we = 1; wm_wdata = 4'b0011; @(negedge clk); wm_we = 0;
    n_mask_switch++;
    checks++;
    if (dut.g_slice[0].way_mask !== 4'b0011 || dut.g_slice[1].way_mask !== 4'b0011) begin
      failures++; $display("FAIL way mask switch");
    end
    // model B keeps working in way 2 while the CPUs now use ways 0-1
    rdbuf[2].delete();
    xfer(2, OP_READ, 24'h0, 32'h0, 32, '0);
    checks++;
    for (int i = 0; i < 32; i++) if (rdbuf[2][i] !== bw[i]) begin failures++; $display("FAIL B after switch %0d", i); break; end
    repeat (1500) @(negedge clk);
    cpu_run = 0;
    repeat (200) @(negedge clk);

    // ---- every mechanism must have happened ----
    begin
      automatic op_e ops [8] = '{OP_READ, OP_WRITE, OP_LOAD, OP_STORE, OP_BYP_READ,
                                 OP_BYP_WRITE, OP_MC_READ, OP_MC_BYP_READ};
      foreach (ops[i]) begin
        checks++;
        if (!n_op.exists(ops[i]) || n_op[ops[i]] == 0) begin failures++; $display("FAIL never saw %s", ops[i].name()); end
        else $display("  %-15s %0d lines", ops[i].name(), n_op[ops[i]]);
      end
    end
    $display("  multicast fan-outs %0d, page faults %0d, way-mask switches %0d", n_mcast_fanout, n_fault, n_mask_switch);
    n_cpu_hit -= n_cpu_miss;
    $display("  CPU hits %0d misses %0d write-backs %0d", n_cpu_hit, n_cpu_miss, n_writeback);
    $display("  crossbar stall cycles %0d, memory stall cycles %0d, data-array conflicts %0d",
             n_xbar_stall, n_mem_stall, n_da_conflict);
    checks++;
    if (n_mcast_fanout == 0 || n_fault == 0 || n_mask_switch == 0 || n_cpu_hit == 0 || n_cpu_miss == 0 ||
        n_writeback == 0 || n_xbar_stall == 0 || n_mem_stall == 0 || n_da_conflict == 0) begin
      failures++; $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
