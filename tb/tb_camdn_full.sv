// tb_camdn_full: the system at its default size (16 NPUs, 2 CPU ports, 8
// slices, 16 ways x 2048 sets of 64-byte lines = 16 MB, ways 4-15 the NPU
// subspace, 32 KB pages, 512-entry CPTs) taken through one complete
// operation of a model running on a group of four NPUs: the runtime maps two
// 32 KB pages into the group's CPTs; NPU 0 loads one page of weights from
// memory into the cache and multicasts it to all four NPUs; NPU 5, a second
// model with its own page, writes and reads back 64 lines and stores them;
// NPU 9 reads the stored lines around the cache; meanwhile a CPU port runs
// line reads and writes through the general-purpose ways. All data is
// checked against the memory model and the written values.
module tb_camdn_full;
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

  initial begin
    line_t bw [$];
    repeat (3) @(negedge clk); rst_n = 1;
    // pcpn = {way, set[10:6]}: way 4 holds pages 128..159
    for (int n = 0; n < 4; n++) cpt_map(n, 0, 128);
    cpt_map(5, 0, 200);
    fork
      begin
        xfer(0, OP_LOAD, 24'h0, 32'h0100_0000, 512, '0);
        xfer(0, OP_MC_READ, 24'h0, 32'h0100_0000, 512, 32'hF);
        for (int n = 0; n < 4; n++) expect_mem(n, 512, 32'h0100_0000, "multicast-read");
      end
      begin
        for (int i = 0; i < 64; i++) begin bw.push_back(rnd_line()); wq[5].push_back(bw[i]); end
        xfer(5, OP_WRITE, 24'h0, 32'h0, 64, '0);
        xfer(5, OP_READ, 24'h0, 32'h0, 64, '0);
        checks++;
        for (int i = 0; i < 64; i++) if (rdbuf[5][i] !== bw[i]) begin failures++; $display("FAIL read-back %0d", i); break; end
        xfer(5, OP_STORE, 24'h0, 32'h0200_0000, 64, '0);
        xfer(9, OP_BYP_READ, 24'h0, 32'h0200_0000, 64, '0);
        checks++;
        for (int i = 0; i < 64; i++) if (rdbuf[9][i] !== bw[i]) begin failures++; $display("FAIL bypass-read %0d", i); break; end
      end
    join
    cpu_run = 0;
    repeat (100) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
