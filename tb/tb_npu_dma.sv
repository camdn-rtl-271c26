// tb_npu_dma: one NPU DMA (master 3) with an 8-entry CPT and 1 KB pages,
// connected to a model of the interconnect that answers requests after a
// random delay and out of order. Checks, against a reference page table:
// each request's pcaddr = {pcpn, page offset}, memory address, line tag,
// opcode, multicast group and write data; read data handed to the
// scratchpad side under the right line number; completion (done) only after
// every line was answered; fault and skipped lines for an unmapped page;
// bypass requests issued without a mapping; a multicast response issued by
// another NPU delivered to rd_* without counting as our own; and the issue
// rate of one line every two cycles.
module tb_npu_dma;
  import camdn_pkg::*;
  import tb_pkg::*;
  localparam int ID = 3, ENT = 8, PW = 3, PGW = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic desc_valid = 0, desc_ready, done, fault;
  dma_desc_t desc = '0;
  logic cpt_wr_en = 0, cpt_wr_valid = 0; logic [2:0] cpt_wr_vcpn = 0, cpt_wr_pcpn = 0;
  logic wdata_valid = 0, wdata_ready; line_t wdata = '0;
  logic rd_valid; logic [TAGF_W-1:0] rd_tag; line_t rd_data;
  logic req_valid, req_ready = 1, resp_valid = 0;
  req_t req; resp_t resp = '0;

  npu_dma #(.MASTER_ID(ID), .CPT_ENT(ENT), .PCPN_W(PW), .PGOFF_W_P(PGW)) dut (.*);

  bit       pv [ENT];
  bit [2:0] pp [ENT];
  dma_desc_t cur;
  line_t    wlines [$];
  req_t     inflight [$];
  bit       got [int];
  int       nreq, first_t, last_t, cyc = 0;
  bit       random_ready = 1;

  always @(posedge clk) cyc++;

  function automatic line_t resp_line(req_t r);
    return is_bypass(r.op) ? pat(r.paddr) : pat(paddr_t'(r.pcaddr) | 32'h8000_0000);
  endfunction

  // interconnect model: check and collect requests
  always @(posedge clk) if (rst_n && req_valid && req_ready) begin
    automatic int i = int'(req.tag);
    automatic caddr_t vc = cur.vcaddr + caddr_t'(i * 64);
    automatic int vp = int'(vc[PGW +: PW]);
    checks++;
    if (nreq == 0) first_t = cyc;
    last_t = cyc; nreq++;
    if (req.op != cur.op || req.kind != KIND_NPU || req.src != ID ||
        req.paddr != cur.paddr + paddr_t'(i * 64) ||
        (!is_bypass(cur.op) && (!pv[vp] || req.pcaddr != caddr_t'({pp[vp], vc[PGW-1:0]}))) ||
        req.mcast != (is_multicast(cur.op) ? (cur.mcast | mmask_t'(1 << ID)) : mmask_t'(1 << ID)) ||
        (carries_data(cur.op) && req.data !== wlines[i])) begin
      failures++; $display("FAIL request line %0d pcaddr %h", i, req.pcaddr);
    end
    inflight.push_back(req);
  end
  always @(negedge clk) req_ready <= random_ready ? ($urandom_range(3) != 0) : 1'b1;

  // answers, out of order
  initial forever begin
    @(negedge clk);
    resp_valid = 0;
    if (inflight.size() != 0 && $urandom_range(2) == 0) begin
      automatic int k = $urandom_range(inflight.size() - 1);
      automatic req_t r = inflight[k];
      inflight.delete(k);
      resp = '0;
      resp.dst = r.mcast; resp.src = r.src; resp.op = r.op; resp.tag = r.tag;
      resp.data = returns_data(r.op) ? resp_line(r) : '0;
      resp_valid = 1;
    end
  end

  // read data to the scratchpad
  always @(posedge clk) if (rst_n && rd_valid && resp.src == ID) begin
    checks++;
    got[int'(rd_tag)] = 1;
    if (rd_data !== resp.data) begin failures++; $display("FAIL rd data line %0d", rd_tag); end
  end

  task automatic cpt_write(int v, bit val, int p);
    @(negedge clk); cpt_wr_en = 1; cpt_wr_vcpn = 3'(v); cpt_wr_valid = val; cpt_wr_pcpn = 3'(p);
    @(negedge clk); cpt_wr_en = 0; pv[v] = val; pp[v] = 3'(p);
  endtask

  // run one transfer; expect_lines = lines that should be issued
  task automatic run(op_e op, caddr_t vc, paddr_t pa, int n, mmask_t mc, int expect_lines, bit expect_fault);
    int t;
    cur = '0; cur.op = op; cur.vcaddr = vc; cur.paddr = pa; cur.nlines = 16'(n); cur.mcast = mc;
    wlines.delete(); got.delete(); nreq = 0;
    for (int i = 0; i < n; i++) wlines.push_back(rnd_line());
    @(negedge clk); desc_valid = 1; desc = cur;
    @(negedge clk); desc_valid = 0;
    // write data: present line k until taken
    fork
      begin
        for (int k = 0; k < n && carries_data(op); k++) begin
          wdata_valid = 1; wdata = wlines[k];
          do @(posedge clk); while (!wdata_ready);
          @(negedge clk);
        end
        wdata_valid = 0;
      end
    join_none
    t = 0;
    while (!done && t < 2000) begin @(posedge clk); t++; end
    #1;
    checks++;
    if (t >= 2000 || nreq != expect_lines || fault != expect_fault || inflight.size() != 0) begin
      failures++; $display("FAIL transfer %s: issued %0d/%0d fault %0b", op.name(), nreq, expect_lines, fault);
    end
    if (returns_data(op)) begin
      checks++;
      if (got.size() != expect_lines) begin failures++; $display("FAIL %0d lines returned", got.size()); end
    end
    disable fork;
    wdata_valid = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    // the paper's example table: vcpn 0,1,2,3 -> pcpn 2,3,7,8 (8 wraps to 0 in a 3-bit table)
    cpt_write(0, 1, 2); cpt_write(1, 1, 3); cpt_write(2, 1, 7); cpt_write(3, 1, 8 % ENT);
    // 40 lines = 2.5 pages from vcaddr 0x100 crossing page boundaries
    run(OP_WRITE,  24'h000100, 32'h0010_0000, 40, '0, 40, 0);
    run(OP_READ,   24'h000100, 32'h0010_0000, 40, '0, 40, 0);
    run(OP_LOAD,   24'h000400, 32'h0020_0000, 16, '0, 16, 0);
    run(OP_STORE,  24'h000800, 32'h0030_0000, 16, '0, 16, 0);
    run(OP_MC_READ, 24'h000000, 32'h0, 8, 32'h0000_0006, 8, 0);
    // bypass: no mapping needed (vcpn 6 unmapped)
    run(OP_BYP_READ,  24'h001800, 32'h0040_0000, 8, '0, 8, 0);
    run(OP_BYP_WRITE, 24'h001800, 32'h0050_0000, 8, '0, 8, 0);
    run(OP_MC_BYP_READ, 24'h001800, 32'h0060_0000, 8, 32'h0000_00F0, 8, 0);
    // pages 3,4,5: only vcpn 3 mapped -> 32 of 48 lines skipped
    run(OP_READ, 24'h000C00, 32'h0, 48, '0, 16, 1);
    cpt_write(4, 1, 5);
    cpt_write(1, 0, 0);
    run(OP_WRITE, 24'h000400, 32'h0, 32, '0, 16, 1);
    // a foreign multicast response reaches rd_* but is not ours
    @(negedge clk);
    resp = '0; resp.dst = mmask_t'(1 << ID) | 1; resp.src = 5'd0; resp.op = OP_MC_READ; resp.tag = 16'd77;
    resp.data = rnd_line(); resp_valid = 1;
    #1; checks++;
    if (!rd_valid || rd_tag != 77) begin failures++; $display("FAIL foreign multicast not delivered"); end
    @(negedge clk); resp_valid = 0;
    // issue rate with an always-ready interconnect: one line per 2 cycles
    random_ready = 0;
    repeat (2) @(negedge clk);
    run(OP_READ, 24'h000000, 32'h0, 16, '0, 16, 0);
    checks++;
    if (last_t - first_t != 2 * 15) begin failures++; $display("FAIL rate: 16 lines over %0d cycles", last_t - first_t); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
