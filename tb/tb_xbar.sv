// tb_xbar: a 4-master, 2-slice crossbar. Every master streams random requests
// (normal, NPU-to-cache and bypass); each must arrive exactly once, unchanged,
// at the slice its address selects: pcaddr slice bits for NPU cache
// requests, paddr slice bits otherwise. Each slice answers every request with
// a response whose destination mask is random (multicast included, with
// random slice back-pressure); every master in the mask must receive it
// exactly once and no other master may.
module tb_xbar;
  import camdn_pkg::*;
  import tb_pkg::*;
  localparam int NM = 4, NS = 2, NREQ = 150;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NM-1:0] m_req_valid, m_req_ready, m_resp_valid;
  req_t m_req [NM]; resp_t m_resp [NM];
  logic [NS-1:0] s_req_valid, s_req_ready = '0, s_resp_valid, s_resp_ready;
  req_t s_req [NS]; resp_t s_resp [NS];

  xbar #(.N_M(NM), .N_S(NS)) dut (.*);

  int     sent_to [int];     // request tag -> slice expected
  mmask_t pending [int];     // response tag -> masters still to receive it
  int     seen = 0, delivered = 0, mcast_seen = 0;
  req_t   sq [NS][$];        // requests each slice has to answer

  for (genvar m = 0; m < NM; m++) begin : g_m
    req_t  cur = '0;
    logic  v = 1'b0;
    assign m_req[m] = cur;
    assign m_req_valid[m] = v;
    initial begin
      repeat (3) @(negedge clk);
      for (int i = 0; i < NREQ; i++) begin
        automatic req_t r = '0;
        r.kind = kind_e'($urandom_range(1)); r.op = op_e'($urandom_range(9));
        r.src = src_t'(m); r.paddr = $urandom; r.pcaddr = 24'($urandom);
        r.tag = 16'(m * 1000 + i); r.data = rnd_line();
        sent_to[int'(r.tag)] = (r.kind == KIND_NPU && !is_bypass(r.op)) ? int'(r.pcaddr[6]) : int'(r.paddr[6]);
        @(negedge clk); v = 1; cur = r;
        do @(posedge clk); while (!m_req_ready[m]);
        @(negedge clk); v = 0;
      end
    end
    always @(posedge clk) if (rst_n && m_resp_valid[m]) begin
      automatic int t = int'(m_resp[m].tag);
      checks++; delivered++;
      if (!pending.exists(t) || !pending[t][m]) begin failures++; $display("FAIL master %0d got tag %0d", m, t); end
      else pending[t][m] = 1'b0;
    end
  end

  for (genvar s = 0; s < NS; s++) begin : g_s
    resp_t rcur = '0;
    logic  rv = 1'b0;
    assign s_resp[s] = rcur;
    assign s_resp_valid[s] = rv;
    always @(posedge clk) if (rst_n) begin
      if (s_req_valid[s] && s_req_ready[s]) begin
        automatic int t = int'(s_req[s].tag);
        checks++; seen++;
        if (!sent_to.exists(t) || sent_to[t] != s) begin failures++; $display("FAIL tag %0d at slice %0d t=%0t v=%b src=%0d mt=%0d %0d", t, s, $time, m_req_valid, s_req[s].src, m_req[0].tag, m_req[1].tag); end
        else sent_to.delete(t);
        sq[s].push_back(s_req[s]);
      end
    end
    always @(negedge clk) s_req_ready[s] <= ($urandom_range(2) != 0);
    initial begin
      forever begin
        @(negedge clk);
        if (sq[s].size() != 0) begin
          automatic req_t r = sq[s].pop_front();
          automatic resp_t p = '0;
          p.dst = mmask_t'($urandom_range(1, 15));
          if ($countones(p.dst) > 1) mcast_seen++;
          p.tag = r.tag; p.src = r.src; p.data = r.data;
          pending[int'(r.tag)] = p.dst;
          rv = 1; rcur = p;
          do @(posedge clk); while (!s_resp_ready[s]);
          @(negedge clk); rv = 0;
        end
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    wait (seen == NM * NREQ);
    repeat (200) @(negedge clk);
    checks++;
    foreach (pending[t]) if (pending[t] != '0) begin failures++; $display("FAIL tag %0d undelivered %b", t, pending[t]); end
    if (sent_to.size() != 0 || mcast_seen == 0) begin failures++; $display("FAIL %0d requests lost", sent_to.size()); end
    $display("delivered %0d responses (%0d multicast)", delivered, mcast_seen);
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
