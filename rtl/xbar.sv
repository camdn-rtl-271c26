// xbar: interconnect between the cores (NPU DMAs and CPU ports, the
// "masters") and the shared cache slices. A request goes to the slice named
// by the slice-index bits of its address: the physical cache address for NPU
// requests into the cache, the memory address for normal requests and for
// bypass requests, which carry no cache address. Each slice picks among the
// masters aiming at it round-robin. A response goes to every master whose bit
// is set in its destination mask, so a multicast read crosses the slice port
// once and fans out here; the slice is released once every destination has
// taken it. Masters always accept responses. Each master picks among the
// slices offering it a response round-robin.
// The paper names the interconnect only; single-stage crossbar, routing and
// arbitration are this design's choices. Requests and responses pass through
// combinationally (no added latency).
module xbar
  import camdn_pkg::*;
#(
  parameter int unsigned N_M       = NUM_NPUS + NUM_CPUS,
  parameter int unsigned N_S       = NUM_SLICES,
  parameter int unsigned OFF_W_P   = OFF_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N_M-1:0]   m_req_valid,
  output logic [N_M-1:0]   m_req_ready,
  input  req_t             m_req [N_M],
  output logic [N_M-1:0]   m_resp_valid,
  output resp_t            m_resp [N_M],
  output logic [N_S-1:0]   s_req_valid,
  input  logic [N_S-1:0]   s_req_ready,
  output req_t             s_req [N_S],
  input  logic [N_S-1:0]   s_resp_valid,
  output logic [N_S-1:0]   s_resp_ready,
  input  resp_t            s_resp [N_S]
);
  localparam int unsigned SW = $clog2(N_S);
  localparam int unsigned MW = $clog2(N_M);

  // ---- request routing ----
  logic [SW-1:0]  tgt [N_M];
  logic [N_M-1:0] want [N_S];
  logic [N_M-1:0] sgnt [N_S];
  logic [MW-1:0]  sidx [N_S];

  always_comb begin
    for (int m = 0; m < N_M; m++) begin
      if (m_req[m].kind == KIND_NPU && !is_bypass(m_req[m].op))
        tgt[m] = m_req[m].pcaddr[OFF_W_P +: SW];
      else
        tgt[m] = m_req[m].paddr[OFF_W_P +: SW];
    end
    for (int s = 0; s < N_S; s++)
      for (int m = 0; m < N_M; m++)
        want[s][m] = m_req_valid[m] && (tgt[m] == SW'(s));
  end

  for (genvar s = 0; s < N_S; s++) begin : g_req
    rr_arb #(.N(N_M)) u_arb (
      .clk, .rst_n, .req(want[s]), .advance(s_req_ready[s]),
      .gnt(sgnt[s]), .gnt_idx(sidx[s])
    );
    assign s_req_valid[s] = |sgnt[s];
    assign s_req[s]       = m_req[sidx[s]];
  end

  always_comb begin
    for (int m = 0; m < N_M; m++)
      m_req_ready[m] = sgnt[tgt[m]][m] && s_req_ready[tgt[m]];
  end

  // ---- response delivery ----
  logic [N_M-1:0] delivered [N_S];
  logic [N_S-1:0] offer [N_M];
  logic [N_S-1:0] mgnt  [N_M];
  logic [SW-1:0]  midx  [N_M];
  logic [N_M-1:0] take  [N_S];

  always_comb begin
    for (int m = 0; m < N_M; m++)
      for (int s = 0; s < N_S; s++)
        offer[m][s] = s_resp_valid[s] && s_resp[s].dst[m] && !delivered[s][m];
    for (int s = 0; s < N_S; s++) begin
      for (int m = 0; m < N_M; m++) take[s][m] = mgnt[m][s];
      s_resp_ready[s] = ((delivered[s] | take[s]) & s_resp[s].dst[N_M-1:0])
                        == s_resp[s].dst[N_M-1:0];
    end
  end

  for (genvar m = 0; m < N_M; m++) begin : g_resp
    rr_arb #(.N(N_S)) u_arb (
      .clk, .rst_n, .req(offer[m]), .advance(1'b1),
      .gnt(mgnt[m]), .gnt_idx(midx[m])
    );
    assign m_resp_valid[m] = |mgnt[m];
    assign m_resp[m]       = s_resp[midx[m]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < N_S; s++) delivered[s] <= '0;
    end else begin
      for (int s = 0; s < N_S; s++) begin
        if (s_resp_valid[s] && s_resp_ready[s]) delivered[s] <= '0;
        else                                    delivered[s] <= delivered[s] | take[s];
      end
    end
  end
endmodule
