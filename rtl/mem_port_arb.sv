// mem_port_arb: shares a slice's one memory-controller port between the
// hardware-managed cache controller (client 0) and the NPU-exclusive
// controller (client 1), the mux the paper's slice figure places in front of
// "to mem ctrl". Requests are chosen round-robin; for every read that leaves,
// the client number goes into a small queue, and since the memory answers
// reads in order, the head of that queue says whose read each response is.
// Arbitration policy and queue depth are this design's choices.
module mem_port_arb
  import camdn_pkg::*;
#(
  parameter int unsigned MAX_OUTSTANDING = 4
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [1:0]     c_req_valid,
  output logic [1:0]     c_req_ready,
  input  mem_req_t [1:0] c_req,
  output logic [1:0]     c_resp_valid,
  output logic           m_req_valid,
  input  logic           m_req_ready,
  output mem_req_t       m_req,
  input  logic           m_resp_valid
);
  logic [1:0] gnt;
  logic       gidx;
  logic       oq_in_ready, oq_valid, oq_head;

  rr_arb #(.N(2)) u_arb (
    .clk, .rst_n, .req(c_req_valid), .advance(m_req_ready && oq_in_ready),
    .gnt, .gnt_idx(gidx)
  );

  wire  is_rd = !c_req[gidx].we;
  assign m_req_valid = |gnt && (oq_in_ready || !is_rd);
  assign m_req       = c_req[gidx];
  assign c_req_ready = gnt & {2{m_req_ready && (oq_in_ready || !is_rd)}};

  fifo #(.T(logic), .DEPTH(MAX_OUTSTANDING)) u_order (
    .clk, .rst_n,
    .in_valid(m_req_valid && m_req_ready && is_rd), .in_ready(oq_in_ready), .in_data(gidx),
    .out_valid(oq_valid), .out_ready(m_resp_valid), .out_data(oq_head)
  );

  assign c_resp_valid[0] = m_resp_valid && oq_valid && !oq_head;
  assign c_resp_valid[1] = m_resp_valid && oq_valid &&  oq_head;
endmodule
