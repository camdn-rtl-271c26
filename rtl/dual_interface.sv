// dual_interface: the single request/response port of a shared cache slice,
// made able to carry two kinds of traffic. An incoming request whose kind is
// NORMAL goes to the hardware-managed cache controller, one whose kind is NPU
// to the NPU-exclusive controller; back-pressure comes from whichever side
// the request is going to. Responses from the two sides are merged onto the
// one output, alternating when both are waiting. The split follows the
// paper; the kind field, the valid/ready handshakes and the alternating merge
// are this design's choices. Purely combinational except for the merge turn.
module dual_interface
  import camdn_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  // from the interconnect
  input  logic  in_valid,
  output logic  in_ready,
  input  req_t  in_req,
  // to the interconnect
  output logic  out_valid,
  input  logic  out_ready,
  output resp_t out_resp,
  // cache controller side
  output logic  cc_req_valid,
  input  logic  cc_req_ready,
  output req_t  cc_req,
  input  logic  cc_resp_valid,
  output logic  cc_resp_ready,
  input  resp_t cc_resp,
  // NEC side
  output logic  nec_req_valid,
  input  logic  nec_req_ready,
  output req_t  nec_req,
  input  logic  nec_resp_valid,
  output logic  nec_resp_ready,
  input  resp_t nec_resp
);
  wire to_nec = (in_req.kind == KIND_NPU);

  assign cc_req        = in_req;
  assign nec_req       = in_req;
  assign cc_req_valid  = in_valid && !to_nec;
  assign nec_req_valid = in_valid &&  to_nec;
  assign in_ready      = to_nec ? nec_req_ready : cc_req_ready;

  logic [1:0] gnt;
  logic       gidx;
  rr_arb #(.N(2)) u_merge (
    .clk, .rst_n, .req({nec_resp_valid, cc_resp_valid}), .advance(out_ready),
    .gnt, .gnt_idx(gidx)
  );
  assign out_valid      = |gnt;
  assign out_resp       = gidx ? nec_resp : cc_resp;
  assign cc_resp_ready  = gnt[0] && out_ready;
  assign nec_resp_ready = gnt[1] && out_ready;
endmodule
