// cache_slice: one slice of the shared last-level cache with the NPU-control
// additions. Inside: the dual interface that splits normal and NPU requests,
// the hardware-managed cache controller, the NPU-exclusive controller (NEC),
// the way mask register, the tag array, the data array, a round-robin arbiter
// giving the single data-array port to the controller or the NEC, and a
// memory-port arbiter merging both towards the memory controller.
//
// Way partitioning: the way mask register (bit i = 1: way i is general
// purpose) restricts the cache controller; the remaining ways are the NPU
// subspace, which only the NEC touches, addressed directly by way and set.
// The register resets to WAY_MASK_RST and is rewritten through wm_we.
// Following the paper: the block list, the way mask register and what the
// NEC does. This design's choices: the handshakes, arbitration and reset
// value (ways 0-3 general purpose, 4-15 NPU for the 12-of-16 split).
module cache_slice
  import camdn_pkg::*;
#(
  parameter int unsigned     WAYS         = NUM_WAYS,
  parameter int unsigned     SETS         = NUM_SETS,
  parameter int unsigned     SLICE_W_P    = SLICE_W,
  parameter logic [WAYS-1:0] WAY_MASK_RST = WAYS'(WAY_MASK_DEFAULT)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [SLICE_W_P-1:0]  slice_id,
  // way mask register write
  input  logic                  wm_we,
  input  logic [WAYS-1:0]       wm_wdata,
  output logic [WAYS-1:0]       way_mask,
  // interconnect side
  input  logic                  in_valid,
  output logic                  in_ready,
  input  req_t                  in_req,
  output logic                  out_valid,
  input  logic                  out_ready,
  output resp_t                 out_resp,
  // memory controller side
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output mem_req_t              mem_req,
  input  logic                  mem_resp_valid,
  input  line_t                 mem_resp_data
);
  localparam int unsigned WW    = $clog2(WAYS);
  localparam int unsigned SW    = $clog2(SETS);
  localparam int unsigned TAG_W = PADDR_W - OFF_W - SLICE_W_P - SW;

  // ---- way mask register ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     way_mask <= WAY_MASK_RST;
    else if (wm_we) way_mask <= wm_wdata;
  end

  // ---- dual interface ----
  logic  cc_req_valid, cc_req_ready, cc_resp_valid, cc_resp_ready;
  logic  nec_req_valid, nec_req_ready, nec_resp_valid, nec_resp_ready;
  req_t  cc_req, nec_req;
  resp_t cc_resp, nec_resp;

  dual_interface u_dif (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_req,
    .out_valid, .out_ready, .out_resp,
    .cc_req_valid, .cc_req_ready, .cc_req,
    .cc_resp_valid, .cc_resp_ready, .cc_resp,
    .nec_req_valid, .nec_req_ready, .nec_req,
    .nec_resp_valid, .nec_resp_ready, .nec_resp
  );

  // ---- tag array ----
  logic                     tag_rd_en, tag_wr_en, tag_wr_valid, tag_wr_dirty;
  logic [SW-1:0]            tag_rd_set, tag_wr_set;
  logic [WW-1:0]            tag_wr_way;
  logic [TAG_W-1:0]         tag_wr_tag;
  logic [WAYS-1:0]          tag_rd_valid, tag_rd_dirty;
  logic [WAYS-1:0][TAG_W-1:0] tag_rd_tag;

  tag_array #(.WAYS(WAYS), .SETS(SETS), .TAG_W(TAG_W)) u_tags (
    .clk, .rst_n,
    .rd_en(tag_rd_en), .rd_set(tag_rd_set),
    .rd_valid(tag_rd_valid), .rd_dirty(tag_rd_dirty), .rd_tag(tag_rd_tag),
    .wr_en(tag_wr_en), .wr_set(tag_wr_set), .wr_way(tag_wr_way),
    .wr_valid(tag_wr_valid), .wr_dirty(tag_wr_dirty), .wr_tag(tag_wr_tag)
  );

  // ---- data array and its arbiter (client 0: controller, 1: NEC) ----
  logic [1:0]      da_req, da_we, da_gnt;
  logic [WW-1:0]   da_way [2];
  logic [SW-1:0]   da_set [2];
  line_t           da_wdata [2];
  line_t           da_rdata;
  logic            da_gidx;

  rr_arb #(.N(2)) u_da_arb (
    .clk, .rst_n, .req(da_req), .advance(1'b1), .gnt(da_gnt), .gnt_idx(da_gidx)
  );

  data_array #(.WAYS(WAYS), .SETS(SETS)) u_data (
    .clk, .en(|da_gnt), .we(da_we[da_gidx]), .way(da_way[da_gidx]),
    .set(da_set[da_gidx]), .wdata(da_wdata[da_gidx]), .rdata(da_rdata)
  );

  // ---- memory port arbiter (client 0: controller, 1: NEC) ----
  logic [1:0]     m_req_valid, m_req_ready, m_resp_valid;
  mem_req_t [1:0] m_req;

  mem_port_arb u_mem_arb (
    .clk, .rst_n,
    .c_req_valid(m_req_valid), .c_req_ready(m_req_ready), .c_req(m_req),
    .c_resp_valid(m_resp_valid),
    .m_req_valid(mem_req_valid), .m_req_ready(mem_req_ready), .m_req(mem_req),
    .m_resp_valid(mem_resp_valid)
  );

  // ---- hardware-managed cache controller ----
  cache_ctrl #(.WAYS(WAYS), .SLICE_W_P(SLICE_W_P), .SET_W_P(SW), .TAG_W(TAG_W)) u_cc (
    .clk, .rst_n, .slice_id, .way_mask,
    .req_valid(cc_req_valid), .req_ready(cc_req_ready), .req(cc_req),
    .resp_valid(cc_resp_valid), .resp_ready(cc_resp_ready), .resp(cc_resp),
    .tag_rd_en, .tag_rd_set, .tag_rd_valid, .tag_rd_dirty, .tag_rd_tag,
    .tag_wr_en, .tag_wr_set, .tag_wr_way, .tag_wr_valid, .tag_wr_dirty, .tag_wr_tag,
    .da_req(da_req[0]), .da_we(da_we[0]), .da_way(da_way[0]), .da_set(da_set[0]),
    .da_wdata(da_wdata[0]), .da_gnt(da_gnt[0]), .da_rdata,
    .mem_req_valid(m_req_valid[0]), .mem_req_ready(m_req_ready[0]), .mem_req(m_req[0]),
    .mem_resp_valid(m_resp_valid[0]), .mem_resp_data
  );

  // ---- NPU-exclusive controller ----
  nec #(.SLICE_W_P(SLICE_W_P), .SET_W_P(SW), .WAY_W_P(WW)) u_nec (
    .clk, .rst_n,
    .req_valid(nec_req_valid), .req_ready(nec_req_ready), .req(nec_req),
    .resp_valid(nec_resp_valid), .resp_ready(nec_resp_ready), .resp(nec_resp),
    .da_req(da_req[1]), .da_we(da_we[1]), .da_way(da_way[1]), .da_set(da_set[1]),
    .da_wdata(da_wdata[1]), .da_gnt(da_gnt[1]), .da_rdata,
    .mem_req_valid(m_req_valid[1]), .mem_req_ready(m_req_ready[1]), .mem_req(m_req[1]),
    .mem_resp_valid(m_resp_valid[1]), .mem_resp_data
  );
endmodule
