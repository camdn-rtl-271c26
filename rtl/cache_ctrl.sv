// cache_ctrl: the hardware-managed controller of one shared cache slice,
// serving normal (CPU) line requests from the general-purpose subspace.
// The way mask register (bit i = 1: way i is general purpose) confines it:
// masked ways never hit and are never chosen as victims, so CPU traffic and
// the NPU subspace cannot evict each other. That confinement is the paper's
// way partitioning; the rest of the controller is this design's simplest
// choice, since the paper only names it: one request at a time, whole-line
// reads and writes, write-back with write-allocate (a full-line write needs
// no fill), victim = first invalid allowed way, else round-robin over the
// allowed ways. With no allowed way at all, requests go straight to memory.
//
// Timing when the data array is free, counted in clock edges from the edge
// that accepts the request to the one after which the response is valid:
// read hit 3 (compare, data read, data return), write hit 2; a miss adds the
// memory read and, for a dirty victim, a write-back.
module cache_ctrl
  import camdn_pkg::*;
#(
  parameter int unsigned WAYS      = NUM_WAYS,
  parameter int unsigned OFF_W_P   = OFF_W,
  parameter int unsigned SLICE_W_P = SLICE_W,
  parameter int unsigned SET_W_P   = SET_W,
  parameter int unsigned TAG_W     = PADDR_W - OFF_W_P - SLICE_W_P - SET_W_P
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [SLICE_W_P-1:0]      slice_id,
  input  logic [WAYS-1:0]           way_mask,
  // normal requests from the dual interface
  input  logic                      req_valid,
  output logic                      req_ready,
  input  req_t                      req,
  output logic                      resp_valid,
  input  logic                      resp_ready,
  output resp_t                     resp,
  // tag array
  output logic                      tag_rd_en,
  output logic [SET_W_P-1:0]        tag_rd_set,
  input  logic [WAYS-1:0]           tag_rd_valid,
  input  logic [WAYS-1:0]           tag_rd_dirty,
  input  logic [WAYS-1:0][TAG_W-1:0] tag_rd_tag,
  output logic                      tag_wr_en,
  output logic [SET_W_P-1:0]        tag_wr_set,
  output logic [$clog2(WAYS)-1:0]   tag_wr_way,
  output logic                      tag_wr_valid,
  output logic                      tag_wr_dirty,
  output logic [TAG_W-1:0]          tag_wr_tag,
  // data array (via the slice's arbiter)
  output logic                      da_req,
  output logic                      da_we,
  output logic [$clog2(WAYS)-1:0]   da_way,
  output logic [SET_W_P-1:0]        da_set,
  output line_t                     da_wdata,
  input  logic                      da_gnt,
  input  line_t                     da_rdata,
  // memory
  output logic                      mem_req_valid,
  input  logic                      mem_req_ready,
  output mem_req_t                  mem_req,
  input  logic                      mem_resp_valid,
  input  line_t                     mem_resp_data
);
  localparam int unsigned WW = $clog2(WAYS);

  typedef enum logic [3:0] {
    S_IDLE, S_LOOKUP, S_DA_RD, S_DA_RDW, S_DA_WR, S_WB_RD, S_WB_RDW, S_WB_MEM,
    S_FILL_RD, S_FILL_WAIT, S_FILL_WR, S_UNC_WR, S_RESP
  } state_e;

  state_e         state;
  req_t           cur;
  line_t          line_q;
  logic [WW-1:0]  way_q;        // way being accessed
  logic [TAG_W-1:0] victim_tag;
  logic [WW-1:0]  rr_ptr;

  wire [SET_W_P-1:0] cur_set = cur.paddr[OFF_W_P + SLICE_W_P +: SET_W_P];
  wire [TAG_W-1:0]   cur_tag = cur.paddr[PADDR_W-1 -: TAG_W];

  // ---- lookup, restricted to the general-purpose ways ----
  logic [WAYS-1:0] hit_vec, free_vec;
  logic            hit, has_free, no_ways;
  logic [WW-1:0]   hit_way, free_way, rr_way;

  always_comb begin
    for (int w = 0; w < WAYS; w++) begin
      hit_vec[w]  = way_mask[w] && tag_rd_valid[w] && (tag_rd_tag[w] == cur_tag);
      free_vec[w] = way_mask[w] && !tag_rd_valid[w];
    end
    hit = |hit_vec;
    has_free = |free_vec;
    no_ways  = (way_mask == '0);
    hit_way = '0;
    free_way = '0;
    for (int w = WAYS-1; w >= 0; w--) begin
      if (hit_vec[w])  hit_way  = WW'(w);
      if (free_vec[w]) free_way = WW'(w);
    end
    // round-robin victim: first allowed way at or after rr_ptr
    rr_way = rr_ptr;
    for (int k = WAYS-1; k >= 0; k--) begin
      int unsigned w;
      w = (int'(rr_ptr) + k) % WAYS;
      if (way_mask[w]) rr_way = WW'(w);
    end
  end

  wire [WW-1:0] victim_way = has_free ? free_way : rr_way;

  assign req_ready  = (state == S_IDLE);
  assign tag_rd_en  = (state == S_IDLE) && req_valid;
  assign tag_rd_set = req.paddr[OFF_W_P + SLICE_W_P +: SET_W_P];

  // ---- data array ----
  assign da_req   = state inside {S_DA_RD, S_DA_WR, S_WB_RD, S_FILL_WR};
  assign da_we    = state inside {S_DA_WR, S_FILL_WR};
  assign da_way   = way_q;
  assign da_set   = cur_set;
  assign da_wdata = (state == S_DA_WR) ? cur.data : line_q;

  // ---- tag writes go with the data-array write that grants ----
  assign tag_wr_en    = da_gnt && (state inside {S_DA_WR, S_FILL_WR});
  assign tag_wr_set   = cur_set;
  assign tag_wr_way   = way_q;
  assign tag_wr_valid = 1'b1;
  assign tag_wr_dirty = (state == S_DA_WR);
  assign tag_wr_tag   = cur_tag;

  // ---- memory ----
  assign mem_req_valid = state inside {S_WB_MEM, S_FILL_RD, S_UNC_WR};
  always_comb begin
    mem_req.we   = (state != S_FILL_RD);
    mem_req.addr = {cur.paddr[PADDR_W-1:OFF_W_P], OFF_W_P'(0)};
    mem_req.data = (state == S_UNC_WR) ? cur.data : line_q;
    if (state == S_WB_MEM)
      mem_req.addr = {victim_tag, cur_set, slice_id, OFF_W_P'(0)};
  end

  // ---- response ----
  assign resp_valid = (state == S_RESP);
  always_comb begin
    resp.dst  = mmask_t'(1) << cur.src;
    resp.src  = cur.src;
    resp.op   = cur.op;
    resp.tag  = cur.tag;
    resp.data = (cur.op == OP_CPU_RD) ? line_q : '0;
  end

  wire is_rd = (cur.op == OP_CPU_RD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cur        <= '0;
      line_q     <= '0;
      way_q      <= '0;
      victim_tag <= '0;
      rr_ptr     <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (req_valid) begin
          cur   <= req;
          state <= S_LOOKUP;
        end
        S_LOOKUP: begin
          if (no_ways) begin
            state <= is_rd ? S_FILL_RD : S_UNC_WR;
          end else if (hit) begin
            way_q <= hit_way;
            state <= is_rd ? S_DA_RD : S_DA_WR;
          end else begin
            way_q      <= victim_way;
            victim_tag <= tag_rd_tag[victim_way];
            if (!has_free) rr_ptr <= rr_way + 1'b1;
            if (tag_rd_valid[victim_way] && tag_rd_dirty[victim_way]) state <= S_WB_RD;
            else state <= is_rd ? S_FILL_RD : S_DA_WR;
          end
        end
        S_DA_RD:  if (da_gnt) state <= S_DA_RDW;
        S_DA_RDW: begin line_q <= da_rdata; state <= S_RESP; end
        S_DA_WR:  if (da_gnt) state <= S_RESP;
        S_WB_RD:  if (da_gnt) state <= S_WB_RDW;
        S_WB_RDW: begin line_q <= da_rdata; state <= S_WB_MEM; end
        S_WB_MEM: if (mem_req_ready) state <= is_rd ? S_FILL_RD : S_DA_WR;
        S_FILL_RD: if (mem_req_ready) state <= S_FILL_WAIT;
        S_FILL_WAIT: if (mem_resp_valid) begin
          line_q <= mem_resp_data;
          state  <= no_ways ? S_RESP : S_FILL_WR;
        end
        S_FILL_WR: if (da_gnt) state <= S_RESP;
        S_UNC_WR:  if (mem_req_ready) state <= S_RESP;
        S_RESP:    if (resp_ready) state <= S_IDLE;
        default:   state <= S_IDLE;
      endcase
    end
  end

  // a general-purpose lookup never reports a hit in an NPU way
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == S_LOOKUP) |-> ((hit_vec & ~way_mask) == '0));
endmodule
