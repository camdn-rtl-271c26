// nec: NPU-exclusive controller of one shared cache slice. It owns the ways
// of the slice that the way mask gives to the NPU subspace and executes the
// NPU-controlled access semantics on them, one 64-byte line per request:
//   READ  cache->NPU      WRITE  NPU->cache      LOAD  memory->cache
//   STORE cache->memory   BYP_READ memory->NPU   BYP_WRITE NPU->memory
//   MC_READ cache->group of NPUs   MC_BYP_READ memory->group of NPUs
// No tags are looked up: the request names the line by its physical cache
// address (pcaddr = {way, set, slice, offset}) and, for memory traffic, the
// memory address, so data placement and replacement are entirely under NPU
// program control.
//
// Structure, after the paper's slice figure: an input request queue, a
// "depack" step that splits the request into memory address, cache address
// and data, a data-array port (through the slice arbiter), a memory-request
// queue towards the memory controller, a mux choosing the data-array write
// data from the NPU (WRITE) or from memory (LOAD), and a "repack" step that
// builds the response into an output queue. A multicast response carries the
// group's bit mask as its destination set; otherwise the requester's bit.
//
// This design's choices: one request is in flight at a time (a blocking
// state machine), every request gets a response (a data-less acknowledgement
// for WRITE, LOAD, STORE and BYP_WRITE) so the DMA can count completion, a
// STORE or BYP_WRITE is acknowledged only after its line has left the memory
// queue (so a later read through another slice sees it), and
// queue depths are 4 (requests, responses) and 2 (memory). Timing: a READ
// arriving at an empty controller with the data array free is answered 4
// clock edges after the edge that accepts it (queue, decode, data-array read,
// data return, response queue); memory operations add the memory latency.
module nec
  import camdn_pkg::*;
#(
  parameter int unsigned OFF_W_P   = OFF_W,
  parameter int unsigned SLICE_W_P = SLICE_W,
  parameter int unsigned SET_W_P   = SET_W,
  parameter int unsigned WAY_W_P   = WAY_W,
  parameter int unsigned QDEPTH    = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // NPU requests from the dual interface
  input  logic                 req_valid,
  output logic                 req_ready,
  input  req_t                 req,
  // responses to the dual interface
  output logic                 resp_valid,
  input  logic                 resp_ready,
  output resp_t                resp,
  // data array port (via the slice's arbiter); rdata one cycle after da_gnt
  output logic                 da_req,
  output logic                 da_we,
  output logic [WAY_W_P-1:0]   da_way,
  output logic [SET_W_P-1:0]   da_set,
  output line_t                da_wdata,
  input  logic                 da_gnt,
  input  line_t                da_rdata,
  // memory controller port, reads answered in order
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output mem_req_t             mem_req,
  input  logic                 mem_resp_valid,
  input  line_t                mem_resp_data
);
  typedef enum logic [3:0] {
    S_IDLE, S_DA_RD, S_DA_RDW, S_DA_WR, S_MEM_RD, S_MEM_WAIT, S_MEM_WR, S_MEM_DRAIN, S_RESP
  } state_e;

  state_e state;
  req_t   cur;
  line_t  line_q;

  // ---- request queue ----
  logic  iq_valid, iq_ready;
  req_t  iq_data;
  fifo #(.T(req_t), .DEPTH(QDEPTH)) u_reqq (
    .clk, .rst_n,
    .in_valid(req_valid), .in_ready(req_ready), .in_data(req),
    .out_valid(iq_valid), .out_ready(iq_ready), .out_data(iq_data)
  );
  assign iq_ready = (state == S_IDLE);

  // ---- depack: split the cache address into the data-array index ----
  assign da_set   = cur.pcaddr[OFF_W_P + SLICE_W_P +: SET_W_P];
  assign da_way   = cur.pcaddr[OFF_W_P + SLICE_W_P + SET_W_P +: WAY_W_P];
  // write data: from the NPU request (WRITE) or from memory (LOAD), both
  // already captured in line_q
  assign da_wdata = line_q;
  assign da_req   = (state == S_DA_RD) || (state == S_DA_WR);
  assign da_we    = (state == S_DA_WR);

  // ---- memory request queue ----
  logic     mq_in_valid, mq_in_ready;
  mem_req_t mq_in;
  assign mq_in_valid = (state == S_MEM_RD) || (state == S_MEM_WR);
  always_comb begin
    mq_in.we   = (state == S_MEM_WR);
    mq_in.addr = {cur.paddr[PADDR_W-1:OFF_W_P], OFF_W_P'(0)};
    mq_in.data = line_q;
  end
  fifo #(.T(mem_req_t), .DEPTH(2)) u_memq (
    .clk, .rst_n,
    .in_valid(mq_in_valid), .in_ready(mq_in_ready), .in_data(mq_in),
    .out_valid(mem_req_valid), .out_ready(mem_req_ready), .out_data(mem_req)
  );

  // ---- repack: build the response ----
  logic  oq_valid, oq_ready;
  resp_t oq_data;
  assign oq_valid = (state == S_RESP);
  always_comb begin
    oq_data.dst  = is_multicast(cur.op) ? cur.mcast : (mmask_t'(1) << cur.src);
    oq_data.src  = cur.src;
    oq_data.op   = cur.op;
    oq_data.tag  = cur.tag;
    oq_data.data = returns_data(cur.op) ? line_q : '0;
  end
  fifo #(.T(resp_t), .DEPTH(QDEPTH)) u_respq (
    .clk, .rst_n,
    .in_valid(oq_valid), .in_ready(oq_ready), .in_data(oq_data),
    .out_valid(resp_valid), .out_ready(resp_ready), .out_data(resp)
  );

  // ---- control ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      cur    <= '0;
      line_q <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (iq_valid) begin
          cur    <= iq_data;
          line_q <= iq_data.data;
          unique case (iq_data.op)
            OP_READ, OP_MC_READ, OP_STORE:        state <= S_DA_RD;
            OP_WRITE:                             state <= S_DA_WR;
            OP_LOAD, OP_BYP_READ, OP_MC_BYP_READ: state <= S_MEM_RD;
            OP_BYP_WRITE:                         state <= S_MEM_WR;
            default:                              state <= S_RESP;
          endcase
        end
        S_DA_RD:  if (da_gnt) state <= S_DA_RDW;
        S_DA_RDW: begin
          line_q <= da_rdata;
          state  <= (cur.op == OP_STORE) ? S_MEM_WR : S_RESP;
        end
        S_DA_WR:  if (da_gnt) state <= S_RESP;
        S_MEM_RD: if (mq_in_ready) state <= S_MEM_WAIT;
        S_MEM_WAIT: if (mem_resp_valid) begin
          line_q <= mem_resp_data;
          state  <= (cur.op == OP_LOAD) ? S_DA_WR : S_RESP;
        end
        S_MEM_WR: if (mq_in_ready) state <= S_MEM_DRAIN;
        // a write is acknowledged once it has left for the memory controller
        S_MEM_DRAIN: if (!mem_req_valid) state <= S_RESP;
        S_RESP:   if (oq_ready) state <= S_IDLE;
        default:  state <= S_IDLE;
      endcase
    end
  end

  // a request to the data array stays up until it is granted
  assert property (@(posedge clk) disable iff (!rst_n)
                   da_req && !da_gnt |=> da_req);
endmodule
