// npu_dma: the cache-facing part of an NPU's DMA engine, holding the NPU's
// cache page table (CPT). A transfer descriptor names one of the NPU
// semantics, a starting virtual cache address (vcaddr) in the model's own
// cache space, a starting memory address and a number of 64-byte lines. For
// each line the DMA reads the CPT with the vcaddr's virtual cache page number
// (vcpn), forms the physical cache address pcaddr = {pcpn, page offset}, and
// issues one request carrying both addresses. Bypass semantics use no cache
// space and skip the translation result. Write semantics take one line per
// request from the wdata stream (the scratchpad side). The line number is
// sent as the request tag and comes back with the response, so read data can
// be placed in the scratchpad out of order (rd_valid/rd_tag/rd_data).
// Responses to multicast reads issued by another NPU of the same group also
// appear on rd_*. done pulses when every issued line has been answered;
// fault is then set if any line's page was unmapped (such lines are skipped).
//
// Following the paper: a CPT inside each NPU's DMA translating vcaddr into
// pcaddr by page number, and the eight line-granular semantics. This
// design's choices: the descriptor format, skipping unmapped lines, the
// response for every line, and the rate of one request every two cycles
// (CPT read, then issue) without back-pressure.
module npu_dma
  import camdn_pkg::*;
#(
  parameter int unsigned MASTER_ID   = 0,
  parameter int unsigned CPT_ENT     = CPT_ENTRIES,
  parameter int unsigned PCPN_W      = CPN_W,
  parameter int unsigned PGOFF_W_P   = PGOFF_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // transfer descriptor
  input  logic                        desc_valid,
  output logic                        desc_ready,
  input  dma_desc_t                   desc,
  output logic                        done,
  output logic                        fault,
  // CPT write port, driven by the runtime's cache allocator
  input  logic                        cpt_wr_en,
  input  logic [$clog2(CPT_ENT)-1:0]  cpt_wr_vcpn,
  input  logic                        cpt_wr_valid,
  input  logic [PCPN_W-1:0]           cpt_wr_pcpn,
  // line data for write semantics
  input  logic                        wdata_valid,
  output logic                        wdata_ready,
  input  line_t                       wdata,
  // read data to the scratchpad
  output logic                        rd_valid,
  output logic [TAGF_W-1:0]           rd_tag,
  output line_t                       rd_data,
  // interconnect
  output logic                        req_valid,
  input  logic                        req_ready,
  output req_t                        req,
  input  logic                        resp_valid,
  input  resp_t                       resp
);
  localparam int unsigned VW = $clog2(CPT_ENT);

  typedef enum logic [1:0] { S_IDLE, S_LOOKUP, S_ISSUE, S_WAIT } state_e;

  state_e               state;
  dma_desc_t            d;
  logic [NLINES_W-1:0]  line, issued, answered;
  logic                 lk_hit;
  logic [PCPN_W-1:0]    lk_pcpn;

  wire caddr_t cur_vc  = d.vcaddr + (caddr_t'(line) << OFF_W);
  wire paddr_t cur_pa  = d.paddr  + (paddr_t'(line) << OFF_W);
  wire         byp     = is_bypass(d.op);
  wire         needs_w = carries_data(d.op);
  wire         unmapped = !byp && !lk_hit;
  wire         last    = (line == d.nlines - 1'b1);

  cpt #(.ENTRIES(CPT_ENT), .PCPN_W(PCPN_W)) u_cpt (
    .clk, .rst_n,
    .wr_en(cpt_wr_en), .wr_vcpn(cpt_wr_vcpn), .wr_valid(cpt_wr_valid), .wr_pcpn(cpt_wr_pcpn),
    .lk_en(state == S_LOOKUP), .lk_vcpn(cur_vc[PGOFF_W_P +: VW]),
    .lk_hit, .lk_pcpn
  );

  assign desc_ready  = (state == S_IDLE);
  assign req_valid   = (state == S_ISSUE) && !unmapped && (!needs_w || wdata_valid);
  // an unmapped line still consumes its write data, keeping the stream aligned
  assign wdata_ready = (state == S_ISSUE) && needs_w && (unmapped || req_ready);
  wire   skip        = unmapped && (!needs_w || wdata_valid);

  always_comb begin
    req.kind   = KIND_NPU;
    req.op     = d.op;
    req.src    = src_t'(MASTER_ID);
    req.mcast  = is_multicast(d.op) ? (d.mcast | (mmask_t'(1) << MASTER_ID))
                                    : (mmask_t'(1) << MASTER_ID);
    req.paddr  = cur_pa;
    req.pcaddr = caddr_t'({lk_pcpn, cur_vc[PGOFF_W_P-1:0]});
    req.tag    = TAGF_W'(line);
    req.data   = needs_w ? wdata : '0;
  end

  // read data, including multicast data requested by a group member
  assign rd_valid = resp_valid && returns_data(resp.op);
  assign rd_tag   = resp.tag;
  assign rd_data  = resp.data;

  wire own_resp = resp_valid && (resp.src == src_t'(MASTER_ID));
  wire fire     = req_valid && req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      d        <= '0;
      line     <= '0;
      issued   <= '0;
      answered <= '0;
      done     <= 1'b0;
      fault    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (own_resp) answered <= answered + 1'b1;
      unique case (state)
        S_IDLE: if (desc_valid) begin
          d        <= desc;
          line     <= '0;
          issued   <= '0;
          answered <= '0;
          fault    <= 1'b0;
          state    <= (desc.nlines == '0) ? S_WAIT : S_LOOKUP;
        end
        S_LOOKUP: state <= S_ISSUE;
        S_ISSUE: begin
          if (skip) fault <= 1'b1;
          if (fire) issued <= issued + 1'b1;
          if (skip || fire) begin
            line  <= line + 1'b1;
            state <= last ? S_WAIT : S_LOOKUP;
          end
        end
        S_WAIT: if (answered == issued) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a request, once raised, is held until accepted
  assert property (@(posedge clk) disable iff (!rst_n)
                   req_valid && !req_ready |=> req_valid && $stable(req.pcaddr));
endmodule
