// camdn_top: the shared-cache side of an NPU-integrated SoC with NPU-
// controlled cache regions. N_NPUS NPU DMA engines, each with its own cache
// page table, and N_CPUS CPU request ports reach N_SLICES shared cache slices
// through a crossbar. Each slice holds a hardware-managed cache controller
// for the general-purpose ways and an NPU-exclusive controller for the NPU
// subspace, split by a way mask register. Crossbar master numbers: NPU i is
// master i, CPU port j is master N_NPUS + j; a response's destination mask
// uses those numbers.
//
// Outside this module: the NPU compute (PE array, scratchpad, SIMD; the DMA's
// descriptors, write data and read data are ports), the CPU cores (line
// requests and responses are ports; the CPU's src and kind fields are filled
// in here), the memory controllers (one in-order memory port per slice), and
// the runtime cache allocator, which writes the CPTs and the way masks.
//
// Defaults are the evaluated configuration: 16 NPUs, 8 slices of 16 ways and
// 2048 sets of 64-byte lines (16 MB), 12 NPU ways, 32 KB pages, 512-entry
// CPTs. The number of CPU ports (2) and the line size are this design's.
//
// Each slice's way_mask read-back output is left unused here (the lint
// tool reports it as an unused signal): all slices are written together
// from wm_we/wm_wdata, so the mask is known to the writer; testbenches
// probe it hierarchically.
module camdn_top
  import camdn_pkg::*;
#(
  parameter int unsigned N_NPUS   = NUM_NPUS,
  parameter int unsigned N_CPUS   = NUM_CPUS,
  parameter int unsigned N_SLICES = NUM_SLICES,
  parameter int unsigned WAYS     = NUM_WAYS,
  parameter int unsigned SETS     = NUM_SETS,
  parameter int unsigned CPT_ENT  = CPT_ENTRIES,
  parameter int unsigned PGOFF_W_P = PGOFF_W,
  parameter logic [WAYS-1:0] WAY_MASK_RST = WAYS'(WAY_MASK_DEFAULT)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // way mask registers of all slices
  input  logic                         wm_we,
  input  logic [WAYS-1:0]              wm_wdata,
  // NPU DMA side
  input  logic [N_NPUS-1:0]            npu_desc_valid,
  output logic [N_NPUS-1:0]            npu_desc_ready,
  input  dma_desc_t                    npu_desc [N_NPUS],
  output logic [N_NPUS-1:0]            npu_done,
  output logic [N_NPUS-1:0]            npu_fault,
  input  logic [N_NPUS-1:0]            npu_cpt_wr_en,
  input  logic [$clog2(CPT_ENT)-1:0]   npu_cpt_wr_vcpn [N_NPUS],
  input  logic [N_NPUS-1:0]            npu_cpt_wr_valid,
  input  logic [$clog2(CPT_ENT)-1:0]   npu_cpt_wr_pcpn [N_NPUS],
  input  logic [N_NPUS-1:0]            npu_wdata_valid,
  output logic [N_NPUS-1:0]            npu_wdata_ready,
  input  line_t                        npu_wdata [N_NPUS],
  output logic [N_NPUS-1:0]            npu_rd_valid,
  output logic [TAGF_W-1:0]            npu_rd_tag [N_NPUS],
  output line_t                        npu_rd_data [N_NPUS],
  // CPU side
  input  logic [N_CPUS-1:0]            cpu_req_valid,
  output logic [N_CPUS-1:0]            cpu_req_ready,
  input  req_t                         cpu_req [N_CPUS],
  output logic [N_CPUS-1:0]            cpu_resp_valid,
  output resp_t                        cpu_resp [N_CPUS],
  // memory controller side
  output logic [N_SLICES-1:0]          mem_req_valid,
  input  logic [N_SLICES-1:0]          mem_req_ready,
  output mem_req_t                     mem_req [N_SLICES],
  input  logic [N_SLICES-1:0]          mem_resp_valid,
  input  line_t                        mem_resp_data [N_SLICES]
);
  localparam int unsigned N_M = N_NPUS + N_CPUS;
  localparam int unsigned SW  = $clog2(N_SLICES);
  // one page table per NPU, sized for every page of the cache
  localparam int unsigned PCPN_W = $clog2(CPT_ENT);

  logic [N_M-1:0]      m_req_valid, m_req_ready, m_resp_valid;
  req_t                m_req  [N_M];
  resp_t               m_resp [N_M];
  logic [N_SLICES-1:0] s_req_valid, s_req_ready, s_resp_valid, s_resp_ready;
  req_t                s_req  [N_SLICES];
  resp_t               s_resp [N_SLICES];

  for (genvar i = 0; i < N_NPUS; i++) begin : g_npu
    npu_dma #(.MASTER_ID(i), .CPT_ENT(CPT_ENT), .PCPN_W(PCPN_W), .PGOFF_W_P(PGOFF_W_P)) u_dma (
      .clk, .rst_n,
      .desc_valid(npu_desc_valid[i]), .desc_ready(npu_desc_ready[i]), .desc(npu_desc[i]),
      .done(npu_done[i]), .fault(npu_fault[i]),
      .cpt_wr_en(npu_cpt_wr_en[i]), .cpt_wr_vcpn(npu_cpt_wr_vcpn[i]),
      .cpt_wr_valid(npu_cpt_wr_valid[i]), .cpt_wr_pcpn(npu_cpt_wr_pcpn[i]),
      .wdata_valid(npu_wdata_valid[i]), .wdata_ready(npu_wdata_ready[i]), .wdata(npu_wdata[i]),
      .rd_valid(npu_rd_valid[i]), .rd_tag(npu_rd_tag[i]), .rd_data(npu_rd_data[i]),
      .req_valid(m_req_valid[i]), .req_ready(m_req_ready[i]), .req(m_req[i]),
      .resp_valid(m_resp_valid[i]), .resp(m_resp[i])
    );
  end

  for (genvar j = 0; j < N_CPUS; j++) begin : g_cpu
    always_comb begin
      m_req[N_NPUS+j]      = cpu_req[j];
      m_req[N_NPUS+j].kind = KIND_NORMAL;
      m_req[N_NPUS+j].src  = src_t'(N_NPUS + j);
    end
    assign m_req_valid[N_NPUS+j] = cpu_req_valid[j];
    assign cpu_req_ready[j]      = m_req_ready[N_NPUS+j];
    assign cpu_resp_valid[j]     = m_resp_valid[N_NPUS+j];
    assign cpu_resp[j]           = m_resp[N_NPUS+j];
  end

  xbar #(.N_M(N_M), .N_S(N_SLICES)) u_xbar (
    .clk, .rst_n,
    .m_req_valid, .m_req_ready, .m_req, .m_resp_valid, .m_resp,
    .s_req_valid, .s_req_ready, .s_req, .s_resp_valid, .s_resp_ready, .s_resp
  );

  for (genvar s = 0; s < N_SLICES; s++) begin : g_slice
    logic [WAYS-1:0] way_mask;
    cache_slice #(.WAYS(WAYS), .SETS(SETS), .SLICE_W_P(SW), .WAY_MASK_RST(WAY_MASK_RST)) u_slice (
      .clk, .rst_n, .slice_id(SW'(s)),
      .wm_we, .wm_wdata, .way_mask,
      .in_valid(s_req_valid[s]), .in_ready(s_req_ready[s]), .in_req(s_req[s]),
      .out_valid(s_resp_valid[s]), .out_ready(s_resp_ready[s]), .out_resp(s_resp[s]),
      .mem_req_valid(mem_req_valid[s]), .mem_req_ready(mem_req_ready[s]), .mem_req(mem_req[s]),
      .mem_resp_valid(mem_resp_valid[s]), .mem_resp_data(mem_resp_data[s])
    );
  end
endmodule
