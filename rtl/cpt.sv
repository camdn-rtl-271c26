// cpt: cache page table of one NPU. Every model gets its own virtual cache
// address space; the table maps a virtual cache page number (vcpn) to the
// physical cache page number (pcpn) that holds that page in the NPU subspace
// of the shared cache. Following the paper: 32 KB pages, up to 512 entries,
// each a pcpn plus a valid bit, kept in a small SRAM inside the NPU's DMA,
// rewritten by the runtime when it hands pages to or takes them from a model.
// This design's choices: the lookup is a synchronous read (result one cycle
// after lk_en), valid bits live in flip-flops and are cleared by reset, and a
// write to the entry being read in the same cycle returns the old value.
module cpt
  import camdn_pkg::*;
#(
  parameter int unsigned ENTRIES = CPT_ENTRIES,
  parameter int unsigned PCPN_W  = CPN_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // runtime write port ("modify CPT")
  input  logic                        wr_en,
  input  logic [$clog2(ENTRIES)-1:0]  wr_vcpn,
  input  logic                        wr_valid,
  input  logic [PCPN_W-1:0]           wr_pcpn,
  // lookup port
  input  logic                        lk_en,
  input  logic [$clog2(ENTRIES)-1:0]  lk_vcpn,
  output logic                        lk_hit,
  output logic [PCPN_W-1:0]           lk_pcpn
);
  logic [PCPN_W-1:0] pcpn_mem [ENTRIES];
  logic [ENTRIES-1:0] valid_q;

  always_ff @(posedge clk) begin
    if (wr_en) pcpn_mem[wr_vcpn] <= wr_pcpn;
    if (lk_en) lk_pcpn <= pcpn_mem[lk_vcpn];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      lk_hit  <= 1'b0;
    end else begin
      if (wr_en) valid_q[wr_vcpn] <= wr_valid;
      if (lk_en) lk_hit <= valid_q[lk_vcpn];
    end
  end
endmodule
