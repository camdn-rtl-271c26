// tag_array: tag storage of one shared cache slice for the hardware-managed
// (general-purpose) part of the cache. For each set it keeps, per way, a
// valid bit, a dirty bit and the address tag. A read returns all ways of a
// set one cycle after rd_en; a write updates one way of one set. Valid bits
// are flip-flops cleared by reset so that the cache starts empty; tags and
// dirty bits are an array standing for the SRAM macro. Ports and timing are
// this design's choice; the paper only shows the tag array and that the NPU
// ways in it are masked off.
module tag_array
  import camdn_pkg::*;
#(
  parameter int unsigned WAYS  = NUM_WAYS,
  parameter int unsigned SETS  = NUM_SETS,
  parameter int unsigned TAG_W = PADDR_W - OFF_W - SLICE_W - SET_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      rd_en,
  input  logic [$clog2(SETS)-1:0]   rd_set,
  output logic [WAYS-1:0]           rd_valid,
  output logic [WAYS-1:0]           rd_dirty,
  output logic [WAYS-1:0][TAG_W-1:0] rd_tag,
  input  logic                      wr_en,
  input  logic [$clog2(SETS)-1:0]   wr_set,
  input  logic [$clog2(WAYS)-1:0]   wr_way,
  input  logic                      wr_valid,
  input  logic                      wr_dirty,
  input  logic [TAG_W-1:0]          wr_tag
);
  logic [WAYS-1:0][TAG_W:0] mem [SETS];   // {dirty, tag} per way
  logic [WAYS-1:0]          valid_q [SETS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_set][wr_way] <= {wr_dirty, wr_tag};
    if (rd_en) begin
      for (int w = 0; w < WAYS; w++) begin
        rd_dirty[w] <= mem[rd_set][w][TAG_W];
        rd_tag[w]   <= mem[rd_set][w][TAG_W-1:0];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) valid_q[s] <= '0;
      rd_valid <= '0;
    end else begin
      if (wr_en) valid_q[wr_set][wr_way] <= wr_valid;
      if (rd_en) rd_valid <= valid_q[rd_set];
    end
  end
endmodule
