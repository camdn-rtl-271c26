// data_array: data storage of one shared cache slice. One line per (way,
// set); a line is addressed the way the paper's indexing figure shows, with
// the way index selecting a way and the set index a set inside it.
// Single-port synchronous memory standing for the SRAM macro: on en, a write
// stores wdata, a read returns the line in rdata on the next clock edge.
// Port shape and timing are this design's choice.
module data_array
  import camdn_pkg::*;
#(
  parameter int unsigned WAYS = NUM_WAYS,
  parameter int unsigned SETS = NUM_SETS
) (
  input  logic                        clk,
  input  logic                        en,
  input  logic                        we,
  input  logic [$clog2(WAYS)-1:0]     way,
  input  logic [$clog2(SETS)-1:0]     set,
  input  line_t                       wdata,
  output line_t                       rdata
);
  localparam int unsigned IW = $clog2(WAYS) + $clog2(SETS);
  line_t mem [WAYS*SETS];
  wire [IW-1:0] idx = {way, set};

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[idx] <= wdata;
      else    rdata    <= mem[idx];
    end
  end
endmodule
