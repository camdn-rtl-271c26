// rr_arb: round-robin arbiter. Grants one of N requesters, combinationally,
// starting the search just after the requester granted last. The pointer
// moves only when `advance` is high (the grant was actually used), so a
// requester held off by back-pressure keeps its turn. gnt is one-hot or zero;
// gnt_idx is its index. The round-robin policy is this design's choice.
module rr_arb #(
  parameter int unsigned N = 4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [N-1:0]                 req,
  input  logic                         advance,
  output logic [N-1:0]                 gnt,
  output logic [$clog2(N>1?N:2)-1:0]   gnt_idx
);
  localparam int unsigned IW = $clog2(N>1?N:2);
  logic [IW-1:0] last;

  always_comb begin
    gnt     = '0;
    gnt_idx = '0;
    for (int unsigned k = 1; k <= N; k++) begin
      int unsigned i;
      i = (int'(last) + k) % N;
      if (req[i] && gnt == '0) begin
        gnt[i]  = 1'b1;
        gnt_idx = IW'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                   last <= IW'(N-1);
    else if (advance && |gnt)     last <= gnt_idx;
  end
endmodule
