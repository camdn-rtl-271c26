// fifo: synchronous first-in first-out queue with valid/ready handshakes on
// both sides. Used for the request, response and memory-address queues that
// sit in front of and behind the NPU-exclusive controller. DEPTH entries of
// type T; a push and a pop may happen in the same cycle. Output data is the
// head entry, valid whenever the queue is not empty (no read latency).
// Queue depths are this design's choice.
module fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                mem [DEPTH];
  logic [PW-1:0]   wp, rp;
  logic [PW:0]     count;

  wire push = in_valid  && in_ready;
  wire pop  = out_valid && out_ready;

  assign in_ready  = (count != (PW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= (wp == PW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == PW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
    end
  end
endmodule
