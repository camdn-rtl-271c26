// mem_multi: behavioural model of several memory controllers in front of one
// shared DRAM, for the system testbenches (not part of the design). Each of
// NP ports accepts one line request per cycle while ready and answers its
// reads in order after LAT cycles; all ports share one store, so a line
// written through one port is read back through any other. Unwritten lines
// read as tb_pkg::pat(address). Setting `stall` holds every port not ready.
module mem_multi
  import camdn_pkg::*;
#(
  parameter int unsigned NP  = 2,
  parameter int unsigned LAT = 8
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [NP-1:0]  req_valid,
  output logic [NP-1:0]  req_ready,
  input  mem_req_t       req [NP],
  output logic [NP-1:0]  resp_valid,
  output line_t          resp_data [NP]
);
  line_t  store [paddr_t];
  line_t  rq_data [NP][$];
  longint rq_time [NP][$];
  longint now = 0;
  int     reads = 0, writes = 0, stall_cycles = 0;
  bit     stall = 0;

  assign req_ready = stall ? '0 : '1;

  function automatic line_t peek(paddr_t a);
    paddr_t k = {a[PADDR_W-1:OFF_W], OFF_W'(0)};
    return store.exists(k) ? store[k] : tb_pkg::pat(k);
  endfunction

  always @(posedge clk) begin
    now <= now + 1;
    if (stall) stall_cycles++;
    for (int p = 0; p < NP; p++) begin
      resp_valid[p] <= 1'b0;
      if (rst_n) begin
        if (req_valid[p] && req_ready[p]) begin
          if (req[p].we) begin
            store[req[p].addr] = req[p].data;
            writes++;
          end else begin
            rq_data[p].push_back(peek(req[p].addr));
            rq_time[p].push_back(now + LAT);
            reads++;
          end
        end
        if (rq_time[p].size() > 0 && rq_time[p][0] <= now) begin
          resp_valid[p] <= 1'b1;
          resp_data[p]  <= rq_data[p].pop_front();
          void'(rq_time[p].pop_front());
        end
      end
    end
  end
endmodule
