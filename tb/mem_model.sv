// mem_model: behavioural model of a memory controller and its DRAM for the
// testbenches (not synthesizable, not part of the design). Accepts one line
// request per cycle when ready, answers reads in order after LAT cycles.
// Lines never written read back as tb_pkg::pat(address). Counts reads and
// writes so a testbench can check how much memory traffic an access caused.
module mem_model
  import camdn_pkg::*;
#(
  parameter int unsigned LAT = 6
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     resp_valid,
  output line_t    resp_data
);
  line_t  store [paddr_t];
  line_t  rq_data [$];
  longint rq_time [$];
  longint now = 0;
  int     reads = 0, writes = 0;
  bit     stall = 0;              // testbench may set this to apply back-pressure

  assign req_ready = !stall;

  function automatic line_t peek(paddr_t a);
    paddr_t k = {a[PADDR_W-1:OFF_W], OFF_W'(0)};
    return store.exists(k) ? store[k] : tb_pkg::pat(k);
  endfunction

  always @(posedge clk) begin
    now <= now + 1;
    resp_valid <= 1'b0;
    if (rst_n) begin
      if (req_valid && req_ready) begin
        if (req.we) begin
          store[req.addr] = req.data;
          writes++;
        end else begin
          rq_data.push_back(peek(req.addr));
          rq_time.push_back(now + LAT);
          reads++;
        end
      end
      if (rq_time.size() > 0 && rq_time[0] <= now) begin
        resp_valid <= 1'b1;
        resp_data  <= rq_data.pop_front();
        void'(rq_time.pop_front());
      end
    end
  end
endmodule
