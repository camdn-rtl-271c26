// tb_cache_slice: a reduced slice (4 ways x 16 sets, slice 0 of 2, way mask
// 0011 at reset: ways 0-1 general purpose, ways 2-3 NPU subspace). A random
// mix of CPU line reads/writes and all eight NPU semantics is streamed into
// the one slice port with random back-pressure on the response side, so the
// cache controller and the NEC run at the same time and contend for the data
// array and the memory port. CPU and NPU use disjoint memory regions; each
// path is checked in order against its own reference (memory contents for
// the CPU, NPU-way contents and memory for the NPU). This shows that heavy
// CPU traffic with evictions never disturbs NPU lines and the reverse. The
// way mask register is then rewritten and read back.
module tb_cache_slice;
  import camdn_pkg::*;
  import tb_pkg::*;
  localparam int WAYS = 4, SETS = 16, SW = 4, SLW = 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wm_we = 0; logic [WAYS-1:0] wm_wdata = '0, way_mask;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  req_t in_req = '0; resp_t out_resp;
  logic mem_req_valid, mem_req_ready, mem_resp_valid; mem_req_t mem_req; line_t mem_resp_data;

  cache_slice #(.WAYS(WAYS), .SETS(SETS), .SLICE_W_P(SLW), .WAY_MASK_RST(4'b0011)) dut (
    .clk, .rst_n, .slice_id(1'b0), .wm_we, .wm_wdata, .way_mask,
    .in_valid, .in_ready, .in_req, .out_valid, .out_ready, .out_resp,
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_resp_valid, .mem_resp_data
  );
  mem_model u_mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
                   .resp_valid(mem_resp_valid), .resp_data(mem_resp_data));

  line_t rm [paddr_t];                 // reference memory
  line_t rc [WAYS*SETS];               // reference NPU-way contents
  resp_t exp_cpu [$], exp_npu [$];
  int    n_cpu = 0, n_npu = 0;

  function automatic line_t memv(paddr_t a);
    return rm.exists(a) ? rm[a] : pat(a);
  endfunction

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    automatic bit cpu = out_resp.op inside {OP_CPU_RD, OP_CPU_WR};
    automatic resp_t e;
    checks++;
    if (cpu ? exp_cpu.size() == 0 : exp_npu.size() == 0) begin failures++; $display("FAIL extra response"); end
    else begin
      e = cpu ? exp_cpu.pop_front() : exp_npu.pop_front();
      if (out_resp !== e) begin
        failures++; $display("FAIL %s tag %0d data %h want %h", out_resp.op.name(), out_resp.tag, out_resp.data[31:0], e.data[31:0]);
      end
    end
    if (cpu) n_cpu++; else n_npu++;
  end
  always @(negedge clk) out_ready <= ($urandom_range(3) != 0);

  task automatic send(req_t r);
    @(negedge clk); in_valid = 1; in_req = r;
    do @(posedge clk); while (!in_ready);
    @(negedge clk); in_valid = 0;
  endtask

  task automatic cpu_op(int i);
    automatic req_t r = '0;
    automatic resp_t e = '0;
    r.kind = KIND_NORMAL; r.op = $urandom_range(1) ? OP_CPU_WR : OP_CPU_RD; r.src = 5'd16;
    // slice 0, 16 sets, 4 tags -> conflicts in the 2 general-purpose ways
    r.paddr = paddr_t'({$urandom_range(3), 4'($urandom), 1'b0, 6'b0});
    r.tag = 16'(i); r.data = rnd_line();
    e.dst = mmask_t'(1) << 16; e.src = 5'd16; e.op = r.op; e.tag = r.tag;
    if (r.op == OP_CPU_RD) e.data = memv(r.paddr); else rm[r.paddr] = r.data;
    exp_cpu.push_back(e);
    send(r);
  endtask

  localparam op_e NOPS [8] = '{OP_READ, OP_WRITE, OP_LOAD, OP_STORE,
                               OP_BYP_READ, OP_BYP_WRITE, OP_MC_READ, OP_MC_BYP_READ};
  task automatic npu_op(int i, op_e op);
    automatic req_t r = '0;
    automatic resp_t e = '0;
    automatic int way = 2 + $urandom_range(1), set = $urandom_range(SETS-1);
    automatic int ci = way * SETS + set;
    r.kind = KIND_NPU; r.op = op; r.src = 5'($urandom_range(15)); r.mcast = mmask_t'($urandom);
    r.pcaddr = caddr_t'({2'(way), 4'(set), 1'b0, 6'b0});
    r.paddr = 32'h0100_0000 | paddr_t'({$urandom_range(7), 7'b0});
    r.tag = 16'(i); r.data = rnd_line();
    e.dst = is_multicast(op) ? r.mcast : (mmask_t'(1) << r.src);
    e.src = r.src; e.op = op; e.tag = r.tag;
    unique case (op)
      OP_READ, OP_MC_READ:         e.data = rc[ci];
      OP_WRITE:                    rc[ci] = r.data;
      OP_LOAD:                     rc[ci] = memv(r.paddr);
      OP_STORE:                    rm[r.paddr] = rc[ci];
      OP_BYP_READ, OP_MC_BYP_READ: e.data = memv(r.paddr);
      OP_BYP_WRITE:                rm[r.paddr] = r.data;
      default: ;
    endcase
    exp_npu.push_back(e);
    send(r);
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    checks++;
    if (way_mask !== 4'b0011) begin failures++; $display("FAIL reset way mask"); end
    // give every NPU line a known value first
    for (int w = 2; w < 4; w++)
      for (int s = 0; s < SETS; s++) begin
        automatic req_t r = '0;
        automatic resp_t e = '0;
        r.kind = KIND_NPU; r.op = OP_WRITE; r.src = 5'd1;
        r.pcaddr = caddr_t'({2'(w), 4'(s), 1'b0, 6'b0}); r.data = rnd_line(); r.tag = 16'hFFFF;
        rc[w*SETS + s] = r.data;
        e.dst = 2; e.src = 5'd1; e.op = OP_WRITE; e.tag = 16'hFFFF;
        exp_npu.push_back(e);
        send(r);
      end
    for (int i = 0; i < 800; i++) begin
      if ($urandom_range(1)) cpu_op(i);
      else npu_op(i, NOPS[$urandom_range(7)]);
    end
    repeat (300) @(negedge clk);
    checks++;
    if (exp_cpu.size() != 0 || exp_npu.size() != 0 || n_cpu < 300 || n_npu < 300) begin
      failures++; $display("FAIL missing responses cpu %0d npu %0d", exp_cpu.size(), exp_npu.size());
    end
    @(negedge clk); wm_we = 1; wm_wdata = 4'b0001;
    @(negedge clk); wm_we = 0;
    checks++;
    if (way_mask !== 4'b0001) begin failures++; $display("FAIL way mask write"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
