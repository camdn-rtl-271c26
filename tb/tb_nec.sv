// tb_nec: the NPU-exclusive controller with a reduced data array (4 ways x
// 16 sets, 2 slices) and the memory model. First each of the eight NPU
// semantics is run once with a known result and the READ latency is
// checked; then 400 random requests are streamed in back to back while the
// response side applies random back-pressure. Expected responses, data-array
// contents and memory contents come from a reference model kept in the
// testbench; the controller is in-order, so responses are compared in order.
module tb_nec;
  import camdn_pkg::*;
  import tb_pkg::*;
  localparam int WAYS = 4, SETS = 16, SLW = 1, SW = 4, WW = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req_valid = 0, req_ready, resp_valid, resp_ready = 1;
  req_t req = '0;
  resp_t resp;
  logic da_req, da_we; logic [WW-1:0] da_way; logic [SW-1:0] da_set;
  line_t da_wdata, da_rdata;
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t mem_req; line_t mem_resp_data;

  nec #(.SLICE_W_P(SLW), .SET_W_P(SW), .WAY_W_P(WW)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req, .resp_valid, .resp_ready, .resp,
    .da_req, .da_we, .da_way, .da_set, .da_wdata, .da_gnt(da_req), .da_rdata,
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_resp_valid, .mem_resp_data
  );
  data_array #(.WAYS(WAYS), .SETS(SETS)) u_da (
    .clk, .en(da_req), .we(da_we), .way(da_way), .set(da_set), .wdata(da_wdata), .rdata(da_rdata)
  );
  mem_model u_mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
                   .resp_valid(mem_resp_valid), .resp_data(mem_resp_data));

  // ---- reference model ----
  line_t  rc [WAYS*SETS];
  line_t  rm [paddr_t];
  resp_t  expq [$];
  function automatic line_t memv(paddr_t a);
    return rm.exists(a) ? rm[a] : pat(a);
  endfunction
  function automatic int cidx(caddr_t pc);
    return int'(pc[OFF_W+SLW +: SW+WW]);
  endfunction

  function automatic req_t mk(op_e op, caddr_t pc, paddr_t pa, line_t d, mmask_t mc, int src);
    automatic req_t r = '0;
    r.kind = KIND_NPU; r.op = op; r.src = src_t'(src); r.mcast = mc;
    r.pcaddr = {pc[CADDR_W-1:OFF_W], OFF_W'(0)}; r.paddr = {pa[PADDR_W-1:OFF_W], OFF_W'(0)};
    r.tag = 16'($urandom); r.data = d;
    return r;
  endfunction

  // expected response, and reference update, in program order
  function automatic void model(req_t r);
    automatic resp_t e = '0;
    int ci = cidx(r.pcaddr);
    e.dst = is_multicast(r.op) ? r.mcast : (mmask_t'(1) << r.src);
    e.src = r.src; e.op = r.op; e.tag = r.tag;
    unique case (r.op)
      OP_READ, OP_MC_READ:         e.data = rc[ci];
      OP_WRITE:                    rc[ci] = r.data;
      OP_LOAD:                     rc[ci] = memv(r.paddr);
      OP_STORE:                    rm[r.paddr] = rc[ci];
      OP_BYP_READ, OP_MC_BYP_READ: e.data = memv(r.paddr);
      OP_BYP_WRITE:                rm[r.paddr] = r.data;
      default: ;
    endcase
    expq.push_back(e);
  endfunction

  task automatic send(req_t r);
    model(r);
    @(negedge clk); req_valid = 1; req = r;
    do @(posedge clk); while (!req_ready);
    @(negedge clk); req_valid = 0;
  endtask

  // response monitor
  int nresp = 0;
  always @(posedge clk) if (rst_n && resp_valid && resp_ready) begin
    resp_t e;
    checks++; nresp++;
    if (expq.size() == 0) begin failures++; $display("FAIL unexpected response"); end
    else begin
      e = expq.pop_front();
      if (resp !== e) begin
        failures++;
        $display("FAIL op %s: dst %h/%h tag %h/%h data %h/%h", resp.op.name(), resp.dst, e.dst,
                 resp.tag, e.tag, resp.data[31:0], e.data[31:0]);
      end
    end
  end

  task automatic drain();
    int n = 0;
    while (expq.size() != 0 && n < 5000) begin @(posedge clk); n++; end
  endtask

  // fills the data array so the reference model and the block agree
  task automatic init_array();
    for (int i = 0; i < WAYS*SETS; i++) begin
      automatic caddr_t pc = caddr_t'({i[SW+WW-1:0], 1'b0, 6'b0});
      send(mk(OP_WRITE, pc, '0, rnd_line(), '0, 1));
    end
    drain();
  endtask

  localparam op_e OPS [8] = '{OP_READ, OP_WRITE, OP_LOAD, OP_STORE,
                              OP_BYP_READ, OP_BYP_WRITE, OP_MC_READ, OP_MC_BYP_READ};

  initial begin
    int lat;
    int rd0;
    line_t a;
    repeat (3) @(negedge clk); rst_n = 1;
    init_array();

    // directed: one of each semantic
    a = rnd_line();
    send(mk(OP_WRITE, 24'h000A40, '0, a, '0, 3));                  // way 0, set 5, slice 0... offset bits
    send(mk(OP_READ,  24'h000A40, '0, '0, '0, 3));
    drain();
    // READ latency: from acceptance to response valid
    @(negedge clk); req_valid = 1; req = mk(OP_READ, 24'h000A40, '0, '0, '0, 2); model(req);
    @(posedge clk); @(negedge clk); req_valid = 0;
    lat = 0;
    while (!resp_valid) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 4) begin failures++; $display("FAIL READ latency %0d, want 4", lat); end
    drain();
    rd0 = u_mem.reads;
    send(mk(OP_LOAD,  24'h001840, 32'h0001_0000, '0, '0, 0));      // memory -> cache
    send(mk(OP_READ,  24'h001840, '0, '0, '0, 0));
    send(mk(OP_STORE, 24'h000A40, 32'h0002_0040, '0, '0, 0));      // cache -> memory
    send(mk(OP_BYP_READ, '0, 32'h0002_0040, '0, '0, 0));           // what STORE wrote
    send(mk(OP_BYP_WRITE, '0, 32'h0003_0000, rnd_line(), '0, 0));
    send(mk(OP_BYP_READ, '0, 32'h0003_0000, '0, '0, 0));
    send(mk(OP_MC_READ, 24'h001840, '0, '0, 32'h0000_00F0, 4));
    send(mk(OP_MC_BYP_READ, '0, 32'h0004_0000, '0, 32'h0000_0F00, 8));
    drain();
    checks++;
    if (u_mem.reads - rd0 != 4) begin failures++; $display("FAIL memory reads %0d, want 4", u_mem.reads - rd0); end
    checks++;
    if (u_mem.peek(32'h0002_0040) !== rc[cidx(24'h000A40)]) begin failures++; $display("FAIL STORE data"); end

    // random stream with back-pressure
    fork
      begin
        for (int i = 0; i < 400; i++) begin
          automatic caddr_t pc = caddr_t'({$urandom_range(WAYS*SETS-1), 1'b0, 6'($urandom)});
          automatic paddr_t pa = paddr_t'($urandom_range(63)) << OFF_W;
          send(mk(OPS[$urandom_range(7)], pc, pa, rnd_line(), mmask_t'($urandom), $urandom_range(17)));
        end
      end
      begin
        for (int i = 0; i < 3000; i++) begin
          @(negedge clk); resp_ready = ($urandom_range(3) != 0);
        end
        resp_ready = 1;
      end
    join
    drain();
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d responses missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
