// tb_cache_ctrl: the hardware-managed controller of a reduced slice (4 ways x
// 16 sets, slice 1 of 2) with its tag array, data array and the memory
// model. Checks against a reference of what memory should hold: random
// whole-line reads and writes with evictions under way mask 0011, hit timing
// and no memory traffic on a hit, dirty write-back with a single allowed way,
// direct-to-memory operation with no allowed way, and, throughout, that the
// controller never writes a tag or a data line in a masked (NPU) way.
module tb_cache_ctrl;
  import camdn_pkg::*;
  import tb_pkg::*;
  localparam int WAYS = 4, SETS = 16, SW = 4, SLW = 1, TW = PADDR_W - OFF_W - SLW - SW;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [WAYS-1:0] way_mask = 4'b0011;
  logic req_valid = 0, req_ready, resp_valid, resp_ready = 1;
  req_t req = '0; resp_t resp;
  logic tag_rd_en, tag_wr_en, tag_wr_valid, tag_wr_dirty;
  logic [SW-1:0] tag_rd_set, tag_wr_set; logic [1:0] tag_wr_way; logic [TW-1:0] tag_wr_tag;
  logic [WAYS-1:0] tag_rd_valid, tag_rd_dirty; logic [WAYS-1:0][TW-1:0] tag_rd_tag;
  logic da_req, da_we; logic [1:0] da_way; logic [SW-1:0] da_set; line_t da_wdata, da_rdata;
  logic mem_req_valid, mem_req_ready, mem_resp_valid; mem_req_t mem_req; line_t mem_resp_data;

  cache_ctrl #(.WAYS(WAYS), .SLICE_W_P(SLW), .SET_W_P(SW)) dut (
    .clk, .rst_n, .slice_id(1'b1), .way_mask,
    .req_valid, .req_ready, .req, .resp_valid, .resp_ready, .resp,
    .tag_rd_en, .tag_rd_set, .tag_rd_valid, .tag_rd_dirty, .tag_rd_tag,
    .tag_wr_en, .tag_wr_set, .tag_wr_way, .tag_wr_valid, .tag_wr_dirty, .tag_wr_tag,
    .da_req, .da_we, .da_way, .da_set, .da_wdata, .da_gnt(da_req), .da_rdata,
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_resp_valid, .mem_resp_data
  );
  tag_array #(.WAYS(WAYS), .SETS(SETS), .TAG_W(TW)) u_tags (
    .clk, .rst_n, .rd_en(tag_rd_en), .rd_set(tag_rd_set), .rd_valid(tag_rd_valid),
    .rd_dirty(tag_rd_dirty), .rd_tag(tag_rd_tag), .wr_en(tag_wr_en), .wr_set(tag_wr_set),
    .wr_way(tag_wr_way), .wr_valid(tag_wr_valid), .wr_dirty(tag_wr_dirty), .wr_tag(tag_wr_tag)
  );
  data_array #(.WAYS(WAYS), .SETS(SETS)) u_da (
    .clk, .en(da_req), .we(da_we), .way(da_way), .set(da_set), .wdata(da_wdata), .rdata(da_rdata)
  );
  mem_model u_mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
                   .resp_valid(mem_resp_valid), .resp_data(mem_resp_data));

  line_t rm [paddr_t];
  function automatic line_t memv(paddr_t a);
    return rm.exists(a) ? rm[a] : pat(a);
  endfunction

  // the partition: no write may land in an NPU way
  always @(posedge clk) if (rst_n) begin
    if (tag_wr_en && !way_mask[tag_wr_way]) begin failures++; $display("FAIL tag write into masked way %0d", tag_wr_way); end
    if (da_req && da_we && !way_mask[da_way]) begin failures++; $display("FAIL data write into masked way %0d", da_way); end
  end

  // address in slice 1: {tag, set, slice=1, offset=0}
  function automatic paddr_t addr(int tg, int st);
    return paddr_t'({TW'(tg), SW'(st), 1'b1, 6'b0});
  endfunction

  int lat;
  task automatic access(bit wr, paddr_t a, line_t d = '0);
    @(negedge clk); req_valid = 1; req = '0; req.kind = KIND_NORMAL;
    req.op = wr ? OP_CPU_WR : OP_CPU_RD; req.src = 5'd17; req.paddr = a; req.data = d;
    req.tag = 16'(a >> 6);
    do @(posedge clk); while (!req_ready);
    @(negedge clk); req_valid = 0; lat = 0;
    while (!resp_valid) begin @(negedge clk); lat++; end
    checks++;
    if (resp.dst != (mmask_t'(1) << 17) || resp.tag != 16'(a >> 6) || resp.op != req.op ||
        (!wr && resp.data !== memv(a))) begin
      failures++; $display("FAIL %s %h: data %h want %h", wr ? "WR" : "RD", a, resp.data[31:0], memv(a)[31:0]);
    end
    if (wr) rm[a] = d;
  endtask

  initial begin
    int r0, w0;
    line_t d;
    repeat (3) @(negedge clk); rst_n = 1;

    // random traffic, 2 allowed ways, 4 tags per set -> evictions
    for (int i = 0; i < 600; i++) begin
      automatic paddr_t a = addr($urandom_range(3), $urandom_range(SETS-1));
      access($urandom_range(1), a, rnd_line());
    end

    // hit: no memory traffic, fixed latency
    access(0, addr(9, 3));
    r0 = u_mem.reads; w0 = u_mem.writes;
    access(0, addr(9, 3));
    checks++;
    if (u_mem.reads != r0 || u_mem.writes != w0) begin failures++; $display("FAIL hit caused memory traffic"); end
    checks++;
    if (lat != 3) begin failures++; $display("FAIL read-hit latency %0d, want 3", lat); end

    // one allowed way, fresh addresses: dirty line written back on conflict
    way_mask = 4'b0100;
    d = rnd_line();
    access(1, addr(20, 7), d);
    w0 = u_mem.writes;
    access(0, addr(21, 7));
    checks++;
    if (u_mem.writes != w0 + 1 || u_mem.peek(addr(20, 7)) !== d) begin
      failures++; $display("FAIL dirty write-back");
    end
    access(0, addr(20, 7));

    // no allowed way: everything goes to memory
    way_mask = 4'b0000;
    d = rnd_line();
    w0 = u_mem.writes; r0 = u_mem.reads;
    access(1, addr(40, 2), d);
    access(0, addr(40, 2));
    checks++;
    if (u_mem.writes != w0 + 1 || u_mem.reads != r0 + 1) begin failures++; $display("FAIL uncached traffic"); end

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
