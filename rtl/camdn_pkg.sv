// camdn_pkg: constants, opcodes and message formats shared by the NPU-controlled
// shared cache. The cache is 16 MB, split into 8 slices of 16 ways; 12 of the
// 16 ways form the NPU subspace and 4 stay with the hardware-managed cache.
// The NPU subspace is paged in 32 KB pages, so a per-NPU cache page table has
// at most 512 entries. Those numbers follow the paper. The 64-byte line, the
// 32-bit memory address and all message encodings are this design's choices.
//
// Physical cache address (pcaddr), low to high:
//   [5:0] byte offset | [8:6] slice index | [19:9] set index | [23:20] way index
// A 32 KB page covers 512 lines = 64 sets of one way in each of the 8 slices,
// so the physical cache page number (pcpn) is pcaddr[23:15] = {way, set[10:6]}.
//
// Message fields are sized for the largest configuration; reduced
// configurations use the low bits of each field.
package camdn_pkg;

  // ---- sizes of the configuration the paper evaluates ----
  localparam int unsigned CACHE_BYTES = 16 * 1024 * 1024;
  localparam int unsigned NUM_SLICES  = 8;
  localparam int unsigned NUM_WAYS    = 16;
  localparam int unsigned NPU_WAYS    = 12;
  localparam int unsigned NUM_NPUS    = 16;
  localparam int unsigned NUM_CPUS    = 2;   // not given by the paper
  localparam int unsigned LINE_BYTES  = 64;  // not given by the paper
  localparam int unsigned PAGE_BYTES  = 32 * 1024;
  localparam int unsigned CPT_ENTRIES = CACHE_BYTES / PAGE_BYTES;          // 512
  localparam int unsigned NUM_SETS    = CACHE_BYTES / (LINE_BYTES * NUM_SLICES * NUM_WAYS); // 2048

  localparam int unsigned LINE_W   = LINE_BYTES * 8;                        // 512
  localparam int unsigned OFF_W    = $clog2(LINE_BYTES);                    // 6
  localparam int unsigned SLICE_W  = $clog2(NUM_SLICES);                    // 3
  localparam int unsigned SET_W    = $clog2(NUM_SETS);                      // 11
  localparam int unsigned WAY_W    = $clog2(NUM_WAYS);                      // 4
  localparam int unsigned CADDR_W  = $clog2(CACHE_BYTES);                   // 24
  localparam int unsigned PGOFF_W  = $clog2(PAGE_BYTES);                    // 15
  localparam int unsigned CPN_W    = CADDR_W - PGOFF_W;                     // 9
  localparam int unsigned PADDR_W  = 32;
  localparam int unsigned MAX_MASTERS = 32;
  localparam int unsigned SRC_W    = $clog2(MAX_MASTERS);
  localparam int unsigned TAGF_W   = 16;   // request tag echoed in the response
  localparam int unsigned NLINES_W = 16;

  // Reset value of the way mask: bit i = 1 means way i is a general-purpose
  // (CPU) way. Ways 0-3 general purpose, ways 4-15 NPU subspace.
  localparam logic [NUM_WAYS-1:0] WAY_MASK_DEFAULT = 16'h000F;

  typedef logic [LINE_W-1:0]      line_t;
  typedef logic [PADDR_W-1:0]     paddr_t;
  typedef logic [CADDR_W-1:0]     caddr_t;
  typedef logic [CPN_W-1:0]       cpn_t;
  typedef logic [MAX_MASTERS-1:0] mmask_t;
  typedef logic [SRC_W-1:0]       src_t;

  // A request is either a normal (hardware-managed) cache request or an
  // NPU-specific request handled by the NPU-exclusive controller.
  typedef enum logic {
    KIND_NORMAL = 1'b0,
    KIND_NPU    = 1'b1
  } kind_e;

  typedef enum logic [3:0] {
    // normal requests
    OP_CPU_RD      = 4'h0,  // read a line through the hardware-managed cache
    OP_CPU_WR      = 4'h1,  // write a line through the hardware-managed cache
    // NPU basic semantics
    OP_READ        = 4'h2,  // cache  -> NPU
    OP_WRITE       = 4'h3,  // NPU    -> cache
    OP_LOAD        = 4'h4,  // memory -> cache
    OP_STORE       = 4'h5,  // cache  -> memory
    // NPU advanced semantics
    OP_BYP_READ    = 4'h6,  // memory -> NPU, around the cache
    OP_BYP_WRITE   = 4'h7,  // NPU    -> memory, around the cache
    OP_MC_READ     = 4'h8,  // cache  -> group of NPUs
    OP_MC_BYP_READ = 4'h9   // memory -> group of NPUs
  } op_e;

  typedef struct packed {
    kind_e  kind;
    op_e    op;
    src_t   src;     // issuing master
    mmask_t mcast;   // destination group of multicast reads
    paddr_t paddr;   // memory address (normal requests: the cached address)
    caddr_t pcaddr;  // physical cache address (NPU requests to the cache)
    logic [TAGF_W-1:0] tag;  // opaque, returned in the response
    line_t  data;
  } req_t;

  typedef struct packed {
    mmask_t dst;     // every master that receives this response
    src_t   src;     // master that issued the request
    op_e    op;
    logic [TAGF_W-1:0] tag;
    line_t  data;
  } resp_t;

  typedef struct packed {
    logic   we;
    paddr_t addr;
    line_t  data;
  } mem_req_t;

  // A transfer descriptor handed to an NPU DMA.
  typedef struct packed {
    op_e    op;
    caddr_t vcaddr;  // first line in the model's virtual cache space
    paddr_t paddr;   // first line in memory
    logic [NLINES_W-1:0] nlines;
    mmask_t mcast;   // group for multicast reads (issuer included)
  } dma_desc_t;

  function automatic logic is_bypass(op_e op);
    return op inside {OP_BYP_READ, OP_BYP_WRITE, OP_MC_BYP_READ};
  endfunction

  function automatic logic is_multicast(op_e op);
    return op inside {OP_MC_READ, OP_MC_BYP_READ};
  endfunction

  // Ops whose response carries a line back to the requester(s).
  function automatic logic returns_data(op_e op);
    return op inside {OP_CPU_RD, OP_READ, OP_BYP_READ, OP_MC_READ, OP_MC_BYP_READ};
  endfunction

  // Ops whose request carries a line from the requester.
  function automatic logic carries_data(op_e op);
    return op inside {OP_CPU_WR, OP_WRITE, OP_BYP_WRITE};
  endfunction

endpackage
