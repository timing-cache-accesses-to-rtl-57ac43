// tc_pkg: types and constants shared by the TimeCache blocks.
//
// Every cache level speaks the same line-granular request/response format,
// so levels can be stacked: a request names the operation, the byte address
// of the line, the hardware context (thread) that issued it, and for writes
// the line data with a per-byte strobe. Sizes that follow the paper: 64-byte
// lines and 32-bit timestamps. The 48-bit address and the 512-bit s-bit
// save/restore chunk (one 64-byte memory access) follow the paper's
// accounting of s-bit copies; the address width is this design's choice.
package tc_pkg;

  localparam int unsigned LINE_BYTES = 64;
  localparam int unsigned LINE_BITS  = LINE_BYTES * 8;
  localparam int unsigned OFF_W      = $clog2(LINE_BYTES);
  localparam int unsigned ADDR_W     = 48;
  localparam int unsigned CTX_ID_W   = 4;     // up to 16 hardware contexts
  localparam int unsigned CHUNK_BITS = 512;   // one 64-byte s-bit save/restore access

  typedef logic [LINE_BITS-1:0]  line_t;
  typedef logic [LINE_BYTES-1:0] strb_t;
  typedef logic [ADDR_W-1:0]     addr_t;
  typedef logic [CTX_ID_W-1:0]   ctx_id_t;

  // Operations on the request ports.
  //   OP_READ  : read a line
  //   OP_WRITE : write the strobed bytes of a line
  //   OP_WB    : full-line writeback of a dirty line from the level above
  //   OP_FLUSH : invalidate the line at this and all lower levels (clflush)
  typedef enum logic [1:0] {
    OP_READ  = 2'd0,
    OP_WRITE = 2'd1,
    OP_WB    = 2'd2,
    OP_FLUSH = 2'd3
  } op_e;

  typedef struct packed {
    op_e     op;
    addr_t   addr;
    ctx_id_t ctx;
    line_t   wdata;
    strb_t   wstrb;
  } mem_req_t;

  // How a request was served; reported with every response so that tests
  // and performance counters can see first-access misses.
  typedef enum logic [1:0] {
    RES_HIT   = 2'd0,   // tag hit and the context's s-bit was set
    RES_MISS  = 2'd1,   // line absent: fetched and filled
    RES_FIRST = 2'd2,   // tag hit, s-bit clear: delayed like a miss, no fill
    RES_OTHER = 2'd3    // writeback or flush
  } result_e;

  typedef struct packed {
    line_t   rdata;
    result_e result;
  } mem_resp_t;

  // Context-switch commands issued by trusted software.
  //   CSW_SAVE    : read s-bit chunk `chunk` of context `ctx`
  //   CSW_RESTORE : write s-bit chunk `chunk` of context `ctx`
  //   CSW_RESUME  : load Ts and bring the context's s-bits up to date
  typedef enum logic [1:0] {
    CSW_SAVE    = 2'd0,
    CSW_RESTORE = 2'd1,
    CSW_RESUME  = 2'd2
  } csw_op_e;

  localparam int unsigned CHUNK_IDX_W = 16;

  typedef struct packed {
    csw_op_e                 op;
    ctx_id_t                 ctx;
    logic [CHUNK_IDX_W-1:0]  chunk;
    logic [CHUNK_BITS-1:0]   wdata;
    logic [31:0]             ts;     // Ts, used by CSW_RESUME (low TS_W bits)
  } csw_req_t;

endpackage
