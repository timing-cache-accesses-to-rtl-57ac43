// timecache: top level - a two-level TimeCache hierarchy.
//
// TimeCache removes the timing channel that shared code and data open in
// shared caches (flush+reload, evict+reload): a process never gets a hit on
// a line until it has itself paid a miss's latency for it, whoever brought
// the line in. Every cache level tracks this with one s-bit per line and
// hardware context (timecache_level); a single time base
// (timestamp_counter) stamps each fill with its load time Tc and gives
// software the time it saves as a preempted process's Ts. At a context
// switch software restores the incoming process's s-bits and Ts into every
// level, and each level's bit-serial comparator clears the s-bits of lines
// with Tc > Ts.
//
// Structure (the evaluated configuration): split 32 KB L1 instruction and
// data caches and a shared 2 MB last-level cache (LLC), 64-byte lines, two
// hardware contexts, 32-bit timestamps. An L1 first access goes to the LLC,
// which applies the same rule, so its latency is the LLC's or memory's,
// whichever a real miss would have seen. The L1s share the LLC through
// l1_arbiter. Associativity (2-way L1s, 8-way LLC) is this design's choice.
//
// Interface: instruction side (i_*), data side (d_*), the memory below the
// LLC (m_*), all with the request/response format of tc_pkg; the
// context-switch command port (csw_*), with csw_level choosing the level
// (0 = L1I, 1 = L1D, 2 = LLC); tc_enable switches the first-access rule on
// or off in all levels; `now` is the current time. Handshakes and timing
// are those of timecache_level; the arbiter adds one cycle on the way to
// the LLC.
module timecache
  import tc_pkg::*;
#(
  parameter int unsigned L1I_BYTES = 32768,
  parameter int unsigned L1D_BYTES = 32768,
  parameter int unsigned LLC_BYTES = 2097152,
  parameter int unsigned L1_WAYS   = 2,
  parameter int unsigned LLC_WAYS  = 8,
  parameter int unsigned CTX       = 2,
  parameter int unsigned TS_W      = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             tc_enable,
  output logic [TS_W-1:0]  now,
  output logic             ts_wrapped,
  // instruction side
  input  logic             i_req_valid,
  output logic             i_req_ready,
  input  mem_req_t         i_req,
  output logic             i_resp_valid,
  output mem_resp_t        i_resp,
  // data side
  input  logic             d_req_valid,
  output logic             d_req_ready,
  input  mem_req_t         d_req,
  output logic             d_resp_valid,
  output mem_resp_t        d_resp,
  // memory below the LLC
  output logic             m_req_valid,
  input  logic             m_req_ready,
  output mem_req_t         m_req,
  input  logic             m_resp_valid,
  input  mem_resp_t        m_resp,
  // context-switch commands
  input  logic             csw_valid,
  input  logic [1:0]       csw_level,
  output logic             csw_ready,
  input  csw_req_t         csw_req,
  output logic             csw_resp_valid,
  output logic [CHUNK_BITS-1:0] csw_rdata
);

  timestamp_counter #(.TS_W(TS_W)) u_time (
    .clk, .rst_n, .now, .wrapped(ts_wrapped)
  );

  // L1 -> arbiter and arbiter -> LLC
  logic      il_req_valid, il_req_ready, il_resp_valid;
  logic      dl_req_valid, dl_req_ready, dl_resp_valid;
  logic      ll_req_valid, ll_req_ready, ll_resp_valid;
  mem_req_t  il_req, dl_req, ll_req;
  mem_resp_t il_resp, dl_resp, ll_resp;

  // context-switch command routing
  logic [2:0] lv_valid, lv_ready, lv_resp_valid;
  logic [CHUNK_BITS-1:0] lv_rdata [3];

  always_comb begin
    lv_valid = '0;
    if (csw_level <= 2'd2) lv_valid[csw_level] = csw_valid;
  end
  assign csw_ready      = (csw_level <= 2'd2) && lv_ready[csw_level];
  assign csw_resp_valid = |lv_resp_valid;
  always_comb begin
    csw_rdata = '0;
    for (int l = 0; l < 3; l++) if (lv_resp_valid[l]) csw_rdata = lv_rdata[l];
  end

  timecache_level #(.CACHE_BYTES(L1I_BYTES), .WAYS(L1_WAYS), .CTX(CTX), .TS_W(TS_W)) u_l1i (
    .clk, .rst_n, .tc_enable, .now,
    .up_req_valid(i_req_valid), .up_req_ready(i_req_ready), .up_req(i_req),
    .up_resp_valid(i_resp_valid), .up_resp(i_resp),
    .dn_req_valid(il_req_valid), .dn_req_ready(il_req_ready), .dn_req(il_req),
    .dn_resp_valid(il_resp_valid), .dn_resp(il_resp),
    .csw_valid(lv_valid[0]), .csw_ready(lv_ready[0]), .csw_req,
    .csw_resp_valid(lv_resp_valid[0]), .csw_rdata(lv_rdata[0])
  );

  timecache_level #(.CACHE_BYTES(L1D_BYTES), .WAYS(L1_WAYS), .CTX(CTX), .TS_W(TS_W)) u_l1d (
    .clk, .rst_n, .tc_enable, .now,
    .up_req_valid(d_req_valid), .up_req_ready(d_req_ready), .up_req(d_req),
    .up_resp_valid(d_resp_valid), .up_resp(d_resp),
    .dn_req_valid(dl_req_valid), .dn_req_ready(dl_req_ready), .dn_req(dl_req),
    .dn_resp_valid(dl_resp_valid), .dn_resp(dl_resp),
    .csw_valid(lv_valid[1]), .csw_ready(lv_ready[1]), .csw_req,
    .csw_resp_valid(lv_resp_valid[1]), .csw_rdata(lv_rdata[1])
  );

  l1_arbiter u_arb (
    .clk, .rst_n,
    .a_req_valid(il_req_valid), .a_req_ready(il_req_ready), .a_req(il_req),
    .a_resp_valid(il_resp_valid), .a_resp(il_resp),
    .b_req_valid(dl_req_valid), .b_req_ready(dl_req_ready), .b_req(dl_req),
    .b_resp_valid(dl_resp_valid), .b_resp(dl_resp),
    .m_req_valid(ll_req_valid), .m_req_ready(ll_req_ready), .m_req(ll_req),
    .m_resp_valid(ll_resp_valid), .m_resp(ll_resp)
  );

  timecache_level #(.CACHE_BYTES(LLC_BYTES), .WAYS(LLC_WAYS), .CTX(CTX), .TS_W(TS_W)) u_llc (
    .clk, .rst_n, .tc_enable, .now,
    .up_req_valid(ll_req_valid), .up_req_ready(ll_req_ready), .up_req(ll_req),
    .up_resp_valid(ll_resp_valid), .up_resp(ll_resp),
    .dn_req_valid(m_req_valid), .dn_req_ready(m_req_ready), .dn_req(m_req),
    .dn_resp_valid(m_resp_valid), .dn_resp(m_resp),
    .csw_valid(lv_valid[2]), .csw_ready(lv_ready[2]), .csw_req,
    .csw_resp_valid(lv_resp_valid[2]), .csw_rdata(lv_rdata[2])
  );

endmodule
