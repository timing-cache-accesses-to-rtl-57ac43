// timecache_level: one cache level with TimeCache first-access timing.
//
// A blocking, write-back, write-allocate set-associative cache whose hits
// are gated by per-context s-bits, so that no process can observe a hit on
// a line that another process brought in:
//   * tag hit and the requester's s-bit set   -> hit (RES_HIT);
//   * tag miss                                -> fetch from below, fill, set
//     Tc = now, set the requester's s-bit and clear all others (RES_MISS);
//     a dirty victim is written back first;
//   * tag hit but s-bit clear (first access)  -> the request is still sent
//     below and the answer awaited, so the latency is that of a miss; the
//     returned data is dropped (the cache copy is the newest), the requester
//     is answered from the cache and its s-bit is set (RES_FIRST).
//   * flush invalidates the line (clearing all its s-bits), writes dirty
//     data back and forwards the flush below; writebacks from an upper level
//     update a present line without touching s-bits and are forwarded below
//     otherwise.
// With tc_enable low the s-bit gate is off and every tag hit is a hit; the
// bookkeeping (Tc, s-bits) continues so the feature can be switched back on.
//
// Context switches are handled through the csw port by trusted software:
// CSW_SAVE / CSW_RESTORE read or write one CHUNK_BITS-wide slice of a
// context's s-bit row through the regular interface of the timestamp array,
// and CSW_RESUME runs the bit-serial Tc/Ts comparison (timestamp_comparator)
// that clears the s-bits of lines filled after the process's Ts, or all of
// them after a timestamp rollover. Requests wait while a command runs.
//
// The hit/miss/first-access rules, the Tc/s-bit update rules and the
// save/restore/compare sequence follow the paper. Blocking operation, the
// handshakes, write policy, writeback and flush handling, and the one-cycle
// lookup are this design's choices.
//
// Interface: up_req_valid/ready/up_req (valid/ready), up_resp_valid/up_resp
// (one-cycle pulse, always accepted); dn_* likewise toward the next level;
// csw_valid/ready/csw_req, csw_resp_valid/csw_rdata; now from the global
// timestamp counter.
// Timing: a hit answers 2 cycles after the request is accepted; a miss or a
// first access answers 3 cycles plus the downstream latency after it (a
// dirty victim adds one downstream writeback). CSW_SAVE and CSW_RESTORE
// answer 1 cycle after acceptance, CSW_RESUME TS_W+4 cycles after it.
module timecache_level
  import tc_pkg::*;
#(
  parameter int unsigned CACHE_BYTES = 32768,
  parameter int unsigned WAYS        = 2,
  parameter int unsigned CTX         = 2,
  parameter int unsigned TS_W        = 32,
  localparam int unsigned LINES  = CACHE_BYTES / LINE_BYTES,
  localparam int unsigned SETS   = LINES / WAYS,
  localparam int unsigned SW     = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned WW     = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned LW     = (LINES > 1) ? $clog2(LINES) : 1,
  localparam int unsigned CW     = (CTX > 1) ? $clog2(CTX) : 1,
  localparam int unsigned TW     = (TS_W > 1) ? $clog2(TS_W) : 1,
  localparam int unsigned NCHUNK = (LINES + CHUNK_BITS - 1) / CHUNK_BITS,
  localparam int unsigned NW     = (NCHUNK > 1) ? $clog2(NCHUNK) : 1,
  localparam int unsigned TAG_W  = ADDR_W - OFF_W - SW
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             tc_enable,
  input  logic [TS_W-1:0]  now,
  // requests from the core or the level above
  input  logic             up_req_valid,
  output logic             up_req_ready,
  input  mem_req_t         up_req,
  output logic             up_resp_valid,
  output mem_resp_t        up_resp,
  // requests to the next level
  output logic             dn_req_valid,
  input  logic             dn_req_ready,
  output mem_req_t         dn_req,
  input  logic             dn_resp_valid,
  input  mem_resp_t        dn_resp,
  // context-switch commands
  input  logic             csw_valid,
  output logic             csw_ready,
  input  csw_req_t         csw_req,
  output logic             csw_resp_valid,
  output logic [CHUNK_BITS-1:0] csw_rdata
);

  typedef enum logic [3:0] {
    S_IDLE, S_LOOKUP, S_WB_REQ, S_WB_WAIT, S_FILL_REQ, S_FILL_WAIT,
    S_FA_REQ, S_FA_WAIT, S_FWD_REQ, S_FWD_WAIT, S_RESP,
    S_CSW, S_CSW_RUN
  } state_e;

  state_e   state;
  mem_req_t req_q;
  csw_req_t csw_q;
  logic [WW-1:0] way_q;
  line_t    wb_line_q;
  addr_t    wb_addr_q;
  line_t    resp_data_q;
  result_e  resp_res_q;

  // ---------------- address split ----------------
  logic [SW-1:0]    set_idx;
  logic [TAG_W-1:0] tag;
  assign set_idx = req_q.addr[OFF_W +: SW];
  assign tag     = req_q.addr[ADDR_W-1 -: TAG_W];

  // ---------------- conventional arrays ----------------
  logic [TAG_W-1:0] rd_tag [WAYS];
  line_t            rd_data [WAYS];
  logic [WAYS-1:0]  rd_valid, rd_dirty;
  logic [WW-1:0]    victim;
  logic             cs_wr_en, cs_wr_data_en, cs_wr_valid, cs_wr_dirty, cs_adv;
  logic [WW-1:0]    cs_wr_way;
  line_t            cs_wr_data;

  cache_store #(.SETS(SETS), .WAYS(WAYS), .TAG_W(TAG_W), .LINE_BITS(LINE_BITS)) u_store (
    .clk, .rst_n,
    .rd_set    (set_idx),
    .rd_tag, .rd_valid, .rd_dirty, .rd_data, .victim,
    .wr_en     (cs_wr_en),
    .wr_data_en(cs_wr_data_en),
    .wr_set    (set_idx),
    .wr_way    (cs_wr_way),
    .wr_tag    (tag),
    .wr_valid  (cs_wr_valid),
    .wr_dirty  (cs_wr_dirty),
    .wr_data   (cs_wr_data),
    .adv       (cs_adv)
  );

  // ---------------- timestamp / s-bit array ----------------
  logic [LW-1:0]    tr_line;
  logic [TS_W-1:0]  tr_tc;
  logic [CTX-1:0]   tr_sbits;
  logic             tr_tc_we;
  logic [CTX-1:0]   tr_sb_we, tr_sb_wdata;
  logic [TW-1:0]    rg_tc_bit;
  logic [LINES-1:0] rg_tc_row;
  logic [CW-1:0]    rg_ctx, cmp_ctx;
  logic [CHUNK_BITS-1:0] rg_chunk_rdata;
  logic             rg_chunk_we, rg_clr_en;
  logic [LINES-1:0] rg_clr_mask;
  logic             cmp_start, cmp_busy, cmp_done, cmp_rollover;

  ts_sbit_array #(.LINES(LINES), .CTX(CTX), .TS_W(TS_W), .CHUNK(CHUNK_BITS)) u_tsa (
    .clk, .rst_n,
    .tr_line, .tr_tc, .tr_sbits,
    .tr_tc_we, .tr_tc_wdata(now),
    .tr_sb_we, .tr_sb_wdata,
    .rg_tc_bit, .rg_tc_row,
    .rg_ctx,
    .rg_chunk      (NW'(csw_q.chunk)),
    .rg_chunk_rdata,
    .rg_chunk_we,
    .rg_chunk_wdata(csw_q.wdata),
    .rg_clr_en, .rg_clr_mask
  );

  timestamp_comparator #(.LINES(LINES), .CTX(CTX), .TS_W(TS_W)) u_cmp (
    .clk, .rst_n,
    .start       (cmp_start),
    .ctx         (CW'(csw_q.ctx)),
    .ts          (TS_W'(csw_q.ts)),
    .now,
    .busy        (cmp_busy),
    .done        (cmp_done),
    .rollover    (cmp_rollover),
    .row_tc_bit  (rg_tc_bit),
    .row_tc      (rg_tc_row),
    .row_ctx     (cmp_ctx),
    .row_clr_en  (rg_clr_en),
    .row_clr_mask(rg_clr_mask)
  );

  assign rg_ctx = cmp_busy ? cmp_ctx : CW'(csw_q.ctx);

  // ---------------- lookup ----------------
  logic [WAYS-1:0] way_hit;
  logic            hit;
  logic [WW-1:0]   hit_way;
  always_comb begin
    hit_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      way_hit[w] = rd_valid[w] && (rd_tag[w] == tag);
      if (way_hit[w]) hit_way = WW'(w);
    end
  end
  assign hit = |way_hit;

  logic [CW-1:0] req_ctx;
  assign req_ctx = CW'(req_q.ctx);

  // the line the transpose interface addresses: the hit way in LOOKUP,
  // the chosen way afterwards
  logic [WW-1:0] cur_way;
  assign cur_way = (state == S_LOOKUP) ? (hit ? hit_way : victim) : way_q;
  assign tr_line = LW'(set_idx * WAYS + cur_way);

  logic sbit_ok;
  assign sbit_ok = tr_sbits[req_ctx] || !tc_enable;

  function automatic line_t merge(line_t old, line_t nw, strb_t strb);
    line_t r;
    for (int b = 0; b < LINE_BYTES; b++)
      r[b*8 +: 8] = strb[b] ? nw[b*8 +: 8] : old[b*8 +: 8];
    return r;
  endfunction

  logic is_rw;
  assign is_rw = (req_q.op == OP_READ) || (req_q.op == OP_WRITE);

  // ---------------- handshakes ----------------
  assign csw_ready    = (state == S_IDLE);
  assign up_req_ready = (state == S_IDLE) && !csw_valid;
  assign cmp_start    = (state == S_CSW) && (csw_q.op == CSW_RESUME);
  assign rg_chunk_we  = (state == S_CSW) && (csw_q.op == CSW_RESTORE);

  always_comb begin
    dn_req_valid = 1'b0;
    dn_req       = req_q;
    unique case (state)
      S_WB_REQ: begin
        dn_req_valid = 1'b1;
        dn_req.op    = OP_WB;
        dn_req.addr  = wb_addr_q;
        dn_req.wdata = wb_line_q;
        dn_req.wstrb = '1;
      end
      S_FILL_REQ, S_FA_REQ: begin
        dn_req_valid = 1'b1;
        dn_req.op    = OP_READ;
        dn_req.wstrb = '0;
      end
      S_FWD_REQ: dn_req_valid = 1'b1;
      default: ;
    endcase
  end

  // ---------------- array writes ----------------
  always_comb begin
    cs_wr_en      = 1'b0;
    cs_wr_data_en = 1'b0;
    cs_wr_way     = cur_way;
    cs_wr_valid   = 1'b1;
    cs_wr_dirty   = 1'b0;
    cs_wr_data    = rd_data[cur_way];
    cs_adv        = 1'b0;
    tr_tc_we      = 1'b0;
    tr_sb_we      = '0;
    tr_sb_wdata   = '0;
    unique case (state)
      S_LOOKUP: begin
        if (hit && is_rw && sbit_ok && req_q.op == OP_WRITE) begin
          cs_wr_en      = 1'b1;
          cs_wr_data_en = 1'b1;
          cs_wr_dirty   = 1'b1;
          cs_wr_data    = merge(rd_data[hit_way], req_q.wdata, req_q.wstrb);
        end else if (hit && req_q.op == OP_WB) begin
          cs_wr_en      = 1'b1;
          cs_wr_data_en = 1'b1;
          cs_wr_dirty   = 1'b1;
          cs_wr_data    = req_q.wdata;
        end else if (hit && req_q.op == OP_FLUSH) begin
          // invalidate: the line and every context's s-bit go
          cs_wr_en    = 1'b1;
          cs_wr_valid = 1'b0;
          tr_sb_we    = '1;
        end
      end
      S_FA_WAIT: if (dn_resp_valid) begin
        // first access complete: keep the cached data, mark the context
        if (req_q.op == OP_WRITE) begin
          cs_wr_en      = 1'b1;
          cs_wr_data_en = 1'b1;
          cs_wr_dirty   = 1'b1;
          cs_wr_data    = merge(rd_data[way_q], req_q.wdata, req_q.wstrb);
        end
        tr_sb_we[req_ctx]    = 1'b1;
        tr_sb_wdata[req_ctx] = 1'b1;
      end
      S_FILL_WAIT: if (dn_resp_valid) begin
        // fill: new Tc, requester's s-bit set, all others cleared
        cs_wr_en      = 1'b1;
        cs_wr_data_en = 1'b1;
        cs_wr_dirty   = (req_q.op == OP_WRITE);
        cs_wr_data    = (req_q.op == OP_WRITE)
                        ? merge(dn_resp.rdata, req_q.wdata, req_q.wstrb)
                        : dn_resp.rdata;
        cs_adv        = 1'b1;
        tr_tc_we      = 1'b1;
        tr_sb_we      = '1;
        tr_sb_wdata[req_ctx] = 1'b1;
      end
      default: ;
    endcase
  end

  // ---------------- control ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      up_resp_valid  <= 1'b0;
      csw_resp_valid <= 1'b0;
      req_q          <= '0;
      csw_q          <= '0;
      way_q          <= '0;
      wb_line_q      <= '0;
      wb_addr_q      <= '0;
      resp_data_q    <= '0;
      resp_res_q     <= RES_OTHER;
      csw_rdata      <= '0;
    end else begin
      up_resp_valid  <= 1'b0;
      csw_resp_valid <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (csw_valid) begin
            csw_q <= csw_req;
            state <= S_CSW;
          end else if (up_req_valid) begin
            req_q <= up_req;
            state <= S_LOOKUP;
          end
        end

        S_LOOKUP: begin
          way_q      <= hit ? hit_way : victim;
          wb_line_q  <= hit ? rd_data[hit_way] : rd_data[victim];
          wb_addr_q  <= hit ? {tag, set_idx, OFF_W'(0)}
                            : {rd_tag[victim], set_idx, OFF_W'(0)};
          resp_res_q <= RES_OTHER;
          resp_data_q <= '0;
          if (is_rw) begin
            if (hit && sbit_ok) begin
              resp_res_q  <= RES_HIT;
              resp_data_q <= (req_q.op == OP_WRITE)
                             ? merge(rd_data[hit_way], req_q.wdata, req_q.wstrb)
                             : rd_data[hit_way];
              state       <= S_RESP;
            end else if (hit) begin
              state <= S_FA_REQ;
            end else if (rd_valid[victim] && rd_dirty[victim]) begin
              state <= S_WB_REQ;
            end else begin
              state <= S_FILL_REQ;
            end
          end else if (req_q.op == OP_WB) begin
            state <= hit ? S_RESP : S_FWD_REQ;
          end else begin  // OP_FLUSH
            state <= (hit && rd_dirty[hit_way]) ? S_WB_REQ : S_FWD_REQ;
          end
        end

        S_WB_REQ:  if (dn_req_ready) state <= S_WB_WAIT;
        S_WB_WAIT: if (dn_resp_valid)
                     state <= (req_q.op == OP_FLUSH) ? S_FWD_REQ : S_FILL_REQ;

        S_FILL_REQ:  if (dn_req_ready) state <= S_FILL_WAIT;
        S_FILL_WAIT: if (dn_resp_valid) begin
          resp_res_q  <= RES_MISS;
          resp_data_q <= (req_q.op == OP_WRITE)
                         ? merge(dn_resp.rdata, req_q.wdata, req_q.wstrb)
                         : dn_resp.rdata;
          state       <= S_RESP;
        end

        S_FA_REQ:  if (dn_req_ready) state <= S_FA_WAIT;
        S_FA_WAIT: if (dn_resp_valid) begin
          // the data from below is discarded
          resp_res_q  <= RES_FIRST;
          resp_data_q <= (req_q.op == OP_WRITE)
                         ? merge(rd_data[way_q], req_q.wdata, req_q.wstrb)
                         : rd_data[way_q];
          state       <= S_RESP;
        end

        S_FWD_REQ:  if (dn_req_ready) state <= S_FWD_WAIT;
        S_FWD_WAIT: if (dn_resp_valid) state <= S_RESP;

        S_RESP: begin
          up_resp_valid <= 1'b1;
          state         <= S_IDLE;
        end

        S_CSW: begin
          if (csw_q.op == CSW_RESUME) begin
            state <= S_CSW_RUN;
          end else begin
            csw_rdata      <= rg_chunk_rdata;
            csw_resp_valid <= 1'b1;
            state          <= S_IDLE;
          end
        end

        S_CSW_RUN: if (cmp_done) begin
          csw_resp_valid <= 1'b1;
          state          <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  assign up_resp.rdata  = resp_data_q;
  assign up_resp.result = resp_res_q;

  // ---------------- protocol checks ----------------
  a_dn_stable: assert property (@(posedge clk) disable iff (!rst_n)
    dn_req_valid && !dn_req_ready |=> dn_req_valid && $stable(dn_req));
  a_ctx_range: assert property (@(posedge clk) disable iff (!rst_n)
    up_req_valid && up_req_ready |-> int'(up_req.ctx) < CTX);
  a_one_resp: assert property (@(posedge clk) disable iff (!rst_n)
    !(up_resp_valid && csw_resp_valid));

endmodule
