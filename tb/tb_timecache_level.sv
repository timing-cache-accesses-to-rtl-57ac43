// tb_timecache_level: directed checks of one TimeCache level.
// A 1 KB, 2-way level (8 sets) with two hardware contexts and 12-bit
// timestamps sits on a fixed-latency memory model; the testbench drives
// `now` itself so it can place timestamps and force a rollover. Scenarios:
//   1. miss, then hit; another context's first access is a FIRST result
//      whose latency equals the miss latency and whose data comes from the
//      cache; after it, that context hits.
//   2. flush+reload: after the attacker's flush and the victim's reload,
//      the attacker's reload is not a hit and takes the miss latency.
//   3. write-allocate and write-back: a dirty victim is written back before
//      the new line is fetched, and the data survives the round trip.
//   4. context switch: s-bits saved and restored through the chunk port;
//      resume with Ts clears only lines with Tc > Ts (timed: TS_W+4 cycles);
//      resume with Ts > now (rollover) clears every s-bit of the context.
//   5. with tc_enable low, another context's access to a present line hits.
module tb_timecache_level;
  import tc_pkg::*;
  localparam int CACHE_BYTES = 1024, WAYS = 2, CTX = 2, TS_W = 12, MEM_LAT = 10;
  localparam int SETS = CACHE_BYTES / LINE_BYTES / WAYS;

  logic clk = 0, rst_n = 0, tc_enable = 1;
  logic [TS_W-1:0] now = '0;
  logic up_req_valid = 0, up_req_ready, up_resp_valid;
  mem_req_t up_req = '0;
  mem_resp_t up_resp;
  logic dn_req_valid, dn_req_ready, dn_resp_valid;
  mem_req_t dn_req;
  mem_resp_t dn_resp;
  logic csw_valid = 0, csw_ready, csw_resp_valid;
  csw_req_t csw_req = '0;
  logic [CHUNK_BITS-1:0] csw_rdata;
  int n_read, n_wb, n_flush;
  int checks = 0, failures = 0;

  timecache_level #(.CACHE_BYTES(CACHE_BYTES), .WAYS(WAYS), .CTX(CTX), .TS_W(TS_W)) dut (.*);

  tb_mem_model #(.LATENCY(MEM_LAT)) mem (
    .clk, .rst_n, .req_valid(dn_req_valid), .req_ready(dn_req_ready), .req(dn_req),
    .resp_valid(dn_resp_valid), .resp(dn_resp), .n_read, .n_wb, .n_flush);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) now <= now + 1'b1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic line_t pattern(addr_t a);
    line_t l;
    for (int w = 0; w < LINE_BITS / 32; w++) l[w*32 +: 32] = a[37:6] ^ (32'h9E37_79B9 * (w + 1));
    return l;
  endfunction

  function automatic addr_t la(int set, int tag);
    return addr_t'((tag * SETS + set) * LINE_BYTES);
  endfunction

  // one request; returns the response and the cycles from acceptance
  task automatic access(input op_e op, input addr_t a, input int ctx, input line_t wd,
                        input strb_t ws, output mem_resp_t r, output int lat);
    @(negedge clk);
    up_req_valid = 1; up_req.op = op; up_req.addr = a; up_req.ctx = ctx_id_t'(ctx);
    up_req.wdata = wd; up_req.wstrb = ws;
    while (!up_req_ready) @(negedge clk);
    @(negedge clk);
    up_req_valid = 0;
    lat = 0;
    while (!up_resp_valid) begin @(negedge clk); lat++; end
    r = up_resp;
  endtask

  task automatic csw(input csw_op_e op, input int ctx, input int chunk,
                     input logic [CHUNK_BITS-1:0] wd, input int ts,
                     output logic [CHUNK_BITS-1:0] rd, output int lat);
    @(negedge clk);
    csw_valid = 1; csw_req.op = op; csw_req.ctx = ctx_id_t'(ctx);
    csw_req.chunk = CHUNK_IDX_W'(chunk); csw_req.wdata = wd; csw_req.ts = 32'(ts);
    while (!csw_ready) @(negedge clk);
    @(negedge clk);
    csw_valid = 0;
    lat = 0;
    while (!csw_resp_valid) begin @(negedge clk); lat++; end
    rd = csw_rdata;
  endtask

  task automatic expect_res(string what, mem_resp_t r, result_e res, line_t d, int lat, int exp_lat);
    checks += 3;
    if (r.result != res) begin failures++; $display("%s: result %s expected %s", what, r.result.name(), res.name()); end
    if (r.rdata !== d)   begin failures++; $display("%s: wrong data", what); end
    if (exp_lat >= 0 && lat != exp_lat) begin failures++; $display("%s: latency %0d expected %0d", what, lat, exp_lat); end
  endtask

  initial begin
    mem_resp_t r;
    int lat, lat_miss, lat_first, t0, hit_lat;
    int n0;
    line_t d, wdat;
    logic [CHUNK_BITS-1:0] saved0, rd;
    addr_t A, B, C, D;
    int ts_saved;

    A = la(1, 3); B = la(2, 5); C = la(2, 6); D = la(2, 7);
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. miss, hit, first access by the other context
    access(OP_READ, A, 0, '0, '0, r, lat_miss);
    expect_res("ctx0 miss", r, RES_MISS, pattern(A), lat_miss, MEM_LAT + 3);
    access(OP_READ, A, 0, '0, '0, r, hit_lat);
    expect_res("ctx0 hit", r, RES_HIT, pattern(A), hit_lat, 2);
    n0 = n_read;
    access(OP_READ, A, 1, '0, '0, r, lat_first);
    expect_res("ctx1 first access", r, RES_FIRST, pattern(A), lat_first, lat_miss);
    checks++; if (n_read != n0 + 1) begin failures++; $display("first access sent no request below"); end
    access(OP_READ, A, 1, '0, '0, r, lat);
    expect_res("ctx1 hit", r, RES_HIT, pattern(A), lat, 2);

    // 2. flush+reload: ctx0 attacker, ctx1 victim
    access(OP_FLUSH, A, 0, '0, '0, r, lat);
    checks++; if (n_flush != 1) failures++;
    access(OP_READ, A, 1, '0, '0, r, lat);
    expect_res("victim reload", r, RES_MISS, pattern(A), lat, lat_miss);
    access(OP_READ, A, 0, '0, '0, r, lat);
    expect_res("attacker reload", r, RES_FIRST, pattern(A), lat, lat_miss);

    // 3. write-allocate, dirty eviction (set 2 has two ways: B, C, then D)
    wdat = '0; wdat[63:0] = 64'hDEAD_BEEF_0123_4567;
    d = pattern(B); d[63:0] = wdat[63:0];
    access(OP_WRITE, B, 0, wdat, strb_t'(8'hFF), r, lat);
    expect_res("write miss", r, RES_MISS, d, lat, lat_miss);
    access(OP_READ, B, 1, '0, '0, r, lat);
    expect_res("other ctx reads written line", r, RES_FIRST, d, lat, lat_miss);
    access(OP_READ, C, 0, '0, '0, r, lat);
    expect_res("fill second way", r, RES_MISS, pattern(C), lat, lat_miss);
    n0 = n_wb;
    access(OP_READ, D, 0, '0, '0, r, lat);
    expect_res("evict dirty B", r, RES_MISS, pattern(D), lat, lat_miss + MEM_LAT + 1);
    checks++; if (n_wb != n0 + 1) begin failures++; $display("no writeback"); end
    access(OP_READ, B, 1, '0, '0, r, lat);
    expect_res("B refetched after writeback", r, RES_MISS, d, lat, -1);

    // 4. context switches on hardware context 0
    //    now ctx0 has s-bits for A (first access in 2.) and C (its fill)
    csw(CSW_SAVE, 0, 0, '0, 0, saved0, lat);
    checks++; if (lat != 1) begin failures++; $display("save latency %0d", lat); end
    ts_saved = int'(now);
    repeat (5) @(negedge clk);
    // a new process on ctx0: zero s-bits, Ts = 0
    csw(CSW_RESTORE, 0, 0, '0, 0, rd, lat);
    csw(CSW_RESUME, 0, 0, '0, 0, rd, lat);
    checks++; if (lat != TS_W + 4) begin failures++; $display("resume latency %0d expected %0d", lat, TS_W + 4); end
    access(OP_READ, A, 0, '0, '0, r, lat);
    expect_res("new process sees first access", r, RES_FIRST, pattern(A), lat, lat_miss);
    // while the first process is away, ctx1 reloads C (flush + read)
    access(OP_FLUSH, C, 1, '0, '0, r, lat);
    access(OP_READ, C, 1, '0, '0, r, lat);
    // switch the first process back in
    csw(CSW_RESTORE, 0, 0, saved0, 0, rd, lat);
    csw(CSW_RESUME, 0, 0, '0, ts_saved, rd, lat);
    access(OP_READ, A, 0, '0, '0, r, lat);
    expect_res("restored s-bit keeps hit", r, RES_HIT, pattern(A), lat, 2);
    access(OP_READ, C, 0, '0, '0, r, lat);
    expect_res("line reloaded while away", r, RES_FIRST, pattern(C), lat, lat_miss);
    // rollover: Ts larger than the current time clears every s-bit
    access(OP_READ, A, 1, '0, '0, r, lat);
    csw(CSW_SAVE, 1, 0, '0, 0, saved0, lat);
    csw(CSW_RESUME, 1, 0, '0, int'(now) + 100, rd, lat);
    access(OP_READ, A, 1, '0, '0, r, lat);
    expect_res("after rollover", r, RES_FIRST, pattern(A), lat, lat_miss);
    csw(CSW_SAVE, 1, 0, '0, 0, rd, lat);
    checks++; if (rd === '0) begin failures++; $display("save returned nothing"); end

    // 5. TimeCache switched off: no first-access delay
    access(OP_READ, la(3, 1), 0, '0, '0, r, lat);
    tc_enable = 0;
    access(OP_READ, la(3, 1), 1, '0, '0, r, lat);
    expect_res("disabled: hit", r, RES_HIT, pattern(la(3, 1)), lat, 2);
    tc_enable = 1;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
