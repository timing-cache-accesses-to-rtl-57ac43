// tb_level_random: random test of one TimeCache level with its time base.
// A 2 KB, 2-way level with 12-bit timestamps (so the time base wraps
// every 4096 cycles) runs random reads, writes and flushes from two
// hardware contexts over 24 lines crowded into 4 sets. Context 1 runs one
// process; context 0 time-shares two processes, and the testbench acts as
// the operating system: at each switch it saves the outgoing process's
// s-bits and the current time as its Ts, restores the incoming one's, and
// issues a resume. A reference model tracks, per process and line, whether
// the process has paid a miss on the line since it was last filled; checks:
//   * a hit is only ever given to a process that has (the security rule);
//   * read data always equals the reference memory image;
//   * a hit answers in 2 cycles; a first access takes exactly the latency
//     of a clean miss.
// For a stretch in the middle TimeCache is switched off. Every mechanism
// must occur at least once: hit, miss, first access, dirty writeback,
// flush, context switch, s-bits cleared by the Tc/Ts comparison, rollover,
// time-base wrap and disabled-mode hit.
module tb_level_random;
  import tc_pkg::*;
  localparam int CACHE_BYTES = 2048, WAYS = 2, CTX = 2, TS_W = 12, MEM_LAT = 8;
  localparam int SETS = CACHE_BYTES / LINE_BYTES / WAYS;
  localparam int NL = 24, NPROC = 3, NREQ = 4000;

  logic clk = 0, rst_n = 0, tc_enable = 1;
  logic [TS_W-1:0] now;
  logic ts_wrapped;
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

  timestamp_counter #(.TS_W(TS_W)) u_time (.clk, .rst_n, .now, .wrapped(ts_wrapped));
  timecache_level #(.CACHE_BYTES(CACHE_BYTES), .WAYS(WAYS), .CTX(CTX), .TS_W(TS_W)) dut (.*);

  tb_mem_model #(.LATENCY(MEM_LAT)) mem (
    .clk, .rst_n, .req_valid(dn_req_valid), .req_ready(dn_req_ready), .req(dn_req),
    .resp_valid(dn_resp_valid), .resp(dn_resp), .n_read, .n_wb, .n_flush);

  always #5 clk = ~clk;

  int n_wrap = 0;
  always @(posedge clk) if (rst_n && ts_wrapped) n_wrap++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic line_t pattern(addr_t a);
    line_t l;
    for (int w = 0; w < LINE_BITS / 32; w++) l[w*32 +: 32] = a[37:6] ^ (32'h9E37_79B9 * (w + 1));
    return l;
  endfunction

  function automatic addr_t line_addr(int i);
    return addr_t'(((i / 4) * SETS + (i % 4)) * LINE_BYTES);
  endfunction

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

  task automatic csw(input csw_op_e op, input int ctx, input logic [CHUNK_BITS-1:0] wd,
                     input int ts, output logic [CHUNK_BITS-1:0] rd);
    @(negedge clk);
    csw_valid = 1; csw_req.op = op; csw_req.ctx = ctx_id_t'(ctx);
    csw_req.chunk = '0; csw_req.wdata = wd; csw_req.ts = 32'(ts);
    while (!csw_ready) @(negedge clk);
    @(negedge clk);
    csw_valid = 0;
    while (!csw_resp_valid) @(negedge clk);
    rd = csw_rdata;
  endtask

  line_t ref_mem [NL];
  bit    seen [NPROC][NL];
  logic [CHUNK_BITS-1:0] saved_sb [NPROC];
  int    saved_ts [NPROC];

  int n_hit = 0, n_miss = 0, n_first = 0, n_switch = 0, n_roll = 0, n_cleared = 0, n_off_hit = 0;

  initial begin
    mem_resp_t r;
    int lat, clean_miss_lat, running0;
    logic [CHUNK_BITS-1:0] rd, back;

    clean_miss_lat = MEM_LAT + 3;
    for (int i = 0; i < NL; i++) ref_mem[i] = pattern(line_addr(i));
    for (int p = 0; p < NPROC; p++) begin
      saved_sb[p] = '0; saved_ts[p] = 0;
      for (int i = 0; i < NL; i++) seen[p][i] = 0;
    end
    running0 = 0;  // process on context 0; process 2 is on context 1
    repeat (3) @(negedge clk);
    rst_n = 1;

    for (int n = 0; n < NREQ; n++) begin
      int ctx, p, i, kind;
      op_e op;
      line_t wd, exp_d;
      strb_t ws;

      // disabled stretch
      tc_enable = !(n >= NREQ / 2 && n < NREQ / 2 + 300);

      // context switch on context 0, roughly every 60 requests
      if (n % 60 == 59) begin
        int nxt, ts_now;
        nxt = 1 - running0;
        csw(CSW_SAVE, 0, '0, 0, rd);
        saved_sb[running0] = rd;
        saved_ts[running0] = int'(now);
        // occasionally stay away long enough for the time base to wrap
        if ($urandom_range(5) == 0) repeat ($urandom_range(200, 1000)) @(negedge clk);
        csw(CSW_RESTORE, 0, saved_sb[nxt], 0, rd);
        ts_now = int'(now);
        if (saved_ts[nxt] > ts_now + 2) n_roll++;
        csw(CSW_RESUME, 0, '0, saved_ts[nxt], rd);
        csw(CSW_SAVE, 0, '0, 0, back);
        for (int k = 0; k < 2 * SETS; k++) if (saved_sb[nxt][k] && !back[k]) n_cleared++;
        // the hardware may only clear, never set
        checks++;
        if ((back & ~saved_sb[nxt]) != '0) begin failures++; $display("resume set an s-bit"); end
        running0 = nxt;
        n_switch++;
      end

      ctx = $urandom_range(1);
      p = (ctx == 0) ? running0 : 2;
      i = $urandom_range(NL - 1);
      kind = $urandom_range(99);
      op = (kind < 60) ? OP_READ : (kind < 88) ? OP_WRITE : OP_FLUSH;
      wd = '0; ws = '0;
      if (op == OP_WRITE) begin
        for (int w = 0; w < LINE_BITS / 32; w++) wd[w*32 +: 32] = $urandom();
        ws = {$urandom(), $urandom()};
      end
      access(op, line_addr(i), ctx, wd, ws, r, lat);

      if (op == OP_FLUSH) begin
        for (int q = 0; q < NPROC; q++) seen[q][i] = 0;
        continue;
      end
      exp_d = ref_mem[i];
      for (int b = 0; b < LINE_BYTES; b++) if (ws[b]) exp_d[b*8 +: 8] = wd[b*8 +: 8];
      ref_mem[i] = exp_d;
      checks++;
      if (r.rdata !== exp_d) begin failures++; if (failures < 10) $display("req %0d: wrong data line %0d", n, i); end
      case (r.result)
        RES_HIT: begin
          checks += 2;
          if (lat != 2) begin failures++; $display("req %0d: hit latency %0d", n, lat); end
          if (tc_enable) begin
            n_hit++;
            if (!seen[p][i]) begin failures++; $display("req %0d: process %0d hit line %0d without paying a miss", n, p, i); end
          end else n_off_hit++;
        end
        RES_FIRST: begin
          n_first++;
          checks += 2;
          if (lat != clean_miss_lat) begin failures++; $display("req %0d: first-access latency %0d", n, lat); end
          if (!tc_enable) begin failures++; $display("first access while disabled"); end
          seen[p][i] = 1;
        end
        RES_MISS: begin
          n_miss++;
          checks++;
          if (lat < clean_miss_lat) begin failures++; $display("req %0d: miss latency %0d", n, lat); end
          for (int q = 0; q < NPROC; q++) seen[q][i] = (q == p);
        end
        default: begin checks++; failures++; $display("unexpected result"); end
      endcase
    end

    $display("hits %0d  misses %0d  first accesses %0d  writebacks %0d  flushes %0d",
             n_hit, n_miss, n_first, n_wb, n_flush);
    $display("switches %0d  s-bits cleared by compare %0d  rollovers %0d  wraps %0d  disabled hits %0d",
             n_switch, n_cleared, n_roll, n_wrap, n_off_hit);
    checks += 10;
    if (n_hit == 0)     begin failures++; $display("never: hit"); end
    if (n_miss == 0)    begin failures++; $display("never: miss"); end
    if (n_first == 0)   begin failures++; $display("never: first access"); end
    if (n_wb == 0)      begin failures++; $display("never: writeback"); end
    if (n_flush == 0)   begin failures++; $display("never: flush"); end
    if (n_switch == 0)  begin failures++; $display("never: switch"); end
    if (n_cleared == 0) begin failures++; $display("never: compare clear"); end
    if (n_roll == 0)    begin failures++; $display("never: rollover"); end
    if (n_wrap == 0)    begin failures++; $display("never: wrap"); end
    if (n_off_hit == 0) begin failures++; $display("never: disabled hit"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
