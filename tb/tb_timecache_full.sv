// tb_timecache_full: the flush+reload microbenchmark on the full-size top.
// The top runs with its default parameters: 32 KB L1I and L1D, a 2 MB LLC,
// 64-byte lines, two hardware contexts, 32-bit timestamps. At every switch
// the testbench saves and restores the s-bits of all three levels (1 + 1 +
// 64 chunks of 512 bits) and the process's Ts. Two processes time-share
// hardware context 0 and share a 256-line array, as in the microbenchmark
// the TimeCache evaluation uses:
//   attacker: flushes every line of the array, then yields;
//   victim  : starts as a new process (zero s-bits, Ts = 0) and writes every
//             line of the array several times, then is preempted;
//   attacker: resumes with its saved s-bits and Ts and times a read of every
//             line. A hit (2-cycle answer) would reveal the victim's access.
// With TimeCache on, none of the 256 timed reads may hit at any level: each
// must be an L1 first access and take exactly the latency of a read that
// misses in both levels (measured on a cold line), and return the
// victim's data; a second pass then hits everywhere (the cost is paid once).
// A second round uses eviction instead of a flush (evict+reload): the
// attacker's saved L1 s-bits are still set, the victim evicts the array
// from the L1 with conflicting lines and reloads it, and only the Tc > Ts
// comparison at the attacker's resume can clear them. The lines stay in
// the LLC, where the attacker's own earlier access legitimately set its
// s-bit, so each timed read must take exactly the latency of an L1 miss
// that hits in the LLC - what the attacker would see had the victim never
// run. The first round is repeated with
// TimeCache off to show that the channel exists without it: then every
// timed read hits.
module tb_timecache_full;
  import tc_pkg::*;
  localparam int MEM_LAT = 20, N = 256, SETS = 256;
  localparam int LLC_CHUNKS = 2097152 / LINE_BYTES / CHUNK_BITS;

  logic clk = 0, rst_n = 0, tc_enable = 1;
  logic [31:0] now;
  logic ts_wrapped;
  logic up_req_valid = 0, up_req_ready, up_resp_valid;
  mem_req_t up_req = '0;
  mem_resp_t up_resp;
  logic i_req_ready, i_resp_valid;
  mem_resp_t i_resp;
  logic dn_req_valid, dn_req_ready, dn_resp_valid;
  mem_req_t dn_req;
  mem_resp_t dn_resp;
  logic [1:0] csw_level = '0;
  logic csw_valid = 0, csw_ready, csw_resp_valid;
  csw_req_t csw_req = '0;
  logic [CHUNK_BITS-1:0] csw_rdata;
  int n_read, n_wb, n_flush;
  int checks = 0, failures = 0;

  timecache dut (
    .clk, .rst_n, .tc_enable, .now, .ts_wrapped,
    .i_req_valid(1'b0), .i_req_ready, .i_req('0), .i_resp_valid, .i_resp,
    .d_req_valid(up_req_valid), .d_req_ready(up_req_ready), .d_req(up_req),
    .d_resp_valid(up_resp_valid), .d_resp(up_resp),
    .m_req_valid(dn_req_valid), .m_req_ready(dn_req_ready), .m_req(dn_req),
    .m_resp_valid(dn_resp_valid), .m_resp(dn_resp),
    .csw_valid, .csw_level, .csw_ready, .csw_req, .csw_resp_valid, .csw_rdata);

  tb_mem_model #(.LATENCY(MEM_LAT)) mem (
    .clk, .rst_n, .req_valid(dn_req_valid), .req_ready(dn_req_ready), .req(dn_req),
    .resp_valid(dn_resp_valid), .resp(dn_resp), .n_read, .n_wb, .n_flush);

  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic access(input op_e op, input addr_t a, input line_t wd,
                        input strb_t ws, output mem_resp_t r, output int lat);
    @(negedge clk);
    up_req_valid = 1; up_req.op = op; up_req.addr = a; up_req.ctx = '0;
    up_req.wdata = wd; up_req.wstrb = ws;
    while (!up_req_ready) @(negedge clk);
    @(negedge clk);
    up_req_valid = 0;
    lat = 0;
    while (!up_resp_valid) begin @(negedge clk); lat++; end
    r = up_resp;
  endtask

  task automatic csw1(input int level, input int chunk, input csw_op_e op,
                      input logic [CHUNK_BITS-1:0] wd,
                      input int unsigned ts, output logic [CHUNK_BITS-1:0] rd);
    @(negedge clk);
    csw_valid = 1; csw_level = 2'(level); csw_req.op = op; csw_req.ctx = '0;
    csw_req.chunk = CHUNK_IDX_W'(chunk); csw_req.wdata = wd; csw_req.ts = ts;
    while (!csw_ready) @(negedge clk);
    @(negedge clk);
    csw_valid = 0;
    while (!csw_resp_valid) @(negedge clk);
    rd = csw_rdata;
  endtask

  // s-bit images of one process: L1I, L1D, then the LLC's chunks
  typedef logic [CHUNK_BITS-1:0] img_t [2 + LLC_CHUNKS];

  task automatic save_all(output img_t img);
    logic [CHUNK_BITS-1:0] rd;
    csw1(0, 0, CSW_SAVE, '0, 0, rd); img[0] = rd;
    csw1(1, 0, CSW_SAVE, '0, 0, rd); img[1] = rd;
    for (int c = 0; c < LLC_CHUNKS; c++) begin csw1(2, c, CSW_SAVE, '0, 0, rd); img[2 + c] = rd; end
  endtask

  task automatic restore_all(input img_t img, input int unsigned ts);
    logic [CHUNK_BITS-1:0] rd;
    csw1(0, 0, CSW_RESTORE, img[0], 0, rd);
    csw1(1, 0, CSW_RESTORE, img[1], 0, rd);
    for (int c = 0; c < LLC_CHUNKS; c++) csw1(2, c, CSW_RESTORE, img[2 + c], 0, rd);
    for (int l = 0; l < 3; l++) csw1(l, 0, CSW_RESUME, '0, ts, rd);
  endtask

  // shared array: 256 consecutive lines
  function automatic addr_t shrd(int i);
    return addr_t'(48'h10_0000 + i * LINE_BYTES);
  endfunction

  function automatic line_t victim_data(int i, int round, int pass);
    line_t l;
    for (int w = 0; w < LINE_BITS / 32; w++) l[w*32 +: 32] = 32'(i * 65536 + round * 256 + pass * 16 + w);
    return l;
  endfunction

  initial begin
    mem_resp_t r;
    int lat, hits, firsts, cold_lat, llc_hit_lat;
    img_t att_sb, vic_sb, zero;
    int unsigned att_ts;

    for (int c = 0; c < 2 + LLC_CHUNKS; c++) zero[c] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // latency of a read that misses everywhere
    access(OP_READ, 48'h7_0000, '0, '0, r, cold_lat);
    checks++;
    if (r.result != RES_MISS) failures++;
    // latency of a read that misses in L1 and hits in the LLC
    access(OP_READ, 48'h7_0000 + 48'h8000, '0, '0, r, lat);
    access(OP_READ, 48'h7_0000 + 48'h10000, '0, '0, r, lat);
    access(OP_READ, 48'h7_0000, '0, '0, r, llc_hit_lat);
    checks++;
    if (r.result != RES_MISS || llc_hit_lat >= cold_lat) begin failures++; $display("LLC hit reference"); end
    $display("latencies: L1 hit 2, LLC hit %0d, memory %0d cycles", llc_hit_lat, cold_lat);

    for (int round = 0; round < 3; round++) begin
      tc_enable = (round != 2);
      // attacker runs first: touches, then (rounds 0, 2) flushes the array
      for (int i = 0; i < N; i++) access(OP_READ, shrd(i), '0, '0, r, lat);
      if (round != 1)
        for (int i = 0; i < N; i++) access(OP_FLUSH, shrd(i), '0, '0, r, lat);
      save_all(att_sb);
      att_ts = now;
      // victim: a new process on the same hardware context
      restore_all(zero, 0);
      if (round == 1)  // evict the array: two conflicting lines per set
        for (int k = 1; k <= 2; k++)
          for (int i = 0; i < N; i++) access(OP_READ, shrd(i) + addr_t'(k * SETS * 2 * LINE_BYTES), '0, '0, r, lat);
      for (int pass = 0; pass < 3; pass++)
        for (int i = 0; i < N; i++) access(OP_WRITE, shrd(i), victim_data(i, round, pass), '1, r, lat);
      save_all(vic_sb);
      checks++;
      if (vic_sb[1] == '0) begin failures++; $display("victim left no s-bits"); end
      // attacker resumes and times its reads
      restore_all(att_sb, att_ts);
      hits = 0; firsts = 0;
      for (int i = 0; i < N; i++) begin
        access(OP_READ, shrd(i), '0, '0, r, lat);
        checks++;
        if (r.rdata !== victim_data(i, round, 2)) begin failures++; $display("line %0d: wrong data", i); end
        if (lat == 2) hits++;
        if (r.result == RES_FIRST) begin
          firsts++;
          checks++;
          if (lat != (round == 1 ? llc_hit_lat : cold_lat)) begin failures++; $display("line %0d: first-access latency %0d", i, lat); end
        end
      end
      $display("round %0d (TimeCache %s): attacker timed reads: %0d hits, %0d first accesses of %0d",
               round, tc_enable ? "on" : "off", hits, firsts, N);
      checks += 2;
      if (tc_enable) begin
        if (hits != 0)    begin failures++; $display("attack succeeded on %0d lines", hits); end
        if (firsts != N)  begin failures++; end
        // second pass: the first-access cost is paid once
        hits = 0;
        for (int i = 0; i < N; i++) begin
          access(OP_READ, shrd(i), '0, '0, r, lat);
          if (r.result == RES_HIT && lat == 2) hits++;
        end
        checks++;
        if (hits != N) begin failures++; $display("second pass hits %0d", hits); end
      end else begin
        if (hits != N)    begin failures++; $display("without TimeCache expected %0d hits, got %0d", N, hits); end
        if (firsts != 0)  failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
