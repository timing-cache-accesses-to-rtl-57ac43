// tb_timecache: end-to-end random test of the TimeCache hierarchy.
// Reduced sizes (1 KB 2-way L1I and L1D, 4 KB 4-way LLC, 12-bit timestamps
// so the time base wraps every 4096 cycles) keep conflicts frequent. Each
// step issues a data-side request (read, write or flush over 24 data lines
// and 12 code lines) and, in parallel, an instruction-side read (12 code
// lines), from random hardware contexts, so both L1s contend for the LLC.
// Context 1 runs one process; context 0 time-shares two, and the testbench
// acts as the operating system, saving and restoring s-bits and Ts in all
// three levels at each switch. A reference model tracks, per level,
// process and line, whether the process has paid a miss on the line since
// the line was last filled there. Checks:
//   * no level ever gives a hit to a process that has not (the security
//     rule), watched at both L1 outputs and at the LLC's input port;
//   * read data always equals the reference memory image;
//   * an L1 hit answers in 2 cycles; an L1 first access never does;
//   * a resume only ever clears s-bits.
// TimeCache is switched off for a stretch in the middle. Every mechanism
// must occur at least once: hits, misses and first accesses at both L1
// and LLC, writebacks into the LLC and to memory, flushes, arbiter
// contention, context switches, compare clears, rollovers, time-base wraps
// and disabled-mode hits.
module tb_timecache;
  import tc_pkg::*;
  localparam int L1_BYTES = 1024, LLC_BYTES = 4096, L1_WAYS = 2, LLC_WAYS = 4;
  localparam int CTX = 2, TS_W = 12, MEM_LAT = 8;
  localparam int L1_SETS = L1_BYTES / LINE_BYTES / L1_WAYS;
  localparam int ND = 24, NC = 12, NL = ND + NC, NPROC = 3, NSTEP = 2500;

  logic clk = 0, rst_n = 0, tc_enable = 1;
  logic [TS_W-1:0] now;
  logic ts_wrapped;
  logic i_req_valid = 0, i_req_ready, i_resp_valid;
  logic d_req_valid = 0, d_req_ready, d_resp_valid;
  mem_req_t i_req = '0, d_req = '0;
  mem_resp_t i_resp, d_resp;
  logic m_req_valid, m_req_ready, m_resp_valid;
  mem_req_t m_req;
  mem_resp_t m_resp;
  logic csw_valid = 0, csw_ready, csw_resp_valid;
  logic [1:0] csw_level = '0;
  csw_req_t csw_req = '0;
  logic [CHUNK_BITS-1:0] csw_rdata;
  int n_read, n_wb, n_flush;
  int checks = 0, failures = 0;

  timecache #(.L1I_BYTES(L1_BYTES), .L1D_BYTES(L1_BYTES), .LLC_BYTES(LLC_BYTES),
              .L1_WAYS(L1_WAYS), .LLC_WAYS(LLC_WAYS), .CTX(CTX), .TS_W(TS_W)) dut (.*);

  tb_mem_model #(.LATENCY(MEM_LAT)) mem (
    .clk, .rst_n, .req_valid(m_req_valid), .req_ready(m_req_ready), .req(m_req),
    .resp_valid(m_resp_valid), .resp(m_resp), .n_read, .n_wb, .n_flush);

  always #5 clk = ~clk;

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic line_t pattern(addr_t a);
    line_t l;
    for (int w = 0; w < LINE_BITS / 32; w++) l[w*32 +: 32] = a[37:6] ^ (32'h9E37_79B9 * (w + 1));
    return l;
  endfunction

  // line i: data lines 0..ND-1 crowd 3 L1 sets, code lines follow in 3 others
  function automatic addr_t line_addr(int i);
    if (i < ND) return addr_t'(((i / 3) * L1_SETS + (i % 3)) * LINE_BYTES);
    return addr_t'(48'h8_0000 + (((i - ND) / 3) * L1_SETS + 4 + (i - ND) % 3) * LINE_BYTES);
  endfunction

  int line_of [addr_t];

  // ---------------- reference state ----------------
  line_t ref_mem [NL];
  bit    seen_i [NPROC][NL];
  bit    seen_d [NPROC][NL];
  bit    seen_l [NPROC][NL];
  int    running0 = 0;
  logic [CHUNK_BITS-1:0] saved_sb [NPROC][3];
  int    saved_ts [NPROC];

  int n_hit[3], n_miss[3], n_first[3];
  int n_llc_wb = 0, n_contend = 0, n_switch = 0, n_roll = 0, n_cleared = 0, n_off_hit = 0, n_wrap = 0;

  function automatic int proc_of(int ctx);
    return (ctx == 0) ? running0 : 2;
  endfunction

  // update one level's model from a result; level 0 = L1I, 1 = L1D, 2 = LLC
  task automatic note(int level, int p, int i, result_e res, string who);
    case (res)
      RES_HIT: begin
        if (tc_enable) begin
          n_hit[level]++;
          checks++;
          if (!(level == 0 ? seen_i[p][i] : level == 1 ? seen_d[p][i] : seen_l[p][i])) begin
            failures++;
            $display("%s: level %0d gave process %0d a hit on line %0d it never paid for", who, level, p, i);
          end
        end else n_off_hit++;
      end
      RES_FIRST: begin
        n_first[level]++;
        if (level == 0) seen_i[p][i] = 1; else if (level == 1) seen_d[p][i] = 1; else seen_l[p][i] = 1;
      end
      RES_MISS: begin
        n_miss[level]++;
        for (int q = 0; q < NPROC; q++) begin
          if (level == 0) seen_i[q][i] = (q == p);
          else if (level == 1) seen_d[q][i] = (q == p);
          else seen_l[q][i] = (q == p);
        end
      end
      default: ;
    endcase
  endtask

  // LLC monitor: every response the LLC gives to the arbiter
  always @(posedge clk) if (rst_n) begin
    if (dut.u_arb.a_req_valid && dut.u_arb.b_req_valid) n_contend++;
    if (ts_wrapped) n_wrap++;
    if (dut.ll_resp_valid) begin
      mem_req_t q;
      q = dut.u_llc.req_q;
      if (q.op == OP_WB) n_llc_wb++;
      else if (q.op == OP_FLUSH) begin
        if (line_of.exists(q.addr)) for (int r = 0; r < NPROC; r++) seen_l[r][line_of[q.addr]] = 0;
      end else if (line_of.exists(q.addr))
        note(2, proc_of(int'(q.ctx)), line_of[q.addr], dut.ll_resp.result, "LLC");
    end
  end

  task automatic d_access(input op_e op, input addr_t a, input int ctx, input line_t wd,
                          input strb_t ws, output mem_resp_t r, output int lat);
    @(negedge clk);
    d_req_valid = 1; d_req.op = op; d_req.addr = a; d_req.ctx = ctx_id_t'(ctx);
    d_req.wdata = wd; d_req.wstrb = ws;
    while (!d_req_ready) @(negedge clk);
    @(negedge clk);
    d_req_valid = 0;
    lat = 0;
    while (!d_resp_valid) begin @(negedge clk); lat++; end
    r = d_resp;
  endtask

  task automatic i_access(input addr_t a, input int ctx, output mem_resp_t r, output int lat);
    @(negedge clk);
    i_req_valid = 1; i_req.op = OP_READ; i_req.addr = a; i_req.ctx = ctx_id_t'(ctx);
    i_req.wdata = '0; i_req.wstrb = '0;
    while (!i_req_ready) @(negedge clk);
    @(negedge clk);
    i_req_valid = 0;
    lat = 0;
    while (!i_resp_valid) begin @(negedge clk); lat++; end
    r = i_resp;
  endtask

  task automatic csw(input int level, input csw_op_e op, input int ctx,
                     input logic [CHUNK_BITS-1:0] wd, input int ts,
                     output logic [CHUNK_BITS-1:0] rd);
    @(negedge clk);
    csw_valid = 1; csw_level = 2'(level); csw_req.op = op; csw_req.ctx = ctx_id_t'(ctx);
    csw_req.chunk = '0; csw_req.wdata = wd; csw_req.ts = 32'(ts);
    while (!csw_ready) @(negedge clk);
    @(negedge clk);
    csw_valid = 0;
    while (!csw_resp_valid) @(negedge clk);
    rd = csw_rdata;
  endtask

  task automatic check_l1(int level, int p, int i, mem_resp_t r, int lat, line_t exp_d, int n);
    checks++;
    if (r.rdata !== exp_d) begin failures++; if (failures < 10) $display("step %0d: level %0d wrong data line %0d", n, level, i); end
    checks++;
    if (r.result == RES_HIT && lat != 2) begin failures++; $display("step %0d: hit latency %0d", n, lat); end
    checks++;
    if (r.result != RES_HIT && lat <= 2) begin failures++; $display("step %0d: fast non-hit", n); end
    note(level, p, i, r.result, level == 0 ? "L1I" : "L1D");
  endtask

  initial begin
    logic [CHUNK_BITS-1:0] rd, back;
    for (int i = 0; i < NL; i++) begin
      ref_mem[i] = pattern(line_addr(i));
      line_of[line_addr(i)] = i;
    end
    for (int l = 0; l < 3; l++) begin n_hit[l] = 0; n_miss[l] = 0; n_first[l] = 0; end
    for (int p = 0; p < NPROC; p++) begin
      saved_ts[p] = 0;
      for (int l = 0; l < 3; l++) saved_sb[p][l] = '0;
      for (int i = 0; i < NL; i++) begin seen_i[p][i] = 0; seen_d[p][i] = 0; seen_l[p][i] = 0; end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;

    for (int n = 0; n < NSTEP; n++) begin
      tc_enable = !(n >= NSTEP / 2 && n < NSTEP / 2 + 200);

      if (n % 50 == 49) begin
        int nxt;
        nxt = 1 - running0;
        for (int l = 0; l < 3; l++) begin
          csw(l, CSW_SAVE, 0, '0, 0, rd);
          saved_sb[running0][l] = rd;
        end
        saved_ts[running0] = int'(now);
        if ($urandom_range(5) == 0) repeat ($urandom_range(200, 1000)) @(negedge clk);
        if (saved_ts[nxt] > int'(now) + 2) n_roll++;
        for (int l = 0; l < 3; l++) begin
          csw(l, CSW_RESTORE, 0, saved_sb[nxt][l], 0, rd);
          csw(l, CSW_RESUME, 0, '0, saved_ts[nxt], rd);
          csw(l, CSW_SAVE, 0, '0, 0, back);
          for (int k = 0; k < CHUNK_BITS; k++) if (saved_sb[nxt][l][k] && !back[k]) n_cleared++;
          checks++;
          if ((back & ~saved_sb[nxt][l]) != '0) begin failures++; $display("resume set an s-bit"); end
        end
        running0 = nxt;
        n_switch++;
      end

      fork
        begin : data_side
          int ctx, p, i, kind, lat;
          op_e op;
          line_t wd, exp_d;
          strb_t ws;
          mem_resp_t r;
          ctx = $urandom_range(1);
          p = proc_of(ctx);
          kind = $urandom_range(99);
          op = (kind < 60) ? OP_READ : (kind < 88) ? OP_WRITE : OP_FLUSH;
          i = (op == OP_READ && $urandom_range(3) == 0) ? ND + $urandom_range(NC - 1) : $urandom_range(ND - 1);
          wd = '0; ws = '0;
          if (op == OP_WRITE) begin
            for (int w = 0; w < LINE_BITS / 32; w++) wd[w*32 +: 32] = $urandom();
            ws = {$urandom(), $urandom()};
          end
          d_access(op, line_addr(i), ctx, wd, ws, r, lat);
          if (op == OP_FLUSH) begin
            for (int q = 0; q < NPROC; q++) seen_d[q][i] = 0;
          end else begin
            exp_d = ref_mem[i];
            for (int b = 0; b < LINE_BYTES; b++) if (ws[b]) exp_d[b*8 +: 8] = wd[b*8 +: 8];
            ref_mem[i] = exp_d;
            check_l1(1, p, i, r, lat, exp_d, n);
          end
        end
        begin : instr_side
          int ctx, i, lat;
          mem_resp_t r;
          ctx = $urandom_range(1);
          i = ND + $urandom_range(NC - 1);
          i_access(line_addr(i), ctx, r, lat);
          check_l1(0, proc_of(ctx), i, r, lat, pattern(line_addr(i)), n);
        end
      join
    end

    $display("L1I hit/miss/first %0d/%0d/%0d  L1D %0d/%0d/%0d  LLC %0d/%0d/%0d",
             n_hit[0], n_miss[0], n_first[0], n_hit[1], n_miss[1], n_first[1], n_hit[2], n_miss[2], n_first[2]);
    $display("writebacks into LLC %0d, to memory %0d; flushes at memory %0d; arbiter contention %0d",
             n_llc_wb, n_wb, n_flush, n_contend);
    $display("switches %0d  compare clears %0d  rollovers %0d  wraps %0d  disabled hits %0d",
             n_switch, n_cleared, n_roll, n_wrap, n_off_hit);
    for (int l = 0; l < 3; l++) begin
      checks += 3;
      if (n_hit[l] == 0)   begin failures++; $display("never: hit at level %0d", l); end
      if (n_miss[l] == 0)  begin failures++; $display("never: miss at level %0d", l); end
      if (n_first[l] == 0) begin failures++; $display("never: first access at level %0d", l); end
    end
    checks += 9;
    if (n_llc_wb == 0)  begin failures++; $display("never: writeback into LLC"); end
    if (n_wb == 0)      begin failures++; $display("never: writeback to memory"); end
    if (n_flush == 0)   begin failures++; $display("never: flush"); end
    if (n_contend == 0) begin failures++; $display("never: arbiter contention"); end
    if (n_switch == 0)  begin failures++; $display("never: switch"); end
    if (n_cleared == 0) begin failures++; $display("never: compare clear"); end
    if (n_roll == 0)    begin failures++; $display("never: rollover"); end
    if (n_wrap == 0)    begin failures++; $display("never: wrap"); end
    if (n_off_hit == 0) begin failures++; $display("never: disabled hit"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
