// tb_l1_arbiter: checks sharing of the LLC port by two requesters.
// Two requesters issue random requests (one outstanding each) with random
// gaps; the LLC side is a model with random ready and latency that returns
// the request's address and context in the response data. Checks: every
// response reaches the side that asked and carries its own request's
// address; one request is in flight at a time; when both sides are
// waiting, grants alternate; every request is answered. The round-robin
// rule being checked is this design's choice; the LLC model's timing is
// arbitrary.
module tb_l1_arbiter;
  import tc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic a_req_valid = 0, a_req_ready, a_resp_valid;
  logic b_req_valid = 0, b_req_ready, b_resp_valid;
  mem_req_t a_req = '0, b_req = '0, m_req;
  mem_resp_t a_resp, b_resp, m_resp;
  logic m_req_valid, m_req_ready, m_resp_valid;
  int checks = 0, failures = 0;

  l1_arbiter dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // LLC model
  logic busy = 0;
  int   cnt = 0, lat = 0;
  mem_req_t held;
  int   inflight = 0;
  assign m_req_ready = !busy && ($urandom_range(3) != 0);
  always @(posedge clk) begin
    m_resp_valid <= 1'b0;
    if (rst_n) begin
      if (m_req_valid && m_req_ready && !busy) begin
        busy <= 1; held <= m_req; cnt <= 0; lat <= $urandom_range(1, 6);
        inflight++;
        checks++;
        if (inflight > 1) begin failures++; $display("two requests in flight"); end
      end else if (busy) begin
        if (cnt == lat) begin
          busy <= 0;
          m_resp_valid <= 1'b1;
          m_resp.rdata <= line_t'({held.ctx, held.addr});
          m_resp.result <= RES_HIT;
          inflight--;
        end else cnt <= cnt + 1;
      end
    end
  end

  int done_a = 0, done_b = 0, alt_ok = 0, both_wait = 0;
  logic last_grant_b;
  logic have_last = 0;
  always @(posedge clk) if (rst_n) begin
    if (a_req_valid && a_req_ready || b_req_valid && b_req_ready) begin
      if (have_last && a_req_valid && b_req_valid) begin
        both_wait++;
        checks++;
        if (b_req_ready == last_grant_b) begin failures++; $display("grant did not alternate"); end
        else alt_ok++;
      end
      last_grant_b = b_req_ready;
      have_last = 1;
    end
  end

  task automatic side(input bit is_b, input int n);
    for (int k = 0; k < n; k++) begin
      mem_req_t q;
      q = '0;
      q.op = OP_READ;
      q.addr = addr_t'({$urandom(), $urandom()}) & ~addr_t'(63);
      q.ctx = is_b ? 4'd1 : 4'd0;
      repeat ($urandom_range(0, 3)) @(negedge clk);
      if (is_b) begin b_req = q; b_req_valid = 1; end else begin a_req = q; a_req_valid = 1; end
      do @(posedge clk); while (!(is_b ? b_req_ready : a_req_ready));
      @(negedge clk);
      if (is_b) b_req_valid = 0; else a_req_valid = 0;
      while (!(is_b ? b_resp_valid : a_resp_valid)) @(negedge clk);
      checks += 2;
      if ((is_b ? b_resp.rdata : a_resp.rdata) !== line_t'({q.ctx, q.addr})) begin
        failures++; $display("side %0d got the wrong response", is_b);
      end
      if (is_b ? a_resp_valid : b_resp_valid) begin failures++; $display("response to both sides"); end
      if (is_b) done_b++; else done_a++;
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      side(0, 300);
      side(1, 300);
    join
    checks += 2;
    if (done_a != 300 || done_b != 300) failures++;
    if (both_wait == 0) begin failures++; $display("never contended"); end
    $display("contended grants %0d, alternated %0d", both_wait, alt_ok);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
