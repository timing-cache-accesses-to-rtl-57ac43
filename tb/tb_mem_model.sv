// tb_mem_model: behavioural model of the memory below a cache level.
//
// Stands in for the next cache level or DRAM, which the design does not
// include. It accepts one request at a time (ready whenever idle) and
// answers LATENCY cycles later with a one-cycle response pulse. Lines live
// in a small associative store indexed by line address; a line never
// written reads as a pattern made from its address (line_pattern), so a
// testbench can predict any read. OP_WB and OP_WRITE store data; OP_FLUSH is
// acknowledged. Counters report how many requests of each kind arrived.
module tb_mem_model
  import tc_pkg::*;
#(
  parameter int unsigned LATENCY = 10
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid,
  output logic      req_ready,
  input  mem_req_t  req,
  output logic      resp_valid,
  output mem_resp_t resp,
  output int        n_read,
  output int        n_wb,
  output int        n_flush
);

  line_t store [addr_t];
  int    cnt;
  logic  busy;
  mem_req_t q;

  function automatic line_t line_pattern(addr_t a);
    line_t l;
    for (int w = 0; w < LINE_BITS / 32; w++) l[w*32 +: 32] = a[37:6] ^ (32'h9E37_79B9 * (w + 1));
    return l;
  endfunction

  assign req_ready = !busy;

  always @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; resp_valid <= 1'b0; cnt <= 0;
      n_read <= 0; n_wb <= 0; n_flush <= 0;
      resp <= '0;
    end else begin
      resp_valid <= 1'b0;
      if (!busy && req_valid) begin
        busy <= 1'b1;
        q    <= req;
        cnt  <= 1;
      end else if (busy) begin
        if (cnt == int'(LATENCY) - 1) begin
          addr_t la;
          la = {q.addr[ADDR_W-1:OFF_W], OFF_W'(0)};
          busy       <= 1'b0;
          resp_valid <= 1'b1;
          resp.result <= RES_OTHER;
          case (q.op)
            OP_READ: begin
              n_read <= n_read + 1;
              resp.rdata <= store.exists(la) ? store[la] : line_pattern(la);
            end
            OP_WB, OP_WRITE: begin
              n_wb <= n_wb + 1;
              store[la] = q.wdata;
            end
            default: n_flush <= n_flush + 1;
          endcase
        end else cnt <= cnt + 1;
      end
    end
  end

endmodule
