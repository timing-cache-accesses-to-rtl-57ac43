// l1_arbiter: shares the last-level cache between the two L1 caches.
//
// The instruction and data L1 caches each issue at most one request at a
// time to the level below. This arbiter grants one of them, forwards its
// request, holds the grant until the response returns, and routes the
// response back to the granted side. When both ask in the same cycle the
// grant alternates (round-robin), so neither side starves. The paper only
// shows the L1 caches sharing the LLC; the arbitration scheme is this
// design's choice.
//
// Interface: two valid/ready request ports (a_*, b_*) with one-cycle
// response pulses, one valid/ready request port toward the LLC (m_*).
// Timing: a request reaches the LLC port one cycle after it is raised
// (the grant cycle); the response passes through combinationally.
module l1_arbiter
  import tc_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      a_req_valid,
  output logic      a_req_ready,
  input  mem_req_t  a_req,
  output logic      a_resp_valid,
  output mem_resp_t a_resp,
  input  logic      b_req_valid,
  output logic      b_req_ready,
  input  mem_req_t  b_req,
  output logic      b_resp_valid,
  output mem_resp_t b_resp,
  output logic      m_req_valid,
  input  logic      m_req_ready,
  output mem_req_t  m_req,
  input  logic      m_resp_valid,
  input  mem_resp_t m_resp
);

  typedef enum logic [1:0] {G_IDLE, G_SEND, G_WAIT} gstate_e;
  gstate_e gstate;
  logic    sel_b;      // grant held: 0 = a, 1 = b
  logic    last_b;     // last grant went to b

  logic pick_b;
  assign pick_b = b_req_valid && (!a_req_valid || !last_b);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      gstate <= G_IDLE;
      sel_b  <= 1'b0;
      last_b <= 1'b1;
    end else begin
      unique case (gstate)
        G_IDLE: if (a_req_valid || b_req_valid) begin
          sel_b  <= pick_b;
          last_b <= pick_b;
          gstate <= G_SEND;
        end
        G_SEND: if (m_req_ready) gstate <= G_WAIT;
        G_WAIT: if (m_resp_valid) gstate <= G_IDLE;
        default: gstate <= G_IDLE;
      endcase
    end
  end

  assign m_req_valid  = (gstate == G_SEND) && (sel_b ? b_req_valid : a_req_valid);
  assign m_req        = sel_b ? b_req : a_req;
  assign a_req_ready  = (gstate == G_SEND) && !sel_b && m_req_ready;
  assign b_req_ready  = (gstate == G_SEND) &&  sel_b && m_req_ready;
  assign a_resp_valid = (gstate == G_WAIT) && !sel_b && m_resp_valid;
  assign b_resp_valid = (gstate == G_WAIT) &&  sel_b && m_resp_valid;
  assign a_resp       = m_resp;
  assign b_resp       = m_resp;

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    gstate == G_SEND |-> (sel_b ? b_req_valid : a_req_valid));

endmodule
