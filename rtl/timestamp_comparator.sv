// timestamp_comparator: brings a resumed context's s-bits up to date.
//
// When a process resumes on hardware context `ctx`, its restored s-bits may
// be stale: lines filled after it was preempted (Tc > Ts) must not count as
// already accessed. This sequencer runs the bit-serial, line-parallel
// comparison of every line's Tc against Ts:
//   LOAD : Ts enters the shift register, the peripheral latches are cleared,
//          and the rollover check runs;
//   CMP  : TS_W cycles; in cycle i the Tc row of bit TS_W-1-i is read through
//          the regular interface and fed to input b of all slices while the
//          shift register presents the same Ts bit on input a;
//   CLR  : the context's s-bit row is cleared wherever a slice latched
//          Tc > Ts.
// Rollover: if Ts is larger than the current time, the time base wrapped
// while the process was away and lines newer than Ts may carry small Tc
// values; then every s-bit of the context is cleared instead (the paper's
// rule). A process that was running across a wrap may see some
// unnecessary clears, which costs misses but not security.
//
// Interface: start/ctx/ts (sampled when start is high and busy is low), now,
// busy, done (one-cycle pulse), rollover (sticky until the next start), and
// the regular-interface signals of ts_sbit_array.
// Timing: done pulses TS_W+2 cycles after start. The three-phase sequence
// follows the paper; the exact cycle split is this design's choice.
module timestamp_comparator #(
  parameter int unsigned LINES = 512,
  parameter int unsigned CTX   = 2,
  parameter int unsigned TS_W  = 32,
  localparam int unsigned CW   = (CTX > 1) ? $clog2(CTX) : 1,
  localparam int unsigned TW   = (TS_W > 1) ? $clog2(TS_W) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [CW-1:0]      ctx,
  input  logic [TS_W-1:0]    ts,
  input  logic [TS_W-1:0]    now,
  output logic               busy,
  output logic               done,
  output logic               rollover,
  // to ts_sbit_array regular interface
  output logic [TW-1:0]      row_tc_bit,
  input  logic [LINES-1:0]   row_tc,
  output logic [CW-1:0]      row_ctx,
  output logic               row_clr_en,
  output logic [LINES-1:0]   row_clr_mask
);

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_CMP, S_CLR} state_e;
  state_e state;

  logic [TW-1:0]   bit_idx;
  logic [CW-1:0]   ctx_q;
  logic            sr_load, sr_shift, a_bit;
  logic [TS_W-1:0] ts_q;
  logic            pp_clr, pp_en;
  logic [LINES-1:0] gt;
  logic [LINES-1:0] lt_unused;

  ts_shift_register #(.TS_W(TS_W)) u_ts (
    .clk, .rst_n,
    .load (sr_load),
    .ts_in(ts),
    .shift(sr_shift),
    .msb  (a_bit),
    .ts_q (ts_q)
  );

  bitline_peripheral #(.COLS(LINES)) u_pp (
    .clk,
    .clr      (pp_clr),
    .en       (pp_en),
    .a        (a_bit),
    .b        (row_tc),
    .reset_out(gt),
    .stop_out (lt_unused)
  );

  assign sr_load    = (state == S_IDLE) && start;
  assign pp_clr     = (state == S_IDLE) && start;
  assign pp_en      = (state == S_CMP);
  assign sr_shift   = (state == S_CMP);
  assign row_tc_bit = bit_idx;
  assign row_ctx    = ctx_q;
  assign row_clr_en = (state == S_CLR);
  assign row_clr_mask = rollover ? '1 : gt;
  assign busy       = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      bit_idx  <= '0;
      ctx_q    <= '0;
      done     <= 1'b0;
      rollover <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          ctx_q    <= ctx;
          rollover <= 1'b0;
          state    <= S_LOAD;
        end
        S_LOAD: begin
          rollover <= (ts_q > now);
          bit_idx  <= TW'(TS_W - 1);
          state    <= S_CMP;
        end
        S_CMP: begin
          if (bit_idx == '0) state <= S_CLR;
          else               bit_idx <= bit_idx - 1'b1;
        end
        S_CLR: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
