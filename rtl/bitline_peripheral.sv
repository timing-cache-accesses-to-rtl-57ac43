// bitline_peripheral: the comparison slices under the timestamp array.
//
// There is one slice per bit line, i.e. per cache line, each deciding
// bit-serially and MSB first whether that line's load time Tc is greater
// than the resumed process's Ts. A slice has two set/reset latches and two
// 3-input AND gates, wired as the paper's bit-line peripheral figure shows:
//   gt_set = b & ~a & ~lt   (left gate:  Tc bit 1, Ts bit 0, not yet "less")
//   lt_set = ~b & a & ~gt   (right gate: Tc bit 0, Ts bit 1, not yet "greater")
// The left latch (gt) is the s-bit reset output; the right latch (lt) stops
// further comparison once Tc < Ts. The third input of the right gate is not
// shown in the figure; taking the left latch's ~Q keeps the slice symmetric
// and does not change the result, since gt is never cleared mid-compare.
// Latches are written as clocked set-only flip-flops with a synchronous
// clear (`clr`), which the controller asserts before each comparison.
// All COLS slices are written as vector logic: bit k of each signal is
// slice k.
//
// Interface: clr, en (evaluate one bit position), a (Ts bit, common to all
// slices), b[COLS] (Tc bit of every line), reset_out = gt, stop_out = lt.
// Timing: one bit position per cycle with en high; after TS_W such cycles
// reset_out[k] = (Tc_k > Ts).
module bitline_peripheral #(
  parameter int unsigned COLS = 512
) (
  input  logic            clk,
  input  logic            clr,
  input  logic            en,
  input  logic            a,
  input  logic [COLS-1:0] b,
  output logic [COLS-1:0] reset_out,
  output logic [COLS-1:0] stop_out
);

  logic [COLS-1:0] gt_q, lt_q;
  logic [COLS-1:0] gt_set, lt_set;

  assign gt_set = b  & {COLS{~a}} & ~lt_q;
  assign lt_set = ~b & {COLS{a}}  & ~gt_q;

  always_ff @(posedge clk) begin
    if (clr) begin
      gt_q <= '0;
      lt_q <= '0;
    end else if (en) begin
      gt_q <= gt_q | gt_set;
      lt_q <= lt_q | lt_set;
    end
  end

  assign reset_out = gt_q;
  assign stop_out  = lt_q;

endmodule
