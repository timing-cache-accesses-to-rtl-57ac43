// ts_shift_register: holds Ts for the bit-serial timestamp comparison.
//
// Software's restored context-switch timestamp (Ts) is loaded in parallel.
// Each `shift` moves it one place left, so `msb` presents Ts[TS_W-1],
// Ts[TS_W-2], ... in successive cycles, the order in which the Tc rows are
// read; `msb` drives input `a` of every bit-line peripheral slice. A copy of
// the loaded value (`ts_q`) stays available for the rollover check; keeping
// that copy is this design's choice.
//
// Interface: load/ts_in (parallel load, has priority), shift, msb, ts_q.
// Timing: load and shift take effect at the rising clock edge.
module ts_shift_register #(
  parameter int unsigned TS_W = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            load,
  input  logic [TS_W-1:0] ts_in,
  input  logic            shift,
  output logic            msb,
  output logic [TS_W-1:0] ts_q
);

  logic [TS_W-1:0] sr;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sr   <= '0;
      ts_q <= '0;
    end else if (load) begin
      sr   <= ts_in;
      ts_q <= ts_in;
    end else if (shift) begin
      sr   <= {sr[TS_W-2:0], 1'b0};
    end
  end

  assign msb = sr[TS_W-1];

endmodule
