// timestamp_counter: the global time base of TimeCache.
//
// A free-running TS_W-bit cycle counter. Its value is written into a cache
// line's load-time timestamp (Tc) when the line is filled, and software
// reads it as a process's context-switch timestamp (Ts) when the process is
// preempted. The counter wraps every 2^TS_W cycles; `wrapped` pulses for the
// one cycle in which `now` reads 0 after a wrap. TS_W = 32 is the paper's
// width; counting one tick per clock and resetting to 0 are this design's
// choices.
//
// Interface: clk, rst_n (active low, synchronous), now, wrapped.
// Timing: now increments at every rising clock edge after reset.
module timestamp_counter #(
  parameter int unsigned TS_W = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  output logic [TS_W-1:0] now,
  output logic            wrapped
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      now     <= '0;
      wrapped <= 1'b0;
    end else begin
      now     <= now + 1'b1;
      wrapped <= &now;
    end
  end

endmodule
