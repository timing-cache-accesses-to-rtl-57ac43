// tb_timestamp_comparator: checks the context-switch s-bit update sequence.
// The testbench plays the timestamp array: it holds random Tc values for
// 256 lines (16-bit timestamps) and answers each Tc row read from them. For
// every run it checks the clear mask against an integer comparison Tc > Ts,
// the clear's target context, that a Ts larger than the current time
// (rollover) clears every line, and that done arrives TS_W+2 cycles after
// start. Runs with and without rollover are both counted and required.
module tb_timestamp_comparator;
  localparam int LINES = 256, CTX = 4, TS_W = 16, CW = 2, TW = 4;
  logic clk = 0, rst_n = 0, start = 0;
  logic [CW-1:0] ctx = '0, row_ctx;
  logic [TS_W-1:0] ts = '0, now = '0;
  logic busy, done, rollover, row_clr_en;
  logic [TW-1:0] row_tc_bit;
  logic [LINES-1:0] row_tc, row_clr_mask;
  int checks = 0, failures = 0, n_roll = 0, n_norm = 0;
  logic [TS_W-1:0] tc [LINES];

  timestamp_comparator #(.LINES(LINES), .CTX(CTX), .TS_W(TS_W)) dut (.*);

  always_comb for (int k = 0; k < LINES; k++) row_tc[k] = tc[k][row_tc_bit];

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int cyc, clr_seen;
      logic exp_roll;
      ts  = TS_W'($urandom());
      now = (t % 3 == 0) ? ts - TS_W'($urandom_range(1, 1000)) : ts + TS_W'($urandom_range(0, 1000));
      exp_roll = ts > now;
      for (int k = 0; k < LINES; k++)
        tc[k] = (k % 5 == 0) ? ts : ((k % 5 == 1) ? ts ^ TS_W'(1 << (k % TS_W)) : TS_W'($urandom()));
      ctx = CW'($urandom());
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1; clr_seen = 0;
      while (!done && cyc < 200) begin
        if (row_clr_en) begin
          clr_seen++;
          checks++;
          if (row_ctx !== ctx) failures++;
          for (int k = 0; k < LINES; k++) begin
            checks++;
            if (row_clr_mask[k] !== (exp_roll ? 1'b1 : (tc[k] > ts))) begin
              failures++;
              if (failures < 6) $display("line %0d Tc=%h Ts=%h mask=%b", k, tc[k], ts, row_clr_mask[k]);
            end
          end
        end
        @(negedge clk); cyc++;
      end
      checks += 3;
      // cyc counts falling edges from the one after the start edge
      if (cyc - 1 != TS_W + 2) begin failures++; $display("latency %0d expected %0d", cyc - 1, TS_W + 2); end
      if (clr_seen != 1) failures++;
      if (rollover !== exp_roll) failures++;
      if (exp_roll) n_roll++; else n_norm++;
    end
    checks++;
    if (n_roll == 0 || n_norm == 0) failures++;
    $display("runs: %0d normal, %0d rollover", n_norm, n_roll);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
