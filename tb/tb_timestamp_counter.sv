// tb_timestamp_counter: checks the global time base.
// An 8-bit instance is run for 600 cycles; every cycle `now` is compared
// with a reference count kept by the testbench (cycles since reset, modulo
// 256), and the wrap pulse must appear exactly when the count returns to 0.
module tb_timestamp_counter;
  localparam int TS_W = 8;
  logic clk = 0, rst_n = 0;
  logic [TS_W-1:0] now;
  logic wrapped;
  int checks = 0, failures = 0, wraps = 0;

  timestamp_counter #(.TS_W(TS_W)) dut (.clk, .rst_n, .now, .wrapped);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ref_t;
    repeat (2) @(negedge clk);
    rst_n = 1;
    ref_t = 0;
    for (int c = 0; c < 600; c++) begin
      @(posedge clk); #1;
      ref_t = (ref_t + 1) % 256;
      checks++;
      if (int'(now) != ref_t) begin
        failures++;
        if (failures < 5) $display("cycle %0d: now=%0d expected %0d", c, now, ref_t);
      end
      checks++;
      if (wrapped != (ref_t == 0)) failures++;
      if (wrapped) wraps++;
    end
    checks++;
    if (wraps != 2) begin failures++; $display("wraps=%0d expected 2", wraps); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
