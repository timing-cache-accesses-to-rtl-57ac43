// tb_ts_shift_register: checks that Ts is presented MSB first.
// Random 32-bit values are loaded; after each load the testbench shifts 32
// times and compares the presented bit with bit 31-i of the loaded value,
// and checks that the kept copy still equals the loaded value.
module tb_ts_shift_register;
  localparam int TS_W = 32;
  logic clk = 0, rst_n = 0, load = 0, shift = 0, msb;
  logic [TS_W-1:0] ts_in = '0, ts_q;
  int checks = 0, failures = 0;

  ts_shift_register #(.TS_W(TS_W)) dut (.clk, .rst_n, .load, .ts_in, .shift, .msb, .ts_q);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [TS_W-1:0] v;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      v = $urandom();
      @(negedge clk); load = 1; ts_in = v;
      @(negedge clk); load = 0; shift = 1;
      for (int i = TS_W - 1; i >= 0; i--) begin
        checks++;
        if (msb !== v[i]) begin
          failures++;
          if (failures < 5) $display("value %h bit %0d: got %b", v, i, msb);
        end
        @(negedge clk);
      end
      shift = 0;
      checks++;
      if (ts_q !== v) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
