// tb_bitline_peripheral: checks the bit-serial Tc > Ts decision.
// 64 slices receive random Tc values (with some equal to, and some sharing
// a long prefix with, Ts); the bits are applied MSB first for 16 cycles
// and every slice's reset output is compared with an integer comparison
// Tc > Ts, and its stop output with Tc < Ts.
module tb_bitline_peripheral;
  localparam int COLS = 64, W = 16;
  logic clk = 0, clr = 0, en = 0, a = 0;
  logic [COLS-1:0] b = '0, reset_out, stop_out;
  int checks = 0, failures = 0;

  bitline_peripheral #(.COLS(COLS)) dut (.clk, .clr, .en, .a, .b, .reset_out, .stop_out);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] ts;
    logic [W-1:0] tc [COLS];
    for (int t = 0; t < 40; t++) begin
      ts = W'($urandom());
      for (int k = 0; k < COLS; k++) begin
        case (k % 4)
          0: tc[k] = ts;                                  // equal
          1: tc[k] = ts ^ W'(1 << ($urandom() % W));      // differ in one bit
          default: tc[k] = W'($urandom());
        endcase
      end
      @(negedge clk); clr = 1;
      @(negedge clk); clr = 0; en = 1;
      for (int i = W - 1; i >= 0; i--) begin
        a = ts[i];
        for (int k = 0; k < COLS; k++) b[k] = tc[k][i];
        @(negedge clk);
      end
      en = 0;
      for (int k = 0; k < COLS; k++) begin
        checks += 2;
        if (reset_out[k] !== (tc[k] > ts)) begin
          failures++;
          if (failures < 5) $display("Tc=%h Ts=%h reset=%b", tc[k], ts, reset_out[k]);
        end
        if (stop_out[k] !== (tc[k] < ts)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
