// tb_ts_sbit_array: checks both access interfaces of the transposed array.
// An instance of 1024 lines (two 512-bit chunks), 3 contexts and 8-bit Tc
// is driven with random operations of every kind - column writes of Tc and
// s-bits, chunk restores, masked s-bit clears - while the testbench keeps a
// plain per-line reference model. After every operation it reads back a
// random line through the transpose interface, a random Tc row and a random
// s-bit chunk through the regular interface, and compares all three with
// the model.
module tb_ts_sbit_array;
  localparam int LINES = 1024, CTX = 3, TS_W = 8, CHUNK = 512;
  localparam int LW = 10, CW = 2, TW = 3, NW = 1;
  logic clk = 0, rst_n = 0;
  logic [LW-1:0] tr_line = '0;
  logic [TS_W-1:0] tr_tc, tr_tc_wdata = '0;
  logic [CTX-1:0] tr_sbits, tr_sb_we = '0, tr_sb_wdata = '0;
  logic tr_tc_we = 0;
  logic [TW-1:0] rg_tc_bit = '0;
  logic [LINES-1:0] rg_tc_row, rg_clr_mask = '0;
  logic [CW-1:0] rg_ctx = '0;
  logic [NW-1:0] rg_chunk = '0;
  logic [CHUNK-1:0] rg_chunk_rdata, rg_chunk_wdata = '0;
  logic rg_chunk_we = 0, rg_clr_en = 0;
  int checks = 0, failures = 0;

  logic [TS_W-1:0] tc_ref [LINES];
  logic            sb_ref [CTX][LINES];

  ts_sbit_array #(.LINES(LINES), .CTX(CTX), .TS_W(TS_W), .CHUNK(CHUNK)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle();
    tr_tc_we = 0; tr_sb_we = '0; rg_chunk_we = 0; rg_clr_en = 0;
  endtask

  task automatic verify();
    int l, bi, c, ch;
    l = $urandom_range(LINES - 1); bi = $urandom_range(TS_W - 1);
    c = $urandom_range(CTX - 1);   ch = $urandom_range(1);
    tr_line = LW'(l); rg_tc_bit = TW'(bi); rg_ctx = CW'(c); rg_chunk = NW'(ch);
    #1;
    checks++;
    if (tr_tc !== tc_ref[l]) begin failures++; $display("Tc line %0d: %h vs %h", l, tr_tc, tc_ref[l]); end
    for (int s = 0; s < CTX; s++) begin
      checks++;
      if (tr_sbits[s] !== sb_ref[s][l]) begin failures++; $display("sbit %0d line %0d", s, l); end
    end
    for (int k = 0; k < LINES; k++) begin
      checks++;
      if (rg_tc_row[k] !== tc_ref[k][bi]) begin failures++; if (failures < 8) $display("row %0d col %0d", bi, k); end
    end
    for (int k = 0; k < CHUNK; k++) begin
      checks++;
      if (rg_chunk_rdata[k] !== sb_ref[c][ch*CHUNK + k]) failures++;
    end
  endtask

  initial begin
    for (int k = 0; k < LINES; k++) begin
      tc_ref[k] = '0;
      for (int s = 0; s < CTX; s++) sb_ref[s][k] = 1'b0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    verify();
    for (int t = 0; t < 400; t++) begin
      int op, l, c, ch;
      @(negedge clk);
      idle();
      op = $urandom_range(3);
      l  = $urandom_range(LINES - 1);
      c  = $urandom_range(CTX - 1);
      ch = $urandom_range(1);
      case (op)
        0: begin  // fill: Tc and all s-bits of one line
          tr_line = LW'(l); tr_tc_we = 1; tr_tc_wdata = TS_W'($urandom());
          tr_sb_we = '1; tr_sb_wdata = CTX'($urandom());
          tc_ref[l] = tr_tc_wdata;
          for (int s = 0; s < CTX; s++) sb_ref[s][l] = tr_sb_wdata[s];
        end
        1: begin  // set one s-bit
          tr_line = LW'(l); tr_sb_we = '0; tr_sb_we[c] = 1'b1; tr_sb_wdata = '1;
          sb_ref[c][l] = 1'b1;
        end
        2: begin  // restore a chunk
          rg_ctx = CW'(c); rg_chunk = NW'(ch); rg_chunk_we = 1;
          for (int k = 0; k < CHUNK; k += 32) rg_chunk_wdata[k +: 32] = $urandom();
          for (int k = 0; k < CHUNK; k++) sb_ref[c][ch*CHUNK + k] = rg_chunk_wdata[k];
        end
        default: begin  // masked clear
          rg_ctx = CW'(c); rg_clr_en = 1;
          for (int k = 0; k < LINES; k += 32) rg_clr_mask[k +: 32] = $urandom();
          for (int k = 0; k < LINES; k++) if (rg_clr_mask[k]) sb_ref[c][k] = 1'b0;
        end
      endcase
      @(negedge clk);
      idle();
      verify();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
