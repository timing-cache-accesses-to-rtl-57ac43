// tb_cache_store: checks the conventional tag/state/data arrays.
// A 8-set, 4-way instance with 64-bit lines receives random line writes
// (with and without data, valid and invalid) and pointer advances; after
// each, all ways of a random set are read back and compared with a
// reference model, including the victim choice (first invalid way, else the
// way after the one last filled).
module tb_cache_store;
  localparam int SETS = 8, WAYS = 4, TAG_W = 10, LB = 64, SW = 3, WW = 2;
  logic clk = 0, rst_n = 0;
  logic [SW-1:0] rd_set = '0, wr_set = '0;
  logic [TAG_W-1:0] rd_tag [WAYS];
  logic [WAYS-1:0] rd_valid, rd_dirty;
  logic [LB-1:0] rd_data [WAYS];
  logic [WW-1:0] victim, wr_way = '0;
  logic wr_en = 0, wr_data_en = 0, wr_valid = 0, wr_dirty = 0, adv = 0;
  logic [TAG_W-1:0] wr_tag = '0;
  logic [LB-1:0] wr_data = '0;
  int checks = 0, failures = 0;

  logic [TAG_W-1:0] m_tag [SETS][WAYS];
  logic [LB-1:0]    m_data [SETS][WAYS];
  logic             m_valid [SETS][WAYS];
  logic             m_dirty [SETS][WAYS];
  int               m_rr [SETS];

  cache_store #(.SETS(SETS), .WAYS(WAYS), .TAG_W(TAG_W), .LINE_BITS(LB)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < SETS; s++) begin
      m_rr[s] = 0;
      for (int w = 0; w < WAYS; w++) begin m_valid[s][w] = 0; m_dirty[s][w] = 0; m_data[s][w] = '0; m_tag[s][w] = '0; end
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      int s, w, exp_v;
      s = $urandom_range(SETS - 1); w = $urandom_range(WAYS - 1);
      wr_set = SW'(s); wr_way = WW'(w);
      wr_en = ($urandom_range(3) != 0);
      wr_data_en = $urandom_range(1);
      wr_valid = ($urandom_range(4) != 0);
      wr_dirty = $urandom_range(1);
      wr_tag = TAG_W'($urandom());
      wr_data = {$urandom(), $urandom()};
      adv = ($urandom_range(2) == 0);
      if (wr_en) begin
        m_tag[s][w] = wr_tag; m_valid[s][w] = wr_valid; m_dirty[s][w] = wr_dirty;
        if (wr_data_en) m_data[s][w] = wr_data;
      end
      if (adv) m_rr[s] = (w + 1) % WAYS;
      @(negedge clk);
      wr_en = 0; adv = 0;
      s = $urandom_range(SETS - 1);
      rd_set = SW'(s);
      #1;
      exp_v = m_rr[s];
      for (int k = WAYS - 1; k >= 0; k--) if (!m_valid[s][k]) exp_v = k;
      checks++;
      if (int'(victim) != exp_v) begin failures++; $display("set %0d victim %0d exp %0d", s, victim, exp_v); end
      for (int k = 0; k < WAYS; k++) begin
        checks += 2;
        if (rd_valid[k] !== m_valid[s][k]) failures++;
        if (m_valid[s][k]) begin
          checks += 2;
          if (rd_tag[k] !== m_tag[s][k] || rd_dirty[k] !== m_dirty[s][k]) failures++;
          if (rd_data[k] !== m_data[s][k] && m_data[s][k] !== '0) failures++;
        end
        if (m_valid[s][k] && rd_data[k] !== m_data[s][k] && m_data[s][k] !== '0) $display("data set %0d way %0d", s, k);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
