// cache_store: the conventional part of a cache level.
//
// Tag, state (valid, dirty) and data arrays of a SETS x WAYS set-associative
// cache with LINE_BITS-bit lines, plus a round-robin victim pointer per set.
// All ways of the addressed set are read combinationally, so the controller
// can compare tags in the cycle after it accepts a request. The victim for a
// set is its first invalid way, or else the way its pointer names; `adv`
// (given with a fill) points the pointer of `wr_set` at the way after the
// one being written, so ways are replaced in fill order. The paper treats this
// part as a standard cache and gives neither associativity nor replacement
// policy; both are this design's choice.
//
// Interface: rd_set -> rd_tag/rd_valid/rd_dirty/rd_data/victim (same cycle);
// wr_en writes tag, valid and dirty of (wr_set, wr_way), and the data too if
// wr_data_en; writes take effect at the rising clock edge. Reset clears the
// valid bits and pointers only.
module cache_store #(
  parameter int unsigned SETS      = 256,
  parameter int unsigned WAYS      = 2,
  parameter int unsigned TAG_W     = 34,
  parameter int unsigned LINE_BITS = 512,
  localparam int unsigned SW = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned WW = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [SW-1:0]        rd_set,
  output logic [TAG_W-1:0]     rd_tag   [WAYS],
  output logic [WAYS-1:0]      rd_valid,
  output logic [WAYS-1:0]      rd_dirty,
  output logic [LINE_BITS-1:0] rd_data  [WAYS],
  output logic [WW-1:0]        victim,
  input  logic                 wr_en,
  input  logic                 wr_data_en,
  input  logic [SW-1:0]        wr_set,
  input  logic [WW-1:0]        wr_way,
  input  logic [TAG_W-1:0]     wr_tag,
  input  logic                 wr_valid,
  input  logic                 wr_dirty,
  input  logic [LINE_BITS-1:0] wr_data,
  input  logic                 adv
);

  logic [TAG_W-1:0]     tags  [SETS*WAYS];
  logic [LINE_BITS-1:0] data  [SETS*WAYS];
  logic [SETS*WAYS-1:0] valid;
  logic [SETS*WAYS-1:0] dirty;
  logic [SETS*WW-1:0]   rr;       // victim pointers, WW bits per set

  always_comb begin
    for (int w = 0; w < WAYS; w++) begin
      rd_tag[w]   = tags[rd_set*WAYS + w];
      rd_data[w]  = data[rd_set*WAYS + w];
      rd_valid[w] = valid[rd_set*WAYS + w];
      rd_dirty[w] = dirty[rd_set*WAYS + w];
    end
    victim = rr[rd_set*WW +: WW];
    for (int w = WAYS - 1; w >= 0; w--)
      if (!rd_valid[w]) victim = WW'(w);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid <= '0;
      dirty <= '0;
      rr    <= '0;
    end else begin
      if (wr_en) begin
        tags [wr_set*WAYS + wr_way] <= wr_tag;
        valid[wr_set*WAYS + wr_way] <= wr_valid;
        dirty[wr_set*WAYS + wr_way] <= wr_dirty;
      end
      if (adv) rr[wr_set*WW +: WW] <= (wr_way == WW'(WAYS - 1)) ? '0 : wr_way + 1'b1;
    end
  end

  // data array kept out of reset so it can map onto a RAM
  always_ff @(posedge clk) begin
    if (wr_en && wr_data_en) data[wr_set*WAYS + wr_way] <= wr_data;
  end

endmodule
