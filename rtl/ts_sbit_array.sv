// ts_sbit_array: transposed storage of load timestamps (Tc) and s-bits.
//
// Beside the conventional cache arrays, every cache line owns a column here:
// TS_W bits of Tc (the time the line was filled) and one s-bit per hardware
// context (set = this context has already paid a miss for the line). The
// array is stored transposed: row s (s < CTX) holds context s's s-bits of
// all lines, and row CTX+i holds bit i of every line's Tc, matching the
// row order printed in the paper's hardware overview (s-bit rows, then Tc).
// Two interfaces reach it:
//   transpose interface (tr_*): one line's column, used by normal cache
//     operation - look up the s-bits, set one, or write Tc and all s-bits on
//     a fill or an invalidation;
//   regular interface (rg_*): whole rows, used at context switches - read one
//     Tc bit of every line for the bit-serial comparison, read or write a
//     CHUNK-bit slice of an s-bit row for save/restore, and clear a
//     context's s-bits under a per-line mask.
// The paper builds this from 8-T dual-access SRAM cells with two sets of
// sense amplifiers and drivers; here it is flip-flop storage with the same
// two logical interfaces. Reads are combinational, writes happen at the
// rising clock edge. Regular writes are applied before transpose writes in
// the same cycle (the controller never issues both to one cell).
module ts_sbit_array #(
  parameter int unsigned LINES = 512,
  parameter int unsigned CTX   = 2,
  parameter int unsigned TS_W  = 32,
  parameter int unsigned CHUNK = 512,
  localparam int unsigned LW      = (LINES > 1) ? $clog2(LINES) : 1,
  localparam int unsigned CW      = (CTX > 1) ? $clog2(CTX) : 1,
  localparam int unsigned TW      = (TS_W > 1) ? $clog2(TS_W) : 1,
  localparam int unsigned NCHUNK  = (LINES + CHUNK - 1) / CHUNK,
  localparam int unsigned NW      = (NCHUNK > 1) ? $clog2(NCHUNK) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // transpose interface: one line
  input  logic [LW-1:0]      tr_line,
  output logic [TS_W-1:0]    tr_tc,
  output logic [CTX-1:0]     tr_sbits,
  input  logic               tr_tc_we,
  input  logic [TS_W-1:0]    tr_tc_wdata,
  input  logic [CTX-1:0]     tr_sb_we,      // per-context write enable
  input  logic [CTX-1:0]     tr_sb_wdata,
  // regular interface: Tc row read for the comparator
  input  logic [TW-1:0]      rg_tc_bit,
  output logic [LINES-1:0]   rg_tc_row,
  // regular interface: s-bit chunk save/restore
  input  logic [CW-1:0]      rg_ctx,
  input  logic [NW-1:0]      rg_chunk,
  output logic [CHUNK-1:0]   rg_chunk_rdata,
  input  logic               rg_chunk_we,
  input  logic [CHUNK-1:0]   rg_chunk_wdata,
  // regular interface: masked s-bit clear of context rg_ctx
  input  logic               rg_clr_en,
  input  logic [LINES-1:0]   rg_clr_mask
);

  logic [LINES-1:0] sb_row [CTX];
  logic [LINES-1:0] tc_row [TS_W];

  // transpose reads
  always_comb begin
    for (int i = 0; i < TS_W; i++) tr_tc[i]    = tc_row[i][tr_line];
    for (int s = 0; s < CTX;  s++) tr_sbits[s] = sb_row[s][tr_line];
  end

  // regular reads
  assign rg_tc_row = tc_row[rg_tc_bit];

  logic [NCHUNK*CHUNK-1:0] rd_padded;
  always_comb begin
    rd_padded = '0;
    rd_padded[LINES-1:0] = sb_row[rg_ctx];
  end
  assign rg_chunk_rdata = rd_padded[rg_chunk*CHUNK +: CHUNK];

  logic [NCHUNK*CHUNK-1:0] wr_padded;
  always_comb begin
    wr_padded = '0;
    wr_padded[LINES-1:0] = sb_row[rg_ctx];
    wr_padded[rg_chunk*CHUNK +: CHUNK] = rg_chunk_wdata;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < CTX; s++) sb_row[s] <= '0;
      for (int i = 0; i < TS_W; i++) tc_row[i] <= '0;
    end else begin
      if (rg_chunk_we) sb_row[rg_ctx] <= wr_padded[LINES-1:0];
      if (rg_clr_en)   sb_row[rg_ctx] <= sb_row[rg_ctx] & ~rg_clr_mask;
      if (tr_tc_we)
        for (int i = 0; i < TS_W; i++) tc_row[i][tr_line] <= tr_tc_wdata[i];
      for (int s = 0; s < CTX; s++)
        if (tr_sb_we[s]) sb_row[s][tr_line] <= tr_sb_wdata[s];
    end
  end

endmodule
