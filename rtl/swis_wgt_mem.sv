// swis_wgt_mem: on-chip weight memory (64 KB by default).
//
// One word holds one double-shift weight word (signs, two masks, two 3-bit
// shifts; swis_pkg::wgt_word_t, 18 bits) for every array column, i.e. the
// weights all columns consume in one shift cycle: 144 bits for 8 columns,
// 3640 words in 64 KB. The host writes words; the array side reads one word
// per cycle. Synchronous ports: a read in cycle t returns data in cycle t+1.
// Keeping the signs in every shift-pair word (instead of once per group, as
// the paper's compressed storage format does) is this design's choice; it
// lets the memory feed the array without a decompressor.
module swis_wgt_mem
  import swis_pkg::*;
#(
  parameter int unsigned NCOLS  = COLS,
  parameter int unsigned BYTES  = 65536,
  parameter int unsigned WORD_W = NCOLS * WGT_WORD_W,
  parameter int unsigned DEPTH  = (BYTES * 8) / WORD_W,
  parameter int unsigned AW     = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic [AW-1:0]     wr_addr,
  input  wgt_word_t         wr_data [NCOLS],
  input  logic              rd_en,
  input  logic [AW-1:0]     rd_addr,
  output wgt_word_t         rd_data [NCOLS]
);

  logic [WORD_W-1:0] mem [DEPTH];
  logic [WORD_W-1:0] wr_flat, rd_flat;

  for (genvar c = 0; c < NCOLS; c++) begin : g_pack
    assign wr_flat[c*WGT_WORD_W +: WGT_WORD_W] = wr_data[c];
    assign rd_data[c] = rd_flat[c*WGT_WORD_W +: WGT_WORD_W];
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_flat;
    if (rd_en) rd_flat <= mem[rd_addr];
  end

endmodule
