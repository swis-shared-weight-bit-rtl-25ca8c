// swis_act_mem: on-chip activation memory (64 KB by default).
//
// One word holds the activation vectors of all array rows for one group step:
// NROWS vectors of GROUP 8-bit activations (256 bits for the 8x8, group-4
// array), so the memory interface is scaled by the group size as the paper
// assumes. The host (DRAM side) writes words through the write port; the
// array side reads one word per access. Both ports are synchronous: a read
// requested in cycle t returns its data in cycle t+1. The 64 KB capacity is
// the paper's; the word layout and the port set are this design's choices.
module swis_act_mem
  import swis_pkg::*;
#(
  parameter int unsigned NROWS  = ROWS,
  parameter int unsigned BYTES  = 65536,
  parameter int unsigned WORD_W = NROWS * GROUP * ACT_W,
  parameter int unsigned DEPTH  = (BYTES * 8) / WORD_W,
  parameter int unsigned AW     = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic [AW-1:0]     wr_addr,
  input  act_vec_t          wr_data [NROWS],
  input  logic              rd_en,
  input  logic [AW-1:0]     rd_addr,
  output act_vec_t          rd_data [NROWS]
);

  logic [WORD_W-1:0] mem [DEPTH];
  logic [WORD_W-1:0] wr_flat, rd_flat;

  for (genvar r = 0; r < NROWS; r++) begin : g_pack
    assign wr_flat[r*GROUP*ACT_W +: GROUP*ACT_W] = wr_data[r];
    assign rd_data[r] = rd_flat[r*GROUP*ACT_W +: GROUP*ACT_W];
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_flat;
    if (rd_en) rd_flat <= mem[rd_addr];
  end

endmodule
