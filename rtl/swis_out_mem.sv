// swis_out_mem: on-chip output memory (16 KB by default).
//
// One word holds the accumulators of one array row, NCOLS values of ACC_W
// bits (144 bits for 8 columns of 18 bits, 910 words in 16 KB). The
// controller writes one word per cycle while draining the array; the host
// (DRAM side) reads words back. Synchronous ports: a read in cycle t returns
// data in cycle t+1. The 16 KB capacity is the paper's; the layout is this
// design's choice.
module swis_out_mem
  import swis_pkg::*;
#(
  parameter int unsigned NCOLS  = COLS,
  parameter int unsigned BYTES  = 16384,
  parameter int unsigned WORD_W = NCOLS * ACC_W,
  parameter int unsigned DEPTH  = (BYTES * 8) / WORD_W,
  parameter int unsigned AW     = $clog2(DEPTH)
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [AW-1:0]            wr_addr,
  input  logic signed [ACC_W-1:0]  wr_data [NCOLS],
  input  logic                     rd_en,
  input  logic [AW-1:0]            rd_addr,
  output logic signed [ACC_W-1:0]  rd_data [NCOLS]
);

  logic [WORD_W-1:0] mem [DEPTH];
  logic [WORD_W-1:0] wr_flat, rd_flat;

  for (genvar c = 0; c < NCOLS; c++) begin : g_pack
    assign wr_flat[c*ACC_W +: ACC_W] = wr_data[c];
    assign rd_data[c] = rd_flat[c*ACC_W +: ACC_W];
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_flat;
    if (rd_en) rd_flat <= mem[rd_addr];
  end

endmodule
