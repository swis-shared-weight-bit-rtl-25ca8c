// swis_top: SWIS accelerator - an output-stationary systolic array of
// double-shift bit-serial PEs with its activation, weight and output
// memories.
//
// Data path: weight memory -> shift generator (SWIS / SWIS-C) -> feeder
// (column skew) -> array columns; activation memory -> feeder (hold for the
// group's shift cycles, row skew) -> array rows; array accumulators ->
// output memory, one row per cycle. swis_ctrl sequences one tile per start
// pulse. The external DRAM is not part of the design: its side of the
// on-chip memories (activation and weight write ports, output read port) is
// brought out as top-level ports for a host or DMA engine.
//
// Defaults are the paper's main configuration: 8x8 array, group size 4,
// two shifts per PE cycle, 64 KB activation and weight memories, 16 KB
// output memory. Host ports may be used while the controller is busy, but
// writing a word the running tile reads gives undefined results.
module swis_top
  import swis_pkg::*;
#(
  parameter int unsigned NROWS     = ROWS,
  parameter int unsigned NCOLS     = COLS,
  parameter int unsigned ACT_BYTES = 65536,
  parameter int unsigned WGT_BYTES = 65536,
  parameter int unsigned OUT_BYTES = 16384,
  parameter int unsigned ACT_AW    = $clog2((ACT_BYTES * 8) / (NROWS * GROUP * ACT_W)),
  parameter int unsigned WGT_AW    = $clog2((WGT_BYTES * 8) / (NCOLS * WGT_WORD_W)),
  parameter int unsigned OUT_AW    = $clog2((OUT_BYTES * 8) / (NCOLS * ACC_W)),
  parameter int unsigned KW        = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // tile descriptor
  input  logic                     start,
  input  swis_mode_e               mode,
  input  logic [2:0]               n_pairs,
  input  logic [KW-1:0]            k_groups,
  input  logic [ACT_AW-1:0]        act_base,
  input  logic [WGT_AW-1:0]        wgt_base,
  input  logic [OUT_AW-1:0]        out_base,
  output logic                     busy,
  output logic                     done,
  // host / DRAM side of the memories
  input  logic                     act_wr_en,
  input  logic [ACT_AW-1:0]        act_wr_addr,
  input  act_vec_t                 act_wr_data [NROWS],
  input  logic                     wgt_wr_en,
  input  logic [WGT_AW-1:0]        wgt_wr_addr,
  input  wgt_word_t                wgt_wr_data [NCOLS],
  input  logic                     out_rd_en,
  input  logic [OUT_AW-1:0]        out_rd_addr,
  output logic signed [ACC_W-1:0]  out_rd_data [NCOLS]
);

  swis_mode_e                mode_q;
  logic                      acc_clr, act_rd_en, wgt_rd_en, first, out_wr_en;
  logic [ACT_AW-1:0]         act_rd_addr;
  logic [WGT_AW-1:0]         wgt_rd_addr;
  logic [OUT_AW-1:0]         out_wr_addr;
  logic [$clog2(NROWS)-1:0]  out_row;

  swis_ctrl #(
    .NROWS(NROWS), .NCOLS(NCOLS), .ACT_AW(ACT_AW), .WGT_AW(WGT_AW),
    .OUT_AW(OUT_AW), .KW(KW)
  ) u_ctrl (
    .clk, .rst_n, .start, .mode_i(mode), .n_pairs, .k_groups,
    .act_base, .wgt_base, .out_base, .busy, .done,
    .mode_o(mode_q), .acc_clr, .act_rd_en, .act_rd_addr, .wgt_rd_en,
    .wgt_rd_addr, .first_o(first), .out_wr_en, .out_wr_addr, .out_row
  );

  act_vec_t  act_rd [NROWS];
  wgt_word_t wgt_rd [NCOLS];

  swis_act_mem #(.NROWS(NROWS), .BYTES(ACT_BYTES)) u_act_mem (
    .clk, .wr_en(act_wr_en), .wr_addr(act_wr_addr), .wr_data(act_wr_data),
    .rd_en(act_rd_en), .rd_addr(act_rd_addr), .rd_data(act_rd)
  );

  swis_wgt_mem #(.NCOLS(NCOLS), .BYTES(WGT_BYTES)) u_wgt_mem (
    .clk, .wr_en(wgt_wr_en), .wr_addr(wgt_wr_addr), .wr_data(wgt_wr_data),
    .rd_en(wgt_rd_en), .rd_addr(wgt_rd_addr), .rd_data(wgt_rd)
  );

  // Read-issue flags aligned with the memories' one-cycle read latency.
  logic rd_vld_d, first_d;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_vld_d <= 1'b0;
      first_d  <= 1'b0;
    end else begin
      rd_vld_d <= wgt_rd_en;
      first_d  <= first;
    end
  end

  wgt_word_t sg_wgt [NCOLS];
  logic      sg_vld;
  swis_shift_gen #(.NCOLS(NCOLS)) u_shift_gen (
    .clk, .rst_n, .mode(mode_q), .vld_i(rd_vld_d), .first_i(first_d),
    .wgt_i(wgt_rd), .vld_o(sg_vld), .wgt_o(sg_wgt)
  );

  act_vec_t  row_act [NROWS];
  logic      row_vld [NROWS];
  wgt_word_t col_wgt [NCOLS];
  logic      col_vld [NCOLS];
  swis_feeder #(.NROWS(NROWS), .NCOLS(NCOLS)) u_feeder (
    .clk, .rst_n,
    .act_vld_i(rd_vld_d), .new_i(first_d), .act_rd_i(act_rd),
    .wgt_vld_i(sg_vld), .wgt_i(sg_wgt),
    .act_row_o(row_act), .act_vld_o(row_vld),
    .wgt_col_o(col_wgt), .wgt_vld_o(col_vld)
  );

  logic signed [ACC_W-1:0] acc [NROWS][NCOLS];
  swis_array #(.NROWS(NROWS), .NCOLS(NCOLS)) u_array (
    .clk, .rst_n, .acc_clr,
    .act_row_i(row_act), .act_vld_i(row_vld),
    .wgt_col_i(col_wgt), .wgt_vld_i(col_vld),
    .acc_o(acc)
  );

  swis_out_mem #(.NCOLS(NCOLS), .BYTES(OUT_BYTES)) u_out_mem (
    .clk, .wr_en(out_wr_en), .wr_addr(out_wr_addr), .wr_data(acc[out_row]),
    .rd_en(out_rd_en), .rd_addr(out_rd_addr), .rd_data(out_rd_data)
  );

endmodule
