// swis_array: ROWS x COLS output-stationary systolic array of SWIS PEs.
//
// Activation vectors enter each row at column 0 and move one PE to the right
// per cycle; double-shift weight words enter each column at row 0 and move one
// PE down per cycle. PE (r,c) therefore accumulates output r (an output pixel)
// of filter c, and stays on it for the whole tile (output stationary). The
// caller must skew the inputs: row r delayed by r cycles, column c by c
// cycles, so that matching activation and weight words meet in every PE.
// The 8x8 size and the row/column flow follow the paper; the orientation
// (pixels on rows, filters on columns) and the parallel accumulator read-out
// port acc_o are this design's choices.
//
// Timing: a word entering row r / column c in cycle t reaches PE (r,c)'s
// buffers in cycle t+1 and its accumulator in cycle t+2 (two register stages
// in the PE for every hop: one per hop plus one for the accumulation).
module swis_array
  import swis_pkg::*;
#(
  parameter int unsigned NROWS = ROWS,
  parameter int unsigned NCOLS = COLS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          acc_clr,
  input  act_vec_t                      act_row_i [NROWS],
  input  logic                          act_vld_i [NROWS],
  input  wgt_word_t                     wgt_col_i [NCOLS],
  input  logic                          wgt_vld_i [NCOLS],
  output logic signed [ACC_W-1:0]       acc_o     [NROWS][NCOLS]
);

  // Horizontal (activation) and vertical (weight) links; index NCOLS / NROWS
  // are the outputs of the last column / row and are left unused.
  act_vec_t  act_h [NROWS][NCOLS+1];
  logic      avl_h [NROWS][NCOLS+1];
  wgt_word_t wgt_v [NROWS+1][NCOLS];
  logic      wvl_v [NROWS+1][NCOLS];

  for (genvar r = 0; r < NROWS; r++) begin : g_row_in
    assign act_h[r][0] = act_row_i[r];
    assign avl_h[r][0] = act_vld_i[r];
  end
  for (genvar c = 0; c < NCOLS; c++) begin : g_col_in
    assign wgt_v[0][c] = wgt_col_i[c];
    assign wvl_v[0][c] = wgt_vld_i[c];
  end

  for (genvar r = 0; r < NROWS; r++) begin : g_r
    for (genvar c = 0; c < NCOLS; c++) begin : g_c
      swis_pe u_pe (
        .clk       (clk),
        .rst_n     (rst_n),
        .acc_clr   (acc_clr),
        .act_i     (act_h[r][c]),
        .act_vld_i (avl_h[r][c]),
        .wgt_i     (wgt_v[r][c]),
        .wgt_vld_i (wvl_v[r][c]),
        .act_o     (act_h[r][c+1]),
        .act_vld_o (avl_h[r][c+1]),
        .wgt_o     (wgt_v[r+1][c]),
        .wgt_vld_o (wvl_v[r+1][c]),
        .acc_o     (acc_o[r][c])
      );
    end
  end

endmodule
