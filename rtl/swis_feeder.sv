// swis_feeder: staggered activation/weight feeder in front of the array.
//
// Activations: a new activation word (all rows' vectors of one group) is read
// from the activation memory once per group and marked new_i; the feeder
// keeps it in a hold register and presents it again for every further shift
// cycle of that group, so each activation is fed repeatedly, once per shift
// pair, without a second memory access (the paper's "staggered" dataflow).
// Weights: the words leaving the shift generator are passed on.
// Both streams are then skewed for the systolic array: row r and column c are
// delayed by r and c cycles. The repetition follows the paper; the hold
// register and the skew registers are this design's way of doing it.
//
// Timing: act_rd_i/new_i/act_vld_i come one cycle after the memory read
// (cycle t+1) and leave row r in cycle t+2+r; wgt_i/wgt_vld_i come from the
// shift generator in cycle t+2 and leave column c in cycle t+2+c. Column 0
// needs no delay, so its outputs are wired straight to the inputs.
module swis_feeder
  import swis_pkg::*;
#(
  parameter int unsigned NROWS = ROWS,
  parameter int unsigned NCOLS = COLS
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       act_vld_i,
  input  logic       new_i,
  input  act_vec_t   act_rd_i  [NROWS],
  input  logic       wgt_vld_i,
  input  wgt_word_t  wgt_i     [NCOLS],
  output act_vec_t   act_row_o [NROWS],
  output logic       act_vld_o [NROWS],
  output wgt_word_t  wgt_col_o [NCOLS],
  output logic       wgt_vld_o [NCOLS]
);

  // Hold register: fresh word on new_i, otherwise the previous one again.
  act_vec_t hold [NROWS];
  logic     hold_vld;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NROWS; r++) hold[r] <= '0;
      hold_vld <= 1'b0;
    end else begin
      if (act_vld_i && new_i) hold <= act_rd_i;
      hold_vld <= act_vld_i;
    end
  end

  // Row skew: row r delayed by r cycles.
  for (genvar r = 0; r < NROWS; r++) begin : g_rskew
    if (r == 0) begin : g_direct
      assign act_row_o[r] = hold[r];
      assign act_vld_o[r] = hold_vld;
    end else begin : g_delay
      act_vec_t d   [r];
      logic     dv  [r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < r; i++) begin
            d[i]  <= '0;
            dv[i] <= 1'b0;
          end
        end else begin
          d[0]  <= hold[r];
          dv[0] <= hold_vld;
          for (int i = 1; i < r; i++) begin
            d[i]  <= d[i-1];
            dv[i] <= dv[i-1];
          end
        end
      end
      assign act_row_o[r] = d[r-1];
      assign act_vld_o[r] = dv[r-1];
    end
  end

  // Column skew: column c delayed by c cycles.
  for (genvar c = 0; c < NCOLS; c++) begin : g_cskew
    if (c == 0) begin : g_direct
      assign wgt_col_o[c] = wgt_i[c];
      assign wgt_vld_o[c] = wgt_vld_i;
    end else begin : g_delay
      wgt_word_t d  [c];
      logic      dv [c];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < c; i++) begin
            d[i]  <= '0;
            dv[i] <= 1'b0;
          end
        end else begin
          d[0]  <= wgt_i[c];
          dv[0] <= wgt_vld_i;
          for (int i = 1; i < c; i++) begin
            d[i]  <= d[i-1];
            dv[i] <= dv[i-1];
          end
        end
      end
      assign wgt_col_o[c] = d[c-1];
      assign wgt_vld_o[c] = dv[c-1];
    end
  end

endmodule
