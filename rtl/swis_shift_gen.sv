// swis_shift_gen: shift-value generator between the weight memory and the
// array, one lane per array column, one register stage.
//
// In SWIS mode every weight word carries its own pair of shift values and is
// passed through unchanged. In SWIS-C mode a group's shifts are consecutive,
// so only one offset per group is stored; it sits in the s0 field of the
// group's first weight word (first_i = 1). The generator latches that offset
// once and produces the pairs (off, off+1), (off+2, off+3), ... for the
// group's successive shift cycles, incrementing outside the array as the
// paper proposes. The s0/s1 fields of the later words are ignored in that
// mode. Shift values are 3 bits and wrap; the offline quantizer keeps
// offset + shifts - 1 <= 7.
//
// Timing: inputs in cycle t appear at the outputs in cycle t+1.
module swis_shift_gen
  import swis_pkg::*;
#(
  parameter int unsigned NCOLS = COLS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  swis_mode_e  mode,
  input  logic        vld_i,
  input  logic        first_i,
  input  wgt_word_t   wgt_i [NCOLS],
  output logic        vld_o,
  output wgt_word_t   wgt_o [NCOLS]
);

  logic [SHIFT_W-1:0] next_off [NCOLS];  // offset for the next shift pair

  for (genvar c = 0; c < NCOLS; c++) begin : g_lane
    logic [SHIFT_W-1:0] base;
    always_comb base = first_i ? wgt_i[c].s0 : next_off[c];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        wgt_o[c]    <= '0;
        next_off[c] <= '0;
      end else if (vld_i) begin
        wgt_o[c] <= wgt_i[c];
        if (mode == MODE_SWIS_C) begin
          wgt_o[c].s0 <= base;
          wgt_o[c].s1 <= base + SHIFT_W'(1);
          next_off[c] <= base + SHIFT_W'(2);
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld_o <= 1'b0;
    else        vld_o <= vld_i;
  end

endmodule
