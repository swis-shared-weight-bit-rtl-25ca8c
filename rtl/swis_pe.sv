// swis_pe: SWIS processing element of the output-stationary systolic array.
//
// Each cycle the PE latches an activation vector from its left neighbour into
// its activation buffer and a double-shift weight word (signs, two masks, two
// shifts) from its upper neighbour into its sign, mask and shift buffers.
// The buffered values are passed on to the right and downward neighbours on
// the next cycle, and, when both are valid, the swis_mac product of the
// buffered pair is added to the accumulator. The buffers, the MAC and the
// accumulator follow the paper's PE drawing; valid bits travelling with the
// data, the synchronous clear and the reset are this design's choices.
//
// Timing: data presented at the inputs in cycle t is in the buffers (and on
// the forwarding outputs) in cycle t+1 and in the accumulator in cycle t+2.
// acc_clr zeroes the accumulator and has priority over an accumulation.
// The accumulator is ACC_W bits wide (16 + log2(group size), as printed in
// the paper's figure) and wraps in two's complement; the product's top bit
// therefore never reaches it, which lint reports as an unused bit.
module swis_pe
  import swis_pkg::*;
#(
  parameter int unsigned ACC_BITS = ACC_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        acc_clr,
  input  act_vec_t                    act_i,
  input  logic                        act_vld_i,
  input  wgt_word_t                   wgt_i,
  input  logic                        wgt_vld_i,
  output act_vec_t                    act_o,
  output logic                        act_vld_o,
  output wgt_word_t                   wgt_o,
  output logic                        wgt_vld_o,
  output logic signed [ACC_BITS-1:0]  acc_o
);

  act_vec_t  act_buf;
  wgt_word_t wgt_buf;
  logic      act_vld, wgt_vld;

  localparam int unsigned PROD_W = ACT_W + 1 + $clog2(GROUP) + (1 << SHIFT_W);
  logic signed [PROD_W-1:0] prod;

  swis_mac u_mac (
    .act  (act_buf),
    .wgt  (wgt_buf),
    .prod (prod)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_buf <= '0;
      wgt_buf <= '0;
      act_vld <= 1'b0;
      wgt_vld <= 1'b0;
      acc_o   <= '0;
    end else begin
      act_buf <= act_i;
      act_vld <= act_vld_i;
      wgt_buf <= wgt_i;
      wgt_vld <= wgt_vld_i;
      if (acc_clr)                acc_o <= '0;
      else if (act_vld && wgt_vld) acc_o <= acc_o + ACC_BITS'(prod);
    end
  end

  assign act_o     = act_buf;
  assign act_vld_o = act_vld;
  assign wgt_o     = wgt_buf;
  assign wgt_vld_o = wgt_vld;

endmodule
