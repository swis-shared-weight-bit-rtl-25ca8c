// swis_mac: N-wide double-shift bit-serial MAC (combinational).
//
// For one group of GROUP unsigned activations and one double-shift weight
// word it computes
//     prod = (sum_i sign_i * (a_i & m0_i)) << s0  +  (sum_i sign_i * (a_i & m1_i)) << s1
// which is two terms of the shared-weight-bit-sparsity dot product: the
// activations are sign-inverted once (shared by both shifts), masked by the
// two mask vectors, summed by two adder trees, shifted by the two 3-bit shift
// values and added. The structure (shared sign inversion, two mask stages,
// two adder trees, two barrel shifters, one final adder) follows the paper's
// PE drawing. The paper's drawing labels the tree output 8+log2(N) bits and
// the shifter output 16+log2(N) bits; here the tree output and product keep
// one more bit so that a negated sum and the sum of both shifted terms are
// exact for every 8-bit input (a design choice, it changes no in-range value).
//
// Interface: act (GROUP x 8 bit, unsigned), wgt (swis_pkg::wgt_word_t),
// prod (signed, PROD_W bits). Purely combinational, no clock.
module swis_mac
  import swis_pkg::*;
#(
  parameter int unsigned TREE_W = ACT_W + 1 + $clog2(GROUP),       // signed tree sum
  parameter int unsigned PROD_W = TREE_W + (1 << SHIFT_W) - 1 + 1  // signed product
) (
  input  act_vec_t                  act,
  input  wgt_word_t                 wgt,
  output logic signed [PROD_W-1:0]  prod
);

  // Sign inversion: shared by both shift lanes.
  logic signed [ACT_W:0] inv [GROUP];
  always_comb begin
    for (int i = 0; i < GROUP; i++) begin
      inv[i] = wgt.sign[i] ? -$signed({1'b0, act[i]}) : $signed({1'b0, act[i]});
    end
  end

  // Mask stages and adder trees, one per shift of the pair.
  logic signed [TREE_W-1:0] sum0, sum1;
  always_comb begin
    sum0 = '0;
    sum1 = '0;
    for (int i = 0; i < GROUP; i++) begin
      if (wgt.mask0[i]) sum0 = sum0 + TREE_W'(inv[i]);
      if (wgt.mask1[i]) sum1 = sum1 + TREE_W'(inv[i]);
    end
  end

  // Barrel shifters and final adder.
  logic signed [PROD_W-1:0] sh0, sh1;
  always_comb begin
    sh0  = PROD_W'(sum0) <<< wgt.s0;
    sh1  = PROD_W'(sum1) <<< wgt.s1;
    prod = sh0 + sh1;
  end

endmodule
