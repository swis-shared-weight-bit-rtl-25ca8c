// tb_swis_mac: checks the double-shift MAC against the weight-value
// reference (tb_swis_pkg::ref_dot) for corner cases and random vectors.
module tb_swis_mac;
  import swis_pkg::*;
  import tb_swis_pkg::*;

  act_vec_t  act;
  wgt_word_t wgt;
  logic signed [ACT_W + 1 + $clog2(GROUP) + (1 << SHIFT_W) - 1:0] prod;
  int checks = 0, failures = 0;

  swis_mac dut (.act, .wgt, .prod);

  task automatic check_one();
    int exp;
    #1;
    exp = ref_dot(act, wgt);
    checks++;
    if (int'(prod) != exp) begin
      failures++;
      if (failures < 10)
        $display("MISMATCH act=%h wgt=%h prod=%0d exp=%0d", act, wgt, prod, exp);
    end
  endtask

  initial begin
    // all-max activations, all weights +(128+64)
    for (int i = 0; i < GROUP; i++) act[i] = 8'hFF;
    wgt = '{sign: '0, mask0: '1, mask1: '1, s0: 3'd7, s1: 3'd6};
    check_one();
    // same, all negative
    wgt.sign = '1;
    check_one();
    // zero masks give zero
    wgt.mask0 = '0; wgt.mask1 = '0;
    check_one();
    // single weight, single shift
    wgt = '{sign: 4'b0100, mask0: 4'b0100, mask1: 4'b0000, s0: 3'd3, s1: 3'd0};
    act = '{8'd1, 8'd2, 8'd3, 8'd4};
    check_one();
    // value 129 = 2^7 + 2^0 as one pair
    wgt = '{sign: 4'b0000, mask0: 4'b0001, mask1: 4'b0001, s0: 3'd7, s1: 3'd0};
    check_one();
    for (int n = 0; n < 5000; n++) begin
      act = rand_act();
      wgt = rand_wgt();
      check_one();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
