// tb_swis_pe: drives one PE with a random stream (valids toggling, clears in
// between) and checks the one-cycle forwarding of activations and weights
// and the accumulator against a reference sum modulo 2^ACC_W.
module tb_swis_pe;
  import swis_pkg::*;
  import tb_swis_pkg::*;

  logic clk = 0, rst_n = 0, acc_clr = 0;
  act_vec_t  act_i, act_o;
  wgt_word_t wgt_i, wgt_o;
  logic      act_vld_i = 0, wgt_vld_i = 0, act_vld_o, wgt_vld_o;
  logic signed [ACC_W-1:0] acc_o;
  int checks = 0, failures = 0, cycles = 0;

  swis_pe dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at cycle %0d", what, cycles);
    end
  endtask

  longint   ref_acc, pend_acc;
  act_vec_t a_prev;
  wgt_word_t w_prev;
  logic     av_prev, wv_prev;

  initial begin
    act_i = '0; wgt_i = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    chk(acc_o == '0, "reset value");
    ref_acc = 0;
    a_prev = '0; w_prev = '0; av_prev = 0; wv_prev = 0;
    for (int n = 0; n < 3000; n++) begin
      // new inputs
      act_i     <= rand_act();
      wgt_i     <= rand_wgt();
      act_vld_i <= ($urandom % 8) != 0;
      wgt_vld_i <= ($urandom % 8) != 0;
      acc_clr   <= ($urandom % 200) == 0;
      @(posedge clk);
      #1;
      // forwarded values are last cycle's inputs
      chk(act_o == act_i && wgt_o == wgt_i && act_vld_o == act_vld_i && wgt_vld_o == wgt_vld_i,
          "forwarding");
      // accumulator reflects the buffers of the previous cycle
      if (acc_clr) ref_acc = 0;
      else if (av_prev && wv_prev) ref_acc += ref_dot(a_prev, w_prev);
      chk(acc_o == wrap(ref_acc), "accumulator");
      a_prev = act_i; w_prev = wgt_i; av_prev = act_vld_i; wv_prev = wgt_vld_i;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
