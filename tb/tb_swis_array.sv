// tb_swis_array: feeds the 8x8 array with skewed random activation and
// weight streams (row r and column c delayed by r and c cycles, as the
// feeder does) for K steps and checks every PE's accumulator against the
// reference dot product of its row's activations and its column's weights.
// Also checks the accumulator clear and that results are complete exactly
// K + NROWS + NCOLS - 1 clock edges after the first step enters.
module tb_swis_array;
  import swis_pkg::*;
  import tb_swis_pkg::*;

  localparam int R = ROWS, C = COLS, K = 40;
  logic clk = 0, rst_n = 0, acc_clr = 0;
  act_vec_t  act_row_i [R];
  logic      act_vld_i [R];
  wgt_word_t wgt_col_i [C];
  logic      wgt_vld_i [C];
  logic signed [ACC_W-1:0] acc_o [R][C];
  int checks = 0, failures = 0;

  swis_array dut (.*);
  always #5 clk = ~clk;

  act_vec_t  A [K][R];
  wgt_word_t W [K][C];
  longint    expv [R][C];

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic run_tile(int shift_cycle_limit);
    for (int k = 0; k < K; k++) begin
      for (int r = 0; r < R; r++) A[k][r] = rand_act();
      for (int c = 0; c < C; c++) W[k][c] = rand_wgt();
    end
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        expv[r][c] = 0;
        for (int k = 0; k < K; k++) expv[r][c] += ref_dot(A[k][r], W[k][c]);
      end
    acc_clr <= 1;
    @(posedge clk);
    acc_clr <= 0;
    // cycle t drives step t-r on row r and step t-c on column c
    for (int t = 0; t < shift_cycle_limit; t++) begin
      for (int r = 0; r < R; r++) begin
        act_vld_i[r] <= (t - r >= 0) && (t - r < K);
        act_row_i[r] <= (t - r >= 0 && t - r < K) ? A[t-r][r] : rand_act();
      end
      for (int c = 0; c < C; c++) begin
        wgt_vld_i[c] <= (t - c >= 0) && (t - c < K);
        wgt_col_i[c] <= (t - c >= 0 && t - c < K) ? W[t-c][c] : rand_wgt();
      end
      @(posedge clk);
    end
  endtask

  initial begin
    for (int r = 0; r < R; r++) begin act_vld_i[r] = 0; act_row_i[r] = '0; end
    for (int c = 0; c < C; c++) begin wgt_vld_i[c] = 0; wgt_col_i[c] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int tile = 0; tile < 3; tile++) begin
      // the last step enters row R-1 in cycle K+R-2 and needs C hops plus
      // the accumulation, so all PEs are complete after K+R+C-1 edges
      run_tile(K + R + C - 1);
      #1;
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++)
          chk(acc_o[r][c] == wrap(expv[r][c]), $sformatf("tile %0d PE(%0d,%0d)", tile, r, c));
    end
    // one cycle earlier the last PE must not yet be complete (latency check)
    run_tile(K + R + C - 2);
    #1;
    chk(acc_o[R-1][C-1] != wrap(expv[R-1][C-1]) || expv[R-1][C-1] == 0, "latency of last PE");
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++)
        if (r + c < R + C - 2)
          chk(acc_o[r][c] == wrap(expv[r][c]), "earlier PEs complete");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
