// tb_swis_feeder: streams groups of 1..4 shift cycles through the feeder,
// presenting a fresh activation word only on each group's first cycle (and
// garbage on the others, as a memory that is not read would), and checks
// that row r repeats the group's activations and column c carries the
// weight words, with the r- and c-cycle skews and the valid flags, every
// cycle.
module tb_swis_feeder;
  import swis_pkg::*;
  import tb_swis_pkg::*;

  localparam int R = ROWS, C = COLS, STEPS = 300;
  logic clk = 0, rst_n = 0;
  logic act_vld_i = 0, new_i = 0, wgt_vld_i = 0;
  act_vec_t  act_rd_i [R], act_row_o [R];
  logic      act_vld_o [R];
  wgt_word_t wgt_i [C], wgt_col_o [C];
  logic      wgt_vld_o [C];
  int checks = 0, failures = 0, cyc = 0, repeats = 0;

  swis_feeder dut (.*);
  always #5 clk = ~clk;

  act_vec_t  A  [STEPS][R];   // activation word per step (held per group)
  logic      F  [STEPS];      // first step of its group
  wgt_word_t W  [STEPS][C];

  localparam int T0 = 5;      // issue cycle of step 0

  initial begin
    int p, np;
    p = 0; np = 1;
    for (int s = 0; s < STEPS; s++) begin
      if (p == 0) begin
        np = 1 + ($urandom % MAX_PAIRS);
        for (int r = 0; r < R; r++) A[s][r] = rand_act();
      end else begin
        for (int r = 0; r < R; r++) A[s][r] = A[s-1][r];
        repeats++;
      end
      F[s] = (p == 0);
      for (int c = 0; c < C; c++) W[s][c] = rand_wgt();
      p = (p + 1 == np) ? 0 : p + 1;
    end
  end

  // drive: memory data in cycle issue+1, shift generator output in issue+2
  always @(posedge clk) begin
    int s1, s2;
    cyc <= cyc + 1;
    s1 = cyc + 1 - T0 - 1;
    s2 = cyc + 1 - T0 - 2;
    act_vld_i <= (s1 >= 0 && s1 < STEPS);
    new_i     <= (s1 >= 0 && s1 < STEPS) ? F[s1] : 1'($urandom);
    for (int r = 0; r < R; r++)
      act_rd_i[r] <= (s1 >= 0 && s1 < STEPS && F[s1]) ? A[s1][r] : rand_act();
    wgt_vld_i <= (s2 >= 0 && s2 < STEPS);
    for (int c = 0; c < C; c++)
      wgt_i[c] <= (s2 >= 0 && s2 < STEPS) ? W[s2][c] : rand_wgt();
  end

  // check: row r carries step cyc-T0-2-r, column c step cyc-T0-2-c
  always @(negedge clk) if (rst_n) begin
    for (int r = 0; r < R; r++) begin
      int s;
      s = cyc - T0 - 2 - r;
      checks++;
      if (act_vld_o[r] != (s >= 0 && s < STEPS) || (s >= 0 && s < STEPS && act_row_o[r] != A[s][r])) begin
        failures++;
        if (failures < 10) $display("FAIL row %0d cycle %0d", r, cyc);
      end
    end
    for (int c = 0; c < C; c++) begin
      int s;
      s = cyc - T0 - 2 - c;
      checks++;
      if (wgt_vld_o[c] != (s >= 0 && s < STEPS) || (s >= 0 && s < STEPS && wgt_col_o[c] != W[s][c])) begin
        failures++;
        if (failures < 10) $display("FAIL col %0d cycle %0d", c, cyc);
      end
    end
  end

  initial begin
    for (int r = 0; r < R; r++) act_rd_i[r] = '0;
    for (int c = 0; c < C; c++) wgt_i[c] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    repeat (T0 + STEPS + R + C + 5) @(posedge clk);
    if (repeats == 0) failures++;
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
