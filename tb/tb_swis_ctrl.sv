// tb_swis_ctrl: runs tiles with every n_pairs value (1..4) and both modes
// and checks, cycle by cycle, the accumulator clear, the weight read every
// step, the activation read only on the first shift cycle of a group, the
// read addresses, the drain gap, the output writes and the start-to-done
// latency of S + 2*ROWS + COLS + 3 cycles (S = k_groups * n_pairs).
module tb_swis_ctrl;
  import swis_pkg::*;

  localparam int R = ROWS, C = COLS;
  logic clk = 0, rst_n = 0, start = 0;
  swis_mode_e mode_i = MODE_SWIS, mode_o;
  logic [2:0]  n_pairs = 3'd1;
  logic [15:0] k_groups = 16'd1;
  logic [10:0] act_base = '0, act_rd_addr;
  logic [11:0] wgt_base = '0, wgt_rd_addr;
  logic [9:0]  out_base = '0, out_wr_addr;
  logic busy, done, acc_clr, act_rd_en, wgt_rd_en, first_o, out_wr_en;
  logic [$clog2(R)-1:0] out_row;
  int checks = 0, failures = 0;

  swis_ctrl dut (.*);
  always #5 clk = ~clk;

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic run(int np, int kg, swis_mode_e md);
    int S, lat;
    int ab, wb, ob;
    S  = np * kg;
    ab = $urandom % 2048; wb = $urandom % 4096; ob = $urandom % 1024;
    start <= 1; n_pairs <= 3'(np); k_groups <= 16'(kg); mode_i <= md;
    act_base <= 11'(ab); wgt_base <= 12'(wb); out_base <= 10'(ob);
    @(posedge clk);
    start <= 0; mode_i <= swis_mode_e'(~md);  // descriptor must be latched
    #1;
    // ts+1: clear
    chk(acc_clr && busy && !wgt_rd_en && !act_rd_en && !out_wr_en, "clear cycle");
    chk(mode_o == md, "mode latched");
    @(posedge clk); #1;
    for (int s = 0; s < S; s++) begin
      chk(!acc_clr && wgt_rd_en && wgt_rd_addr == 12'(wb + s), $sformatf("weight read step %0d", s));
      chk(act_rd_en == (s % np == 0), $sformatf("act read enable step %0d", s));
      chk(first_o == (s % np == 0), "first flag");
      if (s % np == 0) chk(act_rd_addr == 11'(ab + s / np), "act address");
      @(posedge clk); #1;
    end
    for (int d = 0; d < R + C + 1; d++) begin
      chk(!wgt_rd_en && !act_rd_en && !out_wr_en && !done, "drain idle");
      @(posedge clk); #1;
    end
    for (int r = 0; r < R; r++) begin
      chk(out_wr_en && out_wr_addr == 10'(ob + r) && out_row == r, "output write");
      @(posedge clk); #1;
    end
    chk(done && !out_wr_en, "done pulse");
    lat = S + 2 * R + C + 3;
    @(posedge clk); #1;
    chk(!busy && !done, $sformatf("idle after %0d cycles", lat));
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    chk(!busy && !done, "idle after reset");
    for (int np = 1; np <= MAX_PAIRS; np++) begin
      run(np, 1, MODE_SWIS);
      run(np, 1 + $urandom % 30, MODE_SWIS_C);
      run(np, 1 + $urandom % 30, MODE_SWIS);
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
