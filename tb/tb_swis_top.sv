// tb_swis_top: end-to-end test of the accelerator at its default size
// (8x8 array, group 4, 64 KB / 64 KB / 16 KB memories).
//
// It runs a small convolution-like layer of 16 output pixels x 16 filters
// as four 8x8 tiles through the host ports: activations and weights are
// written into the memories, each tile is started, and the output words are
// read back and compared with a reference computed from the weight values
// (tb_swis_pkg). The two filter groups use different shift counts - 2 shifts
// (one pair per cycle) for filters 0..7 and 4 shifts for filters 8..15, an
// effective 3 shifts per layer as in the paper's filter scheduling - and the
// layer is run once in SWIS mode and once in SWIS-C mode. Further tiles
// cover 3 pairs, an odd shift count (6 stored shifts + 1 unused lane = 5 shifts),
// and addresses at the top of each memory.
// It counts every mechanism: both modes, every n_pairs value, activation
// reuse across shift cycles, an odd shift count, and checks the activation
// and weight read counts and the start-to-done latency of each tile.
module tb_swis_top;
  import swis_pkg::*;
  import tb_swis_pkg::*;

  localparam int R = ROWS, C = COLS;
  localparam int ACT_DEPTH = (65536 * 8) / (R * GROUP * ACT_W);
  localparam int WGT_DEPTH = (65536 * 8) / (C * WGT_WORD_W);
  localparam int OUT_DEPTH = (16384 * 8) / (C * ACC_W);

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  swis_mode_e mode = MODE_SWIS;
  logic [2:0]  n_pairs = 3'd1;
  logic [15:0] k_groups = 16'd1;
  logic [$clog2(ACT_DEPTH)-1:0] act_base = '0, act_wr_addr = '0;
  logic [$clog2(WGT_DEPTH)-1:0] wgt_base = '0, wgt_wr_addr = '0;
  logic [$clog2(OUT_DEPTH)-1:0] out_base = '0, out_rd_addr = '0;
  logic act_wr_en = 0, wgt_wr_en = 0, out_rd_en = 0;
  act_vec_t  act_wr_data [R];
  wgt_word_t wgt_wr_data [C];
  logic signed [ACC_W-1:0] out_rd_data [C];

  swis_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_swis = 0, n_swis_c = 0, n_odd = 0, n_reuse = 0;
  int n_pairs_seen [MAX_PAIRS + 1];
  int act_reads = 0, wgt_reads = 0;

  always @(posedge clk) begin
    if (dut.act_rd_en) act_reads++;
    if (dut.wgt_rd_en) wgt_reads++;
    if (dut.wgt_rd_en && !dut.act_rd_en) n_reuse++;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // Layer data: activations A[pixel][group], weights per filter/group as a
  // list of shift positions and per-weight masks.
  localparam int PIX = 16, FIL = 16, KG = 24;
  act_vec_t A [PIX][KG];
  int       nsh  [FIL];           // number of shifts of each filter
  int       wval [FIL][KG][GROUP];

  // Builds the weight words of one filter/group for np pairs and returns the
  // weight values they encode. SWIS: any distinct shifts; SWIS-C: consecutive
  // shifts from one offset stored in the first word only.
  function automatic void encode(swis_mode_e md, int np, int shifts, output wgt_word_t ww [MAX_PAIRS],
                                 output int val [GROUP]);
    int pos [2*MAX_PAIRS];
    int off;
    logic [GROUP-1:0] sign;
    sign = GROUP'($urandom);
    off  = $urandom % (9 - shifts);
    for (int j = 0; j < 2 * np; j++) pos[j] = (md == MODE_SWIS_C) ? off + j : $urandom % 8;
    for (int i = 0; i < GROUP; i++) val[i] = 0;
    for (int p = 0; p < np; p++) begin
      ww[p] = rand_wgt();
      ww[p].sign = sign;
      if (2 * p + 1 >= shifts) ww[p].mask1 = '0;  // unused second lane
      if (md == MODE_SWIS) begin
        ww[p].s0 = 3'(pos[2*p]);
        ww[p].s1 = 3'(pos[2*p+1]);
      end else if (p == 0) begin
        ww[p].s0 = 3'(off);
      end
      for (int i = 0; i < GROUP; i++) begin
        val[i] += (ww[p].mask0[i] ? (1 << pos[2*p]) : 0) + (ww[p].mask1[i] ? (1 << pos[2*p+1]) : 0);
      end
    end
    for (int i = 0; i < GROUP; i++) if (sign[i]) val[i] = -val[i];
  endfunction

  // Runs one tile: pixels pb..pb+7, filters fb..fb+7, at the given bases.
  task automatic run_tile(swis_mode_e md, int np, int shifts, int pb, int fb,
                          int ab, int wb, int ob, int kg);
    wgt_word_t ww [C][MAX_PAIRS];
    int t0, lat, ar0, wr0;
    // activations: one word per group
    for (int k = 0; k < kg; k++) begin
      act_wr_en <= 1; act_wr_addr <= ($bits(act_wr_addr))'(ab + k);
      for (int r = 0; r < R; r++) act_wr_data[r] <= A[pb + r][k];
      @(posedge clk);
    end
    act_wr_en <= 0;
    // weights: np words per group
    for (int k = 0; k < kg; k++) begin
      for (int c = 0; c < C; c++) begin
        int v [GROUP];
        wgt_word_t w4 [MAX_PAIRS];
        encode(md, np, shifts, w4, v);
        for (int p = 0; p < np; p++) ww[c][p] = w4[p];
        for (int i = 0; i < GROUP; i++) wval[fb + c][k][i] = v[i];
      end
      for (int p = 0; p < np; p++) begin
        wgt_wr_en <= 1; wgt_wr_addr <= ($bits(wgt_wr_addr))'(wb + k * np + p);
        for (int c = 0; c < C; c++) wgt_wr_data[c] <= ww[c][p];
        @(posedge clk);
      end
    end
    wgt_wr_en <= 0;
    // start and time the tile
    ar0 = act_reads; wr0 = wgt_reads;
    start <= 1; mode <= md; n_pairs <= 3'(np); k_groups <= 16'(kg);
    act_base <= ($bits(act_base))'(ab); wgt_base <= ($bits(wgt_base))'(wb);
    out_base <= ($bits(out_base))'(ob);
    @(posedge clk);
    start <= 0;
    t0 = 0;
    do begin @(posedge clk); t0++; end while (!done && t0 < 100000);
    lat = kg * np + 2 * R + C + 3;
    chk(t0 == lat, $sformatf("tile latency %0d expected %0d", t0, lat));
    chk(act_reads - ar0 == kg, "one activation read per group");
    chk(wgt_reads - wr0 == kg * np, "one weight read per shift cycle");
    // read back and compare
    for (int r = 0; r < R; r++) begin
      out_rd_en <= 1; out_rd_addr <= ($bits(out_rd_addr))'(ob + r);
      @(posedge clk);
      out_rd_en <= 0;
      #1;
      for (int c = 0; c < C; c++) begin
        longint e;
        e = 0;
        for (int k = 0; k < kg; k++)
          for (int i = 0; i < GROUP; i++) e += longint'(A[pb + r][k][i]) * wval[fb + c][k][i];
        chk(out_rd_data[c] == wrap(e),
            $sformatf("mode %0d np %0d out pixel %0d filter %0d: got %0d exp %0d",
                      md, np, pb + r, fb + c, out_rd_data[c], wrap(e)));
      end
    end
    if (md == MODE_SWIS) n_swis++; else n_swis_c++;
    n_pairs_seen[np]++;
    if (shifts % 2 == 1) n_odd++;
  endtask

  initial begin
    for (int r = 0; r < R; r++) act_wr_data[r] = '0;
    for (int c = 0; c < C; c++) wgt_wr_data[c] = '0;
    for (int j = 0; j <= MAX_PAIRS; j++) n_pairs_seen[j] = 0;
    for (int p = 0; p < PIX; p++)
      for (int k = 0; k < KG; k++) A[p][k] = rand_act();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // scheduled layer: filters 0..7 with 2 shifts, 8..15 with 4 shifts
    for (int m = 0; m < 2; m++) begin
      swis_mode_e md;
      md = (m == 0) ? MODE_SWIS : MODE_SWIS_C;
      for (int fg = 0; fg < 2; fg++)
        for (int pg = 0; pg < 2; pg++)
          run_tile(md, fg + 1, 2 * (fg + 1), 8 * pg, 8 * fg,
                   100 * pg, 200 * (2 * fg + pg), 16 * (2 * fg + pg), KG);
    end
    // 3 pairs, odd count (5 shifts), at the top of every memory
    run_tile(MODE_SWIS,   3, 5, 0, 0, ACT_DEPTH - KG, WGT_DEPTH - 3 * KG, OUT_DEPTH - R, KG);
    run_tile(MODE_SWIS_C, 3, 6, 8, 8, 0, 0, 0, 1);
    // odd count 7 with four pairs
    run_tile(MODE_SWIS,   4, 7, 8, 0, 500, 1000, 300, KG);
    // mechanism coverage
    chk(n_swis > 0, "SWIS mode used");
    chk(n_swis_c > 0, "SWIS-C mode used");
    for (int j = 1; j <= MAX_PAIRS; j++) chk(n_pairs_seen[j] > 0, $sformatf("n_pairs %0d used", j));
    chk(n_odd > 0, "odd shift count used");
    chk(n_reuse > 0, "activation reuse across shift cycles");
    $display("mechanisms: swis=%0d swis_c=%0d pairs1..4=%0d/%0d/%0d/%0d odd=%0d act_reuse_cycles=%0d",
             n_swis, n_swis_c, n_pairs_seen[1], n_pairs_seen[2], n_pairs_seen[3], n_pairs_seen[4],
             n_odd, n_reuse);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
