// tb_swis_layers: runs slices of convolution layers from the three networks
// the accelerator was evaluated on, at the default hardware size, with
// weights quantized by SWIS shift selection.
//
// Weights are random signed 8-bit values with a bell-shaped distribution
// (sum of four uniforms), activations random unsigned 8-bit values. Every
// group of 4 weights of a filter is quantized as the offline SWIS tools do:
// all sets of `shifts` bit positions out of 8 are tried, each weight takes
// the nearest magnitude representable with that set, and the set with the
// lowest MSE++ (squared error plus alpha = 1 times the squared signed error)
// wins. The quantized words are loaded, the tile is run, and the outputs are
// compared with the dot products of the quantized weights (modulo 2^ACC_W).
// The quantization error against the unquantized weights is printed.
//
// Layers (reduction length = in_channels * kernel^2, groups of 4):
//   ResNet-18 conv2_x 3x3, 64 -> 64:  K = 144 groups, 4 shifts (2 pairs)
//   VGG-16 3x3, 512 -> 512:            K = 1152 groups, 3 shifts (2 pairs, odd)
//   MobileNet-v2 1x1, 96 -> 24:        K = 24 groups, 5 shifts (3 pairs, odd)
// Each runs one 8x8 tile (8 output pixels x 8 filters) in SWIS mode and the
// ResNet slice also in SWIS-C mode (consecutive shifts, one offset per group).
module tb_swis_layers;
  import swis_pkg::*;
  import tb_swis_pkg::*;
  import tb_swis_quant_pkg::*;

  localparam int R = ROWS, C = COLS;
  localparam int KMAX = 1152;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  swis_mode_e mode = MODE_SWIS;
  logic [2:0]  n_pairs = 3'd1;
  logic [15:0] k_groups = 16'd1;
  logic [10:0] act_base = '0, act_wr_addr = '0;
  logic [11:0] wgt_base = '0, wgt_wr_addr = '0;
  logic [9:0]  out_base = '0, out_rd_addr = '0;
  logic act_wr_en = 0, wgt_wr_en = 0, out_rd_en = 0;
  act_vec_t  act_wr_data [R];
  wgt_word_t wgt_wr_data [C];
  logic signed [ACC_W-1:0] out_rd_data [C];

  swis_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, tiles = 0;

  act_vec_t A [R][KMAX];
  int       wq [C][KMAX][GROUP];    // quantized weight values

  task automatic run_layer(string name, int kg, int shifts, logic consec);
    int np, t0, lat, over;
    longint sq_err;
    np = (shifts + 1) / 2;
    sq_err = 0; over = 0;
    for (int k = 0; k < kg; k++) begin
      act_wr_en <= 1; act_wr_addr <= 11'(k);
      for (int r = 0; r < R; r++) begin
        A[r][k] = rand_act();
        act_wr_data[r] <= A[r][k];
      end
      @(posedge clk);
    end
    act_wr_en <= 0;
    for (int k = 0; k < kg; k++) begin
      wgt_word_t ww [C][MAX_PAIRS];
      for (int c = 0; c < C; c++) begin
        int w [GROUP];
        int q [GROUP];
        wgt_word_t w4 [MAX_PAIRS];
        for (int i = 0; i < GROUP; i++) w[i] = rand_weight();
        quantize(w, shifts, np, consec, w4, q, sq_err);
        for (int p = 0; p < np; p++) ww[c][p] = w4[p];
        for (int i = 0; i < GROUP; i++) wq[c][k][i] = q[i];
      end
      for (int p = 0; p < np; p++) begin
        wgt_wr_en <= 1; wgt_wr_addr <= 12'(k * np + p);
        for (int c = 0; c < C; c++) wgt_wr_data[c] <= ww[c][p];
        @(posedge clk);
      end
    end
    wgt_wr_en <= 0;
    start <= 1; mode <= consec ? MODE_SWIS_C : MODE_SWIS; n_pairs <= 3'(np);
    k_groups <= 16'(kg); act_base <= '0; wgt_base <= '0; out_base <= '0;
    @(posedge clk);
    start <= 0;
    t0 = 0;
    do begin @(posedge clk); t0++; end while (!done && t0 < 100000);
    lat = kg * np + 2 * R + C + 3;
    checks++;
    if (t0 != lat) begin failures++; $display("FAIL %s latency %0d, expected %0d", name, t0, lat); end
    for (int r = 0; r < R; r++) begin
      out_rd_en <= 1; out_rd_addr <= 10'(r);
      @(posedge clk);
      out_rd_en <= 0;
      #1;
      for (int c = 0; c < C; c++) begin
        longint e;
        e = 0;
        for (int k = 0; k < kg; k++)
          for (int i = 0; i < GROUP; i++) e += longint'(A[r][k][i]) * wq[c][k][i];
        if (e >= (longint'(1) << (ACC_W - 1)) || e < -(longint'(1) << (ACC_W - 1))) over++;
        checks++;
        if (out_rd_data[c] != wrap(e)) begin
          failures++;
          if (failures < 10) $display("FAIL %s pixel %0d filter %0d", name, r, c);
        end
      end
    end
    tiles++;
    $display("%s: %0d groups, %0d shifts (%0d cycles/group), %0d cycles, weight RMSE %0.2f LSB, %0d of %0d outputs beyond the %0d-bit accumulator range",
             name, kg, shifts, np, t0, $sqrt(real'(sq_err) / (kg * C * GROUP)), over, R * C, ACC_W);
  endtask

  initial begin
    for (int r = 0; r < R; r++) act_wr_data[r] = '0;
    for (int c = 0; c < C; c++) wgt_wr_data[c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run_layer("ResNet-18 conv2_x 3x3x64, SWIS",   144,  4, 1'b0);
    run_layer("ResNet-18 conv2_x 3x3x64, SWIS-C", 144,  4, 1'b1);
    run_layer("VGG-16 3x3x512, SWIS",             1152, 3, 1'b0);
    run_layer("MobileNet-v2 1x1x96, SWIS",        24,   5, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
