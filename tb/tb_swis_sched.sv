// tb_swis_sched: a whole filter dimension of a ResNet-18 conv2_x layer
// (3x3x64 -> 64 filters, 144 groups of 4) for 8 output pixels, with filter
// scheduling to an average of 3 shifts on the double-shift array.
//
// Every filter is quantized with 2 and with 4 shifts (SWIS shift selection,
// tb_swis_quant_pkg). Scheduling as in the SWIS method: all filters start at
// 4 shifts, the filters whose error grows least when dropped to 2 shifts are
// moved down until the layer averages 3 shifts, and the filters are ordered
// by shift count so that each 8-filter tile (filters processed together)
// has a single count. The 8 tiles then run with n_pairs = 1 or 2. The test
// checks every output against the dot product with the assigned quantized
// weights and checks that the layer takes exactly the sum of the tiles'
// S + 27 cycles, i.e. 3/4 of the compute cycles of running all filters at 4
// shifts. It prints the weight error of the schedule next to uniform 2, 3
// and 4 shifts (3 shifts costs as many cycles as 4 on this array).
module tb_swis_sched;
  import swis_pkg::*;
  import tb_swis_pkg::*;
  import tb_swis_quant_pkg::*;

  localparam int R = ROWS, C = COLS, KG = 144, NF = 64;

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

  int checks = 0, failures = 0;

  act_vec_t  A   [R][KG];
  wgt_word_t w2  [NF][KG];
  wgt_word_t w4  [NF][KG][2];
  int        q2  [NF][KG][GROUP];
  int        q4  [NF][KG][GROUP];
  longint    e2 [NF], e3 [NF], e4 [NF];
  int        order [NF];
  int        nsh   [NF];

  initial begin
    longint err_sched, err2, err3, err4;
    int total, compute, compute4;
    for (int r = 0; r < R; r++) act_wr_data[r] = '0;
    for (int c = 0; c < C; c++) wgt_wr_data[c] = '0;
    // weights and their quantizations
    for (int f = 0; f < NF; f++) begin
      e2[f] = 0; e3[f] = 0; e4[f] = 0;
      for (int k = 0; k < KG; k++) begin
        int w [GROUP];
        int q [GROUP];
        wgt_word_t ww [MAX_PAIRS];
        for (int i = 0; i < GROUP; i++) w[i] = rand_weight();
        quantize(w, 2, 1, 1'b0, ww, q, e2[f]);
        w2[f][k] = ww[0];
        for (int i = 0; i < GROUP; i++) q2[f][k][i] = q[i];
        quantize(w, 3, 2, 1'b0, ww, q, e3[f]);
        quantize(w, 4, 2, 1'b0, ww, q, e4[f]);
        w4[f][k][0] = ww[0]; w4[f][k][1] = ww[1];
        for (int i = 0; i < GROUP; i++) q4[f][k][i] = q[i];
      end
    end
    // scheduling: sort by the cost of dropping from 4 to 2 shifts
    for (int f = 0; f < NF; f++) order[f] = f;
    for (int i = 0; i < NF; i++)
      for (int j = 0; j < NF - 1 - i; j++)
        if (e2[order[j]] - e4[order[j]] > e2[order[j+1]] - e4[order[j+1]]) begin
          int t;
          t = order[j]; order[j] = order[j+1]; order[j+1] = t;
        end
    for (int j = 0; j < NF; j++) nsh[order[j]] = (j < NF / 2) ? 2 : 4;
    err_sched = 0; err2 = 0; err3 = 0; err4 = 0;
    for (int f = 0; f < NF; f++) begin
      err_sched += (nsh[f] == 2) ? e2[f] : e4[f];
      err2 += e2[f]; err3 += e3[f]; err4 += e4[f];
    end

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // activations once for the whole layer slice
    for (int k = 0; k < KG; k++) begin
      act_wr_en <= 1; act_wr_addr <= 11'(k);
      for (int r = 0; r < R; r++) begin
        A[r][k] = rand_act();
        act_wr_data[r] <= A[r][k];
      end
      @(posedge clk);
    end
    act_wr_en <= 0;

    total = 0; compute = 0; compute4 = 0;
    for (int t = 0; t < NF / C; t++) begin
      int np, cyc;
      np = nsh[order[t * C]] / 2;
      for (int c = 0; c < C; c++)
        if (nsh[order[t * C + c]] != 2 * np) begin
          failures++; $display("FAIL tile %0d mixes shift counts", t);
        end
      for (int k = 0; k < KG; k++)
        for (int p = 0; p < np; p++) begin
          wgt_wr_en <= 1; wgt_wr_addr <= 12'(k * np + p);
          for (int c = 0; c < C; c++)
            wgt_wr_data[c] <= (np == 1) ? w2[order[t * C + c]][k] : w4[order[t * C + c]][k][p];
          @(posedge clk);
        end
      wgt_wr_en <= 0;
      start <= 1; n_pairs <= 3'(np); k_groups <= 16'(KG);
      act_base <= '0; wgt_base <= '0; out_base <= 10'(8 * t);
      @(posedge clk);
      start <= 0;
      cyc = 0;
      do begin @(posedge clk); cyc++; end while (!done && cyc < 100000);
      total += cyc;
      compute += KG * np;
      compute4 += KG * 2;
      checks++;
      if (cyc != KG * np + 27) begin failures++; $display("FAIL tile %0d took %0d cycles", t, cyc); end
    end
    // read back all 64 outputs of each pixel
    for (int t = 0; t < NF / C; t++)
      for (int r = 0; r < R; r++) begin
        out_rd_en <= 1; out_rd_addr <= 10'(8 * t + r);
        @(posedge clk);
        out_rd_en <= 0;
        #1;
        for (int c = 0; c < C; c++) begin
          longint e;
          int f;
          f = order[t * C + c];
          e = 0;
          for (int k = 0; k < KG; k++)
            for (int i = 0; i < GROUP; i++)
              e += longint'(A[r][k][i]) * ((nsh[f] == 2) ? q2[f][k][i] : q4[f][k][i]);
          checks++;
          if (out_rd_data[c] != wrap(e)) begin
            failures++;
            if (failures < 10) $display("FAIL pixel %0d filter %0d", r, f);
          end
        end
      end
    checks++;
    if (4 * compute != 3 * compute4) begin failures++; $display("FAIL compute cycles %0d vs %0d", compute, compute4); end
    $display("scheduled layer: %0d cycles (%0d compute; %0d at 4 shifts everywhere)", total, compute, compute4);
    $display("weight RMSE (LSB): uniform 2 shifts %0.3f, scheduled avg 3 %0.3f, uniform 3 %0.3f, uniform 4 %0.3f",
             $sqrt(real'(err2) / (NF * KG * GROUP)), $sqrt(real'(err_sched) / (NF * KG * GROUP)),
             $sqrt(real'(err3) / (NF * KG * GROUP)), $sqrt(real'(err4) / (NF * KG * GROUP)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
