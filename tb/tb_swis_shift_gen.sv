// tb_swis_shift_gen: SWIS mode must pass weight words through unchanged one
// cycle later; SWIS-C mode must turn one stored offset per group into the
// consecutive pairs (off, off+1), (off+2, off+3), ... while passing signs
// and masks through.
module tb_swis_shift_gen;
  import swis_pkg::*;
  import tb_swis_pkg::*;

  localparam int C = COLS;
  logic clk = 0, rst_n = 0;
  swis_mode_e mode = MODE_SWIS;
  logic vld_i = 0, first_i = 0, vld_o;
  wgt_word_t wgt_i [C], wgt_o [C];
  int checks = 0, failures = 0;

  swis_shift_gen dut (.*);
  always #5 clk = ~clk;

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  wgt_word_t sent [C];
  int off [C];

  initial begin
    for (int c = 0; c < C; c++) wgt_i[c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // SWIS mode: pass-through
    for (int n = 0; n < 200; n++) begin
      for (int c = 0; c < C; c++) begin sent[c] = rand_wgt(); wgt_i[c] <= sent[c]; end
      vld_i <= 1; first_i <= ($urandom % 2);
      @(posedge clk); #1;
      chk(vld_o == 1, "vld");
      for (int c = 0; c < C; c++) chk(wgt_o[c] == sent[c], "SWIS pass-through");
    end
    // SWIS-C mode: groups of 1..4 pairs
    mode <= MODE_SWIS_C;
    for (int g = 0; g < 100; g++) begin
      int np;
      np = 1 + ($urandom % MAX_PAIRS);
      for (int p = 0; p < np; p++) begin
        for (int c = 0; c < C; c++) begin
          sent[c] = rand_wgt();
          if (p == 0) begin
            off[c] = $urandom % (9 - 2 * np);  // offset + 2*np - 1 <= 7
            sent[c].s0 = 3'(off[c]);
          end
          wgt_i[c] <= sent[c];
        end
        vld_i <= 1; first_i <= (p == 0);
        @(posedge clk); #1;
        for (int c = 0; c < C; c++) begin
          chk(wgt_o[c].s0 == 3'(off[c] + 2 * p) && wgt_o[c].s1 == 3'(off[c] + 2 * p + 1),
              $sformatf("SWIS-C shifts g%0d p%0d c%0d", g, p, c));
          chk(wgt_o[c].sign == sent[c].sign && wgt_o[c].mask0 == sent[c].mask0 &&
              wgt_o[c].mask1 == sent[c].mask1, "SWIS-C masks");
        end
      end
      // an idle cycle must not disturb the sequence
      vld_i <= 0;
      @(posedge clk); #1;
      chk(vld_o == 0, "idle vld");
    end
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
