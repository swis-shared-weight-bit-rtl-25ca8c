// tb_swis_act_mem: writes random words to the act memory at its full
// default size (65536 bytes), including the first and last address, reads
// them back and checks the data and the one-cycle read latency.
module tb_swis_act_mem;
  import swis_pkg::*;
  import tb_swis_pkg::*;

  localparam int N = ROWS;
  localparam int DEPTH = (65536 * 8) / (N * $bits(act_vec_t));
  localparam int AW = $clog2(DEPTH);
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  act_vec_t wr_data [N], rd_data [N];
  act_vec_t ref_mem [int][N];
  int checks = 0, failures = 0;

  swis_act_mem dut (.*);
  always #5 clk = ~clk;

  initial begin
    int addrs [$];
    for (int i = 0; i < N; i++) wr_data[i] = '0;
    addrs.push_back(0);
    addrs.push_back(DEPTH - 1);
    for (int n = 0; n < 300; n++) addrs.push_back($urandom % DEPTH);
    foreach (addrs[j]) begin
      wr_en <= 1; wr_addr <= AW'(addrs[j]);
      for (int i = 0; i < N; i++) begin
        ref_mem[addrs[j]][i] = rand_act();
        wr_data[i] <= ref_mem[addrs[j]][i];
      end
      @(posedge clk);
    end
    wr_en <= 0;
    foreach (addrs[j]) begin
      rd_en <= 1; rd_addr <= AW'(addrs[j]);
      @(posedge clk);
      rd_en <= 0;
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (rd_data[i] != ref_mem[addrs[j]][i]) begin
          failures++;
          if (failures < 10) $display("FAIL addr %0d lane %0d", addrs[j], i);
        end
      end
      // data must hold while rd_en is low
      @(posedge clk); #1;
      checks++;
      if (rd_data[N-1] != ref_mem[addrs[j]][N-1]) failures++;
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
