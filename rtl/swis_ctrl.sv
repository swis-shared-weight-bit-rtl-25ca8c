// swis_ctrl: tile sequencer of the SWIS accelerator.
//
// One tile is NROWS outputs (output pixels) of NCOLS filters, reduced over
// k_groups weight groups. All filters of a tile use the same number of shift
// cycles, n_pairs (one cycle per pair of shifts, 1..MAX_PAIRS), as the
// paper's filter scheduling requires of filters processed together; it is
// set per tile, so tiles of one layer may use different numbers of shifts.
// For step s = k*n_pairs + p the controller reads weight word wgt_base + s
// every cycle and activation word act_base + k only when p = 0 (first_o),
// since the feeder repeats it for the other shift cycles. After the last
// step it waits until the skewed data has left the array and then writes
// the accumulators row by row to output words out_base + r.
//
// Sequence after a start pulse in cycle ts (config sampled then):
//   ts+1            acc_clr
//   ts+2 .. ts+1+S  one read step per cycle, S = k_groups * n_pairs
//   then NROWS+NCOLS+1 drain cycles, NROWS output writes, done pulse.
// Start to done is S + 2*NROWS + NCOLS + 3 cycles. The tile descriptor, the
// read-out order and the timing are this design's choices; the paper gives
// the dataflow (output stationary, activations repeated per shift) only.
// The configuration assertion is disabled during reset, so lint sees rst_n
// used both asynchronously (flip-flops) and synchronously (assertion).
module swis_ctrl
  import swis_pkg::*;
#(
  parameter int unsigned NROWS  = ROWS,
  parameter int unsigned NCOLS  = COLS,
  parameter int unsigned ACT_AW = 11,
  parameter int unsigned WGT_AW = 12,
  parameter int unsigned OUT_AW = 10,
  parameter int unsigned KW     = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // tile descriptor
  input  logic                      start,
  input  swis_mode_e                mode_i,
  input  logic [2:0]                n_pairs,
  input  logic [KW-1:0]             k_groups,
  input  logic [ACT_AW-1:0]         act_base,
  input  logic [WGT_AW-1:0]         wgt_base,
  input  logic [OUT_AW-1:0]         out_base,
  output logic                      busy,
  output logic                      done,
  // datapath control
  output swis_mode_e                mode_o,
  output logic                      acc_clr,
  output logic                      act_rd_en,
  output logic [ACT_AW-1:0]         act_rd_addr,
  output logic                      wgt_rd_en,
  output logic [WGT_AW-1:0]         wgt_rd_addr,
  output logic                      first_o,
  output logic                      out_wr_en,
  output logic [OUT_AW-1:0]         out_wr_addr,
  output logic [$clog2(NROWS)-1:0]  out_row
);

  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_RUN, S_DRAIN, S_WRITE, S_DONE} state_e;
  localparam int unsigned DRAIN_CYC = NROWS + NCOLS + 1;

  state_e             state;
  logic [2:0]         np_q;
  logic [KW-1:0]      kg_q, k;
  logic [2:0]         p;
  logic [ACT_AW-1:0]  act_addr;
  logic [WGT_AW-1:0]  wgt_addr;
  logic [OUT_AW-1:0]  out_base_q;
  logic [$clog2(DRAIN_CYC+1)-1:0] cnt;
  logic [$clog2(NROWS)-1:0]       row;

  wire last_p    = (p == np_q - 3'd1);
  wire last_step = last_p && (k == kg_q - KW'(1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      mode_o     <= MODE_SWIS;
      np_q       <= 3'd1;
      kg_q       <= '0;
      k          <= '0;
      p          <= '0;
      act_addr   <= '0;
      wgt_addr   <= '0;
      out_base_q <= '0;
      cnt        <= '0;
      row        <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state      <= S_CLEAR;
          mode_o     <= mode_i;
          np_q       <= n_pairs;
          kg_q       <= k_groups;
          act_addr   <= act_base;
          wgt_addr   <= wgt_base;
          out_base_q <= out_base;
          k          <= '0;
          p          <= '0;
        end
        S_CLEAR: state <= S_RUN;
        S_RUN: begin
          wgt_addr <= wgt_addr + WGT_AW'(1);
          if (last_p) begin
            p        <= '0;
            k        <= k + KW'(1);
            act_addr <= act_addr + ACT_AW'(1);
          end else begin
            p <= p + 3'd1;
          end
          if (last_step) begin
            state <= S_DRAIN;
            cnt   <= '0;
          end
        end
        S_DRAIN: begin
          cnt <= cnt + 1'b1;
          if (cnt == ($bits(cnt))'(DRAIN_CYC - 1)) begin
            state <= S_WRITE;
            row   <= '0;
          end
        end
        S_WRITE: begin
          row <= row + 1'b1;
          if (row == ($bits(row))'(NROWS - 1)) state <= S_DONE;
        end
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy        = (state != S_IDLE);
    done        = (state == S_DONE);
    acc_clr     = (state == S_CLEAR);
    wgt_rd_en   = (state == S_RUN);
    wgt_rd_addr = wgt_addr;
    act_rd_en   = (state == S_RUN) && (p == 3'd0);
    act_rd_addr = act_addr;
    first_o     = (p == 3'd0);
    out_wr_en   = (state == S_WRITE);
    out_wr_addr = out_base_q + OUT_AW'(row);
    out_row     = row;
  end

  // A tile needs at least one group and 1..MAX_PAIRS shift cycles per group.
  a_cfg: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && start) |-> (n_pairs >= 3'd1 && n_pairs <= 3'(MAX_PAIRS) && k_groups != '0));

endmodule
