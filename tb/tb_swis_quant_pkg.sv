// tb_swis_quant_pkg: offline SWIS weight quantization for the testbenches.
//
// rand_weight draws a signed 8-bit weight with a bell-shaped distribution.
// quantize performs SWIS shift selection for one group of 4 weights: every
// set of `shifts` bit positions out of 8 (only consecutive sets for SWIS-C)
// is tried, each weight takes the nearest magnitude representable with a
// subset of the set, and the set with the lowest MSE++ cost (sum of squared
// errors plus alpha = 1 times the squared sum of signed errors) is kept. The
// result is returned as np double-shift weight words and as weight values;
// the group's squared error is added to sq_err.
package tb_swis_quant_pkg;
  import swis_pkg::*;

  function automatic int rand_weight();
    int s;
    s = 0;
    for (int i = 0; i < 4; i++) s += int'($urandom % 64);
    return s - 126;   // -126 .. 126, bell shaped
  endfunction

  // Nearest magnitude of |w| using any subset of the given positions.
  function automatic int nearest(int mag, int pos [8], int n, output logic [7:0] sel);
    int best, bv;
    best = 1 << 30; bv = 0; sel = '0;
    for (int m = 0; m < (1 << n); m++) begin
      int v;
      v = 0;
      for (int j = 0; j < n; j++) if (m[j]) v += 1 << pos[j];
      if ((v > mag ? v - mag : mag - v) < best) begin
        best = (v > mag ? v - mag : mag - v);
        bv = v; sel = 8'(m);
      end
    end
    return bv;
  endfunction

  // SWIS shift selection for one group; returns the weight words (np pairs)
  // and the quantized values. consec = SWIS-C (only consecutive sets).
  function automatic void quantize(int w [GROUP], int shifts, int np, logic consec,
                                   output wgt_word_t ww [MAX_PAIRS], output int q [GROUP],
                                   inout longint sq_err);
    longint best_cost;
    int     best_pos [8];
    logic [7:0] best_sel [GROUP];
    int     best_q [GROUP];
    best_cost = 64'h7fffffffffffffff;
    for (int m = 0; m < 256; m++) begin
      int pos [8];
      int n, lo, hi;
      logic [7:0] sel [GROUP];
      int qq [GROUP];
      longint se, ssum, cost;
      if ($countones(8'(m)) != shifts) continue;
      n = 0; lo = 8; hi = -1;
      for (int b = 0; b < 8; b++) if (m[b]) begin pos[n] = b; n++; if (b < lo) lo = b; hi = b; end
      if (consec && hi - lo + 1 != shifts) continue;
      se = 0; ssum = 0;
      for (int i = 0; i < GROUP; i++) begin
        int mag;
        mag = w[i] < 0 ? -w[i] : w[i];
        qq[i] = nearest(mag, pos, n, sel[i]);
        if (w[i] < 0) qq[i] = -qq[i];
        se += longint'(w[i] - qq[i]) * (w[i] - qq[i]);
        ssum += w[i] - qq[i];
      end
      cost = se + ssum * ssum;   // MSE++ with alpha = 1 (times the group size)
      if (cost < best_cost) begin
        best_cost = cost; best_pos = pos; best_sel = sel; best_q = qq;
      end
    end
    for (int p = 0; p < np; p++) begin
      ww[p] = '0;
      for (int i = 0; i < GROUP; i++) begin
        ww[p].sign[i]  = best_q[i] < 0;
        ww[p].mask0[i] = (2 * p < shifts) ? best_sel[i][2*p] : 1'b0;
        ww[p].mask1[i] = (2 * p + 1 < shifts) ? best_sel[i][2*p+1] : 1'b0;
      end
      if (!consec || p == 0) begin
        ww[p].s0 = 3'((2 * p < shifts) ? best_pos[2*p] : 0);
        ww[p].s1 = 3'((2 * p + 1 < shifts) ? best_pos[2*p+1] : 0);
      end
    end
    q = best_q;
    for (int i = 0; i < GROUP; i++) sq_err += longint'(w[i] - best_q[i]) * (w[i] - best_q[i]);
  endfunction


endpackage
