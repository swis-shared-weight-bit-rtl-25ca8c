// tb_swis_pkg: reference model and stimulus helpers shared by the SWIS
// testbenches.
//
// The reference works from the weight values rather than the hardware's
// structure: each weight of a group is rebuilt as
//     w_i = (-1)^sign_i * (m0_i * 2^s0 + m1_i * 2^s1)
// and multiplied with its activation; the group's contribution is the plain
// sum of a_i * w_i. Accumulators are compared modulo 2^ACC_W, the width of
// the hardware accumulator.
package tb_swis_pkg;
  import swis_pkg::*;

  function automatic int ref_weight(wgt_word_t w, int i);
    int mag;
    mag = (w.mask0[i] ? (1 << w.s0) : 0) + (w.mask1[i] ? (1 << w.s1) : 0);
    return w.sign[i] ? -mag : mag;
  endfunction

  function automatic int ref_dot(act_vec_t a, wgt_word_t w);
    int s;
    s = 0;
    for (int i = 0; i < GROUP; i++) s += int'(a[i]) * ref_weight(w, i);
    return s;
  endfunction

  function automatic logic [ACC_W-1:0] wrap(longint v);
    return ACC_W'(v);
  endfunction

  function automatic act_vec_t rand_act();
    act_vec_t a;
    for (int i = 0; i < GROUP; i++) a[i] = ACT_W'($urandom);
    return a;
  endfunction

  // Random SWIS word with two distinct shift values.
  function automatic wgt_word_t rand_wgt();
    wgt_word_t w;
    w.sign  = GROUP'($urandom);
    w.mask0 = GROUP'($urandom);
    w.mask1 = GROUP'($urandom);
    w.s0    = SHIFT_W'($urandom);
    w.s1    = SHIFT_W'(int'(w.s0) + 1 + int'($urandom % 7));
    return w;
  endfunction

endpackage
