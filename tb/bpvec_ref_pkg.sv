// bpvec_ref_pkg: reference arithmetic for the testbenches. It works on whole
// elements and never on bit-slices, so it is independent of the composition logic
// it checks.
package bpvec_ref_pkg;
  import bpvec_pkg::*;

  // Width in bits of a bitwidth code.
  function automatic int bits(bw_e b);
    return 2 * int'(b);
  endfunction

  // Element e of a packed vector, at bitwidth nb, as an integer.
  function automatic longint elem(logic [VEC_W-1:0] v, int e, int nb, logic sgn);
    longint val;
    val = 0;
    for (int i = 0; i < nb; i++) if (v[e*nb + i]) val += (longint'(1) << i);
    if (sgn && v[e*nb + nb - 1]) val -= (longint'(1) << nb);
    return val;
  endfunction

  // Dot product that one CVU computes in one clock for a mode.
  function automatic longint dot(logic [VEC_W-1:0] x, logic [VEC_W-1:0] w, mode_t m);
    longint acc;
    int ne;
    ne  = int'(elems_per_cvu(m.xbw, m.wbw));
    acc = 0;
    for (int e = 0; e < ne; e++)
      acc += elem(x, e, bits(m.xbw), m.x_sgn) * elem(w, e, bits(m.wbw), m.w_sgn);
    return acc;
  endfunction

  function automatic logic [VEC_W-1:0] rand_vec();
    logic [VEC_W-1:0] v;
    for (int i = 0; i < VEC_W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  // Vector with every element at its extreme: the most negative value if signed,
  // the largest value if not.
  function automatic logic [VEC_W-1:0] extreme_vec(int nb, logic sgn);
    logic [VEC_W-1:0] v;
    for (int e = 0; e < VEC_W / nb; e++)
      for (int i = 0; i < nb; i++) v[e*nb + i] = sgn ? (i == nb - 1) : 1'b1;
    return v;
  endfunction

  function automatic mode_t mk_mode(int xb, int wb, logic xs, logic ws);
    mode_t m;
    m.xbw   = bw_e'(xb / 2);
    m.wbw   = bw_e'(wb / 2);
    m.x_sgn = xs;
    m.w_sgn = ws;
    return m;
  endfunction
endpackage
