// nn_ref_pkg: behavioural reference of the classifier arithmetic for the
// testbenches, written with plain integers (no RTL reused):
//   a_o  = sum_i w1[o][i] * x[i]                     (x unsigned, w ternary)
//   h1_o = sat32( floor(a_o * scale / 256) + b1_o )
//   h2_o = sat16( floor(h1_o * s_o / 2^14) + t_o )
//   z    = sum_o w2[o] * h2_o + b2
// and helpers to decode the packed parameter vectors.
package nn_ref_pkg;
  function automatic longint sat(longint v, int w);
    longint hi, lo;
    hi = (longint'(1) <<< (w - 1)) - 1;
    lo = -(longint'(1) <<< (w - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  // floor division by 2^k for signed values
  function automatic longint fdiv(longint v, int k);
    longint d;
    d = longint'(1) <<< k;
    if (v >= 0) return v / d;
    return -((-v + d - 1) / d);
  endfunction

  function automatic int tern(logic [1:0] c);
    return (c == 2'b01) ? 1 : (c == 2'b11) ? -1 : 0;
  endfunction

  function automatic longint layer1(int unsigned x[], int w[], int o, int n_in,
                                    int unsigned scale, longint b);
    longint a;
    a = 0;
    for (int i = 0; i < n_in; i++) a += longint'(w[o*n_in + i]) * longint'(x[i]);
    return sat(fdiv(a * longint'(scale), 8) + b, 32);
  endfunction

  function automatic longint bn(longint h, longint s, longint t);
    return sat(fdiv(h * s, 14) + t, 16);
  endfunction
endpackage
