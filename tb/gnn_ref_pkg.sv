// gnn_ref_pkg: reference arithmetic for the testbenches, written with plain
// integers and independent of the RTL: fixed-point MLP (Q7.7, floor after
// the product sum, saturation to 14 bits, ReLU on hidden layers), saturating
// addition and the hard sigmoid clamp(x/4 + 1/2, 0, 1).
package gnn_ref_pkg;

  localparam int HIDN = 8;

  function automatic int rsat(longint v);
    if (v > 8191) return 8191;
    if (v < -8192) return -8192;
    return int'(v);
  endfunction

  function automatic int radd(int a, int b);
    return rsat(longint'(a) + longint'(b));
  endfunction

  function automatic int rhsig(int x);
    int v;
    v = (x >>> 2) + 64;
    if (v < 0) return 0;
    if (v > 128) return 128;
    return v;
  endfunction

  // one dense layer; w[o*nin + i] at offset woff, biases right after
  function automatic void rdense(const ref int w[], input int woff, input int nin,
                                 input int nout, input bit relu,
                                 const ref int x[], ref int y[]);
    y = new[nout];
    for (int o = 0; o < nout; o++) begin
      longint acc;
      acc = longint'(w[woff + nin*nout + o]) * 128;
      for (int i = 0; i < nin; i++) acc += longint'(w[woff + o*nin + i]) * longint'(x[i]);
      y[o] = rsat(acc >>> 7);
      if (relu && y[o] < 0) y[o] = 0;
    end
  endfunction

  function automatic void rmlp(const ref int w[], input int nin, input int nout,
                               const ref int x[], ref int y[]);
    int h1[], h2[];
    rdense(w, 0, nin, HIDN, 1'b1, x, h1);
    rdense(w, nin*HIDN + HIDN, HIDN, HIDN, 1'b1, h1, h2);
    rdense(w, nin*HIDN + HIDN + HIDN*HIDN + HIDN, HIDN, nout, 1'b0, h2, y);
  endfunction

  function automatic int rnparam(int nin, int nout);
    return nin*HIDN + HIDN + HIDN*HIDN + HIDN + HIDN*nout + nout;
  endfunction

  // random value in [-m, m]
  function automatic int rnd(int m);
    return int'($urandom_range(2*m, 0)) - m;
  endfunction

endpackage
