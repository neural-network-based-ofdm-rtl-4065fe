// Reference arithmetic for the testbenches, written independently of the RTL:
// saturation, the piecewise-linear sigmoid/tanh from their breakpoints, the
// mixed-scheme weight product and a pruned fully-connected layer in plain integers.
package nn_ref_pkg;

  function automatic int sat16(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // floor(v / 2^s)
  function automatic longint fdiv(input longint v, input int s);
    longint q;
    if (s >= 40) return (v < 0) ? -1 : 0;
    q = longint'(1) << s;
    if (v >= 0) return v / q;
    return -((-v + q - 1) / q);
  endfunction

  // sigmoid approximation in Q7.8: breakpoints 1, 2.375, 5; slopes 1/4, 1/8, 1/32
  function automatic int sig_ref(input int x);
    int a, y;
    a = (x < 0) ? -x : x;
    if (a >= 5 * 256)        y = 256;
    else if (a >= 608)       y = a / 32 + 216;
    else if (a >= 256)       y = a / 8 + 160;
    else                     y = a / 4 + 128;
    return (x < 0) ? 256 - y : y;
  endfunction

  function automatic int tanh_ref(input int x);
    return 2 * sig_ref(sat16(2 * longint'(x))) - 256;
  endfunction

  // product of activation x and weight code for a row of the given scheme
  function automatic longint prod_ref(input int x, input int code, input bit pot, input int wb, input int wfrac);
    int mag;
    longint v;
    if (!pot) return longint'(x) * longint'(code);
    mag = code & ((1 << (wb - 1)) - 1);
    if (mag == 0) return 0;
    v = fdiv(longint'(x) * (longint'(1) << wfrac), mag - 1);
    return (code < 0) ? -v : v;
  endfunction

  // y = act(sat(round((sum w*x + b*2^wfrac) / 2^wfrac))) with keep[r*nin+c] masking
  function automatic void dense_ref(input int nin, input int nout, input int x[], input int w[],
                                    input int b[], input bit pot[], input bit keep[],
                                    input int wb, input int wfrac, input bit relu, ref int y[]);
    y = new[nout];
    for (int r = 0; r < nout; r++) begin
      longint acc;
      int v;
      acc = 0;
      for (int c = 0; c < nin; c++)
        if (keep[r*nin+c]) acc += prod_ref(x[c], w[r*nin+c], pot[r], wb, wfrac);
      acc += longint'(b[r]) * (longint'(1) << wfrac);
      if (wfrac > 0) acc += longint'(1) << (wfrac - 1);
      v = sat16(fdiv(acc, wfrac));
      y[r] = (relu && v < 0) ? 0 : v;
    end
  endfunction

endpackage
