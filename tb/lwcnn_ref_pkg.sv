// lwcnn_ref_pkg: bit-exact software reference of the CE arithmetic, used by
// the testbenches to compute expected outputs independently of the RTL.
// Feature maps are flat int arrays indexed (r*W+c)*C+ch (channel-first);
// weights are indexed ((n*K+ky)*K+kx)*CIN+ci for STC, (n*K+ky)*K+kx for DWC,
// n*CIN+ci for PWC and FC (FC input index = ch*H*W + position).
//
// The 8-bit data and 32-bit sums follow the paper's 8-bit quantisation; the
// shift/ReLU/saturate requantisation copies this design's own choice.
package lwcnn_ref_pkg;
  typedef int iarr_t[];

  function automatic int sat8i(longint v);
    if (v > 127) return 127;
    if (v < -128) return -128;
    return int'(v);
  endfunction

  function automatic int rq(longint acc, int shift, bit relu);
    longint s;
    s = acc >>> shift;
    if (relu && s < 0) s = 0;
    return sat8i(s);
  endfunction

  // conv layer: typ 0 = STC, 1 = DWC, 2 = PWC
  function automatic iarr_t conv(int typ, int h, int w, int cin, int cout,
                                 int k, int s, int pad, int shift, bit relu,
                                 iarr_t x, iarr_t wt);
    int ho, wo;
    iarr_t y;
    if (typ == 2) begin k = 1; s = 1; pad = 0; end
    ho = (h + 2*pad - k) / s + 1;
    wo = (w + 2*pad - k) / s + 1;
    y = new[ho*wo*cout];
    for (int oy = 0; oy < ho; oy++)
      for (int ox = 0; ox < wo; ox++)
        for (int n = 0; n < cout; n++) begin
          longint acc = 0;
          for (int ky = 0; ky < k; ky++)
            for (int kx = 0; kx < k; kx++) begin
              int r = oy*s - pad + ky, c = ox*s - pad + kx;
              if (r < 0 || r >= h || c < 0 || c >= w) continue;
              if (typ == 1)
                acc += longint'(x[(r*w+c)*cin+n]) * wt[(n*k+ky)*k+kx];
              else
                for (int ci = 0; ci < cin; ci++)
                  acc += longint'(x[(r*w+c)*cin+ci]) * wt[((n*k+ky)*k+kx)*cin+ci];
            end
          y[(oy*wo+ox)*cout+n] = rq(acc, shift, relu);
        end
    return y;
  endfunction

  // fully connected over the flattened (channel-major) input
  function automatic iarr_t fc(int len, int cout, int shift, bit relu,
                               iarr_t x, iarr_t wt);
    iarr_t y = new[cout];
    for (int n = 0; n < cout; n++) begin
      longint acc = 0;
      for (int i = 0; i < len; i++) acc += longint'(x[i]) * wt[n*len+i];
      y[n] = rq(acc, shift, relu);
    end
    return y;
  endfunction

  function automatic iarr_t add_sat_arr(iarr_t a, iarr_t b);
    iarr_t y = new[a.size()];
    foreach (a[i]) y[i] = sat8i(longint'(a[i]) + b[i]);
    return y;
  endfunction

  // weight value held by FRCE ROM word `addr`, lane `l` (see frce.sv)
  function automatic int frce_rom(int typ, int cin, int cout, int k, int pw,
                                  int addr, int l, iarr_t wt);
    int t_len, g, t, n, ky, kx, ci;
    t_len = (typ == 0) ? k*k*cin : (typ == 1) ? k*k : cin;
    g = addr / t_len; t = addr % t_len; n = g*pw + l;
    if (n >= cout) return 0;
    if (typ == 0) begin
      ci = t % cin; kx = (t / cin) % k; ky = t / (cin*k);
      return wt[((n*k+ky)*k+kx)*cin+ci];
    end else if (typ == 1) return wt[n*k*k + t];
    else return wt[n*cin + t];
  endfunction

  function automatic iarr_t rand_arr(int n, int lo, int hi);
    iarr_t a = new[n];
    foreach (a[i]) a[i] = lo + int'($urandom_range(hi - lo));
    return a;
  endfunction
endpackage
