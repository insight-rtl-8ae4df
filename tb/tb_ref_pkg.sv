// tb_ref_pkg: bit-true reference model of the factorized TDNN layer.
//
// Numbers are n-bit two's complement with m fractional bits. A neuron's
// output is bits m..m+n-1 of the exact sum of weight*input products (plus the
// bias shifted left by m), read as a signed n-bit word; that is what the
// bit-serial hardware produces, because the low 2n bits of the sum do not
// depend on wrap-around. Sequences are stored flat: x[c*T + t] is sample t of
// channel c; samples before t = 0 count as zero. Weights are listed in scan
// chain order (the register nearest the chain input first).
package tb_ref_pkg;

  function automatic longint sext(longint v, int bits);
    longint r;
    r = v & ((64'sd1 <<< bits) - 1);
    if (((r >>> (bits - 1)) & 1) != 0) r = r - (64'sd1 <<< bits);
    return r;
  endfunction

  function automatic longint trunc_word(longint sum, int n, int m, bit relu);
    longint r;
    r = sext(sum >>> m, n);
    if (relu && r < 0) r = 0;
    return r;
  endfunction

  // One sublayer: cout neurons, each over cin channels x ksize taps spaced
  // `spacing` samples apart (ksize = 1 for a pointwise sublayer).
  function automatic void sub_ref(input longint x[], input int T, input int cin, input int cout,
                                  input int ksize, input int spacing, input bit has_bias,
                                  input bit relu, input int n, input int m,
                                  input longint wv[], inout int widx, output longint y[]);
    int     base, ts;
    longint sum, xv;
    y = new[cout * T];
    for (int o = 0; o < cout; o++) begin
      base = widx + o * (cin * ksize + int'(has_bias));
      for (int t = 0; t < T; t++) begin
        sum = 0;
        for (int c = 0; c < cin; c++)
          for (int k = 0; k < ksize; k++) begin
            ts = t - (ksize - 1 - k) * spacing;
            xv = (ts >= 0) ? x[c * T + ts] : 0;
            sum += wv[base + c * ksize + k] * xv;
          end
        if (has_bias) sum += wv[base + cin * ksize] <<< m;
        y[o * T + t] = trunc_word(sum, n, m, relu);
      end
    end
    widx += cout * (cin * ksize + int'(has_bias));
  endfunction

  // Number of n-bit registers on the scan chain of a tdnn_layer.
  function automatic int layer_nregs(int C, int KH, int KW, int RC, int RV, int RF, int F);
    return C * RC + RC * KH * RV + RV * KW * RV + RV * RF + RF * F + F;
  endfunction

  // Whole five-sublayer layer.
  function automatic void layer_ref(input longint x[], input int T, input int C, input int W,
                                    input int KH, input int KW, input int RC, input int RV,
                                    input int RF, input int F, input int n, input int m,
                                    input bit relu, input longint wv[], output longint y[],
                                    output longint pre[]);
    int     wi;
    longint a[], b[], c[], d[];
    wi = 0;
    sub_ref(x, T, C,  RC, 1,  1, 1'b0, 1'b0, n, m, wv, wi, a);
    sub_ref(a, T, RC, RV, KH, W, 1'b0, 1'b0, n, m, wv, wi, b);
    sub_ref(b, T, RV, RV, KW, 1, 1'b0, 1'b0, n, m, wv, wi, c);
    sub_ref(c, T, RV, RF, 1,  1, 1'b0, 1'b0, n, m, wv, wi, d);
    begin
      int wj;
      wj = wi;
      sub_ref(d, T, RF, F, 1, 1, 1'b1, 1'b0, n, m, wv, wj, pre);  // before activation
    end
    sub_ref(d, T, RF, F, 1, 1, 1'b1, relu, n, m, wv, wi, y);
  endfunction

endpackage
