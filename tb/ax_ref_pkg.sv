// ax_ref_pkg: reference model of the approximate bespoke MLP, for testbenches.
//
// Written directly from the arithmetic definition, with no shared code with
// the RTL: a product is a*|w| computed as an integer; an approximated product
// keeps its top k of n = bits(|w|) + bits(a) bits by shifting right and back
// left; S' = Sp - Sn - 1 when the neuron has a negative side (the value of
// Sp + ~Sn in two's complement) and Sp otherwise; ReLU clamps at zero.
// Significance is G_i = |w_i E_i| / |sum_j E_j w_j| compared with G in
// floating point.
package ax_ref_pkg;

  function automatic int bits_of(longint v);
    int b;
    b = 1;
    while ((longint'(1) << b) <= v) b++;
    return b;
  endfunction

  function automatic longint iabs(longint v);
    return (v < 0) ? -v : v;
  endfunction

  // Approximation flag of every product of one neuron.
  function automatic void sig_flags(input int w[], input int e[], input int gnum,
                                    input int gden, output bit ax[]);
    real dot, gi, g;
    ax  = new[w.size()];
    dot = 0.0;
    foreach (w[i]) dot += real'(w[i]) * real'(e[i]);
    g = real'(gnum) / real'(gden);
    foreach (w[i]) begin
      if (dot == 0.0 || w[i] == 0) ax[i] = 1'b0;
      else begin
        gi    = real'(w[i]) * real'(e[i]) / dot;
        if (gi < 0.0) gi = -gi;
        ax[i] = (gi <= g + 1.0e-12);
      end
    end
  endfunction

  // One neuron. Returns S' (relu = 0) or ReLU(S') (relu = 1). Counts how many
  // approximated products lost non-zero bits, and whether ReLU clamped.
  function automatic longint neuron(input int w[], input int bias, input longint a[],
                                    input int abits[], input bit ax[], input int k,
                                    input bit relu, inout int lossy, inout int clamped);
    longint sp, sn, p, t, s;
    int     n;
    bit     neg;
    sp  = (bias > 0) ? longint'(bias) : 0;
    sn  = (bias < 0) ? -longint'(bias) : 0;
    neg = (bias < 0);
    foreach (w[i]) begin
      if (w[i] == 0) continue;
      p = a[i] * iabs(w[i]);
      n = bits_of(iabs(w[i])) + abits[i];
      t = p;
      if (ax[i] && n > k) t = (p >> (n - k)) << (n - k);
      if (t != p) lossy++;
      if (w[i] > 0) sp += t;
      else begin
        sn  += t;
        neg  = 1'b1;
      end
    end
    s = neg ? (sp - sn - 1) : sp;
    if (relu && s < 0) begin
      clamped++;
      s = 0;
    end
    return s;
  endfunction

  // Index of the first maximum.
  function automatic int argmax(input longint v[]);
    int idx;
    idx = 0;
    foreach (v[i]) if (v[i] > v[idx]) idx = i;
    return idx;
  endfunction

endpackage
