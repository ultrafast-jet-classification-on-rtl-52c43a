// ds_ref_pkg: reference model of the Deep Sets classifier arithmetic for the
// testbenches.  It works on plain integers and reals, independently of the RTL:
// a layer output is floor((sum x*w + 16*b) / 128) computed in real arithmetic,
// clipped by ReLU and saturated to [-128, 127]; the softmax uses $exp.
// Weights are passed flat in [out][in] order.
package ds_ref_pkg;

  typedef int ivec[];

  function automatic int sat8(longint v);
    if (v > 127)  return 127;
    if (v < -128) return -128;
    return int'(v);
  endfunction

  function automatic ivec dense(ivec x, ivec w, ivec b, int nin, int nout, bit relu);
    ivec y = new[nout];
    for (int o = 0; o < nout; o++) begin
      longint acc = 16 * longint'(b[o]);
      real    q;
      for (int i = 0; i < nin; i++) acc += longint'(x[i]) * longint'(w[o*nin + i]);
      q = $floor(real'(acc) / 128.0);
      if (relu && q < 0.0) q = 0.0;
      y[o] = sat8(longint'(q));
    end
    return y;
  endfunction

  // Probabilities scaled by 256, floored, capped at 255.
  function automatic ivec softmax(ivec z);
    ivec  p = new[z.size()];
    real  e [] = new[z.size()];
    real  s = 0.0;
    foreach (z[k]) begin
      e[k] = $exp(real'(z[k]) / 16.0);
      s += e[k];
    end
    foreach (z[k]) begin
      real v = $floor(256.0 * e[k] / s);
      p[k] = (v > 255.0) ? 255 : int'(v);
    end
    return p;
  endfunction

  function automatic int rand_range(int lo, int hi);
    return lo + int'($urandom_range(hi - lo, 0));
  endfunction

endpackage
