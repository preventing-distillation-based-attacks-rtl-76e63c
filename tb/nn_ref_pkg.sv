// nn_ref_pkg: bit-exact reference model of the poisoned classifier, for testbenches.
//
// Written from the arithmetic definitions, not from the RTL structure:
//   dense   : y[o] = sat16(floor((b[o]*2^10 + sum_i w[o][i]*x[i]) / 2^10))
//   relu    : max(x, 0)
//   trunc   : floor(x / 2^(16-Q)) * 2^(16-Q)
//   softmax : e_i = round(e^{-floor((m - s_i)/64)/16} * 32768) (0 when that index >= 256),
//             p_i = floor(e_i * 1024 / sum e)
//   topk    : the K largest words kept (lower index wins a tie), others 0
package nn_ref_pkg;

  function automatic int sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // w is flattened row-major: w[o*n_in + i]
  function automatic void dense(input int n_in, input int n_out, input int w[], input int b[],
                                input int x[], output int y[]);
    y = new[n_out];
    for (int o = 0; o < n_out; o++) begin
      longint acc;
      acc = longint'(b[o]) * 1024;
      for (int i = 0; i < n_in; i++) acc += longint'(w[o*n_in + i]) * longint'(x[i]);
      y[o] = sat16(acc >>> 10);
    end
  endfunction

  function automatic void relu(inout int x[]);
    foreach (x[i]) if (x[i] < 0) x[i] = 0;
  endfunction

  function automatic void trunc(input int q, inout int x[]);
    int step;
    step = 1 << (16 - q);
    foreach (x[i]) x[i] = (x[i] >= 0) ? (x[i] / step) * step : -(((-x[i]) + step - 1) / step) * step;
  endfunction

  function automatic void softmax(input int s[], output int p[]);
    int m, sum;
    int e[];
    e = new[s.size()];
    p = new[s.size()];
    m = s[0];
    foreach (s[i]) if (s[i] > m) m = s[i];
    sum = 0;
    foreach (s[i]) begin
      int idx;
      idx = (m - s[i]) / 64;
      e[i] = (idx < 256) ? int'($floor($exp(-real'(idx) / 16.0) * 32768.0 + 0.5)) : 0;
      sum += e[i];
    end
    foreach (s[i]) p[i] = int'((longint'(e[i]) * 1024) / longint'(sum));
  endfunction

  function automatic void topk(input int k, inout int x[]);
    bit keep[];
    bit taken[];
    keep = new[x.size()];
    taken = new[x.size()];
    for (int r = 0; r < k; r++) begin
      int best;
      best = -1;
      foreach (x[i]) if (!taken[i] && (best < 0 || x[i] > x[best])) best = i;
      taken[best] = 1;
      keep[best] = 1;
    end
    foreach (x[i]) if (!keep[i]) x[i] = 0;
  endfunction

  function automatic int argmax(input int x[]);
    int best;
    best = 0;
    foreach (x[i]) if (x[i] > x[best]) best = i;
    return best;
  endfunction

endpackage
