// rc_ref_pkg -- reference model of the reservoir accelerator for the
// testbenches.
//
// Written independently of the RTL datapath: products are plain integer
// multiplications, the activation is a floor division followed by a clamp
// (instead of a threshold count), and the pruned set is found by sorting all
// connection scores (instead of ranking each connection on its own).  Only
// the model constants -- weights, connection sources, scores -- are taken
// from rc_pkg, because they are the model the hardware is built for.
package rc_ref_pkg;

  function automatic int floor_div(input int a, input int b);
    return (a >= 0) ? a / b : -((-a + b - 1) / b);
  endfunction

  // HardTanh level: round-half-up of acc/step clamped to the signed q-bit range.
  function automatic int ref_act(input int acc, input int q, input int step);
    int v, lo, hi;
    lo = -(1 << (q - 1));
    hi = (1 << (q - 1)) - 1;
    v  = floor_div(acc + step / 2, step);
    if (v < lo) v = lo;
    if (v > hi) v = hi;
    return v;
  endfunction

  // Pruned-connection mask: sort all connections by (score, index) ascending
  // and mark the first floor(ncrl*p/100).
  function automatic void prune_mask(input int ncrl, input int p, input int q,
                                     output bit mask []);
    int idx [];
    int npr;
    idx  = new[ncrl];
    mask = new[ncrl];
    foreach (idx[c]) idx[c] = c;
    // insertion sort on (score, index)
    for (int a = 1; a < ncrl; a++) begin
      int v, b;
      v = idx[a];
      b = a - 1;
      while (b >= 0 && (rc_pkg::sens_score(idx[b], q) > rc_pkg::sens_score(v, q) ||
                        (rc_pkg::sens_score(idx[b], q) == rc_pkg::sens_score(v, q) && idx[b] > v))) begin
        idx[b + 1] = idx[b];
        b--;
      end
      idx[b + 1] = v;
    end
    npr = (ncrl * p) / 100;
    foreach (mask[c]) mask[c] = 1'b0;
    for (int r = 0; r < npr; r++) mask[idx[r]] = 1'b1;
  endfunction

  // Pre-activation of neuron i.
  function automatic int ref_acc(input int i, input int u [], input int s [],
                                 input bit mask [], input int n, input int q,
                                 input int ncrl);
    int acc, fi;
    fi  = ncrl / n;
    acc = 0;
    foreach (u[j]) acc += rc_pkg::w_in(i, j, q) * u[j];
    for (int k = 0; k < fi; k++)
      if (!mask[i * fi + k]) acc += rc_pkg::w_r(i, k, q) * s[rc_pkg::r_src(i, k, n)];
    return acc;
  endfunction

  // New state of the whole reservoir.
  function automatic void ref_step(input int u [], input int s [], input bit mask [],
                                   input int n, input int q, input int ncrl,
                                   output int s_new []);
    s_new = new[n];
    for (int i = 0; i < n; i++)
      s_new[i] = ref_act(ref_acc(i, u, s, mask, n, q, ncrl), q, 1 << (q - 1));
  endfunction

  function automatic longint ref_readout(input int o, input int s [], input int q);
    longint y;
    y = 0;
    foreach (s[i]) y += longint'(rc_pkg::w_out(o, i, q) * s[i]);
    return y;
  endfunction

  // Random signed q-bit value.
  function automatic int rand_q(input int q);
    return int'($urandom_range((1 << q) - 1, 0)) - (1 << (q - 1));
  endfunction

endpackage
