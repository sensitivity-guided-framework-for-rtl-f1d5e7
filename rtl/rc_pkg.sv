// rc_pkg -- constants and elaboration-time functions shared by the reservoir
// computing (RC) accelerator.
//
// The accelerator hardwires every weight of a quantized, pruned echo-state
// network into logic.  The trained weights of a real model would be emitted
// here by the model-compression flow; this package instead derives fixed
// placeholder weights from a hash of their indices so that the RTL is complete
// and reproducible.  Replace the bodies of w_in(), w_r(), w_out() and
// sens_score() with table look-ups to load a trained model.
//
// Main configuration (defaults): N = 50 reservoir neurons, 250 reservoir
// connections, 4-bit quantization, 15 % of the reservoir connections pruned,
// one input and one readout channel.  N, the connection count, the bit widths
// {4,6,8} and the pruning rate follow the published evaluation; the input and
// output counts, the connection pattern, the hash weights and the activation
// step are this design's own choices.
package rc_pkg;

  // ---- main configuration -------------------------------------------------
  localparam int N_DEF     = 50;   // reservoir neurons
  localparam int NCRL_DEF  = 250;  // reservoir connections before pruning
  localparam int Q_DEF     = 4;    // bits per weight / state / input
  localparam int PRUNE_DEF = 15;   // pruning rate, percent
  localparam int NU_DEF    = 1;    // input channels
  localparam int NY_DEF    = 1;    // readout channels

  // ---- widths ---------------------------------------------------------------
  // Pre-activation accumulator: sum of up to (fan-in + inputs) Q x Q products.
  function automatic int acc_w(input int q);
    return 2 * q + 8;
  endfunction
  // Readout value: sum of n Q x Q products.
  function automatic int y_w(input int q, input int n);
    return 2 * q + $clog2(n + 1) + 1;
  endfunction
  // Activation step (absorbed quantization scale): one output level per
  // 2^(q-1) units of pre-activation.
  function automatic int act_step(input int q);
    return 1 << (q - 1);
  endfunction

  // ---- hashing --------------------------------------------------------------
  // 32-bit integer mixer (xor-shift / multiply).
  function automatic int unsigned mix32(input int unsigned x);
    int unsigned h;
    h = x;
    h = h ^ (h >> 16);
    h = h * 32'h7feb352d;
    h = h ^ (h >> 15);
    h = h * 32'h846ca68b;
    h = h ^ (h >> 16);
    return h;
  endfunction

  function automatic int unsigned key(input int kind, input int a, input int b);
    return mix32(mix32(32'(a) * 32'd2654435761 + 32'(kind)) ^ (32'(b) * 32'd40503 + 32'h9e37));
  endfunction

  // Uniform signed weight in [-(2^(q-1)-1), 2^(q-1)-1].
  function automatic int weight_from(input int unsigned h, input int q);
    int lim;
    lim = (1 << (q - 1)) - 1;
    return int'(h % 32'(2 * lim + 1)) - lim;
  endfunction

  // ---- weights --------------------------------------------------------------
  // Input weight W_in[i][j].
  function automatic int w_in(input int i, input int j, input int q);
    return weight_from(key(1, i, j), q);
  endfunction

  // Reservoir connection k of neuron i: its source neuron and its weight.
  // Every neuron has fan_in = ncrl / n incoming connections with distinct
  // sources (stride 7 from a hashed offset).
  function automatic int fan_in(input int n, input int ncrl);
    return ncrl / n;
  endfunction
  function automatic int r_src(input int i, input int k, input int n);
    return int'((key(2, i, 0) + 32'(7 * k)) % 32'(n));
  endfunction
  function automatic int w_r(input int i, input int k, input int q);
    int w;
    w = weight_from(key(3, i, k), q);
    return (w == 0) ? 1 : w;   // a connection carries a non-zero weight
  endfunction

  // Readout weight W_out[o][i].
  function automatic int w_out(input int o, input int i, input int q);
    return weight_from(key(4, o, i), q);
  endfunction

  // ---- pruning --------------------------------------------------------------
  // Sensitivity score of reservoir connection c = i*fan_in + k.  The real
  // score is the mean accuracy deviation over all single bit flips of the
  // quantized weight, measured offline; a 16-bit hash stands in for it.
  function automatic int sens_score(input int c, input int q);
    return int'(key(5 + q, c, 0) & 32'hffff);
  endfunction

  // Number of connections removed at a pruning rate of p percent.
  function automatic int n_pruned(input int ncrl, input int p);
    return (ncrl * p) / 100;
  endfunction

  // A connection is pruned when fewer than n_pruned() connections rank below
  // it in ascending score order (ties broken by index).
  function automatic bit is_pruned(input int c, input int ncrl, input int p, input int q);
    int rank;
    int sc;
    rank = 0;
    sc = sens_score(c, q);
    for (int d = 0; d < ncrl; d++) begin
      int sd;
      sd = sens_score(d, q);
      if (sd < sc || (sd == sc && d < c)) rank++;
    end
    return rank < n_pruned(ncrl, p);
  endfunction

endpackage
