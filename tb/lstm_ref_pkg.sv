// lstm_ref_pkg: reference model of the split LSTM network for the testbenches.
//
// It computes the same network as the RTL, but independently: activations are
// evaluated in real arithmetic from the PLAN definition and then floored to
// the 1/32 grid; narrowing uses $floor on reals instead of shifts. Weights are
// kept in flat dynamic arrays indexed row*LANES + lane, the same row/lane
// layout the hardware loads (row k: weights of operand k; last row: biases;
// LSTM lane = gate*units + unit with gate order i, f, g, o).
package lstm_ref_pkg;

  function automatic int sat8(input real v);
    int r;
    r = int'($floor(v));
    if (r > 127)  return 127;
    if (r < -128) return -128;
    return r;
  endfunction

  function automatic real plan(input real x);
    real a, y;
    a = (x < 0.0) ? -x : x;
    if (a >= 5.0)        y = 1.0;
    else if (a >= 2.375) y = a / 32.0 + 0.84375;
    else if (a >= 1.0)   y = a / 8.0 + 0.625;
    else                 y = a / 4.0 + 0.5;
    return (x < 0.0) ? 1.0 - y : y;
  endfunction

  // floor(32*sigmoid(x))
  function automatic int sig_ref(input real x);
    return int'($floor(32.0 * plan(x)));
  endfunction

  // floor(32*tanh(x)), tanh(x) = 2*sigmoid(2x) - 1
  function automatic int tanh_ref(input real x);
    return int'($floor(32.0 * (2.0 * plan(2.0 * x) - 1.0)));
  endfunction

  // One timestep of an LSTM layer. x: n_in inputs, h/c: state (updated).
  function automatic void lstm_step(input int n_in, input int n_h, input int w[],
                                    input int x[], inout int h[], inout int c[]);
    int lanes, k;
    int z[];
    int pre[];
    int hn[], cn[];
    lanes = 4 * n_h;
    k     = n_in + n_h;
    z   = new[k];
    pre = new[lanes];
    hn  = new[n_h];
    cn  = new[n_h];
    for (int i = 0; i < n_in; i++) z[i] = x[i];
    for (int j = 0; j < n_h; j++)  z[n_in + j] = h[j];
    for (int l = 0; l < lanes; l++) begin
      pre[l] = w[k * lanes + l] * 32;
      for (int r = 0; r < k; r++) pre[l] += w[r * lanes + l] * z[r];
    end
    for (int j = 0; j < n_h; j++) begin
      int gi, gf, gg, go, tc;
      gi = sig_ref (real'(pre[j])           / 1024.0);
      gf = sig_ref (real'(pre[n_h + j])     / 1024.0);
      gg = tanh_ref(real'(pre[2 * n_h + j]) / 1024.0);
      go = sig_ref (real'(pre[3 * n_h + j]) / 1024.0);
      cn[j] = sat8(real'(gf * c[j] + gi * gg) / 32.0);
      tc    = tanh_ref(real'(cn[j]) / 32.0);
      hn[j] = sat8(real'(go * tc) / 32.0);
    end
    for (int j = 0; j < n_h; j++) begin
      h[j] = hn[j];
      c[j] = cn[j];
    end
  endfunction

  // Whole sequence through an LSTM layer; returns h after every step,
  // flattened step*n_h + unit.
  function automatic void lstm_seq(input int n_in, input int n_h, input int steps,
                                   input int w[], input int xs[], output int hs[]);
    int h[], c[], x[];
    h  = new[n_h];
    c  = new[n_h];
    x  = new[n_in];
    hs = new[steps * n_h];
    foreach (h[j]) begin h[j] = 0; c[j] = 0; end
    for (int t = 0; t < steps; t++) begin
      for (int i = 0; i < n_in; i++) x[i] = xs[t * n_in + i];
      lstm_step(n_in, n_h, w, x, h, c);
      for (int j = 0; j < n_h; j++) hs[t * n_h + j] = h[j];
    end
  endfunction

  // Fully connected layer.
  function automatic void dense(input int n_in, input int n_out, input bit relu,
                                input int w[], input int x[], output int y[]);
    y = new[n_out];
    for (int o = 0; o < n_out; o++) begin
      int a;
      a = w[n_in * n_out + o] * 32;
      for (int i = 0; i < n_in; i++) a += w[i * n_out + o] * x[i];
      y[o] = sat8(real'(a) / 32.0);
      if (relu && y[o] < 0) y[o] = 0;
    end
  endfunction

  // Random 8-bit weights in [-32, 31] (+-1.0) with about `zero_pct` percent
  // set to zero, like a pruned layer.
  function automatic void rand_weights(input int n, input int zero_pct, output int w[]);
    w = new[n];
    foreach (w[i]) begin
      if (int'($urandom_range(99)) < zero_pct) w[i] = 0;
      else w[i] = int'($urandom_range(63)) - 32;
    end
  endfunction

endpackage
