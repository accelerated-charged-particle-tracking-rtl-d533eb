// gnn_ref_pkg: reference model used by the testbenches.
//
// Plain integer arithmetic on int values, written separately from the RTL:
// a dense layer is sum(x*w) + b*2^10, floored by 2^10 and clamped to the
// 16-bit range, then ReLU or sigmoid.  The sigmoid reference evaluates the
// same piecewise-linear curve from its breakpoints in real arithmetic.
// Weights live in wmem[], indexed by the flat weight address; random weights
// are drawn with $urandom in a small range so that activations stay well
// inside the <16,6> range most of the time (saturation still happens).
package gnn_ref_pkg;
  import gnn_pkg::*;

  int wmem [4096];

  function automatic int clamp16(longint v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // floor(v / 2^n) for signed v
  function automatic longint floor_div(longint v, int n);
    longint d = longint'(1) << n;
    if (v >= 0) return v / d;
    return -((-v + d - 1) / d);
  endfunction

  function automatic int sigmoid_ref(int x);
    real ax, y;
    ax = (x < 0) ? -x : x;
    ax = ax / 1024.0;
    if (ax >= 5.0)        y = 1.0;
    else if (ax >= 2.375) y = $floor(ax * 1024.0 / 32.0) / 1024.0 + 0.84375;
    else if (ax >= 1.0)   y = $floor(ax * 1024.0 / 8.0)  / 1024.0 + 0.625;
    else                  y = $floor(ax * 1024.0 / 4.0)  / 1024.0 + 0.5;
    if (x < 0) y = 1.0 - y;
    return int'($rtoi(y * 1024.0 + 0.5));
  endfunction

  function automatic real sigmoid_true(int x);
    return 1.0 / (1.0 + $exp(-real'(x) / 1024.0));
  endfunction

  // One dense layer with explicit size, base address and activation
  // (0 none, 1 relu, 2 sigmoid).
  function automatic void dense(input int x[], input int n_in, input int n_out,
                                input int base, input int act, output int y[]);
    y = new[n_out];
    for (int o = 0; o < n_out; o++) begin
      longint s = 0;
      for (int i = 0; i < n_in; i++) s += longint'(x[i]) * longint'(wmem[base + o*n_in + i]);
      s += longint'(wmem[base + n_out*n_in + o]) * 1024;
      y[o] = clamp16(floor_div(s, 10));
      if (act == 1 && y[o] < 0) y[o] = 0;
      if (act == 2) y[o] = sigmoid_ref(y[o]);
    end
  endfunction

  // Layer l of the model map (ReLU everywhere except the final sigmoid).
  function automatic void layer(input int l, input int x[], output int y[]);
    dense(x, L_NIN[l], L_NOUT[l], layer_base(l), (l == NLAYERS-1) ? 2 : 1, y);
  endfunction

  function automatic void mlp2(input int l, input int x[], output int y[]);
    int t[];
    layer(l, x, t);
    layer(l+1, t, y);
  endfunction

  function automatic void decode(input int x[], output int y);
    int a[], b[], c[], d[];
    layer(8, x, a);
    layer(9, a, b);
    layer(10, b, c);
    layer(11, c, d);
    y = d[0];
  endfunction

  // Random weights; amplitude in units of 2^-10.
  function automatic void random_weights(int amp);
    for (int a = 0; a < 4096; a++)
      wmem[a] = int'($urandom_range(2*amp, 0)) - amp;
  endfunction

  function automatic int rnd_fx(int amp);
    return int'($urandom_range(2*amp, 0)) - amp;
  endfunction
endpackage
