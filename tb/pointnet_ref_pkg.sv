// pointnet_ref_pkg: bit-exact reference arithmetic of the PointNet engine, for the
// testbenches. Written from the number formats alone (8-bit inputs and kernels with seven
// fraction bits, 16-bit biases with fifteen, outputs with seven), with plain integer
// division rather than shifts, so that it does not share code with the RTL.
//
// acc  = bias + 2 * sum(x * w)                 (both on a 2^-15 grid)
// act  = relu / leaky (slope 1/8, floor) / none
// y    = saturate(floor(act / 256), width)     (back to a 2^-7 grid)
//
// The counters record how often each arithmetic case occurred, so that a testbench can
// show that it exercised them.
package pointnet_ref_pkg;

  int unsigned n_relu_clip  = 0;  // ReLU set a negative accumulator to zero
  int unsigned n_leaky_neg  = 0;  // leaky ReLU scaled a negative accumulator
  int unsigned n_sat        = 0;  // requantisation clipped a value

  // floor(a / d) for d > 0
  function automatic longint floor_div(longint a, longint d);
    if (a >= 0) return a / d;
    return -((-a + d - 1) / d);
  endfunction

  // act: 0 none, 1 relu, 2 leaky
  function automatic int ref_act(longint acc, int act, int yw);
    longint a = acc;
    longint s, ymax, ymin;
    if (act == 1 && a < 0) begin a = 0; n_relu_clip++; end
    if (act == 2 && a < 0) begin a = floor_div(a, 8); n_leaky_neg++; end
    s    = floor_div(a, 256);
    ymax = (longint'(1) << (yw - 1)) - 1;
    ymin = -(longint'(1) << (yw - 1));
    if (s > ymax) begin s = ymax; n_sat++; end
    if (s < ymin) begin s = ymin; n_sat++; end
    return int'(s);
  endfunction

  // y[o] = act(b[o] + 2 * sum_i x[i] * w[o*nin + i])
  function automatic void ref_layer(input int w[], input int b[], input int x[],
                                    input int nin, input int nout, input int act,
                                    input int yw, output int y[]);
    y = new[nout];
    for (int o = 0; o < nout; o++) begin
      longint acc = longint'(b[o]);
      for (int i = 0; i < nin; i++) acc += 2 * longint'(x[i]) * longint'(w[o * nin + i]);
      y[o] = ref_act(acc, act, yw);
    end
  endfunction

  // average over npts, truncated toward zero
  function automatic int ref_avg(longint sum, int npts);
    return int'(sum / npts);
  endfunction

  // random signed value in [lo, hi]
  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom_range(hi - lo));
  endfunction

endpackage
