// nn_ref_pkg: a plain behavioural reference of the network, used by the
// testbenches to compute expected outputs independently of the RTL.
//
// It walks the weight image with ordinary loops and 64-bit integers:
// y[j] = relu(((sum_i W[j][i]*x[i]) >>> FRAC) + b[j]) per layer, the mean of
// the K neighbour encodings by integer division, and
// f = (clip(a, -1, 1) + 1) >>> 1. It also has small helpers to make random
// weight images and observations.
package nn_ref_pkg;
  import nn_pkg::*;

  typedef int ivec_t[];

  function automatic ivec_t ref_layer(const ref int w[], input int base,
                                      input ivec_t x, input int in_len,
                                      input int out_len, input bit relu);
    ivec_t y = new[out_len];
    for (int j = 0; j < out_len; j++) begin
      longint acc = 0;
      int v;
      for (int i = 0; i < in_len; i++)
        acc += longint'(w[base + j*in_len + i]) * longint'(x[i]);
      v = int'(acc >>> FRAC_BITS) + w[base + out_len*in_len + j];
      if (relu && v < 0) v = 0;
      y[j] = v;
    end
    return y;
  endfunction

  function automatic int ref_thrust(input int a);
    int one = 1 << FRAC_BITS;
    int c = (a > one) ? one : (a < -one) ? -one : a;
    return (c + one) >>> 1;
  endfunction

  // obs: o^q followed by K neighbour observations; result: a[0..3], f[0..3]
  function automatic ivec_t ref_forward(const ref int w[], input ivec_t obs, input int k);
    ivec_t xq, h, eq, xn, b1, b2, e, hh, a, res;
    longint sum[B_HID];
    xq = new[SELF_OBS];
    for (int i = 0; i < SELF_OBS; i++) xq[i] = obs[i];
    h  = ref_layer(w, W_EQ1, xq, SELF_OBS, EQ_HID, 1);
    eq = ref_layer(w, W_EQ2, h, EQ_HID, EQ_HID, 1);
    for (int j = 0; j < B_HID; j++) sum[j] = 0;
    for (int l = 0; l < k; l++) begin
      xn = new[NB_OBS];
      for (int i = 0; i < NB_OBS; i++) xn[i] = obs[SELF_OBS + l*NB_OBS + i];
      b1 = ref_layer(w, W_B1, xn, NB_OBS, B_HID, 1);
      b2 = ref_layer(w, W_B2, b1, B_HID, B_HID, 1);
      for (int j = 0; j < B_HID; j++) sum[j] += b2[j];
    end
    e = new[E_LEN];
    for (int j = 0; j < EQ_HID; j++) e[j] = eq[j];
    for (int j = 0; j < B_HID; j++)  e[EQ_HID + j] = int'(sum[j] / longint'(k));
    hh = ref_layer(w, W_H1, e, E_LEN, H_HID, 1);
    a  = ref_layer(w, W_H2, hh, H_HID, N_ACT, 0);
    res = new[2*N_ACT];
    for (int j = 0; j < N_ACT; j++) begin
      res[j] = a[j];
      res[N_ACT + j] = ref_thrust(a[j]);
    end
    return res;
  endfunction

  // uniform random integer in [-mag, mag]
  function automatic int rnd(input int mag);
    return int'($urandom_range(2*mag)) - mag;
  endfunction
endpackage
