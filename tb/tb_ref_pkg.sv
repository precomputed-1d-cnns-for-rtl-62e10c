// tb_ref_pkg: behavioural reference of the precomputed network, used by the
// testbenches to compute expected results without the truth tables.
//
// Every layer is evaluated from its integer weights directly
// (pcnn_pkg::weight), not by table lookup: a binarized grouped convolution
// sums +w or -w per input bit and compares with zero, max pooling takes the
// OR (or the AND for sign-inverted channels) of a window, and the output
// layer applies the hard sigmoid. Activations are one 64-bit vector per
// time step, bit c = channel c (1 = +1).
package tb_ref_pkg;

  typedef logic [63:0] vec_t;
  typedef vec_t        seq_t[$];
  typedef int unsigned iseq_t[$];

  // input layer: bin(w_c * (x - 2**(bits-1)) + 256 * b_c)
  function automatic logic ref_input(int unsigned seed, int unsigned c, int x, int unsigned bits);
    int signed w, b;
    w = pcnn_pkg::weight(seed, 0, c, 0);
    if (w == 0) w = 1;
    b = pcnn_pkg::weight(seed, 0, c, pcnn_pkg::BIAS_IDX);
    return (w * (x - (1 << (bits - 1))) + 256 * b) >= 0;
  endfunction

  // one binarized neuron: bin(b + sum_j (x_j ? w_j : -w_j))
  function automatic logic ref_neuron(int unsigned seed, int unsigned layer, int unsigned o,
                                      vec_t x, int unsigned fan);
    int signed z;
    z = pcnn_pkg::weight(seed, layer, o, pcnn_pkg::BIAS_IDX);
    for (int unsigned j = 0; j < fan; j++)
      z += x[j] ? pcnn_pkg::weight(seed, layer, o, j) : -pcnn_pkg::weight(seed, layer, o, j);
    return z >= 0;
  endfunction

  // linear + hard sigmoid
  function automatic int unsigned ref_prob(int unsigned seed, int unsigned layer, vec_t x,
                                           int unsigned n, int unsigned out_w);
    int signed z, q, slope;
    slope = (out_w > 5) ? (1 << (out_w - 5)) : 1;
    z = pcnn_pkg::weight(seed, layer, 0, pcnn_pkg::BIAS_IDX);
    for (int unsigned j = 0; j < n; j++)
      z += x[j] ? pcnn_pkg::weight(seed, layer, 0, j) : -pcnn_pkg::weight(seed, layer, 0, j);
    q = (1 << (out_w - 1)) + z * slope;
    if (q < 0) q = 0;
    if (q > (1 << out_w) - 1) q = (1 << out_w) - 1;
    return q;
  endfunction

  // grouped convolution, stride 1, no padding
  function automatic seq_t ref_conv(int unsigned seed, int unsigned layer, seq_t a,
                                    int unsigned c_in, int unsigned k, int unsigned g,
                                    int unsigned c_out);
    seq_t        r;
    int unsigned s_in, s_out, grp;
    vec_t        x, y;
    s_in  = c_in / g;
    s_out = c_out / g;
    for (int t = 0; t + int'(k) <= a.size(); t++) begin
      y = '0;
      for (int unsigned o = 0; o < c_out; o++) begin
        grp = o / s_out;
        x   = '0;
        for (int unsigned tt = 0; tt < k; tt++)
          for (int unsigned i = 0; i < s_in; i++)
            x[tt*s_in + i] = a[t + tt][grp*s_in + i];
        y[o] = ref_neuron(seed, layer, o, x, k * s_in);
      end
      r.push_back(y);
    end
    return r;
  endfunction

  // binary max pooling with sign inversion of the channels in inv
  function automatic seq_t ref_pool(seq_t a, int unsigned c, int unsigned p, int unsigned s,
                                    vec_t inv);
    seq_t r;
    vec_t y;
    logic any1, all1;
    for (int j = 0; j * int'(s) + int'(p) <= a.size(); j++) begin
      y = '0;
      for (int unsigned ch = 0; ch < c; ch++) begin
        any1 = 1'b0;
        all1 = 1'b1;
        for (int unsigned t = 0; t < p; t++) begin
          any1 |= a[j*s + t][ch];
          all1 &= a[j*s + t][ch];
        end
        y[ch] = inv[ch] ? all1 : any1;
      end
      r.push_back(y);
    end
    return r;
  endfunction

  function automatic vec_t ref_inv(int unsigned seed, int unsigned b, int unsigned c);
    vec_t m;
    m = '0;
    for (int unsigned ch = 0; ch < c; ch++)
      m[ch] = pcnn_pkg::gamma_neg(seed, pcnn_pkg::layer_beta(b), ch);
    return m;
  endfunction

  // Whole network with the default (BIG) structure. inv_events counts the
  // pooled outputs where a sign-inverted channel's AND differs from the OR.
  // network of the given shape: input layer c_in0 channels, first block
  // alpha (c_in0,k=10,ga0,fa0) and beta (fa0,1,gb0,c0), further blocks
  // alpha (c0,6,ga,fa) and beta (fa,1,gb,c0), linear c0 -> 1
  function automatic iseq_t ref_network_cfg(int unsigned seed, iseq_t x,
                                            int unsigned c_in0, int unsigned c0,
                                            int unsigned ga0, int unsigned fa0, int unsigned gb0,
                                            int unsigned ga, int unsigned fa, int unsigned gb,
                                            output int unsigned inv_events);
    seq_t        a, c;
    iseq_t       r;
    vec_t        v, inv;
    int unsigned k, p, s, ci;
    seq_t        plain;
    a = {};
    inv_events = 0;
    foreach (x[t]) begin
      v = '0;
      for (int unsigned ch = 0; ch < c_in0; ch++)
        v[ch] = ref_input(seed, ch, int'(x[t]), pcnn_pkg::SAMPLE_W);
      a.push_back(v);
    end
    for (int unsigned b = 0; b < pcnn_pkg::N_BLOCKS; b++) begin
      k  = (b == 0) ? 10 : 6;
      p  = (b == 0) ? 8 : 3;
      s  = (b == 0) ? 6 : 2;
      ci = (b == 0) ? c_in0 : c0;
      c = ref_conv(seed, pcnn_pkg::layer_alpha(b), a, ci, k, (b == 0) ? ga0 : ga,
                   (b == 0) ? fa0 : fa);
      c = ref_conv(seed, pcnn_pkg::layer_beta(b), c, (b == 0) ? fa0 : fa, 1,
                   (b == 0) ? gb0 : gb, c0);
      inv   = ref_inv(seed, b, c0);
      a     = ref_pool(c, c0, p, s, inv);
      plain = ref_pool(c, c0, p, s, '0);
      foreach (a[j]) if ((a[j] ^ plain[j]) != '0) inv_events++;
    end
    foreach (a[t])
      r.push_back(ref_prob(seed, pcnn_pkg::LAYER_OUT, a[t], c0, pcnn_pkg::PROB_W));
    return r;
  endfunction

  // the main network: 12 channels everywhere, depthwise alpha, dense beta
  function automatic iseq_t ref_network(int unsigned seed, iseq_t x, output int unsigned inv_events);
    return ref_network_cfg(seed, x, pcnn_pkg::N_CH, pcnn_pkg::N_CH, pcnn_pkg::N_CH, pcnn_pkg::N_CH,
                           1, pcnn_pkg::N_CH, pcnn_pkg::N_CH, 1, inv_events);
  endfunction

  // synthetic ECG-like 12-bit signal: baseline wander, a QRS-like spike
  // train with (optionally) irregular RR intervals, and noise
  function automatic iseq_t ecg_signal(int unsigned n, bit irregular, int unsigned seed);
    iseq_t       r;
    int          v, next_beat, rr;
    int unsigned st;
    st        = seed | 1;
    next_beat = 20;
    for (int unsigned t = 0; t < n; t++) begin
      st = st ^ (st << 13); st = st ^ (st >> 17); st = st ^ (st << 5);
      v = 2048 + ((t % 250) < 125 ? int'(t % 250) : 250 - int'(t % 250)) - 60
          + int'(st % 64) - 32;
      if (int'(t) >= next_beat && int'(t) < next_beat + 4) v += 900;
      if (int'(t) == next_beat + 4) begin
        rr = irregular ? 60 + int'(st % 70) : 95;
        next_beat = int'(t) + rr;
      end
      if (v < 0) v = 0;
      if (v > 4095) v = 4095;
      r.push_back(v);
    end
    return r;
  endfunction

endpackage
