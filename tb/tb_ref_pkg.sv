// tb_ref_pkg -- behavioural reference model of a PolyLUT-Add network, used
// by the testbenches to compute expected outputs.
//
// It evaluates each neuron's arithmetic directly, sample by sample (the
// polynomial, the quantiser's zero point and scale search, the sum, batch norm and ReLU
// quantiser), instead of building truth tables as the RTL does. It shares
// with the RTL only the model parameters themselves (weights, biases,
// batch-norm constants, connectivity), which it reads from polylut_add_pkg.
// Arrays are fixed-size: F <= 16, A <= 4, layer sizes <= 1024.
package tb_ref_pkg;
  import polylut_add_pkg::*;

  localparam int MAXF = 16;
  localparam int MAXA = 4;
  localparam int MAXN = 1024;

  typedef int vec_t [MAXN];

  // Counters of quantiser saturation seen by adder_out (for coverage).
  int unsigned n_relu_zero = 0;
  int unsigned n_relu_max  = 0;

  // Raw polynomial of a sub-neuron: bias + sum over monomials of degree <= d.
  // An input code c stands for the fraction c/2^beta_in; the result is the
  // polynomial's value scaled by 2^(beta_in*d).
  function automatic int sub_raw(int unsigned seed, int unsigned layer, int unsigned neuron,
                                 int unsigned sub, int unsigned beta_in, int unsigned f,
                                 int unsigned d, int x [MAXF]);
    int unsigned ex [MAXF];
    int unsigned deg;
    int unsigned mi;
    int unsigned k;
    int acc;
    int prod;
    for (int i = 0; i < MAXF; i++) ex[i] = 0;
    acc = poly_bias(seed, layer, neuron, sub) * (1 << (beta_in * d));
    mi  = 0;
    forever begin
      deg  = 0;
      prod = 1;
      for (int i = 0; i < int'(f); i++) begin
        deg = deg + ex[i];
        for (int j = 0; j < int'(ex[i]); j++) prod = prod * x[i];
      end
      if (deg <= d) begin
        for (int j = 0; j < int'(d - deg); j++) prod = prod * (1 << beta_in);
        acc = acc + poly_weight(seed, layer, neuron, sub, mi) * prod;
        mi++;
      end
      k = 0;
      while (k < f && ex[k] == d) begin
        ex[k] = 0;
        k++;
      end
      if (k == f) break;
      ex[k]++;
    end
    return acc;
  endfunction

  int shift_memo [longint];
  int zero_memo  [longint];

  // Quantiser of a sub-neuron: zero point = middle of the range of raw values
  // over all input combinations; shift = the smallest s for which every
  // (raw - zero) >>> s is a signed beta_out+1 bit number. Memoised.
  function automatic void sub_quant(int unsigned seed, int unsigned layer, int unsigned neuron,
                                    int unsigned sub, int unsigned beta_in, int unsigned beta_out,
                                    int unsigned f, int unsigned d, output int zero,
                                    output int shift);
    longint key;
    int x [MAXF];
    int v;
    int vmax;
    int vmin;
    key = ((longint'(layer) * 65536 + longint'(neuron)) * 16 + longint'(sub)) * 4096 + longint'(seed);
    if (!shift_memo.exists(key)) begin
      for (int i = 0; i < MAXF; i++) x[i] = 0;
      vmax = -(1 << 30);
      vmin = (1 << 30);
      for (longint code = 0; code < (longint'(1) << (beta_in * f)); code++) begin
        for (int i = 0; i < int'(f); i++) x[i] = int'((code >> (i * beta_in)) % (1 << beta_in));
        v = sub_raw(seed, layer, neuron, sub, beta_in, f, d, x);
        vmax = (v > vmax) ? v : vmax;
        vmin = (v < vmin) ? v : vmin;
      end
      zero = (vmax + vmin) >>> 1;
      shift = 0;
      while (((vmax - zero) >>> shift) >= (1 << beta_out) ||
             ((vmin - zero) >>> shift) < -(1 << beta_out)) shift++;
      shift_memo[key] = shift;
      zero_memo[key]  = zero;
    end
    zero  = zero_memo[key];
    shift = shift_memo[key];
  endfunction

  function automatic int sub_out(int unsigned seed, int unsigned layer, int unsigned neuron,
                                 int unsigned sub, int unsigned beta_in, int unsigned beta_out,
                                 int unsigned f, int unsigned d, int x [MAXF]);
    int v;
    int zero;
    int shift;
    sub_quant(seed, layer, neuron, sub, beta_in, beta_out, f, d, zero, shift);
    v = (sub_raw(seed, layer, neuron, sub, beta_in, f, d, x) - zero) >>> shift;
    if (v > (1 << beta_out) - 1) v = (1 << beta_out) - 1;
    if (v < -(1 << beta_out)) v = -(1 << beta_out);
    return v;
  endfunction

  function automatic int adder_out(int unsigned seed, int unsigned layer, int unsigned neuron,
                                   int unsigned beta, int unsigned a_cnt, int z [MAXA]);
    int sum;
    int g;
    int c;
    int t;
    int tmax;
    int s;
    int y;
    sum = 0;
    for (int a = 0; a < int'(a_cnt); a++) sum += z[a];
    g    = bn_gain(seed, layer, neuron);
    c    = bn_offset(seed, layer, neuron, beta);
    t    = g * sum + c;
    tmax = g * int'(a_cnt) * ((1 << beta) - 1) + c;
    s    = 0;
    while ((tmax >>> s) > (1 << beta) - 1) s++;
    y = t >>> s;
    if (y < 0) begin
      y = 0;
      n_relu_zero++;
    end
    if (y > (1 << beta) - 1) begin
      y = (1 << beta) - 1;
      n_relu_max++;
    end
    return y;
  endfunction

  // One neuron: gather inputs through the sparse connectivity, evaluate the
  // A sub-neurons and the adder.
  function automatic int neuron_out(int unsigned seed, int unsigned layer, int unsigned neuron,
                                    int unsigned n_in, int unsigned beta_in,
                                    int unsigned beta_out, int unsigned f, int unsigned a_cnt,
                                    int unsigned d, const ref vec_t act);
    int x [MAXF];
    int z [MAXA];
    for (int i = 0; i < MAXF; i++) x[i] = 0;
    for (int i = 0; i < MAXA; i++) z[i] = 0;
    for (int a = 0; a < int'(a_cnt); a++) begin
      for (int k = 0; k < int'(f); k++) x[k] = act[conn_index(seed, layer, neuron, a, k, n_in)];
      z[a] = sub_out(seed, layer, neuron, a, beta_in, beta_out, f, d, x);
    end
    return adder_out(seed, layer, neuron, beta_out, a_cnt, z);
  endfunction

  function automatic void layer_out(int unsigned seed, int unsigned layer, int unsigned n_in,
                                    int unsigned n_out, int unsigned beta_in,
                                    int unsigned beta_out, int unsigned f, int unsigned a_cnt,
                                    int unsigned d, const ref vec_t act_in, ref vec_t act_out);
    for (int n = 0; n < int'(n_out); n++)
      act_out[n] = neuron_out(seed, layer, n, n_in, beta_in, beta_out, f, a_cnt, d, act_in);
  endfunction

endpackage
