// polylut_add_pkg -- constants and elaboration-time helpers shared by the
// PolyLUT-Add network.
//
// A PolyLUT-Add network holds no arithmetic in hardware: every neuron is a
// set of truth tables whose contents are fixed when the design is built.
// This package holds the small functions that the neuron modules call while
// they elaborate those tables:
//   * mix/param_hash  -- a deterministic 32-bit hash. It stands in for the
//     trained model: weights, biases, batch-norm constants and the random
//     sparse connectivity are all drawn from it, keyed by a seed and by the
//     position (layer, neuron, sub-neuron, index) they belong to.
//   * poly_weight / bn_gain / bn_offset -- the stand-in model parameters.
//   * conn_index -- the k-th of F distinct inputs picked for a sub-neuron.
//   * ipow / clamp -- integer helpers.
// Replacing these functions by tables exported from a trained model turns
// the same RTL into that model; nothing else in the design changes.
// None of this is hardware: it only runs while the design elaborates.
package polylut_add_pkg;

  // Kinds of pseudo-random model parameter, used as hash keys.
  typedef enum int unsigned {
    K_WEIGHT = 32'h1,
    K_BIAS   = 32'h2,
    K_CONN   = 32'h3,
    K_GAIN   = 32'h4,
    K_OFFSET = 32'h5
  } param_kind_e;

  // Pipeline strategies of the paper: 1 = a register after the Poly layer
  // and after the Adder layer, 2 = one register after both.
  typedef enum int unsigned {
    PIPE_SEPARATE = 1,
    PIPE_COMBINED = 2
  } pipe_strategy_e;

  // Quantiser of a sub-neuron: z = (acc - zero) >>> shift, saturated.
  typedef struct packed {
    logic signed [31:0] zero;
    logic        [31:0] shift;
  } quant_t;

  // Largest previous-layer size that conn_index can draw from.
  localparam int unsigned MAX_LAYER_INPUTS = 1024;
  // Weights and biases are drawn from [-W_RANGE, W_RANGE].
  localparam int W_RANGE = 7;

  // 32-bit integer finaliser (xorshift-multiply).
  function automatic int unsigned mix(input int unsigned a);
    int unsigned v;
    v = a;
    v = v ^ (v >> 16);
    v = v * 32'h7feb_352d;
    v = v ^ (v >> 15);
    v = v * 32'h846c_a68b;
    v = v ^ (v >> 16);
    return v;
  endfunction

  function automatic int unsigned param_hash(input int unsigned seed,
                                             input param_kind_e kind,
                                             input int unsigned layer,
                                             input int unsigned neuron,
                                             input int unsigned sub,
                                             input int unsigned idx);
    int unsigned h;
    h = mix(seed ^ 32'h9e37_79b9);
    h = mix(h ^ int'(kind));
    h = mix(h ^ layer);
    h = mix(h ^ neuron);
    h = mix(h ^ sub);
    h = mix(h ^ idx);
    return h;
  endfunction

  // Weight of monomial `idx` of sub-neuron (layer, neuron, sub).
  function automatic int poly_weight(input int unsigned seed, input int unsigned layer,
                                     input int unsigned neuron, input int unsigned sub,
                                     input int unsigned idx);
    return int'(param_hash(seed, K_WEIGHT, layer, neuron, sub, idx)
                % (2 * W_RANGE + 1)) - W_RANGE;
  endfunction

  function automatic int poly_bias(input int unsigned seed, input int unsigned layer,
                                   input int unsigned neuron, input int unsigned sub);
    return int'(param_hash(seed, K_BIAS, layer, neuron, sub, 0)
                % (2 * W_RANGE + 1)) - W_RANGE;
  endfunction

  // Folded batch-norm of the Adder layer: t = gain * sum + offset.
  // gain is in 1..4, offset in [-2^beta, 2^beta].
  function automatic int bn_gain(input int unsigned seed, input int unsigned layer,
                                 input int unsigned neuron);
    return int'(param_hash(seed, K_GAIN, layer, neuron, 0, 0) % 4) + 1;
  endfunction

  function automatic int bn_offset(input int unsigned seed, input int unsigned layer,
                                   input int unsigned neuron, input int unsigned beta);
    return int'(param_hash(seed, K_OFFSET, layer, neuron, 0, 0)
                % ((2 << beta) + 1)) - (1 << beta);
  endfunction

  // Index (0..n_in-1) of the k-th input of a sub-neuron. The F inputs of one
  // sub-neuron are distinct: a hashed pick that collides with an earlier one
  // moves on to the next free index.
  function automatic int unsigned conn_index(input int unsigned seed, input int unsigned layer,
                                             input int unsigned neuron, input int unsigned sub,
                                             input int unsigned k, input int unsigned n_in);
    logic [MAX_LAYER_INPUTS-1:0] used;
    int unsigned pick;
    used = '0;
    pick = 0;
    for (int unsigned j = 0; j <= k; j++) begin
      pick = param_hash(seed, K_CONN, layer, neuron, sub, j) % n_in;
      while (used[pick]) pick = (pick + 1) % n_in;
      used[pick] = 1'b1;
    end
    return pick;
  endfunction

  function automatic int ipow(input int base, input int unsigned e);
    int r;
    r = 1;
    for (int unsigned i = 0; i < e; i++) r = r * base;
    return r;
  endfunction

  function automatic int clamp(input int v, input int lo, input int hi);
    return (v < lo) ? lo : ((v > hi) ? hi : v);
  endfunction

endpackage
