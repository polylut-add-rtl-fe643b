// poly_sub_neuron -- one PolyLUT sub-neuron of a PolyLUT-Add neuron.
//
// Function: z = Quant( sum_{i<M} w_i * m_i(x) + b ), where x = (x_0..x_{F-1})
// are F input words of BETA_IN bits and m_i runs over the M = C(F+D, D)
// monomials of degree at most D in those F variables. There is no batch
// normalisation here: in PolyLUT-Add it moves behind the adder. The result
// is quantised to BETA_OUT+1 bits, one bit wider than the layer's output
// words, so that the later sum of A sub-neurons cannot overflow.
//
// How: the whole function is enumerated at elaboration into a truth table of
// 2^(BETA_IN*F) entries of BETA_OUT+1 bits (a truth_table instance), so the
// hardware is a pure lookup with no arithmetic. The F input words are
// concatenated to form the table address, x_k in bits [k*BETA_IN +: BETA_IN].
//
// Timing: combinational, no clock.
//
// From the paper: the polynomial neuron, its table of 2^(beta*F) entries,
// the missing batch norm and the beta+1-bit output.
// This design's own choices: an input code c stands for the fraction
// c/2^BETA_IN, so the table is computed in integers scaled by 2^(BETA_IN*D)
// (a degree-k monomial is multiplied by 2^(BETA_IN*(D-k)), the bias by
// 2^(BETA_IN*D)); the monomials are ordered by a base-(D+1) counter over
// the exponents (x_0's exponent is the lowest digit) and combinations whose
// degree exceeds D are skipped; weights and bias come from polylut_add_pkg
// (a stand-in for trained values); the quantiser subtracts a zero point (the
// middle of the table's value range) and shifts right, arithmetically, by
// the smallest amount that brings every entry into the signed
// BETA_OUT+1-bit range, followed by saturation.
module poly_sub_neuron
  import polylut_add_pkg::*;
#(
  parameter int unsigned BETA_IN   = 3,
  parameter int unsigned BETA_OUT  = 3,
  parameter int unsigned F         = 2,
  parameter int unsigned D         = 3,
  parameter int unsigned SEED      = 1,
  parameter int unsigned LAYER_ID  = 0,
  parameter int unsigned NEURON_ID = 0,
  parameter int unsigned SUB_ID    = 0
) (
  input  logic        [F*BETA_IN-1:0] x,
  output logic signed [BETA_OUT:0]    z
);

  localparam int unsigned IN_BITS = BETA_IN * F;
  localparam int unsigned Z_BITS  = BETA_OUT + 1;
  localparam int unsigned ENTRIES = 2 ** IN_BITS;
  localparam int          Z_MAX   = (1 << BETA_OUT) - 1;
  localparam int          Z_MIN   = -(1 << BETA_OUT);

  // Digit k of c in base D+1: the exponent of x_k in monomial candidate c.
  function automatic int unsigned exp_of(input int unsigned c, input int unsigned k);
    return (c / ((D + 1) ** k)) % (D + 1);
  endfunction

  function automatic int unsigned degree_of(input int unsigned c);
    int unsigned deg;
    deg = 0;
    for (int unsigned k = 0; k < F; k++) deg = deg + exp_of(c, k);
    return deg;
  endfunction

  // Number of monomials of degree <= D in F variables, C(F+D, D).
  function automatic int unsigned count_monomials();
    int unsigned n;
    n = 0;
    for (int unsigned c = 0; c < (D + 1) ** F; c++) if (degree_of(c) <= D) n = n + 1;
    return n;
  endfunction

  localparam int unsigned M = count_monomials();

  // Exponent vector of each monomial, 8 bits per variable, in the order of
  // a base-(D+1) counter (x_0's exponent is the lowest digit).
  function automatic logic [M*F*8-1:0] monomial_exponents();
    logic [M*F*8-1:0] ex;
    int unsigned mi;
    ex = '0;
    mi = 0;
    for (int unsigned c = 0; c < (D + 1) ** F; c++) begin
      if (degree_of(c) <= D) begin
        for (int unsigned k = 0; k < F; k++) ex[(mi*F + k)*8 +: 8] = 8'(exp_of(c, k));
        mi = mi + 1;
      end
    end
    return ex;
  endfunction

  // Weight of each monomial, pre-scaled to the common scale 2^-(BETA_IN*D):
  // inputs are fractions x/2^BETA_IN, so a degree-k monomial is multiplied
  // by 2^(BETA_IN*(D-k)).
  function automatic logic [M*32-1:0] scaled_weights();
    logic [M*32-1:0] w;
    int unsigned mi;
    w  = '0;
    mi = 0;
    for (int unsigned c = 0; c < (D + 1) ** F; c++) begin
      if (degree_of(c) <= D) begin
        w[mi*32 +: 32] = poly_weight(SEED, LAYER_ID, NEURON_ID, SUB_ID, mi)
                         << (BETA_IN * (D - degree_of(c)));
        mi = mi + 1;
      end
    end
    return w;
  endfunction

  localparam logic [M*F*8-1:0] EXPS    = monomial_exponents();
  localparam logic [M*32-1:0]  WEIGHTS = scaled_weights();
  localparam int               BIAS    = poly_bias(SEED, LAYER_ID, NEURON_ID, SUB_ID)
                                         << (BETA_IN * D);

  // Pre-quantisation value of the polynomial for table address e.
  function automatic int poly_acc(input int unsigned e);
    int acc;
    int term;
    acc = BIAS;
    for (int unsigned mi = 0; mi < M; mi++) begin
      term = int'(WEIGHTS[mi*32 +: 32]);
      for (int unsigned k = 0; k < F; k++)
        term = term * ipow(int'((e >> (k * BETA_IN)) & ((1 << BETA_IN) - 1)),
                           EXPS[(mi*F + k)*8 +: 8]);
      acc = acc + term;
    end
    return acc;
  endfunction

  // Zero point (middle of the range of values) and smallest right shift
  // that map every table entry into [Z_MIN, Z_MAX].
  function automatic quant_t quant_params();
    int     v;
    int     vmax;
    int     vmin;
    quant_t q;
    vmax = poly_acc(0);
    vmin = vmax;
    for (int unsigned e = 1; e < ENTRIES; e++) begin
      v = poly_acc(e);
      if (v > vmax) vmax = v;
      if (v < vmin) vmin = v;
    end
    q.zero  = (vmax + vmin) >>> 1;
    q.shift = 0;
    while (((vmax - q.zero) >>> q.shift) > Z_MAX || ((vmin - q.zero) >>> q.shift) < Z_MIN)
      q.shift = q.shift + 1;
    return q;
  endfunction

  function automatic logic [ENTRIES*Z_BITS-1:0] build_table();
    logic [ENTRIES*Z_BITS-1:0] t;
    quant_t q;
    q = quant_params();
    t = '0;
    for (int unsigned e = 0; e < ENTRIES; e++) begin
      t[e*Z_BITS +: Z_BITS] =
          Z_BITS'(clamp((poly_acc(e) - q.zero) >>> q.shift, Z_MIN, Z_MAX));
    end
    return t;
  endfunction

  localparam logic [ENTRIES*Z_BITS-1:0] TABLE = build_table();

  logic [Z_BITS-1:0] z_raw;

  truth_table #(
    .IN_BITS (IN_BITS),
    .OUT_BITS(Z_BITS),
    .TABLE   (TABLE)
  ) u_table (
    .addr(x),
    .data(z_raw)
  );

  assign z = $signed(z_raw);

endmodule
