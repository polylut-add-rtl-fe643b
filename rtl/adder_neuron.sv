// adder_neuron -- the Adder-layer part of a PolyLUT-Add neuron.
//
// Function: y = QuantReLU( BN( z_0 + z_1 + ... + z_{A-1} ) ), where the z_a
// are the signed BETA+1-bit outputs of the neuron's A sub-neurons and y is
// the neuron's unsigned BETA-bit output word for the next layer.
//
// How: like the sub-neurons, the whole function is enumerated at
// elaboration into a truth table, here of 2^(A*(BETA+1)) entries of BETA
// bits; z_a occupies address bits [a*(BETA+1) +: BETA+1]. The hardware is a
// single lookup: the sum, the batch norm and the activation cost no adders.
//
// Timing: combinational, no clock.
//
// From the paper: the A-input sum, batch normalisation after the sum, the
// quantised activation, the table size 2^(A(beta+1)) and the output being
// one bit narrower than the sum inputs.
// This design's own choices: batch norm is folded to an integer affine map
// t = g*sum + c with g and c taken from polylut_add_pkg (stand-ins for
// trained values); the activation is a ReLU quantiser that shifts t right by
// the smallest amount that brings the largest possible t into the BETA-bit
// range and saturates to [0, 2^BETA-1].
module adder_neuron
  import polylut_add_pkg::*;
#(
  parameter int unsigned BETA      = 3,
  parameter int unsigned A         = 2,
  parameter int unsigned SEED      = 1,
  parameter int unsigned LAYER_ID  = 0,
  parameter int unsigned NEURON_ID = 0
) (
  input  logic [A*(BETA+1)-1:0] z,
  output logic [BETA-1:0]       y
);

  localparam int unsigned Z_BITS  = BETA + 1;
  localparam int unsigned IN_BITS = A * Z_BITS;
  localparam int unsigned ENTRIES = 2 ** IN_BITS;
  localparam int          Y_MAX   = (1 << BETA) - 1;
  localparam int          Z_MAX   = (1 << BETA) - 1;
  localparam int          GAIN    = bn_gain(SEED, LAYER_ID, NEURON_ID);
  localparam int          OFFSET  = bn_offset(SEED, LAYER_ID, NEURON_ID, BETA);

  // Batch-normalised sum for table address e.
  function automatic int bn_sum(input int unsigned e);
    int          s;
    int unsigned field;
    s = 0;
    for (int unsigned a = 0; a < A; a++) begin
      field = (e >> (a * Z_BITS)) & ((1 << Z_BITS) - 1);
      // sign-extend the BETA+1-bit field
      s = s + ((field >= (1 << BETA)) ? int'(field) - (1 << Z_BITS) : int'(field));
    end
    return GAIN * s + OFFSET;
  endfunction

  // Smallest right shift that brings the largest reachable value into range.
  function automatic int unsigned act_shift();
    int          tmax;
    int unsigned s;
    tmax = GAIN * int'(A) * Z_MAX + OFFSET;
    s = 0;
    while ((tmax >>> s) > Y_MAX) s = s + 1;
    return s;
  endfunction

  localparam int unsigned SHIFT = act_shift();

  function automatic logic [ENTRIES*BETA-1:0] build_table();
    logic [ENTRIES*BETA-1:0] t;
    t = '0;
    for (int unsigned e = 0; e < ENTRIES; e++) begin
      t[e*BETA +: BETA] = BETA'(clamp(bn_sum(e) >>> SHIFT, 0, Y_MAX));
    end
    return t;
  endfunction

  localparam logic [ENTRIES*BETA-1:0] TABLE = build_table();

  truth_table #(
    .IN_BITS (IN_BITS),
    .OUT_BITS(BETA),
    .TABLE   (TABLE)
  ) u_table (
    .addr(z),
    .data(y)
  );

endmodule
