// polylut_add_neuron -- one PolyLUT-Add neuron with its pipeline register(s).
//
// A PolyLUT-Add neuron widens a PolyLUT neuron's fan-in from F to A*F
// without growing any table exponentially: A sub-neurons (poly_sub_neuron),
// each a table of 2^(BETA_IN*F) entries over its own F inputs, produce
// BETA_OUT+1-bit partial results z_a, and one adder neuron (adder_neuron), a
// table of 2^(A*(BETA_OUT+1)) entries, sums them, applies batch norm and the
// quantised activation. The tables grow as A*2^(beta*F) + 2^(A(beta+1))
// instead of the 2^(beta*F*A) a single table over all A*F inputs would need.
//
// Interface: x carries the A*F input words already gathered by the layer,
// sub-neuron a reading words [a*F, a*F+F); y is the BETA_OUT-bit output.
//
// Timing (PIPE_STRATEGY, as in the paper):
//   2 (combined) -- one register, after the adder neuron: latency 1 cycle.
//   1 (separate) -- a register after the sub-neurons and another after the
//                   adder neuron: latency 2 cycles, shorter critical path.
// The registers load every cycle and have no reset (the data path carries
// no state beyond them); validity is tracked by the layer.
module polylut_add_neuron
  import polylut_add_pkg::*;
#(
  parameter int unsigned BETA_IN       = 3,
  parameter int unsigned BETA_OUT      = 3,
  parameter int unsigned F             = 2,
  parameter int unsigned A             = 2,
  parameter int unsigned D             = 3,
  parameter int unsigned PIPE_STRATEGY = PIPE_COMBINED,
  parameter int unsigned SEED          = 1,
  parameter int unsigned LAYER_ID      = 0,
  parameter int unsigned NEURON_ID     = 0
) (
  input  logic                      clk,
  input  logic [A*F*BETA_IN-1:0]    x,
  output logic [BETA_OUT-1:0]       y
);

  localparam int unsigned Z_BITS = BETA_OUT + 1;

  logic [A*Z_BITS-1:0] z_comb;   // sub-neuron outputs, packed
  logic [A*Z_BITS-1:0] z_add;    // what the adder neuron sees
  logic [BETA_OUT-1:0] y_comb;

  for (genvar a = 0; a < A; a++) begin : g_sub
    poly_sub_neuron #(
      .BETA_IN  (BETA_IN),
      .BETA_OUT (BETA_OUT),
      .F        (F),
      .D        (D),
      .SEED     (SEED),
      .LAYER_ID (LAYER_ID),
      .NEURON_ID(NEURON_ID),
      .SUB_ID   (a)
    ) u_sub (
      .x(x[a*F*BETA_IN +: F*BETA_IN]),
      .z(z_comb[a*Z_BITS +: Z_BITS])
    );
  end

  if (PIPE_STRATEGY == PIPE_SEPARATE) begin : g_poly_reg
    logic [A*Z_BITS-1:0] z_q;
    always_ff @(posedge clk) z_q <= z_comb;
    assign z_add = z_q;
  end else begin : g_poly_comb
    assign z_add = z_comb;
  end

  adder_neuron #(
    .BETA     (BETA_OUT),
    .A        (A),
    .SEED     (SEED),
    .LAYER_ID (LAYER_ID),
    .NEURON_ID(NEURON_ID)
  ) u_adder (
    .z(z_add),
    .y(y_comb)
  );

  always_ff @(posedge clk) y <= y_comb;

  if (PIPE_STRATEGY != PIPE_SEPARATE && PIPE_STRATEGY != PIPE_COMBINED) begin : g_bad_strategy
    $error("PIPE_STRATEGY must be 1 (separate) or 2 (combined)");
  end

endmodule
