// polylut_add_net -- a complete PolyLUT-Add network (top level).
//
// A feed-forward network whose every neuron is a handful of truth tables.
// NUM_LAYERS polylut_add_layer instances are chained: layer l takes
// LAYER_SIZE[l] words of LAYER_BETA[l] bits and produces LAYER_SIZE[l+1]
// words of LAYER_BETA[l+1] bits, each output neuron combining A sub-neurons
// of fan-in LAYER_FANIN[l] and polynomial degree D.
//
// Defaults: the JSC-M Lite-Add2 model of the paper (jet substructure
// classification): 16 input features, layers of 64, 32 and 5 neurons,
// beta = 3 bits per word, F = 2, D = 3, A = 2, pipeline strategy 2. The
// input layer is assumed to take 3-bit features as well, since the paper
// lists no separate input word length for this model.
//
// Interface: in_x holds input feature i in bits [i*LAYER_BETA[0] +:
// LAYER_BETA[0]], already quantised to integer codes; out_y holds output
// class score j in bits [j*LAYER_BETA[NUM_LAYERS] +: ...]. in_valid and
// out_valid flag the cycles that carry a sample; rst_n is a synchronous,
// active-low reset that clears only the valid flags.
//
// Timing: fully pipelined, a new sample every cycle. Latency is NUM_LAYERS
// cycles with PIPE_STRATEGY 2 and 2*NUM_LAYERS cycles with PIPE_STRATEGY 1
// (3 and 6 cycles for the defaults, as the paper reports for this model).
//
// The table contents come from polylut_add_pkg, a deterministic stand-in for
// trained weights selected by SEED; the structure is the paper's.
module polylut_add_net
  import polylut_add_pkg::*;
#(
  parameter int unsigned NUM_LAYERS                  = 3,
  parameter int unsigned LAYER_SIZE  [NUM_LAYERS+1]  = '{16, 64, 32, 5},
  parameter int unsigned LAYER_BETA  [NUM_LAYERS+1]  = '{3, 3, 3, 3},
  parameter int unsigned LAYER_FANIN [NUM_LAYERS]    = '{2, 2, 2},
  parameter int unsigned A                           = 2,
  parameter int unsigned D                           = 3,
  parameter int unsigned PIPE_STRATEGY               = PIPE_COMBINED,
  parameter int unsigned SEED                        = 1
) (
  input  logic                                                  clk,
  input  logic                                                  rst_n,
  input  logic                                                  in_valid,
  input  logic [LAYER_SIZE[0]*LAYER_BETA[0]-1:0]                in_x,
  output logic                                                  out_valid,
  output logic [LAYER_SIZE[NUM_LAYERS]*LAYER_BETA[NUM_LAYERS]-1:0] out_y
);

  for (genvar l = 0; l < NUM_LAYERS; l++) begin : g_layer
    logic [LAYER_SIZE[l]*LAYER_BETA[l]-1:0]     x;
    logic [LAYER_SIZE[l+1]*LAYER_BETA[l+1]-1:0] y;
    logic                                       v_in;
    logic                                       v_out;

    if (l == 0) begin : g_first
      assign x    = in_x;
      assign v_in = in_valid;
    end else begin : g_next
      assign x    = g_layer[l-1].y;
      assign v_in = g_layer[l-1].v_out;
    end

    polylut_add_layer #(
      .N_IN         (LAYER_SIZE[l]),
      .N_OUT        (LAYER_SIZE[l+1]),
      .BETA_IN      (LAYER_BETA[l]),
      .BETA_OUT     (LAYER_BETA[l+1]),
      .F            (LAYER_FANIN[l]),
      .A            (A),
      .D            (D),
      .PIPE_STRATEGY(PIPE_STRATEGY),
      .SEED         (SEED),
      .LAYER_ID     (l)
    ) u_layer (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (v_in),
      .x        (x),
      .out_valid(v_out),
      .y        (y)
    );
  end

  assign out_y     = g_layer[NUM_LAYERS-1].y;
  assign out_valid = g_layer[NUM_LAYERS-1].v_out;

endmodule
