// polylut_add_layer -- one layer of a PolyLUT-Add network.
//
// The layer maps N_IN input words of BETA_IN bits to N_OUT output words of
// BETA_OUT bits. Each output neuron (polylut_add_neuron) is built from A
// sub-neurons; every sub-neuron reads only F of the N_IN inputs (F << N_IN),
// chosen at random and independently for each of the A sub-neurons, so the
// neuron as a whole sees A*F inputs. This sparse wiring is fixed at
// elaboration (polylut_add_pkg::conn_index) and costs only wires.
// An input word that no sub-neuron happens to pick is left unconnected;
// lint reports those bits of x as unused, which is expected of random
// sparse wiring.
//
// Interface: x holds input word i in bits [i*BETA_IN +: BETA_IN]; y holds
// output word n in bits [n*BETA_OUT +: BETA_OUT]. in_valid/out_valid mark
// which cycles carry a sample.
//
// Timing: fully pipelined, one new sample per cycle. Latency is 1 cycle with
// PIPE_STRATEGY 2 (one register after the combined Poly and Adder layers)
// and 2 cycles with PIPE_STRATEGY 1 (a register after each of them), the two
// strategies the paper compares. The valid flag travels through a shift
// register of that length, cleared by the synchronous active-low reset; the
// valid flag and its reset are this design's additions, the paper's layers
// carry data only.
module polylut_add_layer
  import polylut_add_pkg::*;
#(
  parameter int unsigned N_IN          = 16,
  parameter int unsigned N_OUT         = 64,
  parameter int unsigned BETA_IN       = 3,
  parameter int unsigned BETA_OUT      = 3,
  parameter int unsigned F             = 2,
  parameter int unsigned A             = 2,
  parameter int unsigned D             = 3,
  parameter int unsigned PIPE_STRATEGY = PIPE_COMBINED,
  parameter int unsigned SEED          = 1,
  parameter int unsigned LAYER_ID      = 0
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic [N_IN*BETA_IN-1:0]   x,
  output logic                      out_valid,
  output logic [N_OUT*BETA_OUT-1:0] y
);

  localparam int unsigned LATENCY = (PIPE_STRATEGY == PIPE_SEPARATE) ? 2 : 1;

  if (F > N_IN) begin : g_bad_fanin
    $error("fan-in F exceeds the number of layer inputs");
  end
  if (N_IN > MAX_LAYER_INPUTS) begin : g_bad_nin
    $error("N_IN exceeds polylut_add_pkg::MAX_LAYER_INPUTS");
  end

  for (genvar n = 0; n < N_OUT; n++) begin : g_neuron
    logic [A*F*BETA_IN-1:0] gathered;

    for (genvar a = 0; a < A; a++) begin : g_sub
      for (genvar k = 0; k < F; k++) begin : g_in
        localparam int unsigned SRC = conn_index(SEED, LAYER_ID, n, a, k, N_IN);
        assign gathered[(a*F + k)*BETA_IN +: BETA_IN] = x[SRC*BETA_IN +: BETA_IN];
      end
    end

    polylut_add_neuron #(
      .BETA_IN      (BETA_IN),
      .BETA_OUT     (BETA_OUT),
      .F            (F),
      .A            (A),
      .D            (D),
      .PIPE_STRATEGY(PIPE_STRATEGY),
      .SEED         (SEED),
      .LAYER_ID     (LAYER_ID),
      .NEURON_ID    (n)
    ) u_neuron (
      .clk(clk),
      .x  (gathered),
      .y  (y[n*BETA_OUT +: BETA_OUT])
    );
  end

  logic [LATENCY-1:0] valid_sr;

  always_ff @(posedge clk) begin
    if (!rst_n) valid_sr <= '0;
    else valid_sr <= LATENCY'({valid_sr, in_valid});  // shift in at bit 0
  end

  assign out_valid = valid_sr[LATENCY-1];

  // A sample entering the layer leaves it exactly LATENCY cycles later.
  a_latency : assert property (@(posedge clk) disable iff (!rst_n)
                               in_valid |-> ##LATENCY out_valid);

endmodule
