# PolyLUT-Add: lookup-table neurons with wide fan-in

A LUT-based neural network computes nothing at run time. Each neuron reads a
few quantised inputs, and its whole transfer function is a truth table. A
neuron with fan-in F and β-bit words needs a table of 2^(β·F) entries per
output bit. So fan-in, which decides accuracy, is capped at a handful of
inputs: every extra input multiplies the table size by 2^β.

PolyLUT-Add widens the fan-in without paying that exponent. A neuron with
fan-in A·F is split into:

* **A sub-neurons.** Each is an ordinary PolyLUT neuron: a polynomial of
  degree D in its own F inputs, held as a table of 2^(β·F) entries. Its
  output is quantised to β+1 bits.
* **One adder neuron.** It adds the A partial results, applies batch
  normalisation and the quantised ReLU, and gives the β-bit neuron output.
  It is again a table, with 2^(A·(β+1)) entries.

The identity behind the split is that a linear sum over A·F inputs equals
the sum of A sums over F inputs. Table size falls from O(2^(β·F·A)) to
O(A·2^(β·F) + 2^(A(β+1))). Take β = 3, F = 2, A = 2 (the default here). A
single table over 4 inputs would need 2^12 entries. The split neuron needs
two tables of 2^6 entries and one of 2^8.

This repository holds synthesizable SystemVerilog for such a network. Every
neuron's tables are computed while the design elaborates. Synthesis then
sees only constant lookup tables, sparse wiring and pipeline registers.

## Network structure

```
 in_x ──► layer 0 ──► layer 1 ──► ... ──► layer L-1 ──► out_y
          (polylut_add_layer, one per layer)

 one layer, one of its N_OUT neurons (polylut_add_neuron):

   previous-layer words (N_IN of them)
     │   fixed random picks: F words for each sub-neuron,
     │   drawn independently for each of the A sub-neurons
     ├──► poly_sub_neuron 0 : table 2^(β_in·F) × (β+1) ──┐ z_0
     ├──► poly_sub_neuron 1 : table 2^(β_in·F) × (β+1) ──┤ z_1   [reg, strategy 1]
     └──► ...                                            ┘
                     adder_neuron : table 2^(A(β+1)) × β ──► [reg] ──► y
```

| module | role |
|---|---|
| `polylut_add_pkg` | shared types; elaboration-time helpers (hash, stand-in model parameters, connectivity) |
| `truth_table` | a combinational table: an address word selects one constant entry |
| `poly_sub_neuron` | computes the polynomial table of one sub-neuron; one `truth_table` |
| `adder_neuron` | computes the sum / batch-norm / ReLU table; one `truth_table` |
| `polylut_add_neuron` | A sub-neurons plus one adder neuron, with the pipeline register(s) |
| `polylut_add_layer` | N_OUT neurons, the sparse input wiring, the valid pipeline |
| `polylut_add_net` | top level: a chain of layers with per-layer sizes and word widths |

## What a table holds

### Sub-neuron (`poly_sub_neuron`)

The F input words x_0..x_{F-1} are concatenated into the table address,
with x_k in bits [k·β_in +: β_in]. For every address the elaborator
computes the following.

1. **Polynomial.** acc = b + Σ w_i·m_i(x) over the M = C(F+D, D) monomials
   of degree at most D. An input code c stands for the fraction c/2^β_in,
   as in a trained quantised network whose activations lie in [0, 1). All
   arithmetic is integer: a degree-k monomial is scaled by 2^(β_in·(D−k))
   and the bias by 2^(β_in·D). Without this scaling the cubic terms would
   swamp everything else.
   - Monomial order: a base-(D+1) counter runs over the exponent vector,
     with x_0's exponent as the lowest digit. Combinations whose degree
     exceeds D are skipped. The i-th surviving combination takes weight w_i.
2. **Quantisation to β_out+1 signed bits.** The elaborator first scans all
   entries for the smallest and largest acc. The zero point is their
   midpoint. The shift is the smallest right shift that puts every
   (acc − zero) into [−2^β_out, 2^β_out − 1]. Each entry is then
   z = sat((acc − zero) >>> shift).

There is no batch norm in the sub-neuron; in PolyLUT-Add it moves behind
the adder. The output is one bit wider than a layer output (β+1), so that
the A-way sum cannot overflow.

### Adder neuron (`adder_neuron`)

The address is the A sub-neuron outputs concatenated, with z_a in bits
[a·(β+1) +: β+1] read as two's complement. Each entry is computed in three
steps.

1. s = Σ z_a.
2. Batch norm folded to an integer affine map: t = g·s + c, with gain g in
   1..4 and offset c in [−2^β, 2^β].
3. Quantised ReLU: y = clip(t >>> q, 0, 2^β − 1). Here q is the smallest
   shift that brings the largest reachable t, g·A·(2^β−1) + c, into β bits.

Because the output is non-negative it needs one bit less than the sum's
inputs. That is why the sub-neurons carry β+1 bits and the layer outputs β.

### Where the weights come from

A real deployment trains the network offline with quantisation-aware
training, then enumerates every neuron's tables from the trained weights.
No trained model ships with this RTL. Every model parameter comes instead
from a deterministic 32-bit hash in `polylut_add_pkg`, keyed by `SEED` and
by position (layer, neuron, sub-neuron, index). The hash gives:

* polynomial weights and biases, integers in [−7, 7] (`poly_weight`,
  `poly_bias`);
* the batch-norm gain and offset (`bn_gain`, `bn_offset`);
* the sparse connectivity (`conn_index`). Each sub-neuron's F inputs are
  distinct. A pick that collides with an earlier one moves on to the next
  free index.

The network is therefore a structurally faithful stand-in, not a trained
classifier. To deploy a trained model, replace these functions with lookups
of the trained values. The zero-point and shift search of the quantisers
likewise stands in for trained quantiser scales. The structure, table
sizes, wiring pattern and timing do not change.

## Pipelining and timing

Every layer is one pipeline stage, and the network accepts a new sample
every clock. `PIPE_STRATEGY` chooses where the registers go.

| strategy | registers per layer | latency per layer | default net (3 layers) | use when |
|---|---|---|---|---|
| 2 (combined, default) | after the adder table | 1 cycle | 3 cycles | adder table small next to the sub-neuron tables: fewest cycles |
| 1 (separate) | after the sub-neuron tables and after the adder table | 2 cycles | 6 cycles | both tables similar in size: shorter critical path, higher clock |

The data registers load on every clock and have no reset. `in_valid` runs
through a shift register of the layer's latency, and that register is
cleared by the synchronous active-low `rst_n`. `out_valid` therefore
rises exactly L (strategy 2) or 2L (strategy 1) cycles after `in_valid`.
Each layer asserts this property. There is no back-pressure, since a
LUT network cannot stall.

## Top level: `polylut_add_net`

| parameter | default | meaning |
|---|---|---|
| `NUM_LAYERS` | 3 | number of layers L |
| `LAYER_SIZE[L+1]` | `'{16, 64, 32, 5}` | input feature count, then neurons per layer |
| `LAYER_BETA[L+1]` | `'{3, 3, 3, 3}` | word width entering each layer; the last entry is the output width |
| `LAYER_FANIN[L]` | `'{2, 2, 2}` | F of each layer's sub-neurons |
| `A` | 2 | sub-neurons per neuron |
| `D` | 3 | polynomial degree |
| `PIPE_STRATEGY` | 2 | see above |
| `SEED` | 1 | selects the stand-in model parameters |

The defaults are the JSC-M Lite-Add2 model, a jet-substructure classifier
with 16 input features, 5 classes and three layers. Ports:

* `in_x`: feature i in bits [i·β_0 +: β_0], already quantised to codes.
* `out_y`: class score j in bits [j·β_L +: β_L].
* `in_valid`, `out_valid`, `clk`, `rst_n`.

Other published models are parameter settings of the same top:

| model | `LAYER_SIZE` | `LAYER_BETA` | `LAYER_FANIN` | `D` | largest tables |
|---|---|---|---|---|---|
| JSC-M Lite-Add2 (default) | 16,64,32,5 | 3,3,3,3 | 2,2,2 | 3 | 2^6 sub, 2^8 adder |
| JSC-XL-Add2 | 16,128,64,64,64,5 | 7,5,5,5,5,5 | 1,2,2,2,2 | 3 | 2^10 sub, 2^12 adder |
| HDR-Add2 (MNIST) | 784,256,100,100,100,100,10 | 2 everywhere | 4 everywhere | 3 | 2^8 sub, 2^6 adder |
| NID-Add2 (UNSW-NB15) | 593,100,100,50,50,1 | 1,2,2,2,2,2 | 6,3,3,3,7 | 1 | 2^14 sub, 2^6 adder |
| JSC-M Lite, F = 4 | 16,64,32,5 | 3,3,3,3 | 4,4,4 | 1 or 2 | 2^12 sub, 2^8 / 2^12 adder |
| HDR, F = 6 | 784,256,100,100,100,100,10 | 2 everywhere | 6 everywhere | 1 or 2 | 2^12 sub, 2^6 / 2^9 adder |

For NID-Add2, the 593 one-bit inputs are the usual binary encoding of the
49 UNSW-NB15 features. The last layer's fan-in of 7 is a reading of the
model description.

`A` may be 2 or 3. Larger A would call for an adder tree, which is not
built. A note on cost: the tables are computed by constant functions while
the design elaborates. Elaboration time grows with table size times neuron
count, and it is paid in every tool:

* The defaults (about 200 sub-neuron tables of 2^6 entries and 101 adder
  tables of 2^8) take well under a minute.
* NID-Add2 takes a few minutes to build for simulation.
* JSC-XL-Add2, with 325 adder tables of 2^12 entries, takes longer than a
  quick simulation allows. It has not been simulated at full size.

## Simulating

Every testbench is self-checking. Each ends with a line
`TB_RESULT checks=N failures=M`. The reference model `tb/tb_ref_pkg.sv`
evaluates each neuron's arithmetic directly, sample by sample, instead of
building tables. It shares only the model parameters with the RTL.

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/polylut_add_pkg.sv tb/tb_ref_pkg.sv tb/tb_polylut_add_net.sv \
    --top-module tb_polylut_add_net -o sim && ./obj_dir/sim
```

| testbench | what it checks |
|---|---|
| `tb_truth_table` | every address of two tables with known contents |
| `tb_poly_sub_neuron` | all input combinations of two sub-neurons: (β 3, F 2, D 3) and (β 2, F 3, D 1) |
| `tb_adder_neuron` | all input combinations for A = 2 / β = 3 and A = 3 / β = 2; that the ReLU clips |
| `tb_polylut_add_neuron` | random stream through both strategies; 1- and 2-cycle latency; output actually varies |
| `tb_polylut_add_layer` | 16→10 layer, both strategies, random valid gaps; valid timing and every output word |
| `tb_polylut_add_net` | whole default network and a strategy-1 copy, bursts and bubbles. Values and 3 / 6-cycle latency. Counts bubbles, back-to-back samples, ReLU clipping and non-zero outputs, and fails on any that never occurs |
| `tb_polylut_add_net_full` | the top with untouched parameters: 200 back-to-back samples, 3-cycle latency |
| `tb_polylut_add_workloads` | the NID-Add2 model at full size (593 inputs, five layers, mixed word widths and fan-ins). Checks the output and the 50 words of the layer before it, and the 5-cycle latency |

A full-network testbench takes about a minute at the defaults, mostly compile time. The NID-Add2 testbench takes about three minutes.

## How far to trust it, and where it departs from the source design

* **Follows the published design:**
  - the neuron decomposition into A polynomial sub-neurons and one adder
    table;
  - the β+1-bit sub-neuron outputs;
  - batch norm and quantised activation after the sum;
  - the table sizes 2^(β·F) and 2^(A(β+1));
  - random sparse fan-in, drawn independently per sub-neuron;
  - the two register-placement strategies, with their latencies of L and
    2L cycles;
  - the model sizes listed above.
* **This design's own choices:**
  - the stand-in weights, batch-norm constants and connectivity;
  - the fractional reading of input codes;
  - the quantisers' zero point and shift search;
  - signed sub-neuron outputs;
  - using ReLU in the last layer as well;
  - the valid/reset handshake;
  - the packing of words into buses;
  - the monomial order.
* **Not included:** training and table generation from a trained model,
  input feature quantisation, and the adder tree for A ≥ 4.
* Verification is by simulation against an independent reference model
  only. The RTL has not been placed and routed, so it makes no claim about
  clock rate or LUT count on a given FPGA.
