# PolyLUT network in SystemVerilog

A PolyLUT network runs a quantized neural network on an FPGA with almost no
datapath. Each neuron reads only a few low-precision inputs, so its whole
behaviour fits in a truth table: F inputs of β bits give 2^(β·F) possible
input combinations. The neuron becomes a lookup table (a *logical LUT*),
and the synthesis tool maps it onto the FPGA's physical LUTs. A layer is a
row of such tables with a register behind each. The network is a chain of
layers, so a result leaves after one clock per layer, and a new input can
enter on every clock.

Earlier LUT networks put a linear function inside each table: a weighted
sum, then batch-norm and a quantized ReLU. PolyLUT puts a multivariate
polynomial of degree D in its place:

    y = φ( Σ_{all monomials m of degree ≤ D in x_0..x_{F-1}} w_m · m(x) )

There are C(F+D, D) monomials, the constant term (the bias) included. A
neuron with F = 4 and D = 6 therefore has 210 coefficients. The products
cost no hardware: the table has 2^(β·F) entries whatever the function
inside it. Each layer can then do more work, so a network needs fewer layers
for the same accuracy, and that means fewer clocks and fewer LUTs.

This RTL describes that hardware, with the parameters of the jet-tagging
network "JSC-M Lite" as its default:

* 16 input features of 3 bits each;
* layers of 64, 32 and 5 neurons;
* 3-bit codes, fan-in 4 and degree 6.

At these sizes the network has 101 tables of 4096 × 3 bits each, and a
latency of 3 clocks.

## Structure

| file | what it is |
|---|---|
| `rtl/polylut_pkg.sv` | shared constants, the coefficient generator, the sparse-mask generator |
| `rtl/polylut_neuron.sv` | one neuron: a 2^(β·F)-entry table with a registered output |
| `rtl/polylut_layer.sv` | one layer: OUT_N neurons, each wired to F inputs of the previous layer |
| `rtl/polylut_net.sv` | the top: NUM_LAYERS layers in a chain, plus a valid pipeline |

Dataflow in `polylut_net`:

    x (IN_FEATURES × BETA0 bits) ─► layer 0 ─► layer 1 ─► … ─► layer L-1 ─► y
    in_valid ──────────────────────► valid shift register (L stages) ─────► out_valid

Each layer's output is a packed vector, with neuron n at bits
`[n*β +: β]`. Each neuron of the next layer reads F fixed positions of that
vector. These positions are its *input mask*. It concatenates the F codes,
with input 0 in the least significant bits, and uses them as the table
address. There is no handshake and no back-pressure: a network of
registered tables cannot stall. `in_valid` and `out_valid` only mark which
clocks carry data.

### Top-level parameters

| parameter | default | meaning |
|---|---|---|
| `IN_FEATURES` | 16 | number of input codes |
| `NUM_LAYERS` | 3 | layers (1 to 8) |
| `LAYER_N[8]` | 64, 32, 5, 0… | neurons per layer |
| `BETA0`, `BETA` | 3, 3 | code width at the network input, and everywhere after it |
| `FANIN0`, `FANIN` | 4, 4 | fan-in of layer 0, and of the later layers (up to 8) |
| `DEGREE` | 6 | polynomial degree D |
| `NET_SEED` | 0x2024 | selects the coefficients and the masks |

The first layer has its own width and fan-in because some of the published
networks use different first-layer values:

* JSC-XL: 7-bit inputs with fan-in 2, then 5 bits with fan-in 3;
* NID Lite: 1-bit inputs.

These parameter sets build the other published networks:

| network | IN_FEATURES | LAYER_N | BETA0/BETA | FANIN0/FANIN | DEGREE |
|---|---|---|---|---|---|
| JSC-M Lite (default) | 16 | 64, 32, 5 | 3/3 | 4/4 | 6 |
| JSC-XL | 16 | 128, 64, 64, 64, 5 | 7/5 | 2/3 | 4 |
| NID Lite | 49 | 686, 147, 98, 49, 1 | 1/2 | 7/7 | 4 |
| HDR (MNIST) | 784 | 256, 100, 100, 100, 100, 10 | 2/2 | 6/6 | 4 |

The latency is NUM_LAYERS clocks in every case. Three networks have been
simulated: JSC-M Lite, the 5-layer JSC-M network at degree 2, and a small
test network. JSC-XL, NID Lite and HDR have not been simulated.

## The neuron table: how it is computed

The tables are the hard part. The original flow trains the network,
evaluates every trained neuron on all of its input combinations, and writes
each truth table out as a ROM. The trained coefficients are not available
here, so this design does two things:

1. **Stand-in coefficients.** `polylut_pkg::coef_weight(seed, e)` gives a
   fixed, pseudo-random, signed 8-bit coefficient for each monomial of each
   neuron. The monomial is identified by its exponent tuple (e_0..e_{F-1}),
   read as a base-(D+1) number. The values are in units of 1/16 of an output
   step. To use trained weights, replace this function (or the table
   initialisation); the datapath does not change.

2. **The table is computed in SystemVerilog.** An `initial` block in
   `polylut_neuron` fills the table once, before time 0. The synthesis flow
   sees it as the initial contents of a ROM.

The fixed-point convention is this design's choice:

* a code x stands for u = x / 2^β, which lies in [0, 1);
* the activation φ takes the floor, then clamps to [0, 2^β - 1];
* so φ is a ReLU followed by a uniform quantizer;
* batch-norm is assumed to be folded into the coefficients.

Evaluating 210 monomials for each of 4096 entries directly would be slow
for an elaboration-time evaluator. The block therefore uses a
**tensor-product Horner scheme**:

* Start from the coefficient tensor C[e_0,…,e_{F-1}]. Multiply each
  coefficient by 2^(β·(D − |e|)), so that every later value is an exact
  integer. Entries with |e| > D are zero.
* Stage k, for k = 0…F-1, replaces exponent index e_k by input value x_k:
  `T_{k+1}[…, x_k, …] = Σ_e T_k[…, e, …] · x_k^e`.
* After F stages the tensor is indexed by (x_0,…,x_{F-1}). Flattened with
  x_0 as the least significant digit, that is exactly the table address.
  Each entry equals 2^(β·D) times the polynomial.
* φ is then an arithmetic right shift by β·D + 4, followed by the clamp.

The work tensors are kept as packed vectors. Elaboration-time evaluators
copy a variable on each element read, and a packed vector is copied as a
single block, which keeps synthesis front ends usable. Even so, expect
synthesis to spend several seconds on each neuron of the default network.

## Sparse connectivity

Each neuron reads F distinct outputs of the previous layer. The choice is
fixed before training and costs only wiring. The original work builds these
masks from expander graphs but does not give the construction. Here
`polylut_pkg::pick_inputs` draws the F inputs pseudo-randomly without
replacement, using the neuron's seed.

As a consequence, some outputs of a layer may feed no neuron. For example,
the 32 neurons of layer 1 make 128 draws from 64 outputs and leave a few of
them unread. Lint reports these bits as unused. That is expected, and a
synthesis tool removes the tables that drive them.

## Timing

* A neuron's output changes only on the rising clock edge: the table read is
  combinational and is followed by a register.
* One layer is one clock. A vector applied before edge k appears at `y`
  after edge k + NUM_LAYERS − 1.
* `out_valid` rises on that same edge if `in_valid` was high at edge k.
* `rst_n` is synchronous and active-low. It clears only the valid pipeline,
  so vectors in flight lose their valid bit. The data registers have no
  reset, as in the original design.

## Departures from the original design

* The coefficients are pseudo-random stand-ins, so the network classifies
  nothing. Its accuracy cannot be compared with published numbers; only the
  structure, sizes and timing can.
* The fixed-point convention, the placement of the activation and the
  folding of batch-norm are assumptions. The original uses learned
  quantizer scales.
* The masks are random draws rather than expander graphs.
* Inputs arrive already quantized. No input quantizer and no argmax are
  built.
* The valid pipeline and its reset are additions.

## Simulating

Testbenches (in `tb/`, all self-checking; each prints
`TB_RESULT checks=N failures=M`):

| testbench | what it runs |
|---|---|
| `tb_polylut_neuron` | whole table of a 3-input, 2-bit, degree-2 neuron; 600 random reads of a default-size neuron; register timing |
| `tb_polylut_layer` | 12-neuron layer streamed with a new vector each clock; mask sanity |
| `tb_polylut_net` | reduced 4-layer network: 300 vectors with bubbles and a mid-stream reset, every output and `out_valid` checked |
| `tb_polylut_net_full` | the default JSC-M Lite network, unchanged parameters, 120 vectors |
| `tb_polylut_jsc_m` | the 5-layer JSC-M network (64, 32, 32, 32, 5) at degree 2, one point of the depth/degree study, 150 vectors, 5-clock latency |

The reference model (`tb/polylut_ref_pkg.sv`) recomputes each neuron
directly. It sums over every exponent tuple with |e| ≤ D, not through the
tensor scheme. It gathers each neuron's inputs itself from the masks. With
the RTL it shares only the definitions of the coefficients and masks, since
those stand for the trained model. The network driver counts each mechanism
and fails if one never happens:

* back-to-back vectors;
* bubbles;
* vectors dropped by the reset;
* neuron outputs clamped to zero;
* neuron outputs saturated at the top code.

Example with plain Verilator:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
        --top-module tb_polylut_net rtl/polylut_pkg.sv tb/polylut_ref_pkg.sv tb/tb_polylut_net.sv
    ./obj_dir/Vtb_polylut_net

The full-size testbench builds the same way with `--top-module
tb_polylut_net_full`. Elaborating 101 neurons takes a few minutes.
