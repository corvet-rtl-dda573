# CORVET vector engine in SystemVerilog

CORVET computes neural-network layers with a bank of small multiply-accumulate
units. Each unit is an *iterative CORDIC* engine: one shift-and-add datapath
run for a chosen number of clock cycles. Fewer cycles give a rougher
product sooner; more cycles give a more exact one. The engine makes that
number a per-layer runtime setting. Layers that tolerate error run in an
*approximate* mode, sensitive layers in an *accurate* mode, and each layer can
also use 4-, 8- or 16-bit operands. The nonlinear activation functions reuse
CORDIC hardware as well: one shared unit computes ReLU, sigmoid, tanh, SoftMax,
GELU, Swish and SELU from a single hyperbolic and a single linear CORDIC. The
network runs *layer-multiplexed*: the same row of neurons computes layer 0,
then layer 1, and so on, under a small controller.

This RTL implements that engine for fully connected layers:

* 64 processing elements (PEs), each with its own kernel memory bank;
* up to 32 inputs per neuron and 4 layers held on chip;
* the shared multi-activation unit;
* absolute-average-deviation (AAD) pooling of the final outputs.

Everything is parameterised, and the defaults are the sizes above.

## Block map

```
                 cfg write            parameter stream         input stream
                     |                       |                       |
              +--------------+      +-----------------+     +--------------------+
              |control_engine|----->| param_allocator |     | input_preprocessor |
              | cfg regs,FSM |      +-----------------+     +--------------------+
              |  in/out mux  |               | weight / bias writes       |
              +--------------+               v                            |
                |  ^   ^  |     +-------------------------------+         |
  ComputeInit,  |  |   |  |     | vector_engine                 |         |
  cfg, x_in     +--|---|--|---->|  lane 0..63: kernel_mem_bank  |         |
                   |   |  |     |              + neuron_pe      |         |
   Index,          +---|--|-----|                 (iter_cordic_mac)       |
   ComputeDone, y      |  |     +-------------------------------+         |
                       |  +--> multi_af (hyp_cordic, lin_cordic_div)      |
                       +------ aad_pool (aad_sa)        input words <-----+
```

| module | role |
|---|---|
| `corvet_pkg` | sizes, encodings, the `layer_cfg_t` record, CORDIC constants |
| `iter_cordic_mac` | one linear-rotation CORDIC multiply-accumulate, `iters` cycles |
| `kernel_mem_bank` | per-lane weight memory, `L_MAX*J_MAX` words |
| `neuron_pe` | one neuron: bias registers, accumulator, MAC sequencing, Index, ComputeDone |
| `vector_engine` | 64 lanes of bank + PE, broadcast input, ComputeDoneArray |
| `param_allocator` | turns an address-free parameter stream into bank and bias writes |
| `input_preprocessor` | two 32-word input banks, one filling while the other is read |
| `control_engine` | configuration registers, layer FSM, input and output muxing, AF and pool streams |
| `hyp_cordic` | sinh/cosh by hyperbolic CORDIC with ln 2 range reduction |
| `lin_cordic_div` | division by linear-vectoring CORDIC |
| `multi_af` | the time-multiplexed activation unit |
| `aad_sa` | subtract / sign / multiply cell for AAD |
| `aad_pool` | sliding-window AAD pooling |
| `corvet_top` | everything wired together |

## The iterative CORDIC MAC

Linear-mode CORDIC rotation computes `y + x*z` by driving `z` to zero with
signed power-of-two steps:

```
d = sign(z);   y <- y + d*(x >>> k);   z <- z - d*2^-k;    k = 0, 1, ...
```

`x` is the weight, `z` the input activation as a fraction, and `y` the running
accumulator. Each step is one clock on a single adder per register, so the
number of iterations is also the number of cycles. `iter_cordic_mac` scales
the operands so that a converged result equals `acc + a*b` in integer units:

* `x = a << (P-1)`;
* `z` holds `b / 2^(P-1)` in a Q1.15 register.

Iteration `k` uses shift `k`, starting from 0.

The digit set is {+1, -1}, with no zero. The product is therefore approximate
for any finite count, with an error below `|a| * 2^(P-1) * 2^-(iters-1)`. That
error is the accuracy knob. The operating points taken from the paper are
(`paper_iters()` in the package):

| precision | approximate | accurate |
|---|---|---|
| 4-bit | 4 cycles | 4 cycles |
| 8-bit | 4 cycles | 5 cycles |
| 16-bit | 7 cycles | 9 cycles |

`iters` is a 5-bit field, and any value from 1 to 31 works.

A PE spends one more cycle per MAC to write the accumulator back and present
the next operands. A layer with `J` inputs therefore takes `J*(iters+1) + 2`
cycles from ComputeInit to ComputeDone.

## Layer multiplexing and data flow

The per-layer configuration record `layer_cfg_t` holds:

* `n_neurons` N(l) and `n_inputs` J(l);
* `prec`;
* `iters`;
* `out_shift`;
* `af_en` and `af_sel`.

The control engine steps through the layers:

1. **INIT**: ComputeInit goes, for one cycle, to lanes `0..N(l)-1`. The
   other lanes get nothing and stay idle. A started PE loads its accumulator
   with `bias << out_shift`.
2. **COMPUTE**: every started PE runs in lock step and reports `Index`, the
   number of MACs done. The controller puts input position `J-1-Index` on the
   shared bus `x_in`. For layer 0 this comes from the input buffer; after that
   it comes from the previous layer's outputs. Each PE reads its weight from
   the same position of its own bank. The state ends when every started lane
   shows ComputeDone.
3. **AF** (if `af_en`): the N(l) results, `sat_P(acc >>> out_shift)`, are
   streamed through the multi-activation unit in lane order. The results are
   written back to the intermediate output registers. Without `af_en` they are
   copied directly.
4. **LDONE**: LayerDone pulses, and Current_Layer moves on.

After the last layer, if pooling is enabled, the final vector is streamed
through the AAD pooling unit, one value per clock. The controller waits until
the last pooling window has produced its result. Then DNNDone rises and stays high until the next
start. `dnn_out` holds the `out_count` final values. Parameters stay loaded,
so a new input only needs a new input stream and a start.

**Two input banks.** The input buffer has two banks. When a start is taken, the
bank just filled is handed over for reading, and the other bank is emptied
(`in_count` drops to 0). The host can stream the next input vector while the
current one is being computed, so back-to-back inferences do not wait for
input loading.

**Last-in, first-out loading.** Both weights and inputs are read from the
highest position down. So the word loaded last into a neuron's segment is used
first. Weight `j` and input `j` always meet in the same MAC. The host therefore
sends values in the order "position 0 first" and gets the LIFO read order for
free.

**Number format between layers.** A P-bit activation is taken as fixed point
with P/2 fraction bits: Q7.8, Q3.4 or Q1.2. On the way into the activation
unit it is scaled to Q7.8; the result is scaled back and saturated to P bits.
`out_shift` sets where the accumulator's binary point lands.

### Parameter addressing

`param_allocator` needs no address from the host. It counts through the
network: for each layer, `N(l)*J(l)` weights (neuron by neuron, input position
0 upwards), then `N(l)` biases. For every word it forms the uniform address

```
param_addr = { layer : clog2(L_MAX) | select : 1 | R : clog2(N_PE)+clog2(J_MAX) }
```

`select = 0` marks a weight, with `R = {neuron, input}`; `select = 1` marks a
bias, with `R = neuron`. The address is decoded into a write to one lane's
kernel bank or bias register. `params_loaded` rises after the last bias.
`start` is ignored until then.

### Configuration registers

| `cfg_addr` | contents (`cfg_wdata`) |
|---|---|
| `0 .. L_MAX-1` | `layer_cfg_t` of that layer (31 bits) |
| `L_MAX` | `{pool_en, num_layers}` in the low bits |

Writes are ignored while a run is in progress. Write the configuration before
loading parameters, because the allocator uses the layer sizes.

Encodings: `prec` is 0 = 4-bit, 1 = 8-bit, 2 = 16-bit. `af_sel` is
0 ReLU, 1 sigmoid, 2 tanh, 3 SoftMax, 4 GELU, 5 Swish, 6 SELU, 7 identity.

### Host sequence

1. Write the configuration registers.
2. Pulse `param_restart`, then stream every weight and bias with
   `load_param_weight` / `param_data` (gaps allowed).
3. Stream the J(0) inputs with `in_valid` / `in_data`.
4. Pulse `start`. Wait for `dnn_done`; read `dnn_out[0..out_count-1]` and
   collect any `pool_valid` / `pool_data` results.
5. For the next input with the same network, go back to step 3. Step 3 may
   already run during the previous run, as soon as its start was taken.

## The multi-activation unit

`multi_af` takes one Q7.8 value at a time (valid/ready) and works in Q.16 on
48-bit words. It has:

* one hyperbolic CORDIC (`hyp_cordic`);
* one linear CORDIC divider (`lin_cordic_div`);
* a front multiplier and a back multiplier;
* the adders `e^x = sinh x + cosh x` and `1 + e^x` / `e^x - 1`;
* a FIFO.

| function | computed as | cycles |
|---|---|---|
| ReLU | sign mux with 0, bypassing both CORDICs | 2 |
| identity | bypass | 2 |
| tanh | sinh / cosh | ~42 |
| sigmoid | e^x / (1 + e^x) | ~42 |
| GELU | x * sigmoid(1.702 x): front multiply, sigmoid, back multiply | ~44 |
| Swish | x * sigmoid(beta x), beta = 1 | ~44 |
| SELU | x > 0: 1.0507 x; else 1.0507 * 1.67326 * (e^x - 1) | 3 or ~23 |
| SoftMax | pass 1: push e^x_i into the FIFO and sum; after `in_last`, pass 2: divide each entry by the sum | ~21 per element in, 20 per element out |

`hyp_cordic` reaches `|x| <= 8`, which is beyond the native CORDIC range of
about 1.118. It splits `x = q ln2 + r` with `|r| <= ln2/2`, rotates `r` through
shifts 1..16 (4 and 13 repeated), and scales `cosh r +- sinh r` by `2^+-q`.
Larger arguments are clamped.

`lin_cordic_div` first normalises divisor and dividend together. It then runs
17 vectoring steps, so the quotient is good to about 2^-16 for any positive
divisor.

SoftMax does not subtract the maximum first. Within the clamp of ±8 the sums
stay far inside 48 bits.

## AAD pooling

The absolute average deviation of a window of N values is
`sum_{i<j} |x_i - x_j| / (N(N-1))`; for two values this is `|a-b|/2`.
`aad_sa` is the two-input cell:

1. subtract;
2. take the sign (+1/-1) of the difference in parallel with a buffer register;
3. multiply the two, giving `|a-b|`;
4. halve.

It is fully pipelined, with a latency of 2.

`aad_pool` holds a window of `NWIN` (4) values. A new window comes every
`STRIDE` (4) values. It works as follows:

* When a window is complete, it is captured, and each of its
  `NWIN(NWIN-1)/2` pairs goes to its own SA cell. The default has 6 cells.
* An adder network sums the cell outputs into a register.
* The sum is divided by `M = NWIN(NWIN-1)`. The division is a multiply by a
  constant reciprocal, exact for these widths.

The unit is fully pipelined and takes one value per clock. A result arrives 4
cycles after the clock edge that takes the value completing its window, and
windows may follow each other on consecutive clocks. `busy` is high while a
window is in flight; the controller waits for it to drop before raising
DNNDone.
In the top the pool runs over the final layer's output vector when `pool_en` is
set.

## Timing summary

| path | latency |
|---|---|
| MAC | `iters` cycles |
| one layer, no AF | `J*(iters+1) + 4` cycles from the previous LayerDone (one more from `start`) |
| layer with AF | the above plus the AF stream (2 to ~43 cycles per neuron) |
| hyperbolic CORDIC | 20 cycles |
| divider | 18 cycles |
| AAD cell | 2 cycles |
| AAD window | 4 cycles |

## Where this design departs from the paper

* **Activation overlap.** The activation stream runs after a layer's MACs, not
  alongside them. The next layer needs every activation before it can start.
* **Layer sizes.** The paper ties `J(l+1) = N(l)`. Here J and N are set per
  layer, and the kernel bank holds 32 inputs per neuron. So a layer wider than
  32 neurons cannot feed all its outputs to the next layer; the next layer
  reads positions 0..J-1.
* **Second input bank.** The paper's two banks are one for inputs and one
  for weights. A second input bank here lets the next input load during a run.
  This is one way to overlap memory access with computation.
* **Not built:**
  * the normalisation/encoding unit;
  * the HOAA block and the "input >> 1" path drawn in the activation unit,
    whose functions are not described;
  * the AXI host interface and off-chip memory, which here are plain stream
    ports.
* **Pooling** works on a 1-D stream, not 2-D feature-map windows.
* **Weight word width.** The weight memory is drawn with 9-bit words. Here
  words are 16 bits, because 16-bit precision needs them.

### What the default build can run

One configuration holds up to 4 fully connected layers of at most 64 neurons
and 32 inputs: 8192 weights. The networks evaluated with this engine are much
larger: TinyYOLO-v3, VGG-16, LeNet-5, ResNet-18, CaffeNet, and MLPs such as
196-64-32-32-10. They would need host-side tiling into 32-input, 64-neuron
pieces, with repeated parameter loads. Nothing here automates that.

The last two layers of the 196-64-32-32-10 MLP, 32 -> 32 -> 10, do fit.
`tb_mlp_tail` runs them with ReLU and SoftMax at 8-bit precision in accurate
mode, as back-to-back inferences with the next input prefetched. That takes
881 cycles per inference:
* the hidden layer: 32 x 6 + 2 cycles of MACs plus the ReLU stream;
* the output layer: the same MACs plus the two SoftMax passes.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. The reference models are
independent of the RTL:

* `tb_model_pkg` has a bit-exact integer model of the CORDIC MAC and of a whole
  neuron;
* the CORDIC function units are compared with real-valued `$exp`, `$sinh`,
  `$tanh` within stated tolerances.

| testbench | what it checks |
|---|---|
| `tb_iter_cordic_mac` | MAC result, error bound, `iters`-cycle latency for all precisions |
| `tb_neuron_pe` | whole neuron against the model; `J*(iters+1)+2` latency; Index |
| `tb_vector_engine` | random lane masks, lanes finishing together, idle lanes |
| `tb_param_allocator` | decoded addresses and writes |
| `tb_input_preprocessor` | count, full, read back, bank swap, read bank unchanged while the other fills |
| `tb_kernel_mem_bank` | read back, overwrite |
| `tb_hyp_cordic`, `tb_lin_cordic_div` | accuracy and latency |
| `tb_multi_af` | every function against real math; SoftMax vectors up to 64 long; ReLU 2-cycle bypass |
| `tb_aad_sa`, `tb_aad_pool` | exact AAD values, back-to-back windows, `busy`, window count, latency, at several window sizes and strides |
| `tb_control_engine` | the controller against modelled lanes, AF and pool |
| `tb_corvet_top` | see below |
| `tb_mlp_tail` | the 32-32-10 tail of an MLP, back-to-back inferences |

`tb_control_engine` checks:

* the ComputeInit mask;
* LIFO input muxing, from the buffer in layer 0 and from the previous outputs
  later;
* that stale ComputeDone on idle lanes is ignored;
* AF scaling;
* pool stream order;
* that configuration writes are locked while busy.

`tb_corvet_top` runs the full-size engine (default parameters) on random
networks of 1 to 4 layers. Each layer's outputs are compared with the model at
every LayerDone. It checks the per-layer cycle count and the pooling results.
It fails unless every mechanism happened at least once: each precision, both
modes, an iteration change between layers, idle lanes, every activation
function, SoftMax, pooling, parameter reuse, an input vector loaded during a
run, and a start held off by missing parameters.

To simulate a testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_corvet_top \
    -y rtl -y tb rtl/corvet_pkg.sv tb/tb_corvet_top.sv
./obj_dir/Vtb_corvet_top
```

Replace the top module name for any other testbench. The full-size top-level
test runs in seconds.
