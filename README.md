# CARMEN vector engine in SystemVerilog

CARMEN is a deep-learning inference engine built around one idea: a CORDIC
multiplier computes its product one signed binary digit of the weight at a
time, so the number of iterations it runs *is* its accuracy. Stopping early
gives an approximate product in fewer cycles, and the hardware does not change.
The engine runs every multiply-accumulate (MAC) as an iterative CORDIC on one
small register set, and chooses the iteration count per layer at run time:
fewer iterations for layers that tolerate error, more for sensitive ones. The
activation functions take only a few percent of the work. So one shared CORDIC
datapath computes all of them, one element after another, instead of
dedicated hardware per function.

This RTL implements that design as described in *CARMEN: CORDIC-Accelerated
Resource-Efficient Multi-Precision Inference Engine for Deep Learning* (Kumar,
Lokhande, Vishvakarma, Teman). The paper gives the MAC's structure, the block
diagram and the list of functions. It does not give word formats, iteration
counts, the control sequence or the insides of most system blocks. Those are
filled in here; the section "Where this RTL departs from the paper" lists the
choices.

## Block structure

```
                 +-------------------- carmen_top --------------------------------+
 off-chip  AXI4  | axi_mem_if -> input_feature_map -> input_tracker --+-> descriptor |
 memory  <=====> |     ^             (FIFO, credit)                   |      |       |
                 | data_address_manager                             |  parameters_ |
                 |                                                  |  allocator   |
 host cfg ------>| control_engine <----------------------------------------+       |
                 |    |  bank read / MAC start (broadcast)          v              |
                 |    +--> vector_engine: N_PE x (kernel_mem_bank -> cordic_mac)   |
                 |    |        accumulator select                                  |
                 |    +--> multi_af (cordic_af_core) --> pp_out_*  (to pooling /   |
                 |    <--------------------------------- pp_in_*    normalisation) |
                 |    +--> result writes through axi_mem_if                        |
                 +-----------------------------------------------------------------+
```

| Module | Role |
|---|---|
| `cordic_mac` | iterative linear-mode CORDIC MAC, 8/16-bit, 1..15 iterations |
| `kernel_mem_bank` | two 32-entry arrays per PE: weights and input activations |
| `vector_engine` | `N_PE` bank + MAC pairs in lock-step (default 256) |
| `cordic_af_core` | shared iterative CORDIC: hyperbolic rotation and linear vectoring |
| `multi_af` | ReLU, Sigmoid, Tanh, Swish, GELU, SELU, SoftMax (and identity) |
| `control_engine` | configuration registers, status, pass sequencer, result addresses |
| `parameters_allocator` | decodes a layer descriptor and picks the iteration count |
| `data_address_manager` | read-address generator |
| `input_feature_map` | 16-word FIFO of fetched words; its free space is the read credit |
| `input_tracker` | routes each fetched word to the descriptor or to a bank entry |
| `axi_mem_if` | AXI4 master, single-beat reads and writes |
| `carmen_pkg` | shared types, formats, CORDIC constant tables, descriptor layout |

The paper's figure also shows an AAD pooling unit and a normalisation/encoding
unit after the activation block. The paper names both but does not say what
they compute, so they are not in this RTL. The activation results leave on the
`pp_out_*` stream and come back on `pp_in_*` before they are written to memory.
A wire loop-back between the two (as the testbenches use) gives a working
engine without them.

## The iterative CORDIC MAC

In linear rotation mode, CORDIC drives a residual `Z` to zero by adding or
subtracting powers of two. At the same time it adds or subtracts the matching
shifted copies of `X` into `Y`:

```
for k = 1 .. iters:
    sigma = (Z >= 0) ? +1 : -1
    Y = Y + sigma * (X >> k)
    Z = Z - sigma * 2^-k
```

With `X = a` (activation) and `Z0 = w` (weight, `|w| < 1`), `Y` grows by
`a * w'`, where `w' = sum sigma_k 2^-k` is `w` written with `iters` digits
of value ±1. The error satisfies `|a*w - a*w'| <= |a| * 2^-iters`. Every extra
iteration halves the worst-case error and costs one cycle. `cordic_mac` keeps
one register each for `X`, `Y` and `Z`, as in the paper's figure. Each has an
input multiplexer that picks the initial value or the fed-back update. `X`
does not change in linear mode. `Y` is not reloaded between operations, so it
is the accumulator; `clr` zeroes it together with a load.

Formats. In 8-bit mode, the low bytes of `a` and `w` are used: `a` is a
signed integer and `w` is Q1.7. In 16-bit mode, both are 16-bit and `w` is
Q1.15. Internally `X` is pre-shifted by the weight's fraction bits FB (7 or
15). Because `k <= FB`, every shift is exact, and `Y` counts in units of
`2^-FB`. After full convergence, `Y` equals `sum a * w_int` up to the digit
error. The accumulator is 40 bits wide. A 32-term sum of 16x16 products needs
36 bits.

Timing. A `start` cycle loads `X` and `Z`. Then `iters` cycles each run one
iteration. `done` pulses in the next cycle, so an operation takes `iters + 1`
cycles. Iteration counts above FB are clamped to FB, and 0 counts as 1.

| mode | iterations (reset default) | cycles per MAC step in the engine | worst-case digit error |
|---|---|---|---|
| 8-bit accurate | 6 | 9 | `abs(a) * 2^-6` |
| 8-bit approximate | 4 | 7 | `abs(a) * 2^-4` |
| 16-bit accurate | 12 | 15 | `abs(a) * 2^-12` |
| 16-bit approximate | 8 | 11 | `abs(a) * 2^-8` |

The approximate counts are a third below the accurate ones. That matches the
largest cycle saving the paper reports (33 %). All four counts are
registers, so software can retune them without changing the hardware.

## The activation block

`multi_af` takes one Q4.12 element at a time through `cordic_af_core`, a
second iterative CORDIC. It has Q12.16 registers and two modes:

* **Hyperbolic rotation**, 18 iterations (shifts 1..16, with 4 and 13
  repeated so that it converges). Starting from `X = 1/K`, `Y = 0`, `Z = r`,
  it ends with `X + Y = e^r` for `|r| < 1.11`.
* **Linear vectoring**, 17 iterations. It drives `Y` to zero and leaves
  `Z = Y0 / X0`: a division, valid while the quotient is below 2.

Every function is built from at most one exponential of a non-positive
argument and one division whose quotient is at most 1. That keeps all
intermediate values in range without saturation logic:

| function | computed as | cycles from input accepted to output valid |
|---|---|---|
| identity, ReLU | bypass | 1 |
| Sigmoid | `e = exp(-abs(x))`; `1/(1+e)` if `x >= 0`, else `e/(1+e)` | 40 |
| Tanh | `e = exp(-2 abs(x))`; `sign(x) (1-e)/(1+e)` | 40 |
| Swish | `x * sigmoid(x)` | 40 |
| GELU | `x * sigmoid(1.702 x)` | 40 |
| SELU | `1.0507 x` if `x > 0`, else `1.7581 (exp(x) - 1)` | 1 / 21 |
| SoftMax | buffer the vector and find its max; `e_i = exp(x_i - max)` in place, summed; then `e_i / sum` | 21 per element, then 19 per element; 40 for a 1-element vector |

The exponential uses range reduction. First `u * log2(e)` is split into an
integer `q <= 0` and a remainder, so that `r = u - q ln 2` lies in
`[0, ln 2)`. The CORDIC computes `e^r`, and a right shift by `-q` finishes
it. The small multipliers in the block handle `log2(e)`, `ln 2`, the GELU and
SELU constants and the final `x * sigmoid` products. The SoftMax buffer holds
`SM_DEPTH` (default 256) elements, one per PE. A longer vector is cut off
after `SM_DEPTH` elements. Against double precision, the outputs are within
5 LSB of Q4.12 (about 0.0012) over `[-8, 8)`.

## A layer pass

The host writes registers through the `cfg_*` port (map below) and starts a
pass. The pass reads a block of off-chip memory at `DESC_BASE`, in 32-bit
words:

```
DESC_BASE + 0                      layer descriptor
DESC_BASE + 1 ...                  for PE 0, 1, ..., n_pe:
                                       len weights, then len activations
                                       (one value per word, low 16 bits)
```

Descriptor (`carmen_pkg::layer_desc_t`):

| bits | field | meaning |
|---|---|---|
| 7:0 | `len` | dot-product terms this pass, 1..32 (clamped) |
| 15:8 | `n_pe` | highest active PE index (clamped to `N_PE-1`) |
| 18:16 | `af_sel` | 0 identity, 1 ReLU, 2 Sigmoid, 3 Tanh, 4 Swish, 5 GELU, 6 SELU, 7 SoftMax |
| 19 | `prec` | 0: 8-bit, 1: 16-bit |
| 20 | `acc_mode` | 1: accurate, 0: approximate iteration count |
| 21 | `clear_acc` | clear the accumulators at the first step |
| 22 | `writeback` | run the activations and write results |
| 31:28 | `out_shift` | arithmetic right shift of the accumulator before the AF |

Sequence (`control_engine`):

1. **DESC**: fetch the descriptor. The parameters allocator decodes it and
   picks the iteration count from the four iteration registers.
2. **LOAD**: fetch `2 * len * (n_pe+1)` words. The address manager issues
   the reads. The AXI interface issues a read only while the input FIFO has
   room, so the read channel never stalls. The tracker writes each word into
   its bank entry.
3. **MAC steps**: for each entry `i < len`, one read cycle on all banks,
   one start cycle on all active MACs, then wait for `done`. Each step takes
   `iters + 3` cycles, so the phase takes `len * (iters + 3)` cycles.
4. **AF** (if `writeback`): the accumulators of PEs `0..n_pe` go one by one,
   shifted right by `out_shift` and saturated to Q4.12, into `multi_af`.
   `in_last` marks the last PE, which closes a SoftMax vector. Each result
   that comes back on `pp_in_*` is written, sign-extended, to
   `OUT_BASE + PE index`.
5. **FLUSH / DONE**: wait for the last write response; pulse `done`.

A pass with `writeback = 0` stops after the MAC steps and keeps the partial
sums. The next pass (with `clear_acc = 0`) continues them. This is how dot
products longer than the 32-entry banks run: a 4608-term convolution takes
144 passes. Loading dominates a full pass: 16,384 words for 256 PEs x 32
terms, against 288 cycles for the MAC steps in 8-bit accurate mode.

Registers (word address on `cfg_addr`):

| addr | name | access | content |
|---|---|---|---|
| 0 | CTRL | W | bit 0 start pass, bit 1 clear memory-error flag |
| 1 | DESC_BASE | R/W | word address of the descriptor |
| 2 | OUT_BASE | R/W | word address of the results |
| 3 | ITERS | R/W | [3:0] 8-bit accurate, [7:4] 8-bit approx., [11:8] 16-bit accurate, [15:12] 16-bit approx. |
| 4 | STATUS | R | 0 busy, 1 done, 2 memory error, [7:4] state, 8 fetching, 9 MAC running |
| 5 | CYCLES | R | cycles of the last pass |
| 6 | MACS | R | MAC steps of the last pass |

Registers 1 to 3 can only be written while the engine is idle. Addresses on
the AXI side are byte addresses: word address x 4.

## Parameters

| parameter | default | paper |
|---|---|---|
| `N_PE` | 256 | 256 (headline) and 64 configurations |
| `DEPTH` (bank entries) | 32 | "n-bit x 32" banks |
| operand width | 16, with 8-bit mode | 8/16-bit |
| `IFM_DEPTH` | 16 | not given |
| `SM_DEPTH` | `N_PE` | not given |
| accumulator | 40 bits | not given |
| AF word / internal | Q4.12 / Q12.16 | not given |

## Where this RTL departs from the paper

* **Not built:** AAD pooling and the normalisation/encoding unit, because the
  paper does not give their function. Without them, networks with pooling,
  batch normalisation or residual additions (VGG-16, ResNet-18, LeNet-5,
  CaffeNet, TinyYolo-v3) cannot run end to end. Their convolution and
  fully-connected layers can, as tiled passes. TinyYolo-v3 also uses leaky
  ReLU, which is not in the function list.
* **Read from the figure:** the MAC follows the paper's register/multiplexer
  figure. The figure labels the update blocks as multiplexers. Here they are
  add/subtract units selected by the sign of `Z`, which is what CORDIC needs
  and what the text describes.
* **Own choices**, where the paper is silent: the iteration counts, all
  fixed-point formats, the descriptor, the memory layout, the register map,
  the pass sequence, the lock-step broadcast to the PEs, the FIFO-plus-credit
  input path, single-beat AXI transfers, the exponential range reduction, and
  the sigmoid-based GELU. The paper only names the input pre-processor blocks
  (input feature map, data-address manager, input tracker) and the
  parameters allocator; their functions here are inferred from their names
  and their place in the block diagram. In the diagram, the tracker's arrow
  points into the feature-map buffer. Here the tracker reads the buffer's
  output and steers each word.
* **Sizes:** all defaults are the paper's numbers where it gives them. None
  was scaled down.
* **Accuracy:** the design reproduces the approximate/accurate trade-off of
  the MAC, not the paper's network accuracies. Those come from a software
  model and depend on quantisation choices the paper does not give.
* Clock frequency, area and power figures belong to the paper's 28 nm and
  FPGA implementations and are not claimed here.

## Verification

Every module has a self-checking testbench in `tb/`. It ends with a
`TB_RESULT checks=N failures=M` line and has a cycle watchdog.

| testbench | what it checks |
|---|---|
| `tb_cordic_mac` | every iteration count, both precisions; result vs. a signed-digit reference and vs. the exact-product error bound; latency `iters+1` |
| `tb_kernel_mem_bank` | write/read of both arrays, read latency and hold |
| `tb_vector_engine` | 8 PEs, 32-term dot products in all four modes, inactive PEs untouched, step latency |
| `tb_multi_af` | all functions vs. double precision, corner inputs, SoftMax vectors of 1..12 with back-pressure |
| `tb_axi_mem_if` | writes and read-back through an AXI memory model, credit limit, error responses |
| `tb_data_address_manager`, `tb_input_feature_map`, `tb_input_tracker`, `tb_parameters_allocator` | address sequences, FIFO order and free count, word routing, descriptor decoding and clamping |
| `tb_control_engine` | full sequencing against a model of its neighbours: addresses, counts, requantisation, write addresses, registers, MAC-phase cycles |
| `tb_carmen_top` | 8-PE engine end to end over 12 passes: both precisions, both modes, a partial-sum pass, every function, input credit stalls and AXI back-pressure; approximate mode must be faster |
| `tb_carmen_full` | default 256-PE engine: a 256 x 32 layer in 8-bit with ReLU and one in 16-bit approximate mode with a 256-element SoftMax |
| `tb_carmen_lenet_fc` | default 256-PE engine running the two fully-connected layers of LeNet-5 (120 to 84 with tanh, 84 to 10 with SoftMax, random 8-bit data): input vectors split into 32-entry chunks, partial sums kept across passes, activation only on the last chunk |

`tb/axi_mem_model.sv` is a behavioural AXI memory (random ready and latency,
SLVERR outside its range) used by the system testbenches.

Running one with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb +libext+.sv \
    rtl/carmen_pkg.sv tb/tb_carmen_top.sv --top-module tb_carmen_top -o sim
./obj_dir/sim
```

The full-size testbench builds in about a minute and runs in under a second.
The RTL lints cleanly apart from width and unused-signal warnings. It also
elaborates with the yosys slang front end at the default size: about 23k
flip-flops and 270 kbit of bank and buffer memory.
