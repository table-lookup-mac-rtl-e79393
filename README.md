# TLMAC: a convolution processing element whose weights live in LUT truth tables

A quantised neural network with 2- to 4-bit weights has very few distinct
weight values, and even fewer distinct *groups* of weights than its parameter
count suggests. The Table-Lookup MAC (TLMAC) processing element exploits this
on an FPGA: instead of streaming weights from block RAM into multipliers, the
weights of a whole convolution layer are folded into the truth tables of
six-input LUTs. The activations are the only data that move. A LUT then acts
as memory and multiplier at once: its address is formed from activation bits,
and what it returns is a precomputed multiply-accumulate result.

This repository holds synthesizable SystemVerilog for one such processing
element (PE). It also includes a layer engine that wraps the element with
the window loops and the partial-sum buffer of a 3x3 convolution layer.
There are self-checking testbenches for each part, for the whole element,
and for complete layers computed end to end.

## 1. The arithmetic

One PE operation computes, for each of `D_P` outputs, a dot product of `G`
activations with a *weight group* of `G` weights and adds it to a partial sum:

    p = psum_in + a_0*w_0 + a_1*w_1 + ... + a_{G-1}*w_{G-1}

A LUT-6 cannot take `G` activations of `B_A` bits each as address when
`G*B_A > 6`. The element therefore works **bit-serially over the activations**:

    p = psum_in + sum_{b=0}^{B_A-1} 2^b * ( a_0[b]*w_0 + ... + a_{G-1}[b]*w_{G-1} )

In cycle `b` only the single bits `a_g[b]` are needed. The inner sum then
depends on just `G` address bits. It is at most `G` signed `B_W`-bit weights
added together, so it fits in `B_L = B_W + ceil(log2 G)` bits. One LUT-6 per
result bit gives a **LUT array** of `B_L` LUTs that share their address.

With `G < 6`, the `6 - G` address bits the activations leave free are used as
a select `s`. Each LUT array thus holds `N_CLUS = 2^(6-G)` different weight
groups, one per value of `s`, and only one of them is in use at a time. For
3x3 kernels, `G = 3`: eight weight groups per array, five LUTs per array for
3-bit weights.

The activations are unsigned (the quantiser in front of each layer produces
non-negative codes), so every bit plane is added with weight `+2^b`. Weights
are two's complement.

## 2. How a 3x3 convolution layer is mapped

* A weight group is one kernel row: `G = D_k = 3` weights.
* The element has `D_P = 64 * D_k = 192` outputs: all three kernel rows for
  64 output channels. Output `p = kr * 64 + c` is kernel row `kr` of output
  channel `c` of the current block of 64.
* The input is a `1 x 3` window of one input channel. For each window
  position the layer controller issues `D_S = D_i * D_o / 64` operations,
  numbered by `step`. A step stands for one input channel and one block of 64
  output channels. For a 256-in/256-out layer `D_S = 1024`.
* One window feeds three output rows at once, one per kernel row. The row
  a window position finishes is complete. The other two rows' partial sums go
  back to a buffer and return as `psum_in` when the window reaches the next
  input rows.

The weight tensor, reshaped as `[D_S][D_P][G]`, says which weight group every
output needs at every step. The element is built so that the group for output
`p` at step `t` is:

    W[t][p] = group stored at index s(t) of LUT array conn(p, k(t, p))

This uses four tables, all fixed when the layer is compiled:

| table | meaning | where it lives in hardware |
|---|---|---|
| `s(t)` | which weight-group index all LUT arrays use at step `t` | step map ROM in the pool |
| `fanin(p)` | how many LUT arrays output `p`'s multiplexer reaches | size of that multiplexer |
| `conn(p, k)` | which LUT array is wired to input `k < fanin(p)` of output `p`'s multiplexer | static wiring in the switches |
| `k(t, p)` | which multiplexer input output `p` takes at step `t` | switch map ROM |

The tables also encode three hardware rules. All arrays share one `s`, so the
groups needed in one step must sit at the same index. Each array holds at most
`N_CLUS` groups. An array feeds all the outputs that need its group in that
step.

Producing the tables is an offline optimisation, done in software, not in
RTL. First the steps are clustered into `N_CLUS` clusters that share many
weight groups, which fixes `s(t)` and keeps the number of arrays `N_ARR`
small. Then simulated annealing swaps groups between arrays within a cluster.
Its goal is that each output multiplexer reaches as few distinct arrays as
possible, which fixes `fanin`, `conn` and `k`.

## 3. Block structure

```
            step ──┬─────────────────────────────┐
                   ▼                             ▼
              step map ROM                 switch map ROM
                   │ s (6-G bits)                │ k per output
   act ─► act      ▼                             ▼
  (G x B_A) serial-► N_ARR LUT arrays ──B_L──► D_P multiplexers ──B_L──► D_P accumulators ─► psum_out
          iser   abit  (B_L LUT-6 each)         (fanin(p) <= MUX_IN inputs)     (<< b, +, B_P reg)
            ▲                                                               ▲
            └────────────── b ────────── controller (FSM) ───── b ─────────┘        psum_in ─┘
```

| module | role |
|---|---|
| `tlmac_conv_layer` | top: a whole 3x3 layer around one element, with the window loops and the partial-sum buffer (section 5) |
| `tlmac_pe` | the processing element: wires everything below, valid/ready on both sides |
| `tlmac_ctrl` | state machine IDLE → RUN (b = 0..B_A-1) → DONE |
| `tlmac_act_serialiser` | holds the `G` activations, presents bit `b` of each |
| `tlmac_pool` | `N_ARR` LUT arrays plus the step map |
| `tlmac_lut_array` | `B_L` LUT-6; computes their truth tables from its weight groups at elaboration |
| `tlmac_lut6` | one six-input LUT (`o = INIT[addr]`) |
| `tlmac_step_map` | ROM `step → s` |
| `tlmac_switches` | `D_P` multiplexers with static, sparse wiring, each sized to its own fan-in, plus the switch map |
| `tlmac_switch_map` | ROM `step → k` for every multiplexer |
| `tlmac_accumulator` | per output: load `psum_in`, then add `sext(mac) << b` per cycle |
| `tlmac_pkg` | default sizes, helper functions, controller state type |
| `tlmac_layer_pkg` | the compiled layer: weight groups and the four tables |

LUT address convention: bits `[G-1:0]` carry the activation bits (bit `g`
pairs with weight `g`); bits `[5:G]` carry `s`. Truth-table bit `j` of LUT
`i` in an array is bit `i` of the two's-complement bit-plane sum for address
`j`.

## 4. Timing and interface of `tlmac_pe`

* **Accept.** An operation (`act`, `step`, `psum_in`) is taken in a cycle
  where `in_valid && in_ready`. That edge loads the accumulators with
  `psum_in`, captures the activations, and reads both ROMs. The ROM outputs
  are registered, as block RAM. They stay constant for the whole operation
  because `step` does not change within an operation.
* **Run.** The next `B_A` cycles each accumulate one bit plane, LSB first.
* **Done.** `out_valid` rises `B_A + 1` cycles after the accept. `psum_out` is
  the accumulator register itself and holds while `out_valid && !out_ready`.
  In the cycle the result is taken, a new operation can be accepted.
  Back-to-back operations therefore take `B_A + 1` cycles each.
* **Reset.** Synchronous and active low. It resets only the controller; the
  data registers are always loaded before they are read.
* **Assertions.** A result stays offered until it is taken. `b` stays below
  `B_A`. An operation waiting for `in_ready` keeps `act` and `step` stable.

## 5. A whole layer: `tlmac_conv_layer`

The element computes one window position for one step. Turning that into a
convolution layer is the job of `tlmac_conv_layer`. It streams an input
feature map in, drives the element, keeps the partial sums, and streams the
output feature map out. It pads the map with one pixel of zeros and handles
stride 1 or 2 (parameter `STRIDE`), which covers every 3x3 layer of a
ResNet-18 basic block. The output map is `HO x WO` with
`HO = (H - 1) / STRIDE + 1` and `WO = (W - 1) / STRIDE + 1`.

**Order of work.** Input rows are handled one at a time:

1. Load row `r`, all `D_I` channels of its `W` pixels, into a line buffer.
2. For each window centre `x = 0, STRIDE, 2*STRIDE, ...`, issue all `D_S`
   steps to the element.
   * Step `t` takes input channel `ic = t / N_OB` and output-channel block
     `ob = t % N_OB`, with `N_OB = D_O / OC_PAR`.
   * The window is pixels `x-1, x, x+1` of channel `ic`, with zeros past the
     edges.
3. Send every output row that is now finished. Output row `y` is finished
   after input row `min(STRIDE * y + 1, H - 1)`. With stride 1 that means
   row `r - 1`, and after the last input row the last two rows.

**Where the sums go.** Element output `p = kr * OC_PAR + c` is kernel row
`kr` of output channel `ob * OC_PAR + c`. It belongs to output row
`y = (r + 1 - kr) / STRIDE` if that division is exact and `y` lies inside
the output map. Otherwise the result is dropped. With stride 1 each input
row touches three output rows: it starts row `r + 1`, continues row `r`,
and finishes row `r - 1`. With stride 2 an input row touches at most two
output rows.

**The partial-sum buffer.** Only these three rows are live, so the buffer
has three row slots, and row `y` uses slot `y mod 3`. A slot holds
`WO * N_OB` words of `OC_PAR` sums, one per output column and channel
block. Each
operation reads three words, one per kernel row, and writes them back.
No slot is ever cleared. Instead, a row's sum is read as zero the first
time the row is touched, at `ic = 0` on input row
`max(STRIDE * y - 1, 0)`. Sums of rows outside the map are fed as zero and
dropped.

**Interface.**

* Input: `in_valid`/`in_ready`/`in_data`, one pixel per transfer with all
  `D_I` activations, in row-major order.
* Output: `out_valid`/`out_ready`/`out_data`, one block of `OC_PAR` raw
  `B_P`-bit sums per transfer. The order is row, column, channel block.
  `out_last` flags the final transfer of an image, and the next image can
  follow at once.

**Timing.** Operations are issued one at a time, `B_A + 2` cycles each:
the accept cycle, `B_A` bit-serial cycles, and the cycle that takes the
result. Loading, computing and sending do not overlap. A layer therefore
takes about `H * WO * D_S * (B_A + 2)` cycles. That is 1.0 M cycles for the
default 14 x 14 map with 256 channels in and out. Overlapping these phases
would pay off in a real system but does not change the results.

**Defaults.** `D_I = D_O = 256`, `OC_PAR = 64` and `H = W = 14`: the
256-channel stage of ResNet-18 on 224 x 224 images. The element parameters
default as in section 6.

## 6. Parameters

| parameter | default | origin |
|---|---|---|
| `G` | 3 | kernel width of a 3x3 layer |
| `B_W`, `B_A` | 3, 3 | the 3-bit ResNet-18 that matches full-precision accuracy |
| `N_CLUS` | 8 | `2^(6-G)` |
| `B_L` | 5 | `B_W + ceil(log2 G)` |
| `D_S` | 1024 | `D_i * D_o / 64` for 256 channels in and out |
| `D_P` | 192 | `64 * D_k` |
| `B_P` | 18 | own choice: a 512-channel 3x3 layer sums 4608 products of at most 4*7, i.e. at most 129024 < 2^17 |
| `N_ARR` | 512 | own choice: the real count comes from clustering, per layer; for 3-bit groups of three it can never exceed 2^9 = 512 distinct groups |
| `MUX_IN` | 64 | own choice: the largest multiplexer fan-in (sets the switch-map select width); each output's actual fan-in comes from the layer tables |
| `LAYER` | 0 | selects which compiled layer `tlmac_layer_pkg` returns |

Supported ranges: `G` 1 to 5, `MUX_IN` from 2 to `N_ARR`, and `D_S` at least 2.

## 7. Plugging in a real layer

The RTL does not read the layer from files. It calls five functions of
`tlmac_layer_pkg` during elaboration:

* `layer_weight(layer, e, s, g, b_w)`: weight `g` of the group at index `s` of array `e`
* `layer_step_sel(layer, t, n_clus)`: `s(t)`
* `layer_fanin(layer, p, mux_in)`: `fanin(p)`, at most `mux_in`
* `layer_conn(layer, p, k, n_arr)`: `conn(p, k)`
* `layer_switch_sel(layer, t, p, mux_in)`: `k(t, p)`

The versions shipped here generate a pseudo-random example layer from a
hash. That suits verification: any contents give a legal element, since the
weight tensor it computes is defined by the same tables. To deploy a trained
network, replace the function bodies with constant tables written by the
compile flow, one per `LAYER`. Instantiate one `tlmac_pe` per convolution
layer, each with that layer's `D_S`, `N_ARR`, `MUX_IN` and `LAYER`.

## 8. What surrounds the layer engine (not in this RTL)

In a full accelerator, the following are built outside this RTL:

* the FIFOs between layers and the chaining of layers into blocks;
* batch normalisation, the quantiser/activation and the residual additions,
  which are floating point and use DSP slices;
* the first convolution and the classifier, which run on a host.

Their internals are not part of this design.

## 9. Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

| testbench | what it shows |
|---|---|
| `tb_tlmac_lut6` | all 64 addresses of two truth tables |
| `tb_tlmac_lut_array` | all (s, bit pattern) pairs against an integer sum, for G=3/3-bit and G=2/4-bit |
| `tb_tlmac_step_map`, `tb_tlmac_switch_map` | ROM contents, one-cycle read, hold while not enabled |
| `tb_tlmac_pool` | every array of a 16-array pool for random steps and all bit patterns |
| `tb_tlmac_switches` | routing of random array results to each output, multiplexers of different fan-in |
| `tb_tlmac_accumulator` | load, shifted signed accumulation, wrap-around |
| `tb_tlmac_act_serialiser` | bit selection, LSB first |
| `tb_tlmac_ctrl` | b sequence, latency `B_A+1`, back-pressure, back-to-back accept |
| `tb_tlmac_pe` | reduced PE (32 arrays, 64 steps, 12 outputs): 300 random operations under random back-pressure against an integer model, latency, and a 64-step psum chain; counts stalls, input waits, back-to-back operations, negative sums and top activation bits and fails if any never happened |
| `tb_tlmac_pe_full` | the PE at its default size: 8 random operations with latency checks, then one complete window position of a 256-channel layer (all 1024 steps, partial sums of the 4 output-channel blocks carried between steps, 768 sums checked) |
| `tb_tlmac_conv_layer` | the layer engine on a 4→8-channel 3x3 layer with a 5x5 map, at 2-, 3- and 4-bit precision and, at 3 bits, with stride 2 on a 6x5 map, two images each, with random input gaps and output back-pressure; every output sum is compared with a direct convolution (helper `tb_conv_check`) |
| `tb_tlmac_conv_layer_full` | the layer engine at its default size: one whole 14 x 14 image with 256 channels in and out, all 50,176 output sums compared with a direct convolution |

The references compute with plain integer multiply-add and take weights only
through the layer tables. The truth-table construction, the bit-serial
schedule, the routing and the accumulation are therefore all checked
independently.

Running one with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/tlmac_pkg.sv rtl/tlmac_layer_pkg.sv tb/tb_tlmac_pe.sv \
    --top-module tb_tlmac_pe -o sim
./obj_dir/sim
```

The two full-size testbenches each build in under a minute. Elaboration
computes 2560 truth tables and a 1024 x 1152-bit switch map. The whole-image
run then simulates about one million cycles in a few seconds.

## 10. How far to trust it, and where it departs

Taken from the description of TLMAC:

* the bit-serial scheme;
* the LUT-array sizing and the use of the free LUT inputs as a select;
* the pool, switches and accumulators and how they connect;
* the two step-addressed read-only maps;
* sparse static multiplexer wiring;
* the layer mapping (`G = D_k`, `D_P = 64 D_k`, `D_S = D_i D_o / 64`);
* the row-major window order, the three output rows computed together, and
  a partial-sum memory outside the element.

This implementation's own choices:

* **Interface.** The valid/ready handshake, the one-cycle ROM read folded
  into an accept cycle (so `B_A + 1` cycles per operation rather than
  `B_A`), the synchronous reset, and the ordering of the outputs `p`.
* **Arithmetic.** Signed weights, unsigned activations, and a partial sum
  that wraps rather than saturates.
* **Select width.** Each multiplexer has its own fan-in, but the switch map
  stores every select with the width of the largest, `MUX_IN`.
* **Layer engine.** In `tlmac_conv_layer`, the following are this design's
  own choices:
  * the step order (input channel major);
  * the three-slot buffer and the zero-on-first-use rule;
  * the line buffer;
  * the serial, non-overlapped schedule;
  * the stream formats;
  * the 14 x 14 default map;
  * strides 1 and 2 only.
* **Default sizes.** The defaults `B_P = 18`, `N_ARR = 512` and
  `MUX_IN = 64` are this design's own.
* **Generic LUT.** `tlmac_lut6` is a generic 64:1 table read, not a vendor
  primitive. It maps to one LUT-6 on a six-input fabric; on other fabrics
  it is simply logic.
* **No real layer.** No trained network's tables are included: the example
  layer is synthetic. The resource and power figures of a real deployment
  are therefore not reproduced here.

The LUT truth tables are computed in elaboration-time functions, and the ROMs
are filled by `initial` loops that call the layer functions. Both are the
usual way to describe constant LUTs and ROMs for FPGA synthesis. Some
open-source flows stop on the full-size switch map: their constant-evaluation
step limits are lower than the 196,608 function calls that the map needs.
