# Deep Positron: a posit-arithmetic DNN inference engine in SystemVerilog

Small neural networks can run inference in 8 bits or fewer, provided that
the arithmetic does not lose accuracy in the many multiply-and-accumulate
steps of each neuron. This design makes every neuron an **exact
multiply-and-accumulate unit (EMAC)**. Products are converted to fixed point
and summed in an accumulator wide enough to hold any sum exactly. The result
is rounded once, when the neuron's sum is complete. The main number format is
the **posit**, a tapered-precision format whose accuracy is highest near ±1,
where DNN weights and activations cluster. EMACs for 8-bit floating point
and fixed point are also included, so the same network can be built in any
of the three formats.

The RTL follows the architecture of *Deep Positron: A Deep Neural Network
Using the Posit Number System* (Carmichael et al., DATE 2019). It gives
that paper's EMAC datapaths and network organisation as synthesizable
SystemVerilog. Where the paper leaves a detail open, the choice made here is
marked below and in each file's header.

## 1. Posits in one page

An n-bit posit with `es` exponent bits is laid out as

    sign | regime: r r ... r r̄ | exponent: es bits (if room) | fraction (if room)

The regime is a run of equal bits closed by the opposite bit. A run of m
ones means k = m−1. A run of m zeros means k = −m. The value is

    (−1)^s · (2^(2^es))^k · 2^e · 1.f

If the sign is set, the word is two's complemented before it is read. `0…0`
is zero and `10…0` is NaR ("not a real"). This design never produces NaR and
does not accept it as an input. Long regimes leave fewer bits for the
fraction, so precision is highest near 1 and tapers off toward
maxpos = 2^(2^es·(n−2)) and minpos = 1/maxpos.

`posit_decode` extracts the fields with a single leading-zero detector:

1. Take the two's complement of the n−1 bits below the sign.
2. Read the first regime bit, `rc`.
3. XOR the word with `rc`, so that the regime run is always made of zeros.
4. Count that run with `lzd`. Call the count `zc`.
5. Shift out the run and its terminating bit.
6. Read the exponent and fraction from the top of what is left.

The regime is then k = rc ? zc−1 : −zc. The decoder returns the combined
**scale factor** sf = k·2^es + e as one signed number, together with the
fraction and its hidden bit (`{nonzero, f}`, n−2−es bits).

## 2. The posit EMAC (`posit_emac`): where the exactness comes from

The unit computes `round(bias + Σ wᵢ·aᵢ)` over up to K terms. It has two
pipeline stages and a combinational output.

**Stage 1 (multiply).** The weight and activation are decoded. Their
fractions are multiplied into a 2(n−2−es)-bit product, the signs are XORed
and the scale factors added. The product is negated if its sign is set. The
signed product and the scale factor are registered. This register is the
flip-flop between multiplication and accumulation.

**Stage 2 (accumulate).** The accumulator (the *quire*) is

    qsize = 2^(es+2)·(n−2) + 2 + ⌈log₂ K⌉   bits

and its LSB weighs minpos² = 2^−bias, where bias = 2^(es+1)·(n−2).
Adding `bias` to a product's scale factor gives a shift amount that is
never negative for nonzero operands. The product is shifted left by that
amount and added to the quire.

The product is placed without first normalising it. Its value is
`frac_product · 2^(sf_w+sf_a − 2(n−3−es))`. It is shifted by
`sf_w+sf_a+bias` in a buffer that is 2(n−3−es) bits wider, and then the
extra low bits are dropped. Those bits are provably zero, because every
posit product is a multiple of minpos². So no bit is lost.

The bias is decoded and placed the same way, once. It is loaded straight
into the quire by `clr`, and the products accumulate on top of it.

| n, es | quire (K = 16) | product | 8-bit range |
|-------|----------------|---------|-------------|
| 8, 0  | 30 bits        | 12 bits | 2^±6        |
| 8, 1  | 54 bits        | 10 bits | 2^±12       |
| 8, 2  | 102 bits       | 8 bits  | 2^±24       |

**Output (round and encode).** The output logic works on the quire register
in these steps:

1. Take the quire's magnitude.
2. Find its leading one with `lzd`. The leading one's position minus `bias`
   is the result's scale factor.
3. Split the scale factor into a regime k (an arithmetic shift by es) and an
   exponent e.
4. Build the posit bit string: the regime run, its terminator, e, the
   fraction bits below the leading one, and a sticky bit for everything
   further down.
5. Keep the top n−1 bits. Round with guard and sticky: round to nearest,
   ties to the even bit pattern. Rounding is done in the bit string, which is
   how posits define it. When exponent bits are cut off, the tie point is
   therefore the value of the (n+1)-bit pattern in between.
6. Clip. Sums above maxpos give maxpos. Nonzero sums below minpos give
   minpos. A posit never overflows to NaR and never underflows to zero. An
   exact zero gives 0.
7. Restore the sign by two's complement.

**Timing.** `clr` loads the bias. Each `en` cycle takes one
(weight, activation) pair, which is accumulated on the next clock. `clr`
and the first `en` may come in the same cycle. `result` is combinational
from the quire and is final two clocks after the last `en` cycle. An
assertion flags a `clr` that would discard a product still in the pipeline.

## 3. The float and fixed-point EMACs

**`float_emac`** takes `{sign, WE exponent bits, WF fraction bits}` with
exponent bias 2^(WE−1)−1 and subnormals. Infinity and NaN are not modelled.
The datapath works as follows:

- The hidden bit is the OR of the exponent bits. A zero exponent is used
  as 1.
- The (WF+1)-bit significands are multiplied.
- The shift is S−3, where S = e_w + e_a + 1.
- The signed product is shifted into an accumulator of
  w_a = ⌈log₂K⌉ + 2(2^WE − 2 + WF) + 2 bits, whose LSB weighs
  min_subnormal².
- The output normalises the sum and rounds to nearest, ties to even, at the
  normal LSB, or at the subnormal LSB when the exponent field would be 0.
- The result clips at the largest finite value.
- A result that rounds to zero is +0.

The default is WE=4, WF=3.

**`fixed_emac`** takes two's complement words with Q fraction bits. The
full 2n-bit product is registered and accumulated in
w_a = ⌈log₂K⌉ + 2n bits. The bias is preloaded after a shift left by Q. The
output is `acc >>> Q`, which truncates toward −∞, saturated to the n-bit
range. The default is Q=4.

All three EMACs have the same ports and timing, so `dp_layer` can switch
between them with a parameter.

## 4. The network (`deep_positron`, `dp_layer`, `param_mem`, `relu`)

The network is a chain of NUM_LAYERS fully connected layers with sizes
`SIZES[0] → SIZES[1] → … → SIZES[NUM_LAYERS]`. The default, 4-5-5-2, has
two hidden layers and a two-neuron readout.

In each layer:

- Every neuron is one EMAC (`dp_layer`). The EMAC's K is the number of
  inputs + 1, so the bias counts as a term.
- Weights and biases sit in the layer's own memory (`param_mem`). It has
  one word-wide write port. Its read port returns, for one input index, the
  weight of every neuron at once, plus all biases. Reads are combinational.
  Nothing is fetched off chip during inference.

When a layer is started, it proceeds as follows:

1. It copies its input vector into a local register and loads every EMAC
   with that neuron's bias.
2. For `N_IN` cycles, input `x[i]` is broadcast to all EMACs, each with its
   own weight `w[j][i]`.
3. One DRAIN cycle lets the last product reach the quire.
4. In WB (write-back), the rounded outputs pass through `relu` and are
   written to the output register. The readout layer passes them through
   unchanged instead.
5. If the output register still holds an unread result, WB waits. This is
   the layer's stall.

From start to result takes **N_IN + 3 clocks**.

ReLU zeroes any word whose sign bit is set. This is correct in all three
formats.

**Streaming.** Because each layer copies its input, layer l can work on
vector t while layer l+1 works on vector t−1. The network then accepts one
vector every `max(SIZES[l]) + 3` to `+ 4` clocks. A lone vector takes
`Σ_l (SIZES[l] + 3)` clocks from acceptance to `out_valid`. That is 23
clocks for 4-5-5-2.

## 5. Control unit and host interface (`dp_controller`)

The control unit is a three-state FSM:

| mode | meaning |
|------|---------|
| LOAD (0, after reset) | `cfg_we` writes `cfg_data` into layer `cfg_layer`: the bias of neuron `cfg_neuron` if `cfg_bias`, else its weight for input `cfg_index`. No inputs are accepted. `cfg_mode = 0` moves to STREAM. |
| STREAM (1) | `in_valid`/`in_ready` accepts a vector when layer 0 is idle. Layer l>0 is started the cycle that layer l−1 holds a result and layer l is idle; that same cycle frees layer l−1's output. `out_valid`/`out_ready` hands the last layer's result to the host. |
| DRAIN (2) | Entered when `cfg_mode` rises in STREAM. Input is refused while the vectors in flight finish and are read out. Then the FSM enters LOAD. |

`busy` is high while any layer is computing or holding a result. All ports
are synchronous to `clk`. `rst_n` is an asynchronous, active-low reset.
The parameter memories are not reset.

Parameters of the top level:

| parameter | default | meaning |
|-----------|---------|---------|
| `FORMAT` | `FMT_POSIT` | `FMT_POSIT`, `FMT_FLOAT` or `FMT_FIXED` (`dp_pkg::format_e`) |
| `N` | 8 | word width; for float, N = 1 + WE + WF |
| `ES` | 0 | posit exponent bits |
| `WE` | 4 | float exponent bits |
| `Q` | 4 | fixed-point fraction bits |
| `NUM_LAYERS`, `SIZES` | 3, `'{4,5,5,2}` | topology |

## 6. Where this RTL departs from, or adds to, the source

- **Product normalisation.** The published posit algorithm normalises the
  product by its overflow bit (a 1-bit right shift) before the shift to
  fixed point. That shift would drop the product's LSB. Here the
  unnormalised product is placed directly, which gives the same value
  exactly.
- **Posit output stage.** The published encode sequence (overflow tests,
  two shifted templates, `shift_neg`/`shift_pos`) is replaced by direct
  bit-string packing with guard and sticky bits. The rounding rule is the
  same: nearest, ties to even, clip to maxpos/minpos. The testbench checks
  the result against an independent definition of posit rounding.
- **Float bias placement.** The published figure gives the bias shift only
  as `BIAS+1` and `S << (S−3)`. The shift used here is derived from the
  accumulator's LSB weight.
- **Fixed point.** The clip range is the full two's complement range, and
  truncation is `>>> Q`. The source does not give a value for q; the
  default here is 4.
- **Layer sizes.** The source's datasets were run with hidden sizes it does
  not state. The default 4-5-5-2 is the example network drawn in the paper.
- **Added by this design.** The memory organisation, the per-layer
  broadcast schedule and its states, the input copy, the stall, the
  parameter-loading port, the LOAD/STREAM/DRAIN modes, and the
  valid/ready host handshakes are this design's own. The source says only
  that each layer has local parameter memory, that a layer starts when the
  previous one has finished, and that a finite-state-machine control unit
  directs the data flow.
- **NaR and Inf/NaN inputs** are not supported, as in the source.
- **Not reproducible from RTL.** The FPGA results (frequency, LUTs, power,
  energy-delay product on a Virtex-7) and the reported accuracies (Iris 98%,
  breast cancer 85.9%, mushroom 96.4% with 8-bit posits) depend on a device
  and on trained weights that are not part of this RTL.

## 7. Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=… failures=…` and has a watchdog. The reference
arithmetic in `tb/dp_ref_pkg.sv` is independent of the RTL:

- It decodes posits and floats bit by bit into exact 256-bit scaled
  integers.
- It sums the terms exactly.
- It rounds a posit by locating the value between adjacent patterns p and
  p+1 and comparing it with the (n+1)-bit midpoint pattern `{p,1}`.
- It rounds a float to the nearest value, ties to even.

| testbench | what it covers |
|-----------|----------------|
| `tb_lzd`, `tb_relu`, `tb_posit_decode` | exhaustive (posit decode at (8,0), (8,2), (5,1)) |
| `tb_posit_emac` | ~900 random and corner-case dot products at (8,0), (8,2), (6,1); result checked on its due cycle; clipping to maxpos and minpos exercised |
| `tb_float_emac`, `tb_fixed_emac` | random dot products, clipping/saturation, subnormals |
| `tb_param_mem` | write and read-back of every word |
| `tb_dp_layer` | posit, float and fixed layers: values, N_IN+3 latency, write-back stall, ReLU |
| `tb_dp_controller` | every output of the FSM checked each cycle against a layer model; drain before load |
| `tb_deep_positron` | the default network end to end: parameter load, streaming with back-pressure, lone-vector latency (23 clocks), a mid-stream switch to LOAD (drain), a reload and a second stream; stalls, pipelined overlap, ReLU, saturation and each mode must occur |
| `tb_dp_workloads` | networks shaped like the evaluated tasks, with random weights: Iris 4-5-5-3 (50 inferences; posit es=0 and 2, float w_e=4 and 3, fixed point), breast cancer 30-5-5-2 (190), mushroom 22-5-5-2 (2708) |

To simulate, run from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -y rtl -y tb rtl/dp_pkg.sv tb/dp_ref_pkg.sv \
        tb/tb_deep_positron.sv --top-module tb_deep_positron -o sim
    ./obj_dir/sim

Use the same command for any other testbench; only the file and the
`--top-module` change. The testbenches need no data files: they generate
random parameters and inputs with `$urandom`.

To change the network, override `SIZES`, `NUM_LAYERS` and `FORMAT` on
`deep_positron`. `tb/tb_dp_net_run.sv` shows a parameterised instance
together with a matching reference model.
