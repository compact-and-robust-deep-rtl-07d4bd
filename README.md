# FLAN: an adder-network lifetime accelerator for fluorescence lifetime imaging

In time-domain fluorescence lifetime imaging (FLIM), each pixel of the image
gives a histogram of photon arrival times after a laser pulse: 256 time bins
of about 39 ps each. The lifetimes are in the shape of that decay. This
design estimates two of them directly from the histogram with a small 1-D
neural network:

- the **amplitude-averaged lifetime** tau_A = sum(a_i tau_i);
- the **intensity-averaged lifetime** tau_I = sum(a_i tau_i^2) / sum(a_i tau_i).

The network is a *Fluorescence Lifetime AdderNet* (FLAN). Its convolutions
use no multiplications. An adder convolution measures the l1 distance between
the input window and the kernel, `-sum |x - w|`, where an ordinary
convolution takes a dot product. The only multipliers left are in the batch
norm that follows each adder convolution, one per output channel. This suits
FPGA logic well.

The RTL describes the FPGA side of the accelerator. Four identical processing
elements (PEs) each run the whole network on one pixel, so a batch of four
pixels is processed at a time. A host processor streams histograms in and
receives lifetimes back. Pixels whose photon count is at or below a
threshold are background; they skip the network and get zero lifetimes.

## The network

Feature maps are written as *width x channels*. Every "UAC" is a *unified
adder convolution*: adder convolution, then batch norm (BN), then ReLU. No
layer pads its input; a layer shrinks the width through its kernel and
stride, `W_out = (W_in - K) / S + 1`.

| stage | operation | output |
|---|---|---|
| input | histogram, 256 bins | 256 x 1 |
| Pre #1 | UAC, kernel 13, stride 5, 5 channels | 49 x 5 |
| Pre #2 | UAC, kernel 9, stride 3, 10 channels | 14 x 10 |
| Resblock | UAC 1x1 -> AC 1x1 + ReLU -> add block input -> BN | 14 x 10 |
| reshape | the 14 x 10 map read as one vector | 1 x 140 |
| O #1 | UAC 140->70, UAC 70->30, UAC 30->1 | tau_A |
| O #2 | UAC 140->70, UAC 70->30, UAC 30->1 | tau_I |

The network holds 24,685 learned values: 24,435 adder-conv weights plus a
scale and a shift for each of the 125 BN channels.

### Arithmetic

All values are signed fixed point:

- **Feature maps** are Q16.16 in 32 bits. This covers the histogram bins,
  every intermediate map and the two lifetimes.
- **Learned parameters** are Q10.10 in 20 bits. These are the weights and the
  folded BN coefficients.

A weight is shifted left by 6 bits to line it up with the feature format
before the subtraction. One output element of an adder convolution is

    acc = - sum over taps k and input channels c of | x[w*S + k][c] - (W[k][c][o] << 6) |

kept in 48 bits. No layer can overflow that: a sum has at most 140 terms,
each below 2^33. The batch norm is folded offline into one multiply and one
add per channel:

    scale = gamma / sqrt(var + eps)
    shift = beta - gamma * mean / sqrt(var + eps)
    y     = sat32( (acc * scale) >>> 10  +  (shift << 6) )

`>>>` is an arithmetic shift, so it rounds toward minus infinity. `sat32`
clamps the result to the 32-bit range. ReLU then clears negative values.

The network needs its BN. An adder convolution's raw output is never
positive, so a ReLU straight after it would output only zeros. A negative
BN scale turns the distance into a positive similarity. This is why the
residual block needs care: it applies an AC and a ReLU with no BN between
them, so its inner path always outputs zero. The block then computes only
`BN(x)`. The RTL builds the block in that order. `res_block` has a
parameter `MID_BN_EN` that inserts a BN before that ReLU, for a trained
model that has one.

## How one layer is computed (`uac_layer`)

All the convolutions of the network are instances of one engine,
`uac_layer`, with these parts:

- **CO_PAR adder lanes** (`ac_lane`), one per output channel of the current
  channel group. Each cycle a lane takes CI_PAR input channels at one kernel
  tap, forms the CI_PAR distances `|x - w|`, sums them in an adder tree and
  adds the sum into its accumulator. At the last tap and channel group it
  moves the negated total into a result register.
- **One `bn_relu` per lane**, which turns the accumulator into the output
  value. That value is written into the layer's own output buffer.
- **Weight RAMs split into CO_PAR x CI_PAR small memories**, one for each
  lane and input position. This way every lane gets all its weights for a
  cycle in a single read, with no port conflicts.

The loop order is: output position, output-channel group, kernel tap,
input-channel group. A layer therefore takes

    cycles = W_out * ceil(CH_out / CO_PAR) * K * ceil(CH_in / CI_PAR) + 3

from `start` to `done`. The +3 covers the weight read, the accumulation and
the output write. The parallelism of each layer in the PE is:

| layer | CI_PAR x CO_PAR | issue cycles |
|---|---|---|
| Pre #1 | 1 x 5 | 637 |
| Pre #2 | 5 x 10 | 126 |
| Resblock UAC, AC | 10 x 10 | 14 + 14 |
| residual add + BN | one row per cycle | 14 |
| O #1, O #2 (in parallel) | 10 x 10, 10 x 10, 10 x 1 | 98 + 21 + 3 |

Feature maps live in register arrays, stored channels-last: element
`[w*CH + c]`. With this order the "reshape" of 14 x 10 into 1 x 140 moves
no data. The branches read the residual block's buffer directly.

## The accelerator (`flan_accel`)

One batch goes through three phases, and they do not overlap:

1. **Load.** `input_logic` takes 4 x 256 bins from the `s_*` stream, one bin
   per beat, and writes bins 0-255 into PE 0's histogram buffer, the next
   256 into PE 1's, and so on. Each PE's `bg_filter` adds up the photon count
   as the bins go by.
2. **Run.** All four PEs start together. A PE whose count N_pc is at most
   `threshold` (in photons) skips the network and reports zeros in 2
   cycles. The others take 959 cycles:
   1 + (637+3) + 1 + (126+3) + 1 + 51 + 1 + 133 + 1 + 1.
3. **Unload.** `output_logic` sends eight Q16.16 words on the `m_*` stream:
   PE0 tau_A, PE0 tau_I, PE1 tau_A, and so on, with `m_last` on the eighth.
   The host may hold `m_ready` low; each word then stays on the bus until it
   is taken. An assertion checks this rule.

A full batch takes about 2,000 cycles:

- 1,024 cycles to load;
- 964 cycles from the last accepted bin to the first result (7 cycles if all
  four pixels are background);
- 8 cycles to unload.

This works out to about 2 pixels per microsecond at 100 MHz.

Status outputs: `busy` is low only while the accelerator waits for
histograms. `batches` counts finished batches. `skipped_px` counts
background pixels.

### Loading the learned parameters

Each PE keeps its own copy of all parameters, next to the layer that uses
them, so the four PEs never share a memory port. Parameters are written
while the accelerator is idle, one per cycle, over the `prm_wr` bus. The bus
is broadcast to all PEs. One write is a `flan_pkg::prm_wr_t`:

| field | meaning |
|---|---|
| `layer` | `L_PRE1`, `L_PRE2`, `L_RES_U`, `L_RES_A`, `L_RES_BN`, `L_OA1..3` (O #1), `L_OI1..3` (O #2) |
| `kind` | `P_WEIGHT`, `P_SCALE` or `P_SHIFT` |
| `co`, `ci`, `k` | output channel, input channel, kernel tap (scale and shift use only `co`) |
| `data` | Q10.10 value |

A branch's first layer numbers its 140 inputs in storage order: input
`w*10 + c` is position w, channel c of the residual block's output. A model
trained with a channels-first flatten needs its weights reordered to match.

## Log-scale bin merging (`ls_binner`, optional)

The decay carries most of its information in the first bins. The tail is
sparse. The merger turns the 256 bins into M = 80 bins whose widths grow
geometrically. Compressed bin x sums the original bins s(x) to s(x+1)-1:

    s(x) = floor((r^x - 1) / (r - 1)),   where (r^80 - 1) / (r - 1) = 256,  r = 1.02560

The first nine merged bins are one original bin wide; the last is eight bins
wide. r and the boundary table are worked out at elaboration time.

Setting `LS_EN = 1` on `flan_accel` puts the merger between the input logic
and the PEs. The PEs are then built for 80 bins:

- Pre #1 gives 14 x 5;
- Pre #2 gives 2 x 10;
- the branches take a 20-value vector.

The first result of a batch then arrives 281 cycles after its last bin.

Treat this as a demonstration of the merger, not as a second network. A
network trained on merged histograms would use fewer down-sampling layers,
and its layer sizes are not defined here. The default build, `LS_EN = 0`,
is the 256-bin network above.

## Departures and limits

These are the points where this RTL makes its own choices:

- **Residual block kernels.** The residual block's convolutions are 1x1 with
  stride 1. This is the only unpadded choice that keeps the 14 x 10 size.
- **Background test in hardware.** The threshold test runs inside each PE.
  A host that already drops background pixels can set the threshold to 0.
- **Parameters loaded at run time.** The parameters are written over the
  `prm_wr` bus. They are not built into the memories when the FPGA is
  configured, and no trained parameter set ships with the RTL.
- **Parallelism and scheduling are chosen freely.** This covers CI_PAR,
  CO_PAR and the layer-by-layer order within a PE, so cycle counts follow
  from those choices.
- **Host-side work is not included.** Converting floating point to Q16.16
  and back, and building the mask map, are left to the host.
- **Interconnect is not included.** The histograms' memory and the bus
  interconnect are outside the module; the two streams stand in for them.
- **Parameter count.** The branches of the network as drawn hold
  2 x (140·70 + 70·30 + 30) = 23,860 weights. This is more than the
  roughly 23,000 quoted for the whole published network, so this count
  cannot be reconciled with the drawn layer sizes. The RTL follows the
  layer sizes.
- **Number formats.** Feature maps are 32-bit Q16.16 and parameters Q10.10.
  The implementation was also summarised as "16-bit fixed point"; this RTL
  follows the detailed Q16.16 / Q10.10 split.
- **Rounding.** Truncation, saturation and the 48-bit accumulator are this
  design's choices. Results are bit-exact with the reference model in
  `tb/flan_ref_pkg.sv`, not with a floating-point network.

## Files

| file | contents |
|---|---|
| `rtl/flan_pkg.sv` | number formats, layer ids, parameter-bus struct, saturation |
| `rtl/flan_accel.sv` | top: batch controller, 4 PEs, input/output logic, optional merger |
| `rtl/input_logic.sv` | stream to four histogram buffers |
| `rtl/output_logic.sv` | eight lifetimes to the output stream |
| `rtl/ls_binner.sv` | log-scale bin merging |
| `rtl/flan_core.sv` | one PE: buffer, background test, layer sequencer |
| `rtl/bg_filter.sv` | photon count and threshold test |
| `rtl/uac_layer.sv` | adder-convolution layer engine with its parameter RAMs |
| `rtl/ac_lane.sv` | one adder lane: distances, adder tree, accumulator |
| `rtl/bn_relu.sv` | folded batch norm and ReLU |
| `rtl/res_block.sv` | residual block |
| `rtl/res_add_bn.sv` | skip addition and BN of the residual block |
| `rtl/out_branch.sv` | one output branch, three 1x1 UACs |
| `tb/flan_ref_pkg.sv` | bit-exact reference network and synthetic decays |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Simulating

Every testbench checks its own results. Each one ends by printing
`TB_RESULT checks=N failures=M`. With Verilator 5:

    verilator --binary --timing --assert -Mdir obj \
        rtl/flan_pkg.sv tb/flan_ref_pkg.sv rtl/*.sv tb/tb_flan_accel.sv \
        --top-module tb_flan_accel
    ./obj/Vtb_flan_accel

Replace `tb_flan_accel` with any other testbench name. Each testbench only
needs the modules it uses, but passing all of `rtl/` does no harm.

`tb_flan_accel` runs the default design end to end. It loads a random
parameter set, then sends 100 pixels as 25 batches of four: synthetic decays
of varied brightness and length, with background pixels mixed in and one
batch of background only. The input stream has random gaps, and the output
stream gets random back-pressure. Every lifetime is compared with the
reference model, and so are the status counters and the latency. The build
takes a few minutes because the design is large; the run takes seconds.
`tb_flan_accel_ls` does the same with `LS_EN = 1`.

The block testbenches compare each unit with the reference arithmetic:

- every layer shape, including channel counts that are not a multiple of
  the parallelism;
- saturation;
- the threshold edge `N_pc = T`;
- the stream rules;
- the cycle counts given above.

The random parameters have realistic magnitudes, but they are not a trained
model. The tests therefore show that the hardware computes the network
exactly. They say nothing about how accurate the lifetimes are.
