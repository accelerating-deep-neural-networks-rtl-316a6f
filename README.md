# A run-time configurable convolution accelerator for LArTPC region-of-interest classification

Liquid-argon time projection chambers, such as the far detector of the Deep
Underground Neutrino Experiment, produce images of particle tracks. A low-level
trigger can keep or drop each frame by classifying a small, noise-suppressed
region of interest (ROI), resampled to 64x64 pixels, with a convolutional
network. Most of that network's arithmetic is in its convolutional layers. The
accelerator in this repository computes those layers next to a host processor
on an FPGA SoC.

The accelerator is *loosely coupled*. It is not part of the processor pipeline.
It sits on the SoC interconnect, fetches its own operands from main memory by
DMA, and writes its results back. It computes one convolutional layer per run.
The host sets the layer's shape at run time: input size and channels, number of
filters, kernel size, stride and padding. Pooling, dense layers and the final
decision stay on the host.

The block structure follows the published accelerator:

- two prefetch engines;
- three private local memories (PLMs);
- a patch extractor for each common kernel size;
- several multiply-accumulate engines;
- AXI4 ports to the rest of the chip.

The published description gives the function of these blocks but not how they
are built. Widths, depths, protocols and scheduling are therefore this
design's own choices, and each is listed below.

## What one run computes

Data words are 32-bit signed fixed point with 16 fractional bits (Q16.16).
Feature maps and weights sit in main memory in channel-major order:

    input   in[c][y][x]        c < in_c,   y < in_h,  x < in_w
    weights w[f][c][ky][kx]    f < n_filt, ky,kx < k
    output  out[f][oy][ox]     oy < out_h, ox < out_w

Each output word is computed as

    acc = sum over c, ky, kx of  in[c][oy*stride - pad + ky][ox*stride - pad + kx] * w[f][c][ky][kx]
    out = saturate_to_32_bits(acc >>> 16)

An input pixel outside the image counts as zero (zero padding). The products
are exact, and the accumulator is 72 bits wide, so no intermediate result
overflows. `>>>` is an arithmetic shift, so results round toward minus
infinity. The layer adds no bias and applies no activation function.

## Block structure

```
 AXI4 in  --> prefetch_engine (u_pf_in) --> input_plm --> patch_extractor_bank --+
                                                         (3x3 5x5 7x7 9x9 11x11)  | patch (121 words)
                                                                                  v
 AXI4 w   --> prefetch_engine (u_pf_w)  --> weights_plm ----- 9 weights/engine --> mac_engine x4
                                          (4 groups x 9 sub-banks)                 |
                                                                                  v 4 results
 AXI4 out <-- store_engine <------------------------------------------------- output_plm (4 banks)

                         conv_ctrl sequences all of the above
```

| File | Role |
|---|---|
| `rtl/cnn_pkg.sv` | Shared constants, the `conv_cfg_t` configuration struct, and the AXI4 payload structs |
| `rtl/conv_lca.sv` | Top level: wires the blocks together; host and AXI4 ports |
| `rtl/conv_ctrl.sv` | Latches and checks the configuration, then runs load / compute / store |
| `rtl/prefetch_engine.sv` | AXI4 read DMA into a PLM (two instances) |
| `rtl/store_engine.sv` | AXI4 write DMA out of the Output PLM |
| `rtl/input_plm.sv` | Input maps in 16 column-interleaved banks: streamed writes, one 16-pixel row segment read per cycle |
| `rtl/weights_plm.sv` | Weights: one group of 9 sub-banks for each MAC engine, plus the write address generator |
| `rtl/output_plm.sv` | Outputs: one bank for each MAC engine |
| `rtl/patch_extractor.sv` | Gathers a KxK window for one fixed K, with zero padding |
| `rtl/patch_extractor_bank.sv` | One extractor per K; the layer's `k` enables one of them |
| `rtl/mac_engine.sv` | 9 multipliers, an adder tree (`rtl/adder_tree.sv`) and an accumulator |

## How a layer is scheduled

The controller works through the filters in groups of `NUM_MAC` (4), one filter
per MAC engine:

1. **Load.** Both prefetch engines start together. One reads the whole input
   (`in_h*in_w*in_c` words) into the Input PLM. The other reads the weights of
   group 0 into the Weights PLM. The input is loaded only once per layer and is
   reused by every group.
2. **Compute.** The controller visits every output pixel `(oy, ox)` in
   row-major order, and every input channel `c` within it:
   - It starts the patch extractor for the layer's K. The window's top-left
     corner is `(oy*stride - pad, ox*stride - pad)`, in the plane of channel
     `c`.
   - It waits until the patch is ready.
   - It then spends `n_chunk = ceil(K*K/9)` cycles streaming the patch through
     all four MAC engines, 9 elements per cycle. In each cycle it reads the
     matching 9 weights of every engine from the Weights PLM, one cycle ahead
     of the engines.
   - After the last chunk of the last channel, the four engines deliver their
     results, and the controller writes them into the four Output PLM banks at
     address `oy*out_w + ox`.
3. **Store, and the next weights.** The store engine writes the group's output
   maps to `out_base + 4*f*out_h*out_w`. At the same time, the weight prefetch
   engine loads the next group's weights. The store needs only the Output PLM
   and the weight load needs only the Weights PLM, so the two can overlap. The
   next group starts when both have finished. A last group with fewer than 4
   filters leaves the extra engines idle, and their results are never stored.

**Compute time.** Each output pixel takes `in_c * (K + 4 + n_chunk)` clock
cycles per group. The K rows of a patch are read one row per cycle. Add two
cycles of latency, one start cycle and one release cycle. The DMA time comes
on top of this.

**CNN_s example.** The first layer of the CNN_s network is 64x64x1 in, 32
filters, 3x3 kernel, padding 1. Compute takes 4096 pixels x 8 groups x 8
cycles = 262k cycles. In simulation, with main memory withholding its
handshakes 25% of the time, the whole layer took about 454k cycles, or 4.5 ms
at 100 MHz. Most of the difference is the eight group stores: the next group
must wait for its store, because the Output PLM has only one buffer.

The schedule keeps the design simple; it is not tuned for speed:

- The extractor re-reads the whole window for every pixel instead of reusing
  the columns it shares with its neighbour.
- Extraction and MAC work do not overlap.
- The Output PLM is not double-buffered, so a group's store is not hidden
  behind the next group's compute.

## Patch extractors

Convolution windows have an irregular access pattern that depends on the layer,
so there is one extractor for each common kernel size: 3x3, 5x5, 7x7, 9x9 and
11x11. The bank enables only the extractor for the configured `k`. That
extractor alone drives the Input PLM read port, and its patch appears row-major
in the first K*K entries of a 121-entry vector. The remaining entries are zero.

The Input PLM is split into 16 banks, interleaved by column: pixel `x` of a row
is in bank `x mod 16`. Any 16 consecutive pixels of a row therefore sit in 16
different banks. Each row takes `wb = ceil(in_w/16)` words in every bank, so
row `y` of channel `c` starts at bank address `(c*in_h + y)*wb`. A read gives
a row address and a signed first column `x0`. Each bank works out which of its
columns lies in the 16 columns from `x0` on, and reads that word. This way a
whole window row, up to 11 pixels, comes out in one cycle.

An extractor walks its K window rows with one read per cycle. A pixel outside
the image is replaced by zero, which is how padding is done; a row wholly
outside the image is not read at all. Stride is not handled in the extractor:
it comes in through the window origin the controller supplies. `patch_valid`
rises K+2 cycles after `start`. The patch is then held until `patch_ready`.

## Weights PLM banking and MAC chunks

Each MAC engine must receive 9 weights per cycle, so each engine's weights are
split over 9 sub-banks. Weight `i` (row-major index in the KxK kernel) of
channel `c` is placed as follows:

    sub-bank = i mod 9
    address  = c*n_chunk + i/9

In cycle `t` of a channel, every sub-bank is read at address `c*n_chunk + t`.
This returns weights `9t .. 9t+8` of that channel. The engine multiplies them by
patch elements `9t .. 9t+8`.

The write side receives the weights as one linear stream in main-memory order.
Counters (engine, channel, element, lane, chunk) compute the sub-bank and
address, so no hardware divider is needed.

When K*K is not a multiple of 9 (25, 49, 121), the last chunk has unused lanes.
Those lanes keep stale weights, so the MAC engine masks every lane whose index
is K*K or more.

One sub-bank holds 128 words. A layer therefore fits when
`in_c * n_chunk <= 128`, which means up to 128 input channels for 3x3 kernels
and up to 9 for 11x11 kernels.

## Host interface

`cfg` is a `conv_cfg_t`. The controller copies it in the cycle of the `start`
pulse, so the host may change it afterwards. It has these fields:

- `in_base`, `w_base`, `out_base`: byte addresses, 4-byte aligned;
- `in_h`, `in_w`, `in_c`: input height, width and channels;
- `n_filt`: number of filters;
- `out_h`, `out_w`: output size, given by the host as `(in + 2*pad - k)/stride + 1`;
- `k` (3, 5, 7, 9 or 11), `stride` (at least 1) and `pad`.

`busy` is high during a run. `done` pulses once at the end. `err` is valid
together with `done` and stays valid until the next start.

The controller rejects a layer at once, raising `err` together with `done`, if:

- the kernel size is not supported;
- the stride is zero, or a size field is zero;
- the input does not fit the Input PLM banks (`in_h*ceil(in_w/16)*in_c > 256`);
- one output map does not fit an Output PLM bank (`out_h*out_w > 4096`);
- the weights of one filter do not fit (`in_c*n_chunk > 128`).

A run also ends with `err` set if any AXI4 response is not OKAY.

## AXI4 ports

The top has three AXI4 master ports: a read port for the input maps, a read
port for the weights, and a write port for the outputs. They are meant to be
joined to the system interconnect. The ports use:

- 32-bit data and no ID signals;
- INCR bursts of 4-byte beats, at most 16 beats long, split so that no burst
  crosses a 4 KB boundary;
- `r_ready` and `b_ready` tied high.

The read engines keep issuing requests while data returns. The write engine
sends each burst's address before its data and counts the write responses.
Assertions in the engines check that a request, or write data, stays valid and
unchanged while it waits for `ready`.

## Parameters

Defaults are in `cnn_pkg`, and `conv_lca` passes them down:

| Parameter | Default | Origin |
|---|---|---|
| `NUM_MAC` | 4 | Four engines are drawn in the published block diagram; the text says only "several" |
| `N_MUL` | 9 | This design: one 3x3 patch per cycle |
| kernel sizes | 3, 5, 7, 9, 11 | Published range, 3x3 to 11x11 |
| `IN_DEPTH` | 4096 | This design: one 64x64 single-channel ROI |
| `IN_BANKS` | 16 | This design: a window row of up to 11 pixels per cycle |
| `OUT_DEPTH` | 4096 | This design: one 64x64 output map per bank |
| `W_DEPTH` | 128 | This design |
| data word | 32-bit, 16 fractional bits | 32-bit fixed point as in the authors' build; the split is this design's |
| `MAX_BURST` | 16 | This design |

## Departures and limits

These points go beyond, or differ from, what the original description states:

- The sizes in the table above are not published; they were chosen to hold the
  CNN_s first layer.
- The host interface is a configuration struct with a start/done handshake. A
  processor would normally write the same fields through a register block,
  which is not included here.
- The output size is supplied by the host rather than divided in hardware.
- Stride and zero padding are supported even though the description does not
  mention them. Bias and activation are not supported, and neither are
  pooling and dense layers.
- The group-by-group schedule, and the overlap of each store with the next
  weight load, are this design's own.
- Reset is asynchronous and active-low. It clears all control state but not
  the memories.
- The ROI pre-processing that produces the 64x64 input is not included:
  zero-suppression below 520 ADC counts, a bounding box around pixels above
  560 counts padded by 5 pixels, then resampling. The design expects its
  result already converted to Q16.16 in main memory.

## Verification

Each block has a self-checking testbench in `tb/`. Every testbench prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog if it hangs.
`tb/axi_mem_model.sv` is a behavioural AXI4 memory. It withholds its
handshakes at random, checks the AXI4 rules the masters must follow, and counts
stalls and 4 KB splits.

- `tb_conv_lca` runs the whole accelerator with its default parameters. It runs
  one layer per kernel size, with padding, stride 2 and 3, up to 3 input
  channels, and filter counts that leave a partly filled last group. One layer
  uses values large enough to saturate. One layer is the full CNN_s first
  convolution (64x64x1 in, 32 filters). One layer has an unsupported kernel
  size. The buffers straddle 4 KB boundaries. Every output word is compared
  with a reference convolution computed in the testbench. The testbench also
  counts each mechanism (each extractor, padding, stride, several channels, a
  partial group, several groups, saturation, rejection, store/prefetch overlap,
  4 KB split, read and write stalls) and fails if any of them never happened.
- `tb_conv_lca_scaled` runs the same layers, except the 64x64 one, on an
  accelerator built with 2 MAC engines of 5 multipliers each. A 3x3 patch then
  takes two MAC cycles, and the last chunk of every kernel size has unused
  lanes. This checks that `NUM_MAC` and `N_MUL` really are free parameters.
- `tb_conv_ctrl` checks, against engine stubs, every command the controller
  issues for a two-group layer.
- `tb_patch_extractor`, `tb_mac_engine`, `tb_weights_plm`, `tb_input_plm`,
  `tb_output_plm`, `tb_prefetch_engine` and `tb_store_engine` check their
  blocks against models computed independently in the testbench.

To run a testbench with Verilator 5, from the repository root:

    verilator --binary --timing --assert -y rtl -y tb rtl/cnn_pkg.sv tb/tb_conv_lca.sv \
              --top-module tb_conv_lca -Mdir build/tb_conv_lca -o sim
    ./build/tb_conv_lca/sim +verilator+rand+reset+2

Replace `tb_conv_lca` with any other testbench name. `+verilator+rand+reset+2`
starts every variable that is not reset at a random value, which catches reads
of uninitialised state. The full-size end-to-end run takes about a second.

The design has been simulated and linted; it has not been synthesized for an
FPGA or timed. The MAC engine's multipliers, adder tree and accumulator form a
single combinational stage. At 100 MHz on an FPGA that path would probably need
a pipeline register.
