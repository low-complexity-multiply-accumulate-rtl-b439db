# PASM convolution accelerator: weight-shared CNN layer without per-MAC multipliers

In a weight-shared CNN every kernel weight is one of only B values (typically
4 to 16), and the kernel stores just a log2(B)-bit *bin index* per tap. A
conventional accelerator still multiplies every image value by its decoded
weight. PASM ("pre-accumulate, then multiply") uses the fact that
`sum_i x_i * w[idx_i]` equals `sum_b w[b] * (sum of x_i with idx_i == b)`:

1. **Pre-accumulate (PAS)** – for each input pair (image value, bin index),
   add the image value to accumulator number `bin index`. After N pairs there
   are B partial sums, a weighted histogram of the indices. Only an adder and
   B registers are needed: no multiplier.
2. **Multiply (post pass)** – multiply each of the B sums by its shared weight
   and accumulate. This takes B multiply-accumulates instead of N, so one
   multiplier can be shared by several PAS units.

The result is identical to the weight-shared multiply-accumulate. The cost is
B extra cycles per output for each PAS unit served by the shared multiplier.

Example, with values scaled by 10 to integers (the testbenches replay it).
Image values 26.7, 3.4, 4.8, 17.7 and 6.1 arrive with indices 0, 1, 2, 3, 0.
The bins become 32.8, 3.4, 4.8 and 17.7. With shared weights 1.7, 0.4, 1.3
and 2.0, the post pass gives 32.8·1.7 + 3.4·0.4 + 4.8·1.3 + 17.7·2.0 = 98.8.

This repository is synthesizable SystemVerilog for one convolution layer built
this way. It follows the accelerator described in J. Garland and D. Gregg,
"Low Complexity Multiply-Accumulate Units for Convolutional Neural Networks
with Weight-Sharing". It is an independent RTL implementation, not the
authors' code: they generated their design with high-level synthesis and
published no RTL, so the interfaces, schedule and handshakes here are this
design's own.

## The layer

Default configuration, which is the paper's main evaluated accelerator:

| parameter | default | meaning |
|---|---|---|
| `C`, `IH`, `IW` | 15, 5, 5 | image tile held on chip: channels, rows, columns |
| `M` | 2 | output channels (kernels), one PAS unit each |
| `KY`, `KX` | 3, 3 | kernel size |
| `B` | 4 | shared weights (bins); indices are `log2(B)` bits |
| `STRIDE` | 1 | window step (own default; the paper gives no value) |
| `W` | 32 | signed image width, also the PAS bin width |
| `WW` | 32 | signed shared-weight width |

The output map is `OH x OW` per kernel, with `OH = (IH - 2*(KY/2) + STRIDE - 1) / STRIDE`
(only windows lying fully inside the tile, as in the usual loop nest), so
3 x 3 by default.

```
            load port (ld_we, ld_sel, ld_addr, ld_data)
      ┌──────────────┬───────────────┬──────────────┬──────────┐
      v              v               v              v          │
 image_buffer   bin_index_buffer  weight_regfile  bias_relu    │
 C*IH*IW x W    M*C*KY*KX x       B x WW          (M biases)   │
      │ pixel   log2(B)              │                ^        │
      │         │ M indices/tap      │                │        │
      v         v                    │                │        │
 ┌────────── pasm_cluster ───────────┼──────────┐     │        │
 │ pas_unit[0] ... pas_unit[M-1]     │          │     │        │
 │   (B bins each, same pixel,       v          │     │        │
 │    own index)  ──mux(m,b)──> shared_mac ─────┼─────┘        │
 └──────────────────────────────────────────────┘  max(0,s+bias)
                                                         v
 conv_controller (gray-coded FSM, loop counters)    outfeat_buffer ──> of_rdata
```

All state lives in registers: the tile, indices, weights, biases and the
output map. No SRAM is used, which matches the paper's ASIC version.

## Schedule and timing

The controller (`conv_controller`) walks output positions row by row. For
each position `(oy, ox)` it runs two phases.

**ACC phase, N = C·KY·KX cycles.** Each cycle it addresses one tap
`(c, ky, kx)`. Channels are outermost and columns innermost, in the same
order as the convolution loop nest. The image buffer returns pixel
`(c, oy·S+ky, ox·S+kx)` in the same cycle. The bin-index buffer returns the
index of that tap for all M kernels at once. Every PAS unit adds the pixel
into the bin its own kernel selects. The first tap (`acc_first`) clears all
bins as it loads, so consecutive positions need no clear cycle.

**MAC phase, M·B cycles.** For m = 0..M-1 and b = 0..B-1, a multiplexer takes
bin b of PAS unit m. The shared MAC multiplies it by shared weight b and
accumulates. The first bin of each m (`mac_first`) loads the product instead
of adding to it. After bin B-1 the MAC register holds the full sum. In the
next cycle, bias and ReLU are applied and the result is written to
`outFeat[m][oy][ox]`. That write happens at the same time as the next
operation: the next kernel's first bin, or the next position's first tap.

After the last position there is one DRAIN cycle for the final write. Then
`done` pulses for one cycle and `busy` falls. From the cycle after `start`,
a layer takes

    busy cycles = OH·OW·(C·KY·KX + M·B) + 1

which is 9·(135 + 8) + 1 = 1288 cycles at the defaults. A weight-shared design
with one multiplier per kernel would need about OH·OW·C·KY·KX = 1215 cycles.
The PASM overhead of M·B/N per output is 5.9 % here. The paper reports
8.5 % to 17 % for its HLS-generated designs. Its
numbers include pipeline effects that this hand-scheduled design does not
have.

The state register is gray coded. Each transition flips one bit: IDLE 00 →
ACC 01 → MAC 11 → ACC 01 … → MAC 11 → DRAIN 10 → IDLE 00. An assertion in
`conv_controller` checks this.

The pixel and index reads are combinational. So is the MAC's input
multiplexer. The longest path is therefore read → add → bin register in the
ACC phase, and mux → 32x32 multiply → 64-bit add in the MAC phase. The
multiplier is not pipelined.

## Numbers and widths

- Image values, shared weights and biases are signed two's-complement
  integers (the paper's "INTs").
- PAS bins are `W` bits wide, the width shown on the PAS output of the
  paper's block diagram. A bin that receives more than 2^(W-1) in total
  wraps. The direct weight-shared result would then not wrap the same way.
  The testbenches keep data small enough that this never happens, and then
  check that the result equals the direct convolution bit for bit. Widen
  `BIN_W` in `pasm_cluster` if you need headroom.
- The MAC result, bias-added value and outFeat words are `W+WW` bits (2W).
- ReLU follows the bias add: `y = max(0, sum + bias[m])`.

## Host interface (`pasm_conv_top`)

Everything is synchronous to `clk`. Reset is active-low and synchronous, and
clears every register, including all register files.

| port | dir | use |
|---|---|---|
| `ld_we`, `ld_sel`, `ld_addr`, `ld_data` | in | write one word; `ld_sel` is `pasm_pkg::load_target_e` |
| `start` | in | begins a layer when idle (ignored while busy) |
| `busy`, `done` | out | layer running; one-cycle end pulse |
| `clamp_event` | out | status: the outFeat word written this cycle was clamped by ReLU |
| `of_raddr`, `of_rdata` | in/out | combinational read of the output map |

Address maps of the load port:

| `ld_sel` | address | data |
|---|---|---|
| `LD_IMAGE` | `(c*IH + y)*IW + x` | pixel, W bits |
| `LD_BINIDX` | `m*C*KY*KX + (c*KY + ky)*KX + kx` | bin index (low log2(B) bits) |
| `LD_WEIGHT` | bin b | shared weight (low WW bits) |
| `LD_BIAS` | kernel m | bias |

The output map is read at `of_raddr = (m*OH + oy)*OW + ox`. The register
files are single-buffered, so loading while `busy` is high is not allowed.
An assertion in the top checks this.

## Where this follows the paper and where it does not

Taken from the paper:
- the PAS unit, with B accumulators, an adder and a read port for the post
  pass;
- the shared MAC (multiplier, adder, 2W register);
- one post-pass multiplier for the whole layer;
- one PAS unit per output kernel, fed in parallel;
- bias, ReLU and stride;
- the tile and kernel sizes;
- 32-bit data, active-low synchronous reset to zero, and gray-coded state
  machines.

This design's own choices: the host ports, the address maps, the cycle
schedule and handshake, the stride default, the bias width, and clearing the
bins with the first input instead of in a separate cycle.

The paper's description disagrees with itself in three places. This design
resolves them as follows:
- **Kernel indices per output channel.** The paper's pseudo-code declares
  bin indices as `bi[C][KY][KX]`, which gives every output channel the same
  kernel. Its figure and text have a separate kernel per output channel.
  This design stores `M x C x KY x KX` indices.
- **Post pass.** The pseudo-code multiplies `imageBin[bi[0][ky][kx]]` by its
  weight for the taps of channel 0. That would count bins more than once.
  The text and the worked example visit each of the B bins exactly once,
  and this design does that.
- **Output index.** The pseudo-code writes `outFeat[ihIdx/Stride]`, which
  starts at row KY/2 and runs past OH. This design writes row
  `(ihIdx - KY/2)/Stride`.

Not built:
- The stand-alone "16-PAS-4-MAC" comparison unit of the paper. `pasm_cluster`
  with `N_PAS = 4` is one quarter of it, but its input distribution is not
  described.
- The non-weight-shared and conventional weight-shared baselines.
- The FPGA variant, which keeps the tile and bins in block RAM.

## Files

| file | content |
|---|---|
| `rtl/pasm_pkg.sv` | default sizes, load-target and state enums, `out_dim()` |
| `rtl/pas_unit.sv` | one pre-accumulation unit (B bins) |
| `rtl/shared_mac.sv` | post-pass multiply-accumulate |
| `rtl/weight_regfile.sv` | shared-weight dictionary |
| `rtl/pasm_cluster.sv` | N_PAS PAS units + mux + weights + one MAC |
| `rtl/image_buffer.sv`, `rtl/bin_index_buffer.sv`, `rtl/outfeat_buffer.sv` | register files |
| `rtl/bias_relu.sv` | bias registers, bias add, ReLU |
| `rtl/conv_controller.sv` | gray-coded sequencer |
| `rtl/pasm_conv_top.sv` | the layer |
| `tb/tb_<module>.sv` | self-checking test of each module |
| `tb/tb_pasm_conv_top.sv` | end-to-end test at the default size |
| `tb/tb_pasm_conv_workloads.sv`, `tb/pasm_layer_tester.sv` | end-to-end tests of other sizes |

## Verification

Every testbench checks its module against values computed independently
inside the testbench. It prints `TB_RESULT checks=N failures=F` and stops
itself with a watchdog if the design hangs.

- **Unit testbenches.** They cover reset values, random fills and read-back.
  They replay the worked example for the PAS unit and the MAC. They check
  random sequences against bin-by-bin and 64-bit models. For the cluster,
  they check the direct weight-shared sum and the N + N_PAS·B cycle count.
  For the controller, they compare every control output cycle by cycle
  against the loop nest, at stride 2.
- **`tb_pasm_conv_top`.** It runs four random layers at the full default
  size. Each layer is loaded through the host port. The test checks the
  1288-cycle latency and compares all 18 output words with a direct
  (unbinned) weight-shared convolution plus bias and ReLU. It also counts
  that each mechanism happened: bin reuse, both PAS units sharing the MAC,
  window moves, ReLU clamping and passing, and back-to-back layers.
- **`tb_pasm_conv_workloads`.** It runs the same checks for the other
  configurations the paper evaluates: 8 and 16 bins with 32-bit weights, and
  4 and 8 bins with 8-bit weights. It also runs a stride-2 layer on a 7x7
  tile, and a 32-channel 5x5-kernel layer (800 pre-accumulations per output)
  with 16 bins.

Run a testbench with plain Verilator, from the repository root:

    verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb \
        rtl/pasm_pkg.sv tb/tb_pasm_conv_top.sv --top-module tb_pasm_conv_top
    ./obj_dir/Vtb_pasm_conv_top

To change the configuration, override the parameters of `pasm_conv_top`.
`pasm_layer_tester` shows how, and checks any configuration end to end. The
cost to expect is B·W bits of registers per PAS unit, M·B post-pass cycles
per output, and register files whose size grows with the tile.
