# A pattern-aware accelerator for pattern-pruned 3x3 convolutions

This is synthesizable SystemVerilog for a CNN accelerator built around *pattern pruning*. The
accelerator is the architecture of "PCNN: Pattern-based Fine-Grained Regular Pruning towards
Optimizing CNN Accelerators" (Tan et al.). This RTL is an independent implementation of that
architecture; it is not the authors' code.

Pattern pruning keeps the same number `n` of non-zero weights in every 3x3 kernel of a layer, and
it lets those non-zeros sit in only a few positions (*patterns*) per layer, typically 4 to 32.
A kernel is then stored as:

* an **SPM code** (sparsity pattern mask index) of `b = ceil(log2(patterns))` bits, naming its
  pattern, and
* its **non-zero sequence**: the `n` surviving weights in raster order.

```
 original kernel        pattern (mask)           stored
  0    2.09  1.45        0 1 1                    code  +  2.09 1.45 1.15 -0.89 2.12 -0.58
  0    0     1.15   ->   0 0 1      mask bits
 -0.89 2.12 -0.58        1 1 1      p = 3*row+col
```

One short index per kernel replaces one index per weight, as in compressed sparse formats. Every
kernel costs the same `n` multiplications, so parallel units stay balanced. The hardware has to
do three things well: keep the two streams (codes and weight sequences) apart in memory; turn a
code back into a mask; and use that mask, together with the zeros among the activations, to
skip useless multiplications.

## Block diagram

```
 cfg port ──> pattern_config (n, stride, code width, 32-entry code->mask table)
                    │                                  │
 load ports ─> weight_sram (16384 x 64b)    pattern_sram (546 x 60b)      data_sram (128 KB, bytes)
                    │ 8 weights/read            │ 60-bit word                  │ 1 byte/read
                    v                           v                              v
               kernel_rf (60 weights,      spm_code_rf (shifts out       act_rf_zd: N_MAC windows
               FIFO)                       one b-bit code)               of 3x3 + zero detect
                    │ n weights                 │ code                         │ act, act mask
                    │                     pattern_decoder ── 9-bit weight mask │ (shared by all PEs)
                    v                           v                              │
               sparsity_ctrl: kernel restore, one lane per cycle               │
                    │ dense 3x3 kernel + mask, lane strobe                     │
                    v                                                          v
               pe_group: N_PE x pe, each pe = N_MAC lanes (kernel reg + sparsity_io + multiplier)
                    │                                  accumulate, ReLU
                    v
               out_data[N_PE], out_valid                host_ctrl sequences everything
```

The defaults are `N_PE = 64` PEs with `N_MAC = 4` multipliers each, i.e. 256 MACs per cycle.
They also include a 128 KB weight SRAM, a 4 KB pattern SRAM, 60-word kernel and code registers,
8-bit weights and up to 32 patterns per layer.

## Memory formats

**Weight SRAM.** A word holds eight 8-bit weights; weight `k` of the word is in bits
`[8k+7:8k]`. Non-zero sequences are stored back to back in kernel order, with no per-kernel
alignment, so a kernel may straddle two words. For example, at `n = 3` eight kernels fill three
words. A layout may pad each kernel with zeros to a *stride* larger than `n`. The register
file removes `stride` weights per kernel and the padding is never used, so layouts padded for
`n = 7..9` also work.

**Pattern SRAM.** A 60-bit word holds `60/b` codes of `b` bits (60, 30, 20, 15 or 12 codes for
`b = 1..5`), first code in the least significant bits. As 60 is a multiple of every width, no
code straddles a word.

**Kernel order.** The pass processes the input channels in *groups* of `N_MAC`. Kernel
`(output channel k, input channel c)` with `c = g*N_MAC + m` is kernel number
`g*N_PE*N_MAC + k*N_MAC + m` in both streams.

**Data SRAM.** One byte per address, `addr = act_base + c*H*W + y*W + x`. Activations are signed
8-bit.

**Mapping table.** Entry `i` is the 9-bit mask of code `i`. Bit `p` is window position
`p = 3*row + col`.

## From code to pointers: the sparsity path

This is the part that gives the design its speed, and the part that is easiest to get wrong.

1. **Decode.** `pattern_decoder` looks up the weight mask of the current code. It also reports
   whether the mask has exactly `n` ones; the top keeps a sticky `pattern_error` flag.
2. **Restore.** `sparsity_ctrl` takes the front `n` weights of the kernel register file and
   puts the `i`-th of them at the position of the `i`-th set mask bit. It writes the dense
   3x3 kernel and its mask into the next MAC lane.
3. **Zero detect.** `act_rf_zd` marks each activation register with a "non-zero" bit as it is
   written, so each window comes with a 9-bit activation mask.
4. **Sparsity mask.** On `start` each lane ANDs its weight mask with its window's activation
   mask. A set bit is an *effectual* pair: both operands are non-zero.
5. **Offsets.** `pointer_offset` is an adder-AND chain. Each bit is inverted; going from position
   8 down to 0, a stage adds its inverted bit to the count from its right and ANDs the sum with
   that bit. The count therefore restarts at every non-zero:
   `run[9] = 0`, `run[i] = inv[i] ? run[i+1] + 1 : 0`.
   `head = run[0]` is the first effectual position (9 if none), and `offset[i] = run[i+1]` is the
   number of zeros right after position `i`:

   ```
   position       0 1 2 3 4 5 6 7 8
   sparsity mask  0 1 0 1 0 1 0 0 0
   head = 1, offsets (pos 0..7) = 0 1 0 1 0 3 2 1
   pointers: 1, 1+1+offset[1]=3, 3+1+offset[3]=5, 5+1+offset[5]=9 -> stop
   ```
6. **Pointers.** `sparsity_io` registers the head and the offsets. It then issues one pointer per
   cycle, `p <- p + 1 + offset[p]`, until the pointer passes 8. A lane therefore spends exactly
   `popcount(weight mask & activation mask)` cycles, whatever the pattern.

## PE timing

Each `pe` has `N_MAC` lanes. The lanes work on `N_MAC` input channels of the same output
channel (the PE's), with windows shared by all PEs. Per cycle a lane multiplies the weight and
the activation at its pointer. The PE adds the lane products into its partial sum. The pipeline
is: pointer register, then product register, then accumulator, then ReLU register.

If `start` is at cycle `t` and `k` is the largest number of effectual pairs in any lane of the
whole group, then `busy` is high in cycles `t+1 .. t+k+1`, and the partial sum is complete after
cycle `t+k+1`. If no lane has work, `busy` never rises. With dense activations `k = n`. So the
array needs `n` issue cycles per channel group, against 9 for an unpruned layer, a ratio of
`9/n`: 2.25, 3, 4.5 and 9 for `n = 4, 3, 2, 1`. Zero activations shorten a group further, but
only when every lane of the group benefits, since the lanes run in lockstep. `finish` applies
ReLU to the partial sum and loads it into `result`.

Measured with `tb_pcnn_speed`: 8 PEs, a 16-channel, 4x4-pixel layer slice, dense activations,
4 output pixels x 4 channel groups = 16 groups.

| n | patterns | PE issue cycles | speedup over n = 9 | whole-pass cycles |
|---|---|---|---|---|
| 9 | 32 | 144 | 1.00 | 828 |
| 4 | 16 | 64 | 2.25 | 736 |
| 3 | 32 | 48 | 3.00 | 724 |
| 2 | 32 | 32 | 4.50 | 708 |
| 1 | 8 | 16 | 9.00 | 684 |

With 80% zero activations at `n = 4`, issue cycles fall from 64 to about 37. The whole-pass
column shows the feed limit described under *Limits*.

`tb_pcnn_vgg` runs the second VGG-16 layer for CIFAR-10 (64 input and 64 output channels, all in
one pass) at the default size. It uses a 6x6 output tile and 50% zero activations:

| n | patterns | PE issue cycles | fewer than n = 9 | whole-pass cycles |
|---|---|---|---|---|
| 9 | 32 | 3462 | 1.00x | 177666 |
| 4 | 16 | 2202 | 1.57x | 171726 |
| 3 | 32 | 1719 | 2.01x | 175851 |
| 2 | 32 | 1152 | 3.01x | 175284 |
| 1 | 8 | 576 | 6.01x | 164988 |

Zero activations help the dense run most. All 256 lanes wait for the busiest one, and with
half the activations zero the busiest of 256 lanes still has about 6 effectual pairs at
`n = 9`. So the gain from weight pruning here is below `9/n`: the dense baseline already
skips some zeros.

## Host controller and programming

`host_ctrl` runs one *pass*: a 3x3, stride-1, unpadded convolution over `op.groups * N_MAC` input
channels of an `in_h x in_w` map, for `N_PE` output channels. It goes through the output pixels
in raster order. For every pixel and every channel group it does the following:

1. Pre-processing, with two parts that run at the same time:
   * it gathers the `N_MAC` windows, one byte per cycle (`N_MAC*9` cycles), into `act_rf_zd`;
   * it dispatches `N_PE*N_MAC` kernels, one per cycle, through the decoder and the sparsity
     controller into the lanes.
2. When both parts are done, it pulses `start` and waits until the PE group is idle.

After the last group it pulses `finish` and then presents the results for one cycle on
`out_valid`, `out_y`, `out_x` and `out_data[N_PE]`. `done` pulses after the last pixel.

Two fetch engines keep the register files filled while this goes on:

* The weight engine reads a word whenever the 60-entry kernel register file will have room for
  it on arrival.
* The pattern engine reads a word whenever the code register is empty.

Both streams restart at `w_base` and `p_base` for each pixel, so a pass reads its kernels once
per output pixel.

Programming sequence:

| step | port | value |
|---|---|---|
| mapping table | `cfg_we`, `cfg_addr = 0..31`, `cfg_wdata[8:0]` | mask of code `cfg_addr` |
| layer register | `cfg_addr = 32`, `cfg_wdata` | `[3:0] n`, `[7:4] stride`, `[10:8] code width b` |
| memories | `wsram_*`, `psram_*`, `dsram_*` | write ports, one word per cycle |
| run | `op` (`op_cfg_t`), pulse `start` | `groups`, `in_h`, `in_w`, `act_base`, `w_base`, `p_base` |

After reset the layer register holds `n = stride = 4, b = 4`.

## What follows the source paper and what is this design's own

From the paper:

* the SPM format: a code plus a non-zero sequence, with the same `n` throughout a layer;
* the pattern configuration with its code-to-mask table;
* the weight, pattern and data SRAMs;
* the 60-word kernel and SPM registers;
* 8-weight words, with kernels packed in order and straddling words;
* 60-bit pattern words;
* the decoder producing a 9-bit weight mask;
* kernel restore;
* the shared activation register file with a zero detector per register;
* the AND of weight and activation masks, and the adder-AND offset chain with its pointer rule
  (checked against the paper's worked example);
* 64 PEs x 4 MACs;
* accumulation over input channels followed by ReLU;
* the 128 KB weight SRAM and the 4 KB pattern SRAM.

This design's own, because the source leaves it open:

* How the 4 MACs of a PE are used (one input channel each). This choice reproduces the paper's
  `9/n` speedups at the PE array.
* One pointer per lane per cycle, and lockstep groups.
* The FIFO organisation of the kernel register file, and the shift organisation of the code
  register.
* The loop order of the host controller, which re-reads the kernels for every output pixel.
* Dispatch of one kernel per cycle and a window gather of one byte per cycle.
* The register map, the load ports and the reset values.
* 8-bit signed activations and a 32-bit accumulator.
* The 128 KB data SRAM.
* The `pattern_error` check.

## Limits

* **Feed rate.** Loading a channel group takes about `N_PE*N_MAC` cycles (256 at the defaults),
  while computing it takes `n` cycles. A pass is therefore bound by kernel dispatch, and the
  array's `9/n` advantage shows in PE cycles, not in total cycles. The source does not describe
  how its kernel and activation feeds keep up with 256 MACs per cycle. Within a group the
  window gather and the kernel dispatch overlap. The next group's pre-processing does not overlap
  the current group's MACs, though: the lanes and the activation file hold one group at a time.
  Double-buffering them would save at most `n + 3` of the roughly 260 cycles per group.
* **Pattern SRAM capacity.** 546 words hold 8190 four-bit codes. A 64-output pass over 512
  input channels (32768 kernels, which exactly fills the 128 KB weight SRAM at `n = 4`) needs
  2185 words. Passes of up to 124 input channels (at 16 patterns) fit completely. Partial sums
  are not kept across passes, so wider layers do not map as is. The source's 4 KB figure and
  its "32768 kernels" figure disagree on this point; the 4 KB size was kept.
* **Layer shapes.** The RTL supports only stride 1 and no padding (pre-pad the map in memory).
  The channel count must be a multiple of 4, and the output channels come 64 per pass. Results
  leave on `out_data` at 32 bits; there is no requantisation or write-back.
* **Memories.** The memories are register arrays with one-cycle reads. A real chip would use
  SRAM macros. Clocking (a 300 MHz PLL in the source) and IO pads are not modelled.

## Files

| file | content |
|---|---|
| `rtl/pcnn_pkg.sv` | shared types (`layer_cfg_t`, `op_cfg_t`), sizes, `codes_per_word` |
| `rtl/pattern_config.sv` | layer register and SPM mapping table |
| `rtl/weight_sram.sv`, `rtl/pattern_sram.sv`, `rtl/data_sram.sv` | memories |
| `rtl/kernel_rf.sv` | 60-weight kernel register file |
| `rtl/spm_code_rf.sv` | 60-bit SPM code register |
| `rtl/pattern_decoder.sv` | code to mask |
| `rtl/sparsity_ctrl.sv` | kernel restore and lane loading |
| `rtl/act_rf_zd.sv` | shared activation windows with zero detect |
| `rtl/pointer_offset.sv` | adder-AND offset chain |
| `rtl/sparsity_io.sv` | sparsity mask and pointer generator of one lane |
| `rtl/pe.sv`, `rtl/pe_group.sv` | PE and PE array |
| `rtl/host_ctrl.sv` | pass sequencer |
| `rtl/pcnn_top.sv` | top level |

Every file in `tb/` is a self-checking testbench. Each block has one, named `tb_<module>`.
Each testbench prints `TB_RESULT checks=N failures=M` and stops itself if it runs too long.

* `tb_pcnn_top` runs the whole accelerator with 8 PEs at `n = 1, 2, 3, 4, 5, 7, 9`, with code
  widths 1 to 5 and padded layouts. It compares every output with a convolution-plus-ReLU
  model and checks the PE-array cycle count. It also counts that each mechanism occurs: split
  kernels, code-word refills, multi-group accumulation, skipped zero activations, ReLU
  clamping, padding, and the pattern check.
* `tb_pcnn_full` does the same at the default size (64 PEs x 4 MACs).
* `tb_pcnn_speed` measures the PE-array cycles of one layer slice at `n = 9, 4, 3, 2, 1`.
* `tb_pcnn_vgg` runs the second layer of VGG-16 on CIFAR-10 (64 to 64 channels, every
  channel in one pass) on a 6x6 output tile at the default size, and checks every output.

## Simulating

With Verilator 5, from the folder that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -y rtl -Itb rtl/pcnn_pkg.sv tb/tb_pcnn_full.sv \
          --top-module tb_pcnn_full -Mdir obj_full
obj_full/Vtb_pcnn_full
```

`-y rtl` lets Verilator find every module in its own file; only the package is named. The
same command runs any other testbench.
It compiles without warnings. Full-size simulation takes under a
minute, mostly compile time. `pointer_offset` needs no
other file; `pe` needs `pointer_offset` and `sparsity_io`.
