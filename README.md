# A weight-stationary FP16 accelerator for training spiking neural networks

Training a spiking neural network (SNN) with backpropagation through time takes
three convolution-heavy passes per layer and timestep:

* **FP** (forward): `ConvFP_t = s_t^{l-1} (*) w`. The input is binary spikes,
  so every multiply is a *select*. The array only needs a multiplexer and an
  FP16 adder per cell.
* **BP** (backward): `ConvBP_t = du_t^{l+1} (*) w'`. The input is an FP16
  potential gradient, so the cells need real multiply-accumulate.
* **WG** (weight gradient): `dW^l += du_t^l (*) s_t^{l-1}`, summed over the
  timesteps. This is again gated by
  spikes, so it is add-only.

Around these convolutions sit two per-neuron element-wise units:

* **soma** computes the leaky integrate-and-fire (LIF) neuron:
  * `u_t = alpha*u_{t-1}*(1-s_{t-1}) + ConvFP_t`
  * `s_t = (u_t >= th_f)`
  * the surrogate-gradient mask `f'_t = (th_l <= u_t <= th_r)`
* **grad** computes the backward neuron:
  * `ds_t = -alpha*du_{t+1}*u_t + ConvBP_t`
  * `du_t = alpha*du_{t+1}*(1-s_t) + beta*ds_t*f'_t`

This RTL builds three 16x16 arrays, one per pass:
* a Mux-Add array in the forward (FWD) core;
* a Mul-Add array in the backward (BWD) core, for BP;
* a spike-gated accumulating array in the BWD core, for WG.

Each array has its own SRAM buffers and 16 soma or grad units. A DMA engine
connects everything to an external DRAM. The arrays are weight-stationary:
* A 16x16 block of weights (16 output channels x 16 input channels, one kernel
  position) is loaded into the array once.
* Every pixel of the feature map then streams through the array.
* The partial sums of all pixels are kept in per-channel SRAMs until every
  kernel position and input-channel tile has been added.

All arithmetic is IEEE binary16.

## Block map

```
                        eocas_top
   cmd/cfg ──► command decode ──┬─────────────┬──────────────┬─────────────┐
                                ▼             ▼              ▼             ▼
   DRAM port ◄──► dma ──mem──► fwd_core      bp_core        wup_core
                               │             │              │
                  sram_in_s ─► adder_matrix  mac_matrix ◄── wg_matrix ◄── sram_in_s[16]
                  sram_in_w[16]   │ 16 rows   │ ◄ sram_in_du  │           sram_in_du[16]
                  sram_out_ps[16] ◄           ▼ sram_out_ps   ▼ sram_out_dw[16]
                  soma[16] ─► sram_out_u/s/f  grad[16] ─► sram_out_du
                                              ▲ sram_in_u/s/f
```

| file | what it is |
|---|---|
| `eocas_pkg.sv` | FP16 type and constants, SRAM target codes, `mem_req_t`, `cmd_t`, `neuron_cfg_t` |
| `fp16_add.sv`, `fp16_mul.sv` | combinational binary16 adder and multiplier |
| `sram_1r1w.sv` | one-read one-write memory, registered read |
| `mux_add_pe.sv` / `adder_matrix.sv` | FP cell and 16x16 FP array |
| `mul_add_pe.sv` / `mac_matrix.sv` | BP cell and 16x16 BP array |
| `wg_pe.sv` / `wg_matrix.sv` | WG cell and 16x16 WG array |
| `soma.sv`, `grad.sv` | per-neuron forward and backward updates |
| `conv_ctrl.sv` | address sequencer for one weight-stationary convolution plus the soma/grad pass |
| `fwd_core.sv`, `bp_core.sv`, `wup_core.sv` | the three compute cores with their buffers |
| `dma.sv` | DRAM ⇄ SRAM block mover |
| `eocas_top.sv` | top: command port, cores, DMA, DRAM port |

## The arrays and their timing

This is the part that is easiest to get wrong when changing the code.

**Rows are output channels and columns are input channels.** Row `r` holds
weights `w[r][0..15]` for the current kernel position `(ky,kx)`.

**A row is a systolic chain.** Cell `(r,c)` adds its contribution onto the
partial sum it receives from cell `(r,c-1)` and registers the result.
* The partial sum read from `sram_out_ps[r]` enters at column 0.
* It leaves column 15 after `COLS` cycles.
* Input channel `c` is delayed by `c` cycles (input skew), so each cell sees
  the pixel that its partial sum belongs to.
* The array latency is `COLS+1` cycles: one register at the input, then one
  per cell.

This sums the 16 columns in the same way as a column-adder-plus-row-adder
tree, but with one adder per cell. The order of the FP16 additions is
therefore fixed: input channel 0 first, then 1, …, 15.

**One pixel enters per cycle.** `conv_ctrl` runs two nested loops:
* outside, the `KDIM*KDIM` kernel positions;
* inside, the `OUT_DIM*OUT_DIM` output pixels.

For pixel `(p,q)` at kernel position `(ky,kx)` it reads input word
`in_base + (p+ky)*IN_DIM + (q+kx)`. It also reads the pixel's partial sum in
the same cycle.

The core delays the write address by `COLS+2` cycles, which is the SRAM read
plus the array. It then writes the new partial sum back to the same word. At
kernel position 0 of the first input tile, the read partial sum is replaced
by zero.

Between kernel positions the controller:
1. drains the array for `DRAIN = COLS+4` cycles;
2. reads the next weight word (one cycle);
3. loads it (one cycle).

A read-after-write on the same partial sum therefore cannot happen.

**Cycle count.** One FWD or BP timestep of a 16x16 channel tile takes
`K²·(2 + OUT² + DRAIN) + OUT² + 1` cycles. That is 10 439 cycles at the
default 32x32 output, or about 21 µs at 500 MHz. The optional soma/grad pass
(`post`) is the `OUT²` term: it reads one pixel of every row per cycle.

**The WG array is output-stationary.** Cell `(m,c)` accumulates
`dW[m][c]` for one kernel position over all pixels:
* it adds `du_m(p,q)` whenever the spike `s_c(p+ky, q+kx)` is 1;
* the 16 `du` values enter one per row, and the 16 spike bits of a pixel enter
  per row.

For each kernel position, `wup_core`:
1. reads the stored `dW` words;
2. loads them into the cells (or zero on `first_step`);
3. streams all pixels;
4. waits 2 cycles;
5. writes the 16 rows back.

Every row has its own copy of the spike SRAM, so that all 16 rows can read in
parallel. The DMA writes all copies at once with `all_rows`.

## Neuron state and the training sequence

The cores keep the neuron state in place:
* `fwd_core` reads `u_{t-1}` and `s_{t-1}` from `sram_out_u` and `sram_out_s`,
  and overwrites them with `u_t` and `s_t`. It also writes `f'_t` to
  `sram_out_f`.
* `bp_core` reads `du_{t+1}` from `sram_out_du` and overwrites it with `du_t`.
* `first_step` makes the previous state zero: `u_0 = s_0 = 0`, and
  `du_{T+1} = 0`.

The backward pass needs `u_t`, `s_t` and `f'_t` of every timestep. So the host
stores them to DRAM after each forward step and loads them back into
`sram_in_u/s/f` of the BP core, running the timesteps in reverse.

One layer with `NCT` input-channel tiles and `T` timesteps runs like this
(`tb/tb_eocas_body.svh` issues exactly this sequence):

```
for t = 0..T-1:                       # forward
    for tile = 0..NCT-1:
        DMA_LOAD  T_FW_IN_W (row r, 9 words) for r in 0..15   # if weights changed
        DMA_LOAD  T_FW_IN_S  <- s^{l-1}_t of this tile
        FWD       first_tile=(tile==0) last_tile=(tile==NCT-1) first_step=(t==0)
    DMA_STORE T_FW_OUT_U, T_FW_OUT_S, T_FW_OUT_F -> DRAM (u_t, s_t, f'_t)
for t = T-1..0:                       # backward
    DMA_LOAD  T_BP_IN_DU <- du^{l+1}_t,  T_BP_IN_U/S/F <- u_t, s_t, f'_t
    BP        first_step=(t==T-1)
    DMA_STORE T_BP_OUT_DU -> DRAM (du^l_t)
for tile, t:                          # weight gradient
    DMA_LOAD  T_WU_IN_S (all_rows) <- s^{l-1}_t of the tile
    DMA_LOAD  T_WU_IN_DU (row m, dram_stride=16) <- channel m of du^l_t
    WG        first_step=(t==0)
    DMA_STORE T_WU_OUT_DW -> DRAM after the last t
```

The sequence relies on these data formats and host duties:
* `T_FW_IN_S` holds two input tiles (`S_DEPTH = 2·34·34`). `in_base` selects
  the tile.
* The BP weights `w'` are the weights transposed between input and output
  channels and rotated 180° in the kernel. The host prepares them.
* The layer is padded by the host: the input map is `IN_DIM = OUT_DIM + KDIM - 1`
  pixels wide.

## Command and memory interface

`eocas_top` accepts one command when `cmd_valid && cmd_ready`. `cmd_ready` is
low until that command's `done` pulse.

`cmd_t` fields:
* `op` is one of `OP_DMA_LOAD`, `OP_DMA_STORE`, `OP_FWD`, `OP_BP`, `OP_WG`.
* The DMA commands use `target`, `row`, `all_rows`, `dram_addr`, `sram_addr`,
  `words` and `dram_stride`.
* The compute commands use `first_tile`, `last_tile`, `first_step`, `in_base`
  and `w_base`.

`cfg` (`neuron_cfg_t`) carries `alpha`, `beta`, `th_f`, `th_l` and `th_r` as
FP16 values.

Only one unit runs at a time: the DMA, the FWD core, the BP core or the WG
core. An assertion checks this.

The DRAM port is 16 bits wide:
* `dram_req` with `dram_we`, `dram_addr` and `dram_wdata` is held until
  `dram_gnt`.
* Read data returns on `dram_rvalid` any number of cycles later.
* Only one access is in flight.

A 256-bit SRAM word is 16 consecutive DRAM words, lowest channel first. A
non-zero `dram_stride` spaces the SRAM words in DRAM. For example, a stride of
16 into a 16-bit target gathers one channel out of pixel-major 256-bit data.

## Arithmetic

`fp16_add` and `fp16_mul` are combinational binary16 units with these rules:
* round to nearest even;
* overflow to infinity;
* subnormal inputs and results flushed to (signed) zero;
* NaN returned as the quiet NaN `0x7E00`;
* the comparisons in `soma` also treat subnormals as zero.

The adder aligns the mantissas using 3 extra bits and a sticky bit. The
multiplier rounds the 22-bit product.

The soma and grad units round after every operation, in the order of the
formulas at the top.

## How far to trust it

Every block has a self-checking testbench in `tb/`. The expected values are
computed independently in `real` arithmetic and then rounded to FP16.

* **FP16 units:** 40 000 random and corner-case operands each.
* **Arrays, cores, DMA and top:** use data that keeps every convolution exact
  in FP16 (multiples of 1/8 and 1/4), so any summation order gives the
  reference value bit for bit.
* **Soma, grad and the dW accumulation:** compared with the reference rounded
  in the same order as the hardware.
* **DRAM model (`tb/dram_model.sv`):** stalls randomly (grant with
  probability 3/4, read latency 1–3 cycles).

Each testbench was also run against a deliberately broken copy of its module,
and it reported failures.

The end-to-end test `tb_eocas_top` uses 4x4 arrays, a 6x6 input, 3 timesteps
and 2 input tiles. It checks every word the chip stores. It also counts that
each mechanism occurred at least once:
* skipped additions (a zero spike);
* firing;
* reset after a spike;
* both values of the surrogate mask;
* the spike gate in the backward update;
* accumulation across input tiles;
* 256-bit transfers;
* strided transfers;
* broadcast spike writes;
* DRAM stalls.

`tb_eocas_full` runs the same sequence with the top at its default size:
* 16x16 arrays, a 34x34 input and a 32x32 output;
* 2 input tiles, i.e. 32 input channels to 16 output channels;
* 2 timesteps.

It passes with 135 680 checks and 0 failures, in 991 215 clock cycles. Building
the simulator for this size takes around 9 minutes of C++ compilation. The
simulation itself takes under a minute.

## Where this design departs from the published description

* **Summation structure.** The original describes per-column adders followed
  by a row adder. This design uses a systolic chain along each row. The sums
  are the same, but the FP16 rounding order is fixed as described above.
* **Threshold comparisons.** The block diagram of the soma prints `u > th_f`
  and `th_l < u < th_r`, while the equations use `>=` and `<=`. This design
  follows the equations.
* **Grad multipliers.** The grad unit is described with two multipliers and
  receives `alpha*du_{t+1}` ready-made. Here the unit forms that product
  itself, so it has three multipliers.
* **Grad inputs.** One description of the grad unit lists its inputs without
  the spike `s_t`. The backward equation needs `s_t`, and the block diagram
  feeds the spike SRAM into the grad units, so `s_t` is an input here.
* **One DMA engine.** The original draws a DMA per sub-core. Here a single
  DMA serves all SRAMs, because only one unit runs at a time.
* **Spike gradient.** `ds_t` is computed but not stored, because nothing
  downstream uses it.
* **Compressed potential.** The soma is said to output a "compressed"
  potential, but no compression is described. `u_t` is stored as plain FP16.
* **Surrogate-mask buffers.** The `f'` mask gets its own SRAMs
  (`sram_out_f`, `sram_in_f`). The top-level diagram shows none, but the mask
  is a soma output that the backward pass needs.
* **WG buffers.** The text says WG shares the BP core's potential-gradient
  SRAM. The top-level diagram gives WG its own `sram_in_du1..16`, and this
  design follows the diagram. The WG array is add-only and output-stationary.
* **Spatial mapping.** The evaluated dataflow splits the array as 8 output x
  2 input channels on one axis and 16 input channels on the other. This design
  puts 16 output channels on the rows and 16 input channels on the columns.
* **Partial-sum buffers.** `sram_out_ps` holds a full 32x32 map per row
  (16 384 values in all), against 2048 in the original. The kernel loop is
  outside the pixel loop, so every pixel's partial sum must stay live. The
  spike (36 992 bits) and weight (2304 values) buffers match the original
  sizes.
* **Total SRAM.** The total on-chip SRAM at the defaults is about 0.30 MB:
  * FWD 631 kbit;
  * BP 1152 kbit;
  * WG 595 kbit.

  The original reports 2.03 MB without a breakdown.
* **Control.** The command set, the DMA and its DRAM protocol, the in-place
  neuron state and the host-driven tiling are this design's own. The original
  does not describe its control.
* **Scheduling.** The cores run one at a time. The original does not say
  whether FWD and BWD overlap.
* **Arithmetic details.** The rounding mode, the subnormal handling and the
  absence of pipelining in the FP16 units are choices. The clock target of the
  original is 500 MHz, and this RTL has not been timed.

## Simulating

Any testbench runs with plain Verilator 5. From the repository root, build and
run one with:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv+.svh \
    -Irtl -Itb rtl/eocas_pkg.sv tb/tb_fp16_pkg.sv tb/tb_fwd_core.sv \
    --top-module tb_fwd_core -o sim && ./obj_dir/sim
```

Replace `tb_fwd_core` with any other testbench name. Each testbench prints
`TB_RESULT checks=N failures=M` and ends itself; a watchdog ends a hung run.
All control and datapath registers are reset. SRAM contents are not, and no
word is read before it has been written (`first_tile` and `first_step` replace
the stale values with zero), so the results do not depend on power-up state.

To change the size, override `ROWS`, `COLS`, `IN_DIM`, `OUT_DIM` and `KDIM` on
`eocas_top`, as `tb_eocas_top` does. `IN_DIM` must be `OUT_DIM + KDIM - 1`.
`ROWS` and `COLS` may be at most 16, because an SRAM word is 256 bits.
