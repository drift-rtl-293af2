# DRIFT accelerator: GEMM engine with error-tolerant voltage/frequency scaling

Diffusion models denoise an image over tens of timesteps. Nearly all of that
work is INT8 matrix multiplication, and the network tolerates most arithmetic
errors. Three kinds of error still do damage:

- errors in the high bits of a result;
- errors in the first few timesteps;
- errors in the timestep embedding.

This accelerator uses that. It runs most GEMMs at an aggressive operating
point, either undervolted (0.68 V at 2 GHz) or overclocked (0.88 V at 3.5 GHz),
where timing errors do happen. Each output tile is checked with row and column
checksums. Any element whose error is larger than 2^10 is replaced by the same
element from an earlier timestep, which the chip saves to DRAM every 10
timesteps. Consecutive timesteps produce very similar activations, so the old
value is a good stand-in. The embedding and the first two timesteps run at the
safe point (0.9 V at 2 GHz). A monitor counts the errors the checksums find and
nudges the aggressive voltage up or down.

The RTL in `rtl/` covers all of the digital side:

- the systolic arrays;
- the checksum (ABFT) logic;
- the result buffer;
- checkpoint offload with a tile-contiguous layout;
- rollback repair;
- error-rate monitoring;
- the DVFS policy;
- the top-level sequencer.

The voltage regulator, the PLL and the DRAM are not included; each is a port on
the top.

## 1. Datapath

### 1.1 Systolic array (`systolic_array`, `sa_pe`)

The array is weight-stationary, with N×N processing elements (N = 32).

- PE (k, j) holds weight W[k][j].
- Activation rows X[m][·] enter from the left, skewed by one clock per array
  row.
- Partial sums move down the columns. Each PE does one signed 8×8 multiply and
  one 32-bit add per clock.
- Input skew and output deskew registers sit inside the module. A row enters
  aligned and leaves aligned, exactly **2N clocks** later. The array accepts a
  new row every clock.

There is one extra PE column, the **checksum column**. While row k of W loads,
an adder tree computes ΣW[k] = Σ_j W[k][j] and stores it there. For each input
row this column produces Σ_j Y[m][j], the *predicted* sum of the output row.

The checksum column's weight is 8 + log2(N) + 1 bits wide. Its accumulator is
32 + log2(N) + 2 bits wide, so it cannot wrap.

### 1.2 Checksums and the threshold (`abft_wrapper`)

This is the classic Huang–Abraham check, fitted to a pipeline that has only
8-bit multipliers. Each array gets its own wrapper.

- **Row check.** Each output row is summed by an adder tree and compared with
  the checksum-column output for that row.
- **Column check.** The predicted column sums of Y are colsum(X)·W. The wrapper
  accumulates the column sums of X over the M = 32 rows of the tile, then
  pushes that row through the array like an ordinary activation row.
  - Each element is up to 13 bits wide and does not fit the 8-bit multipliers.
  - It is therefore sent as **two rows**: `lo = xsum[6:0]` (unsigned, zero
    sign bit) and `hi = xsum >>> 7` (signed).
  - The two results are recombined as `hi·128 + lo`.
  - The actual column sums are accumulated from the output rows as they leave.
- **Threshold.** A row or column is flagged when |actual − predicted| ≥
  2^THETA_BIT, with THETA_BIT = 10 counted from bit 0.
  - Smaller errors are left alone on purpose; the network absorbs them.
  - Two large errors that cancel in the same row or column are not caught. This
    is accepted as unlikely under random timing errors.

Timing for a gapless tile:

- x_ready is low for 2 clocks after the M-th row, while the two checksum rows
  enter.
- `tile_done` comes **M + 2 + 2N clocks** after the first row.
- `row_flags[M]` and `col_flags[N]` then hold until the next tile.

A fault port (`inj_en/row/col/mask`) XORs a mask into one INT32 output as it
leaves the array. This models the timing error that an aggressive operating
point causes. The checkers and y_data both see the corrupted value. Without a
real slow corner, this is how a simulation exercises the repair path.

### 1.3 Result buffer (`sram_buffer`)

There is one bank per array, with 2·M words of N INT32 each. That is **two tile
slots**: while the arrays write a new tile into one slot, the other slot's tile
can still be repaired and checkpointed.

- Port A: written by all arrays at once, one row per clock.
- Port B: one bank at a time, with a one-clock read and an element-masked
  write. Recovery, checkpoint and host reads all use port B.

It is written as a register array. A real chip would use SRAM macros.

## 2. Rollback repair (`recovery_scheduler`)

After a tile completes, every array a reports `row_flags[a]` and
`col_flags[a]`. The repair mask is their cross product:
`mask[a][m][j] = row_flags[a][m] & col_flags[a][j]`.

- **One error** in a tile flags one row and one column, so exactly that element
  is repaired.
- **Errors in two different rows and columns** give a 2×2 mask. Up to two
  correct elements are then also replaced by their checkpoint values. That
  costs accuracy only slightly, because the checkpoint is close to the true
  value.

The scheduler keeps a pending bit for every flagged row of every array, that is
NUM_SA·M bits. It repeats these steps until no bit is left:

1. Find the first pending bit.
2. Request that one tile row (N × 32 bits) from the checkpoint in DRAM.
3. Write the returned row back into the same SRAM row, with `col_flags[a]` as
   the element write mask.

Only the rows that hold masked elements are read, so a tile with one error
costs one DRAM read. Only one read is outstanding at a time.

The `rows_fetched` and `elems_fixed` counters report the work done.

## 3. Checkpoints and data layout (`data_repack_unit`)

When `timestep % 10 == 0` (CKPT_INTERVAL), the finished and already repaired
tile of every array is written to DRAM as the new checkpoint. Because repair
comes first, a checkpoint never holds an error that was detected.

The repack unit arranges the data in DRAM. A GEMM output is normally stored
row-major, so one 32×32 tile would span 32 DRAM pages. Instead, each tile is
stored as one contiguous 4 KiB block:

```
addr(tile_id, a, m) = CKPT_BASE + ((tile_id·NUM_SA + a)·M + m) · N·4
```

The same function (`drift_pkg::ckpt_addr`) gives the read addresses for
repair. A repair therefore reads from a single 4 KiB region per tile. An
HBM2 page is 1–2 KiB, so that region covers 2–4 pages, against up to 32
for the row-major layout. The
unit reads SRAM one row per clock and sends one 1024-bit beat per DRAM request.

Address space: DRAM addresses are 34 bits (16 GiB) and tile ids are 16 bits.
At the default sizes one tile id covers 64 × 4 KiB = 256 KiB.

## 4. Operating point control

### 4.1 DVFS policy (`dvfs_controller`)

| computation                     | point                              |
|---------------------------------|------------------------------------|
| timestep embedding              | nominal 900 mV / 2000 MHz          |
| timesteps 0 … NOMINAL_STEPS−1 (2) | nominal                          |
| all later timesteps             | aggressive: `cfg_mode` selects undervolt 680 mV / 2000 MHz or overclock 880 mV / 3500 MHz |

The aggressive voltage is trimmed by the error-rate monitor:

- `ber_high` adds +10 mV, but never above nominal;
- `ber_low` adds −10 mV, at most 4 steps below the configured point.

When the requested point changes, `vf_req` rises and stays high until the
regulator and PLL answer with `vf_ack`. The sequencer does not start the GEMM
before that.

### 4.2 Error-rate monitor (`ber_monitor`)

For each tile it estimates the number of large errors per array as
max(#flagged rows, #flagged columns), and adds this over all arrays.

- The window is 64 tiles.
- At the end of a window it pulses `ber_high` if the sum is above 8, or
  `ber_low` if the sum is below 1.

## 5. Sequencing and overlap (`drift_top`)

All NUM_SA = 64 arrays run in lock-step on one broadcast activation row. Each
array holds its own weight tile, so one command produces 64 adjacent
32×32 output tiles of the same row block.

Two state machines share the work:

- **Compute FSM** (IDLE → VF → RUN → DRAIN → HAND):
  1. Accept a command (timestep, embedding flag, tile id).
  2. Settle the operating point.
  3. Stream M activation rows.
  4. Let the results land in SRAM slot *s*.
  5. Wait for the checksum verdict.
  6. Hand the tile over.
- **Post FSM** (IDLE → REC → OFF → DONE):
  1. Repair, if anything was flagged.
  2. Checkpoint, if this is an interval step.
  3. Pulse `res_done` with the slot and tile id.

The next command computes into the other slot while the post FSM works. If the
post FSM is still busy when the next tile is ready, the hand-over waits and
`hand_stall` is high. This is the one data dependency: a tile must be final
before its slot is reused.

The host reads results on `rd_*` while `post_idle` is high. It must do so
before the command after next overwrites the slot.

Cost of each step at the default sizes, in clocks:

- GEMM pass: about M + 2 + 2N ≈ 100.
- Repair: one DRAM round trip per flagged row.
- Checkpoint: 64 × 32 = 2048 beats.

Checkpoint steps are therefore dominated by the offload unless the DRAM port
is that wide. Real layers run many tiles per timestep, and only every tenth
timestep offloads.

## 6. Top-level interface

| group   | signals | notes |
|---------|---------|-------|
| config  | `cfg_mode` | `AGGR_UNDERVOLT` / `AGGR_OVERCLOCK` |
| command | `cmd_valid/ready`, `cmd_timestep[16]`, `cmd_is_embedding`, `cmd_tile_id[16]` | one command = one tile per array |
| weights | `w_load`, `w_sa`, `w_row`, `w_data[N][8]` | accepted while `cmd_ready`; loads row `w_row` of array `w_sa` |
| activations | `x_valid/x_ready`, `x_data[N][8]` | M rows per command, broadcast |
| V/f     | `op` (`vdd_mv`, `freq_mhz`), `vf_req`, `vf_ack` | to LDO and PLL |
| DRAM    | `dram_req_valid/ready/we/addr[34]/wdata[N][32]`, `dram_rsp_valid/rdata` | in-order responses |
| results | `res_done`, `res_slot`, `res_tile_id`, `post_idle`, `rd_en/bank/addr/data` | host read port |
| status  | `nominal_sel`, `err_count`, `rec_rows`, `rec_elems`, `hand_stall` | |
| fault model | `inj_en`, `inj_sa`, `inj_row`, `inj_col`, `inj_mask` | XOR into one output |

Concurrent assertions check three rules:

- the arrays stay in lock-step;
- recovery and offload never share SRAM port B;
- DRAM writes happen only during offload.

## 7. Where this design departs from, or adds to, the published architecture

- **Row checksum.** The architecture sketch accumulates and compares next to
  each array row. Here the output row sum comes from an adder tree at the
  array's bottom edge. The function is the same.
- **Activation checksum in two rows.** This is needed because the multipliers
  are 8-bit. It adds 2 clocks per tile.
- **Lock-step mapping** of the 64 arrays with a broadcast activation row. How
  tiles are mapped to arrays was not specified.
- **Repair policy.**
  - One DRAM read is outstanding at a time.
  - Repair always happens before the checkpoint write.
  - There is no check that a checkpoint for the tile already exists. Steps
    before the first checkpoint run at the nominal point, where no errors are
    expected.
- **Error-rate feedback.** The window, thresholds and 10 mV trim step are this
  design's own values.
- **Tile height** M = 32 and the two-slot buffer are this design's own choices.
- **Not included:**
  - the LDO and the ADPLL (analog, or taken from existing designs);
  - HBM2 (external);
  - weight and activation buffering beyond the result buffer. Weights and
    activations come in through ports.

## 8. Capacity for real models

Layer sizes below come from the published model definitions, not from this
design.

- **DiT-XL/2 at 512×512** (1024 tokens, width 1152, 28 blocks):
  - A checkpoint of all linear-layer outputs is about 1.2 GB.
  - Adding the attention score matrices brings it to about 3.2 GB, which fits
    the 16 GiB space.
- **PixArt-α at 1024×1024** (4096 tokens):
  - The linear layers need about 5.8 GB.
  - The self-attention scores would add about 30 GB and 115k tile ids, so only
    linear layers can be protected by rollback there.
- **Stable Diffusion 1.5** at 512×512: about 3.2 GB.

Compute is always tiled, so any GEMM size runs.

## 9. Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and stops itself with a watchdog. With
Verilator 5:

```
verilator --binary --timing --assert --top-module tb_abft_wrapper \
    -y rtl -y tb +libext+.sv -Irtl -Itb rtl/drift_pkg.sv tb/tb_abft_wrapper.sv
obj_dir/Vtb_abft_wrapper
```

| testbench | what it covers |
|-----------|----------------|
| `tb_systolic_array` | random 32×32 GEMM, checksum column, 2N latency |
| `tb_abft_wrapper` | a 5×5 worked example with one corrupted element, random full-size tiles with large, small and paired errors, flag timing |
| `tb_sram_buffer` | port A/B traffic, masked writes |
| `tb_data_repack_unit` | 64-array offload through a stalling DRAM model, address of every beat |
| `tb_recovery_scheduler` | random flag patterns, only masked elements replaced, row-read count |
| `tb_ber_monitor`, `tb_dvfs_controller` | policy tables, windows, trims, V/f handshake |
| `tb_drift_top` | reduced size (4 arrays of 8×8), a denoising loop (embedding, then timesteps 0–14, one or two tiles each); counts every mechanism (V/f stall, nominal/aggressive, repairs, false-positive repairs, small errors kept, checkpoints, overlap, hand-over stall, trims up and down) and fails if one never occurs |
| `tb_drift_top_full` | default parameters: a checkpoint at timestep 0, then timestep 10 with a bit-20 error in array 37 that must be rolled back |

`tb/dram_model.sv` is a behavioural DRAM with fixed latency and random
back-pressure.

The full-size top has about 65k multipliers. Its C++ build takes about
7.5 minutes on one core; the simulation itself then runs in about 10 s.

To change a size, override the parameters of `drift_top`:

- `NUM_SA`, `N`, `M`;
- `THETA_BIT`, `CKPT_INTERVAL`, `NOMINAL_STEPS`;
- `WINDOW_TILES`, `HI_ERR`, `LO_ERR`, `CKPT_BASE`.

`M` must be a power of two and at most 128.
