# RePAST tile: 16-bit matrix inversion on 8-bit analog crossbars

Second-order training methods precondition each layer's gradient with the
inverse of a large curvature matrix (the "second-order information", SOI),
typically of size 1024 x 1024 per block. A resistive crossbar whose bitlines
are fed back to its wordlines through operational amplifiers settles, in a
single analog step, at the solution of `A x = b`. That makes inversion as
cheap as one crossbar read. However, the cells, DACs and ADCs resolve only a
few bits, while training needs about 16.

This RTL builds one accelerator tile around that idea. The tile pairs the
low-precision analog inversion crossbars ("INV crossbars") with ordinary
multiply crossbars ("VMM crossbars") and a digital sequencer. The sequencer
turns many 4- and 8-bit analog operations into one 16-bit solve:

* Only the high byte of the matrix, `A_H`, is inverted in analog.
* The low byte, `A_L`, is folded back in with a Taylor series:
  `A^-1 = A_H^-1 (I - P + P^2 - ...)`, where `P = A_H^-1 A_L 2^-8`.
* Each term is refined beyond the ADC's resolution by iterating on the
  residual.

The same tile also runs the ordinary bit-sliced matrix-vector products of
training.

## The tile

```
             host / network side
                    |  h_*  (master 0)
   +----------------v-----------------+
   |        256-bit tile bus          |<---- command sequencer (master 1)
   +----------------+-----------------+        ^ cmd_valid / cmd / cmd_ready
                    |
              512 kB eDRAM buffer
                    
   sub-tile 0 .. 15                              INV fabric
   +-----------------------------+          +-----------------------------+
   | IR 4 kB -> 28 VMM crossbars |          | 16 INV crossbars 256x256    |
   |  -> shift-and-add -> Mul    |          | + OpAmps, VFs, switches     |
   |  -> Act -> OR 1 kB          |          | single / 4x4 grid / fused   |
   | last 2 crossbars: A_L block |          +--------------^--------------+
   +--------------^--------------+                         |
                  |  al_dac / al_y            inv_dac / inv_adc / inv_vmm
                  +------------ hp_inv_ctrl ---------------+
```

| file | role |
|---|---|
| `repast_pkg.sv` | Sizes, command struct, enums, and the rounding, saturation and DAC-slice helper functions |
| `repast_tile.sv` | Top: bus, buffer, 16 sub-tiles, INV fabric, inversion sequencer, command sequencer |
| `hp_inv_ctrl.sv` | The high-precision inversion sequencer (the heart of the design) |
| `inv_fabric.sv` | Behavioural model of the 16 INV crossbars and their analog periphery |
| `sub_tile.sv` | 28 VMM crossbars with IR, OR, S+A, Mul and Act; also the A_L port |
| `vmm_xbar.sv` | Behavioural model of one 256x256 crossbar with 4-bit cells |
| `shift_add.sv` | Shift-and-add accumulator, one lane per bitline |
| `mul_unit.sv`, `act_unit.sv` | Element-wise Q8.8 multiply; ReLU and leaky ReLU |
| `io_reg.sv`, `edram_buffer.sv` | Register files (IR/OR) and the tile buffer |
| `tile_bus.sv` | Round-robin arbiter of the bus masters onto the buffer |

The default parameters are the tile of the evaluated chip:

* 256x256 crossbars with 4-bit cells, 4-bit DACs and 8-bit ADCs;
* 16 sub-tiles of 28 VMM crossbars, with 16 INV crossbars in all;
* a 4 kB IR and 1 kB OR per sub-tile;
* a 512 kB buffer on a 256-bit bus;
* 16-bit matrices, vectors and results;
* 18 Taylor iterations.

## High-precision inversion (`hp_inv_ctrl`)

### Number formats

* **Matrix.** `A = H/2^8 + L/2^16`, where `H` and `L` are unsigned bytes.
  * `H` is written into the INV crossbars.
  * `L` is written into VMM crossbars, as two 4-bit cells per element.
  * The INV crossbars therefore see `A_H = H/2^8`, which is about 0.5–1 on
    the diagonal for well-scaled matrices.
* **Vectors.** `b` and `x` are signed 16-bit integers.
* **Rounding.** Every right shift in the datapath rounds half up.
  Saturations of the residual are counted on `n_sat`.

### The three loops

For `l = 0 .. 17` (Loop A, the Taylor terms):

* **Loop x.** For `j = 0 .. NX-1`, refine the term:
  * **Loop b.** Split `b_lj` into 4 sign-magnitude DAC slices of 4 bits.
    Apply each slice to the INV crossbars. Shift-and-add the four 8-bit
    ADC codes, MSB first.
  * That gives `x_j`, the top bits of `A_H^-1 b_lj`.
  * Compute the residual `A_H x_j` on the same INV crossbars, switched to
    VMM mode. Use 4 slices, one per DAC slice of `b`.
  * The next right-hand side is the residual times `2^X_STEP`:
    `b_l(j+1) = (b_lj - A_H x_j 2^(X_STEP(NX-1))) 2^X_STEP`.
  * Assemble the term as `xa_l = sum_j x_j 2^(X_STEP(NX-1-j))`.
* **Accumulate.** `x += (-1)^l xa_l`.
* **Next term.** `b_(l+1) = A_L 2^-8 xa_l`. This product runs on the
  sub-tiles' A_L crossbars, as 4 DAC slices of `xa_l`.

### Cost

One crossbar operation takes one crossbar cycle, which in RTL is a
request/acknowledge pair of clocks. A solve costs
`N_LOOP * (2*NB*NX + NXD)` crossbar cycles:

* NB = 4 slices of `b`;
* NX refinement steps;
* NXD = 4 slices of `xa`.

With the defaults this is `18 * (24 + 4) = 504` crossbar cycles. The full
solve takes 1081 clocks after `b` is in place. The testbenches check both
numbers.

### Where this differs from the published schedule

The published algorithm gains the full ADC width, 8 bits, per refinement
step. That gives NX = 2 and 360 crossbar cycles.

Here, each 4-bit DAC slice is inverted by an 8-bit ADC, so `x_j` is only
good to about 6 bits. Amplifying the residual by `2^8` then overflows the
16-bit `b`. A bit-exact model of the loops found that 5 bits per step
(`X_STEP = 5`, NX = 3) has no saturations and stays within a few LSB of a
double-precision solve. That is the default. Setting `X_STEP = 8` gives the
published schedule, with the overflow described above.

### Measured accuracy

| Configuration | Worst error |
|---|---|
| Well-conditioned grid systems, 8x8 to 1024x1024 | within 6 LSB of a double-precision solution |
| Fused configuration (below) | 22 LSB (16 lanes), 38 LSB (256 lanes) |

The fused configuration is less accurate because its `A_H` is the product
of two crossbars, not an integer code. Each residual slice is then rounded
by the ADC, and a rounding of the top slice is worth `0.5 * 2^12 / 2^8`
LSB of `b`.

The Taylor series converges only when the spectral radius of `P` is well
below 1. That holds when the low byte is small relative to the diagonal of
`A_H`. The full-size test uses sparse matrices for this reason.

## INV crossbar configurations (`inv_fabric`)

The 16 INV crossbars are joined by switches into groups. `cfg_g` sets the
group size `g` (1 to 4), and `grp` selects group `k`:

* `INV_SINGLE`: crossbar `k` alone, a 256x256 matrix.
* `INV_GRID`: `g x g` crossbars `k*g*g + r*g + c` hold block `(r, c)` of a
  `(256g)`-square matrix. With `g = 4` this is a 1024x1024 inversion.
* `INV_FUSED`: `2g` crossbars from `k*2g` hold `A1` (`256g x 256`) and
  `A2` (`256 x 256g`). The loop settles at `(A1 A2)^-1 b`. This is used
  when the matrix to invert is itself a product, such as `a a^T`, so the
  product never has to be formed.

In VMM mode the same group returns `A_H d`. In fused mode that is
`A1 (A2 d)`.

The model computes the settled state with Gauss-Jordan elimination in
`real` arithmetic and caches it until the cells or the configuration
change. It quantizes the result like the ADC: 8 bits, with 2 fractional
bits (`ADC_FRAC`).

This block is an analog macro. The model passes lint and elaboration, but
logic synthesis rejects its `real` arithmetic. `vmm_xbar` is likewise a
behavioural model of an analog array: it returns ideal bitline sums one
clock after `compute`.

## A_L placement

Sub-tile `s = 4*br + bc` holds block `(br, bc)` of `L` in its last two VMM
crossbars:

* crossbar 26 holds the high nibble;
* crossbar 27 holds the low nibble.

The element for input lane `r` and output lane `c` of the block is
programmed at row `r`, column `c`. That element is `L[256*bc + r][256*br + c]`,
the transpose of the block.

The sequencer's DAC vector is fanned out by column block. The tile adds the
four results of each block row. A matrix smaller than 1024 uses the leading
blocks, with zeros elsewhere.

In fused mode the low part is not computed by the hardware. Software has to
program the low part of `A1 A2` into these crossbars.

## Local VMM in a sub-tile

A 16-bit unsigned weight occupies four adjacent crossbars, one 4-bit cell
slice each, MSB first. A 16-bit signed input is applied in four
sign-magnitude DAC slices. Each slice is one crossbar cycle:

1. The four crossbars compute together.
2. Their bitline sums are weighted `2^(4*(3-c))` and added.
3. The S+A folds the slices MSB first.

A 16-input-lane VMM therefore costs 4 crossbar cycles. The result is:

* arithmetic-shifted by `vmm_shift` and saturated to 16 bits;
* multiplied by a Q8.8 `vmm_scale` in Mul (for example a batch-norm scale);
* passed through Act (none, ReLU, or leaky ReLU with slope 1/8);
* written to the OR.

One input vector is `XB*16/256` IR words, and the result is one OR word per
16 lanes.

## Commands and timing (`repast_tile`)

The network's control program, a per-network state machine, is not part of
this RTL. It drives the tile through `cmd_valid` / `cmd_ready` with a
`tile_cmd_t` struct. Commands run one at a time.

| command | action |
|---|---|
| `C_PROG_VMM`, `C_PROG_INV` | Write one wordline of a crossbar from `prog_data` (one clock) |
| `C_CFG_INV` | Set mode and `g` of the INV switches |
| `C_LOAD_IR` | Copy `len` buffer words to a sub-tile's IR |
| `C_STORE_OR` | Copy `len` OR words to the buffer |
| `C_VMM` | Local VMM in sub-tile `sub` |
| `C_HPINV` | Read `b` (NV/16 words at `addr_a`), solve on group `xb`, write `x` at `addr_b` |

The host side of the buffer (`h_*`) shares the bus with the tile's own data
mover. Grants are round-robin and combinational. Read data returns one clock
after the grant.

## Verifying and changing it

Every block has a self-checking testbench in `tb/`. Each one:

* prints `TB_RESULT checks=... failures=...`;
* has a watchdog;
* checks cycle counts where the design fixes them.

To simulate with Verilator:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/repast_pkg.sv tb/tb_repast_tile.sv --top-module tb_repast_tile
./obj_dir/Vtb_repast_tile
```

### `tb_repast_tile`: end-to-end at reduced size

This test uses 16x16 crossbars, a 2x2 grid and 4 sub-tiles. It counts each
mechanism and fails if one never happens:

* a grid solve;
* a fused solve;
* the 504-cycle count;
* a VMM through Mul and ReLU;
* bus contention between the host and the data mover.

### `tb_repast_tile_full`: full size

This test runs the tile at its default size:

* a 1024x1024 grid solve;
* a 256x256 fused solve.

It takes about 20 seconds.

### `tb_repast_tile_soi`: other block sizes

This test also runs at the default size, with blocks smaller than 1024:

* a 768x768 block on a 3x3 grid, the largest BERT block;
* a 64x64 block inside one crossbar, the smallest ResNet block. The
  crossbar's unused rows hold a plain diagonal and zero right-hand side.

### Leaf-block testbenches

`tb_hp_inv_ctrl` runs the sequencer against the fabric model. It compares
with a double-precision solve and checks the 504 crossbar cycles and the
1081 clocks.

## Departures and limits

* **Refinement step.** `X_STEP = 5` instead of 8, so a solve takes 504
  crossbar cycles instead of 360. See above.
* **S+A units.** The published sub-tile lists 29 S+A units. Here a single
  256-lane shift-and-add serves the sub-tile.
* **Crossbar cycle.** Each crossbar operation takes one request/acknowledge
  pair on the tile clock. The 100 ns analog settling time is not modelled.
* **Command execution.** Inversions and VMMs are not pipelined or overlapped
  across sub-tiles.
* **Matrices larger than 1024.** A matrix of `n` 1024-blocks is inverted
  block by block on one tile, reprogramming in between. The 22-tile chip
  would do this in parallel.
* **Not built:**
  * the chip-level network between tiles;
  * the chip-to-chip link;
  * the generated per-network controller;
  * the software mapping that picks fused or separate layouts.

  The host port and the command port stand in for them.
* **Arrays per INV crossbar.** The published area table counts three
  256x256 arrays per INV crossbar. An 8-bit `A_H` stacked in 4-bit cells,
  with follower gains of `2^-4i`, needs two. The model keeps the 8-bit code
  and gives no role to a third array.
* **Analog models.** The INV and VMM arrays are behavioural models with
  ideal OpAmps and no device noise. Their cell codes are stored directly
  rather than as conductances.
