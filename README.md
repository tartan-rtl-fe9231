# Tartan: a bit-serial neural-network accelerator in SystemVerilog

Tartan computes the convolutional (CVL) and fully-connected (FCL) layers of a deep neural network. It takes
time in proportion to how many bits each layer really needs. Activations enter the multipliers **one bit per
cycle**. A layer whose activations need only `pa` bits (often 5 to 13 instead of 16) therefore takes about
`pa/16` of the time of a 16-bit bit-parallel engine with the same number of weight lanes. For FCLs there is
no weight reuse to hide the loading of weights. Tartan therefore also loads those weights **one bit per
cycle**, in parallel into many registers, so an FCL step takes `max(pa, pw)` cycles, where `pw` is the weight
precision. Precision is a per-layer setting: the same hardware runs a 4-bit layer and a 13-bit layer, each at
its own speed.

This repository holds synthesizable RTL for the whole accelerator in its main form: one activation bit per
cycle, 16 tiles of 16×16 serial inner-product units, a 2 MB central neuron memory and a 2 MB weight buffer
per tile. It also holds self-checking testbenches for every block and for the whole chip.

## 1. Organisation

```
                      256-bit global bus (trt_bus_arbiter)
  +--------+ row   +------------+  planes   +------------------------------+
  |   NM   |------>| dispatcher |---------->| tile 0 .. tile 15 (trt_tile) |
  | 2 MB   |<------+------------+  bricks   |  NBin -> 16x16 SIPs -> NBout |
  +--------+   <------------------------------  -> AFU -> reducer          |
      ^ host ports                          |  SB (2 MB, weights)          |
                                            +------------------------------+
                 trt_ctrl: one command per cycle to all tiles (lockstep)
```

| module | role |
|---|---|
| `trt_chip` | top level: memories, dispatcher, tiles, arbiter, controller, host ports |
| `trt_tile` | 16×16 SIP grid with its SB, NBin, NBout, activation unit and reducer |
| `trt_sip` | serial inner-product unit: 16 weights × 16 activation bits per cycle |
| `trt_adder_tree` | balanced 16-input adder tree used by the SIP |
| `trt_sb` | per-tile weight memory, one 4096-bit row per read |
| `trt_nm` | central activation memory, 16-brick rows, one-brick writes |
| `trt_nbin` | per-tile FIFO of activation bit-planes |
| `trt_nbout` | per-tile buffer of finished 16×16 outputs |
| `trt_afu` | activation function unit: ReLU, right shift, saturation |
| `trt_reducer` | writes each finished output brick of a tile to NM |
| `trt_dispatcher` | fetches activation bricks, transposes them into bit-planes, broadcasts them |
| `trt_bus_arbiter` | shares the 256-bit bus between dispatcher and reducers |
| `trt_ctrl` | layer sequencer; issues `tile_cmd_t` every cycle |
| `trt_pkg` | widths, `layer_cfg_t`, `tile_cmd_t`, loop-nest and address functions |

A **brick** is 16 consecutive 16-bit values along the channel dimension (256 bits). A **bit-plane** is one bit
of each of 256 activations: 16 window lanes × 16 activations. All arithmetic is two's-complement fixed point.
The accumulators are 32 bits wide.

## 2. The serial inner-product unit (SIP)

Every SIP holds 16 weights and receives, per cycle, one bit of each of 16 activations. With the activation
bits sent most-significant first and `bitpos = pa-1-k` in cycle `k`, the SIP computes

```
term_j = a_bit_j ? (neg ? -WR_j : WR_j) : 0          (AND gates, negation blocks)
OR    <= (msb ? i_nbout : OR) + (sum_j term_j) << bitpos
```

After `pa` cycles, OR holds `Σ_j WR_j · a_j` for `pa`-bit activations. For signed activations the MSB has
weight `-2^(pa-1)`, so the controller sets `neg` on the MSB cycle. In the first cycle of a step (`msb`), the
starting value comes from `i_nbout`. The tile drives it with zero (first step of a unit), with OR itself
(accumulating across steps) or with the open NBout entry (pooling).

Weights arrive in two ways:

* **CVL**: `WR` is loaded in one cycle from the 16-weight bus of the SIP's row. All 16 SIPs of a row get the
  same 16 weights (one filter), and each column works on a different window.
* **FCL**: each of the 16 SWR subregisters is a shift register on its own wire of the 4096-wire SB bus. One
  weight bit arrives per cycle, MSB first, and the first bit is copied into all bits (sign extension). In the
  cycle that brings the last bit, WR takes the new SWR value, so a full set of weights costs exactly `pw`
  cycles. Shifting the next set into SWR overlaps with computing on WR.

Two more inputs complete the SIP:

* A **cascade multiplexer** replaces adder-tree input 0 with the OR of the SIP to the left (see section 4).
* A **max comparator** and an **output shifter** give `out = (pool ? max(OR, i_nbout) : OR) <<< prec`.

*Departure from the SIP drawing:* the drawing puts a fixed `<<1` on the OR feedback (shift the partial sum
left, then add). This RTL instead shifts the adder-tree sum by `bitpos`. For a single pass the result is the
same. But a partial sum brought in through `i_nbout` keeps its scale, and `pa` can change between layers
without rescaling.

## 3. The tile

SIP(r, c) sits in row `r` (filter lane) and column `c` (window lane). Its wiring follows the tile drawing:

* SB row bits `r*256 + j*16 +: 16` form weight `j` of row `r` (CVL parallel load).
* SB bit `r*256 + c*16 + j` feeds SWR subregister `j` of SIP(r, c) (FCL serial load). This gives 4096
  different weights per SB row: one bit of each.
* NBin plane bits `c*16 + j` are the activation bits of column `c`.
* The OR of SIP(r, c-1) is the cascade input of SIP(r, c).
* The 256 SIP outputs go into one NBout entry. The reducer drains that entry one column (one output brick)
  at a time through the activation function unit and onto the bus.

The command from the controller passes through one register in the tile. There it meets the SB row read one
cycle earlier and the NBin plane popped one cycle earlier.

## 4. How a layer is scheduled

The controller (`trt_ctrl`) splits a layer into **work units** and each unit into `T` **steps**. All tiles
execute the same command in the same cycle; tile `i` uses its own weights.

| layer | work unit | steps T | tile i computes |
|---|---|---|---|
| CVL | (filter group g, output row oy, group of 16 output columns) | `kx·ky·in_bricks` | filters `(g·16+i)·16 ..+15` |
| FCL | output group g | `ceil(in_bricks/np)` | outputs of bricks `(g·16+i)·(16/np) ..` |
| pool | (channel brick g, output row, column group) | `kx·ky` | tile 0 only is written back |

Inside a unit, slots 0..T run back to back. In slot `t` the weights of step `t` are loaded while step `t-1` is
multiplied:

| slot | CVL | FCL | pool |
|---|---|---|---|
| 0 (load only) | 1 cycle | `pw` cycles | 1 cycle |
| 1..T-1 | `pa` | `max(pa, pw)` | `pa + 1` |
| T (compute only) | `pa` | `pa` | `pa + 1` |

After the last slot come the `np-1` cascade cycles (FCL with `np > 1`), one cycle that writes and commits the
NBout entry, and one idle cycle. The testbench of the controller checks these exact numbers. A unit waits
before it starts while NBout has no free entry (**NBout-full stall**). A compute cycle waits while NBin is
empty (**NBin-empty stall**). Both are counted (`stall_nbout`, `stall_nbin`).

**Cascade mode** serves FCLs with few outputs. Each row of 16 SIPs is split into `16/np` slices of `np` SIPs.
The SIP at position `k` of a slice handles input bricks `t·np + k`, so one output is spread over `np` SIPs.
After the last step come `np-1` reduction cycles. In cycle `j`, the SIPs at slice position `j` add their left
neighbour's OR through the cascade multiplexer, so the last SIP of the slice ends up with the full sum. The
reducer writes only that column. (The text this design follows says the reduction takes `np` cycles; `np-1`
suffice, because position 0 only holds its value.)

**Pooling** uses identity weights (weight `j` of filter lane `r` is 1 when `j == r`). In each step, the SIPs
form the window element and the max comparator writes `max(element, NBout)` back into the open NBout entry.
The first step writes the element itself.

## 5. Feeding activations: the dispatcher

For each step, every column needs one activation brick (`trt_pkg::act_brick`):

* CVL: 16 neighbouring windows (stride apart) from the same channel brick.
* FCL: the same input brick in every column, or `np` consecutive bricks repeated across the slices.
* Pool: 16 windows of channel brick `g`.

The dispatcher reads the NM row that holds the lowest-numbered missing brick. It captures every brick of the
set that lies in that 16-brick row, then repeats until the set is complete. Thanks to the NM layout (below), a
set of 16 neighbouring windows usually takes one or two reads. A set is built in a "next" pool while the
"current" pool is sent. Sending transposes the pool: plane `k` carries bit `pa-1-k` of all 256 activations,
MSB first. One plane is sent per bus grant, and only when no tile's NBin is full. `disp_starved` counts
cycles in which the bus was free but no plane was ready.

The bus gives priority to the reducers (round robin among them) over the dispatcher. A plane goes to every
tile's NBin at once.

## 6. Memory layouts the host must follow

* **NM** (`trt_nm`): a brick address `A` is row `A/16`, slot `A%16`. An activation array of size X×Y with
  `in_bricks` channel bricks starts at `nm_in_base`. Brick (x, y, b) is at `base + b·X·Y + y·X + x`. The
  outputs use the same layout from `nm_out_base`; for an FCL, output brick `o` is at `nm_out_base + o`.
  Activations must already fit in `pa` bits: the dispatcher sends only the low `pa` bits.
* **SB**, CVL: row `sb_base + g·T + t`, where step `t = (kyi·kx + kxi)·in_bricks + b`. Slot `r` (bits
  `r·256 ..`) holds the 16 weights (channels `b·16 ..+15`) of filter `(g·N_TILES + tile)·16 + r`.
* **SB**, FCL: row `sb_base + (g·T + t)·pw + k` holds bit `pw-1-k` of 4096 weights. Bit `r·256 + c·16 + j` is
  the weight of output `((g·N_TILES + tile)·(16/np) + c/np)·16 + r` for input channel
  `(t·np + c%np)·16 + j`. Weights are `pw`-bit two's complement.
* **SB**, pool: identity weights in rows `sb_base + g·T + t`.

The outputs pass through the activation unit: `prec` shifts left in the SIP, then optional ReLU, then
`out_shift` shifts right, then the value saturates to 16 bits.

## 7. Using the top level

`trt_chip` parameters: `N_TILES` (16), `SB_DEPTH` (4096 rows = 2 MB), `NM_ROWS` (4096 rows = 2 MB),
`NBIN_DEPTH` (32 planes), `NBOUT_DEPTH` (2 entries).

1. With `busy` low, write bricks into NM (`host_nm_wr/row/slot/data`). Write weight slots into the SB of each
   tile (`host_sb_wr/tile/row/slot/data`).
2. Set `cfg` (`trt_pkg::layer_cfg_t`, which lists the fields), then pulse `start`.
3. Wait for `done`. Read NM rows with `host_rd_en/host_rd_row`; the data appears on `host_rd_data` one cycle
   later.
4. Read the counters if needed: `cycles`, `stall_nbin`, `stall_nbout`, `disp_starved`, `red_cycles`,
   `bus_red_writes`.

Host ports must stay idle while `busy` is high (an assertion checks this). Reading the input and weights
from off-chip memory is left to the host.

## 8. Where this RTL departs from, or adds to, the described design

* OR feedback: the tree sum is shifted, not the feedback path (section 2).
* Cascade reduction takes `np-1` cycles, not `np` (section 4).
* CVL weights go straight from the weight bus into WR. One passage describes loading them "to all SWRs"; the
  SIP description lets WR load from the bus, and that is what is built.
* Partial sums of a unit stay in the SIP's OR across steps. NBout receives finished outputs only, except
  when pooling.
* Chosen here because the description is silent:
  * the activation function (ReLU, shift, saturate)
  * the dispatcher's fetch policy and double buffering
  * the bus arbitration
  * the NBin and NBout depths
  * the memory layouts
  * the loop order
  * the command encoding
  * the 32-bit accumulator
  * the host ports
* eDRAM is modelled as plain synchronous arrays, with no refresh and no banking.
* Not built: the 2-bit-per-cycle variant. The whole-network flow (layer after layer without the host) is not
  built either: each layer is started by the host.
* Workload fit at the default sizes:
  * Per-layer precisions of up to 16 bits and the usual kernel sizes and strides fit the configuration.
  * The first-layer activation arrays of the common ImageNet networks (for example 224×224×64 for VGG-19)
    exceed the 2 MB NM, so the host must process them in parts.
  * Large FCL weight sets exceed the 32 MB of SB, so the host must load them per layer.

## 9. Verification

Every block has a self-checking testbench in `tb/` (named `tb_<module>`). Each one compares the block's
outputs with values computed independently in the testbench and ends by printing
`TB_RESULT checks=N failures=M`.

* `tb_trt_sip`: CVL and FCL products over random precisions, signed MSB negation, continuation from
  `i_nbout`, the cascade input, the max comparator and the shifter. It checks that a product takes exactly
  `pa` cycles.
* `tb_trt_ctrl`: the exact cycle counts of section 4 for CVL, FCL (`pa < pw` and `pa > pw`), cascade and
  pooling, plus the stall behaviour.
* `tb_trt_dispatcher`: every transmitted bit-plane for a CVL, an FCL in cascade mode and a pooling pass, with
  random bus grants and random NBin-full.
* `tb_trt_tile`: one tile driven by the controller, checked against reference inner products.
* The remaining testbenches cover the memories, buffers, arbiter, activation unit and reducer.
* `tb_trt_chip`: 2 tiles, small memories. It runs six layers end to end and checks every output brick:
  * a CVL with stride 1
  * a signed CVL with stride 2
  * an FCL with `pw > pa`
  * an FCL in cascade mode
  * a max-pooling pass
  * an FCL with many outputs that fills NBout

  It also checks that each of these mechanisms happened at least once: NBin-empty stalls, NBout-full stalls,
  dispatcher starvation, cascade reduction, pooling, signed activations, CVL mode and FCL mode.

The largest configuration simulated end to end has 2 tiles, 64-row synapse buffers and a 64-row neuron
memory (`tb_trt_chip`). The blocks it instantiates are the same as at full size; only the tile count and the
memory depths differ. No full-size simulation (16 tiles, 4096-row memories) was run: the Verilator model of
the 4096-SIP chip takes far longer to compile than a routine test allows. The full-size RTL passes Verilator
lint and elaboration.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_trt_chip \
          -y rtl rtl/trt_pkg.sv tb/tb_trt_chip.sv -Mdir obj
./obj/Vtb_trt_chip
```
