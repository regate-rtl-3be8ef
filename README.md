# Power gating for a neural processing unit

An inference/training accelerator of the TPU kind spends a large share of its
energy on leakage. Its units are idle much of the time, and only partly
used while they work:
- a 128×128 systolic array (SA) running a matmul whose K or N dimension is
  smaller than 128, or whose M dimension is short, leaves most PEs with
  nothing to do;
- a vector unit (VU) waits between bursts of element-wise work;
- most of a 128 MB scratchpad holds no live data;
- the HBM and the inter-chip interconnect (ICI) sit idle between transfers.

This RTL gives every one of those units its own power domains and a
controller that decides when to switch them. Each unit gets the policy that
suits it:

| unit | granularity | policy | on/off delay (cycles) |
|---|---|---|---|
| SA | one PE | hardware: zero-weight detection + a diagonal wake-up wave that follows the data | 1 |
| SA | whole array | software (`setpm`) | 10 |
| VU | one VU | hardware idle detection (8 idle cycles) or software | 2 |
| SRAM | 4 KB segment | hardware periodic sleep; software sleep/off by address range | 4 (sleep) / 10 (off) |
| HBM ctrl + DMA | whole | hardware idle detection, 137 idle cycles | 60 |
| ICI ctrl + PHY | whole | hardware idle detection, 153 idle cycles | 60 |

The software side is one instruction, `setpm`. It sets a unit, a set of
units or an SRAM address range to `auto`, `on`, `off` or (SRAM only)
`sleep`. The pipeline side is one rule: a sleeping unit is a structural
hazard. A bundle that needs a unit which is not ready is held, and the
unit is woken.

The default parameters describe one NPU core of the largest configuration
considered:
- 8 SAs of 128×128 and 6 VUs;
- 128 MB SRAM in 4 KB segments;
- 16-bit inputs and 32-bit partial sums.

## The processing element and its three power modes (`pg_pe`)

A weight-stationary PE holds a weight `W`, an input register `I` and a
partial-sum register `S`. It has two power domains:

* **W domain** (the weight register). It is on when both `row_on` and
  `col_on` are high.
* **ON domain** (the `I`/`S` registers and the multiplier). It is on when
  the W domain is on and the PE's registered `PE_on` bit is set.

That gives three modes: OFF, W_on (weight kept, nothing else powered) and
ON. `PE_on` is the OR of the left and upper neighbours' `PE_on` outputs,
registered once. A PE therefore wakes one cycle after a neighbour became
active, which is the 1-cycle PE wake-up. It also passes the wave one PE
further right and one PE further down per cycle, the same skew as the
data. When a domain goes off, its registers are cleared to model the lost
state, so a mistake in the gating logic shows up as a wrong result rather
than passing silently.

## Switching rows and columns off by looking at the weights (`sa_zero_detect`)

While a weight tile is pushed row by row, two bitmaps record which rows
(`row_nz`) and which columns (`col_nz`) hold at least one non-zero weight.

- **Columns.** Inputs flow left to right, so a column may be switched off
  only if it and every column to its right are all zero. Otherwise it must
  pass data on.
- **Rows.** Partial sums flow top to bottom, so a row may be switched off
  only if it and every row above it are all zero.

Hence two prefix ORs, registered:

```
col_on[j] = col_nz[j] | col_nz[j+1] | ... | col_nz[N-1]
row_on[i] = row_nz[0] | row_nz[1] | ... | row_nz[i]
```

Bit j is column j (column 0 on the left). A tile whose only non-zero column
is column 1 gives `col_nz = 4'b0010` and `col_on = 4'b0011`. Column 0 stays
on to carry inputs to column 1, and columns 2–3 are off.

`force_on` / `force_off` override both maps for the whole-array `setpm`.

## The diagonal wake-up wave (`sa_input_queue`, `pg_systolic_array`)

Each SA row has an input queue. Only the row-0 queue decides anything:
1. When data reaches its head, it raises `PE_on` into PE(0,0).
2. One cycle later (the PE's wake-up time) it starts popping.
3. Row i pops exactly one cycle after row i-1 did. This is both the skew a
   systolic array needs and the timing of the wake wave reaching row i.
4. A row holds `PE_on` high while it pops and for one cycle after its last
   pop, so the last value finishes its multiply-accumulate.
5. Then the wave of zeros that follows returns every PE to W_on.

So the PEs of a short-M matmul are ON only in a diagonal band that sweeps
across the array with the data. The whole-array wake-up (10 cycles) is hidden
behind the computation, except for the first PE's one cycle.

Timing of the array, as checked by its testbench:
- a weight row written in cycle t is in its PEs by t+2;
- row/column maps settle one cycle later;
- input vector p (p = 0, 1, …, counted from the first vector pushed into
  an idle array) produces the result of column j at cycle p + N + 3 + j
  after the first push.

The `pe_on_cnt` and `pe_w_cnt` outputs count PEs in ON and in W_on or ON.
They exist so tests can observe the gating.

## One power controller for every coarse unit (`pg_unit_ctrl`)

Whole SAs, VUs, the HBM/DMA path and the ICI use the same four-state
machine: OFF → WAKING → ON → GATING → OFF.
* The **mode** (`auto`/`on`/`off`) is written by `setpm`.
* In `auto`, a counter of consecutive idle cycles (no `active`, no `busy`)
  gates the unit when it reaches `IDLE_THRESH`.
* `off` gates the unit as soon as it is idle.
* `on` wakes it and keeps it on.
* A bundle waiting for the unit sends `wake_req`. That wakes an OFF unit
  in any mode except an explicit `off`, which keeps it off until it is
  needed.
* Power-up and power-down each take the unit's delay. `ready` is high only
  in ON.

With the VU delay of 2, the worked example of the software-managed VU
works out as follows:
- `setpm vu,off` issued in cycle t gates the VUs in cycles t+1..t+2;
- they are off from t+3;
- `setpm vu,on` issued ten cycles later makes them ready two cycles after
  it.

The testbench replays exactly that timeline.

The HBM and ICI thresholds are one third of their break-even times
(412/3 = 137 and 459/3 = 153 cycles). This is the rule used for
hardware-managed idle detection; no other value was given for them. While
gated:
- the HBM path raises `hbm_low_power` (controller in self-refresh) and
  drops `dma_pwr_on`;
- the ICI path drops `ici_pwr_on`.

## Segment-gated scratchpad (`sram_seg_pg_ctrl`, `pg_sram`)

The SRAM is split into 4 KB segments, each ON, SLEEP (lower supply, data
kept) or OFF (no supply, data lost). Each segment has a small state machine
with transition states that count the 4-cycle (sleep) or 10-cycle (off)
delay.

* **Hardware policy (`auto`).** Every `SLEEP_PERIOD` cycles (1024 by
  default), every segment that was not accessed during the period goes to
  sleep. An access to a sleeping segment waits 4 cycles for it.
* **Software.** `setpm` with a start and an end byte address (taken from two
  scalar registers) sets the mode of every segment in the range.
  - `off` cuts the power: the segment's data is gone, and a later access
    waits 10 cycles and reads zeros.
  - `sleep` puts the segments to sleep right away.
  - `on` wakes them and keeps them on.
  - `auto` returns them to the periodic policy.

`pg_sram` wraps the controller around the storage. It has one port of
512-byte rows, 8 rows per segment. An access fires when `req`, `ready` and
`en` are all high, so the dispatcher can stall it like any other unit. A
valid bit per row, cleared when its segment enters OFF, makes lost data
read as zero.

## The `setpm` instruction (`setpm_decoder`)

`setpm` is carried in the 32-bit misc slot of a bundle:

```
bits        31:24  23:16  15:11   14:6 / 13:6 / 10:6     5     4:2    1:0
SRAM range  0xA5   0      rs_e    rs_s in [10:6]         0     type   mode   range R[rs_s]..R[rs_e]
reg bitmap  0xA5   0      0       rs_id in [10:6]        0     type   mode   fu_id = R[rs_id][7:0]
imm bitmap  0xA5   0      0       fu_id in [13:6]        1     type   mode   fu_id = bits [13:6]
type: 0 sa, 1 vu, 2 sram, 3 hbm, 4 ici      mode: 0 auto, 1 on, 2 off, 3 sleep
```

The immediate variant keeps `fu_id` in bits [13:6], so bits [15:14] are zero there; bit 5 is the immediate flag.
The field widths are those of the reference format:
- `fu_id` 8 bits, one bit per SA or VU (`0b1011,vu,off` gates VUs 0, 1
  and 3);
- `fu_type` 3 bits and `mode` 2 bits;
- a register/immediate flag.

The opcode value, the bit positions and the type codes are this design's
own choices. `sleep` on anything but the SRAM, and an unknown type, are
rejected and flagged on `illegal`.

## Dispatch with sleeping units (`pm_dispatch`)

Every unit has a ready bit. A bundle lists the units it needs. It issues
only when all of them are ready; until then it is held. Every needed unit
gets a wake-up request, which a unit that is already on ignores. Units are
independent: any mix of them can be waking at once. The module counts held
cycles and issued bundles.

## The core (`regate_npu`)

The top ties it all together. The bundle interface has:
- a misc slot (`setpm`);
- per SA: push a weight row, or push an input vector;
- one operation bit per VU;
- one SRAM row access;
- a DMA start and an ICI start.

The unit order for dispatch is: SAs, then VUs, then HBM, ICI and SRAM.
An SA is ready when its controller is ON and its input queues can take
the vector. In `auto` mode the SA's own controller stays ready and the
PE-level gating does the work. `setpm sa,off` takes the whole array down
in 10 cycles via `force_off`, and a later push waits 10 cycles for it to
return.

The units this RTL does not contain connect through ports:
- VU datapaths: `vu_issue`, `vu_pwr_on`;
- DMA engine / HBM controller: `dma_start`, `dma_busy`, `dma_pwr_on`,
  `hbm_low_power`;
- ICI: `ici_start`, `ici_busy`, `ici_pwr_on`;
- scalar register file: `sreg_raddr_*` / `sreg_rdata_*`.

Status outputs report:
- the state of every unit;
- PE counts per SA;
- segment counts;
- the stall counter.

## What is not here

- The VU arithmetic.
- The DMA engine.
- The HBM and ICI controllers and PHYs.
- The scalar core and instruction fetch.
- The power switches themselves.

These are either unspecified or bought-in IP. The RTL produces the enables
they would consume. The compiler passes that decide where `setpm`
instructions go are software and are not included either.

Departures and choices to be aware of:
* The whole-array SA gate uses the same 10-cycle delay for on and off. The
  same holds for every coarse unit, because only one "power on/off delay"
  number is known per unit.
* `SLEEP_PERIOD` = 1024 is a choice. The only guide is that a worst-case
  VU stream would take about 1,365 cycles to sweep a 128 MB SRAM.
* Input-queue depth (8), SRAM row width (512 B) and the bundle format are
  choices.
* Numbers are two's-complement integers, not bf16.
* The SRAM is a single behavioural array. A real 128 MB scratchpad is
  built from many macros, and its banking is not modelled.

## Simulating

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. With Verilator 5 the package must come
first:

```
verilator --binary --timing --assert rtl/regate_pkg.sv rtl/*.sv tb/tb_regate_npu.sv \
          --top-module tb_regate_npu -Mdir obj && obj/Vtb_regate_npu
```

(Verilator ignores the repeated package file.) The testbenches:

| testbench | size | what it checks |
|---|---|---|
| `tb_pg_pe` | 1 PE | mode table, 1-cycle wake, MAC, state loss |
| `tb_sa_zero_detect` | 4×4, 8×8 | the worked bitmap example; random tiles against a prefix-OR model |
| `tb_sa_input_queue` | 3 rows | wake one cycle before the first pop; row skew; PE_on held during pops and one cycle after |
| `tb_pg_systolic_array` | 8×8 | random matmuls with zero rows/columns, exact result latency, diagonal band narrower than the W_on region, force on/off |
| `tb_pg_unit_ctrl` | VU, HBM | the VU setpm timeline, auto threshold, 60-cycle wake |
| `tb_sram_seg_pg_ctrl`, `tb_pg_sram` | 8 / 16 segments | sleep policy, 4/10-cycle wakes, range setpm, data loss |
| `tb_setpm_decoder` | – | all variants, random fields, illegal forms |
| `tb_pm_dispatch` | 16 units | hold, wake, counters, random |
| `tb_regate_npu` | 2 SAs of 8×8, 2 VUs, 64 KB | end to end: every mechanism above is counted and must occur |

The largest size simulated end to end is that reduced core:
- 2 SAs of 8×8 and 2 VUs;
- a 64 KB SRAM;
- all delays and thresholds at their real values.

The default core (8 arrays of 128×128, i.e. 131,072 PEs, plus a 128 MB
memory) is too large to build as a Verilator simulation in reasonable time
and memory. For scale: linting alone takes about 2 minutes and 2.5 GB with
one array, and about 5 minutes and 4.6 GB with two. To try a bigger array,
override `SA_N` and `NUM_SA` on `regate_npu`. All parameters are plain
integers, and the testbench's local parameters at its top set the size.
