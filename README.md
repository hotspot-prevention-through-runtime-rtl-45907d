# Runtime workload migration for hotspot prevention in a mesh NoC

A network-on-chip built from identical processing elements (PEs) can still
develop hotspots. Some PEs carry more computation or more traffic than others,
and they stay hot even when the placement was optimised for temperature at
design time. This design spreads that heat over time instead of adding spare
PEs. At regular intervals it halts the mesh and moves *every* workload to a
new PE. It works out each new position with a simple algebraic function of
the old one, then resumes. All workloads move together, so they keep the same
placement relative to each other. Their traffic pattern only changes as
predictably as the mesh itself is turned, mirrored or shifted.

The target application is an LDPC decoder mapped onto a 4x4 or 5x5 mesh
(published evaluation: peak-temperature reductions of up to about 8 °C; the
base peak temperatures were 85.44, 84.05, 75.17, 72.8 and 75.98 °C for the
five evaluated configurations A–E). With one migration every 109 µs the
reported throughput cost was 1.6 %. It was below 0.4 % at 437.2 µs and below
0.2 % at 874.4 µs. This RTL covers the migration logic only. The decoder PEs
and the mesh routers belong to the existing chip and are outside it.

## The migration functions

A workload's position is an `{X,Y}` pair of 3-bit coordinates, enough for an
8x8 mesh (64 PEs). The mesh is N x N, with N = `n_m1 + 1` given at run time.
`remap_unit` computes the new position without a clock:

| function    | code | X'                 | Y'                 |
|-------------|------|--------------------|--------------------|
| rotation    | 0    | N-1-Y              | X                  |
| X mirror    | 1    | N-1-X              | Y                  |
| X-Y mirror  | 2    | N-1-X              | N-1-Y              |
| X shift     | 3    | (X+OFF) mod N      | Y                  |
| X-Y shift   | 4    | (X+OFF) mod N      | (Y+OFF) mod N      |

Every row is a permutation of the mesh. Rotation, mirroring and translation
are the three basic ways of moving a plane, and the two-axis rows are
combinations of them. The published evaluation names the two-axis variants
but gives no formula for them. The forms above (both axes mirrored; both
axes shifted by the same offset) are this design's reading. Translation is
written in the source as plain `X + Offset`. Here it wraps modulo N so that
no workload leaves the mesh. On an odd-sized mesh, rotation and mirroring
never move the centre PE. Translation does. This is why translation did
better on the 5x5 chips.

## What one migration does

`migration_controller` runs the sequence below. `noc_migration_top` wires it
to the conversion unit and the I/O unit.

1. **Wait.** A period counter counts `period_cycles`. When it expires, a
   migration becomes *pending*. The migration then waits for the next
   `block_done` from the PEs, i.e. until a message block has been decoded.
   At that point there is little live state to move.
2. **Halt.** `halt` rises and stays high until the end. The function,
   offset and mesh size are sampled now and shown on `act_func` etc. A new
   function set while a migration runs takes effect at the next one.
3. **Unload.** The PEs are unloaded one after another in raster order
   (x fastest), and each one is a phase. `unload_req`/`unload_pos` name
   the PE. Its words come in on `pe_word_*` (valid/ready), and the word
   marked `last` ends it.
4. **Convert and send.** Each word passes through `config_converter`. Its
   packet goes to the PE's new position, f(`unload_pos`). If the word is
   flagged `is_addr`, its low six bits are a PE position (for example the PE
   that receives this PE's results), and they are remapped with the same f.
   That remapping is what keeps relative placement intact. For example, a
   workload whose partner was one PE to the right still points at its
   partner after the move, wherever the partner went.
5. **Drain.** The controller waits until the converter is empty and the
   network reports `net_idle` (no migration packet in flight).
6. **Commit.** `commit` pulses for one cycle. Each PE switches to the
   configuration it received, and the I/O unit updates its maps. `halt` then
   falls.

Without back-pressure the migration time is fixed. With W words per PE,
`halt` is high for `1 + N*N*W + D + 1` cycles, where D ≥ 1 is the drain time
set by the network. The unload phase alone is exactly N·N·W cycles.

The PE side must do three things: multiplex the named PE's words onto the
single `pe_word_*` port, buffer the words a PE receives during migration,
and switch to them on `commit`. Buffering is needed because a PE is usually
both a source and a destination within one migration.

## Keeping the outside world unaware: `io_remap_interface`

Packets from off chip address workloads by their *original* (logical)
position. Packets leaving the chip must carry the logical position as their
source. After k migrations, possibly with different functions, the
placement is the composition of all of them. The I/O unit tracks it in two
maps of 64 entries each:

* `phys_of[logical]`: the PE now running that workload. On commit, every
  entry is passed through f: `phys_of[L] <= f(phys_of[L])`.
* `log_of[physical]`: the inverse. On commit it is permuted: the workload
  that was on P is now on f(P), so `log_of[f(P)] <= log_of[P]`.

Both maps are the identity after reset and take the single commit cycle to
update. Incoming packets get `dst <= phys_of[dst]`, and outgoing packets get
`src <= log_of[src]`, both without a clock. Both I/O streams are stalled while
`halt` is high, so no packet is translated by a map that is about to change.
Entries outside the active N x N area are never touched.

## Files

| file | contents |
|------|----------|
| `rtl/mig_pkg.sv` | coordinate width (3), data width (32), `pos_t`, `mig_func_e`, `cfg_word_t`, `pkt_t` |
| `rtl/remap_unit.sv` | migration function, combinational |
| `rtl/config_converter.sv` | conversion unit, one register stage, one word per cycle |
| `rtl/migration_controller.sv` | period timer and HALT/UNLOAD/DRAIN/COMMIT sequencer |
| `rtl/io_remap_interface.sv` | logical/physical maps and I/O address rewriting |
| `rtl/noc_migration_top.sv` | top level; the PE array and network connect to its ports |
| `tb/tb_mig_model_pkg.sv` | integer reference model of the five functions |
| `tb/tb_*.sv` | one self-checking testbench per module |

Packet format (`pkt_t`, 46 bits, MSB first): `dst{y,x}`, `src{y,x}`,
`last`, `is_addr`, `data[31:0]`. A configuration word (`cfg_word_t`) is the
same without the two positions. Reset is asynchronous and active low
throughout.

## Choices made where the source is silent

* The word format, the `is_addr` flag and the 32-bit width. The source does
  not say how addresses are found inside a PE's configuration.
* One conversion unit for the whole chip, with one PE per phase. The
  source moves "groups of PEs in phases" to avoid congestion but does not
  say what the groups are. One PE at a time gives a single packet stream and
  is trivially congestion-free, but it is not fast. A wider phase needs
  several conversion units and a knowledge of the routing that this design
  does not have.
* The period is given in clock cycles (32 bits), because no clock frequency
  is published. At any clock up to several THz, 874.4 µs fits in the counter.
* The commit handshake and `net_idle`, the stalling of I/O during migration,
  the two-map I/O design, and the function encoding.
* The mesh size is an input, so one netlist serves the 4x4 and 5x5 chips.

Not built: the LDPC PEs and the mesh routers. Their internals are not
described, so they appear only as ports here and as a behavioural model
inside the top-level testbench. Temperature, power and energy modelling are
evaluation tooling, not hardware.

## Verification

Each testbench compares against values it computes on its own and ends with a
`TB_RESULT checks=N failures=M` line.

* `tb_remap_unit` is exhaustive. It covers every N from 1 to 8, every
  function, every offset and every position (13 010 checks). It also checks
  that each function is a permutation, and that four rotations or two
  mirrors give the identity.
* `tb_config_converter` uses random words, functions, sizes and
  back-pressure, with a scoreboard. It also checks the one-cycle latency.
* `tb_migration_controller` checks the exact period, the wait for the block
  boundary, raster order, that functions are sampled only at the start, the
  wait for `net_idle`, and the exact halt duration `1 + 25*4 + 2 + 1`.
* `tb_io_remap_interface` runs chains of 30 random migrations on 4x4, 5x5
  and 8x8 meshes. After each commit it checks both translation directions
  for every workload.
* `tb_noc_migration_top` is the end-to-end test, with default parameters.
  It runs 16 migrations on a 5x5 and a 4x4 mesh through a behavioural PE
  array and network (random gaps, back-pressure, 3-cycle delivery). After
  each migration it checks that every workload's tag, remapped partner
  address and state word sit on the PE the reference model predicts, and
  that I/O translation matches. It counts every mechanism: all five
  functions, block-boundary waits, back-pressure, PE gaps, drain waits, I/O
  stalls and a function change during a migration. A mechanism that never
  occurs is a failure.

* `tb_migration_periods` measures the throughput cost for the three
  published periods. It assumes a 100 MHz clock (10 900 / 43 720 / 87 440
  cycles), a 5x5 mesh, 6 words per PE and an ideal network. Every migration
  halts the mesh for the same 155 cycles. The cost comes out at 1.42 %,
  0.355 % and 0.177 %, in inverse proportion to the period and under the
  published 1.6 / 0.4 / 0.2 %. The absolute figures depend on the assumed
  clock and state size. The ratios do not.

To simulate, for example the top:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/mig_pkg.sv tb/tb_mig_model_pkg.sv rtl/remap_unit.sv \
  rtl/config_converter.sv rtl/migration_controller.sv \
  rtl/io_remap_interface.sv rtl/noc_migration_top.sv \
  tb/tb_noc_migration_top.sv --top-module tb_noc_migration_top
./obj_dir/Vtb_noc_migration_top
```

For a unit test, list the package(s), the module with what it instantiates,
and its testbench. The tests were not run with x-propagation: the simulator
has two states, and every register that is read is reset.
