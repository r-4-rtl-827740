# R⁴ — a racetrack register file whose data layout software can switch at run time

A register file built from skyrmion racetrack memory stores bits on
*nanotracks*: a track is a shift register of magnetic positions, and a bit can
only be read or written where it sits under an **access port**. Moving a bit to
a port costs one **shift** per position, and shifts dominate the energy and
latency of such a memory. Which layout of registers needs the fewest shifts
depends on the program. A tight loop that keeps using a few registers wants a
different layout from code that touches all 32 registers in turn.

R⁴ builds one set of tracks, ports and buffers that can serve **two
orthogonal layouts** (allocations), chosen per access by a single **mode bit**:

* **horizontal allocation**: a register lies *along* a track. Any register can
  be reached at the same fixed cost, which suits code that spreads its accesses
  over many registers.
* **vertical allocation**: a register lies *across* all tracks at one
  position. The tracks move together, and they stay where the last access left
  them. Re-using the same register, or a nearby one, costs few or no shifts.

After every access, in either mode, all tracks rest at one **common offset**.
So the hardware needs no clean-up when the mode bit flips. Only the meaning of
the stored bits changes, so software must save the registers before a flip and
restore them after it. A small **recommendation** mechanism decides when to
flip:

1. An offline analysis gives each instruction one bit, "vertical is better
   here" or "horizontal is better here".
2. A peripheral samples that bit every `WINDOW` instructions.
3. When the bit disagrees with the current mode, the peripheral raises an
   interrupt. The handler saves the registers, flips the bit and restores them.

This repository holds synthesizable SystemVerilog for the register file and
the reconfiguration hardware around it, with self-checking testbenches.

## Geometry and the default configuration

| symbol | parameter (`r4_pkg`) | default | meaning |
|---|---|---|---|
| R | `NUM_REGS` | 32 | registers |
| B | `REG_BITS` | 64 | bits per register |
| N | `NUM_TRACKS` | 32 | nanotracks |
| W | `TRACK_POS` | 64 | usable positions per track |
| n_ap | `NUM_AP` | 2 | access ports per track, at the same place on every track |
| — | `WINDOW` | 100 | instructions between two recommendation checks |
| — | `TEXT_INSNS` | 262144 | instructions covered by the recommendation memory |

These are the numbers of an ARM64-sized register file (32 × 64 bit = 2048 bits
in 32 × 64 positions) with two ports. `TEXT_INSNS` is this implementation's
own choice: 1 MiB of 32-bit instructions.

Quantities derived from them, used throughout the RTL:

* `S = W/n_ap`: the **port span**, the positions each port is responsible for.
  Port *i* sits at position `S·(i+0.5)`. A track moves at most `S/2` positions
  either way, so it carries `S/2` **overflow positions** at each end
  (`nanotrack_array` has `W + S` positions per track).
* `SEG = B/n_ap`: the size of one **buffer segment**. The B-bit buffer between
  the tracks and the pipeline is split into one segment per port.
* `RPT = max(1, W/B)` registers per track, and `TPR = max(1, B/W)` tracks per
  register (horizontal).
* `G = n_ap·N/B`: registers that share one vertical **slot** (vertical).

The elaboration checks three conditions, and each stops elaboration with an
error when it fails:

* `n_ap ≥ W/B`: every register has a port, horizontally;
* `n_ap·N ≥ B`: a register fits across the ports, vertically;
* `N·W ≥ R·B`: everything fits.

All sizes must be powers of two.

## Horizontal allocation: the serial walk

Register `r` occupies track `r/RPT`, or tracks `r·TPR … r·TPR+TPR−1` when a
register is wider than a track. Every port therefore sees `S` consecutive bits
of the register somewhere in its span. An access is a walk. It is the
hardest part of the design to follow:

1. **Seek.** Shift only the register's track(s) from the common offset to
   offset `−S/2`. The first position of every port span is now under its port.
2. **Access cycles.** At each of the `S` positions, every port moves one bit
   between its track and its buffer segment. The bit goes through the port's
   **selection multiplexer/demultiplexer** (`serial_mux`), which picks the
   register's track out of the N tracks under the port. The segment **rolls**
   one bit per access cycle (`buffer_segment`). A read shifts the port bit in.
   A write shifts its own bit out and takes it back in at the other end, so
   after `S` rolls the segment holds its original contents again. When
   `TPR > 1`, each position takes `TPR` access cycles, one per track, because
   a port has a single serial connection.
3. **Step.** Shift the track(s) by one position and repeat, `S−1` times.
4. **Return.** Shift back to the common offset.

From offset 0 this uses `(S−1)·2·TPR` shift pulses. That is the same for every
register, and it equals the shift cost of the horizontal allocation
(`(W/n_ap − 1)·2·max(1, B/W)`).

When a port span holds more register bits than one segment (`W > B`), the
`RPT` segments fed by a port are chained into one serial chain. Bits enter at
the top segment, pass down the chain, and leave at the bottom segment back to
the port on a write. The segments keep their size of `B/n_ap`. This chaining is
this implementation's own construction.

## Vertical allocation: slots, groups and the bit shuffle

The `n_ap·N` bits under all ports at one offset form one **slot**. A slot holds
`G` registers. Register `r` lives in slot `r/G`, as group `g = r % G`. Bit `b`
of that register sits under port `(g·B+b)/N` on track `(g·B+b) % N`. The
tracks rest at offset `slot − S/2`.

With the defaults, `G = 1`: register `r` is slot `r`. Its bits 0–31 lie on
tracks 0–31 under port 0, and bits 32–63 under port 1. With more tracks than
bits (`N > B`), several registers share a port. With more ports, several
registers share a slot.

An access shifts **all** tracks together to the register's slot. Then, in a
single cycle, every segment is loaded from (or written to) its bits through its
**bit shuffle** (`bit_shuffle`), a `G:1` multiplexer per segment bit. No roll
is needed. The tracks stay at the slot, so the cost is `|Δslot|·N` shift
pulses, where Δslot is the change of slot from the last vertical access. This
equals the vertical shift cost `|⌊r·B/(N·n_ap)⌋ − ⌊r_old·B/(N·n_ap)⌋|·N`.

The order of bits over ports and tracks is this implementation's choice. The
architecture only requires a shuffle that can route any aligned bit to any
buffer position.

## ShiftGen: the access sequencer

`shift_gen` turns (mode, register number) into one shift pulse per track per
cycle, plus the strobes for the access cycles:

* `h_acc` with the selected track and port group, in horizontal mode;
* `v_acc` with the register group, in vertical mode.

It also keeps the **common offset** (`glob_off`) and counts the pulses it
issued (`acc_shifts`).

It runs one shift step or one access per clock. Its states are:

* horizontal: `H_SEEK → H_ACC ⇄ H_STEP → H_RET`;
* vertical: `V_SEEK → V_ACC`.

An assertion checks that no track leaves its overflow region.

## The register-file port (`r4_regfile`)

The pipeline-side interface is a valid/ready handshake:

* **Request.** A request (`req_valid`, `req_we`, `req_reg`, `req_wdata`) is
  accepted on a clock edge where `req_ready` is high. Write data enters the
  buffer in that cycle. The mode input is sampled at that moment, so a mode
  change takes effect at the next accepted access, never in the middle of one.
* **Response.** When the access is done, `resp_valid` is high for one cycle,
  with `resp_rdata` (the value read, or the value written) and `resp_shifts`
  (the shift pulses used).
* **Order.** Accesses complete in order, one at a time.

Latency is counted in clock edges from acceptance to `resp_valid`:

| mode | latency | defaults |
|---|---|---|
| horizontal | `h + S·TPR`, where `h` is the number of shift steps of the walk | 94 from offset 0 |
| vertical | `|Δslot| + 1` | 1 when the slot does not change |

## Mode switching: configuration register, recommendation memory, peripheral

* `sys_cfg_reg` holds the mode bit at bit 0 (1 = vertical). Only a software
  write changes it. Reset selects horizontal. It also counts the writes that
  changed the bit.
* `rec_rom` holds one recommendation bit per instruction: `TEXT_INSNS` bits,
  1/32 of a text segment of 32-bit instructions. The program loader fills it
  through a 32-bit port. Reads return one bit, one cycle after the request.
* `rec_peripheral` counts retired instructions. On every `WINDOW`-th one, it
  reads the bit for `pc`, the next instruction. If that bit differs from the
  mode, it raises `irq`, which stays high until `irq_ack`. A pc outside the
  covered range produces no check. `irq` rises two cycles after the retirement
  that closes the window.
* `r4_top` connects these blocks to the register file. The CPU is not part of
  the design: its register port, retirement (`retire`, `pc`), CSR write and
  interrupt lines are ports of `r4_top`. The interrupt handler is software.

## How far the RTL can be trusted

* Every block has its own self-checking testbench, with expected values
  computed independently of the RTL.
* Every testbench was shown to catch a deliberately broken copy of its block.
* `tb_r4_top` runs the whole design at the default size with no parameter
  overrides. A CPU model executes 4000 instructions whose recommendation bits
  switch every 250 instructions. An interrupt handler model saves, flips and
  restores. The bench checks:
  * every register value against a reference;
  * every shift count against the cost formulas;
  * every interrupt decision.

  It requires each mechanism to happen at least once: horizontal accesses,
  vertical accesses with and without shifts, window checks with and without an
  interrupt, and switches in both directions. It passes 25 794 checks, and 17
  of its 40 window checks raise an interrupt.
* `tb_r4_regfile_sweep` runs the same register file with 2, 4, 8, 16, 32 and
  64 ports. `tb_r4_regfile_tracks` runs it with 8 to 256 tracks of 2048/N
  positions and 8 ports. Together they cover `W > B`, `W < B` and `N > B`.
  Both check data, shift counts and latency.
* Verilator lint reports no circuit warnings: no latches, combinational loops,
  multiple drivers or implicit nets. Yosys synthesizes every module. The top
  has about 3300 flip-flops plus the 262144-bit recommendation memory.
* `tb_r4_window_sweep` runs the whole design with 8 ports and windows of 10,
  100 and 2000 instructions. It checks:
  * the interrupt decision and its timing at every window end;
  * that no interrupt occurs anywhere else;
  * the save, flip and restore around each switch;
  * the peripheral's counters.
* An assertion in `r4_regfile` checks that every track rests at the common
  offset between accesses.
* **Not verified:** any timing or energy figure in physical units. The design
  counts shift pulses only.

`nanotrack_array` is a **behavioural model** of the magnetic tracks, written
as shift registers. It is synthesizable, but it is not a description of a
racetrack device.

## Where this RTL departs from the architecture description

* **One clock.** The architecture allows one clock for the racetrack and another
  for the buffer. Here one clock drives both, and every shift step and every
  access cycle takes one clock.
* **Writes.** A write sets the bit under the port directly. The skyrmion
  *permutation write* changes energy and latency but not the stored value. It
  reuses existing skyrmions and uses local shift pulses per port. It is not
  modelled, and neither are energy or latency counters. Only shift pulses are
  counted.
* **Horizontal cost after vertical accesses.** The horizontal cost formula
  assumes the tracks start from the reference offset. Here the seek starts
  from the current common offset, which vertical accesses may have moved. The
  cost is then `(S−1)·2·TPR` plus the extra seek and return steps.
* **Registers wider than a track** take `B/W` access cycles per position, one
  per track, because each port has one serial connection.
* **Reset** clears the tracks. Real racetrack memory is non-volatile.
* **Own choices:** the vertical bit order, the segment chaining, the
  valid/ready port, the interrupt acknowledge and the mode encoding.
* **One access port** per track (the access-port study's text mentions counts
  from 1) is not buildable with the default register size. Vertical
  allocation needs `n_ap ≥ B/N = 2`, so the parameter sweep starts at 2.
* **Not built:**
  * the CPU;
  * the offline control-flow analysis that produces the recommendation bits;
  * the optional TLB-like cache for recommendation bits of large programs,
    which is only suggested and whose organisation is not given.

## Simulating with verilator

The package must come first on the command line. From the repository root:

```sh
RTL="rtl/r4_pkg.sv $(ls rtl/*.sv | grep -v r4_pkg)"
# whole design, default size, about a second
verilator --binary -Wno-fatal --top-module tb_r4_top $RTL tb/tb_r4_top.sv -Mdir obj_top
./obj_top/Vtb_r4_top
# port-count and track-count sweeps
verilator --binary -Wno-fatal --top-module tb_r4_regfile_sweep $RTL tb/rf_sweep_unit.sv \
  tb/tb_r4_regfile_sweep.sv -Mdir obj_sweep && ./obj_sweep/Vtb_r4_regfile_sweep
# window sweep (whole design, 8 ports, windows 10/100/2000)
verilator --binary -Wno-fatal --top-module tb_r4_window_sweep $RTL tb/rec_window_unit.sv \
  tb/tb_r4_window_sweep.sv -Mdir obj_win && ./obj_win/Vtb_r4_window_sweep
# one block, e.g. the shift generator
verilator --binary -Wno-fatal --top-module tb_shift_gen rtl/r4_pkg.sv rtl/shift_gen.sv \
  tb/tb_shift_gen.sv -Mdir obj_sg && ./obj_sg/Vtb_shift_gen
```

Each testbench ends with `TB_RESULT checks=<n> failures=<m>`. Each has a
watchdog that counts a failure if the run hangs. Verilator is a two-state
simulator, so everything the design reads is reset or initialised.

## Changing it

* **Geometry and window.** Change the defaults in `rtl/r4_pkg.sv`, or override
  `R`, `B`, `N`, `W`, `NAP`, `WIN` and `DEPTH` on `r4_top` (or the first five on
  `r4_regfile`). The elaboration checks above reject geometries the
  architecture does not allow. `tb/rf_sweep_unit.sv` shows how to instantiate
  and check a non-default register file.
* **Recommendation range.** `DEPTH` must be a multiple of 32 and at least 64.
  `TEXT_BASE` on `rec_peripheral` moves the covered address range.
* **Vertical bit order.** It is defined in one place, the index arithmetic of
  `bit_shuffle`. The testbenches compute the expected order themselves, so
  update `tb_bit_shuffle` together with it.
* **Handshake or timing.** These live in `shift_gen` (state machine) and
  `r4_regfile` (request, buffer load and response).
