# DiCA: hardware dirty-block tracking and a self-adjusting checkpoint alarm

A device that runs on harvested energy loses power many times during one
computation. To make progress it copies its volatile memory (VM, the SRAM) to
non-volatile memory (NVM, e.g. FRAM) before each power loss, and copies it back
when power returns. Copying all of the VM every time wastes most of a small
energy budget. Most of it has not changed since the last checkpoint, and part
of it is dead stack.

DiCA ("differential checkpoint assistant") is a small block of logic next to
an MSP430-class CPU that makes the checkpoint both *differential* and *late*:

* It watches every CPU write and keeps a **DTable**, one dirty bit per
  fixed-size block of VM. The checkpoint routine copies only the dirty blocks.
* It watches the stack pointer and **clears the dirty bits of stack frames that
  have been popped**, because their contents will never be read again.
* It keeps a running count `n_d` of dirty blocks. It turns that count into a
  supply-voltage threshold `V_ths = V_MIN + n_d * lambda`, where `lambda` is the
  voltage drop it costs to copy one block. When the measured supply falls below
  `V_ths` it raises a **non-maskable interrupt**. The interrupt therefore comes
  as late as possible: just early enough to copy the blocks that are actually
  dirty before the supply reaches the minimum operating voltage `V_MIN`.

Software does the rest. It measures `lambda` once, copies the dirty blocks in
the interrupt routine, restores after power-up, and clears the tracker.

This repository holds the hardware as synthesizable SystemVerilog, with
self-checking testbenches. The default configuration is an 8 KiB VM at
`0x2000`, 128-byte blocks (a 64-bit DTable) and a 16-bit CPU address space.

```
              cpu_wen, cpu_daddr ──►┌──────────────┐ dtable ─────────────► (bus read-back)
              cpu_sp ──────────────►│   dica_mmt   │ set_new ─┐
                    sp_lim ┌───────►│ (+sf_mask)   │ id_sp ───┤
                           │        └──────────────┘ id_splim ┤
                           │                                  ▼
                           │        ┌──────────────────────────────────────┐
                           │        │ dica_vtt                             │
   per_* bus ─►┌──────────┐│ lambda │  dica_nd_counter ─n_d─► dica_vths    │
               │dica_regs ├┴───────►│                     V_ths ─► (<) ─►──┼──► nmi
   per_dout ◄──┤          │◄── n_d, V_ths, status          v_supply ─┘    │
               └──────────┘ clr ───►└──────────────────────────────────────┘
```

## 1. One power cycle, end to end

1. **Boot.** Reset empties the DTable and sets `n_d = 0` and `V_ths = V_MIN`.
   Software looks for a valid checkpoint in NVM. If there is none, or its
   "in progress" flag is still set, the program starts from scratch. Otherwise
   software copies the NVM image back into VM and restores the CPU registers.
2. **Arm.** Software writes `LAMBDA` (from calibration) and `SPLIM` (the
   lowest address the stack may reach). It then writes `CTRL.bit0`, which
   clears the DTable, `n_d`, `n_d'` and `V_ths`. Writing the image back
   dirtied every block; this clear forgets that, so VM and NVM now agree.
3. **Run.** Every write marks its block dirty. Each block that turns dirty
   raises `n_d` by one, and `V_ths` climbs by `lambda` per new dirty block.
   Returning from functions releases stack blocks: their bits are cleared,
   `n_d` drops, and `V_ths` walks back down.
4. **Alarm.** When `v_supply < V_ths`, `nmi` rises one clock later.
5. **Checkpoint.** The interrupt routine sets the NVM "in progress" flag. It
   reads the DTable words over the bus and, for every set bit `i`, copies bytes
   `[i*B, (i+1)*B)` of VM to the same offset in the NVM image. It saves the
   registers, clears the flag and waits for power to die. If power dies first,
   the flag stays set, and on the next boot the program restarts with a larger
   `lambda`.

The NVM image is always a complete copy of the VM as it was at the last
checkpoint. The only exception is dead stack below the stack pointer, which
nobody will read.

## 2. The DTable and the stack-frame cleaner (`dica_mmt`, `dica_sf_mask`)

The block index of a byte address is `(addr - VM_MIN) >> log2(BLOCK_SIZE)`.
Each clock the DTable is updated as

```
dtable <= clr ? 0 : (dtable | set_vec) & keep_mask
```

where `set_vec` has at most one bit set: the block written in this cycle,
if `cpu_wen` is high and `cpu_daddr` is inside VM. Writes outside VM
(peripherals, FRAM) are ignored. A word write never crosses a block edge,
because blocks are a power of two of at least 2 bytes, so one bit per write is
enough.

**The keep mask.** The MSP430 stack grows downwards from the top of VM.
`SP_Lim` is the lowest address the stack may ever use. Every address between
`SP_Lim` and the current `SP` is therefore free stack. Whatever was written
there belongs to frames that have been popped, and does not need saving. With
`ID_SP` and `ID_SPLim` the block indices of the two addresses:

```
keep_mask[i] = (i <= ID_SPLim) || (i >= ID_SP)
```

The two end blocks are kept. The `SP` block holds live data above `SP`, and
the `SP_Lim` block may hold ordinary data below the stack area. Only the
blocks strictly between them are cleared. The mask is applied every cycle,
so a bit is cleared in the cycle after `SP` moves up past its block. A write
that lands in a cleared region (which a correct program never does) is
overridden by the clear.

Addresses outside VM are clamped: below VM to index 0, at or above the VM end
to `DT_SIZE`. After reset `SPLIM` holds the VM end, so `ID_SPLim = DT_SIZE`
and nothing is ever cleared until software sets a real limit.

**Why `<=`/`>=` and not the other way round.** The original description of
this mechanism has two forms that disagree. In prose and in its worked
example, the indices between `ID_SP` and `ID_SPLim` are zeroed and the rest
are kept. Its written formula is `(i <= ID_SP) || (i >= ID_SPLim)`, with a
bit cleared where the formula is true. For a downward stack `ID_SPLim <=
ID_SP`, so every index satisfies it and the whole table would be emptied on
every cycle. This RTL follows the prose and the example. A testbench check
fails if the boundary blocks are cleared.

`set_new` goes to the counter. It is high when a write hits a block that is
inside VM, currently clean and not being cleared in this cycle: exactly the
writes that turn a 0 into a 1 that stays.

## 3. Counting dirty blocks without counting them (`dica_nd_counter`)

A 64-input population count every cycle would be large. Instead `n_d` is
updated from events:

```
id_d  = ID_SP(t) - max(ID_SP(t-1), ID_SPLim + 1)     if positive, else 0
n_d  <= clr ? 0 : clamp(n_d + set_new - id_d, 0, DT_SIZE)
```

`ID_SP(t-1)` is a register that resets to `DT_SIZE` (empty stack). When the
stack pointer moves up by several blocks in one step, for example on a return
from a large frame, `id_d` is the number of blocks it left behind. Those are
the blocks the cleaner just zeroed.

This differs from a literal reading of the original rules in three ways:

* **Same-cycle events add up.** The original lists "increment" and "subtract
  `ID_d`" as alternatives (if / else-if). Nothing stops a write to a new
  block from falling in the same clock as a rise of `SP`: they are separate
  inputs, sampled together. A strict priority would lose one event and let
  `n_d` drift for good. Here both apply.
* **Blocks at or below `ID_SPLim` are not counted** as released, because the
  mask never clears them.
* **Saturation** at 0 and `DT_SIZE`, so errors cannot wrap.

**A known weakness (kept on purpose).** The decrement assumes that every
released stack block was dirty. That holds for frames pushed since the last
clear. It does not hold for frames that already existed when the tracker was
cleared after a restore. Those blocks are clean, yet returning from them still
subtracts. After such a return `n_d` is *lower* than the number of set DTable
bits. `V_ths` is then too low, and the interrupt can come too late to copy
everything. The end-to-end testbench shows this: it finds interrupts where
`n_d` was below the true dirty count, and it sees one checkpoint that ran out
of energy and was recovered by a restart with a larger `lambda`. An exact
count would decrement by the number of set bits among the released blocks,
not by `id_d`. That is not in the original design and is not built here.
Software can guard against it with a larger `lambda`, or by reading `ND` and
counting DTable bits in the interrupt routine.

## 4. The threshold and the alarm (`dica_vths`, `dica_vtt`)

`V_ths = V_MIN + n_d * lambda` is kept without a multiplier. A shadow counter
`n_d'` moves one step per clock towards `n_d`, and each step adds or subtracts
`lambda`:

| condition   | `n_d'`   | `V_ths`           |
|-------------|----------|-------------------|
| `n_d > n_d'` | `+1`    | `+lambda`         |
| `n_d < n_d'` | `-1`    | `-lambda`         |
| equal       | hold     | hold              |

`n_d` can jump down by many blocks at once (a big frame released), so `V_ths`
lags it by `|n_d - n_d'|` clocks. The lag only matters on the way up, where
`n_d` changes by at most one per clock, so there the lag is one clock. The
`STATUS.settled` bit shows `n_d' == n_d`. `V_ths` is `V_W + log2(DT_SIZE+1)`
bits wide, so `V_MIN + DT_SIZE * lambda` never wraps. If `lambda` is rewritten
while `n_d' > 0`, the sum no longer equals `V_MIN + n_d * lambda`. Software
therefore writes `LAMBDA` before the clear.

The comparator is registered: `nmi <= (v_supply < V_ths)`. It is a level that
stays high while the condition holds.

**Latency and the one-block margin.** A write at clock `t` is in `n_d` at
`t+1` and in `V_ths` at `t+2`. The comparison is at `t+2`, so `nmi` is seen at
`t+3`. Meanwhile the supply keeps falling and more blocks may turn dirty.
In the worst case the interrupt arrives when the supply is already one
block's worth below the ideal point. Brown-out therefore has to lie at least
about one `lambda` below `V_MIN`: pick `V_MIN` (a parameter) with that margin.
The testbenches use brown-out = `V_MIN - lambda - 16 codes`.

`v_supply` is a digital reading in the same units as `V_MIN` and `lambda`.
The default scale is 1 code = 100 µV, so 2.0 V = 20000 and 3.6 V = 36000.
The ADC or comparator that produces it is outside this design.

## 5. Software interface (`dica_regs`)

The registers sit on an openMSP430-style peripheral bus: word address
`per_addr`, `per_en`, byte enables `per_we` (0 = read), `per_din`, and a
combinational `per_dout` that is 0 when the block is not addressed. Base
address `0x0190` by default. Byte offsets:

| offset | name    | access | content |
|--------|---------|--------|---------|
| 0x00   | CTRL    | W      | bit0 = 1: clear DTable, `n_d`, `n_d'`, `V_ths` |
| 0x02   | LAMBDA  | RW     | `lambda` in supply codes; reset `(V_FULL-V_MIN)/DT_SIZE` |
| 0x04   | SPLIM   | RW     | `SP_Lim` byte address; reset = VM end (cleaner idle) |
| 0x06   | ND      | R      | `n_d` |
| 0x08   | VTHS    | R      | `V_ths[15:0]` |
| 0x0A   | STATUS  | R      | bit0 `nmi`, bit1 settled |
| 0x0C   | VTHSH   | R      | `V_ths` bits above 15 |
| 0x10+2k| DTAB k  | R      | DTable bits `16k+15 .. 16k` |

A write takes effect at the clock edge that ends the bus cycle. The clear
is a one-cycle pulse.

**Calibration.** With a linear supply decay from 3.6 V to 2.0 V, `lambda` is
1.6 V divided by the number of blocks one full charge can copy. Software
finds that number once, at deployment, by copying blocks in a loop until the
supply reaches `V_MIN`. It may nudge `lambda` later: smaller if energy is left
over after checkpoints, larger after an incomplete one.

**Interrupt routine** (C-like):

```c
nv_flag = 1;
for (k = 0; k < DT_SIZE/16; k++) {
  uint16_t w = DICA_DTAB[k];
  for (j = 0; j < 16; j++)
    if (w & (1u << j)) memcpy(&nvm[(16*k+j)*B], &vm[(16*k+j)*B], B);
}
save_registers(); nv_flag = 0; sleep_until_power_loss();
```

## 6. Parameters

| parameter  | default | meaning |
|------------|---------|---------|
| `ADDR_W`   | 16      | CPU byte-address width |
| `VM_MIN`   | 0x2000  | VM base (SRAM base of an MSP430FR2476-class part) |
| `VM_SIZE`  | 8192    | VM bytes |
| `BLOCK_SIZE` | 128   | bytes per DTable bit, a power of two ≥ 2 |
| `V_W`      | 16      | width of `v_supply`, `lambda` |
| `V_MIN`    | 20000   | 2.0 V, threshold with no dirty blocks |
| `V_FULL`   | 36000   | 3.6 V, used only for the `LAMBDA` reset value |
| `BASE_ADDR`| 0x0190  | peripheral byte address |

`DT_SIZE = VM_SIZE / BLOCK_SIZE`. Smaller blocks track more precisely but
need more bits, and the software copy has a fixed overhead per block; 128 B
was found to be the best trade-off on the reference MCU. The sizes 16 to
512 B are all legal parameter values.

**Size.** At the default configuration, generic synthesis gives 141
flip-flops: 64 DTable bits, `n_d`, `ID_SP(t-1)` and `n_d'` at 7 each, `V_ths`
at 23, 1 for `nmi`, and `LAMBDA` and `SPLIM` at 16 each. An FPGA build of the
original on openMSP430 reported 106 FFs and 114 LUTs for the same block size.
The difference is mostly the two 16-bit software registers and the wider
`V_ths` here. The largest combinational part is the 64-bit keep mask (two
range comparisons per bit).

The flip-flop count scales with the DTable: 601 at 16-byte blocks (512 bits)
and 85 at 512-byte blocks (16 bits). The published FPGA figures at those two
ends are 561 and 58 FFs. The fixed part (the two registers, `V_ths` and the
counters) explains the gap at both ends.

## 7. Files

| file | content |
|------|---------|
| `rtl/dica_pkg.sv` | default sizes, `idx_width`, register offsets |
| `rtl/dica_sf_mask.sv` | `ID_SP`, `ID_SPLim`, keep mask (combinational) |
| `rtl/dica_mmt.sv` | DTable, `set_new` |
| `rtl/dica_nd_counter.sv` | `n_d`, `ID_SP(t-1)`, `id_d` |
| `rtl/dica_vths.sv` | `n_d'`, `V_ths` stepping |
| `rtl/dica_vtt.sv` | counter + threshold + registered comparator |
| `rtl/dica_regs.sv` | bus registers and DTable read-back |
| `rtl/dica_top.sv` | top level |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_dica_top.sv` | end-to-end run at default size |
| `tb/tb_dica_block_sizes.sv` | top at 16, 128 and 512-byte blocks |
| `tb/tb_dica_workloads.sv` | five benchmark programs, four capacitors |

The CPU, SRAM, FRAM, supply sensor and checkpoint software are outside this
RTL. `dica_top` brings their signals out as ports. For openMSP430,
`cpu_wen = ~dmem_cen & ~&dmem_wen`, `cpu_daddr` is the data byte address,
`cpu_sp` is R1, and `nmi` goes to the NMI input.

## 8. Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops. With
Verilator 5:

```sh
verilator --binary --timing --assert rtl/dica_pkg.sv \
  rtl/dica_sf_mask.sv rtl/dica_mmt.sv rtl/dica_nd_counter.sv rtl/dica_vths.sv \
  rtl/dica_vtt.sv rtl/dica_regs.sv rtl/dica_top.sv \
  tb/tb_dica_top.sv --top-module tb_dica_top
./obj_dir/Vtb_dica_top
```

Swap the last file and top name for any other testbench. Each one runs in a
few seconds.

**What the testbenches check.**

* Module testbenches compare against models written in the testbench,
  under random and directed stimulus. This includes the 4-block example
  (`0 0 0 1` becoming `0 1 0 1`) and the stack-clear example from the
  original description. They also check the one-cycle latencies and the
  `|n_d - n_d'|`-cycle settling of `V_ths`.
* `tb_dica_top` runs a program with nested calls and returns on a modelled
  CPU, VM, NVM and a linearly decaying supply. A bus-driven interrupt routine
  copies the DTable's blocks. After every completed checkpoint, it checks
  that NVM equals all live VM. At the end, it checks that the program's
  result equals an uninterrupted run. It counts each mechanism: new dirty
  blocks, repeated writes, writes outside VM, stack clears, multi-block
  decrements, threshold steps in both directions, interrupts, software
  clears, fresh starts, incomplete checkpoints, and interrupts with `n_d`
  below the true count. It fails if any of the hardware mechanisms (all but
  the last three) never occurs.
* `tb_dica_block_sizes` runs three copies of the top, at 16, 128 and
  512-byte blocks, on the same random CPU activity. Every pushed frame is
  written in full, so every released block was dirty. Under that condition
  `n_d` must equal the number of set DTable bits at every clock, and the
  testbench checks this. It also checks the DTable against a plain model
  and checks that `V_ths` steps on the `lambda` grid.
* `tb_dica_workloads` runs AES-128 (FIPS-197 example vector), 16×16 matrix
  multiply, SHA-256 (the two-block NIST "abcdbcdecdef…" vector, six times),
  bit counting over 1024 words, and a recursive DFS on a 256-node graph. Each
  store is one CPU write seen by DiCA. Supply decay is scaled to 10, 20, 30
  and 40 µF (4000 clocks per full charge at 10 µF). `lambda` comes from a
  calibration pass (blocks one full charge can copy). Results, as power cycles
  needed (incomplete checkpoints, mean blocks copied out of 64):

```
AES128         10 uF:   2 (0, 4)  20 uF:   1 (0, 0)  30 uF:   1 (0, 0)  40 uF:   1 (0, 0)
MatMul         10 uF:   8 (0, 2)  20 uF:   4 (0, 4)  30 uF:   3 (0, 6)  40 uF:   2 (0, 10)
SHA256         10 uF:   7 (0, 3)  20 uF:   4 (0, 4)  30 uF:   3 (0, 4)  40 uF:   2 (0, 4)
BitCount       10 uF:   4 (0, 6)  20 uF:   2 (0, 17)  30 uF:   2 (0, 17)  40 uF:   1 (0, 0)
RecursiveDFS   10 uF:   2 (0, 14)  20 uF:   1 (0, 0)  30 uF:   1 (0, 0)  40 uF:   1 (0, 0)
```

These counts are not comparable in absolute terms with measurements on real
hardware. The program sizes, clock rate and harvester are chosen for
simulation. The point is that every checkpoint copied a small fraction of
the 64 blocks, and every result is bit-exact after all the power losses.

## 9. Departures and open points

* **Mask comparison direction.** Follows the prose and the worked example
  (§2), not the written formula.
* **`n_d` update.** Same-cycle increment and release add up, releases are
  clipped at `SP_Lim`, and the value saturates (§3). The
  released-means-dirty assumption is kept, and so is its undercount after a
  restore.
* **Reset and clear.** An asynchronous active-low `rst_n` (boot) plus a
  software clear through `CTRL`. The bus, register map and reset values are
  this design's own choices.
* **Registered `nmi`** (one extra clock) and the one-block margin it and the
  `V_ths` lag need (§4).
* **Voltage units.** `v_supply`, `V_MIN` and `lambda` are integer codes; the
  scale is a choice of this design.
* **Not built:** the CPU, memories, ADC, and the calibration and checkpoint
  software. Those are software or existing parts; the testbenches model them
  behaviourally.
