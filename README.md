# Address shuffling for a Kyber decryption core

Kyber decryption computes `m = Compress(v - INTT(s^T o NTT(u)))`. Its secret
key shows up in the power or EM trace at three places: the point-wise
multiplications `s^T o u` (PWM), their modular reduction, and the subtraction
`v - (...)`. The inverse NTT is a fourth known weak spot. All four run as
sequential sweeps over polynomial memories. An attacker who knows that the
i-th cycle of a sweep touches coefficient word i can line up thousands of
traces and correlate them against key guesses.

This design hides that order. The core keeps generating its ordinary
sequential addresses. A small unit sits between the core's controller and its
RAMs/ROM. While a sensitive sweep runs, it replaces those addresses with
addresses taken from a random permutation of the 64 word positions of a
polynomial (00..3f). The core computes the same results, but word `i` is
processed at a time that changes from seed to seed.

The permutation is built on chip from a 32-bit seed, using a version of the
Fisher–Yates shuffle adapted to hardware. It needs no precomputed tables and
no stream of fresh randomness during the shuffle. Storage is one 64 x 6
register file and one 64 x 6 FIFO. A permutation takes about 520 clock cycles.
That is much shorter than a decryption (thousands of cycles), so it can be
built while the core does unprotected work such as the forward NTT of `u`.

```
            seed (TRNG), rst_l                     state, row, six original addresses
                   |                                              |
      +------------v-------------------------+        +-----------v------------------+
      | rpg: random permutation generator     |  addr  | addr_ctrl: address controller |
      |  rpg_lfsr  --6b-->  rpg_fifo  --------+------->|  BUF, 1D / 12D delays         |---> raddr'_RAM0
      |  (LFSR+BUF)        (MUX1 + FIFO)      |        |  addr0..addr5                 |---> raddr'_RAM1
      |                      ^    |idx        |<-------|  repl0..repl5 muxes           |---> raddr'_RAM2
      |  rpg_reg  ----------/     v           |  enb   |                               |---> waddr'_RAM0
      |  (REG, MUX0, DEMUX) <-- rpg_idx_adjust|        |                               |---> waddr'_RAM2
      |  rpg_ctrl (sequencing)                | finish |                               |---> raddr'_ROM_r1
      +---------------------------------------+------->+-------------------------------+
                              kyber_shuffle (top)
```

## Why the shuffle is in two stages

A plain shuffle of 00..3f does not work here. The core is pipelined: write
addresses trail read addresses by 12 cycles, and one permutation is reused for
row after row. So the first and last six entries of the permutation meet
addresses of the neighbouring sweep. Only entries drawn from a restricted set
are safe in those positions. The generator deals with this by starting the
shuffle from a fixed, hand-designed intermediate permutation instead of
00..3f, and by doing the first 12 draws in a special way.

REG starts out holding this designed permutation, entry 00 first:

| REG index | contents                | role                                    |
|-----------|-------------------------|-----------------------------------------|
| 00..28    | 0b, 0c, ..., 33         | `per_a`: the 41 "safe" values           |
| 29..2f    | 3f, 3e, ..., 39         | rest of `per_b`                          |
| 30..3a    | 0a, 09, ..., 00         | `per_b`                                  |
| 3b..3f    | 38, 37, 36, 35, 34      | `per_b`, used first to refill `per_a`    |

Let `k` be the step number (0..63) and `rest = 63 - k`. Step `k` consumes one
random 6-bit index `idx`, outputs `REG[idx']`, and then copies `REG[rest]`
into the hole at `idx'`. The adjusted index is:

* **shuffling_12** (k = 0..11): `idx' = idx` if `idx <= 0x28`, else
  `idx - 0x28`. Draws therefore come only from REG[00..28]. That region holds
  `per_a` plus whatever has been copied in from the top (34, 35, 36, 37, 38,
  00, 01, ... in that order).
* **shuffling_52** (k = 12..63): `idx' = idx` if `idx <= rest`, else
  `idx & rest`. This is a cheap range reduction. It needs no divider and no
  fresh random bits, but it is slightly non-uniform.

The 64 outputs go into the FIFO in draw order. The FIFO is then rotated by six
entries. The served order is therefore draws 6..63 followed by draws 0..5. The
12 specially drawn elements end up at the two ends of the permutation, where
the overlap happens.

## The random permutation generator (`rpg`)

The generator is built so that a single 64 x 6 FIFO holds first the random
indexes and then the result.

1. **Fill** (`rpg_lfsr`, `rpg_fifo`). The seed is loaded into a 32-bit LFSR.
   The LFSR gives one bit per cycle. Every six bits become an index, which is
   pushed into the FIFO. 64 indexes take 384 cycles. At the same time REG is
   loaded with the designed permutation.
2. **Shuffle** (`rpg_reg`, `rpg_idx_adjust`, `rpg_ctrl`). Each step pops the
   index at the FIFO head and pushes the element it selects. The same FIFO
   slot is reused, so the FIFO stays full. After 64 steps the FIFO holds the
   64 drawn elements, and no random index is left.
3. **Rotate**. Six loop shifts.
4. **Serve**. `finish` goes high and the FIFO head is the first address. Each
   `enb` from the address controller rotates the FIFO by one. After 64 uses
   the permutation is back at its start.

REG has a single 64-to-1 read multiplexer (MUX0). Its write demultiplexer is
fed from MUX0's output. A Fisher–Yates step reads two entries, so each step
takes two cycles:

| cycle | MUX2 select (`sel_1`) | MUX0 reads   | action                                      |
|-------|-----------------------|--------------|---------------------------------------------|
| SEL   | idx_0 or idx_1        | `REG[idx']`  | push to FIFO (pops idx); remember `idx'`     |
| WR    | rest                  | `REG[rest]`  | write into `REG[remembered idx']`; rest - 1  |

Timing from the cycle in which `rst_l` is high: 2 cycles of start-up, then
64 x 6 fill + 64 x 2 shuffle + 6 rotate = 518 cycles. `finish` is high in the
520th cycle after the seed-load cycle, or the 522nd when a finished
permutation is being replaced (the LFSR restarts only once `finish` has
dropped). The testbenches check both. The LFSR freezes while
`finish` is high. A new seed may be loaded at any time. `finish` drops within
three cycles and a new permutation follows.

LFSR details (chosen here): Fibonacci form, taps x^32 + x^22 + x^2 + x + 1,
output bit 0, first bit of each index is its MSB. An all-zero seed is
replaced by 1.

## The address controller (`addr_ctrl`)

The core tells the controller which sweep is running through `state`
(`OP_OFF`, `OP_PWM`, `OP_INTT`, `OP_SUB`) and, for PWM, which polynomial row
(0..3). With `OP_OFF` all six addresses pass through unchanged. Otherwise:

| `mem_addr` field | shuffled value                                               | replace when        |
|----------------|--------------------------------------------------------------|---------------------|
| `raddr_ram0` | `{row, addr}` if state one cycle ago was PWM, else `addr`     | state != OFF        |
| `raddr_ram1` | `addr`                                                        | state != OFF        |
| `raddr_ram2` | `{addr, count[0]}`                                            | state != OFF        |
| `waddr_ram0` | `addr` of 12 cycles ago                                       | state 12 cycles ago |
| `waddr_ram2` | `{addr, count[0]}` of 12 cycles ago                           | state 12 cycles ago |
| `raddr_rom`  | `{addr, count[0]}` of 1 cycle ago if state 2 cycles ago was PWM, else `addr` of 1 cycle ago | state 1 cycle ago |

`addr` is the current permutation element, held in a register (BUF). `count`
counts cycles since the sweep started. `addr`, `count[0]` and `state` each
run through a 12-stage shift register, tapped after 1 stage (and, for
`state`, after 2) and at the end. The write addresses use the 12-cycle taps. Addresses are 8 bits wide. Four
64-word permutations are made from one (`{row, addr}` covers 00..ff), and the
even/odd suffix turns the 6-bit permutation into a 7-bit one (00..7f).

**Rate.** In PWM and subtraction each element is used for two cycles (even
and odd halves of a 7-bit address), so the FIFO is advanced on odd counts. In
INTT it is advanced every cycle. Right after `finish` the controller advances
the FIFO once, so BUF holds the first element before any sweep starts. A
sweep then shows element 0 in its first cycle, element 1 in its second (INTT)
or third (PWM/SUB) cycle, and so on. Because a full sweep uses exactly 64
elements, BUF is back at element 0 at the end. Every row and every sweep of a
decryption uses the same permutation until a new seed is loaded.

**Core's obligations.** Start a shuffled sweep only when `rpg_finish` is high
(an assertion checks this). Keep `state` steady for whole elements (two cycles
in PWM/SUB). Allow 12 cycles after a sweep for the write addresses to drain.

## Top-level interface (`kyber_shuffle`)

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst` | in | 1 | clock, synchronous active-high reset |
| `seed` | in | 32 | seed from the TRNG, sampled while `rst_l` = 1 |
| `rst_l` | in | 1 | load `seed` and start a new permutation |
| `rpg_finish` | out | 1 | permutation ready |
| `state` | in | 2 | `shuf_op_e`: sweep being shuffled |
| `row` | in | 2 | PWM row |
| `core_addr` | in | 6 x 8 | `mem_addrs_t`: the core's own addresses, fields `raddr_ram0`, `raddr_ram1`, `raddr_ram2`, `waddr_ram0`, `waddr_ram2`, `raddr_rom` |
| `mem_addr` | out | 6 x 8 | the same six fields, as sent to the RAMs and ROM |

All outputs are combinational from registers and the address inputs. There is
no added latency on the pass-through path.

## What follows the source design and what is chosen here

Taken from the source design:
* the 64-entry permutation and the 6-bit width;
* the designed permutation, `per_a` / `per_b`, 0x28, 12 / 52 and the shift by 6;
* the two index equations;
* the LFSR depth of 32 and the 6-bit buffer;
* the FIFO reuse with input and cyclic modes;
* the names `ena`, `enb`, `sel_0`, `sel_1`, `rest`, `finish`;
* the address formulas `addr0`..`addr5` with their 1- and 12-cycle delays and
  the state taps that steer the replacement multiplexers;
* enb every other cycle in PWM and subtraction.

Chosen here, because the source does not give it:
* the LFSR polynomial;
* the two-cycle step and the register that holds the write index;
* the circular-buffer FIFO;
* the controller's states;
* the `state` encoding, and which multiplexer input each state selects;
* the advance rate in INTT (every cycle);
* the preload advance;
* the 8-bit address width;
* all reset behaviour.

Points to be aware of:
* The source's step-by-step schedule writes both index conditions the other
  way round from its equations (for example "`idx > 0x28 ? idx : idx - 0x28`").
  The RTL follows the equations. The schedule's version would send `idx'`
  outside the region still to be drawn from, and the source's own worked
  example (rest 0x02, idx 0x05 gives 0x00) matches the equations.
* The source prints value conditions on the first and last six entries of the
  final permutation (">0a ... >00" and "<3e ... <34"). It does not say which
  output position each condition belongs to. The RTL reproduces the source's
  generation procedure exactly, step for step. But under both natural readings
  of those conditions, a software model of that same procedure violates them
  for some seeds (about 21 % and 44 % of random seeds). So whether the
  permutation always avoids the pipeline hazard it was designed for cannot be
  confirmed from the available description. Check this against the actual
  core's pipeline before relying on it.
* `mem_addr.raddr_ram0` uses the one-cycle-old state to decide whether to prepend
  `row`, as in the source's diagram. In the first cycle of a PWM sweep that
  follows an idle cycle, the row bits are therefore 0. This is harmless when
  the sweep starts with row 0.
* The `idx & rest` reduction and the 6-bits-per-index LFSR stream are not
  uniform. The permutation space is large, but not every permutation is
  equally likely.

The Kyber core itself (NTT/PWM/INTT datapath, its controller, RAMs and ROM)
and the TRNG are not part of this RTL. Their signals are the top's ports.

## Files

`rtl/`
* `shuffle_pkg.sv`: shared constants, enums (`fifo_src_e`, `idx_sel_e`,
  `shuf_op_e`), the address bundle `mem_addrs_t` and `designed_perm()`.
* `rpg_reg.sv`, `rpg_fifo.sv`, `rpg_idx_adjust.sv`, `rpg_lfsr.sv`,
  `rpg_ctrl.sv`: the five parts of the generator.
* `rpg.sv`: the generator.
* `addr_ctrl.sv`: the address controller.
* `kyber_shuffle.sv`: the top.

`tb/`
* `rpg_ref_pkg.sv`: a procedural reference model (LFSR recurrence, the
  designed permutation written as its four runs, the 64 steps, the rotation).
* One self-checking testbench per module: `tb_<module>.sv`.
* `tb_kyber_shuffle.sv` runs three complete decryption-style sequences
  (k = 2, 3, 4 rows; seven INTT passes; one subtraction). It compares every
  address with the reference permutation, and it counts each mechanism
  (index fill, the 0x28 subtraction, the AND reduction, REG refills, the
  rotation, the preload, pass-through, delayed writes, reseeding). It uses
  the top's default sizes.

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself with a
watchdog. To run one with Verilator:

```
verilator --binary --timing --assert -Wall -Wno-fatal \
  rtl/shuffle_pkg.sv tb/rpg_ref_pkg.sv rtl/rpg_reg.sv rtl/rpg_fifo.sv \
  rtl/rpg_idx_adjust.sv rtl/rpg_lfsr.sv rtl/rpg_ctrl.sv rtl/rpg.sv \
  rtl/addr_ctrl.sv rtl/kyber_shuffle.sv tb/tb_kyber_shuffle.sv \
  --top-module tb_kyber_shuffle -o sim
./obj_dir/sim
```

Replace the testbench file and `--top-module` to run another. Every run
finishes in well under a second.

## Size

After generic synthesis the whole unit has about 230 word-level cells, 88
flip-flop bits and 912 memory bits. The memory bits are REG (384), the FIFO
(384) and the 12-deep delay lines (144). This is consistent with the small
FPGA overhead reported for the approach. The Kyber core is not included.
