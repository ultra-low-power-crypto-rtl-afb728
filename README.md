# Simon 32/64 encryption engine on multi-bit pulsed latches

Small sensor nodes and RFID tags produce data a few bits at a time: a
temperature, a heart-rate sample, an altitude reading, rarely more than 32
bits. A 128-bit block cipher such as AES costs such a device twice. The cipher
core is large, and the node also needs input and output FIFOs to collect
samples into 128-bit blocks. This engine avoids both costs. It uses the
lightweight block cipher Simon at its smallest size, 32-bit blocks and a 64-bit
key, so one sample is one block and no aggregation buffer is needed. It then
keeps the core small:

* **Bit-parallel, one round per clock.** All 32 state bits are computed at
  once, so an encryption takes 32 round cycles. A bit-serial core needs fewer
  logic gates, but more storage and control, and turns out larger and far less
  energy-efficient.
* **Pulsed latches instead of flip-flops.** About half of a Simon core is
  state storage: 32 data bits and 64 key bits. Every state bit is held in a
  level-sensitive latch. A short clock pulse from outside the engine opens the
  latch. A latch is smaller than a flip-flop and has less clock load.
* **Multi-bit latch cells.** Eight latches share one clock buffer in a single
  cell, which lowers the clock energy further.

This RTL describes that engine at the level of those cells and the logic
between them. It encrypts correctly: it reproduces the published Simon 32/64
test vector and matches an independent reference model on random data.

## The cipher in brief

Simon 32/64 splits the block into two 16-bit words `x` (high half) and `y`
(low half). The key is four 16-bit words `k3 k2 k1 k0`. One round is

```
x' = y ^ f(x) ^ k[i]        f(x) = (x <<< 1 & x <<< 8) ^ (x <<< 2)
y' = x
```

and there are 32 rounds. The round keys come from a recurrence over four
words:

```
tmp      = (k[i+3] >>> 3) ^ k[i+1]
tmp      = tmp ^ (tmp >>> 1)
k[i+4]   = ~k[i] ^ tmp ^ z0[i] ^ 3
```

`z0` is a fixed 62-bit constant sequence. Only its first 32 bits are used.
`rtl/simon_pkg.sv` holds the round function, the key step and `z0`, with bit
`i` as the constant of round `i`.

Known-answer vector: key `1918 1110 0908 0100` and plaintext `6565 6877`
encrypt to `c69b e9bb`.

## Organisation

```
simon32_64_engine
├── simon_ctrl       round counter, Load/Run select, z0[i], start/busy/done
│   └── simon_mbpl   (7 bits: round[4:0], busy, done)
├── simon_keyexp     Key Reg 1..4 and the key logic
│   └── 4 x simon_reg16 ── 2 x simon_mbpl (8 bits)
└── simon_datapath   Datapath Left (x), Datapath Right (y) and the round logic
    └── 2 x simon_reg16 ── 2 x simon_mbpl (8 bits)
```

Each of the six state words is a `simon_reg16`: a two-way **Load/Run**
multiplexer followed by two 8-bit latch cells. With Load selected, the
register takes an external value: the plaintext halves, or the key words. With
Run selected, it takes its next-round value. The register has no hold path and
no enable. In Run mode it changes on every pulse.

**Datapath.** Left holds `x` and Right holds `y`. The round logic computes
`y ^ f(x) ^ k` into Left, and Right takes the old Left. The ciphertext output
is `{Left, Right}`.

**Key expansion.** The four key registers form a shift chain. Before round `i`
they hold:

| register  | holds    | loaded from  |
|-----------|----------|--------------|
| Key Reg 1 | k[i+3]   | key[63:48]   |
| Key Reg 2 | k[i+2]   | key[47:32]   |
| Key Reg 3 | k[i+1]   | key[31:16]   |
| Key Reg 4 | k[i]     | key[15:0]    |

Key Reg 4 is the round key sent to the datapath. On each Run pulse, the key
logic writes `k[i+4]` into Key Reg 1 and the other words move one register
along. The key is expanded on the fly. Only four words are ever stored, and
the original key is used up by the end of the block. Every block therefore
loads the key again, together with the plaintext.

**Controller.** A 5-bit round counter, a busy flag and a done flag. They sit
in one 7-bit latch cell and are clocked like everything else. The controller
also picks the `z0` bit of the current round for the key logic.

## Pulsed-latch sequencing

This is the part of the design that needs the most care, both in silicon and
in simulation.

`simon_mbpl` is a latch cell. A buffer of two inverters (`ext_clk → clkb →
clk_int`) drives all its storage elements. Each storage element is transparent
while `clk_int` is high. A latch that stays open for half a period would pass
its new value around the loop `q → round logic → d` again and again, several
rounds in one cycle. The engine relies on the pulse being **shorter than the
fastest path from a latch output back to a latch input**. Within one pulse, the
new value reaches `q` too late to get back to `d` while the latch is still
open. Each pulse then moves the state exactly one round, as an edge-triggered
register would. This is the hold constraint of a pulsed-latch design. The
other side of the trade is time borrowing: a slow path may finish during the
pulse, which is where the robustness of a latch pipeline comes from.

In the RTL the round logic has zero delay. The whole "fastest path" is
therefore the cell's D-to-Q delay, the parameter `TDQ` (600 ps by default).
`q` follows the stored value `TDQ` after it changes. As a result:

* A pulse narrower than `TDQ` captures once. The engine was reported correct
  at 443 MHz with a high phase of 10–24% of the period, which is 226–542 ps.
  The default `TDQ` lies above that whole range. The testbenches run at 10%,
  17% and 24%.
* A pulse wider than `TDQ` races through. `tb_simon_mbpl` shows this on
  purpose with a counter loop.
* Outputs settle `TDQ` after the rising edge of the pulse. Inputs (`start`,
  `plaintext`, `key`) must be stable while the pulse is high.

Synthesis ignores the delay and infers plain latches: 103 of them, that is 32
data bits, 64 key bits and 7 control bits. Lint tools report combinational
loops through the latches. These are the intended loops described above. The
real cell has a 2X-sized clock buffer and transistor-level storage elements.
Here both are reduced to their logic function.

Simulating this needs an event-driven simulator with timing enabled (for
verilator, `--timing`). The delay is what keeps the loops well-behaved. Do not
replace the testbench clocks with a 50% clock: at 50% the latches stay open
longer than `TDQ` and the state races through.

## Interface and timing

| port         | dir | width | meaning |
|--------------|-----|-------|---------|
| `clk_pulse`  | in  | 1  | narrow clock pulse, generated outside the engine |
| `rst_n`      | in  | 1  | synchronous reset of the controller, active low |
| `start`      | in  | 1  | Load on this pulse; begin a block |
| `plaintext`  | in  | 32 | `{x, y}`, read only on the start pulse |
| `key`        | in  | 64 | `{k3, k2, k1, k0}`, read only on the start pulse |
| `ciphertext` | out | 32 | `{Left, Right}`; the result while `done` is high |
| `round`      | out | 5  | rounds completed, modulo 32 |
| `busy`       | out | 1  | rounds in progress |
| `done`       | out | 1  | high for one cycle after the 32nd round |

Pulses, counted from the start pulse:

```
pulse       0      1      2   ...   32      33
start       1      0      0         0       (1 = next block)
load/run    Load   Run    Run       Run     Load
after it:   busy   busy   busy      done    busy ...
            r=0    r=1    r=2       r=0
```

`done` is high between pulse 32 and pulse 33. The host reads `ciphertext` in
that cycle. It can raise `start` in the same cycle, so the next block loads on
pulse 33 while the previous ciphertext is still held. Blocks then follow one
every 33 pulses. If no new `start` comes, the registers keep running rounds on
stale data. To freeze the state instead, stop the clock pulses. A `start` while
the engine is busy abandons the current block and loads the new one. Reset
clears `busy` and `done`. It does not clear the data or key registers, because
nothing reads them before the next load.

## Where this RTL departs from the published engine

* **33 pulses per block, not 32.** The published figures give 443 Mbps at a
  443 MHz clock, which means 32 bits per 32 cycles. In the register-and-mux
  organisation built here, the load pulse only captures the inputs and does no
  round. That gives 32/33 of the clock rate, 429.6 Mbps at 443 MHz. Reaching
  32 would take a round computed on the way in, which the organisation shown
  for the engine does not have.
* **The controller and handshake are this design's own.** The published
  engine is described as a datapath, a key expansion and a shared Load/Run
  select. The round counter, `start`/`busy`/`done`, the synchronous reset and
  the restart rule were added to make it usable.
* **The contents of the logic clouds** are taken from the Simon definition.
  The same holds for the word order of the inputs (`x` high, `k0` low), and for
  the choice of Key Reg 4 as the round-key source. The published engine shows
  these only as unlabelled logic and wires. The known-answer vector confirms
  the combination.
* **Encryption only.** No decryption is described.
* **Electrical properties are not modelled.** That covers the clock buffer
  sizing, time borrowing, and the ultra-low-voltage operation with its minimum
  energy point near 225 mV. The D-to-Q delay is an assumed number. The only
  timing the RTL carries is the relation between pulse width and D-to-Q delay.
* **The pulse generator is not included.** The pulse is generated outside the
  engine. The testbenches produce it directly.

## Files

| file | contents |
|------|----------|
| `rtl/simon_pkg.sv` | word size, round count, `z0`, round function, key step |
| `rtl/simon_mbpl.sv` | multi-bit pulsed latch cell (`WIDTH` = 8, `TDQ` = 600 ps) |
| `rtl/simon_reg16.sv` | 16-bit Load/Run register, two cells |
| `rtl/simon_datapath.sv` | Left/Right registers and round logic |
| `rtl/simon_keyexp.sv` | four key registers and key logic |
| `rtl/simon_ctrl.sv` | round controller |
| `rtl/simon32_64_engine.sv` | top level |
| `tb/simon_ref_pkg.sv` | reference Simon 32/64: full key schedule, then the rounds |
| `tb/tb_*.sv` | one self-checking testbench per module |

All files use `` `timescale 1ps/1ps ``, and delays are in picoseconds.

## Simulation

With verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/simon_pkg.sv tb/simon_ref_pkg.sv tb/tb_simon32_64_engine.sv \
    --top-module tb_simon32_64_engine
./obj_dir/Vtb_simon32_64_engine
```

`-Wno-fatal` is needed because verilator warns about the intended latch
loops (`UNOPTFLAT`). Replace the testbench name to run another one. Every testbench prints
`TB_RESULT checks=N failures=M` and stops itself after a fixed time if the
design hangs. Each runs in well under a second.

What the testbenches establish:

* `tb_simon32_64_engine` runs at the default parameters. It checks:
  * the known-answer vector;
  * 21 random blocks at 10%, 24% and 17% duty;
  * latency: `done` comes exactly 32 pulses after `start`;
  * `done` lasts one cycle;
  * back-to-back chains with one block every 33 pulses;
  * a restart while busy, and reset in mid-block.

  It counts how often each of these happened and fails if any never did.
* `tb_simon_datapath` and `tb_simon_keyexp` compare every intermediate state
  and every round key with the reference.
* `tb_simon_ctrl` checks the round count, the `z0` bit of every round, and the
  busy/done sequence, including restart and reset.
* `tb_simon_mbpl` checks hold, transparency, the exact D-to-Q delay, one step
  per pulse at 10% and 24% duty, and race-through with a wide pulse.

## Changing it

* `TDQ` travels down from the top to every cell. If you add delays to the
  logic, or change the pulse width, keep the pulse shorter than the shortest
  loop delay.
* For a flip-flop version, replace the `always_latch` in `simon_mbpl` with an
  `always_ff @(posedge ext_clk)`. Nothing else depends on the cell being a
  latch. All testbenches then still pass, except three checks in `tb_simon_mbpl`
  that test latch transparency and race-through.
* Other Simon sizes change the word size, the round count, the number of key
  registers and the `z` sequence, all of them in `simon_pkg` and
  `simon_keyexp`. The register structure scales directly.
