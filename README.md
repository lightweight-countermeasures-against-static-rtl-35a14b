# AES-128 with a randomly switched dual-flip-flop state register

A flip-flop that is not switching still draws leakage current, and that
current depends on the bit it stores. With the clock halted, an attacker can
therefore measure the static (leakage) power of a crypto core and correlate it
with guesses about the data in its registers. The effect is strongest for
low-threshold-voltage (LVT) cells: in a 28 nm library an LVT flip-flop leaks
roughly a hundred times more than a high-Vt one, and its leakage varies by
tens of percent with the values on CLK, D and Q.

This design hardens the most exposed registers of an AES core, the state
register that carries the intermediate cipher value from round to round,
with a cheap structural trick instead of masking:

* Selected state bits are replaced by a **primitive** that stores the bit in
  one of two LVT flip-flops. A random control bit (CTL), renewed every clock
  cycle, decides which of the two captures the new value; the other keeps
  whatever it held before. The output always shows the freshly captured
  copy, so the cipher computes exactly as before, but the flip-flop pair
  leaks according to a random mixture of current and stale data.
* The primitives are **not spread evenly**. Half of the sixteen state bytes get
  a primitive on all eight bits, the other half get none and stay ordinary
  regular/high-Vt flip-flops. Because a correlation attack recovers the key
  one byte at a time and treats the leakage of the other fifteen bytes as
  noise, making the bytes leak very differently from one another raises that
  noise. The LVT flip-flops can in addition be given different drive
  strengths (X2, X4, X8), chosen at random per flip-flop, for more variation.

In the reported evaluation (simulated static power of a 28 nm
implementation, correlation attack with a Hamming-distance model), the
unprotected core was broken with about 8 800 traces; the configuration built
here by default needed about 845 000, for about 6 % more area.

The RTL gives the logical structure of all of this. The choices that make it
work physically (LVT versus RVT/HVT cells, drive strengths, keeping synthesis
from merging the duplicated flip-flops) are cell-level decisions that have to
be applied in synthesis and place-and-route; see *What RTL cannot carry*.

## The primitive (`spsc_primitive`)

```
            +-----+      +-------+
   d ------>|0    |      |       |
            | mux |----->| ff_a  |----+----------------+
      +---->|1    |      | LVT Xa|    |                |   +-----+
      |     +-----+      +-------+    |                +-->|0    |
      +-------------------------------+                    | out |---> q
            +-----+      +-------+                     +-->|1    |
      +---->|0    |      |       |                     |   +-----+
      |     | mux |----->| ff_b  |----+----------------+      ^
   d ------>|1    |      | LVT Xb|    |                       |
      |     +-----+      +-------+    |                    ctl_sel
      +-------------------------------+
     select of both input muxes: ctl_load
```

| CTL at the edge | ff_a (upper)   | ff_b (lower)   | q after the edge |
|-----------------|----------------|----------------|------------------|
| 0               | captures d     | holds old value| ff_a             |
| 1               | holds old value| captures d     | ff_b             |

Seen from outside, `q` is `d` delayed by one clock, like the flip-flop the
primitive replaces. Inside, the idle flip-flop holds the value from the last
time its path was active, which may be one cycle old or many.

**Why CTL arrives twice.** One random bit per cycle decides the path, but it
is needed at two moments. The input multiplexers need the bit that will be
in force at the *next* edge; the output multiplexer needs the bit that was in
force at the *last* edge, because that tells which flip-flop holds the fresh
value. If both used the same wire and the bit changed at the edge, `q` would
show the flip-flop that did not capture and the cipher would break. The
primitive therefore has two CTL inputs: `ctl_load` for the input
multiplexers and `ctl_sel`, the same bit registered once, for the output
multiplexer. The register sits once in the CTL generator, not in every
primitive. The published schematic draws a single CTL net; the split is this
design's way of keeping the primitive transparent when CTL changes every
cycle.

**One-path form.** The scheme also has a reduced primitive that keeps only
the lower path: a single LVT flip-flop in place of the original one. Without
an output multiplexer that flip-flop has to capture every cycle, so its input
multiplexer is fixed to "capture". It changes the Vt flavour and drive
strength of the bit, not its logic, and it ignores CTL. Parameter
`PATHS` (1 or 2, default 2) selects the form.

Both flip-flops reset asynchronously (active low) to 0.

## Which bits are protected (`spsc_state_reg`)

The 128-bit state register is written as 128 generated bits. Bit `j` is

* a two-path primitive if `PRIM_MASK[j]` and `PATH2_MASK[j]` are set,
* a one-path primitive if only `PRIM_MASK[j]` is set,
* an ordinary flip-flop otherwise.

Bytes are numbered in FIPS-197 order: byte 0 is bits [127:120], byte `k` is
bits [127-8k -: 8]. All primitives of byte `k` share CTL bit `k`, so the
sixteen bytes switch independently of one another.

The default for both masks is `128'h00FFFF00_FF0000FF_FF0000FF_00FFFF00`:
bytes 1, 2, 4, 7, 8, 11, 13 and 14 carry eight two-path primitives each, the
other eight bytes none. That is the most resilient configuration of the
evaluation: eight primitives per byte in one half, zero in the other. In the
original work the eight protected bytes were picked at random; this choice of
bytes is fixed here and any other is a parameter change. The default state
register has 64 plain flip-flops and 64 primitives, 192 flip-flops in all.

Other evaluated designs are also just masks. For example, four one-path
primitives per byte in one half and four two-path primitives per byte in the
other:

```systemverilog
spsc_aes_top #(
  .PRIM_MASK (128'h0F0F0F0F_0F0F0F0F_0F0F0F0F_0F0F0F0F),
  .PATH2_MASK(128'h00000000_00000000_0F0F0F0F_0F0F0F0F)
) u_aes ( ... );
```

`PRIM_MASK = 0` gives the unprotected baseline core.

## The CTL generator (`ctl_rng`)

The scheme needs a random bit per cycle for CTL and specifies no generator.
This one is the simplest that does it: a 32-bit Galois LFSR for the
polynomial x^32+x^22+x^2+x+1 (maximal length), stepped on every clock edge.
Since an attacker has to clock the chip to move the cipher forward between
measurements, every such clock also redraws CTL. Byte `k` uses LFSR bit
`2k` (`ctl_load`), and `ctl_sel` is `ctl_load` registered once.

Reset sets the LFSR to the constant `RESET_STATE` (1). Drive `reseed` high for
one cycle with a `seed` from a secret or true-random source after reset;
without that, every power-up produces the same CTL sequence. A zero seed is
replaced by 1. An LFSR is predictable to anyone who learns its state; if that
matters, put a true random number generator behind the same two outputs.

## The AES core (`spsc_aes_top`)

A conventional iterative AES-128 encryptor, one round per clock, with
table-based S-boxes:

* `aes_ctrl` – two-state controller (idle, run), round counter and round
  constant.
* `aes_key_expand` – computes the next round key from the round-key register
  (on the fly, four S-boxes).
* `aes_round` – SubBytes (sixteen S-boxes), ShiftRows, MixColumns (skipped in
  round 10), AddRoundKey.
* `aes_sbox` – 256x8 look-up table. The table is not typed in: `aes_pkg`
  computes it during elaboration as the GF(2^8) inverse (a^254, 0 to 0)
  modulo x^8+x^4+x^3+x+1 followed by the affine map
  b ^ rotl(b,1) ^ rotl(b,2) ^ rotl(b,3) ^ rotl(b,4) ^ 0x63.
* `spsc_state_reg` – the protected state register described above.
* `ctl_rng` – the CTL generator.

The round-key register is an ordinary register. Only the state register is
protected, since it is the register the attack targets. The core only
encrypts.

### Interface

| Port        | Dir | Width | Meaning |
|-------------|-----|-------|---------|
| `clk`       | in  | 1     | clock |
| `rst_n`     | in  | 1     | asynchronous reset, active low |
| `seed`      | in  | 32    | CTL generator seed, loaded when `reseed` is high |
| `reseed`    | in  | 1     | load `seed` into the CTL generator |
| `start`     | in  | 1     | start an encryption (taken only while idle) |
| `key`       | in  | 128   | cipher key, sampled with `start` |
| `plaintext` | in  | 128   | plaintext, sampled with `start` |
| `busy`      | out | 1     | rounds in progress |
| `done`      | out | 1     | one-cycle pulse: `ciphertext` is valid |
| `ciphertext`| out | 128   | the state register; holds the result until the next start |

### Timing

```
edge:        0        1        2   ...   10       11
start      __/~~\_______________________________________
busy       _____/~~~~~~~~~~~~~~~~~~~~~~~~\______________
state      ?? | p^k   | rnd1  | ...  | rnd10=ct (held)
done       ______________________________/~~~~\_________
```

The edge that samples `start` loads plaintext XOR key and the key. Edges 1 to
10 perform rounds 1 to 10. `done` is high in the cycle after edge 10, and
a new `start` may be given in that same cycle. `start` during the rounds
is ignored. `key` and `plaintext` may change after the start edge. When idle,
the state register keeps the ciphertext indefinitely: with the clock stopped,
or with the clock running, when CTL keeps moving the value between the two
flip-flops of each protected bit. This idle ciphertext is what a
static-power attack measures.

The datapath has 20 S-box tables (16 in the round, 4 in the key schedule),
a 128-bit round-key register, the 192-flip-flop state register and the
32+16-bit CTL generator.

## What RTL cannot carry

* **Cell flavour and drive strength.** The primitives' flip-flops have to be
  LVT cells. The other state flip-flops are regular- or high-Vt. Where the
  design calls for it, the LVT drive strengths must be picked from X2, X4 and
  X8, per flip-flop and at random; X2 is enough for timing, as each flip-flop
  only drives one multiplexer. All of this is set with cell
  assignments or `set_dont_use`/`size_cell` style constraints in the
  implementation flow.
* **Keeping the redundancy.** Logically, `ff_a` and `ff_b` plus the
  multiplexers are just one flip-flop, and a synthesis tool may merge or
  re-encode them (yosys, for instance, turns the feedback multiplexers into
  flip-flop enables). The primitive instances need a `dont_touch` (or
  equivalent) constraint, and timing fixes after insertion must leave them
  alone. In the original flow the primitives were inserted into the
  synthesised netlist for this reason; here they are in the RTL so the
  structure is visible and simulatable.
* **The evaluation flow**: gate-level simulation, static power analysis and the
  correlation attack are not part of the hardware.

## Departures and own choices

* CTL split into `ctl_load`/`ctl_sel` (see above).
* One CTL bit per state byte. The original does not say how many independent
  CTL signals there are.
* The CTL source is a 32-bit LFSR, not a true random generator.
* The eight protected bytes are a fixed choice (1, 2, 4, 7, 8, 11, 13, 14).
* One-path primitive: fixed to capture every cycle.
* AES core details (one round per cycle, on-the-fly key expansion, start/done
  handshake, reset values, encryption only) are conventional choices; the
  countermeasure is independent of them.
* The scheme's description of the implementation flow speaks of replacing
  *all* state-register flip-flops. The evaluated designs, and this RTL,
  protect only a chosen subset per byte.

## Verification

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. `aes_ref_pkg` is an independent AES model
for them: it builds its S-box by brute-force search for inverses and works
on a 4x4 byte matrix.

| Testbench | What it checks |
|-----------|----------------|
| `tb_aes_sbox` | all 256 entries against the reference, four FIPS-197 entries |
| `tb_aes_round` | FIPS-197 round 1, 400 random rounds with and without MixColumns |
| `tb_aes_key_expand` | FIPS-197 round keys 1 and 10 of the full chain, 300 random steps |
| `tb_aes_ctrl` | round count, final-round flag, round-constant sequence, done latency, start ignored while busy |
| `tb_ctl_rng` | full period of an 8-bit instance, bit-exact sequence of the 32-bit one, reseed, zero seed, `ctl_sel` delay, bit balance |
| `tb_spsc_primitive` | `q` = previous `d` under random CTL; the active path captures and the idle one holds; the one-path form |
| `tb_spsc_state_reg` | transparency of the default and of a mixed one-/two-path register; per-byte capture/hold; stale data present |
| `tb_spsc_aes_configs` | eight cores side by side in the evaluated primitive mixes (baseline; one-path 4/2 and 8/6; two-path 0/8, 8/0, 4/4, 2/6, 8/8 primitives per byte in the two halves, random bit positions): 30 encryptions each against the reference, primitive counts, path switching |
| `tb_spsc_aes_top` | FIPS-197 B and C.1 and 47 further encryptions against the reference at default parameters; latency; counts path switches, stale data after encryption, idle hold with running clock, start while busy, back-to-back starts, reseeds |

Concurrent assertions in the RTL also check that the state register is
transparent (`q == $past(d)`), that the LFSR never reaches zero and that the
controller's load signals are exclusive.

To run one testbench with Verilator 5 (the top-level one is shown):

```sh
verilator --binary --timing --assert -Irtl -Itb --top-module tb_spsc_aes_top \
  rtl/aes_pkg.sv tb/aes_ref_pkg.sv rtl/*.sv tb/tb_spsc_aes_top.sv -o sim
./obj_dir/sim
```

Replace the testbench name for the others. All of them run in well under a
second.
