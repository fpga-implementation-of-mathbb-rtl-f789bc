# Hardware PRNG test platform with chaotic-iteration post-processing

Generators that are linear over GF(2) (xorshift, Tausworthe/LFSR, twisted
GFSR) are cheap and fast in an FPGA: a few shifts and XORs per word.
However, they fail statistical tests that measure linear complexity. This design does two
things with them:

1. **A bank of 19 generator sources in programmable logic**, each able to
   deliver one word per clock. A processor picks one source at a time and
   streams its output to memory by DMA, in bursts of a size it chooses. Software
   can then run a statistical battery on the words and compare the
   generators.
2. **Chaotic-iteration (CI) post-processing.** Three cheap generators are
   combined into one generator through a small XOR state machine. The CI state is
   changed by a data-dependent subset of the generators' words, which hides
   the linear structure while costing only a handful of LUTs and no
   multipliers.

Everything is plain synthesizable SystemVerilog (IEEE 1800-2017). All
modules share one package (`prng_pkg`). Each generator produces exactly the
word sequence of its published reference program, and each testbench checks
this against an independent model.

## Chaotic iterations: `ci_core` and `ci_prng`

The CI state is a 32-bit word `s`. Each clock takes a 64-bit word `x` from
PRNG1, a 64-bit word `y` from PRNG2 and a word `z` from PRNG3, then:

```
if z[0]: s ^= x[31:0]
if z[1]: s ^= x[63:32]
if z[2]: s ^= y[31:0]
r = s ^ y[63:32]          // output; s keeps its updated value
```

So the *strategy* (which 32-bit slices update the state) is chosen by three
bits of a third generator. Only those three low bits of PRNG3 are used; its
other bits are ignored. `ci_core` holds `s`, computes `r` combinationally
from `s` and the current inputs, and commits the new `s` on `en`. It produces
one 32-bit result per clock.

`ci_prng #(I, J, K)` builds a complete combination, following the paper's
three-digit codes:

| digit | meaning |
|---|---|
| I (PRNG1), J (PRNG2) | 0 = xorshift64, 1 = xorshift128+ |
| K (PRNG3) | 1 = LFSR113, 2 = Taus88, 3 = TT800, 4 = WELL512, 5 = MT19937 |

All three generators advance on every accepted output. With K = 3, 4 or 5,
PRNG3 has to fill its state after reset, so `ready` stays low for 25, 16 or
624 clocks. In that case MT19937 is built in its self-seeding form. PRNG1 and PRNG2 always get
different fixed seeds, so a combination such as `[1,1,2]` does not cancel a
generator against itself. The platform builds the six combinations the
source evaluates: 011, 012, 013, 014, 015 and 112.

## The generators

Every generator module has the same core interface: `clk`, `rst_n`
(asynchronous, active low), `en` (consume the current word and step),
`seed_we` and `seed` (load new seed or state), and `out`. The output is
combinational from the state register, so a word is available in every
clock and `en` advances it. Generators that need time to fill a table also
have a `ready` output. The reset seed is a `SEED` parameter.

| module | output | state | seeding | platform source |
|---|---|---|---|---|
| `xorshift64` | 64 | 64 b | full state | 0 |
| `xorshift128plus` | 64 | 128 b | full state | 1 |
| `lfsr113` | 32 | 4 × 32 b | full state | 2 |
| `taus88` | 32 | 3 × 32 b | full state | 3 |
| `lfsr258` | 64 | 5 × 64 b | full state | 4 |
| `tt800` | 32 | 25 words | Knuth, 25 clk | 5 |
| `well512` | 32 | 16 words | Knuth, 16 clk | 6 |
| `mt19937` | 32 | 624-word RAM | software or Knuth, 624 clk | 7 |
| `pcg32` | 32 | 64 b state + 64 b increment | (initstate, initseq), 1 clk | 14 |
| `mrg32k3a` | 32 | 6 × 32 b | full state | 15 |
| `mwc256` | 32 | 256-word RAM + carry | Knuth, 256 clk | 16 |
| `cmwc4096` | 32 | 4096-word RAM + carry | Knuth, 4096 clk | 17 |
| `xorshift1024star` | 64 | 16 × 64 b | one word per clk | 18 |

Platform sources 8 to 13 are the six CI combinations.

The constants, shifts and masks are those of the published generators
(Marsaglia, L'Ecuyer, Matsumoto, Panneton, O'Neill and Vigna). The design
does not invent any of them. For the Tausworthe generators, an invalid seed
(a component below its minimum) is the user's responsibility, as it is in
the reference code.

### Tables as shift registers, and Knuth seeding

The twisted-GFSR generators (TT800, WELL512, MT19937) and the
multiply-with-carry generators keep a table of words. Their reference
programs regenerate the whole table at once. Here, one word is updated per clock. The table acts as a
circular feedback shift register: the word that is read at index `i` is
replaced in the same clock by its successor. This order of update gives
the same output sequence as the block update.

- **MT19937** reads `mt[i]`, `mt[i+1]` and `mt[i+397]` (mod 624). It writes
  the new word back to `mt[i]` and outputs it tempered.
- **MWC256 and CMWC4096** read and write `Q[i]` in one clock, as a RAM in
  read-before-write mode would.
- **TT800** outputs the *oldest* word of its 25-word register, tempered. Its first 25
  outputs are therefore the tempered seed words, exactly as in the
  reference program.

A table generator fills its table with Knuth's recurrence
`x[i] = 1812433253 · (x[i-1] ^ (x[i-1] >> 30)) + i`. A shared
`knuth_seeder` produces one word per clock. During filling, `ready` is low,
so a stream source simply shows no valid word until it is done.

MT19937 has two seeding variants, selected by `INTERNAL_SEED`:

- **1, "with seed"**: the seeder runs after reset or on `seed_we`.
- **0, "no seed"** (the default, used in the platform): software writes all
  624 words through `mem_we/mem_addr/mem_wdata`. `ready` rises when word
  623 is written.

The no-seed variant costs no multiplier, because the Knuth recurrence stays
in software.

### Multipliers and modular arithmetic

The generators from the LCG family need wide multiplication:

- PCG32: 64 × 64 bits, low half.
- xorshift1024*: 64 × 64 bits, on the output.
- MWC256 and CMWC4096: 32 × 32 → 64 bits, with the carry as the high half.

All of these are plain `*` operators, left to the synthesis tool's DSP
mapping. This RTL has no pipeline registers, so they set the clock
frequency of those sources.

MRG32k3a works modulo `m1 = 2^32-209` and `m2 = 2^32-22853`. No divider is
used. Each negative term `-b·x` is written as `b·(m-x)`, and a product is
reduced by folding its upper bits back (`hi·2^32 + lo ≡ hi·d + lo`, mod
`2^32-d`). Three folds and one conditional subtraction give the exact
residue. The output is the integer `z` in `[1, m1]`. The reference
program's floating-point value is `z / (m1+1)`, which is left to software.

## The stream platform: `prng_platform`

```
 gpio0_en ─────────────────────────────┐
 gpio1_burst ──┬──────────┬──────┐     │
               ▼          ▼      ▼     ▼
 gen 0 ─► prng_axis ─┐                      
 gen 1 ─► prng_axis ─┤                      
   ...               ├─► axi_rng_interconnect ─► m_axis_* (to DMA S2MM)
 gen 18 ─► prng_axis ┘
```

**`prng_axis`** turns a generator into an AXI4-Stream master:

- `TVALID` is the generator's `ready`.
- `TDATA` is its word, zero-extended to 64 bits.
- The generator steps on each handshake, so a word is never lost or
  repeated under back-pressure.
- `TLAST` marks every N-th beat, where N is the GPIO-1 burst size. A burst
  size of 0 counts as 1.
- A new burst size takes effect at the next burst boundary.

**`axi_rng_interconnect`** is an N:1 stream selector:

- The GPIO-0 enable vector chooses the source. The lowest set bit wins, and
  no set bit means idle.
- The choice is registered and changes only between bursts, so one DMA
  transfer never mixes two generators.
- Only the selected source gets `TREADY`. The others keep their state.
- The datapath is a combinational multiplexer with no buffer, so it passes
  one word per clock.
- Assertions check the rule that a selection changes only at a burst
  boundary.

**Top-level ports.** The GPIO registers, the DMA, the processor and DDR are
outside this RTL, and their signals are the top's ports:

- `gpio0_en[18:0]` and `gpio1_burst[15:0]`: the two GPIO registers.
- `m_axis_*`: towards the DMA.
- `seed_we[18:0]` with a shared 320-bit `seed_data`: reseeds one source.
  The `seed_data` layout for each source is listed in the module's header.
- `mt_mem_*`: writes the MT19937 state.
- `src_ready`, `cur_sel`, `active` and `in_burst`: status outputs.

**Throughput.** Every source, including each CI combination, delivers one
word per clock while `TREADY` is high. A source's throughput is therefore
the clock frequency times its output width.

## Where this RTL departs from, or adds to, the source design

- **No HLS flow.** The source builds some generators by high-level
  synthesis and others in RTL, and compares the two flows. Here all of them
  are hand-written RTL. The area and frequency figures of the source are not
  reproduced, and this RTL has not been placed and routed.
- **MT19937 memory.** The source keeps the MT state in two block RAMs in
  read-before-write mode. Here it is one array with three asynchronous reads
  and one write, which a tool maps to distributed RAM. In other words, the
  clock-halving the source reports for RAM-based generators does not
  happen here.
- **Generators not included.** KISS124, LUT-SR, the cellular-automaton
  generator and "XORP128" appear in the source's tables, but it does not
  define them well enough to rebuild them.
- **PCG32 period.** The source's table gives PCG32's period as 2^32. The
  published generator, which is what is built, has a 64-bit state and
  period 2^64.
- **Designer's choices.** The following are choices made for this design:
  - stream encodings: zero-extension to 64 bits, the lowest-bit priority
    rule, switching at burst boundaries, and burst size 0 treated as 1;
  - the reset seeds;
  - the seed ports.
- **Statistical quality.** TestU01 BigCrush runs need about 2^38 words, far
  more than RTL simulation can produce. Statistical quality rests on
  the generators being bit-exact with their references.

## Verification

Each module has a self-checking testbench in `tb/`, named `tb_<module>`. It
compares the module against a model written independently in the
testbench. Where a generator's reference program has published output values,
the model is anchored to them, for example:

- MT19937, seed 5489: first output 3499211612, 10000th output 4123659995.
- PCG32, seed (42, 54): first output 0xa15c02b7.
- MRG32k3a, all seeds 12345: first output 545508589.

The testbenches also check reseeding, the `ready` latency of the seeded
generators, and holding under `en = 0`. The stream blocks are tested with
random back-pressure, burst-size changes and enable changes in mid-burst.

`tb_prng_platform` runs the whole top at its default parameters:

1. It sweeps all 19 sources with random `TREADY`.
2. It loads the MT19937 state from software while the DMA stalls.
3. It changes the burst size.
4. It reseeds six sources, sweeps them in reverse order, and checks full-rate output.

Each word is compared with the model of its source. The test counts
source switches, deferred switches, stalls, seeding waits, idle periods and
bursts, and fails if any of these never happened.

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and has a
watchdog. To run one with Verilator 5:

```
verilator --binary --timing --assert --top-module tb_prng_platform \
  -y rtl -y tb +libext+.sv -Irtl rtl/prng_pkg.sv tb/tb_prng_platform.sv
./obj_dir/Vtb_prng_platform
```

All testbenches finish in seconds. The platform test takes the longest,
because CMWC4096 spends 4096 clocks filling its table.

## Lint notes

Verilator's `-Wall` reports a few warnings that are deliberate. Each is
explained in the header of the module concerned:

- `seed_we[13:7]` of the top is unused, because the CI sources have fixed
  seeds.
- PRNG3's upper bits are unused in `ci_prng`.
- The top bit of PCG's `initseq` is shifted out, as in the reference.
- The index output of one `knuth_seeder` instance is left unconnected.
- `rst_n` is reported as both asynchronous reset and synchronous signal,
  because the interconnect's assertions are disabled during reset; the
  flip-flops themselves use it only as an asynchronous reset.
