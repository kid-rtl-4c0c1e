# A unified NTT multiplier for Kyber and Dilithium

CRYSTALS-Kyber (key encapsulation) and CRYSTALS-Dilithium (signatures) both
multiply polynomials of 256 coefficients with the number-theoretic transform
(NTT). They differ in the modulus: Kyber uses q = 3329, whose coefficients fit
in 12 bits, and Dilithium uses q = 8380417, which needs 23 bits. This core
runs both schemes on one datapath, based on a simple observation: a 24-bit
memory word holds either two Kyber coefficients or one Dilithium
coefficient. Every clock the core reads one word from each of two RAMs. It
then performs either two Kyber butterflies (four 12-bit coefficients) or one
Dilithium butterfly (two 23-bit coefficients), and writes two words back.

The core provides three operations per scheme:

| operation | Kyber | Dilithium |
|---|---|---|
| forward NTT | 448 clocks (7 stages x 64) | 1024 clocks (8 stages x 128) |
| inverse NTT | 448 clocks | 1024 clocks |
| point-wise multiplication | 256 clocks | 256 clocks |

These are issue clocks, one memory step per clock with no stalls. From
`start_i` to `done_o`, the pipeline drain adds 17 clocks to a transform
and 18 clocks to a point-wise multiplication. The read-to-write pipeline is
15 clocks deep.

This configuration has one 24-bit word per RAM port. The same scheme
scales to 48-bit and 96-bit words (four or eight Kyber butterflies), but
only the 24-bit configuration is written here.

## Arithmetic

All multiplications are Montgomery multiplications. The result is
x·y·R⁻¹ mod q, where R = 2¹² for Kyber and R = 2²³ for Dilithium. Twiddle
factors are stored pre-multiplied by R, so a butterfly's product with a
twiddle is the plain product.

**Kyber reduction.** The reducer is `kid_mont_red_kyber`. It has no
multipliers, because q = 2¹¹+2¹⁰+2⁸+1 and q' = −q⁻¹ mod 2¹² = 3327 are both
cheap as shift-and-add networks:

- Stage 1: t·q' mod 2¹².
- Stage 2: (t + m·q)/2¹², then one conditional subtraction of q.

**Dilithium reduction.** The reducer is `kid_mont_red_dil`. It uses the
same idea with q = 2²³−2¹³+1:

- m = −(t + (t<<13)) mod 2²³.
- (t + (m<<23) − (m<<13) + m)/2²³, then a conditional subtraction.

**The multiplier.** `kid_mod_mul` has two 23×12 multipliers, sized for a
DSP slice:

- Kyber: each multiplier computes one 12×12 lane product, which goes to
  its own Kyber reducer.
- Dilithium: the second operand is split at bit 12. The two partial
  products are added as p0 + (p1<<12) and sent to the Dilithium reducer.

The latency is 3 clocks in both cases.

**Addition and subtraction.** `kid_addsub` runs on one 26-bit carry
chain: `{0, a_hi, sel, a_lo}`. An extra bit sits between the two 12-bit
halves:

- Kyber: the extra bit stops the carry or borrow between the two lanes.
- Dilithium: it passes the carry on, so the chain acts as one 23-bit
  adder.

For subtraction, b is inverted. The extra bit, together with the
carry-in, supplies the +1 of the two's complement.

The raw result is then corrected into [0, q):

- Sums of q or more lose q.
- Negative differences gain q.
- In the inverse NTT, a sum can also be halved modulo q. The code picks
  one of s−q, s or s+q, whichever is even, and shifts it right. This is
  where the inverse transform's division by n happens: one halving per
  stage.

**Inverse twiddles.** The inverse transform's twiddles are stored as
−ζ·2⁻¹·R. The difference branch of the Gentleman-Sande butterfly
therefore also gets its factor ½. The inverse transform needs no final
scaling pass: its output is divided by 128 (Kyber, 7 stages) or 256
(Dilithium).

**The R⁻¹ factor.** Point-wise products are Montgomery products, so a
complete multiplication NTT→PWM→INTT returns a·b·R⁻¹ mod (xⁿ+1). To get
the plain product, pre-multiply one operand by R mod q when loading it.
The end-to-end testbench checks exactly this relation.

## Butterfly modes

`kid_bfu` contains two pairs of `kid_addsub`, one before the multiplier
and one after it, plus the multiplier itself. Its five modes are:

| mode | inputs (x, y, w) | outputs (u, v), per lane |
|---|---|---|
| `BM_NTT` | coefficients, twiddle ζ | u = x + ζy, v = x − ζy (Cooley-Tukey) |
| `BM_INTT` | coefficients, twiddle w = −ζ/2 | u = (x + y)/2, v = (x − y)·w (Gentleman-Sande) |
| `BM_PWM0` | x = {a1, a0}, y = {b1, b0} | u = {a1·b1, a0·b0}, v = {b0 + b1, a0 + a1} |
| `BM_PWM1` | x = {a1b1, a0b0}, y = {b0+b1, a0+a1}, w = ψ | u = {(a0+a1)(b0+b1) − a0b0 − a1b1, a0b0 + a1b1·ψ} |
| `BM_DPWM` | Dilithium coefficients | u = x·y |

Kyber's NTT is incomplete: it stops at 128 degree-1 polynomials. A
point-wise product is therefore a product modulo (X² − ψ), done with
Karatsuba in two passes:

- PWM0 forms the two products and the two sums.
- PWM1 forms the final pair.

One Kyber word holds exactly one such degree-1 pair {odd, even}. The
value ψ for word w is ±ζ₆₄₊⌊w/2⌋: even words use the positive sign, odd
words the negative one. It comes from the twiddle ROM.

The butterfly's total latency is the parameter `LAT` (14 in the core).
Padding registers at the output bring the real logic depth up to that
value.

## The memory schedule

This is the heart of the design and its least obvious part. The problem:
a butterfly needs one operand from each RAM. Its results must go back to
the RAMs 15 clocks later. A later stage must never read a word before it
has been written back. The schedule must also run with no stall cycles
and only two RAMs.

Notation:

- **W** is the number of words per polynomial: 128 for Kyber, 256 for
  Dilithium.
- **d = W/2** is the number of words of one polynomial in each RAM.
- **p = d/2^(s−1)** is the block size at stage s, where s = 1..log₂W.
- At stage s, words w and w + W/2ˢ form a butterfly pair.

**Starting layout.** Word w is stored at `Mem_A[w]` for w < d, and at
`Mem_B[W−1−w]` otherwise. `Mem_B` therefore holds the upper half in
reverse order.

**Step a of a stage** (a = 0..d−1) reads `Mem_A[a]` and `Mem_B[b]`, with

    j = a rounded down to a multiple of p,     b = 2j + p − 1 − a

The two words read always form a butterfly pair of the current stage.

**Write-back.** The two results go back to the same two addresses. Within
each block, the second half of the steps (a − j ≥ p/2) exchanges the two
results between the RAMs, except in the last stage. These exchanges make
the next stage's pairs line up again.

The address ROM's flag bits describe each step:

- `rd_lowb` says which RAM delivered the lower-index word. A read crossbar
  puts that word on the butterfly's x input.
- `wr_lowb` says which RAM receives the lower-index result. It combines
  `rd_lowb` with the exchange.

**Example.** For W = 16 (d = 8), the layout evolves as follows. Entries
are word numbers, and (x, y) are the butterfly pairs.

    start          A:  0  1  2  3  4  5  6  7   B: 15 14 13 12 11 10  9  8
    stage 1: A0/B7 (0,8)  A1/B6 (1,9)  ... A7/B0 (7,15)
    after stage 1  A:  0  1  2  3 12 13 14 15   B:  7  6  5  4 11 10  9  8
    stage 2: A0/B3 (0,4)  A1/B2 (1,5)  A2/B1 (2,6)  A3/B0 (3,7)  A4/B7 (8,12) ...
    after stage 2  A:  0  1  6  7 12 13 10 11   B:  3  2  5  4 15 14  9  8
    stage 3: A0/B1 (0,2)  A1/B0 (1,3)  A2/B3 (4,6)  A3/B2 (5,7) ...
    after stage 3  A:  0  3  6  5 12 15 10  9   B:  1  2  7  4 13 14 11  8
    stage 4: A0/B0 (0,1)  A1/B1 (2,3)  A2/B2 (6,7)  ... (no exchange)

**Why there is no hazard.** `Mem_A` is always walked 0..d−1, and `Mem_B`
in mirrored order within each block. A word written at one step is read
again no sooner than d/2 steps later: 32 steps for Kyber and 64 for
Dilithium, both in the forward and in the inverse transform. The
address-ROM testbench measures this. Any read-to-write pipeline depth
below d/2 therefore runs without stalls. This is why `PIPE_DEPTH` may be
anything from 7 to 31. The default is 15, and the testbenches also run
the core at 31.

**Inverse transform.** The inverse runs the stages in reverse order over
the same address pairs. Its `wr_lowb` flags put each result where that
word was before the corresponding forward stage. The inverse therefore
undoes the exchanges and leaves the polynomial in the natural starting
layout. The forward transform leaves a scrambled layout, but it is
deterministic, so point-wise multiplication and the inverse transform
simply use it.

**Twiddle indices.** For the pair whose lower word is w, let
blk = ⌊w / (2·W/2ˢ)⌋. The index is:

- forward: 2^(s−1) + blk;
- inverse: 2ˢ − 1 − blk.

This is the same bit-reversed order that the Kyber and Dilithium
reference implementations use. The index is stored in each ROM entry.

**Point-wise multiplication.** Both operands have the same layout, so
polynomial 0 and polynomial 1 hold matching words at the same offsets.
Entry k of the point-wise program covers offset k of both RAMs and takes
two clocks:

1. Read polynomial 0's words at offset k (`Mem_A` and `Mem_B`).
2. Read polynomial 1's words at offset k + 128.

The butterfly is then issued twice: once for the `Mem_A` word pair and
once for the `Mem_B` word pair. Every result that leaves the butterfly
needs a write port:

- Dilithium and Kyber PWM1: one result per butterfly operation, which
  goes to polynomial 0.
- Kyber PWM0: two results. The products go to polynomial 0 and the sums
  to polynomial 1. The second write is held for one clock in a pending
  register, which is free because the other RAM's write port idles on
  alternate clocks.

The counts work out to 256 clocks for both schemes:

- Kyber: 64 entries x 2 clocks x 2 passes.
- Dilithium: 128 entries x 2 clocks.

## Top level and timing

`kid_top` connects the following parts:

| instance | role |
|---|---|
| `kid_ctrl` | control counter |
| `kid_addr_rom` | 3200 entries of 37 bits |
| `kid_twiddle_rom` | 1024 words of 24 bits |
| `kid_coef_ram` x 2 | `Mem_A`, `Mem_B`: 256 words of 24 bits each |
| `kid_bfu` | the butterfly pair |
| crossbars and metadata pipeline | route reads and writes |

**Pipeline from one step to its write-back:**

1. The control counter presents a step index.
2. One clock later, the address ROM entry appears.
3. The RAM and twiddle reads are issued. Their data appears one clock
   later.
4. The read crossbar feeds the butterfly.
5. The butterfly result appears `LAT` = 14 clocks later and goes through
   the write crossbar into both RAMs.

A small metadata pipeline travels alongside the butterfly. It carries the
write addresses, `wr_lowb`, the kind of write and the ROM's last flag.
When the last flag reaches the write port, the control counter raises
`done_o`. Kyber point-wise multiplication waits for two last flags, one
per pass.

**Interface.**

- `start_i` starts an operation. It takes `op_i` (`OP_NTT`, `OP_INTT`
  or `OP_PWM`), `scheme_i` and, for transforms, `poly_i` (slot 0 or 1).
- `busy_o` is high from the clock after `start_i` until `done_o`.
- `start_i` is ignored while busy.
- Point-wise multiplication always works on slots 0 and 1. Its result
  replaces slot 0, and slot 1 is overwritten.

**Host port.** The coefficient RAMs are loaded and read through the host
port while the core is idle. The address is `{slot, offset[6:0]}`, and
`*_bank_i` selects `Mem_A` (0) or `Mem_B` (1). Read data is valid one
clock after `host_re_i`.

Load polynomials in the natural starting layout above:

- Kyber word w holds coefficients {2w+1, 2w} in bits [23:12] and [11:0].
- Dilithium word w holds coefficient w in bits [22:0].
- W is 128 for Kyber and 256 for Dilithium.

Read the result of an inverse transform from the same natural layout.

A typical product c = a·b:

1. Load a into slot 0 and b·R into slot 1.
2. Run NTT(0), NTT(1), PWM and INTT(0).
3. Read c from slot 0.

## Sizes and parameters

| parameter | default | meaning |
|---|---|---|
| `kid_top.PIPE_DEPTH` | 15 | RAM read to RAM write, clocks; 7..31 allowed |
| `kid_bfu.LAT` | 14 | butterfly latency, PIPE_DEPTH − 1 |
| `kid_coef_ram.DEPTH` | 256 | two polynomial slots of 128 words |
| `kid_coef_ram.WIDTH` | 24 | one word = 2 Kyber or 1 Dilithium coefficient |

Shared constants, enums and the ROM entry struct live in `kid_pkg`.

Both ROMs are filled at elaboration by SystemVerilog functions, so no
data files are needed:

- **Twiddle ROM.** It computes powers of ζ = 17 (Kyber) and ζ = 1753
  (Dilithium), bit-reverses the indices and converts the results to
  Montgomery form.
- **Address ROM.** It runs the schedule described above and records every
  step.

## Where this design departs from the description it follows

- **Step order.** The published schedule visits the steps of a block from
  both ends alternately. It also reverses the second half of the first
  stage to avoid a hazard. This design walks each block from one end. It
  uses the same pairs and produces the same per-stage layouts, and needs
  no special reversal.
- **Modular adder threshold.** The Kyber adder is described as subtracting
  q when a+b > q. This design subtracts when a+b ≥ q, so that a+b = q
  correctly gives 0.
- **Width of the reduction sum.** The Kyber reduction's second sum is
  drawn as 24 bits. It can reach 25 bits, so the RTL keeps the extra
  bit.
- **Adders around the multiplier.** The reference butterfly shares one
  adder and one subtractor through a set of multiplexers; the published
  select table cannot be mapped to inputs. This design uses separate
  adder/subtractor pairs before and after the multiplier.
- **Dilithium Montgomery reduction.** Its internal structure (R = 2²³,
  shift-add form) is this design's own. Only its use of the prime's form
  is given.
- **Twiddle addressing.** Twiddle indices are stored in the address ROM,
  not produced by a separate twiddle counter.
- **This design's own choices.** The host port, the start/busy/done
  handshake, the two-slot RAM organisation and the placement of
  point-wise operands in the RAMs are all this design's own.
- **Reported latencies.** The published latencies count issue clocks, as
  the table at the top does. The drain of 17–18 clocks is extra.

## Verification

Each block has a self-checking testbench in `tb/`. Each one compares
against arithmetic done independently in the testbench, prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_kid_mont_red_kyber`, `tb_kid_mont_red_dil` | 20000 random products each, against t·R⁻¹ mod q, 2-clock latency |
| `tb_kid_mod_mul` | 20000 random operand pairs, scheme switching every clock, 3-clock latency |
| `tb_kid_addsub` | corners and random operands, all modes and both schemes |
| `tb_kid_bfu` | 5000 back-to-back random operations in all five modes against a plain model, latency `LAT` |
| `tb_kid_coef_ram` | random reads and writes against a model, read-during-write returns old data |
| `tb_kid_twiddle_rom` | all 1024 words against independently computed powers; known ζ₁ values; INTT relation 2t + ζ = 0 |
| `tb_kid_addr_rom` | replays every program on a memory model (see below) |
| `tb_kid_ctrl` | step counts 448/1024/256, address and phase sequence, PWM passes, ignored start while busy, `done_o` timing |
| `tb_kid_top` | end to end at the default parameters, both schemes (see below) |
| `tb_kid_top_depth` | the same end-to-end run on a core with `PIPE_DEPTH` = 31, the deepest conflict-free pipeline |

**Address ROM testbench.** For every program it checks:

- butterfly pairs and their alignment;
- that each word is used once per stage;
- the order flags and the twiddle indices;
- a read-after-write distance of at least d/2 steps (32 Kyber, 64 Dilithium);
- the last flags;
- that the inverse transform returns every word to its starting place.

**End-to-end testbench (`tb_kid_top`).** It runs at the default
parameters, for Kyber then Dilithium:

1. Load random and corner-value polynomials.
2. Run NTT on each polynomial. Compare the first result with a reference
   NTT, read back through the expected scrambled layout.
3. Run PWM and INTT.
4. Compare with the schoolbook negacyclic product times R⁻¹.

It also checks the issue clocks and the start-to-done latency. It counts
how often each mechanism fires: read exchanges, write exchanges, PWM0,
PWM1, Dilithium PWM, NTT and INTT butterflies, and read-before-write
hazards (which must be zero).

To run a testbench with Verilator 5, from the directory that holds `rtl/`
and `tb/`:

    verilator --binary --timing --assert rtl/kid_pkg.sv -y rtl tb/tb_kid_top.sv \
        --top-module tb_kid_top -Mdir obj_top
    ./obj_top/Vtb_kid_top

Replace `tb_kid_top` with any other testbench name. The full end-to-end
run takes well under a second.
