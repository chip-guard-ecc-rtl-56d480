# Chip Guard ECC — whole-chip correction for a DDR5 sub-channel

A DDR5 sub-channel reads and writes bursts from ten x4 DRAM chips, and each
chip contributes 64 bits to a burst. Eight chips hold a 64-byte cache line.
The two extra chips give 128 check bits. Chip Guard uses them to do three
things:

* correct any error, of any number of bits, confined to a single chip;
* report, almost never silently miss, errors that span several chips;
* keep 16 of the 128 bits free as metadata ("metabits") for the system's own
  use.

It does this with a plain parity chip plus a 48-bit pseudo-random signature,
not with a Reed–Solomon code. Parity tells *which bits* of the faulty chip
are wrong. The signature tells *which chip* it is. Both are XOR networks, so
the logic is small and shallow, and a corrected load takes no longer than a
clean one.

This RTL implements the store-side encoder, the load-side checker/corrector
and a top level that puts both behind one register stage.

## Burst layout

| chip | contents |
|------|----------|
| 0..7 | user data, 64 bits each (512 bits) |
| 8    | 16 metabits interleaved with the 48 signature bits |
| 9    | parity: bit *b* is the XOR of bit *b* of chips 0..8 |

A chip's 64 bits are 16 beats × 4 DQ pins. This design numbers chip bit *b*
as beat *b*/4, DQ *b*%4. In chip 8, metabit *i* sits at bit 4·*i* (one per
beat, on DQ0) and the signature bits fill the other 48 positions in order.
The method only says the two are interleaved, so the exact placement is a
choice of this design. It is set in one place, `cg_pkg::pack_meta_chip` /
`meta_of` / `sig_of`.

## The signature

Each data bit (chip *c* ∈ 0..7, bit *b*) owns a 48-bit mask `S(c,b)` with
exactly 8 bits set. Each metabit owns a mask with 19 bits set. The signature
of a line is the XOR of the masks of all its set bits. Two properties make
this work:

* **Separable.** The signature of a burst is the XOR of per-chip partial
  signatures. The change caused by flipping a pattern *e* in chip *c* is just
  `Sig_c(e)`, whatever the rest of the data is.
* **Distinct masks.** No two data bits share a mask, so no single-bit
  coincidence can alias two chips.

Metabits get heavier masks because they have less protection. A data bit is
covered by three chips (its own, parity and signature). A metabit is covered
by only two, since it lives in the signature chip.

Each signature bit is the XOR of about 85 data bits and 6 metabits. With
the shipped table the largest fan-in is 104 inputs, so every tree is 7 XOR2
levels deep; `tb_cg_chip_sig` checks the 128-input bound.

**The mask table.** The method chooses the masks pseudo-randomly and then
vets them with exhaustive alias searches, for example over all 2-DQ fault
patterns. The vetted table is not published. Here the table is computed at
elaboration by `cg_pkg::gen_sig_map`:

* an xorshift32 generator seeded with `MAP_SEED` draws positions 0..47;
* a position already in the mask is drawn again;
* masks are filled chip by chip and bit by bit.

For the shipped seed, `tb_cg_chip_sig` checks the weights and that all 512
data masks are distinct. `tb_cg_alias_search` runs the smaller classes of
the certification searches exhaustively (see Verification) and finds no
alias. The table has **not** been through the method's full searches. Beyond
the classes tested, its behaviour on bounded faults is that of a random
48-bit map, not a certified one: for a single-chip fault the chance of an
alias is about 9·2⁻⁴⁸ per fault pattern. To use a vetted table, replace
`SIG_MAP` with it.

## Decoding a load

Two syndromes come from the received burst *R*:

* `psyn` = XOR of all 10 chips (64 bits). For a single-chip fault this is
  exactly the set of flipped bits.
* `ssyn` = the signature recomputed from chips 0..7 and the metabits, XOR the
  stored signature (48 bits).

If both are zero the burst is **clean**. Otherwise each of the 10 chips is a
candidate for the fault, and candidate *c* means "chip *c* is wrong by
`psyn`". Because the signature is separable, each candidate is tested
without touching the data:

| candidate | matches when |
|-----------|--------------|
| data chip *c* (0..7) | `ssyn == Sig_c(psyn)` |
| chip 8 | `ssyn == Sig_8(metabits of psyn) ^ (signature bits of psyn)` (the fix flips both the metabits and the stored signature) |
| chip 9 (parity) | `ssyn == 0` (parity does not enter the signature) |

All ten tests run in parallel. The result is:

* **exactly one match**: *corrected*. That chip is XORed with `psyn`. A
  parity-chip correction leaves data and metabits as read.
* **no match, or two or more**: *uncorrectable*. The data is passed as read
  and the status says so.

Points to note:

* **Parity-chip faults.** With `ssyn == 0` and `psyn != 0`, the fault is in
  the parity chip, unless some data chip also gives `Sig_c(psyn) == 0`. That
  would be the ambiguous case, and it is reported as uncorrectable.
* **The unavoidable chip-8/chip-9 alias.** Flip metabit *i* together with
  its 19 signature bits, either in chip 8 or in chip 9. The resulting
  syndromes cannot tell the two chips apart. Both candidates match, so the
  load is reported as uncorrectable. XOR combinations of these patterns
  (65,535 in all) behave the same way. Each is at least 20 specific flips,
  so they are physically unlikely. The testbenches inject them deliberately
  to exercise the "two matches" path.
* **Multi-chip faults.** Faults on several chips usually give no match.
  Aligned flips on two chips cancel in parity, so `psyn == 0` while
  `ssyn != 0`, and then no candidate can match. Both kinds are reported.

## Timing and interface (`chip_guard`)

* **Store.** `st_valid`, `st_data` (8×64) and `st_meta` (16) go in.
  `st_burst` (10×64) comes out with `st_burst_valid` one clock later.
* **Load.** `ld_valid` and `ld_burst` go in. One clock later the top presents
  `ld_out_valid`, `ld_data`, `ld_meta`, `ld_status` (`CG_CLEAN`,
  `CG_CORRECTED`, `CG_UNCORRECTABLE`), `ld_fix_chip` and `ld_match` (which
  candidates matched).
* Both paths take one burst per clock. Latency is fixed at one clock, with or
  without a correction.
* Reset is synchronous and active low (`rst_n`). It clears only the valid
  flags.

The encoder and decoder are purely combinational. The single output register
per path is this design's choice: the method calls for "fixed path" latching
but does not say how many stages. For a faster clock, add a stage between
the syndrome computation and `cg_locator`; nothing else in the design
depends on the depth. Bursts are handled whole. Collecting the 16 beats of a
DDR5 burst is left to the memory interface.

Immediate assertions in the top check that a correction always names exactly
one candidate, and that a clean result has a zero signature syndrome.

## Modules

| file | role |
|------|------|
| `rtl/cg_pkg.sv` | sizes, types, the status enum, the mask table generator, chip-8 layout helpers |
| `rtl/cg_chip_sig.sv` | partial signature of one chip (`CHIP` selects the mask row) |
| `rtl/cg_parity.sv` | sideways XOR of N chip words (N = 9 store, N = 10 load syndrome) |
| `rtl/cg_encoder.sv` | store path: 9 partial signatures, chip-8 packing, parity |
| `rtl/cg_locator.sv` | the 10 parallel candidate tests and the decision |
| `rtl/cg_decoder.sv` | load path: syndromes, locator, correction multiplexer |
| `rtl/chip_guard.sv` | top: encoder and decoder behind output registers |

## Size

Mapped to 2-input gates with yosys (`synth -run :fine; techmap; opt`):

* encoder: 4,762 XOR2;
* decoder: 9,570 XOR2, plus about 1,270 MUX/OR/AND/NOT gates for the
  comparisons and the correction multiplexer.

The method's own estimate is about 5,000 XOR2 for store and about 11,000 for
load. The exact figures move a little with the mask table.

## Changing the configuration

All sizes are constants in `cg_pkg`. The main configuration is 16 metabits,
a 48-bit signature, 8 signature bits per data bit and 19 per metabit. A
lighter-metadata variant, 4 metabits with a 60-bit signature and 10 bits per
data bit, is obtained by setting `META_BITS = 4` and `DATA_WEIGHT = 10`.
`SIG_BITS` and `META_STRIDE` follow from those. That variant has been
exercised with random single-chip faults, all corrected, and two-chip
faults, all flagged. The testbenches' reference model assumes the 16-metabit
layout, so they apply to the main configuration only. After changing
`MAP_SEED` or the weights, rerun `tb_cg_chip_sig` to confirm the masks are
still distinct.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends with a
`TB_RESULT checks=N failures=M` line. The expected values come from
`tb/tb_cg_ref_pkg.sv`, a behavioural model that shares only the mask table
with the RTL. It decodes the literal way: it flips each chip in turn by the
parity syndrome and re-checks the whole burst from scratch.

* `tb_cg_chip_sig`: mask-table rules, unit inputs, random inputs and
  separability, for chips 0, 3, 7 and 8.
* `tb_cg_parity`: N = 9 and N = 10 against a bit-count parity.
* `tb_cg_encoder`: bursts against the reference, including all-zero and
  all-one lines. Every written burst must check clean.
* `tb_cg_locator`, `tb_cg_decoder`: no fault; bounded 2-DQ, few-bit and
  arbitrary faults on every chip; the chip-8/9 alias patterns; two-chip
  faults; aligned bit pairs.
* `tb_chip_guard`: end to end at the default sizes. It streams 2,000 lines
  with random bubbles through store, a fault injector standing in for the
  DRAM, and load. It checks both latencies every clock, and it fails if any
  of these never occurred: a clean pass, a correction of each of the 10
  chips, a parity self-correction, a bounded-fault correction, an ambiguous
  alias, a no-candidate detection, back-to-back transfers.

* `tb_cg_alias_search`: the exhaustive part of a certification search,
  run through the real encoder and decoder. It covers:
  * every 1- to 3-bit fault on every chip, and the inverse of each
    (874,880 cases), all of which must be corrected;
  * every 2-DQ bounded fault confined to the first 8 of the 16 beats
    (3,932,100 cases), all of which must be corrected;
  * every aligned set of 1 to 3 bit pairs on any two chips (1,968,480 cases),
    all of which must be flagged uncorrectable.

  The shipped mask table passes all of them. The method's full searches
  (every 2-DQ pattern over all 16 beats, faults of up to 10 bits, up to 5
  aligned pairs) are too large to simulate. Run them offline before trusting
  a table for bounded faults.

Run one with Verilator, for example:

```
verilator --binary --timing --assert --top-module tb_chip_guard \
  -y rtl -y tb +libext+.sv -Irtl rtl/cg_pkg.sv tb/tb_cg_ref_pkg.sv tb/tb_chip_guard.sv
./obj_dir/Vtb_chip_guard
```

Compiling a testbench takes from a few seconds to about a minute and a half,
depending on how much of the mask table it indexes at run time; the
simulations take well under a second, except `tb_cg_alias_search`, which takes
about 20 seconds.

## Where this departs from, or goes beyond, the method as described

* The mask table is generated and unvetted (see above). The reliability
  figures claimed for the method (bounded faults always corrected, under
  10⁻¹² miss rates) rest on the certification searches, which were not
  repeated for this table.
* The placement of metabits in chip 8, the bit numbering of beats and DQs,
  the status encoding, passing uncorrectable data as read, the one-stage
  pipeline and the reset behaviour are all this design's choices.
* Only the main DDR5 configuration is built and tested. Two variations are
  outlined but not built: an inline-ECC LPDDR5 variant with 16-bit symbols,
  and a 9-chip variant that corrects DQ-pair faults at 27 erasure positions.
