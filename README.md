# REACH: a two-level Reed–Solomon ECC controller for error-prone HBM

HBM stacks that must look error-free carry their own short on-die ECC, and
that ECC is what forces tight binning and a high price per gigabyte. The idea
implemented here is to let the DRAM be much noisier (raw bit error rates up
to about 1e-3) and to move strong error correction into the memory
controller. The HBM link is left alone: it still moves 32-byte chunks.

A strong code needs a long codeword, and long codewords bring two problems:

* **Small accesses become expensive.** Touching one 32 B chunk of a 2 KB
  codeword normally means reading and rewriting all of it.
* **Long-code decoders are large.** Most of a long RS decoder is the logic
  that finds *where* the errors are (the locator and the root search).

The controller removes both problems with one decision made per 32 B chunk.
Each chunk carries a short *inner* code. The inner code either accepts the
chunk, corrects it, or declares it lost. A lost chunk is a known **erasure**
of a long *outer* code that spans 2 KB. Because the positions of the bad
chunks are already known, the outer decoder only has to solve for their
values. It never searches for positions. Most accesses never touch the outer
code at all. Small writes keep the outer parity up to date by linearity,
using only the chunks they change.

This repository holds synthesizable SystemVerilog for that controller, with
self-checking testbenches. It follows the architecture of the REACH proposal
(*Making Strong Error-Correcting Codes Work Effectively for HBM in AI
Inference*). Where the proposal stops at the block level, the algebra and the
micro-architecture are this design's own. They are marked as such below.

---

## 1. The 36-byte unit: the inner code as a decision boundary

Every 32 B data chunk is stored as a 36 B unit: the 32 data bytes plus 4
parity bytes of an RS(36,32) code over GF(2^8).

| item | value |
|---|---|
| field | GF(2^8), polynomial x^8+x^4+x^3+x^2+1, α = x |
| generator | g(x) = (x+1)(x+α)(x+α²)(x+α³) |
| layout | parity bytes at code positions 0..3, data byte *i* at position 4+*i* |
| capability | corrects up to 2 bad bytes |

**Encoder (`inner_rs_enc`).** The encoder is a constant XOR network. Parity
byte *k* is Σᵢ dᵢ·G8[4+i][k], where G8[p] holds the four coefficients of
x^p mod g(x). The table is computed by a constant function in `reach_pkg`,
so no data file is involved.

**Decoder (`inner_rs_dec`).** The decoder forms the four syndromes
S_l = Σ_j y_j α^(l·j) and then decides:

* All syndromes zero: **clean**.
* det = S0·S2 + S1² = 0: one bad byte at X = S1/S0 with value S0. This holds
  only if S2 = S1·X, S3 = S2·X, and X is one of the 36 positions.
* det ≠ 0: two bad bytes. The locator is x² + σ1·x + σ2, with
  σ1 = (S0S3+S1S2)/det and σ2 = (S1S3+S2²)/det.
  * Both roots are looked for among the 36 positions in parallel. There is
    no serial Chien sweep.
  * The error values are e1 = (S1+S0·X2)/(X1+X2) and e2 = S0+e1.
* Anything inconsistent: **erasure**. The chunk is reported as lost and its
  data is not trusted.

**Pipeline.** The arithmetic takes four register stages. A delay line pads
each lane to 12 stages, which is the inner-path depth the proposal quotes.

**Miscorrection.** Like any bounded-distance decoder, a pattern of three or
more bad bytes can land within distance 2 of another codeword. The decoder
then "corrects" it to the wrong data. For RS(36,32) this happens to roughly
1 % of heavily corrupted units. The testbenches measure this rate rather
than pretend it is zero.

**Lane array (`inner_rs_lanes`).** 64 decoder/encoder lanes handle one 64-chunk
beat per cycle. The controller needs only a per-beat summary: was any lane
rejected, and was any lane corrected.

---

## 2. The 2 KB span: the outer code in erasure-only mode

This is the part that takes the most explaining.

### Geometry

A **span** is 64 data chunks (2048 B) plus 4 outer parity chunks (128 B):
68 chunks in all. Each chunk is sixteen 16-bit symbols. The outer code works
over GF(2^16), with polynomial x^16+x^12+x^3+x+1 and α = x.

The outer code is built as **16 interleaved RS(68,64) codes**. Symbol *s*
(bits 16s+15:16s) of every chunk belongs to interleave *s*. This has two
consequences:

* A lost chunk is exactly one erasure in each interleave.
* Each interleave has 4 parity symbols. That gives r = 64 parity symbols and
  a capacity of C = ⌊r/16⌋ = 4 lost chunks per span.

Chunk *c* sits at code position c+4 for data (c < 64) and at position c−64
for parity. The code's check equations are S_l = Σ_p y_p·α^(l·p) = 0 for
l = 0..3.

### Solving for erasures without a locator

Start from the codeword as read. Force the erased chunks to zero, and let
E = {X_i = α^(pos_i)} be the erased positions. The syndromes then reduce to

    S_l = Σ_{i∈E} c_i · X_i^l ,   l = 0..3

where the c_i are the missing symbols. This is a Vandermonde system with
known X_i, and it has a closed-form answer. For each erased position *i*,
take

    L_i(x) = Π_{k∈E, k≠i} (x + X_k) = Σ_l λ_{i,l} x^l
    D_i    = Π_{k∈E, k≠i} (X_i + X_k)

Every other erasure is a root of L_i, so Σ_l λ_{i,l}·S_l = c_i·L_i(X_i) = c_i·D_i.
It follows that

    c_i = D_i^-1 · Σ_l λ_{i,l} S_l .

Three facts keep the hardware small:

* L_i and D_i depend only on *where* the erasures are. They are computed once
  and shared by all 16 interleaves.
* The only division is D_i^-1. It is computed as D_i^(2^16−2) by
  square-and-multiply, in 15 cycles. A 64 K-entry inverse table is avoided.
* There is no error locator polynomial and no root search over 68 positions.

### One repair pipe (`outer_erasure_pipe`)

A pipe receives a 68-bit erasure mask and then works on a fixed schedule:

| cycles | work |
|---|---|
| 0..16 | reads the codeword as 17 beats of 4 chunks, from the highest position group down, and accumulates all 16×4 syndromes by Horner's rule (multiply by α^(4l), add the beat) |
| 0..3, in parallel | builds λ_{i,l} and D_i, one erased factor per cycle |
| 4..19, in parallel | inverts D_i |
| then | emits one repaired chunk per cycle for each erasure (`out_valid`/`out_ready`) and pulses `done` |

With 4 erasures and a free output port, `done` comes **25 cycles** after
`start`. The proposal quotes a fixed 32-cycle repair pipeline, so this
design is a little faster. More than 4 erasures end at once with `fail`.
An empty mask ends at once with `done` alone.

### The cluster and the codeword pool

* **Cluster (`outer_rs_cluster`).** 26 pipes sit behind a dispatcher. A job
  goes to the lowest-numbered idle pipe. Repaired chunks leave through one
  port, granted by fixed priority.
* **Codeword pool (`outer_cw_buffer`).** 128 slots hold full codewords and
  their erasure masks. That is two slots per lane, the "double-buffered"
  provision of the proposal, and 272 KB of codeword storage. The pool is
  filled from the lanes. Each pipe has its own 4-chunk read port with
  one-cycle latency. The pool is written as a register array; a real chip
  would use an SRAM macro.

---

## 3. Differential parity

Outer parity is a linear function of the data:
P = Σ_c d_c · Gout[c], where Gout[c] is the remainder row of chunk *c*'s
code position. Changing chunk *c* from d_old to d_new therefore changes the
parity by (d_old ⊕ d_new)·Gout[c]. The other 63 chunks are never needed.

**The engine (`diff_parity_engine`).** The engine holds the 4 parity chunks
and supports three operations:

* `clear`: set the parity to zero.
* `load`: take the old parity chunks, as read from memory or as repaired.
* `upd`: fold in one chunk delta per cycle. Each 16-bit symbol is multiplied
  by the four constants of its position. The constants come from the same
  table as the outer code.

**The two kinds of write:**

* **Whole-span write.** `clear`, then 64 updates with each new chunk as its
  own delta.
* **Random write of q chunks.** Load the old parity, then q non-zero deltas.
  The controller steps through all 64 chunk slots and skips the untouched
  ones, so a write always spends 64 cycles in the engine.

**Data return (`data_return`).** This block keeps the span image seen so
far, merges the write payload into it, and shows the engine the delta of
each chunk: old⊕new, or the merged value for whole-span writes.

---

## 4. What one request does (`reach_ctrl`)

A request names a span, a 64-bit chunk mask, read or write, and whether it
targets unprotected bit-planes. The controller serves one request at a time.

**Read, fast path.** Read only the masked chunks through the inner lanes. If
none is rejected, respond with status `OK`, or `CORRECTED` if some bytes
were fixed.

**Read, escalated.** If any masked chunk is rejected, the controller
escalates once:

1. Read all 64 data chunks, then the 4 parity chunks, into a pool slot,
   together with their erasure flags. A read that already asked for all 64
   chunks keeps that beat and adds only the parity beat, so an escalation
   never moves more than one codeword (2048 + 128 B).
2. If there are more than 4 erasures, respond `UNCORRECTABLE`.
3. Otherwise start one repair job. Repaired data chunks overwrite the image,
   and the response is `REPAIRED`.

There is never a second repair pass.

**Write, fast path.** Read the masked chunks and the 4 parity chunks. If all
are accepted, apply the deltas of the masked chunks to the old parity. Then
write the masked data chunks, and only after them the parity chunks. The
order is data before parity.

**Write, escalated.** If a chunk is rejected during the reads of a
random write:

1. Read and repair the span as for a read. Repaired parity chunks replace
   the old parity in the engine.
2. Apply the deltas, then write the whole codeword back, data before parity.

Writing back the whole codeword also scrubs the chunks that were repaired.

**Whole-span write.** Nothing is read. Parity is computed from the payload,
then data and parity are written.

**Unprotected planes (bypass).** Plain 32 B chunks are read or written with no
inner check, no inner parity, and no outer parity update.

**Counters.** The controller counts requests, fast-path completions, inner
corrections, escalations, repairs, uncorrectable requests, differential and
whole-span writes, bypassed requests, and the cycles spent waiting on the
outer code. They are exported as `stats`.

---

## 5. Bit-planes and the protected-plane mask (`bitplane_xpose`)

BF16 exponents are fragile, while most mantissa bits tolerate flips. The
transposer turns a block of 256 BF16 values into 16 bit-planes, where plane
*i* holds bit *i* of every value. Each plane is then exactly one 32 B chunk.
It also transposes planes back into values, with one cycle of latency.

A 16-bit `crit_mask` selects the protected planes. Those planes use the
two-level ECC; the rest go through the bypass path.

* The default mask, `16'hFF80`, protects the sign and the 8 exponent
  planes: γ = 9/16.
* γ = 0.5 is also possible by setting the mask.

The unit sits on its own port of the top. The host decides which span holds
which planes.

---

## 6. Sizes and timing

| parameter (top) | default | proposal |
|---|---|---|
| `LANES` | 64 chunks per beat | 64 lanes of 32 B per cycle |
| `NCH` | 16 channels, 4 lanes each | 16 channels |
| `STAGES` | 12-cycle inner lane | 12 stages |
| `NPIPES` | 26 erasure pipes | 26 pipes |
| `NSLOTS` | 128 codeword slots (272 KB) | double-buffered per lane, ~320 KB SRAM |
| `ADDR_W` | 26 span-address bits (128 GB) | not given |
| span | 64 + 4 chunks | W = 2048 B, P = 128 B, C = 4 |

Each read beat costs:

* one command cycle;
* the channel delay (channels may answer out of step, and `channel_if`
  realigns them);
* 12 lane cycles.

Repair takes 25 cycles for 4 erasures. A write adds 64 engine cycles and
two write commands. The proposal's clock (1.74 GHz) and bandwidth
(3.56 TB/s) come from its synthesis; nothing in the RTL depends on them.

---

## 7. Where this RTL departs from the proposal

* **Parity size.** The proposal gives 128 B of parity per 2 KB span (C = 4)
  in its analysis. One evaluation paragraph speaks of 8 parity chunks and
  an 8/9 rate. This design uses 4 parity chunks (128 B).
* **Bit-plane default.** The proposal's figure protects sign + exponent
  (γ = 9/16), while its text quotes γ = 0.5. The default here is the figure's
  mask; the mask is an input.
* **One request in flight.** There is no queue, reordering or QoS policy
  (the proposal names a scheduler/QoS but gives no policy). The 26 pipes and
  the double-buffered slots are therefore used one job at a time. The
  cluster would report only one of two jobs finishing in the same cycle,
  which cannot happen with this controller.
* **Repair latency.** It is 25 cycles, against the 32 quoted.
* **Inner pipeline.** Of the 12 inner stages, 4 do arithmetic and the rest
  are padding.
* **Random reads.** They fetch exactly the requested chunks, with no
  speculative neighbour window.
* **Metadata transport.** How the 4 B of inner parity travel over a 32 B HBM
  interface is left open by the proposal. The PHY side here carries 36 B
  units.
* **Fixed span geometry.** The proposal also evaluates 512 B and 1 KB outer
  codewords; they are not supported.
* **Interleaving and algebra.** The interleaved outer code, the field
  polynomials, the evaluation points and the code layouts are this design's
  choices. So are the Peterson inner decoder and the closed-form erasure
  solve.
* **Not modelled.** The HBM PHY, the DRAM stack and the host are outside the
  design. The testbenches use a behavioural HBM that stores 36 B units,
  answers each channel after a random 2–6 cycle delay, and lets a test
  corrupt bytes.

---

## 8. How it is verified

Every block has a self-checking testbench in `tb/`. Each one ends with a
line `TB_RESULT checks=N failures=M` and has a watchdog. The codes are
checked against separate reference models in `tb/rs8_ref.svh` and
`tb/rs16_ref.svh`: shift-and-add field multipliers and LFSR-division
encoders that share nothing with the RTL's tables.

| testbench | what it establishes |
|---|---|
| `tb_inner_rs_enc` | encoder equals the LFSR reference |
| `tb_inner_rs_dec` | 0/1/2 byte errors come out exact; heavier errors are flagged except for rare miscorrections; latency is 12 cycles |
| `tb_inner_rs_lanes` | 8 lanes back to back: per-lane data, erasure flags, beat summaries, 12-cycle latency, bypass, encoder side |
| `tb_outer_erasure_pipe` | 1–4 erased chunks (data and parity) repaired exactly; 25-cycle latency; more than 4 erasures fail; back-pressure on the output |
| `tb_outer_rs_cluster` | jobs on several pipes at once, dispatch stalls when all are busy, chunk/slot tags, one done per job |
| `tb_outer_cw_buffer` | chunk placement by code position, parity beat, erasure masks, two read ports |
| `tb_diff_parity_engine` | whole-span parity and random deltas on loaded parity equal a fresh encode |
| `tb_data_return` | image assembly, repair writes, deltas, merge |
| `tb_channel_if` | metadata insert/strip, fan-out only to addressed channels, realignment of skewed channels |
| `tb_bitplane_xpose` | bit mapping, round trip, protected-plane outputs |
| `tb_reach_ctrl` | exact command sequence and status for every flow: clean, corrected, repaired (incl. parity loss), uncorrectable, random write, whole-span write, escalated write, bypass; counters |
| `tb_reach_top` | the whole controller at its default size against the behavioural HBM; every mechanism above must occur and be counted |

Each testbench also catches a deliberately broken copy of its block, for
example a shifted generator row, a dropped locator term, a wrong Horner
constant, swapped parity chunks, or a missing parity clear.

---

## 9. Simulating

The testbenches need Verilator 5 with `--timing`. For example, for the full
controller:

    verilator --binary --timing -Wno-fatal -Irtl -Itb \
      rtl/reach_pkg.sv $(ls rtl/*.sv | grep -v reach_pkg) \
      tb/hbm_model.sv tb/tb_reach_top.sv --top-module tb_reach_top -Mdir obj
    ./obj/Vtb_reach_top

For any other block, replace the last testbench file and the top module name
with `tb_<block>`. `tb_reach_top` runs the full-size design in a few seconds.

The code tables (inner and outer remainder rows, α powers, GF(2^8) inverses)
are built by constant functions in `reach_pkg`. To change a field polynomial
or the code layout, edit the functions there and the matching reference in
`tb/`.

## 10. Files

| file | content |
|---|---|
| `rtl/reach_pkg.sv` | types, sizes, field arithmetic, code tables, chunk↔position maps |
| `rtl/reach_top.sv` | top level, wiring of all blocks |
| `rtl/reach_ctrl.sv` | request sequencing and counters |
| `rtl/channel_if.sv` | channel fan-out, metadata insert/strip, read realignment |
| `rtl/inner_rs_enc.sv`, `rtl/inner_rs_dec.sv`, `rtl/inner_rs_lanes.sv` | inner code |
| `rtl/outer_cw_buffer.sv`, `rtl/outer_erasure_pipe.sv`, `rtl/outer_rs_cluster.sv` | outer code |
| `rtl/diff_parity_engine.sv`, `rtl/data_return.sv` | write path |
| `rtl/bitplane_xpose.sv` | bit-plane layout |
| `tb/*.sv`, `tb/*.svh` | testbenches, behavioural HBM, reference arithmetic |
