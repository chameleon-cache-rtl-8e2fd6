# Chameleon Cache in SystemVerilog

A last-level cache shared by mutually distrusting programs leaks information
through *contention*. When one program's line pushes out another's, the
attacker sees a miss and learns which addresses share a set. Randomized skewed caches
(RSCs) hide the address-to-set mapping behind a keyed function and give every
group of ways (a *division*) its own mapping. Attacks such as Prime+Prune+Probe
can still learn, after enough accesses, which addresses contend. The keys then
have to be changed often, and that costs performance.

Chameleon Cache adds a small, fully associative **victim cache (VC)** to an RSC
and uses it to **reinsert** evicted lines. When a new line pushes a line X out
of the RSC, X is not dropped; it goes to the VC. Soon after, the cache puts X back into
the RSC through a randomly chosen division. That division uses a different
mapping, so X most likely lands in a different set. The only line that
really leaves the cache is the oldest line in the VC, and that line has
nothing to do with the conflict that started the chain. Seen from outside,
evictions look like those of a fully associative cache with random
replacement. That cache type leaks only how much of the cache each program occupies.

This repository holds synthesizable RTL for such a cache, built as a
16 MB, 16-way last-level cache with 4 divisions and an 8-entry victim cache.
It also holds self-checking testbenches for every module.

## Organisation of the storage

```
            line address
                 |
        +--------+--------+  keys K0..K3
        |  idf (4 ciphers) |<-----------
        +--+----+----+----+
       idx0| idx1| idx2| idx3
           v     v    v    v
   +--------+--------+--------+--------+      +----------------------+
   |  D0    |  D1    |  D2    |  D3    |      | victim_cache, 8 slots|
   | 4 ways | 4 ways | 4 ways | 4 ways |      | FIFO insert pointer  |
   | 16384  | 16384  | 16384  | 16384  |<---->| reinsert pointer     |
   |  sets  |  sets  |  sets  |  sets  | swap +----------------------+
   +--------+--------+--------+--------+              |
            rsc (16 x rsc_way_ram)                     v dirty lines
                                                   to memory
```

* **RSC** (`rsc`, `rsc_way_ram`). `WAYS` ways are split evenly into `DIVS`
  divisions. Division *i* is indexed by its own set index `idx_i`. Each way is
  one synchronous single-port RAM of `SETS` words, and each word holds valid,
  dirty, the full 42-bit line address as tag, and 512 bits of data. The whole line
  address is needed as tag because the divisions use unrelated set indices.
* **Index derivation function** (`idf`, `idf_cipher`). Each division encrypts the line address under its own
  64-bit key. The low `log2(SETS)` ciphertext bits are that division's set
  index.
* **Victim cache** (`victim_cache`). `VC_ENTRIES` lines in flip-flops, looked up
  associatively in the same cycle as the RSC.
* **Random source** (`cc_prng`). It picks the division a line is inserted into and
  the way inside that set (random replacement).
* **Controller** (`chameleon_cache`, the top). A state machine runs the cache's
  five operations: Init, Lookup, RSC Insert, RSC Reinsert and Automatic RSC
  Reinsert.

## What happens on an access

The controller handles one operation at a time.

1. **Accept (IDLE).** The request's line address goes through the IDF. Every
   division reads its set. A random division *d* and a random way *v*
   are drawn at the same moment. Together they name the *replacement candidate*:
   way *v* of set `idx_d` in division *d*.
2. **Look up (LOOK), one cycle later.** All tags of the sets read, and all VC
   tags, are compared with the address.
   * **RSC hit.** The data is returned. A write updates the way and marks it dirty.
   * **VC hit.** The data is returned in the *same* cycle an RSC hit would use.
     The line then swaps places with the replacement candidate: the hit
     line goes into the RSC and the candidate, valid or not, takes its VC slot.
   * **Miss.** A read fetches the line from memory (MRD, MWAIT). A full-line
     write needs no fetch.
3. **Insert (FILL).** The new line is written over the replacement candidate.
   If the candidate was valid, it moves into the VC slot under the insert
   pointer, and the insert pointer moves on. The line that held that slot
   leaves the cache. If it is dirty, it is written back (WB).
4. **Automatic reinsertion (RSEL, REIN).** Every VC line that arrived through
   step 3 is handed back to the RSC. Every fill is followed by a two-cycle
   reinsertion slot. In the first cycle (RSEL) the controller takes the VC line
   at the reinsert pointer, computes that line's own set indices and reads
   them, and draws a random division and way. In the second cycle (REIN) it
   swaps the VC line with that RSC way. The slot lasts two cycles even when
   there is nothing to reinsert. The line that comes out of the RSC takes
   the VC slot. It is not queued for reinsertion. It stays in the VC until the insert
   pointer comes round to its slot and pushes it out to memory.

Reinsertion usually sends a line to a different division, and so to a
different set, from the one it was evicted from. The conflict that evicted it is
undone, and whatever is pushed out next is unrelated to it.

## The victim cache's two pointers

This is the part of the design that is easiest to get wrong.

* The **insert pointer** names the slot the next RSC eviction goes into. It
  advances after each insert and wraps at `VC_ENTRIES`, so the VC replaces its
  lines first-in first-out.
* The **reinsert pointer** names the oldest slot whose line still has to go back
  to the RSC. It advances after each automatic reinsertion. It also advances past
  a slot that holds no valid line; that happens when a VC hit swapped the slot's line
  with an empty RSC way.
* Instead of comparing two wrapping pointers, the VC counts the **pending**
  reinsertions, from 0 to `VC_ENTRIES`. With this controller the count is
  at most 1: a fill makes one line pending, and the slot right after the
  fill reinserts it.
* **Overflow.** The `victim_cache` module also copes with a controller that
  lets reinsertions fall behind. If all `VC_ENTRIES` lines are waiting, the
  next insert overwrites the oldest of them, and the reinsert pointer moves on
  with it (output `overflow`). The controller here never lets this happen.
* A **VC hit** swaps its own slot and leaves both pointers alone. If that slot was
  waiting for reinsertion, the line that took its place is reinserted in its turn.

Both pointers act on the slot they name and then advance. A literal reading
of the published pseudo-code would pre-increment one pointer and
post-increment the other, and the first reinsertion would then read the
wrong slot.

## Index derivation function

`idf_cipher` is a 4-round balanced Feistel network on the 42-bit line address,
with two 21-bit halves. Round *r* computes `L' = R`,
`R' = L xor F(R, k_r)`, where

```
F(x, k): t = x ^ k;  t = t + rotl(t,7);  t = t ^ rotl(t,18);  t = t + rotl(t ^ k, 11)
k_r    = low 21 bits of rotl64(K, 13*r)  xor  ((0xA5F3C + 0x13579*r) mod 2^21)
```

(all arithmetic mod 2^21, rotations on 21 bits). A Feistel network is a
permutation for every key, so distinct addresses stay distinct. The cipher
has the structure the design needs: keyed, invertible, and independent per division.
It is **not** a vetted cipher. A product should use an analysed low-latency
block cipher of the same interface. The IDF is combinational and sits in
front of the RAM address in the accept cycle, which makes it the longest path
of the design.

## Timing and indistinguishability

An attacker who can tell a VC hit from an RSC hit sees every line that moves
into the VC, and so sees the contention the VC is meant to hide. Both kinds of
hit therefore answer at the same time: `rsp_valid` is high **two cycles**
after the cycle in which the request is accepted, wherever the line was found.
All latencies below count cycles that way.

| operation | cycles |
|---|---|
| Init after reset | `SETS` (16384), one set index cleared in all ways per cycle |
| hit (RSC or VC), from acceptance to `rsp_valid` | 2 |
| read miss, from acceptance to `rsp_valid` | 4 + memory latency (cycles from the first with `mem_rd_valid` high to the one with `mem_rsp_valid` high) |
| full-line write miss, from acceptance to `rsp_valid` | 3 |
| after a miss response, until `req_ready` | 2 (reinsertion slot) + write-back handshake, if any |

The reinsertion slot has a fixed length and always directly follows a fill.
So the time a miss keeps the cache busy does not show whether the fill
pushed a line into the VC, or whether a line was reinserted. A request never
waits for a reinsertion. One effect remains visible: a miss that pushes a
dirty line out of the VC is busy for the write-back handshake after its
response. Hiding that would need a write buffer.

## Interface of `chameleon_cache`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `keys` | in | `DIVS` x 64 | IDF keys, one per division |
| `init_done` | out | 1 | Init sweep finished, requests accepted from now on |
| `req_valid` / `req_ready` | in / out | 1 | request handshake; hold the request stable until accepted |
| `req_write` | in | 1 | 1 = full-line write, 0 = read |
| `req_addr` | in | 42 | line address (48-bit physical address without the 6 offset bits) |
| `req_wdata` | in | 512 | write data |
| `rsp_valid`, `rsp_data`, `rsp_hit` | out | 1, 512, 1 | response, one cycle wide; for a write, `rsp_data` echoes the data written |
| `mem_rd_valid` / `mem_rd_ready`, `mem_rd_addr` | out / in, out | 1, 42 | line fetch request |
| `mem_rsp_valid`, `mem_rsp_data` | in | 1, 512 | fetched line |
| `mem_wr_valid` / `mem_wr_ready`, `mem_wr_addr`, `mem_wr_data` | out / in, out | 1, 42, 512 | write-back of a dirty line leaving the VC |
| `events` | out | `cc_events_t` | one-cycle pulses: `rsc_hit`, `vc_hit`, `miss`, `rsc_evict`, `vc_evict`, `writeback`, `auto_reinsert` |

Parameters, with their defaults: `SETS` = 16384, `WAYS` = 16, `DIVS` = 4,
`VC_ENTRIES` = 8, `ROUNDS` = 4 and `SEED`, the seed of the random generator.
`SETS` must be a power of two, and `WAYS` a multiple of `DIVS`. For the random choices to be
uniform, `DIVS` and `WAYS/DIVS` should be powers of two.

## Where this RTL follows the published design and where it chooses

Taken from the published description:
* The RSC, with `w/d` ways per division, one set index per division, and
  skewing by division.
* An IDF that encrypts the address under one key per division and slices
  set-index bits out of the ciphertext.
* A fully associative VC with FIFO insertion and automatic reinsertion in
  insertion order.
* Insertion into a uniformly random division.
* A VC hit swaps its line with a line of the RSC.
* Reinsertion swaps the VC line with an RSC line.
* Random replacement, Init of all lines to invalid, and equal hit latency for RSC and VC.
* The sizes: 16 MB and 16 ways (the paper's simulated L3), 4 divisions and 8 VC entries
  (one of the evaluated configurations).

Chosen here, because the description leaves it open:
* The cipher, the 64-bit keys, the 48-bit physical address and the 64-byte lines.
* One operation at a time, rather than a pipeline.
* When automatic reinsertion runs. The published text says only that it is
  triggered periodically, and that contention between reinsertion and
  requests was measured and never seen. Here it runs in a fixed slot after
  every fill.
* The one-cycle RAM read, the two-cycle hit and the one-set-per-cycle Init.
* The candidate way is drawn at random even when the set has an empty way.
  The published pseudo-code allows the candidate to be empty.
* The pointer convention and the overflow rule of the VC (see above).
* Full-line writes with a dirty bit, and write-back of dirty lines only. The
  published algorithms only read, and say a line is "evicted to memory".
* The whole 16 MB is one cache. The published evaluation speaks of cache
  slices but does not give their number.

Not built:
* **Changing the keys.** The mapping is meant to be changed regularly.
  The method (key source, and relocating or flushing resident lines) is not
  described. Here the keys are inputs, and changing them while lines are
  resident makes those lines unreachable.
* **The cores, the upper-level caches and the memory.** The testbenches use a
  behavioural memory model (`tb/mem_model.sv`).

## Size

At the defaults, each of the 16 way RAMs is 16384 x 556 bits, 145.8 Mbit in
all: 128 Mbit of data and 17.8 Mbit of tag and state. The VC adds 8 x 556
flip-flops. Control and IDF logic is small: about 730 word-level cells and
6.7 kbit of flip-flops, most of them the VC slots and the request and
write-back buffers.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

| testbench | module | what it checks |
|---|---|---|
| `tb_idf_cipher` | `idf_cipher` | against an independent model of the cipher; decryption round trip; key sensitivity |
| `tb_idf` | `idf` | indices against the model; even spread over the sets; divisions disagree (skew) |
| `tb_rsc_way_ram` | `rsc_way_ram` | reads and writes against an array model; read latency; output held |
| `tb_rsc` | `rsc` | per-division sets, write, clear and lookup against a [division][set][way] model |
| `tb_cc_prng` | `cc_prng` | xorshift recurrence, seed, uniform low bits |
| `tb_victim_cache` | `victim_cache` | slots, both pointers, pending count, overflow, lookup against a model |
| `tb_chameleon_cache` | top, 16 sets x 4 ways, 2 divisions, 4 VC entries | 6000 random reads and writes with a data scoreboard; write-back data; 2-cycle hit latency for RSC and VC hits; the same busy time after a miss whether or not a line moved into the VC; every mechanism above occurs |
| `tb_chameleon_full` | top at default size | Init time; miss, then hit, on 64 random lines; data; hit and read-miss latency |
| `tb_eviction_rate` | top, 256-line configurations | eviction probability of random eviction sets, see below |

`tb/tb_pkg.sv` holds the reference cipher and the memory's initial-content
function. To run a testbench with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/cc_pkg.sv tb/tb_pkg.sv rtl/*.sv tb/mem_model.sv tb/tb_chameleon_cache.sv \
    --top-module tb_chameleon_cache
./obj_dir/Vtb_chameleon_cache
```

(Verilator warns that `rtl/cc_pkg.sv` appears twice; this is harmless.) The
full-size testbench builds in about 10 s and runs in well under a second. Its
RAMs take about 20 MB.

The testbenches check behaviour and data integrity, but not security.
Whether the eviction patterns really resemble those of a fully associative
cache is a statistical question. `tb_eviction_rate` measures one such
statistic on the RTL; the published security evaluation used a software
model.

## Eviction rate of random eviction sets

`tb_eviction_rate` runs the published eviction experiment on small caches of
256 lines with 8 divisions and 8 or 2 VC entries. The cache is full. A target line is read. Then
4 x `WAYS` fresh random lines are read, and the target is read again. A miss
means the target was evicted. Each configuration runs 1000 trials. The
expected rate is worked out by hand, and the check allows +-0.06 around it:

```
p = 1/WAYS + (1 - 1/WAYS) * (1 - (1 - 1/256)^(4*WAYS - VC_ENTRIES))
```

The first term covers one case. The line the target displaced is reinserted
into exactly the target's way, with probability 1/WAYS, and the two lines
swap. The target then sits in the VC and is pushed out. Otherwise, each
access of the eviction set beyond the first `VC_ENTRIES` throws out a roughly
random one of the 256 lines.

| configuration | measured | expected | published curve (read off the plot) |
|---|---|---|---|
| 16 ways, 16 sets, 8 VC entries | 0.227 | 0.247 | about 0.16 |
| 8 ways, 32 sets, 8 VC entries | 0.208 | 0.203 | about 0.11 |
| 16 ways, 16 sets, 2 VC entries | 0.268 | 0.264 | about 0.17 |
| 8 ways, 32 sets, 2 VC entries | 0.212 | 0.222 | about 0.13 |

The RTL agrees with the formula. Both rates are higher than the published
curves. Part of the gap is the same-way swap case, which makes up about a quarter
(16 ways) to over half (8 ways) of the measured rate. It is
a consequence of the algorithm as published, in which reinsertion may pick any way.
For large caches the formula tends to 1/WAYS (0.0625 and 0.125). The published
curves level off near 0.04 and 0.075, about 0.63/WAYS, so their protocol
differs in a way that scales this case down. One guess is a cache that is
not full. A trial run on a freshly reset cache holding 256 random reads came
closer (0.21 and 0.14 with 8 VC entries) but did not match. The published
description does not say enough to settle it, so the testbench prints the
published values but does not check them.

The published Prime+Prune+Probe experiments are not repeated here. Building
an eviction set needs the victim's access to the target to be repeated, so
the target has to be flushed in between, and this cache has no flush
operation.
