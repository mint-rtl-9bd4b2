# MINT: a one-entry Rowhammer tracker inside the DRAM

Opening a DRAM row over and over (a Rowhammer attack) can flip bits in the rows
next to it. A DRAM chip can defend itself by refreshing the neighbours of a
heavily used row, but it only gets to do that inside the time of a regular
refresh command (REF, every 3.9 us in DDR5), and at most once per REF. It also
has room for only a few bytes of tracking state per bank. Counter tables that
find the heavy rows need hundreds of entries per bank; small trackers of a few
entries have been defeated by crafted access patterns.

MINT (Minimalist In-DRAM Tracker) starts from that limit: if only one row can be
treated per REF, one register for one row should be enough, provided the row is
chosen well. At each REF it draws a random number SAN uniformly from the
activation slots of the coming interval (DDR5 allows at most 73 activations,
ACTs, of a bank between two REFs). It then counts ACTs, and the row opened by
ACT number SAN is stored. At the next REF that row's neighbours are refreshed.
The choice is made before the attacker's rows are known, so every ACT has the
same chance, 1/74, of being the one mitigated, wherever it falls in the
interval. A row opened 73 times in a row is caught for certain.

This repository holds synthesizable SystemVerilog for MINT with its two
extensions for DDR5: transitive mitigation (against attacks that use the
mitigation refreshes themselves as hammers) and the Delayed Mitigation Queue
(for when the memory controller postpones REFs). It covers every bank of a
32-bank rank, and reduced-window variants for use with DDR5's RFM command.
An optional mode, off by default, also covers Row-Press, where a row does its
damage by being held open rather than by being opened often.

## One bank at a glance

```
             ACT row ─────────────┐
                                  v
  TRNG bits ─> urand_sel ─SAN─> mint_tracker ──SAR──┬──────────────┐
  (7/cycle)   (uniform 0..M)    SAN CAN SAR          │ pseudo-       │ REF, queue empty
                                   ^                 v mitigation    v
  REF/RFM ─────────────────────────┴──────> dmq (4 x 19 bit) ──> mitigation ─> victim_gen ─> rows to refresh
                                            oldest first at REF     register      (R±1, or R±2 transitive)
```

| module | role |
|---|---|
| `mint_pkg` | constants (73 ACTs, 17-bit rows, 4 DMQ entries, 7-bit TRNG, 32 banks) and the 19-bit `mit_req_t` (valid, level, row) |
| `urand_sel` | turns 7-bit TRNG words into a uniform SAN in 0..M |
| `mint_tracker` | the SAN, CAN and SAR registers |
| `dmq` | Delayed Mitigation Queue, 4-entry FIFO |
| `victim_gen` | victim row addresses of one mitigation |
| `eact_timer` | Row-Press mode only: open time of the bank's row, as a weight in ACTs |
| `mint_bank` | one bank: `urand_sel`, `mint_tracker`, `dmq`, `victim_gen` (and `eact_timer`) plus the REF decision |
| `mint_rank` | top: 32 banks, command decode |

## The tracker: SAN, CAN, SAR

`mint_tracker` holds three registers per bank, 33 bits in all:

* **SAN** (Selected Activation Number, 7 bits) is the slot picked for this
  interval.
* **CAN** (Current Activation Number, 7 bits) is 0 after a REF and counts ACTs
  1, 2, 3, ...
* **SAR** (Selected Address Register) holds the chosen row (17 bits), a valid
  bit and a one-bit level.

On an ACT, CAN increments. If the new CAN equals SAN, the ACT's row goes into
SAR and SAR becomes valid. On a REF that the tracker serves, SAR is handed out
for mitigation. SAN is then reloaded from the random source, CAN is cleared and
SAR is invalidated. An interval with fewer ACTs than SAN selects nothing. That
does not weaken the scheme, because an unused slot is equivalent to an ACT to a
harmless row.

Example: SAN = 3, and ACTs open rows A, B, C, D, E. C is held, and the next REF
refreshes C's neighbours.

### Slot 0: transitive mitigation

Refreshing a victim row is itself an activation of that row, and the tracker
cannot see it. An attacker who hammers row C non-stop makes MINT refresh B and D
at every REF, so B and D are opened 8192 times per 32 ms. That can disturb A and
E (the Half-Double attack). To cover this, the random draw includes one extra
value, 0, so there are 74 values in all. SAN = 0 never matches an ACT, because
CAN starts at 1. Instead it means "keep SAR": the row just mitigated stays in
SAR with its level raised to 1, and the next REF refreshes the rows at distance
2 (the victims of its victims). A victim pair is therefore refreshed
transitively with probability 1/74 of a direct mitigation.

Two details are this design's own, because the source is silent on them:

* The level is one bit and saturates. If SAN = 0 comes twice in a row, the
  design refreshes at distance 2 again; it does not move out to distance 3.
  Making the level wider (`LVL_BITS` in `mint_pkg`) gives the recursive form.
* If SAN = 0 is drawn while SAR is empty, that interval mitigates nothing.

### Where the random number comes from

The entropy source is a 7-bit true random number generator per bank. It is
analog and outside this RTL, so its bits come in on the `rng_bits` port. 74 does
not divide 128, so `urand_sel` uses rejection sampling. Every cycle it looks at
one word. If no unused value is held and the word is in 0..M, the word is kept.
The kept values are exactly uniform. About 58 % of words are accepted, so a new
value is ready within a few cycles. It is needed only once per interval, tens of
ACTs later (each ACT to a bank is at least 48 ns apart). If two re-arms ever come
closer together than the sampler can follow, the old value is reused and
`stale_rng` is raised for that cycle.

## Postponed refresh and the Delayed Mitigation Queue

DDR5 allows the controller to postpone up to four REFs and issue them later as a
batch, so up to 5 x 73 = 365 ACTs can arrive between two REFs. A tracker sized
for 73 would see ACT 74 onwards unguarded. An attacker could spend the first 73
ACTs on decoys and then hammer one row 292 times per batch with no risk.

Instead, ACT number 74 closes the window without a REF. This is a
*pseudo-mitigation*:

1. `mint_tracker` raises `pseudo` for that cycle. Its current SAR, if valid, is
   pushed into `dmq`.
2. The tracker re-arms as if a REF had come: new SAN, same SAN = 0 rule.
3. The overflowing ACT becomes ACT 1 of the new window. It is captured at once
   if the new SAN is 1.

At each REF (or RFM), `mint_bank` decides what to mitigate:

* If the DMQ holds an entry, the oldest one is mitigated, and the tracker is
  left alone so that its current window carries on.
* Only when the DMQ is empty does the tracker's own SAR get mitigated, and the
  tracker re-arms.

After a batch of five REFs, the four queued selections and then the live one
have all been mitigated, in order. A queued row waits for at most 4 x 73 = 292
ACTs. The workload testbench measures 291.

A push into a full queue can happen only if the controller postpones more REFs
than DDR5 allows. In that case this design drops the new entry and raises
`dmq_overflow`, keeping the older and more urgent ones. The source does not
specify this.

## Victim rows

`victim_gen` turns a mitigation (row R, level L) into `2*BLAST_RADIUS` row
addresses: R-d and R+d for d = L*BR+1 .. (L+1)*BR. With the default radius of
1, a normal mitigation refreshes R-1 and R+1 and a transitive one R-2 and R+2.
Rows beyond either end of the bank are marked invalid. The design assumes
physical row addresses. A chip that remaps rows internally would apply its own
mapping here.

## Row-Press mode: activations weighted by open time

A row kept open for a long time disturbs its neighbours as if it had been
opened several times. Counting that row once per ACT would let an attacker
hammer with few, long activations. With `IMPRESS = 1` (on `mint_bank` or
`mint_rank`) each activation is instead worth

    EACT = (tON + tPRE) / tRC

ACTs, where tON is the time from ACT to PRE. A row closed after the minimum
tRAS counts as 1.0. A row held open for ten row cycles counts as 10.0 and so
gets ten times the chance of selection.

* `eact_timer` holds the open row and counts clock ticks until PRE. One tick
  is taken to be tRC/32 (1.5 ns for tRC = 48 ns), so the division is a shift
  by 5. tPRE is 11 ticks (16 ns rounded up). The result has 7 fractional
  bits. It is clamped to at least 1.0 and at most 73.0, one whole window.
* CAN grows to 7+7 = 14 bits of fixed point. The tracker counts an activation
  when its row is closed, because only then is its weight known. The
  activation whose weight carries CAN from below SAN to SAN or above is the
  one stored in SAR.
* The window closes (a pseudo-mitigation, as with postponed REFs) when an
  activation would carry CAN past 73. That activation then opens the new
  window with its full weight.

With `IMPRESS = 0` and a weight of exactly 1 these rules reduce to the plain
ones above; the timer is then unused and synthesis removes it. The tick size,
tPRE, the clamps and the count-at-PRE timing are this design's choices.

## Rank top, commands and timing

`mint_rank` has one `mint_bank` per bank (32 by default). Each cycle carries at
most one command:

* `cmd_act`: opens `cmd_row` in bank `cmd_bank`.
* `cmd_ref`: an all-bank REF, a mitigation opportunity for every bank.
* `cmd_rfm`: a same-bank RFM for `cmd_bank`.
* `cmd_pre`: closes the open row of `cmd_bank`. Only Row-Press mode uses it.

All state updates on the rising edge of `clk`. `rst_n` is a synchronous,
active-low reset. After reset, nothing is selected until the first REF, because
SAN = 0 and SAR is empty.

A mitigation is reported one cycle after its command, per bank:

* `mit_valid`, and `mit` (row, level).
* `mit_from_dmq`: whether it came from the queue.
* `vict_valid` / `vict_row`: the victim rows, for the chip's refresh circuitry
  to refresh during tRFC.

`pseudo`, `dmq_overflow` and `stale_rng` are one-cycle event flags, and
`dmq_count` is the queue occupancy. The refresh circuitry and the DRAM array are
not part of this design.

Parameters of `mint_rank`:

| parameter | default | meaning |
|---|---|---|
| `NUM_BANKS` | 32 | banks in the rank |
| `RFM_TH` | 0 | 0: no RFM, window 73. 32 or 16: the controller sends RFM every RFM_TH ACTs and the window shrinks to RFM_TH (SAN in 0..RFM_TH) |
| `REFS_PER_MIT` | 1 | 2: only every second REF mitigates, window 146, CAN/SAN 8 bits. Set `RNG_BITS` to 8 as well |
| `TRANSITIVE` | 1 | 0: SAN in 1..M, no slot 0 |
| `DMQ_DEPTH` | 4 | queue entries |
| `BLAST_RADIUS` | 1 | victim rows per side |
| `NUM_ROWS` | 131072 | rows per bank |
| `RNG_BITS` | 7 | TRNG word width |
| `IMPRESS` | 0 | 1: Row-Press mode, activations weighted by open time (needs `cmd_pre`) |

After synthesis, one bank holds 69 flip-flop bits and 76 memory bits. The
memory bits are the queue: 4 entries x 19 bits, matching the budget of about 15
bytes per bank. The flip-flops are:

* 33 bits for the tracker.
* 8 bits for the held random value.
* 7 bits for the queue pointers and count.
* 21 bits for the registered mitigation output.

## What the analysis promises, and what the testbenches check

The security argument rests on a few properties of the selection rule. These
can be checked in simulation; the failure probabilities derived from them
cannot. The table shows the testbench that checks each property. All of them
count it.

| property | where checked |
|---|---|
| a row hammered for a full window is always mitigated (unless slot 0 repeats the previous row) | `tb_mint_bank`, `tb_mint_rank`, `tb_mint_workloads` (also with RFM32/16 and half rate) |
| every slot equally likely; pattern-1 (1 ACT per interval) picked with p = 1/74; pattern-2 (73 distinct rows) each 1/74; pattern-3 (4 copies) 4/74 | `tb_urand_sel` (histograms), `tb_mint_workloads` (binomial, ±5σ) |
| double-sided attack: the shared victim is refreshed by every normal mitigation | `tb_mint_workloads` |
| postponed REFs: 4 queued selections served oldest first, wait at most 292 ACTs | `tb_mint_bank`, `tb_mint_workloads` |
| adaptive attack: after switching to 365 ACTs on one row under postponement, that row is mitigated within the next batch of 5 REFs | `tb_mint_workloads` |
| Row-Press mode: a row open 10 tRC is picked in about 10/74 of windows, one open a whole window always | `tb_mint_impress` (also bank and rank against the model) |
| EACT for every open time, at both clamps | `tb_eact_timer` |
| fixed-point CAN: the activation that carries CAN across SAN is selected; the window closes past 73.0 | `tb_mint_tracker` |

`tb_mint_bank` and `tb_mint_rank` compare every cycle against an independent
cycle-level model (`tb/mint_model_pkg.sv`). `tb_mint_rank` runs the 32-bank top
at its default parameters. It drives regular and postponed refresh, over-long
postponement and RFM, and fails if any of these mechanisms never occurs:
mitigation at REF, transitive mitigation, pseudo-mitigation, DMQ service, DMQ
overflow, empty REF, RFM mitigation, victim dropped at a bank edge.

## Running it

Every testbench ends with one line `TB_RESULT checks=N failures=M`. For
example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/mint_pkg.sv tb/mint_model_pkg.sv tb/tb_mint_rank.sv --top-module tb_mint_rank
./obj_dir/Vtb_mint_rank
```

The testbenches are `tb_urand_sel`, `tb_mint_tracker`, `tb_dmq`,
`tb_victim_gen`, `tb_eact_timer`, `tb_mint_bank`, `tb_mint_rank`,
`tb_mint_workloads` and `tb_mint_impress`. Each runs in under 15 seconds. The random source in every testbench is
`$urandom`.

## Departures and limits

* **Slot range.** The basic scheme draws SAN from 1..73. This design draws from
  0..73 by default, the form with transitive mitigation. `TRANSITIVE = 0` gives
  the basic scheme.
* **SAR width.** The register budget usually quoted for MINT is 32 bits, with an
  18-bit SAR (row and valid). Here SAR also carries the level bit, so it has the
  same 19-bit format as a queue entry and a transitive selection keeps its level
  when it is queued. That makes the tracker 33 bits.
* **Queue depth with RFM.** RFM commands can also be postponed, by several
  times more than REFs. The queue stays at 4 entries by default; raise
  `DMQ_DEPTH` if the controller postpones RFM further.
* **Choices not fixed by the source.** These are all flagged in the module
  headers:
  * the level saturating at one bit;
  * SAN = 0 with an empty SAR wasting the interval;
  * the tracker re-arming at a pseudo-mitigation, with the overflowing ACT as
    slot 1;
  * the tracker left untouched while the DMQ is served;
  * the overflow policy of the DMQ;
  * the blast radius of 1;
  * the reset state;
  * the command encoding and the one-cycle output register.
* **Row-Press mode.** It is built but off by default, because the main
  analysis leaves Row-Press out. How its weights interact with the window
  limit and the DMQ is this design's reading (see above).
* **Analog and system parts.** The TRNG, the DRAM array with its refresh
  circuitry, and the memory controller's RFM counter are outside the RTL. The
  TRNG comes in as a port. The RFM counter is modelled in `tb_mint_workloads`
  (RFM after every RFM_TH ACTs to a bank).
* **What simulation cannot show.** The MinTRH figures of the analysis (for
  example 1482 double-sided activations with the DMQ, 356 with RFM16) are
  probability results over 8192-interval refresh windows. The testbenches check
  the selection statistics those figures rest on, not the figures themselves.
