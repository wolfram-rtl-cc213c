# WoLFRaM: wear-leveling and repair through programmable row decoders

Resistive memories such as phase-change memory (PCM) wear out: each cell
survives only a limited number of writes, on the order of 10^8. Programs do
not write evenly, so a few hot rows would die long before the rest. The usual
fixes come in two separate pieces. A wear-leveler moves data around to even
out the writes. A fault-tolerance scheme handles cells that have already
failed. Both normally need their own address-translation tables.

WoLFRaM does both with one piece of hardware: a **programmable row decoder**.
In an ordinary bank, decoder row *i* is wired to respond to address *i*. In a
WoLFRaM bank, every decoder row *stores* the address it responds to. Rewriting
those stored addresses moves data to another physical row while its address
stays the same. That is all a wear-leveler needs. It is also all a repair
scheme needs: disable the decoder row in front of a worn-out memory row, and
program its address into a spare one.

This repository holds a SystemVerilog model of one WoLFRaM bank and its
controller:

- the programmable decoders, swap buffer and command sequencing are
  synthesizable RTL;
- the PCM cell array is a behavioural model;
- self-checking testbenches cover each block, the whole bank end to end, the
  bank at full size, and a repeated-address wear-out attack.

## Contents

| file | what it is |
|---|---|
| `rtl/wolfram_pkg.sv` | sizes, timing, thresholds, command encodings |
| `rtl/prad.sv` | programmable resistive address decoder (one or a group) |
| `rtl/rb_sb_buffers.sv` | row buffer and swap buffer |
| `rtl/pcm_array.sv` | behavioural model of the cell array (not synthesizable) |
| `rtl/wolfram_bank.sv` | the bank: global and local decoders, buffers, array, command sequencing, write verification |
| `rtl/decision_queue.sv` | precomputed random remap decisions |
| `rtl/wolfram_controller.sv` | the per-bank WoLFRaM controller |
| `rtl/wolfram_top.sv` | bank plus controller, the unit a memory controller talks to |
| `tb/*_tb.sv` | one self-checking testbench per block, plus `wolfram_top_full_tb` (full size) and `wolfram_attack_tb` (attack workload) |

## The programmable decoder (`prad`)

Each decoder row holds three things:

- an address of `ADDR_W` bits. In silicon each bit is a pair of resistive
  elements (S, S̄). Here it is a register bit.
- an *occupied* bit. It is set when an address is programmed into the row and
  cleared when the row's data is deleted.
- a *disabled* bit, for a row whose memory row has failed.

A lookup compares the input address with every row at once:

    row_sel[e] = AND over bits i of XNOR(addr[i], stored[e][i])  &  occupied[e]  &  !disabled[e]

`hit` is the OR of all row selects. `hit = 0` is how the rest of the design
learns that an address is not mapped anywhere, i.e. that it has been mapped
out. `empty_idx` gives the lowest row that is neither occupied nor disabled,
which is where a failed block's address goes.

Four programming operations take effect at the clock edge:

- `PROG`: store an address, set occupied.
- `CLEAR`: clear occupied.
- `DISABLE`: set disabled, clear occupied.
- `SWAP`: exchange two rows' stored addresses and occupied bits.

An assertion checks that at most one row is ever selected. The design only
swaps addresses or programs addresses that are not mapped, so the mapping
stays one-to-one.

After reset the decoder holds the identity map. Rows `0 .. ENTRIES-SPARES-1`
respond to their own index. The last `SPARES` rows are empty and their
addresses are unmapped. This reset state stands in for the initial
programming a real part would get at manufacture. With the defaults (512
rows, one spare) addresses 0..510 are usable and row 511 is the spare.

One `prad` instance can hold a group of `DECODERS` decoders with a
`dec_sel` input. The bank keeps all 2048 local decoders of a bank in one
instance. A lookup only compares the rows of the selected decoder, so
simulating a full-size bank costs 512 comparisons per cycle, not a million.

## Two-level decoding in the bank (`wolfram_bank`)

A row address has two parts:

- the subarray part (`SW` = 11 bits), translated by a **global** decoder that
  picks one of 2048 physical subarrays;
- the local part (`LW` = 9 bits), translated by that physical subarray's own
  **local** decoder, which picks one of its 512 rows.

Both decoders are PRADs. Rewriting a local decoder moves one block (row)
inside its subarray. Rewriting the global decoder moves a whole subarray.
Each row is 1 KB, so the bank holds 2^20 rows = 1 GB. A read or write moves
one 64-byte burst, i.e. one of 16 columns of the row buffer.

The bank accepts one command per cycle in which `ready = 1` and is busy for
the command's latency (in memory-clock cycles).

Host commands (`mc_*`) always use the row buffer:

| command | latency | effect |
|---|---|---|
| ACT | tRCD = 22 | look up the address, read the row into the RB; `mc_miss` = 1 if the address is mapped out |
| RD | tCL = 5 | `mc_rdata` valid (`mc_rvalid`) in the cycle `ready` returns |
| WR | tCCD = 4 | write one burst into the RB, mark it dirty |
| PRE | tRP = 60 | if the RB is dirty, write it back and verify; the address is looked up again at this point |

Controller commands (`wl_*`, with `wl_done` / `wl_result` at the end):

| command | latency | effect |
|---|---|---|
| PROBE | 3 | look up (sub, loc); result = the decoder's OR output |
| ACT | tRCD | read (sub, loc) into the RB or SB |
| PRE | tRP | write the RB or SB to (sub, loc) and verify |
| SWAP_LOCAL | T_PROG + 3 | exchange the local-decoder rows holding loc and loc2 |
| SWAP_GLOBAL | T_PROG + 3 | exchange the global-decoder rows holding sub and sub2 |
| REMAP_BLOCK | T_PROG + 3 | disable the row holding (sub, loc) and program loc into an empty row of the same subarray; result 0 if none is left |

Every array write is followed by a **read-after-write verification**. The
outcome (`pre_ev`, `pre_fail`, plus the buffer and address) goes to the
controller. The host's PRE looks the address up again when it executes. If
the controller has moved the open block in the meantime, the write-back
lands in the block's new place.

Notes on the latencies:

- T_PROG, the time to reprogram a decoder row, is not published. It is set to
  one array write (60 cycles).
- tWL, tWTR, tWR, tRTP and tRRD are spacing rules for the host's scheduler and
  are not modelled.
- The bank needs tRCD, tCL and tCCD ≥ 3 and tRP ≥ 4. Elaboration fails with
  smaller values.

## Row buffer and swap buffer (`rb_sb_buffers`)

PCM decouples its sense amplifiers from the row buffer. That leaves room for
a second row-wide register, the **swap buffer** (SB), hung off the same
sense amplifiers and write drivers through multiplexers:

- `load` / `load_sel` latch the sensed row into one of the two buffers.
- `wd_sel` picks which buffer drives the write drivers.
- Only the RB has the column port the host reads and writes.
- The RB keeps a dirty flag, so a host PRE of an unmodified row costs no
  array write and causes no wear.

The SB lets the controller hold a second row while the host's row stays open
in the RB. That is what makes the block swap cheap.

## Block remap-and-swap

This is the central mechanism. Suppose the host has opened row RA1, and has
just written new data into the RB, so RA1's newest content exists only in
the RB. If this write was picked for remapping, the controller does this:

1. **Stall.** It raises `stall` in the cycle after it sees the WR accepted.
   The host must issue nothing to the bank while `stall = 1`.
2. **Pick a partner.** It draws a random local row RA2 in the same subarray
   and PROBEs it. If RA2 is RA1 itself, or is mapped out (OR output 0), it
   draws again. After `MAX_RETRY` (16) failed draws it gives up.
3. **ACT RA2 → SB.** RA2's data is now in the swap buffer.
4. **SWAP_LOCAL RA1, RA2.** The two decoder rows exchange addresses.
   Address RA1 now selects RA2's old physical row, and the reverse.
5. **PRE SB → RA2.** RA2's data is written to RA2's new physical row, which
   is RA1's old one.
6. **Resume.** `stall` falls. Later the host's own PRE writes the RB to
   address RA1. The bank looks RA1 up at that moment, so the data goes to
   RA2's old physical row.

The result: the two blocks have exchanged physical places and kept their
addresses. It cost one extra array write (step 5), and the host never saw
anything but a stall. At the default timing the stall lasts about
PROBE + tRCD + T_PROG + tRP plus a few cycles of handshaking: 156 cycles
in the full-size test, which includes one reattempt.

Why the written block is the one that moves: a write is remapped with
probability σ1, so an address is moved more often the more it is written.
Hot addresses do not stay in one place long enough to wear it out. Cold ones
are left alone.

A second remapped write to a row that is still open simply repeats the
sequence with a new partner. Each swap updates the decoder, and the host's
final PRE follows the address wherever it is by then.

## Subarray remap-and-swap

With probability σ2 a write also marks its subarray S1 for a whole-subarray
exchange. The row buffer is busy with the host's row at that moment, so the
controller waits for the host's PRE and then stalls the host. Then:

1. **Pick a partner.** It draws a random partner subarray S2 ≠ S1.
2. **Check compatibility.** It PROBEs every local address in both subarrays.
   An exchange only works if both subarrays map the same set of local
   addresses. If they differ (blocks mapped out in one but not the other),
   it draws another S2.
3. **Exchange the data.** For every local address `a` mapped in both:
   ACT (S1,a) → RB, ACT (S2,a) → SB, PRE RB → (S2,a), PRE SB → (S1,a).
4. **SWAP_GLOBAL S1, S2.** The global decoder exchanges the two subarrays.
   Each subarray address now selects the physical subarray that holds its
   data.
5. **Resume.** `stall` falls.

This costs two array writes per row, over 80,000 cycles at full size. That
is why σ2 (0.002 %) is set 500 times lower than σ1 (1 %).

The exchange order (data first, global decoder last) and the compatibility
check are choices of this design. The published description only says that
every block of the subarray is remapped and swapped like a single block,
with the global decoder reprogrammed instead of the local one.

## Random decisions (`decision_queue`)

Whether to remap is decided by comparing a 32-bit random number `r` with two
thresholds:

- `r ≤ SIGMA1` (42,949,672, i.e. 1 %) marks a block remap-and-swap;
- `r ≤ SIGMA2` (85,898, i.e. 0.002 %) marks a subarray remap-and-swap.

The random source (a true random number generator) is outside this design.
Its words arrive on `rnd_valid` / `rnd_data` / `rnd_ready`.

So that the generator is never on the critical path, decisions are made
ahead of time:

- While the controller is idle, or waiting to draw a partner, the queue takes
  two words per entry: the decision word, and a target word whose low `LW`
  bits give a local partner row and whose next `SW` bits give a partner
  subarray.
- It keeps up to `QDEPTH` (8) entries.
- Each host WR pops one entry, and its target is the first partner tried.
- Each reattempt pops a further entry for a new partner.
- A WR that finds the queue empty is not remapped. This is counted in
  `n_no_decision`.

## The stall pin

`stall` is one extra pin from the controller to the host memory controller.
The host may issue a command only in a cycle where `bank_ready = 1` and
`stall = 0`. `wolfram_top` asserts this rule.

- `stall` rises one cycle after the command that starts an operation (a WR
  picked for a block swap, or a PRE that starts a subarray swap or a repair)
  has been accepted, while the bank is still busy with that command.
- It falls when the operation's last command completes. The falling edge is
  the "resume" signal.

Because `stall` is high whenever the controller is not idle, the host can
simply treat it as "bank busy".

## Repairing failed blocks, and how repair and wear-leveling meet

Every PRE verifies what it wrote. When a verification fails, the data is
still in the buffer that was written. The controller stalls the host and
issues REMAP_BLOCK:

- the bank disables the local decoder row in front of the failed memory row;
- it programs the same address into the lowest empty row of that subarray.

The controller then repeats the PRE from the same buffer. The block keeps
its address and its data and now lives in a healthy row; the failed row is
never selected again. If the new row fails too, the repair repeats. If the
subarray has no empty row left, the subarray is treated as terminally
failed and moved to a spare subarray (next section). Only when no spare is
left, or the failure happens in the middle of a swap that holds both
buffers, is the block **mapped out**: its address no longer matches any
decoder row, its data is lost, and later host ACTs to it return
`mc_miss = 1`.

Repair covers every write the design makes:

- the host's PRE (data in the RB);
- the SB write-back of a block swap;
- both write-backs of each row in a subarray swap.

Mapped-out blocks are why wear-leveling needs the decoder's OR output. A
random partner may now be an address that exists nowhere. PROBE finds this
in 3 cycles, without touching the array, and the controller draws again. A
subarray swap also needs both subarrays to map the same addresses, hence the
compatibility check above.

## Moving a failed subarray to a spare one

The global decoder starts with `GLOBAL_SPARES` (default 1) empty rows, one
for each of the highest subarray addresses. Those addresses are unmapped, so
the host sees one subarray fewer. When a host PRE fails verification and its
repair finds no empty row, the failed block is still in the row buffer and
the controller, still stalling the host, does the following:

1. SUB_ACTIVATE programs the temporary address 2^SW - 1 into the lowest
   empty global decoder row. That physical subarray is now reachable.
2. For every local address except the failed one:
   - if it is mapped in the failed subarray, ACT it into the swap buffer and
     PRE it to the same local address of the new subarray;
   - if not, DISABLE that address in the new subarray, so blocks that were
     mapped out stay mapped out.
3. SWAP_GLOBAL exchanges the two global decoder rows. The failed subarray's
   address now selects the new physical subarray.
4. SUB_RETIRE disables the global row that now holds the temporary address,
   the old physical subarray. The temporary address is unmapped again.
5. The failed block is written from the row buffer to its address, now in
   the new subarray, with the usual verification and repair.

At full size this takes about 44,000 cycles (510 blocks copied). The paper
says only that a subarray with a terminal failure "can be remapped to an
empty subarray by reprogramming the global PRAD". The trigger (no empty row
left), the spare count, the temporary address and the copy sequence are this
design's choices.

## The cell-array model (`pcm_array`)

The array is modelled behaviourally:

- Storage is sparse, keyed by physical (subarray, row), so a full 1 GB bank
  costs memory only for the rows actually written.
- A row never written reads as the word `0xA5000000 ^ {subarray,row}`,
  repeated. Tests use this to tell where data came from.
- Each row's writes are counted. A row fails when its count reaches
  `ENDURANCE` (0 = never) or when `fail_set` marks it.
- A failed row stores bit 0 inverted, so the next verification catches it.
- `cnt_sub` / `cnt_row` / `cnt` / `cnt_failed` read any row's count and
  state, which is how the attack test measures wear.

The write process uses blocking assignments to the associative arrays,
because nonblocking assignments to dynamic arrays are not allowed. Lint
reports this as BLKSEQ. Real cells would have an endurance that varies from
cell to cell (published: mean 10^8, 15 % coefficient of variation). The
model uses one fixed limit.

## Top level (`wolfram_top`)

One bank and its controller. The ports are:

- the host command bus (`mc_*`), `bank_ready` and `stall`;
- the random-word input (`rnd_*`);
- the array model's fault-injection and write-count ports;
- event counters: `n_blk_swap`, `n_sub_swap`, `n_retry`, `n_abort`,
  `n_repair`, `n_mapped_out`, `n_no_decision`, `n_sub_recover`.

In a full system there is one controller per bank, all on a separate chip on
the memory module. Each one snoops its bank's commands and issues its own,
so wear-leveling adds no traffic on the memory bus.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `SW`, `LW` | 11, 9 | subarray / local row address bits (2048 × 512 rows) |
| `ROW_W`, `BURST_W` | 8192, 512 | row and burst width in bits |
| `LOCAL_SPARES` | 1 | empty rows per subarray after reset |
| `GLOBAL_SPARES` | 1 | empty subarrays after reset (own choice) |
| `ENDURANCE` | 100,000,000 | writes until a row fails (model only) |
| `TRCD`, `TCL`, `TCCD`, `TRP` | 22, 5, 4, 60 | PCM latencies in cycles |
| `TPROG` | 60 | decoder reprogramming time (not published; assumed) |
| `QDEPTH` | 8 | decision-queue entries (not published; assumed) |
| `MAX_RETRY` | 16 | partner draws before an operation is dropped (not published; assumed) |
| `SIGMA1`, `SIGMA2` | 42949672, 85898 | thresholds: 1 % and 0.002 % of 2^32 |

## Simulating

All testbenches are self-checking. Each prints
`TB_RESULT checks=N failures=M` and stops, and each has a watchdog. With
Verilator 5:

    verilator --binary --timing --assert -y rtl rtl/wolfram_pkg.sv tb/wolfram_top_tb.sv \
              --top-module wolfram_top_tb
    ./obj_dir/Vwolfram_top_tb

Replace the testbench name for the others. The testbenches:

- `prad_tb`
  - replays the repair example on a 512-row decoder: row 190 fails, and
    address 190 moves to the spare row 511;
  - then runs 3000 random programming operations on a group of four small
    decoders against a reference model.
- `rb_sb_buffers_tb`: loads, column accesses, write-driver selection and the
  dirty flag.
- `pcm_array_tb`: storage, background, write counting and wear-out at
  endurance 5.
- `decision_queue_tb`:
  - threshold corners at the default σ1 and σ2;
  - a measured decision rate;
  - the handshake.
- `wolfram_bank_tb` (8 × 16 rows, default timing):
  - every command's latency in cycles;
  - PROBE;
  - a block swap done by hand;
  - a global swap;
  - repair and mapping out.
- `wolfram_controller_tb`: the controller against a scripted bank, checking
  the exact command sequences for the block swap with reattempts, repair,
  subarray swap, and a write with no decision.
- `wolfram_top_tb` (8 × 8 rows, short timing, raised σ1/σ2):
  - about 3000 random host transactions, with rows worn out at random and
    gaps in the random-word supply;
  - checks every read against a reference copy of the data;
  - fails unless block swaps, subarray swaps, reattempts, repairs, one move
    of a failed subarray to the spare, mapped-out blocks, writes without a decision, stalls and accesses to mapped-out
    addresses all occurred.
- `wolfram_top_full_tb`: the whole design at its default size and timing,
  through one block swap (with a reattempt), one subarray swap, one repair
  and one move of a failed subarray to the spare, checking data, physical
  placement and stall length. It runs in a few seconds.
- `wolfram_attack_tb`: the repeated-address attack on a 4 × 16-row bank with
  σ1 = 10 %.
  - 4000 writes to one address spread over most of the 64 physical rows;
  - the busiest row takes a couple of hundred writes;
  - the total write count accounts exactly for the swap writes.

## Where this model departs from the published design

- **Subarray failure recovery uses its own trigger.** The published design
  gives neither the failure criterion ("e.g., most of its memory blocks
  fail") nor the number of spare subarrays. Here a subarray is moved when a
  repair finds no empty row, and one spare is kept. A failure with no empty
  row that comes inside a swap, rather than from a host PRE, still maps the
  block out.
- **Choices where the description is silent:**
  - the decoder programming time;
  - the command encoding;
  - the PROBE command;
  - the probe-before-activate order of a block swap;
  - the subarray swap's data movement and compatibility check;
  - the queue depth;
  - the retry limit;
  - the behaviour when no decision is queued;
  - the RB dirty flag.
- **No delete command.** The decoder's CLEAR operation (data deleted, row
  becomes empty) exists, but the bank offers no command that uses it, as no
  host command for deleting a block is described.
- **Bursts and timing.** A burst moves in one cycle rather than as eight
  64-bit transfers. Host-side timing rules other than tRCD, tCL, tCCD and tRP
  are not modelled.
- **Endurance.** Endurance is one fixed number, not a per-cell distribution.
- **Not included:**
  - the random number generator;
  - the host memory controller;
  - optional per-block error correction (ECP or ECC), which the design is
    said to combine with.
- **Scope.** The model is one bank with one controller. The published system
  has one controller per bank, several banks, and a controller chip per
  module.
- **Not reproduced:** the lifetime, performance and energy results, which
  come from full-system simulation. The attack testbench shows the mechanism
  spreading writes, at a small size.
