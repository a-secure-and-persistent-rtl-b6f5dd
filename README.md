# SecPM memory controller in SystemVerilog

A persistent-memory system that encrypts its non-volatile main memory has to
persist two things for every line it writes: the ciphertext and the counter
that produced it. If power fails after one has reached NVM and the other has
not, the line can never be decrypted again. SecPM ("A Secure and Persistent
Memory System for Non-volatile Memory") solves this inside the memory
controller with two ideas:

* **Counter write-through with an atomic register.** The counter cache never
  holds dirty data. Every counter update is written to the cache and, at the
  same time, a copy is staged next to the encrypted data line in a two-line
  register. Both lines enter the battery-backed write queue in one clock
  cycle. A flush is acknowledged only after that, so either both lines
  survive a power failure or neither does, and an acknowledged flush always
  survives.
* **Counter write reduction (CWR).** Sixty-four lines of a 4 KB page share one
  64-byte counter line. When flushes hit neighbouring lines, as log and data
  writes of a transaction usually do, the write queue keeps only the newest
  copy of each counter line. An older queued copy is removed when a newer one
  arrives. This removes most of the extra counter writes.

The RTL here implements the controller: pad generator, counter increment,
write-through counter cache, atomic register, write queue with CWR, the
re-encryption status register, and the controller that ties them together,
including page re-encryption on counter overflow and the save/restore path
used on power failure. The NVM device, the battery backup and the CPU with its
caches are outside the design. The testbenches provide a behavioural NVM
model and drive the CPU port directly.

## Counters and the one-time pad

Memory is encrypted in counter mode. The pad for a line is a function of a
secret key, the line address and the line's counter. The 64-byte line is
XORed with this pad on both the write and the read path. A counter is never
reused for the same address, so the pad is new on every write.

Counters are split. Each 4 KB page (64 lines) has one 64-bit *major* counter
and 64 seven-bit *minor* counters, one per line. A line's counter is
`{major, minor}`. Together they are exactly 64 bytes, one counter line per
page (`secpm_pkg`):

```
bit 511            448 447     441 440     434        6       0
    [ major (64 bits) ][ minor 0 ][ minor 1 ] ... [ minor 63 ]
```

`otp_gen` builds the 512-bit pad from four AES-128 blocks computed in
parallel. Block `b` (0..3) encrypts the 128-bit seed
`{line address zero-extended to 32 bits, major, 1'b0, minor, 22'b0, b}`.
Block 0 gives the top 128 bits of the pad. The AES core (`aes128_enc`) runs
one round per clock, expanding the round keys on the fly. Its S-box is
computed at elaboration from the field inverse and the affine map, so no
table is stored. The result is held back until `LATENCY` cycles (default 80,
which is 40 ns at 2 GHz) so that the controller sees the intended
encryption latency. A real AES circuit of that latency would be pipelined
differently. Only the latency is modelled faithfully.

`ctr_incr` is the combinational "counter++" step. It increments the minor
counter of one line. If that minor counter is already 127, it instead
increments the major counter, sets the line's minor counter to 0 and raises
`overflow`.

## A flush, step by step

A flush of line A with plaintext P goes through these steps (`secpm_mc`):

1. **Read the counter line.** The lookup is 12 cycles on a hit. On a miss,
   the line is fetched from NVM (or from the write queue, if a newer copy is
   queued there) and installed, then the lookup is repeated.
2. **Increment.** `ctr_incr` produces the new counter line and the
   `{major, minor}` for A.
3. **Start the pad and store the counter.** The pad generator is started.
   In the same cycle, the new counter line is written into the counter cache.
   The cache's write-through output copies it into the atomic register. This
   is Sto(Ac).
4. **Store the data.** When the pad is ready, P XOR pad goes into the
   register. This is Sto(A).
5. **Append both.** The register offers both lines to the write queue as one
   append. The counter line goes in first and the data line second. If the
   queue has fewer than two free slots, the append waits. This is App(Ac+A).
6. **Acknowledge.** `ack_valid` pulses the cycle after the append.

When the counter cache hits and the queue has room, a flush is acknowledged
`CC_LATENCY + ENC_LATENCY + 6` cycles after it is accepted. At the defaults
that is 98 cycles.

Because the counter cache is write-through, evicting a counter line writes
nothing back. A lookup that misses in the cache can find its line still
waiting in the write queue. For that reason every NVM read, counter or data,
first looks in the queue and takes the newest matching entry.

## The write queue and CWR

`write_queue` keeps entries in arrival order. Each entry holds a 29-bit NVM
address, a 64-byte line and a one-bit source flag: 1 for a line from the
CPU caches, 0 for a counter line. The head drains to NVM whenever NVM accepts
a write.

When an append carries a counter line, the queue searches only the entries
flagged 0 for the same address. A matching entry is removed and the entries
behind it move up. The new copy then goes to the tail. In the same cycle the
queue can pop its head, remove one superseded counter line and append two
lines. An assertion checks that two counter lines with the same address are
never queued at once.

Example: flushes of A, B, C and D, all in one page, leave the queue holding
`A, B, C, Dc, D` rather than eight entries. The counter line is kept once,
after the last data line. A page-sized log (64 flushes) produces at most 64
counter-line writes and usually far fewer: how many depends on how fast NVM
drains the queue.

## Reads

A read looks up the counter line and then issues the NVM read. The pad is
computed while the NVM read is in flight. The result is the line XOR the
pad. A line that has never been written reads as the pad applied to zeros,
not as zeros. NVM starts out all zero and there is no separate "unwritten"
state.

## Counter overflow and page re-encryption

When a flush overflows a minor counter, the page's major counter goes up by
one. Every other line of the page was encrypted with the old major counter
and must be re-encrypted. The **re-encryption status register** (`rsr`, 20
bytes) holds the page number (32 bits), the old major counter (64 bits) and
a done bit for each of the 64 lines. The overflowing line itself is written
with the new counter, so its done bit starts at 1. The RSR is loaded in the
same cycle the overflowing flush is appended to the queue. It is busy until
all done bits are 1.

While the RSR is busy, the controller re-encrypts the lowest pending line
whenever no CPU request is waiting to be served. Each step does this:

* read the line;
* decrypt it with `{old major, its current minor}`;
* encrypt it with `{new major, 0}`;
* write the counter line with that minor cleared;
* append line and counter through the atomic register, exactly like a flush.

The line's done bit is set in the cycle of that append. CPU requests to
other pages are served normally. A CPU request to a page line whose done bit
is still 0 waits until that line is done. If a second page overflows while
the RSR is busy, that flush waits for the RSR to become free.

Only the overflowing line's minor counter is cleared when the major counter
is bumped. Each other minor counter is cleared when its line is
re-encrypted. Until then, the line's old minor counter together with the
RSR's old major counter is exactly what is needed to decrypt it. (The
original description says "all minor counters are reset" on overflow. Doing
that at once would lose the information needed to decrypt the pending
lines.)

## Power failure and recovery

The write queue is assumed to sit in the battery-backed (ADR) domain, and the
RSR is placed in the same domain. When `power_fail` rises:

1. The atomic register is emptied without appending. Its flush was never
   acknowledged, so losing it is allowed. Both lines are lost together.
2. The RSR image (`{page, old major, ~done}`, 160 bits) is appended to the
   queue for a reserved NVM line, the all-ones address.
3. The queue drains completely, and then `adr_done` rises.

The done bits are stored inverted. A never-written (all-zero) save line
therefore restores as "nothing pending".

After reset, the counter cache clears its tags (one set per cycle, 2048
cycles). The controller then reads the saved RSR line and reloads the
register. If a page was half re-encrypted, its remaining lines are processed
as before. Already re-encrypted lines are not touched again, and lines still
pending are decrypted with the saved old major counter. `ready` rises when
this recovery is finished.

The NVM address is 29 bits. The top bit selects the counter region: the
counter line of page P is at `{1, P}`, and data line L is at `{0, L}`.

## Module map

| File | Role |
|---|---|
| `rtl/secpm_pkg.sv` | sizes, line/address types, counter-line field helpers, write-queue entry type |
| `rtl/aes_pkg.sv` | AES-128 round functions, S-box generator |
| `rtl/aes128_enc.sv` | iterative AES-128 core, 10 cycles per block |
| `rtl/otp_gen.sv` | 512-bit pad from four AES lanes, fixed latency |
| `rtl/ctr_incr.sv` | minor/major increment on a counter line |
| `rtl/counter_cache.sv` | 1 MB, 8-way LRU write-through counter cache, 12-cycle hits |
| `rtl/atomic_reg.sv` | two-line register, both-or-nothing append |
| `rtl/write_queue.sv` | ordered queue with source flags, CWR removal, read forwarding |
| `rtl/rsr.sv` | re-encryption status register with save image |
| `rtl/secpm_mc.sv` | top: flush/read/re-encryption/ADR sequencing |

Parameters of the top and their defaults:

* `WQ_DEPTH = 32` write-queue entries
* `CC_SETS = 2048` and `CC_WAYS = 8` (1 MB of 64-byte counter lines)
* `CC_LATENCY = 12` cycles
* `ENC_LATENCY = 80` cycles

The design assumes one 2 GHz clock domain for the controller.

## Where this design departs from, or adds to, the original

* The cipher width, the seed layout and the four-lane pad are choices made
  here. The original names AES and its latency only.
* Re-encryption happens inside the controller. In the original, the page is
  read into the last-level cache and its lines are re-encrypted there, one
  by one.
* Other choices made here:
  * one request in flight;
  * valid/ready handshakes;
  * CPU requests take priority over re-encryption steps;
  * an append waits for two free slots;
  * the queue drains oldest first.
* Read forwarding from the write queue is an addition. A write-through
  counter cache needs it for correctness.
* The NVM address map, including the reserved line for the RSR image, is
  chosen here.
* There is one AES circuit and hence one atomic register. The original
  allows one register per AES circuit.
* The core count, the CPU caches, the NVM timing and the bank structure are
  outside the design.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_otp_gen` | FIPS-197 known-answer vectors; every lane against a reference core; exact 80-cycle latency |
| `tb_ctr_incr` | random counter lines against a reference model, including overflow |
| `tb_rsr` | load, mark, lowest-pending selection, save image, restore |
| `tb_atomic_reg` | store order, hold under back-pressure, drop |
| `tb_write_queue` | the four-flush example above, a reference model under random back-pressure and drain stalls, forwarding |
| `tb_counter_cache` | small configuration, hit latency, LRU victim choice against a model, write-through copies, fills |

`tb_secpm_mc` runs the complete controller at its default parameters with a
behavioural NVM model (`tb/nvm_model.sv`: 126-cycle reads, 600-cycle writes,
one access at a time). Its phases:

* **A: transaction.** An undo-log transaction (log, data, commit) checks the
  98-cycle flush latency and that NVM holds ciphertext. All lines are read
  back.
* **B: page-sized log.** A log the size of a whole page fills the queue and
  exercises CWR. The test checks that every queued counter line was either
  written or removed, and checks the persisted minor counters.
* **C: overflow.** 128 flushes to one line overflow it. The test checks that
  the other 63 lines are re-encrypted in the background and that a read to a
  pending line waits. Every line must still read back its old value, and the
  persisted counter line must show major 1 and all minors 0.
* **D: power failure.** Power fails in the middle of a second re-encryption,
  with an unacknowledged flush in the register. After reset the RSR is
  restored and re-encryption resumes. All acknowledged data reads back, and
  the unacknowledged flush has left the line's old value in place.

The test counts counter-cache hits and misses, CWR removals, queue-full
stalls, forwarded reads, overflows, re-encrypted lines, RSR waits, ADR saves
and resumed re-encryptions. A mechanism that never happens counts as a
failure.

`tb_secpm_txn` runs undo-log transactions of 64 B, 256 B, 1 KB and 4 KB
(six of each) at the default sizes. Each transaction writes a contiguous log,
then contiguous data in a random page, then a commit record. The test prints
how many counter writes CWR removed. With the behavioural NVM above, it
reports:

| Transaction | Flushes | Data writes | Counter lines queued | Counter lines written | Removed by CWR |
|---|---|---|---|---|---|
| 64 B | 18 | 18 | 18 | 18 | 0 % |
| 256 B | 54 | 54 | 54 | 25 | 54 % |
| 1 KB | 198 | 198 | 198 | 27 | 86 % |
| 4 KB | 774 | 774 | 774 | 37 | 95 % |

Without CWR, the NVM write count would be twice the flush count.

For 64 B transactions nothing is removed. Each flush of a new random page
first has to fetch that page's counter line from NVM. While it waits, the
single-access NVM model drains the queue, so no two copies of a counter line
are ever queued together. The figures depend on the NVM model's drain rate.
A memory with more bank parallelism drains faster, and CWR then removes
less.

## Simulating

With Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/secpm_pkg.sv rtl/aes_pkg.sv tb/tb_secpm_mc.sv \
    --top-module tb_secpm_mc -o sim
./obj_dir/sim
```

The full controller builds in well under a minute and simulates in a few
seconds. The default counter cache holds 8.8 Mbit of arrays. To make
experiments quicker, set `CC_SETS` lower on the top, for example 64.
