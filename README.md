# SEAL memory-side encryption: RTL for a secure DL accelerator

A deep-learning accelerator on an edge device keeps its neural-network model in
off-chip DRAM. Anyone who can put a probe on the GDDR bus between chip and DRAM
can copy the model. Encrypting every line that crosses that bus protects it.
The cost is bandwidth. A GDDR bus moves well over 100 GB/s. An AES engine in
each memory controller moves only a few GB/s, so the engine becomes the
bottleneck.

SEAL narrows that gap in two ways:

* **Smart encryption (SE).** Not every byte of a CNN needs to be secret. Rank
  the kernel rows of each layer by the sum of their absolute weights. Encrypt
  the top half of the rows, and the input-feature-map channels that multiply
  with them. All other data may travel in clear, because no equation links
  clear data to an encrypted weight. Software makes this choice: encrypted
  data is allocated with `emalloc()`, clear data with `malloc()`. Hardware
  then only needs one flag bit per memory line. Lines whose flag is clear
  skip the AES engine at full speed.
* **Colocation-mode encryption (ColoE).** Counter-mode encryption gives every
  line its own counter, so the same data never gives the same ciphertext.
  Usually those counters live in a separate DRAM region and are reached
  through an on-chip counter cache. ColoE instead stores each line's 8-byte
  counter area *in the same burst* as its 128 data bytes. The extra byte
  lane is a 17th chip in the rank, the way an ECC DIMM adds a chip. There is
  no counter cache and no extra counter traffic.

This RTL implements the memory side of such an accelerator:

* six memory partitions;
* in each partition, one L2 slice that keeps the counter area with every line;
* in each partition, one crypto controller with a pipelined AES-128 engine and
  a bypass path.

The compute cores, the on-chip network, the DRAM scheduler and PHY, and the
DRAM chips are not included. Their ports are brought out at the top.

## Files

| file | contents |
|---|---|
| `rtl/seal_pkg.sv` | line and counter-area types, request opcodes, the seed function |
| `rtl/aes_pkg.sv` | AES-128 round functions; the S-box is computed at elaboration |
| `rtl/aes128_pipe.sv` | 11-stage pipelined AES-128, one block per cycle |
| `rtl/seal_crypto_ctrl.sv` | ColoE encryption/decryption, counter increment, flag bypass |
| `rtl/l2_slice.sv` | 128 KB, 8-way, write-back L2 slice whose lines carry their counter area |
| `rtl/seal_top.sv` | six partitions wired together |
| `tb/*.sv` | self-checking testbenches, a reference AES, a DRAM rank model |

## The 136-byte line

Everything in this design moves whole lines:

```
 bits 1087..1024 : counter area  -> counter chip (chip 16)
     1087..1081    7 spare bits, always 0
     1080          enc flag  (1 = emalloc, encrypted; 0 = malloc, clear)
     1079..1024    56-bit counter
 bits 1023..0    : data, 16 words of 64 bits; word j -> data chip j
```

`seal_pkg::line_t` has exactly this layout. The DRAM ports therefore carry
`[16:0][63:0]` chip words, and a plain cast converts between the two. Within
the data, 32-bit word `w` of the line (byte offset `4w`) sits in bits
`32w+31 .. 32w`. AES block `k` (bytes `16k .. 16k+15`) is bits
`128k+127 .. 128k`.

The line size, the 64-bit counter area, the 56-bit counter and the single flag
bit come from the SEAL scheme. The bit positions inside the counter area are
this design's choice.

## Pads, counters and why no pad is used twice

Encrypting and decrypting are the same XOR:

```
pad_k   = AES-128_key( {8'h00, counter[55:0], (line_address >> 4) + k} )   k = 0..7
cipher  = plain ^ {pad_7, ..., pad_0}
```

The seed holds the counter and the 16-byte block address. Two blocks at
different addresses therefore always get different pads. The counter takes
care of rewrites at the same address. Each time an encrypted line is written
back, the controller increments its counter and encrypts with the new value.
That new counter goes out in the counter chip with the ciphertext. On a read,
the counter arrives in the same burst as the data, so decryption needs nothing
else. The price of this is that pad generation cannot start before the
line has arrived, so a decrypted read costs the full 20 cycles of the engine.
A counter cache would hide that latency on a hit, but only by adding counter
traffic and on-chip storage, which is what limits a bandwidth-bound
accelerator.

The counter is never set back to zero:

* The L2 slice stores a line's counter area exactly as it came from DRAM.
* Changing a line's flag (`OP_ATTR`) first fetches the line, so its counter is
  kept.
* Lines that bypass AES keep their counter unchanged.

A 56-bit counter cannot wrap in practice, so wrap-around is not handled.
Counters and flags travel in clear. That is acceptable: a pad cannot be
computed without the key. The key is a single 128-bit global key loaded with
`key_load`. It is expanded once, in 10 cycles, and `key_ready` stays low until
then.

## The crypto controller: timing and overlap

Each partition has one AES engine. Read and write traffic share it. One
128-byte line needs eight pads, so the controller keeps up to `NSLOT` (3) lines
in flight in *slots*.

```
cycle  0      line accepted on wb_* (write-back) or mr_* (DRAM read), slot allocated
cycles 1..8   seeds of blocks 0..7 enter the AES pipeline, one per cycle
cycles 12..19 pads come out (11 pipeline stages), tagged {slot, block}
cycle  20     all 8 pads present: XORed line offered on mw_* (to DRAM) or fill_* (to L2)
```

This gives a latency of 20 cycles per line through AES. The next encrypted
line may start as soon as the previous one has issued its last seed. The
engine can therefore start a new line every 8 cycles, 16 bytes per cycle.
Slots retire in order.

Lines with the flag clear never touch a slot. They pass through one register
on their own path (1-cycle latency) and may overtake encrypted lines. When a
read and a write both want the engine in the same cycle, the read wins: a core
is waiting for it.

Each output port prefers the AES result to a bypassed line. Once a line has
been offered, the port keeps that choice until the line is taken, so data
never changes under a waiting `valid`.

`wr_pending` is high while a write-back is still inside the controller. The L2
slice waits for it to fall before it reads a new line from DRAM. Without that
wait, a read could reach DRAM ahead of an older write-back of the same line
that is still being encrypted.

## The L2 slice

The L2 slice is a blocking, write-back, write-allocate cache:

* 128 KB, 8 ways, 128 sets of 136-byte lines, tree pseudo-LRU replacement;
* 768 KB shared L2 in all, split over the six memory controllers;
* a hit answers exactly 10 cycles after the request is accepted.

Core requests are:

* `OP_READ` and `OP_WRITE` of one aligned 32-bit word;
* `OP_ATTR`, which sets the line's flag to `req_enc`.

The run-time's `emalloc()` and `malloc()` would issue `OP_ATTR` for each line
they hand out. `OP_ATTR` behaves like a write, so the line is fetched first and
keeps its counter.

Consecutive 128-byte lines are assumed to rotate over the `NCH` channels. Each
slice therefore divides the line address by `NCH` before it takes the set
index, so that all sets are used. The tag is simply the full line address.

## Top level

`seal_top` has one core port and one DRAM port per channel (`NCH` = 6).

* **Core ports** (`core_req_*`) use valid/ready. Responses (`core_rsp_*`) are
  one-cycle pulses.
* **DRAM ports.** `dram_rd_*` carries line read requests. `dram_rsp_*` returns
  the lines, as `[16:0][63:0]` chip words. `dram_wr_*` carries line writes in
  the same format. All use valid/ready.
* **Statistics** (`stat_*`): lines through AES, lines that bypassed it, L2
  hits, misses and dirty write-backs, per channel.

No AES or bus traffic can start before `key_ready`.

## How far to trust it, and where it departs from the SEAL description

Taken from the SEAL scheme:

* the 136-byte line with its 8-byte counter area, the 56-bit counter and the
  flag bit;
* encryption or bypass chosen by the flag;
* counter plus one on each encrypted write;
* one pipelined 128-bit-block AES engine per memory controller, with a
  20-cycle line latency;
* six controllers;
* an L2 of 768 KB, 8-way, 128-byte lines, 10-cycle latency;
* a rank of 16 data chips and one counter chip.

Chosen here, because the scheme leaves it open:

* AES-128 as the cipher;
* the seed layout and the counter-area bit positions;
* the slot scheme and the read-first priority;
* all handshakes;
* the blocking L2 with pseudo-LRU and the channel interleave;
* the `OP_ATTR` request;
* the per-channel core ports.

The AES engine has throughput of 16 B/cycle. That matches the 8 GB/s of the
engines the scheme assumes only at a 500 MHz controller clock.

Not included:

* the GPU cores and their L1 caches, and the on-chip network;
* the DRAM command scheduler (FR-FCFS) and the GDDR5 PHY;
* the DRAM devices;
* the software that ranks kernel rows and calls `emalloc()`.

Integrity protection is also not included: an attacker who rewrites DRAM is
outside the threat model, which only covers snooping.

## Verification

Each testbench checks the outputs against values computed independently:

* `aes_ref_pkg` is a separate AES model. It finds the S-box by brute-force
  inversion.
* Each testbench prints `TB_RESULT checks=N failures=M`.
* Each testbench has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_aes128_pipe` | FIPS-197 vectors C.1 and B, 40 random blocks back to back, 11-cycle latency, tags, re-keying |
| `tb_seal_crypto_ctrl` | ciphertext and counter+1 on write-back, decryption on read, bypass, 20-cycle / 1-cycle latency, one new line per 8 cycles, 48 mixed lines under random back-pressure, `wr_pending`, line counters |
| `tb_l2_slice` | 1500 random reads, writes and `OP_ATTR` on a shrunken slice (4 KB), against a word-level reference; 10-cycle hits; counter area and flag preserved through eviction; no read while a write is pending |
| `tb_seal_top` | full-size design, all parameters at their defaults (see below) |
| `tb_seal_conv_workload` | the kernel matrices of VGG-16 layers with 64, 128, 256 and 512 channels streamed through one controller at every encryption ratio from 100% to 0% in 10% steps; sampled decryption checks and cycle bounds |

On one controller, `tb_seal_conv_workload` measures:

| encryption ratio | throughput, 512-channel layer (B/cycle) |
|---|---|
| 100% | 16.0 (the AES engine's rate) |
| 90% | 17.6 |
| 80% | 19.4 |
| 70% | 21.7 |
| 60% | 24.7 |
| 50% | 28.5 |
| 40% | 33.8 |
| 30% | 41.5 |
| 20% | 53.5 |
| 10% | 75.5 |
| 0% | 128.0 (one line per cycle) |

The smaller layers give the same figures to within about 3%. Throughput follows
128 / (8r + (1 - r)) bytes per cycle for an encrypted fraction r. Encrypted
lines take 8 cycles of the engine; bypassed lines take one cycle on the bypass
path.

This is the bandwidth that smart encryption recovers.

`tb_seal_top` runs these steps:

1. It selects the top 50% of the rows of an 8x8 kernel matrix of 3x3 kernels
   by l1-norm, and marks those rows and their input channels as `emalloc`
   lines.
2. It writes the weights and input maps, and evicts them.
3. It snoops the DRAM chips. Each encrypted line must hold the exact
   counter-mode ciphertext with counter 1. Each clear line must hold
   plaintext.
4. It reads all data back.
5. It rewrites the lines and evicts them again. The lines must now carry
   counter 2 and fresh pads.

It counts every mechanism: AES write, AES read, bypass write, bypass read,
hit, miss, write-back, DRAM back-pressure and counter advance. A mechanism
that never occurred counts as a failure.

`tb/dram_dimm_model.sv` is a behavioural rank with one counter chip. It
answers reads after 20 cycles and applies random back-pressure.

To run a testbench with Verilator, for example the full design:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/seal_pkg.sv rtl/aes_pkg.sv tb/aes_ref_pkg.sv rtl/aes128_pipe.sv \
  rtl/seal_crypto_ctrl.sv rtl/l2_slice.sv rtl/seal_top.sv \
  tb/dram_dimm_model.sv tb/tb_seal_top.sv --top-module tb_seal_top
./obj_dir/Vtb_seal_top
```

The other testbenches need only the packages, their block and what the block
instantiates. Every parameter has the value listed above as its default. The
full-size end-to-end run takes well under a second of simulation time once
built.
