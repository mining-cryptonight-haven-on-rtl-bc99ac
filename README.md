# A CryptoNight-Haven mining kernel in SystemVerilog

CryptoNight-Haven is a memory-hard proof-of-work: every hash fills a private
4 MiB scratchpad, then spends 262,144 iterations reading and rewriting it at
addresses that depend on the data just read, then folds it back into a
200-byte state. The memory traffic, not the arithmetic, sets the cost. This
design is a mining kernel for an FPGA card with high-bandwidth memory (HBM).
Its main idea is to keep many hashes in flight, up to 128. Each hash owns its
own 4 MiB region of HBM. The memory-hard loop ("Shuffle") interleaves their
accesses on one memory port, so the latency of one hash's access is hidden
behind the accesses of the others. Shuffle runs on a faster clock (500 MHz
in the target) than the rest of the pipeline (200 MHz).

All RTL is in `rtl/`, the testbenches and the memory model in `tb/`. The
top module is `cn_miner_top`.

## The computation, stage by stage

A job is one hash. It carries a 200-byte state and a *tag*: its slot number
0..127. Byte `i` of every byte string is held in bits `[8i+7:8i]` of the
vector (little-endian), as the algorithm defines them.

1. **Input Keccak** (`cn_keccak_in`). The 76-byte mining blob is absorbed
   into Keccak-1600 with rate 136 bytes. Padding is the original Keccak
   padding: 0x01 after the message, 0x80 in the last rate byte. The full
   200-byte state after Keccak-f goes on (`keccak_f1600`, one round per
   clock, 24 cycles).
2. **Explode** (`cn_explode`). State bytes 0..31 are expanded with the
   AES-256 key schedule into ten round keys (`cn_aes_keygen`). State bytes
   64..191 form eight 16-byte blocks.
   - One *pass* sends the eight blocks through ten AES rounds. The ten
     rounds are a 10-stage pipeline of AES round cores (`cn_aes10_pipe`).
   - The first 16 passes are warm-up passes. They write nothing, and after
     each one the blocks are mixed: `x[i] ^= x[i+1]`, `x[7] ^= old x[0]`.
   - Then 32,768 passes each write their eight blocks, 128 bytes, to the
     next place in the scratchpad. These passes do not mix.
   - Timing: 19 cycles per warm-up pass and 27 per writing pass, when
     memory accepts one write per cycle. That is about 0.89 M cycles per
     hash.
3. **Shuffle** (`cn_shuffle`), described in the next section.
4. **Implode** (`cn_implode`). Keys come from state bytes 32..63, and the
   data is again bytes 64..191.
   - Each pass XORs the next 128 bytes of the scratchpad into the eight
     blocks, runs the ten AES rounds, and mixes.
   - The scratchpad is read twice, which is 65,536 passes. Then 16 more
     passes run without memory.
   - The eight reads of the next pass are issued while the current pass is
     in the AES pipeline, so a pass costs 19 cycles when memory keeps up.
5. **Final hash** (`cn_final_hash`). Keccak-f is applied to the 200-byte
   state. Its two lowest bits pick one of four hash functions, which
   hashes all 200 bytes: 0 BLAKE-256, 1 Groestl-256, 2 JH-256, 3
   Skein-512-256.
   - The four cores sit side by side, and only the selected one runs.
   - Latencies: 60, 55, 258 and 95 cycles after the 26-cycle Keccak step.

The stages are joined by valid/ready streams with small FIFOs
(`stream_fifo`). The two streams into and out of Shuffle cross clock domains
through Gray-pointer FIFOs (`async_fifo`).

## Shuffle: interleaving 128 hashes on one memory port

For each hash, Shuffle keeps a context: two 128-bit registers `a` and `b`,
the next word index `i`, an iteration counter and a phase. `a` starts as
bytes 0..15 ^ 32..47 of the state, `b` as bytes 16..31 ^ 48..63, and `i` as
`a.lo`. One iteration is three read-modify-write steps on the scratchpad
word `l[i]`. Every step reads one 16-byte word and writes it back, and the
index of the next step comes from the value just computed:

| phase | computation | write | next index |
|---|---|---|---|
| 0 | `c = AESround(l[i], key=a)` | `l[i] = b ^ c`; `b = c` | `c.lo` |
| 1 | `(hi,lo) = c.lo * l[i].lo` (64x64 unsigned); `a.lo += hi`, `a.hi += lo` | `l[i] = a`; then `a ^= old l[i]` | `a.lo` |
| 2 | `n = l[i].lo` (signed 64), `d = l[i][95:64]` (signed 32); `q = n / (d \| 5)` | `l[i].lo = n ^ q` | `~d ^ q` |

Indices are masked to the scratchpad: bits 4..21 of the value select one of
the 2^18 words. `c` in phase 1 is the value from phase 0, held in `b`.

A single hash cannot go faster than one step per memory round trip. The
scheduler therefore works on slots:

- A **ready queue** holds slots whose next read may go out. New jobs enter
  it too, but retired steps have priority.
- When the request port is free, a slot is popped, its read is issued, and
  its tag goes into an **in-flight queue**. Reads are answered in order, so
  the head of this queue always names the slot whose data is arriving.
- When read data returns, the step is computed in one cycle. Its write is
  sent on the same port, with priority over new reads, and the slot goes
  back to the ready queue.
- After the slot's last step, it goes to the **done queue** instead and
  leaves with its unchanged Keccak state.
- A read that memory has not yet accepted is held stable until it is. Only
  then can a write overtake it.
- Each slot has at most one access in flight. Its write therefore always
  reaches memory before its next read.

At steady state the port carries one read and one write per step. One port
is thus bounded by 0.5 steps per cycle, whatever the latency, provided
enough slots are active to cover the round trip.

## Slots, tags and scratchpad regions

The top hands out tags 0..SLOTS-1 in rotation. It accepts a blob only while
fewer than SLOTS jobs sit between the input and the end of Implode. Every
memory address a stage produces is `tag * MEM_BYTES + offset`, so hash `t`
lives at `t * 4 MiB`: 128 hashes use 512 MiB. Explode, Implode and final
hash handle one job at a time. Shuffle runs every job for the same number of
steps in first-come order. Jobs therefore leave in tag order, and a tag
never returns before its region is free. An assertion in the top checks
this order.

Memory ports carry `mem_req_t` (package `cn_pkg`):
`{write, addr[63:0] byte address, wdata[127:0]}` with valid/ready. Reads
return 128-bit data with valid/ready, in request order. There are three
such ports: Explode (write only), Implode (read only) and Shuffle (read and
write, in the `clk_sh` domain). Each maps naturally onto one HBM
pseudo-channel behind an AXI adapter. The adapter and the HBM controller
are not part of this RTL.

## Status registers

`cn_status_regs` is an AXI4-Lite slave with this register map:

- 0x00: identification 0x434E4856. Writing it clears the counters.
- 0x04: number of jobs in flight.
- 0x08 + 4k: eight 32-bit event counters:
  - 0: blobs accepted
  - 1: Explodes done
  - 2: Implodes done
  - 3: hashes delivered
  - 4: input cycles held back by the slot limit
  - 5: Explode memory stall cycles
  - 6: Implode memory stall cycles
  - 7: clock cycles

## Throughput at the default sizes

These figures are for the RTL as written, per kernel, assuming memory
accepts one request per cycle:

- **Explode:** about 0.89 M cycles at 200 MHz, or 4.4 ms per hash.
- **Implode:** about 1.25 M cycles, or 6.2 ms per hash. It handles one job
  at a time, so it limits a kernel to about 160 hashes/s.
- **Shuffle:** 786,432 steps per hash. At 0.5 steps per cycle and 500 MHz
  that gives about 318 hashes/s. With a single hash and a one-cycle memory,
  the full-size test measured 2 cycles per step.

Raising Implode's and Explode's throughput would mean several jobs per
stage, or several kernels. That is the obvious next step.

## Where this follows the source design and where it does not

Taken from the design description:

- the stage order and structure;
- 4 MiB per hash;
- ten AES cores in each of Explode and Implode;
- the key bytes (0..31 for Explode, 32..63 for Implode) and data bytes
  (64..191);
- reading the scratchpad twice, plus 16 extra passes;
- the final Keccak and the four-way hash choice on two state bits;
- up to 128 hashes interleaved in Shuffle, one memory region per hash;
- streams joined by FIFOs;
- a 500 MHz Shuffle clock beside a 200 MHz clock;
- a dedicated memory port for Shuffle;
- AXI-Lite status registers.

Taken from the CryptoNight-Heavy/Haven reference algorithm, because the
description only summarises it:

- the exact Shuffle step equations;
- the 262,144 iterations and the address mask;
- the padding and rate of the input Keccak;
- the AES-256 key schedule;
- the mix function;
- the hash select encoding.

The description of Explode says that blocks are written, then XORed with
each other, then encrypted again. The reference instead runs 16 mixing
warm-up passes first and never mixes between writes. The reference was
followed, because otherwise the hashes would not be CryptoNight-Haven
hashes.

This design's own choices:

- The memory ports are simple one-word request ports. There are no AXI4
  bursts or outstanding-transaction engines, so Explode and Implode do not
  use bursts.
- The tag/slot scheme and the in-order retirement.
- FIFO depths: 2 for the synchronous FIFOs, 4 for the clock-crossing ones.
- The counter set of the status registers.
- Each Shuffle step is single-cycle combinational logic. This includes a
  64x64 multiplier and a 64/32 signed divider, which will not close timing
  at 500 MHz. A real 500 MHz Shuffle would pipeline the step over several
  cycles, which the slot scheduler allows.
- The hash cores run one round per clock. Skein runs four rounds per clock.
- Inputs are limited to a single Keccak block (at most 135 bytes), which
  covers mining blobs.
- The host interface is not included: blobs enter and hashes leave on
  plain streams.
- The source design states that Implode takes twice as long as Explode,
  because it passes over the memory twice. Here the ratio is about 1.4.
  Implode prefetches its reads while the AES pipeline works. Explode
  writes each pass only after it leaves the pipeline: 27 cycles against
  19 per pass.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends with a line
`TB_RESULT checks=N failures=M`. Expected values were computed
independently in a software model of the algorithm. That model was itself
checked against published test vectors: Keccak-256, BLAKE-256, Groestl-256,
JH-256 and Skein-512-256 of the empty message, and the FIPS-197 AES
vectors.

- **Block tests.** Each block is checked against precomputed outputs. The
  latencies stated above are checked cycle-exactly. The exceptions are
  Explode and Implode, whose pass times are checked within bounds that
  depend on memory latency.
  - FIFOs: scoreboards, full and empty flags, and throughput.
  - `async_fifo`: both clock ratios.
  - Status registers: AXI4-Lite reads, writes in either channel order,
    and back-pressure.
- **End to end at reduced size** (`tb_cn_miner_top`).
  - Size: 4 slots, 1 KiB scratchpads, 64 Shuffle iterations.
  - Seven blobs are hashed. Their hashes, hash selections and tags are
    compared with the model.
  - Memory models with random back-pressure sit on all three ports.
  - The testbench counts the mechanisms and fails if one never occurs:
    - all four final hashes used;
    - the slot limit holding back input;
    - tag reuse;
    - at least two hashes interleaved in Shuffle;
    - memory stalls on every port;
    - output back-pressure;
    - the expected number of scratchpad reads and writes.
- **Full size** (`tb_cn_miner_top_full`). The top at its default parameters
  computes one real CryptoNight-Haven hash with a 4 MiB scratchpad and
  262,144 iterations, and compares it with the model. It takes under a
  minute with verilator.

`tb/hbm_model.sv` is a behavioural memory. It has a fixed latency, random
`ready` back-pressure, and in-order responses. It checks that a request
stays stable while it waits. Its storage is a sparse associative array in
`tb/hbm_pkg.sv`, where unwritten words read as a fixed pseudo-random
pattern.

To run a testbench with plain verilator from the top of the tree:

```
verilator --binary --timing --assert -j 4 --top-module tb_cn_miner_top \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/cn_pkg.sv tb/hbm_pkg.sv \
  tb/tb_cn_miner_top.sv
./obj_dir/Vtb_cn_miner_top
```

Change `--top-module` and the last file to run another testbench.
Testbenches drive a reset edge before the first clock, because verilator
starts registers at arbitrary values.

## Files

| file | contents |
|---|---|
| `rtl/cn_pkg.sv` | types (`state_t`, `block_t`, `mem_req_t`), AES round and S-box (computed from GF(2^8) inverses), Keccak round and constants, mix function |
| `rtl/keccak_f1600.sv` | Keccak-f[1600], 24 cycles |
| `rtl/cn_keccak_in.sv` | input absorb |
| `rtl/cn_aes_round.sv`, `rtl/cn_aes_keygen.sv`, `rtl/cn_aes10_pipe.sv` | AES round, key expansion, 10-stage round pipeline |
| `rtl/cn_explode.sv`, `rtl/cn_shuffle.sv`, `rtl/cn_implode.sv` | the three scratchpad stages |
| `rtl/blake256.sv`, `rtl/groestl256.sv`, `rtl/jh256.sv`, `rtl/skein512_256.sv` | final hash cores |
| `rtl/cn_final_hash.sv` | final Keccak, selection and output |
| `rtl/stream_fifo.sv`, `rtl/async_fifo.sv` | stream FIFOs |
| `rtl/cn_status_regs.sv` | AXI4-Lite counters |
| `rtl/cn_miner_top.sv` | the kernel |
