# RejSCore: a rejection-sampling coprocessor for QR-UOV

QR-UOV, a multivariate post-quantum signature scheme, builds its large public
matrices from short seeds. Each matrix is a vector of elements of the prime field
F_q, produced by a procedure called **RejSampPRG**: a pseudorandom generator
expands the seed into a string of bytes, and **rejection sampling** turns those
bytes into field elements. It does this by masking every byte down to the field's
bit width and throwing out the values that are not field elements. At NIST
security level I (q = 127, l = 3, V = 52, M = 18), one call expands a 16-byte seed
into tau = 2916 bytes with AES-128 in counter mode and reduces them to
l·V·M = 2808 elements of F_127.

This repository holds synthesizable SystemVerilog for RejSCore, a small
coprocessor that runs this procedure in hardware. It follows the architecture of
*RejSCore: Rejection Sampling Core for Multivariate-based Public key
Cryptography* (Imran, Khan, Abideen, Rafferty, Khalid, Rashid, O'Neill). The
paper describes the blocks and their sizes, and in places their timing. The
host protocol, the memory map, the encodings and the exact cycle schedule are
choices of this implementation. They are marked as such below and in the
header comment of each file.

## What one operation computes

With q = 2^7 − 1 a Mersenne prime, "reduce a byte" means `b & q`, which gives a
value in 0..127. Only 127 is not a field element. The QR-UOV sampler does **not**
simply drop the bad values from the stream. It works on positions:

* The first n' = 2808 masked bytes (the **head**) are the output positions.
* The remaining tau − n' = 108 bytes (the **tail**) are a reserve.
* A head element below q stays where it is.
* A head element equal to q is replaced by the next tail element below q that
  has not been used yet. If the tail is used up, it becomes 0.

This order matters. A stream filter, which collects the valid bytes one after
another, gives a different vector as soon as one head byte is rejected. At SL-I
that happens about 22 times per call. The RTL produces the position-preserving
result above.

## Block structure

```
              INS[25:0] (op | wen | waddr | raddr | SL)       din, iv
                         |                                        |
                 +---------------+                                |
                 |  ins_decoder  |  ready/valid, checks SL and op |
                 +-------+-------+                                |
                         | cmd (one-cycle pulses)                 |
   +---------------------v--------------------+    64-bit   +-----v------------------+
   |            rejscore_ctrl                 |------------>| aes_ctr_wrapper        |
   |  routing + control unit: owns both       |  seed->B1   |  B1 seed/key  128 b    |
   |  memory ports, sequences PRG -> RejSamp  |<------------|  B2 output    128 b    |
   +----+------------------------+------------+  64-bit     |  controller (CTR)      |
        |  write port / read port|                          |  aes128_core, unrolled |
   +----v----------------+   +---v----------------------+   +------------------------+
   | mem_unit 1024 x 64  |   | rejsamp                  |
   | 2 banks 1024 x 32   |   |  Byte & q -> B1 (128 b)  |
   | simple dual-port    |   |  Byte < q flags          |
   +---------------------+   |  tail buffer T (64 b)    |
                             |  B2 (64 b) -> memory     |
                             +--------------------------+
```

All transfers between blocks are 64 bits wide, 8 bytes per word, with byte 0 of
a word in bits [7:0]. The blocks take turns on the memory. The controller owns
both memory ports and hands them to the host, the wrapper or the sampler,
depending on its state.

| module | role |
|---|---|
| `rejscore` | top level, host interface |
| `ins_decoder` | accepts and checks the 26-bit instruction |
| `rejscore_ctrl` | sequencing and memory-port routing |
| `mem_unit` (+ `sdp_ram`) | 1024 × 64 simple dual-port memory in two 32-bit banks |
| `aes_ctr_wrapper` | AES-128-CTR byte generator (B1, B2, counter) |
| `aes128_core` | fully unrolled, pipelined AES-128 encryption |
| `rejsamp` | the rejection sampler |
| `rejscore_pkg`, `aes_pkg` | shared constants and types; AES round functions |

## Instruction word and host protocol

The instruction `INS` is 26 bits wide, with fields from MSB to LSB:

| bits | field | meaning |
|---|---|---|
| [25:23] | `op` | 0 = NOP (memory access only), 1 = RejSampPRG, 2 = RejSamp |
| [22] | `wen` | write `din` to `mem[waddr]` |
| [21:12] | `waddr` | write address |
| [11:2] | `raddr` | read address (used by NOP) |
| [1:0] | `SL` | security level: 0 = SL-I; every other code is refused |

The field widths and their order come from the paper. The numeric codes of `op`
and `SL` are this implementation's. An instruction is taken in a cycle where
`ins_valid` and `ins_ready` are both high. `ins_ready` is low while an operation
runs, so the host simply holds an instruction until it is taken. A refused
instruction (SL ≠ SL-I, or an op code above 2) does nothing except set `err`.

Memory map (this implementation's choice):

| words | contents |
|---|---|
| 0, 1 | seed bytes 0..7 and 8..15 (the AES key) |
| 2 .. 366 | the 2916 pseudorandom bytes (365 words) |
| 2 .. 352 | the 2808 output elements, one per byte, written over the bytes above |

A complete RejSampPRG call:

1. Write the seed with two `NOP, wen=1` instructions to words 0 and 1.
2. Drive `iv` and issue `op = RejSampPRG`.
3. Wait for the one-cycle `done` pulse.
4. Read the 351 result words from word 2 on, with `NOP` instructions (`raddr`).
   Each word appears on `dout` with `dout_valid` two cycles after the
   instruction is taken.

`op = RejSamp` runs only the sampler, on bytes the host has placed from word 2
on.

## AES-CTR wrapper and the unrolled AES-128 core

The wrapper holds the seed in B1 (128 bits). The seed is used directly as the
AES-128 key. Each counter block is a 64-bit nonce followed by a 64-bit counter,
and the counter starts at the 2-byte IV followed by six zero bytes:

```
block k = NONCE[63:0] || ( {IV[15:0], 48'h0} + k )      (big-endian, byte 0 first)
```

The paper specifies this composition. The nonce value (`NONCE` parameter,
default 0) and the exact byte order are assumptions. Compatibility with the
QR-UOV reference code has **not** been verified (see below). Each ciphertext
block is caught in B2 and written to memory as two 64-bit words on consecutive
cycles. 183 blocks give 365 words, and the unused second half of the last block
is dropped.

`aes128_core` instantiates all ten rounds side by side. Every round has two
register stages, and one input stage performs the first AddRoundKey:

* **stage A**: SubBytes and ShiftRows. The key schedule computes
  SubWord(RotWord(w3)) ⊕ Rcon in parallel.
* **stage B**: MixColumns (left out in round 10) and AddRoundKey. The round key
  is finished in the same stage by the XOR chain of the key schedule.

This gives the paper's latency of 1 + 2·10 = **21 cycles**. The key travels down
its own pipeline, so the core accepts a new block, with any key, every cycle.
The S-box is not a typed-in table. It is computed at elaboration time from its
definition (GF(2^8) inverse, then the affine map), and synthesis turns each use
into a 256-entry ROM. The core synthesizes to about 4300 flip-flops, against the
4411 the paper reports for its AES core on an FPGA.

The wrapper does not fill this pipeline. It issues one block, waits the 21
cycles, writes the two words, and only then issues the next block: 24 cycles
per block. This matches the paper's cycle count for the wrapper (about 25 cycles
per block). Issuing a block every two cycles would cut this phase to about 390
cycles, and would be a simple change in the wrapper's state machine.

## The rejection sampler

`rejsamp` is the part that needs the most care. The paper presents it as a
lightweight, iterative unit: bytes are masked eight at a time, collected in a
128-bit buffer B1, checked against q, and valid ones are gathered into a 64-bit
buffer B2, which is written to memory when it is full. The implementation keeps
that structure. It adds one buffer so that the output is the position-preserving
vector described above.

**Head path.** When B1 is empty, the sampler reads two head words (one if only
eight head bytes remain), masks each byte with q as it arrives ("Byte & q"), and
loads B1. This takes three cycles plus one cycle for the check. Sixteen
comparators ("Byte < q") flag every byte of B1 in parallel. Each cycle the
controller looks at the bottom byte of B1:

* *valid*: the byte is appended to B2 and B1 shifts down by a byte. One cycle per
  element.
* *rejected*: a replacement is needed (next item).

**Tail path.** The tail buffer T holds one masked tail word and a count of the
bytes left in it. For a rejected head byte the controller tests T's bottom byte
each cycle. A rejected tail byte is dropped, one cycle each. The first valid tail
byte goes into B2 in place of the head byte. If T is empty and tail bytes remain
in memory, the next tail word is read (two cycles). If the tail is used up, a 0
goes into B2. Because the tail pointer only moves forward, this gives exactly the
"next unused valid tail element" rule. The `replaced` and `zero_fill` outputs
pulse once for each of the two cases.

**Output.** When B2 holds eight elements, it is written to memory in one cycle,
during which the sampler stalls. Output word w is written to the address of head
word w. That is safe because all eight bytes of head word w have been read into
B1 before any of their results can complete a word. The tail lies above the head
and is never overwritten while it is still needed. The head/tail boundary does
not have to fall on a word boundary: the first tail read skips n' mod 8 bytes,
and a last partial output word is written with zero upper bytes.

**Cycle count.** Each phase costs:

| event | cycles |
|---|---|
| start | 1 |
| each 16-byte B1 fill | 4 |
| each head element | 1 |
| each output word written | 1 |
| each rejected tail byte tested | 1 |
| each tail word read | 2 |

For the SL-I sizes this comes to about 3870 cycles; the paper reports 3893.

The SL-I parameters have n' a multiple of 8 and q = 127. `PQ`, `PTAU`, `PNOUT`,
`BASE` and `OUT_BASE` are parameters. The sampler is written for any Mersenne q
below 256 and any n' ≤ tau.

## Timing at SL-I

| phase | this RTL | paper (Table I) |
|---|---|---|
| AES-CTR wrapper (183 blocks) | 4392 | 4632 |
| RejSamp | ≈ 3870 (depends slightly on the data) | 3893 |
| whole RejSampPRG (`busy` high) | ≈ 8265 | 8525 |

The paper reports clock rates of 222 MHz on an Artix-7 FPGA and 565 MHz in a
65 nm process. This RTL has not been put through timing closure. By
construction, the deepest logic per stage is one S-box lookup (stage A), or
MixColumns plus the key-schedule XOR chain and AddRoundKey (stage B).

## Where this RTL fills in or departs from the paper

* **Sampler semantics.** The paper's prose about the sampler reads like a stream
  filter, but it also says the unit implements QR-UOV's RejSamp algorithm. This
  RTL follows the algorithm. The tail buffer T is an addition needed for that.
* **Host interface.** The ready/valid handshake, `din`/`dout`, the `iv` port, the
  `err` flag and the event outputs are this implementation's. The paper shows
  only the instruction word entering the control unit.
* **Encodings and memory map.** The op and SL codes, the seed and data addresses,
  and writing the output in place are this implementation's.
* **Counter block.** The nonce value and byte order are assumed.
* **Memory.** The memory is written as two 1024 × 32 arrays, matching the
  paper's ASIC organisation. It maps to SRAM macros or to a block RAM. The
  paper's FPGA build uses a vendor block-RAM IP, which is not part of this code.
* **Only SL-I.** As in the paper, other levels are refused. SL-III would need
  AES-192 and larger tau/n'. SL-V would also need a memory larger than 1024
  words (1378 words of PRG output).
* **Reset.** All control state uses an asynchronous active-low reset. Data
  registers and the memory are not reset.

## Simulation

Every testbench in `tb/` checks itself and ends with a line
`TB_RESULT checks=N failures=M`. The golden models are in `tb/ref_pkg.sv`: a
byte-array AES-128 whose S-box is found by searching for inverses, AES-CTR with
the counter block above, and RejSamp written line by line from the QR-UOV
algorithm. The RTL does not use any of them.

| testbench | what it checks |
|---|---|
| `tb_aes128_core` | FIPS-197 vectors and 38 random blocks back to back; latency 21 |
| `tb_aes_ctr_wrapper` | every output word against AES-CTR; cycles per block |
| `tb_rejsamp` | 60 runs at tau = 70, n' = 45, 0–100 % rejected bytes; every element; cycle count against a schedule model; replacement and zero fill both occur |
| `tb_mem_unit` | random traffic against a model; read latency; read-during-write |
| `tb_ins_decoder` | field decoding, refusals, handshake |
| `tb_rejscore_ctrl` | sequencing and routing, with stand-ins for the wrapper and the sampler |
| `tb_rejscore` | full SL-I size: two RejSampPRG calls compared element by element with the reference, a RejSamp call on 90 %-rejected data (tail exhaustion), a refused SL-III instruction, an instruction held while busy; prints the cycle counts |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/rejscore_pkg.sv rtl/aes_pkg.sv tb/ref_pkg.sv \
  -y rtl -y tb +libext+.sv tb/tb_rejscore.sv --top-module tb_rejscore
./obj_dir/Vtb_rejscore
```

The full-size end-to-end test runs in a few seconds.

**What the tests do not establish.** The outputs agree with the models in
`tb/ref_pkg.sv`. They have not been compared with the QR-UOV reference
implementation's known-answer data. In particular, the counter-block layout and
the byte order of seed and IV are assumptions, and may have to change to match
QR-UOV bit for bit.
