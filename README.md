# Hardware Security Checker: Trojan detection on the instruction-fetch port with Hamming check bits

A hardware Trojan hidden in a processor, its bus or its instruction memory
can take over a system without breaking any architectural rule. One example
is a Trojan that makes the fetch unit read from an address where an attacker
has placed code. Another is one that makes the bus deliver a real instruction
of the program at the wrong moment. The processor then executes legal
instructions in legal privilege modes, so checks on opcodes or privilege
levels do not notice anything.

This design catches such attacks at the fetch port. While a program is being
installed, a small checker records a fingerprint of every instruction word
*at its address*. Each fingerprint is a set of Hamming single-error-correction
(SEC) check bits. While the program runs, the checker reads the fingerprint
stored for each fetch address in parallel with the instruction memory. It
recomputes the fingerprint of the word that actually arrives and raises
`warning` if the two differ. The checker only listens to the fetch port. It
never stalls or alters the fetch, and the warning comes in the same cycle as
the instruction.

The RTL is written in SystemVerilog (IEEE 1800-2017) and is synthesizable.
Its defaults are for a 32-bit RISC-V core with 32 KiB of instruction memory.

## Structure

```
hsc (top)                                   warning = warning_hsec32 | warning_hsec8
 ├── u_hsec32 : hsm #(K=1)   one 32-bit chunk, 6 check bits per word
 │     └── g_chunk[0]: hamming_sec_enc #(32) + ecc_memory #(8192 x 6)
 └── u_hsec8  : hsm #(K=4)   four 8-bit chunks, 4 check bits each
       └── g_chunk[0..3]: hamming_sec_enc #(8) + ecc_memory #(8192 x 4)
```

| File | Contents |
|---|---|
| `rtl/hsc_pkg.sv` | word width, the `hsc_mode_e` mode type, and functions that size and lay out the Hamming code |
| `rtl/hamming_sec_enc.sv` | combinational check-bit generator for one chunk |
| `rtl/ecc_memory.sv` | one check-bit memory: synchronous read, zero sweep after reset |
| `rtl/hsm.sv` | Hardware Security Module: K chunks, K encoders, K memories, comparators, warning |
| `rtl/hsc.sv` | top: the HSEC32 and HSEC8 modules side by side |
| `tb/tb_*.sv` | one self-checking testbench per module (see *Verification*) |

### Hardware Security Module (`hsm`)

The module splits an N-bit instruction (N = 32) into K chunks of N/K bits.
Chunk *g* is `instr[g*N/K +: N/K]`, so for K = 4 the chunks are bits
[7:0], [15:8], [23:16] and [31:24]. Each chunk has its own encoder and its
own memory. All K memories are addressed by the same index, the word address
`addr[ADDR_LSB +: log2(DEPTH)]`. Each memory entry is therefore the
fingerprint of one chunk of the word installed at that address.

Per chunk, a comparator checks the recomputed check bits against the stored
ones. The warning is raised when any chunk differs, and only in query mode.

The **fragmentation factor** K sets a trade-off. Small chunks give more check
bits per word in total (HSEC8: 16 bits, HSEC32: 6 bits), and each chunk is
checked on its own. The two codes also miss different error patterns (see
below). For that reason the top runs one module of each kind and ORs their
warnings. A K = 2 module (HSEC16: two 16-bit chunks, 5 check bits each) can be
built from the same `hsm`. The top does not use it, because 16-bit chunks
detected worst on the evaluation programs.

### The Hamming code (`hamming_sec_enc`, `hsc_pkg`)

The code is a positional Hamming code. Number the bits of the codeword from 1.
The check bits sit at positions 1, 2, 4, 8, … and the data bits fill the other
positions in order: data bit 0 at position 3, then 5, 6, 7, 9, and so on.
Check bit *j* is the XOR of all data bits whose position has bit *j* set. The
number of check bits is the smallest *p* with 2^p ≥ width + p + 1:

| code | chunk width | chunks per word | check bits per chunk | bits stored per word |
|---|---|---|---|---|
| HSEC32 | 32 | 1 | 6 | 6 |
| HSEC16 | 16 | 2 | 5 | 10 (not instantiated) |
| HSEC8 | 8 | 4 | 4 | 16 |

`hamming_mask()` turns the positions into one constant mask per check bit
during elaboration, so the encoder is P XOR-reductions.

This layout has a useful property. XOR the stored check bits with the
recomputed ones to get a syndrome. If exactly one data bit changed, the
syndrome equals that bit's position. This is why the same memory content
can serve error correction as well as attack detection. The checker itself
only uses "syndrome ≠ 0".

Because the code is linear, some changes go unseen by one code but not by the
other:

* Flipping data bits 0, 1 and 2 of an 8-bit chunk cancels in the 8-bit code
  (3 ⊕ 5 ⊕ 6 = 0). In the 32-bit code, the same three bits of byte 1 sit at
  positions 13, 14 and 15, and 13 ⊕ 14 ⊕ 15 ≠ 0. So HSEC32 sees this change
  and HSEC8 does not.
* Two words with equal 6-bit HSEC32 check bits (about 1 pair in 64) usually
  differ in some 8-bit chunk's check bits. So HSEC8 sees those changes.

The end-to-end test produces both cases.

## Operation and timing

There are two modes, selected by `mode` (`MODE_CONFIGURE` = 0,
`MODE_QUERY` = 1).

**After reset:** every ECC memory writes zeros to all its entries, one entry
per cycle. At the default size this takes 8192 cycles. When it is done,
`ready` goes high. Until then, writes and lookups are ignored. An entry that
was never configured therefore holds check bits of zero, which are the check
bits of the all-zero word.

**Configure (installation):** the loader presents each program word and its
byte address in the same cycle, with `addr_valid` and `instr_valid` both
high. The check bits of every chunk are written at the next rising edge. This
takes one word per cycle and never raises a warning.

**Query (run time):** connect `addr_valid`/`addr` to the processor's
fetch-request address and `instr_valid`/`instr` to the word returned by the
instruction memory.

```
cycle            t          t+1          t+2
addr_valid/addr  A0 ------  A1 -------   (idle)
                 memories read at A0     read at A1
instr_valid/instr           I(A0) -----  I(A1) ----
warning                     cmp(A0,I)    cmp(A1,I)      (combinational)
```

Each memory read starts in the cycle of the fetch address, just as a
synchronous instruction RAM does. The stored bits are then ready when the
instruction arrives. `warning` is combinational, valid while `instr_valid` is
high, and adds no cycle to the fetch. The stored bits are held until the next
address, so the instruction may arrive after wait states. At most one fetch
may be outstanding. Back-to-back fetches work: the next address can be issued
in the same cycle as the previous instruction returns. A concurrent assertion
in `hsm` flags an instruction that arrives in query mode with no lookup open.

`warning` is a pulse, one cycle per offending instruction, and is not latched.
What the system does with it is left to the integrator, for example a
non-maskable interrupt. `warning_hsec32`, `warning_hsec8` and the 5-bit
`chunk_mismatch` vector (bit 0: HSEC32, bits 4:1: HSEC8 chunks 0–3) show which
code fired.

## What it detects, and what it cannot

* **Fetch from outside the program** (threat 1): the fetch reads either an
  unconfigured entry, which holds zero, or an entry that aliases into the
  program window (see below). The attacker's word goes unnoticed only if its
  6 + 16 check bits all equal the stored ones, about 1 chance in 2^22 for an
  arbitrary word. **Exception:** the all-zero word fetched from an
  unconfigured entry is never flagged, because its check bits are zero.
* **Legitimate instruction at the wrong time** (threat 2): this is caught
  unless the delivered word has the same check bits as the word installed at
  the fetch address. That is certain when the two words are identical, for
  example a program that contains the same instruction at both addresses.
* **Not detected at all:** a Trojan that only changes the *order* of fetches
  among legal addresses with the correct words. This includes making the core
  loop over the same legal code, or taking a legal jump too early. Such
  attacks are denial of service; the checker compares words against
  addresses, not the control flow.
* **Address window:** only `log2(DEPTH)` word-address bits (bits [14:2] by
  default) index the memories. An address outside the 32 KiB window aliases
  onto an entry inside it, and detection then relies on the check bits alone.
  To cover a larger instruction space, raise `DEPTH`.
* **Trust assumptions:** the checker, the loader that configures it, and the
  configure/query mode line are assumed trustworthy. A Trojan able to drive
  the mode back to configure could rewrite the fingerprints.

## Sizes and resources

With the defaults, the checker stores 22 bits per instruction word in 5
memories: 8192 × 6 and 4 × 8192 × 4 bits, 180,224 bits in total. After reset
it spends 8192 cycles clearing them. The depth is this design's choice, and
8192 words holds each of the five programs of the evaluation set:

| program | instructions | entries used (of 8192) |
|---|---|---|
| Coremark | 1288 | 1288 |
| Matrix multiplication | 216 | 216 |
| Quick sort | 1023 | 1023 |
| RSort | 4466 | 4466 |
| SHA | 516 | 516 |

For comparison, the original FPGA implementation reports half a block RAM
(about 18 Kbit), 72 LUTs and 24 flip-flops for all programs. Half a block RAM
cannot hold 22 bits for each of 4466 instructions. That implementation must
therefore have stored or shared its check bits in some way not described. This
RTL stores one entry per word. Apart from the memories, the logic is 6 + 16
XOR trees, 5 comparators, a 13-bit clear counter per memory, and a few gates.
That comes to 72 flip-flops (five 13-bit clear counters, their state bits,
two lookup flags), against the 24 reported for the original. The difference
is mostly the clear sweep, which the original does not describe. No timing
closure has been done on this RTL. Its critical path is a memory read, a
5-level XOR tree and a 6-bit compare, so it adds no logic to the
processor's own fetch path.

## Where this RTL departs from, or adds to, the published description

* **What the code covers.** The prose description pairs the i-th n/k address
  bits with the i-th n/k instruction bits to form each chunk. The code sizes
  (6/5/4 check bits for 32/16/8-bit chunks) and the block diagrams, however,
  fit a code over the instruction chunk alone, with the address choosing the
  memory entry. This RTL follows the code sizes and the diagrams.
* **Example numbers.** The published example check-bit values (e.g. `0111`
  for byte 0xF8) are not reproduced. They give two different values for the
  same byte 0xAB, so they cannot come from a fixed code over the byte and were
  read as illustrative. The code layout here is the textbook positional one.
* **This design's own choices:** the valid handshake and the one-outstanding-
  fetch timing, the memory depth and address window, the zero sweep with
  `ready`, the mode encoding, and the extra diagnostic outputs.
* **Not included:** the processor, the instruction memory, the installation
  software and the handling of the warning. They sit outside the checker and
  connect through its ports. The testbenches model them behaviourally.

## Verification

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and has a
watchdog.

* `tb_hamming_sec_enc`: 32-, 16- and 8-bit encoders against an independent
  positional model, the check-bit counts 6/5/4, and the single-bit-error
  property (a flipped data bit changes the check bits by exactly its position).
* `tb_ecc_memory`: the sweep length (exactly DEPTH cycles), zero contents
  afterwards, writes ignored during the sweep, read latency, hold, and random
  traffic against an array model.
* `tb_hsm`: an HSEC8 module with 256 entries. It covers clean fetches (no
  false alarm), swapped instructions, fetches from unconfigured addresses,
  wait states, back-to-back fetches with one corrupted word, and mode gating.
  Every warning and chunk mismatch is compared with a reference model.
* `tb_hsc`: the top at its default size. For each of the five program sizes
  above it resets, clears, installs a random program and runs a
  processor-like fetch stream: sequential fetches, jumps, idle cycles, wait
  states and back-to-back fetches. It then injects 1000 threat-1 and 1000
  threat-2 activations plus a directed pattern that only HSEC32 sees. Every
  fetch is checked against the reference model. The test also requires that
  each mechanism occurred: the clear sweep, configuration, the mode switch,
  clean fetches, both threats, aliasing, HSEC32-only, HSEC8-only and combined
  warnings, wait states, back-to-back fetches and idle cycles. It prints false
  positives and undetected injections per program. With random program words,
  both counts are zero. The published miss rates came from real benchmark
  binaries, in which repeated instructions are common; they are not expected
  here.

To simulate with Verilator 5, for example the top:

```
verilator --binary --timing --assert -Irtl rtl/hsc_pkg.sv rtl/hamming_sec_enc.sv \
    rtl/ecc_memory.sv rtl/hsm.sv rtl/hsc.sv tb/tb_hsc.sv --top-module tb_hsc
./obj_dir/Vtb_hsc
```

The full run takes a few seconds. Leave out the files a block does not use
when testing it alone, and always list the package first. To change the size,
set `DEPTH` on `hsc`. To build an HSEC16 module, instantiate `hsm` with `K=2`.
