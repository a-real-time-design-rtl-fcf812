# Hardware error reconciliation for quantum key distribution

After the quantum exchange and sifting, the two ends of a QKD link (Alice and Bob) each hold a
long bit string. The two strings are nearly equal, but Bob's copy differs from Alice's in a small
fraction p of the positions, typically a few percent. *Error reconciliation* removes these
differences by talking over a public channel. It has to leak as little as possible about the key,
and it has to keep up with the key rate.

This RTL builds a reconciliation engine in the style of Winnow for an FPGA, following the design
published by Cui et al. ("A real-time design based on FPGA for Expeditious Error Reconciliation in
QKD system"):

- Blocks are compared by parity.
- A block whose parity differs gets a single-bit correction from a Hamming syndrome. This takes
  one message, with no binary search.
- The key is permuted between passes by two LFSRs.
- At the end, a 64-bit CRC decides whether the key is kept.

Each side of the link runs the same engine. A side is made of eight independent *reconciliation
modules*, and each module handles 64 Kbit of key. Together they handle 512 Kbit at a time.

## The protocol

Let N be the key length of one module (65 536 bits). One reconciliation has these steps:

1. **Initial block length.** n0 is the largest power of two with n0·p ≤ 0.8. It is never below
   8, and in this design never above N/2.
   - p = 1 %, 5 %, 10 % and 15 % give n0 = 64, 16, 8 and 8.
   - The engine receives p as `p_q16 = floor(p·2^16)`, and the test is `n0·p_q16 ≤ 52428`.
2. **Parity pass.** The key is cut into N/n blocks of n bits each.
   - Bob sends the parity of every block.
   - Alice compares them with her own parities.
   - If every parity agrees, or n has reached N/2, go to step 5.
3. **Hamming step.** Each block whose parity differs gets one bit inverted on Bob's side (see
   below). This repairs the block if it held exactly one error. If it held three or more, the
   inverted bit may be a new error.
4. **Next pass.** Double n, apply the same pseudo-random permutation to both keys, and go back
   to step 2.
5. **Check.** Both sides compute a 64-bit CRC of the key and exchange it.
   - Equal CRCs: the key is kept (`key_ok = 1`).
   - Different CRCs: the key is discarded.

### Message sequence of one pass

All messages are 64-bit words, and the same engine plays either role (`is_alice`).

| phase | Bob → Alice | Alice → Bob |
|---|---|---|
| parity | N/n parities, 64 per word (bit t of word k is block 64k+t) | the XOR of both parity sets, same packing (1 = block differs) |
| Hamming | – | one word per differing block: Alice's syndrome in the low bits |
| CRC (last pass) | Bob's CRC | Alice's CRC |

Alice sends the parity difference back so that Bob knows which blocks to correct. Both sides
store this difference as a bit vector: the *mismatch record*, one bit per block. The Hamming
step then visits the marked blocks on each side in the same order. Because of this, a syndrome
word needs no block number.

## Hamming correction with power-of-two blocks

A Hamming matrix with r rows has 2^r − 1 columns. Column j is the binary number j, so the entry
in row i, column j is h_ij = ⌊j / 2^(i−1)⌋ mod 2. The syndrome of a block is the XOR of the
column numbers of all its 1 bits.

Blocks here have n = 2^r bits, one more than the matrix has columns. The engine uses r = log2 n,
numbers the block's bits 0 … n−1, and treats bit 0 as the zero column.

Suppose a block holds a single error at local position e. The syndromes of Alice and Bob then
differ by exactly e. This also holds for e = 0: a zero difference in a block whose parity
already differs points at bit 0. So Bob inverts bit `block·n + (sA ⊕ sB)`.

The rows of the matrix are never stored: row i is simply bit i−1 of the bit position. The
syndrome of a 64-bit key word is built from six fixed masks plus the word's offset inside the
block. The engine discloses r = log2 n syndrome bits per differing block.

## Permutation by two LFSRs

Errors that cancel in a block's parity (two of them, or four) must be split up before the next
pass. The engine does this with two maximal-length LFSRs of log2 N = 16 bits:

- The LFSRs use Fibonacci form, shift left, with taps 16, 15, 13, 4.
- Their seeds default to 5 and 78.
- For i = 0 … N−1, the key bits at positions a_i and b_i (the two LFSR states) are exchanged.
  Then both LFSRs step once.
- Both sides use the same seeds, so they apply the same permutation.

The LFSRs are loaded once per reconciliation and keep running from pass to pass, so every pass
uses a different permutation. An LFSR never reaches state 0, so bit 0 never takes part in an
exchange; its block-local position still changes as blocks grow. A zero seed is replaced by 1.

How well a permutation separates bits is measured by **D_tot**. For a bit p, take the other bits
of p's old block (length n/2). D_p is the fraction of those bits that do *not* share a block of
length n with p after the permutation. D_tot is the mean of D_p over all bits.

`tb_workload_dtot` reads the permutation map back out of the hardware and finds these values for
seeds 5 and 78:

| n | 16 | 256 | 2048 | 8192 | 16384 | 32768 |
|---|---|---|---|---|---|---|
| D_tot | 0.9999 | 0.9935 | 0.9694 | 0.8752 | 0.7501 | 0.5000 |

These values are close to those of a random permutation, 1 − (n−1)/(N−1). All 64 sampled second
seeds give D_tot > 0.99 at n = 16. The sharp drop above 8192 is expected: large blocks cannot be
separated.

## Inside one reconciliation module

```
            channel in                                      channel out
                │                                                ▲
          incoming FIFO ──┐                           ┌──► outgoing FIFO
                          │      data bus + control   │
                          └──────────(bus_ctrl)───────┘
                             ▲          ▲          ▲
                   parity_cmp     hamming_unit     recon_ctrl (CRC exchange)
                     │  │ writes     │ reads            │ phase
                     │  └──► mismatch record ◄──┘       │
                     ▼                                  ▼
        key RAM port A (muxed by phase: parity / hamming / crc64 / load port)
        key RAM port B (permute only)
```

- **Interface** (`recon_interface`: `sync_fifo` ×2 and `bus_ctrl`). The modules that talk to
  the other side raise `req`. The control module grants the bus to one of them at a time: lowest
  index first, and the grant is kept until the owner drops `req`. Only the granted module drives
  the outgoing FIFO or reads the incoming one. A unit that wants a word while the incoming FIFO
  is empty simply stalls; `rx_wait` and the `wait_cycles` counter record this. The FIFOs are 512
  words of 64 bits.
- **Pass controller** (`recon_ctrl`). A phase FSM: idle → parity → Hamming → permute → … →
  CRC → exchange → done. The phase selects the unit that owns key-RAM port A. The units never run
  at the same time, because the next parity pass needs the finished permutation. The controller
  also counts:
  - `passes`;
  - `leak_bits`: the disclosed bits, namely N/n parity bits per pass, log2 n per differing
    block, and 64 for the CRC.
- **Parity comparison** (`parity_cmp`). Reads one key word per clock and reduces it with XOR:
  - For n ≤ 64, one word gives 64/n parities.
  - For n > 64, partial parities are added up over n/64 words.

  A finished parity word sits in an output register while reading continues. This realises the
  read / compute / format / send pipeline.
- **Hamming code** (`hamming_unit`). Scans the mismatch record and reads the words of each marked
  block back to back. It folds the syndrome one clock after each read.
  - Alice sends her syndrome.
  - Bob waits for it, then does a read-modify-write of the one word that holds the bit to invert.
- **Permutation** (`permute`). Two `lfsr` instances and both key-RAM ports. Each exchange takes
  two clocks: read both words, then write both back. If both bits are in the same word, the
  write goes through port A alone.
- **CRC** (`crc64_unit`). CRC-64/ECMA-182: polynomial 0x42F0E1EBA9EA3693, initial value 0, bits
  MSB first. It processes one 64-bit word per clock through an XOR network, `crc64_word` in the
  package.
- **Memories** (`tdp_ram`). Registered-output, true dual-port arrays:
  - the key, 1024 × 64;
  - the mismatch record, 128 × 64. This is one bit per block at the smallest block size, n = 8.

The top level `qkd_er_top` places `NUM_MODULES = 8` modules side by side.
- Shared inputs: role, `p_q16`, seeds and `start`.
- Key load and read-back port: one port, with `key_sel` choosing the module. Read data arrives
  one clock after the address.
- Channel: each module has its own pair of valid/ready word streams. The transport between the
  two sides is left outside the design.

## Timing

At 100 MHz and N = 65 536, one pass of one module costs about:

- **Parity:** N/64 = 1024 clocks of reading, plus the transfer of N/(64n) parity words and their
  return.
- **Hamming:** max(1, n/64) reads per differing block, plus the syndrome exchange. A correction
  adds 2 clocks.
- **Permutation:** 2N = 131 072 clocks (1.31 ms). This dominates.
- **CRC:** N/64 + 2 clocks, once.

Measured over a link that stalls 1 clock in 4, with all eight modules running in parallel:

- **p = 3 % on 512 Kbit:** 807 463 clocks, about 8.1 ms (`tb_qkd_er_full`).
- **One module, p = 1 % … 10 %:** 5.6–16.3 ms, depending mostly on the number of passes
  (`tb_workload_efficiency`).

The original implementation reports under 50 ms for 512 Kbit at p < 4 %, so this engine is well
within the real-time budget. 512 Kbit in 8.1 ms corresponds to a sifted-key rate of about
65 Mbit/s.

Synthesised memory for eight modules is 1 114 112 bits: 8 × (65 536 key + 2 × 32 768 FIFO +
8 192 record). The original design reports 1 093 632 RAM bits.

## Efficiency and how often a key survives

The efficiency is f = leak_bits / (N·h(p)), where h is the binary entropy. `tb_workload_efficiency`
measured, for one 64 Kbit pair with seeds 5 and 78:

| p | 1 % | 2 % | 3 % | 4 % | 5 % | 6 % | 7 % | 8 % | 9 % | 10 % |
|---|---|---|---|---|---|---|---|---|---|---|
| passes | 10 | 11 | 6 | 10 | 12 | 5 | 7 | 9 | 12 | 13 |
| f | 1.43 | 1.44 | 1.37 | 1.45 | 1.38 | 1.41 | 1.41 | 1.47 | 1.52 | 1.47 |
| key kept | no | no | yes | yes | no | yes | yes | yes | no | no |

f is in the same range as the 1.4–1.7 published for the original design. Two more rates were
run: p = 1.25 % gives f = 1.26 and p = 2.5 % gives f = 1.35. These are the lowest rates at which
n0 is still 64 or 32, and both keys were discarded. There f dips, because the blocks are as full
as the n0·p ≤ 0.8 rule allows. The original results show the same local minima. However, the protocol
*as specified* often ends with errors left over:

- Blocks keep doubling even when many errors remain.
- A correction in a block with three errors adds an error.
- Once blocks are large, pairs of errors hide in blocks whose parity agrees.

The pass loop then stops, either because all parities agree or because n reached N/2, and the
CRC check discards the key. The bit-level reference model shows the same behaviour, so this is
a property of the protocol steps, not of the RTL. The original publication does not report a
failure rate. Anyone using this engine should expect to discard some keys, or should change the
schedule, for example by repeating a block size before doubling.

## Where this RTL departs from or adds to the original design

- **Permutation throughput.** The original says its permutation module is pipelined like the
  parity comparison. An exchange needs two reads and two writes. With one dual-ported key RAM
  that takes at least two clocks, which is what this module spends. Only the LFSR stepping and
  the address calculation overlap with the RAM access. A faster permutation would need a
  banked key memory.
- **Hamming with power-of-two blocks.** Using bit 0 as the zero column, together with the
  parity that is already known, is this design's reading of how an r × (2^r−1) matrix covers a
  2^r-bit block.
- **Message formats, the returned parity difference, the CRC exchange in both directions.** The
  original does not specify these.
- **Leak count.** Counts Bob's parities once. Alice's returned difference tells an eavesdropper
  nothing new. The CRC is counted as 64 bits.
- **CRC polynomial, FIFO depth and word width.** Not specified by the original; chosen here.
- **Upper limit n0 ≤ N/2 and the last pass.** The last pass is the one with n = N/2 and has no
  Hamming step.
- **Bus arbitration.** Fixed priority with grant holding. The pass controller is a third bus
  user, for the CRC words.
- **Not included.** Estimation of the error rate (p is an input), key sifting, privacy
  amplification, and the USB/PC/network transport between the two sides.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `qkd_er_top` | `NUM_MODULES` | 8 | modules per side |
| `qkd_er_top`, `recon_module` | `KEY_BITS` | 65536 | key bits per module (power of two, ≥ 1024) |
| `qkd_er_top`, `recon_module` | `FIFO_DEPTH` | 512 | words per channel FIFO |
| `lfsr` | `WIDTH` | 16 | log2 `KEY_BITS`; taps tabulated for 3 … 20 |

Shared constants and the enum of controller phases are in `qkd_er_pkg`.

## Verification and simulation

Every module has a self-checking testbench in `tb/`. Each testbench compares the module against
values worked out independently of the module, and ends with a line `TB_RESULT checks=… failures=…`.

The engine-level testbenches compare against `recon_model_pkg`. This is a bit-level model of the
protocol that works on plain bit arrays, not on 64-bit words. It predicts:
- final keys of both sides;
- passes;
- disclosed bits;
- corrections;
- the CRC verdict.

| testbench | what it runs |
|---|---|
| `tb_sync_fifo`, `tb_tdp_ram`, `tb_bus_ctrl`, `tb_recon_interface` | storage and interface, random traffic against a queue/array model |
| `tb_lfsr`, `tb_n0_select`, `tb_crc64_unit` | full LFSR periods, the n0 rule at its boundaries, CRC-64 check value |
| `tb_parity_cmp`, `tb_hamming_unit`, `tb_permute`, `tb_recon_ctrl` | the pass units, two sides connected through FIFOs |
| `tb_recon_module` | one Alice/Bob pair, 4096-bit keys, five error rates |
| `tb_qkd_er_top` | two small engines end to end. Counts corrections, permutations, both stop reasons, kept and discarded keys, channel waits and full FIFOs |
| `tb_qkd_er_full` | two engines at full size (8 × 64 Kbit), p = 3 % |
| `tb_workload_efficiency` | one full-size pair, p = 1 … 10 %, 1.25 % and 2.5 % |
| `tb_workload_dtot` | D_tot of the hardware permutation |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/qkd_er_pkg.sv tb/recon_model_pkg.sv rtl/*.sv tb/tb_recon_module.sv \
    --top-module tb_recon_module
./obj_dir/Vtb_recon_module
```

The full-size runs take under a minute each.

The testbenches use small sizes where they can. Parameters such as `KEY_BITS`, `FIFO_DEPTH` and
`NUM_MODULES` can be reduced freely for experiments, with these limits:
- `KEY_BITS` must be a power of two and at least 1024. The engine-level testbenches go down to 4096.
- `FIFO_DEPTH` must be a power of two.
