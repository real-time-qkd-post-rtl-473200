# A key distillation engine for QKD post-processing

Quantum key distribution (QKD) leaves Alice and Bob with two long strings of
raw detections that are correlated but neither equal nor secret. Classical
post-processing turns them into a shared secret key. It runs in five steps:

1. Align the two records in time.
2. Sift out detections whose bases did not match.
3. Reconcile the remaining errors.
4. Verify that the reconciled strings really agree.
5. Compress away whatever an eavesdropper may know (privacy amplification).

All classical messages are authenticated along the way. The finished key
then feeds an AES-128 cipher.

This repository is a SystemVerilog implementation of such a key distillation
engine. It follows the architecture of "Real time QKD Post Processing based
on Reconfigurable Hardware Acceleration". That design organises the
expensive middle part, reconciliation plus verification, as a map-reduce
job. A block of about 10^6 sifted bits is split into LDPC frames. Up to four
*mappers* work on their shares in parallel: each corrects its frames and
verifies the result. A single *reducer*, privacy amplification, then hashes
the combined surviving bits into the final key.

Everything the paper runs as software on its soft processor lives outside
the RTL and reaches the engine through plain ports:

- scheduling and moving data to and from DDR3;
- estimating the QBER and choosing the code;
- exchanging syndromes, tags and flags over the classical link;
- the true random number generator (TRNG).

## Data flow

```
 detections ─► aligner (delay search)
           └─► sifter ─► 64-bit packer ─► acquisition FIFO ─► (processor, DDR3)

 processor ─► split FIFO ─► mapper 0 ─┐  LDPC decode (Bob) / syndrome (Alice)
           ─► split FIFO ─► mapper 1 ─┤  16-chunk XOR-fold + Poly1305 tags
           ─► split FIFO ─► mapper 2 ─┤  combiner buffer (1 Mbit each)
           ─► split FIFO ─► mapper 3 ─┘
                                      │ chunk_ok flags (failed chunks dropped)
                                      ▼
             reducer_feed ─► privacy_amp (Toeplitz) ─► final key bits
                                 ▲ seed memory (2 Mbit)     │
                                                            ├─► AES-128 key (every 128 bits)
                                                            └─► out
 classical messages ─► auth_mac (Toeplitz-refreshed Poly1305) ─► tag
```

`kde_top` builds all of this. The modules underneath are:

| module | role |
|---|---|
| `aligner` | finds the delay between Bob's and Alice's records |
| `sifter` | BB84 / BBM92 / COW basis sifting |
| `sync_fifo` | acquisition FIFO and per-mapper split buffers |
| `mapper` | split FIFO + `ldpc_decoder` + `ldpc_syndrome_enc` + `error_verify` + combiner buffer |
| `ldpc_decoder` | syndrome decoder, layered normalised min-sum |
| `ldpc_syndrome_enc` | Alice's syndrome s = Hx |
| `error_verify` | XOR-folding and 16 Poly1305 tags per share, comparison with the peer |
| `poly1305` | Poly1305 hash, one 16-byte block per clock |
| `reducer_feed` | streams the surviving chunks of the active mappers to privacy amplification |
| `privacy_amp` | Toeplitz hashing in passes of 1024 output bits |
| `toeplitz_keygen`, `auth_mac` | authentication tag t = h_{k1'}(m) XOR k2 with k1' = T_r k2 |
| `aes128` | pipelined AES-128, encrypt and decrypt, one block per clock |
| `kde_pkg`, `aes_pkg` | shared types, constants and AES round functions |

## Alignment and sifting

`aligner` takes Alice's and Bob's bit per time slot over a window. It keeps
one agreement counter per candidate delay d = 0..63: Bob's bit is compared
with Alice's bit from d slots earlier. A counter only counts once d slots
have been seen, so every delay is judged over the same span. The delay with
the most agreements wins.

The engine uses the raw agreement count as its correlation measure. For a
fixed window it ranks delays the same way a correlation coefficient would,
but it is not normalised.

`sifter` applies the announcement rules:

- **BB84.** Bob announces his basis bit and Alice answers with the XOR of the
  two bases. A detection is kept when the bases agree. This costs 2
  classical bits per detection.
- **BBM92.** Same rule as BB84; it is BB84's entanglement-based variant.
- **COW.** Bob announces which detector clicked and Alice need not answer. A
  data-line click (bit 0) is kept. This costs 1 classical bit per detection.

The sifter counts the kept bits and the classical bits spent. The top packs
kept bits 64 at a time, first bit in bit 0, into the acquisition FIFO.
`acq_overflow` records a word lost to a full FIFO.

## Reconciliation: the mappers

### Shares and frames

For one privacy-amplification block the processor does the following:

1. Write each active mapper's 16 peer tags, when the mapper is Bob.
2. Pulse `share_start` with the share length and the 256-bit verification
   key.
3. Push the share as a sequence of LDPC frames: 64-bit words into the
   mapper's split FIFO, then a `frame_start` per frame.

A frame is:

- on **Bob** (`role = ROLE_BOB`): ceil(n/64) words of his noisy bits y, then
  ceil(m/64) words of Alice's syndrome;
- on **Alice** (`ROLE_ALICE`): her n bits x only.

The syndrome encoder's bits leave on `syn_valid/syn_bit`, for the processor
to send to Bob. Each mapper holds both the encoder and the decoder, so one
bitstream serves either end.

The corrected frame, or Alice's unchanged frame, is written one bit per clock
into the mapper's combiner buffer (COMB_BITS = 2^20 bits). It streams into
error verification at the same time.

### The LDPC decoder

The parity-check matrix is loaded at run time, not built in. It is an edge
list: one column index per 1 of H, row after row, with the last edge of each
row flagged (`h_we/h_addr/h_col/h_row_end`). Up to E_MAX = 32768 ones are
allowed.

The paper's code is 7680 x 8192, shortened to (7680−f) x (8192−f) to match
the measured QBER. Here `n_cols`, `n_rows` and `n_edges` give the shortened
size at each start. Only the first n columns are used, so shortening costs
nothing extra.

The decoder works in the syndrome (Slepian–Wolf) form. It looks for the word
closest to y whose syndrome equals Alice's s:

1. **Initialise.** Each bit's posterior L starts at ±`llr_mag`; the
   processor derives `llr_mag` from the QBER. All check-to-variable messages
   R are cleared. This takes max(n, E) clocks.
2. **Check.** One clock per edge compares the syndrome of the hard decisions
   with s. If they match, decoding stops with `success = 1`.
3. **Iterate.** One layered iteration takes two clocks per edge.
   - *Gather:* for each row, form Q = L − R and keep the two smallest |Q|,
     the position of the smallest and the sign parity.
   - *Scatter:* write R' = 0.75·min(other |Q|). Its sign is the product of
     the other signs, flipped when the syndrome bit is 1. Then set
     L = Q + R'.

   Layered means each row uses the L values the previous rows have just
   updated. This roughly halves the iterations a flooding schedule needs.
4. Repeat from step 2, up to `max_iter` iterations (the paper's limit is 50).
   Then the n hard decisions leave one per clock.

Messages are 8 bits, posteriors 10 bits, all saturating.

Cycle count of one frame, from `start` to `done`:

```
1 + ceil(n/64) + ceil(m/64) + max(n,E) + (it+1)·E + it·2E + n
```

Here `it` is the number of iterations used. At full size (n = 8192,
m = 7680, column weight 3, so E = 24576) this is:

| iterations | cycles |
|---|---|
| 1 | about 131,300 |
| 50 (worst case) | about 3.75 M |

The serial, one-edge-per-clock datapath is this design's choice. It keeps
one mapper to a few block RAMs, and its speed comes from running several
mappers at once, as in the paper.

### Error verification

Bob cannot be sure the decoder converged to Alice's word. Both sides
therefore hash their share the same way and Bob compares the results. The
share of N bits is cut into 16 chunks of L = ceil(N/16) bits. Each chunk is
*folded* to at most 128 bits by repeatedly XORing its two halves.

Folding is done on the fly, as the bits stream in:

- Let S be L halved (rounding up) until it is at most 128.
- Bit j of the chunk is XORed into position j mod S of a 128-bit register.
- This equals halving exactly when the chunk is taken as padded with zeros
  at its end up to S·2^k bits.

Each folded chunk goes through Poly1305 as one 16-byte block, under the
256-bit pre-shared key (r = bits [127:0], s = bits [255:128]). This gives
16 tags of 128 bits. On Bob, tag c is compared with Alice's tag c and the
result becomes `chunk_ok[c]`. On Alice, `chunk_ok` is the verdict Bob sends
back (`flags_we/flags_in`). A chunk whose tags differ is discarded whole,
so one failed frame costs only the chunks it touches.

The paper describes verification over the whole 10^6-bit block, but draws
it inside each mapper. This design follows the drawing: each mapper verifies
its own share with 16 tags. A block processed by four mappers is therefore
covered by 64 tags.

## Privacy amplification: the reducer

`reducer_feed` walks the combiner buffers of mappers 0..`num_active`−1 in
that order, chunk by chunk, and skips every chunk whose `chunk_ok` bit is 0.
The surviving bits W (n of them) go one per clock to `privacy_amp`.
`num_active` lets one build run with 1, 2, 3 or 4 mappers.

`privacy_amp` computes the final key K of r bits (`r_len`) as a Toeplitz
product over GF(2):

```
K[i] = XOR_j  T[i][j] · W[j],     T[i][j] = s[j − i + r − 1]
```

s is a public random seed of n + r − 1 bits in the seed memory. The
processor writes it from the TRNG.

Storing all r accumulators would cost r flip-flops. Instead, the output is
made in passes of PA_SEG = 1024 rows. For rows i0 .. i0+S−1, the seed bits
one column needs form a contiguous window of S bits. Moving to the next
column slides that window by one seed bit. So a pass needs only:

- an S-bit window shift register, filled from the seed memory one bit per
  clock;
- an S-bit accumulator. Each 1-bit of W XORs the window into it.

A pass does the following:

1. Fill the window (S clocks).
2. Raise `pass_req`. The reducer replays W from its start.
3. Shift the S finished key bits out on `key_valid/key_bit/key_idx`.

A pass takes about n + 2S clocks, and there are ceil(r/S) passes.

This is the direct O(n·r) product. The paper reduces the cost to
O(n log n) with an FFT-based multiplication split into sub-blocks. That
is **not** built here; see "Departures" below. The block is therefore
correct but slow for long final keys. With n ≈ 10^6 and r = 10^5 it takes
about 10^8 clocks.

## Authentication

Classical messages are authenticated Wegman–Carter style: t = h_k1(m) XOR
k2. Here h is the Poly1305 polynomial hash over 2^130 − 5, evaluated by
Horner's rule, one 16-byte block per clock. This combination by XOR is the
form the paper writes (its eq. 2). The verification tags use standard
Poly1305's addition mod 2^128 instead; `xor_mode` selects between them.

As a countermeasure against power analysis, k1 is never reused. For every
message, `toeplitz_keygen` derives k1' = T_r · k2 from 255 fresh TRNG bits r
(`auth_r`), where T_r is their 128 x 128 Toeplitz matrix. This takes one
clock. `auth_ready` rises two clocks after `auth_start`. The tag appears one
clock after the last block.

## AES-128

`aes128` unrolls the ten rounds into an 11-stage pipeline for encryption and
another for decryption. It accepts one 128-bit block per clock in either
direction (`decrypt` travels with the block) with 11 clocks of latency. So
10 Gbit/s needs a clock of 78.2 MHz or more.

The S-boxes are constant lookup tables. Key expansion runs on its own, one
round key per clock, and `key_ready` rises 11 clocks after `key_load`. In
the top, each complete group of 128 final-key bits (first bit as the key's
most significant bit) is loaded as a new AES key as soon as it leaves
privacy amplification.

## Using the top level

`kde_top` has plain ports only. Per-mapper signals are packed arrays with
one lane per mapper.

| group | ports | notes |
|---|---|---|
| alignment | `al_*` | |
| sifting and acquisition | `proto`, `det_*`, `sift_*`, `acq_*` | |
| code | `h_*`, `n_cols`, `n_rows`, `n_edges`, `llr_mag`, `max_iter` | loaded once, shared by all mappers |
| mapper lanes | `push`, `push_word`, `share_start`, `frame_start`, `frame_done`, `frame_ok`, `syn_*`, `peer_*`, `flags_*`, `tag*`, `ver_done`, `chunk_ok` | |
| reduction | `num_active`, `seed_*`, `pa_start`, `r_len`, `pa_*`, `key_*` | |
| AES | `aes_*` | |
| authentication | `auth_*` | |

A full round on Bob's side runs as follows:

1. Load H.
2. Write the peer tags.
3. Pulse `share_start` on the active mappers.
4. For each frame, push y and s, then pulse `frame_start`. Frames of
   different mappers decode in parallel.
5. Wait for `ver_done`.
6. Write the seed and pulse `pa_start` with `r_len`.
7. Collect the key.

Alice does the same with `role = ROLE_ALICE`. She forwards `syn_bit` to Bob,
sends him her tags, and writes back his flags.

### Default sizes and what they hold

| parameter | default | origin |
|---|---|---|
| N_MAPPERS | 4 | paper (largest configuration measured) |
| N_MAX x M_MAX | 8192 x 7680 | paper (code size) |
| MAX_ITER | 50 | paper |
| E_MAX | 32768 | own choice (ones in H) |
| COMB_BITS | 2^20 per mapper | own choice: one mapper holds a whole 1,007,616-bit block |
| SEED_BITS | 2^21 | own choice: n + r − 1 for n ≈ 10^6 |
| PA_SEG | 1024 | own choice |
| FIFO_DEPTH | 512 words | own choice |
| ACQ_DEPTH | 1024 words | own choice |
| MAX_OFFSET | 64 | own choice |

The paper's measured block sizes fit:

- 1,007,616 bits is 123 frames of 8192 bits. Run on 1 or 3 mappers, that is
  123 or 41 frames each.
- 983,040 bits is 120 frames. Run on 4 mappers, that is 30 frames each.

In both cases the shares fit the combiner buffers, and the privacy-amplification
seed fits the seed memory.

## Departures from the paper and open points

- **Privacy amplification** is the direct Toeplitz product in passes. It is
  not the paper's FFT-based fast multiplication with split, sub-PA and merge
  steps. The key it produces is the same; the time is not.
- **PA seed length** is n + r − 1 bits. The paper states n − 1, which is too
  short for an r x n Toeplitz matrix.
- **The LDPC code itself** comes from a reference the paper cites and is not
  printed. The decoder therefore loads any H at run time. Whether a given
  code reaches the paper's 25 % QBER has not been checked here. The
  testbenches use random column-weight-3 matrices.
- **The decoding rule** (layered min-sum, ×0.75), message widths and the
  serial schedule are this design's choices. The paper says only "soft
  message passing".
- **Error verification** is done per mapper share, not once per 10^6-bit
  block. Chunks that do not divide evenly are zero-padded at their end.
  Poly1305's r is clamped as in the standard.
- **Correlation for alignment** is an agreement count, not a normalised
  coefficient.
- **Sifting encodings** (bases equal means keep; COW click bit 0 means data
  line) are assumptions.
- **Not in the RTL:**
  - the soft processor and its software: scheduler, random sampling, QBER
    estimation and abort;
  - DDR3 and its controller;
  - AXI;
  - White Rabbit synchronisation;
  - the Aurora link;
  - the host and optical I/O;
  - the TRNG;
  - the key manager.

  They are either vendor parts, external equipment or software, or only
  named. Their data enters and leaves through the top-level ports.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends with a line
`TB_RESULT checks=N failures=M`. Reference models that share no code with
the RTL live in `tb/tb_ref_pkg.sv`:

- Poly1305 with bit-serial modular arithmetic;
- XOR-folding by literal halving;
- the Toeplitz product written out.

`tb/tb_ldpc_pkg.sv` generates random parity-check matrices and their
syndromes.

| testbench | what it shows |
|---|---|
| `tb_poly1305` | RFC 8439 test vector; random messages of every length in both combination modes; one block per clock |
| `tb_aes128` | FIPS-197 known answers; back-to-back streams both ways; 11-clock latency and key expansion |
| `tb_toeplitz_keygen`, `tb_auth_mac` | matrix product and tag against references; ready and tag timing |
| `tb_sifter`, `tb_aligner`, `tb_sync_fifo` | sifting rule and counts per protocol; recovered delays; FIFO against a queue model |
| `tb_ldpc_syndrome_enc`, `tb_ldpc_decoder` | syndromes; correction of a few errors; failure at 40 % errors; shortened codes; exact cycle counts |
| `tb_error_verify` | tags for exact, uneven and folded chunk sizes; detection of a corrupted peer tag |
| `tb_privacy_amp` | every final-key bit against the matrix product; pass count and cycle budget |
| `tb_mapper` | both roles: decoding, tags, verdicts, combiner contents |
| `tb_kde_top` | the whole engine at reduced sizes (see below) |
| `tb_kde_top_full` | the whole engine at its default sizes (see below) |

`tb_kde_top` runs with 256-bit frames and 64-row passes. It counts each
mechanism and fails if one never happens:

- alignment;
- sifting in all three protocols;
- acquisition words, and a FIFO overflow;
- successful and failed decodes (a frame with 40 % errors), with mappers
  running in parallel;
- matching tags and discarded chunks, one of them through a corrupted tag;
- three privacy-amplification passes with only three of four mappers
  active;
- AES key load, encryption and decryption;
- an authentication tag;
- Alice's syndrome and her taking Bob's verdict.

`tb_kde_top_full` instantiates `kde_top` with no parameter overrides. It
takes one 8192-bit frame through each of the four mappers in parallel,
then:

- verifies 64 chunks, one of them deliberately failing;
- hashes the 31,232 surviving bits to a 1100-bit key in two passes, checked
  bit by bit;
- keys the AES from that key;
- tags a message.

It simulates in a few seconds.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/kde_pkg.sv rtl/aes_pkg.sv tb/tb_ref_pkg.sv tb/tb_ldpc_pkg.sv \
  tb/tb_kde_top.sv --top-module tb_kde_top
./obj_dir/Vtb_kde_top
```

Replace `tb_kde_top` with any other testbench name.

With `--assert`, immediate assertions also check three rules:

- a FIFO never holds more than its depth;
- a mapper frame starts only after the previous one has ended;
- a share never overruns its combiner buffer.

Verilator's lint lists a few warnings that are left on purpose:

- unused bits of wide intermediates;
- unused counters of the FIFOs inside the top;
- package constants not used by every module.

None of them is a latch, a combinational loop or an undriven net.
