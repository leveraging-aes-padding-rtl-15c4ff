# Error correction from AES padding: a joint ORBGRAND / AES-128 receiver

## The idea

A small IoT node that encrypts with AES-128 usually has to pad its payload:
a k-bit message is extended with n-k known bits to fill the 128-bit block,
and the whole block is encrypted. Nothing else protects the data on the
channel. If a single bit of the ciphertext is wrong, the whole decrypted block
is garbage, and the block has to be sent again.

This receiver treats the padding as redundancy. AES output looks random, so
the 2^k ciphertexts whose decryption ends in the right padding behave like
the codewords of a random code of length 128 with n-k parity bits. A received
word that decrypts to the right padding is, with high probability, the word
that was sent. A word that does not is corrupted, and the receiver can try
flipping bits until it decrypts correctly. This is GRAND: guess the noise,
remove it, and test for membership in the code. Here the membership test is
"decrypt and compare the padding".

The transmitter does not change at all. It is still a plain pad-and-encrypt
node. Only the receiver grows an error pattern generator next to its AES
decryption core.

With 12 padding bits (a 116-bit payload), each wrong guess still matches the
padding by chance with probability 2^-12. That is the price of a short code:
occasionally a wrong block is accepted. With 8 bits it is 2^-8.

## Data flow

```
 SPI in ──► input FIFOs ──► noise removal ──► AES-128 decrypt ──► padding ──► output FIFOs ──► SPI out
 (Y, LLR)   (Y | LLR mag)     Y ^ e              13 cycles          check      (plaintext | status)
               │                 ▲                                    │
               └─► error pattern generator ◄── "padding wrong" ───────┘
                   (sort LLRs, list patterns, map to bit positions)
```

1. **Fetch.** A block enters as the 128 hard decisions Y and 128
   reliability values (LLR magnitudes). The controller pops it from the two
   input FIFOs. In the same cycle it:
   - starts decrypting Y as received;
   - starts the error pattern generator on the LLRs.
2. **Decrypt and check.** Thirteen cycles later the plaintext is known. If
   its last `pad_len` bits equal the padding value, the plaintext goes to
   the output FIFOs.
3. **Guess.** Otherwise the next error pattern e is XORed onto Y, and
   Y ^ e is decrypted.
4. **Repeat.** Steps 2 and 3 repeat until the padding is right, or until the
   pattern list ends.

## The error pattern generator

This is the least obvious part. It has three pieces.

### Ranking the bits (reliability sorter)

ORBGRAND does not look at LLR values once they are sorted; it only uses
the **rank** of each bit. Rank 1 is the least reliable bit, rank 128 the most
reliable.

The sorter is a bitonic network over 128 keys `{magnitude, index}`:
- Putting the index in the key breaks ties and makes the result a true
  permutation.
- The network has 28 compare-exchange layers, grouped into its 7 merge
  phases.
- There is a register after each phase. The order is therefore valid 8 cycles
  after load: one cycle to capture the input, then 7 phases.
- The output `order[r]` is the bit index with rank r+1.

The sorter runs only once per block. That happens while the first decryption
is still in progress, so it never adds latency.

### Listing the patterns (pattern generator)

A pattern flips the bits of some set of distinct ranks. Its **logistic
weight** is the sum of those ranks. ORBGRAND tries patterns in increasing
logistic weight:

- weight 1: {1}
- weight 2: {2}
- weight 3: {3}, {2,1}
- weight 4: {4}, {3,1}
- weight 5: {5}, {4,1}, {3,2}
- ...

The patterns of weight W are exactly the partitions of W into distinct
parts. The generator keeps the current partition as a descending list of at
most `HW_MAX` parts and produces the next one in a single clock cycle. The
successor rule:

- Find the rightmost part that can be lowered by one. A part p[i] qualifies
  when the amount freed, plus the sum of all parts to its right, still fits
  to its right as distinct parts smaller than p[i]-1, within the parts still
  free.
- Lower that part.
- Refill everything to its right greedily, largest part first. This gives
  the next partition in reverse lexicographic order, with the fewest parts.
- If no part can be lowered, the weight is finished. The next pattern is
  then the greedy split of W+1.

The fit test uses a closed-form bound: the largest sum of j distinct parts
below m. So the whole step is combinational, with one comparison per part.
When the weight would go above `LW_MAX`, the generator raises `exhausted` and
stops.

With the defaults (`LW_MAX = 64`, `HW_MAX = 8`), the list holds 156,844
patterns; 69 of them have a weight of 12 or less. Each pattern costs one
decryption, so the worst case for a single block is about 2 million cycles.

### Mapping ranks to bits (error generator)

This is a combinational decoder. For every part r of the current pattern, it
sets bit `order[r-1]` of a 128-bit mask. The mask is registered, together with
a valid flag, and that register is the pattern that the controller receives.

## The controller and its timing

The AES core needs 13 cycles per decryption, including loading the input and
delivering the output:
- 1 cycle for the initial AddRoundKey;
- 10 rounds;
- 1 output cycle;
- the start cycle.

The controller keeps that core busy all the time:

- **Fetch and first decryption in one cycle.** The first decryption takes Y
  directly from the FIFO output. A block that needs no correction therefore
  leaves 13 cycles after it was fetched: 130 ns at 100 MHz. That is the same
  as a receiver that only decrypts.
- **Prefetch.** While a decryption runs, the controller already asks the
  generator for the next pattern and keeps it in a register. When the padding
  check fails, the next decryption starts in the same cycle. Every guess
  costs exactly 13 cycles.
- **Back to back.** A finished block is written to the output FIFOs, and the
  next waiting block is fetched in the same cycle. Clean blocks therefore
  stream out one every 13 cycles: 116 payload bits per 130 ns, or 892 Mbit/s
  at 100 MHz for 12-bit padding.
- **Output back-pressure.** If the output FIFOs are full when a block
  finishes, the result is held in a register until there is room, and
  nothing new is fetched.
- **Giving up.** If the generator runs out of patterns, the block is written
  with the fail flag set, together with the decryption of the uncorrected Y.
  This is the block a plain decrypting receiver would have produced, so the
  next layer can ask for a retransmission.

Every output block carries a 16-bit status word `{fail, guesses[14:0]}`.
`guesses` is the number of decryptions spent on the block: 1 means it was
correct as received. The count saturates.

## Interfaces

| Port | Meaning |
|---|---|
| `clk`, `rst_n` | System clock (100 MHz in the evaluation) and active-low asynchronous reset. |
| `key_load`, `key[127:0]` | Loads the AES-128 key. Round keys are expanded one per cycle and are ready 10 cycles later. No block is fetched before that. |
| `pad_value[PAD_BITS-1:0]`, `pad_len` | The padding the transmitter appends, and its length in bits (at most `PAD_BITS`, for example 12 or 8). Plaintext bits `[pad_len-1:0]` are compared with the same bits of `pad_value`. Change these only while no block is being decoded. |
| `spi_in_*` | SPI slave, mode 0, MSB first. Frame = `{Y[127:0], mag[127], …, mag[0]}`, 128 + 128·6 = 896 bits. Y[i] is the hard decision of bit i, and mag[i] is its quantised LLR magnitude (larger means more reliable). |
| `spi_out_*` | SPI master, mode 0, MSB first, SCLK = clk / (2·`SPI_DIV`). Frame = `{status[15:0], plaintext[127:0]}`, 144 bits. A frame is sent whenever both output FIFOs hold a result. |
| `rx_overflow` | Sticky. A complete input frame arrived while the input FIFOs were full, and it was dropped. |

The SPI slave synchronises its inputs with two flip-flops, so its SCLK must
stay below clk/2; clk/4 is safe.

## Parameters

| Parameter | Default | Meaning |
|---|---|---|
| `PAD_BITS` | 12 | Longest padding the check can hold. The length in use comes from `pad_len`. |
| `MAG_W` | 6 | Bits per LLR magnitude. |
| `HW_MAX` | 8 | Most bits flipped by one pattern. |
| `LW_MAX` | 64 | Largest logistic weight tried before giving up. |
| `IN_DEPTH`, `OUT_DEPTH` | 4 | Depth of the input and output FIFO pairs. |
| `SPI_DIV` | 2 | Output SPI clock divider. |

## What is taken from the paper and what is not

**From the paper:**
- the receiver structure: SPI input, input FIFOs, noise removal with AES,
  padding check, error pattern generator, output FIFOs, SPI output;
- the decode loop;
- AES-128 with a 128-bit block;
- 12-bit padding as the main case and 8-bit as the alternative;
- a decryption of 13 cycles including data input and output;
- ORBGRAND ordering by logistic weight;
- 130 ns latency at 100 MHz for blocks that need no correction.

**Not specified in the paper, and chosen here:**
- The SPI mode, bit order and frame layouts.
- The FIFO depths.
- The 6-bit LLR magnitude.
- `HW_MAX` and `LW_MAX`. The paper gives no limit on the number of guesses.
- The status word, and the rule for giving up.
- The internal structure of the sorter and the pattern generator.
- The prefetch of the next pattern, and the back-to-back fetch. The paper's
  goodput figures (k bits per 130 ns) imply the back-to-back fetch.

**Deliberate differences:**
- The padding length is selected at run time (`pad_len`), so one receiver
  covers both evaluated cases, 12 and 8 bits.
- The padding value is an input port. The paper's transmitter drawing and
  its receiver drawing label the padding differently. A port lets the system
  set whatever sequence its protocol uses.
- The SPI input carries soft information (LLR magnitudes) as well as hard
  decisions. ORBGRAND needs this, but the paper's diagram shows only
  "demodulated signals".
- The key arrives on a parallel port. The paper does not say where the key
  comes from.

**Not implemented:**
- The transmitter, which is a standard AES encryptor. The testbenches model
  it.
- The paper's two comparison receivers (decryption only, and a separate
  ORBGRAND decoder followed by decryption).
- Power and area figures are not reproduced. They depend on the paper's
  28 nm library. The RTL maps to roughly 11k generic cells, plus about 15k
  flip-flop bits, most of them in the sorter's 7 pipeline registers.

**Known gap in throughput.** The SPI input needs 896 SCLK periods per
block, while the decoder needs 13 cycles. So the serial link, not the
decoder, limits the sustained rate. The paper's goodput numbers describe the
decoder core, and so does the 13-cycle figure above.

## Verification

Every module has a self-checking testbench. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it establishes |
|---|---|
| `tb_aes_key_expand`, `tb_aes_decrypt_core`, `tb_noise_removal_aes` | FIPS-197 vectors and random blocks against an independent encryption model. Key ready after 10 cycles. Decryption done after exactly 13 cycles. |
| `tb_padding_check` | Right padding, one flipped padding bit, and a flipped payload bit, for a 12-bit check used at lengths 12 and 8, and for an 8-bit check. At length 8, the bits above the padding are ignored. |
| `tb_reliability_sorter` | The order is a permutation sorted by magnitude then index, valid 8 cycles after load. Includes random and tie-heavy inputs. |
| `tb_orb_pattern_gen` | On a reduced size (16 bits, at most 4 flips, weight up to 24), every pattern is a valid set of distinct ranks with the reported weight. Weights never decrease and no pattern repeats. The number of patterns per weight matches a count over all subsets, so none is missing. The first patterns follow the ORBGRAND order one by one. |
| `tb_error_gen`, `tb_error_pattern_generator` | Ranks map to bit positions. The whole generator produces the reference pattern sequence. |
| `tb_sync_fifo`, `tb_spi_rx`, `tb_spi_tx` | Ordering, full/empty and frame formats. A frame cut short by CS_N is dropped. |
| `tb_grand_ctrl` | The controller against behavioural models of the FIFOs, the AES core and the generator. Checks: the number of decryptions, the patterns used, the 13-cycles-per-guess timing, abandonment, holding a result while the output is full, and back-to-back output every 13 cycles. |
| `tb_aes_grand_rx` | The whole receiver over SPI, with a small pattern limit. Covers clean, corrected and abandoned blocks, input overflow, output back-pressure, and a wrong block accepted because a guess hit the right padding by chance. |
| `tb_aes_grand_rx_full` | The receiver at its default parameters. Covers queued frames and overflow, the 13-cycle latency and back-to-back rate, corrected blocks, and 8 blocks through a BPSK/AWGN channel at 7 dB. |
| `tb_workload_ebn0` | The evaluated operating points, with 25 blocks per point. Two default receivers run at `pad_len` 12 and 8. |

Results of `tb_workload_ebn0`. "Hard errors" counts blocks that a
decrypt-only receiver would lose. Latency is the mean time from fetch to
output at 100 MHz.

| Padding | Eb/N0 | Hard errors | Errors after decoding | Mean latency |
|---|---|---|---|---|
| 12 bits | 5.5 dB | 11 / 25 | 0 / 25 | 785 ns |
| 12 bits | 7 dB | 2 / 25 | 0 / 25 | 140 ns |
| 12 bits | 9 dB | 0 / 25 | 0 / 25 | 130 ns |
| 8 bits | 5.5 dB | 20 / 25 | 1 / 25 | 2803 ns |
| 8 bits | 7 dB | 5 / 25 | 0 / 25 | 161 ns |
| 8 bits | 9 dB | 0 / 25 | 0 / 25 | 130 ns |

The trend matches the paper: latency is 130 ns at high SNR and grows as the
channel worsens. The paper reports these mean latencies for this receiver:
- 7 dB: 157 ns (12 bits) and 160 ns (8 bits);
- 9 dB: 131 ns for both.

At 5.5 dB with 12 bits it reports 508 ns. The results here are in that range.
They cannot be compared closely: 25 blocks per point is a small sample, and
a few slow blocks dominate the mean at 5.5 dB. The paper also does not give
its LLR quantisation or its pattern limits.

### Running a testbench

Any SystemVerilog simulator with timing support works. With Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/aes_grand_pkg.sv tb/aes_ref_pkg.sv tb/rx_channel_pkg.sv \
  tb/tb_aes_grand_rx_full.sv --top-module tb_aes_grand_rx_full
./obj_dir/Vtb_aes_grand_rx_full
```

The package `aes_grand_pkg` builds the AES S-box and its inverse while the
design is elaborated, from the field inverse and the affine map. No table
file is read.
