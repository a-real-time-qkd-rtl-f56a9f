# Real-time key extraction for a decoy-state BB84 link on one FPGA

A quantum key distribution (QKD) link produces raw material at the photon rate, 20 million
pulses per second. Only about one pulse in a hundred is detected at the far end, and even
those bits are noisy. Four steps turn them into a usable key:

1. **Sifting.** Keep only the detections where sender and receiver used the same basis.
2. **Error estimation.** Sacrifice a sample of the sifted bits to measure the error rate.
3. **Error correction.** Reconcile the rest so both sides hold identical strings.
4. **Privacy amplification.** Compress the result so an eavesdropper's partial knowledge is
   worthless.

In a PC these steps need the whole stream of sender coding data: 80 Mbit/s of random
choices. This design keeps that stream on the board, in SRAM next to the FPGA. Sifting
looks the data up in place, so only the receiver's detections, a few Mbit/s, travel over
USB and the network. Error correction and privacy amplification also run in the FPGA.

This repository holds synthesizable SystemVerilog for the FPGA logic of one control board.
The same top module, `qkd_control_board`, serves both ends of the link:
- With `is_bob = 0` it is **Alice**: it draws random numbers, drives the lasers and the
  sync laser, and stores what was sent.
- With `is_bob = 1` it is **Bob**: it recovers the sync frames, codes the detector clicks,
  and stores what was seen.

From sifting onwards, both roles run the same blocks and exchange 16-bit words through
their host computers.

## The data path

```
Alice                                               Bob
 trng x5 ─► qubit_encoder ─► las_pol/las_decoy ~~~~~ optics ~~~~► spd_click[3:0]
             ▲      │                                                     │
 sync_gen ───┘      │        sync_out ~~~~~~~~~~~~~~~~~~~~~~~~~► sync_in ─┤
                    ▼                                                    ▼
               code_store ◄─┐                           sync_recover ─► det_coder
                (SRAM)      │                                          │       │
                            │                               code_store ◄┘       │ entries
 USB sift in  ─► sifting ───┘                                 (SRAM)            ▼
                    │ replies ──────────► network ──────────► USB sift in ─► sifting
                    ▼ key bits                                                 ▼ key bits
             reconciliation ◄══ EC words over USB and network ══► reconciliation
                    ▼                                                          ▼
               privacy_amp ─► fk_* (final key)                      privacy_amp ─► fk_*
```

`usb_if` drives a USB 2.0 chip in slave-FIFO mode. It serves four chip FIFOs round robin:

| Chip FIFO | Direction | Carries |
|---|---|---|
| 0 | download | sift stream |
| 1 | download | commands and reconciliation words |
| 2 | upload | sift stream |
| 3 | upload | reconciliation words |

Each direction of each stream has a `fifo` on the FPGA side. `cmd_proc` splits
chip FIFO 1 into register writes and reconciliation words.

Everything runs on one clock, and one clock is one pulse slot (20 MHz).

## Frames and bit numbering

Every pulse has to be named the same way on both sides. Alice's `sync_gen` makes a frame
of 1024 clocks: 6 clocks with no sync pulse, then 1018 clocks with a sync pulse in each.
The position within the frame, 0..1017, and a 30-bit frame number name each pulse.

Bob's `sync_recover` does the reverse:
- A sync pulse that follows at least 6 empty clocks starts a frame.
- Each later pulse advances the position.
- If a sync pulse is lost, the rest of that frame is misnumbered. The next gap puts the
  count right again, and a lost frame is counted in `lost_frames`.

The detector signals can lag the sync light by a few slots, because the two wavelengths
travel at slightly different speeds. A signed offset register is added to Bob's position to
correct for this. Host software finds the offset: it steps the register and watches the
sampled error rate until the rate drops. The end-to-end test shows this: with the wrong
offset the error rate is about 50%, and with the right one it falls to about 2%.

## Coding data and the SRAM

Each pulse gets a 4-bit code `{class[1:0], pol[1:0]}`:
- `class` is signal, decoy, vacuum, or (Bob only) no detection.
- `pol` is H, V, P or N. `pol[1]` is the basis and `pol[0]` is the bit value.

Alice's `qubit_encoder` takes 5 random bits per pulse, one from each of five `trng`
instances:
- Two bits pick the polarization, so H:V:P:N is 1:1:1:1.
- Three bits pick the class, giving signal:decoy:vacuum = 6:1:1.

Bob's `det_coder` marks a slot as detected only when exactly one of the four detectors
clicked. For each such detection it also writes a 16-bit entry word into the upload
stream. Each frame starts with a 32-bit head carrying the frame number.

`code_store` packs four codes into a 16-bit word and writes one word every four clocks. The
word address is `{frame[12:0], pos[9:2]}`, so the 2M x 16 SRAM (two 16 Mbit chips) holds
the last 8192 frames, about 0.42 s. The other three SRAM cycles in every four serve
sifting reads. A write always wins, and a read waits at most one cycle.

## Sifting (`sifting`)

The same engine runs on both boards. Its input is the word stream arriving from the other
side.

| Word | Bits |
|---|---|
| frame head | `{2'b10, frame[29:16]}` then `frame[15:0]` |
| Bob entry | `{2'b01, pos[9:0], basis, 3'b000}` |
| Alice reply | `{2'b01, pos[9:0], class[1:0], reveal, bit}` |

**Alice.** For each of Bob's entries she reads her own code from SRAM.
- If the bases differ, she discards it.
- If they agree, she sends a reply carrying her class.
- She reveals her bit for every decoy, and for every tenth matched signal bit.
- The remaining matched signal bits go into her sifted key.
- Heads are forwarded, so Bob knows which frame the replies refer to.

**Bob.** For each reply he reads his own code.
- A revealed bit is compared with his own and counted in the signal or decoy error
  counters. Software uses these counters for the decoy-state analysis and the
  polarization feedback.
- An unrevealed signal bit goes into his sifted key. He keeps one even in the rare case
  that his own record shows no click, so the two key streams never differ in length.

One entry takes 4-5 clocks, within a budget of 20 clocks per detection. The engine takes a
word only when the reply FIFO and the key FIFO both have room.

## Error correction (`reconciliation` with `ec_parity`, `ec_hamming`, `ec_permute`, `crc32`)

Each side gathers its sifted key into blocks of L = 4096 bits (`EC_LW = 12`). Each block
then goes through up to 6 iterations.

1. **Segments.** Both sides scan the block in the current permuted order, cut into segments
   of length `2^(seg_log2 + t)` in iteration `t`. `seg_log2` is a register that software
   sets from the error rate.
2. **Alice's message.** For each segment, `ec_parity` gives Alice the segment's parity and
   `ec_hamming` gives its syndrome: the XOR of the 1-based positions of its one bits.
   She sends one word, `{parity, syndrome[14:0]}`.
3. **Bob's correction.** Bob computes the same two values. If the parities differ, the
   XOR of the two syndromes is the position of a single error, and he flips that bit in
   his copy.
4. **Bob's reply.** At the end of the iteration Bob sends his count of differing parities.
   Both sides stop when it is zero or after the last iteration. So there is one round trip
   per iteration.
5. **Permutation.** Between iterations, `ec_permute` changes the scan order to
   `i -> (a*i + b) mod L`. It updates `a` (odd) and `b` with fixed constants, so both sides
   follow the same sequence.
6. **CRC check.** Alice sends the CRC-32 of her block as two words, and Bob answers whether
   his CRC matches. A matching block goes on to privacy amplification. A failing block is
   dropped on both sides, and counted in `st_ec_fail`.

The block length, segment doubling, message format, permutation and CRC polynomial are
this design's own choices. The parity-then-Hamming structure, the permutation between
iterations, the iteration limit and the final CRC follow the protocol this design
implements.

## Privacy amplification (`privacy_amp`)

Corrected bits are collected in RAM1, 40 bits per word, until a unit of n = 262144 bits is
complete. RAM1 has two banks, so the next unit is collected while one is being multiplied.
The final length is `m = floor(n * SFactor)`. SFactor is a Q0.16 register that
software computes from the measured error rates: 0.3 gives m = 78644.

**The matrix.** The product uses an m x n Toeplitz matrix, which is constant along each
diagonal. The whole matrix is therefore fixed by its n + m - 1 diagonal values. Those
values come from a 64-bit xorshift generator and are written into RAM2 just before each
multiply, one word per clock. The generator is seeded with the seed register XOR the unit number, so
Alice and Bob build the same matrix.

**The multiply.** The product is computed in 40 x 40 blocks:
- For block row I and block column J, the 79 diagonal values needed are two consecutive
  RAM2 words, starting at word `I - J + NB - 1`. NB is the number of 40-bit key blocks.
- One block takes four clocks: read the first RAM2 word and the RAM1 word, read the
  second RAM2 word, capture, then multiply and accumulate over GF(2).
- A unit therefore takes `4 * ceil(m/40) * ceil(n/40)` clocks: 51.6 M at SFactor 0.3.
  That is 2.6 s at 20 MHz, or 1.29 s if this block had its own 40 MHz clock.

Each finished block row leaves on `fk_valid / fk_data[39:0] / fk_bits`.

The RAM sizes at the defaults are:
- RAM1: 2 banks x 6554 x 40 bits.
- RAM2: 13108 x 40 bits.
- Reconciliation: 4096 bits per side.

## Host interface

Downloads on chip FIFO 1 are packets made of a header `{type[3:0], len[11:0]}` followed by
`len` words:
- Type 0 carries reconciliation words.
- Type 1 carries `{addr, data}` register-write pairs.

The register map is in `qkd_pkg`:

| Register | Meaning |
|---|---|
| `CTRL` | bit 0 run; bits 2:1 test light: 0 random, 1 H only, 2 P only; bit 3 starts Bob's polarization search when it goes 0 to 1; bit 4 its reference: 0 H, 1 P |
| `OFFSET` | Bob's signed position offset |
| `SEGLOG2` | first segment length, as a power of two |
| `SFACTOR` | SFactor, Q0.16 |
| `SEED0..3` | generator seed, 4 x 16 bits |
| `DELAY` | 8-bit setting for the external SPD trigger delay line, output on `spd_delay` |

The test-light setting makes Alice send only H or only P signal pulses. This is the
reference light that polarization feedback needs.

## Polarization feedback (`pol_adjust`)

When the error rate passes 3%, software turns on Alice's H (or P) test light and sets
`CTRL` bit 3 on Bob's board. `pol_adjust` then counts, over windows of `POL_WINDOW`
slots (65536 by default), Bob's clicks on the matching detector and on the orthogonal one.
It steps the codes of the three polarization controllers (`hv_code`, 12 bits each, to the
high-voltage module) by coordinate descent: one controller at a time, it keeps stepping
while the wrong-click fraction falls. It stops with `st_pol_done` when H:V (or P:N)
reaches 150:1, the paper's target, or with `st_pol_fail` after 64 controller visits.
The codes are kept afterwards. The search method, window and step are this design's own;
the paper does the adjustment from the single-board computer.

The board also reports these status outputs (`st_*`):
- detections;
- sifted bits;
- sampled signal and decoy checks and errors;
- blocks accepted and rejected;
- bits corrected;
- PA units done;
- frames lost;
- clocks per sifting entry;
- a TRNG stuck-at alarm.

## What is outside the FPGA

These parts appear only as ports:
- the jitter oscillators of the TRNGs (`trng_raw`, 8 samples per clock each);
- the PLL;
- the SRAM and USB chips;
- the lasers, the single-photon detectors, and the sync receiver with its delay line;
- the host computer.

The detector delay loop runs in host software. The board supplies its inputs (error
counters) and output (the `DELAY` register). The 3% threshold that starts the polarization
search, the offset search and the SFactor calculation are also host software.

## Where this design departs from the original system

- **One clock.** The original runs reconciliation at 80 MHz and privacy amplification at
  40 MHz. Here everything runs at the 20 MHz pulse clock, so privacy amplification takes
  about twice as long.
- **Two RAM1 banks.** The privacy amplification takes 2.6 s per unit at 20 MHz. At
  roughly 70 kbit/s of corrected key a unit arrives only every 3.7 s, so with two banks
  the multiply keeps up. The second bank is this design's way of guaranteeing that; the
  original system relies on its faster clock.
- **RAM2 filled before the multiply.** The original generates the random numbers while
  the key arrives. Here they are generated at the start of each multiply, in 13108
  clocks, so one RAM2 serves both RAM1 banks.
- **One module for both FPGAs.** The original splits the logic over two FPGAs on the board.
  Here it is one module.
- **This design's own choices.** Word formats, packet framing, the register map, block
  length, iteration count and message protocol of reconciliation, the permutation, the
  CRC polynomial and the pseudo-random generator are all choices made here.

## Verification

Each block has a self-checking testbench in `tb/`. Each one ends with a
`TB_RESULT checks=N failures=M` line and has a watchdog. Two behavioural models are used:
- `sram_model`: the SRAM, with synchronous read.
- `fx2_model`: the slave-FIFO USB chip, with a host-side push/pop interface.

The end-to-end testbenches put two boards back to back. The shared body is in
`tb/qkd_system_tb.svh`. Between the boards there is:
- An optical channel model. It has 6% / 2% detection probability for signal / decoy,
  random bases, 2% bit errors, dark counts, clicks 2 slots late, and one dropped sync
  pulse.
- Host software that forwards the streams, writes the registers, and searches the offset.

The testbench checks:
- the error rate before (about 50%) and after (under 10%) the offset search;
- a frame resynchronisation;
- corrected bits;
- at least one rejected and one accepted block;
- decoy statistics;
- sifting within 20 clocks per entry;
- a polarization drift that Bob's polarization search removes, with the H test light on
  (the channel's 2% base error keeps H:V under 150:1, so the search may end with its
  fail flag);
- the test-light mode;
- final keys of the expected length that are identical, bit for bit, on both sides.

There are two versions:
- `tb_qkd_control_board` uses 1024-bit blocks, 2048-bit PA units and a 65536-slot
  polarization window. It runs about 15 M clocks in about 30 seconds.
- `tb_qkd_full` uses the default parameters: 4096-bit blocks, a 256 Kbit unit, SFactor 0.3.
  About 65 M clocks give 78643 identical final key bits on both sides; with the
  polarization search the run is about 80 M clocks and takes about 4 minutes in Verilator.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/qkd_pkg.sv tb/tb_qkd_control_board.sv --top-module tb_qkd_control_board
./obj_dir/Vtb_qkd_control_board
```

Replace the testbench name for any other block, for example `tb_privacy_amp` or
`tb_reconciliation`.
