# A bit error rate tester for multi-gigabit serial optical links

This is the logic of an FPGA-hosted bit error rate tester (BERT) for a 5 Gb/s
point-to-point serial optical link. The design follows the test bench of
Xiang et al., "High-Speed Serial Optical Link Test Bench Using FPGA with
Embedded Transceivers". The FPGA's own multi-gigabit transceiver drives an
SFP+ optical module. The light goes through a fibre loop with a variable
attenuator and comes back into the same FPGA. The programmable logic sends a
pseudo-random bit sequence (PRBS) and checks every word that comes back. It
counts bit flips separately for the two directions (a sent 1 received as 0, and
the reverse). With 8B/10B coding switched on, it also counts code groups that
arrive invalid ("word errors"). Every errored word is logged with a time stamp
for analysis on a host PC. Raising the attenuation and recording the error
rate gives the receiver sensitivity curve of the optical module.

The RTL covers everything digital in that loop:
- the pattern generator and error detector, with their state machines;
- the error counters and the error log;
- a register-level model of the transceiver's digital channel (phase FIFOs,
  byte serializer and deserializer, cascaded 8B/10B encoder and decoder with
  bypass, word aligner, byte ordering);
- the reset sequencing.

The analog parts stay outside, as ports: the serializer and deserializer, the
transmit and receive PLLs, clock recovery and the optics.

## The measurement loop

```
            PLD clock (half rate)                 transceiver parallel clock
 ┌────────────┐  40b  ┌─────────┐  ┌──────────┐ 16b+2K ┌──────────┐ 20b
 │pattern_gen ├──────►│TX FIFO  ├─►│byte_     ├───────►│enc8b10b  ├──────► tx_parallel ─► serializer
 │(Fig.3 top) │       │phase_   │  │serializer│        │(bypass)  │                      │  (analog,
 └────▲───────┘       │fifo     │  └──────────┘        └──────────┘                      │  outside)
      │ rx_freqlock & └─────────┘                                                        ▼
      │ rx_patterndetect                                                         optical loop
 ┌────┴─────────┐ ┌─────────┐  ┌────────┐ ┌──────────┐  ┌────────┐ ┌────────────┐        │
 │error_detector│◄┤RX FIFO  │◄─┤byte_   │◄┤byte_     │◄─┤dec8b10b│◄┤word_aligner│◄─ rx_parallel
 │(Fig.3 bottom)│ │phase_   │  │ordering│ │deserial. │  │(bypass)│ └────────────┘  (deserializer,
 └────┬─────────┘ │fifo     │  └────────┘ └──────────┘  └────────┘                  clock recovery)
      ▼ err_event └─────────┘
 ┌────────────┐
 │error_logger│──► counters, time-stamped record FIFO ──► host
 └────────────┘
```

On the programmable-logic (PLD) side a word is 32 data bits. Each of its
four bytes also carries a control (K) flag and a code-error flag, which makes
40 bits (`pld_word_t` in `bert_pkg`). Byte 0 goes on the line first. Bit 0 of
every word is the first bit sent. On the transceiver side a word is half of
that: 16 bits before coding and 20 bits after. One PLD word therefore takes
two transceiver clocks.

## Bringing the link up

This is the part that needs the most care. The receiver knows nothing at
first: the bit boundaries of its words are arbitrary, and it does not know
which half of a 32-bit word comes first. It also has no reference for the PRBS.
Each of these is settled in turn, in this order:

1. **Sync words.** After reset the pattern generator is in `IDLE`. It sends
   the synchronization word `SYNC_WORD` every cycle. In 8B/10B mode the first
   byte of this word is the K28.5 comma. In non-coded mode the word's low 16
   bits are the alignment pattern. The upper bytes were chosen so that the
   pattern shows up at no other bit offset of the repeated sync word. One
   pattern serves alignment, byte ordering and synchronization alike.
2. **Word alignment.** `word_aligner` looks at the current and the previous
   deserializer word and tries every bit offset. After `SYNC_N` (3) patterns
   at the same offset it asserts `syncstatus`. From then on the offset is
   frozen until reset, so PRBS data that happens to contain the pattern
   cannot move it. A wrong lock is cleared only by a reset; the user reset
   button is there for that.
3. **Byte ordering.** `byte_deserializer` pairs 16-bit words into 32-bit
   words, starting from whatever word came first after reset. `byte_ordering`
   checks which half holds the first pattern it sees. If it is the upper
   half, the block slips the stream by 16 bits for good.
4. **Switch to PRBS.** Once the clock recovery unit reports frequency lock
   and the aligner reports sync (`rx_freqlock & rx_patterndetect`), the
   generator moves to `EN_GEN_PATTERN`. It sends one start-of-frame word (K27.7
   in byte 0), then a PRBS word every cycle.
5. **Self-seeding.** The error detector waits in `RESET` for the
   start-of-frame word, then enters `LOCK`. In `LOCK` every received word
   becomes the PRBS seed, and the next received word is compared with the
   PRBS successor of that seed. The design needs no PRBS phase agreement
   between the two ends.
6. **Pattern match.** After `num_cycle` consecutive error-free words the
   detector enters `ERROR_COUNT`. From then on the expected word comes from
   its own generator, so a received error cannot corrupt the reference. The
   detector stays in `ERROR_COUNT` until reset, even through long error bursts.

The rule that makes step 5 possible is that the PRBS state is simply the
previous 32 bits on the line (see below). One error-free received word is
therefore a complete seed.

## PRBS words

`prbs_gen` computes the next 32 bits of the sequence from the previous 32.
The two sequences are PRBS-7 (x^7+x^6+1, b[n] = b[n-6] xor b[n-7]) and
PRBS-23 (x^23+x^18+1, b[n] = b[n-18] xor b[n-23]). Bit 0 of a word is the
earliest bit. Each output bit depends only on earlier bits, at most 23
positions back, so the whole next word is one layer of XOR gates on the
previous word. The generator and the detector each use one instance. The
polynomials are the common ITU-T O.150 ones. The source only gives the
sequence lengths. The O.150 output inversion of PRBS-23 is not applied.

## Counting errors

For each word compared in `ERROR_COUNT` the detector produces an `err_event_t`:

- `n1to0`: data bits where a 1 was expected and a 0 arrived;
- `n0to1`: the reverse;
- `nword`: bytes whose code group the 8B/10B decoder flagged as invalid, or
  as having the wrong running disparity. A byte that arrives as a control
  character also counts here.

Bytes counted in `nword` are left out of the flip count, because the data the
decoder produces for an invalid code group means nothing. In non-coded mode
`nword` is always 0. The direction split matters: the optical receiver
favours one logic level, and at low error rates the measured flips are
mostly one-to-zero.

`error_logger` sums the events into 48-bit counters: words compared, words
with any error, each flip direction, and word errors. It also has a 16-bit
count of dropped records. Each word with an error becomes a record
{32-bit time stamp in PLD cycles, `n1to0`, `n0to1`, `nword`} in a 512-entry
FIFO, which the host reads with `log_rd_en`. When the FIFO is full, new
records are dropped and counted and `log_overflow` is raised; the counters
keep counting. Error statistics such as BER and burst lengths are left to the
host.

**Error injection:** a one-cycle pulse on `inject_err` XORs bit 0 of the next
PRBS word. Exactly one bit is then wrong. The generator's own state is not
disturbed, so the following words are correct again.

## The transceiver channel

These blocks model, at register level, the hard transceiver logic. The test
bench configures this logic rather than designing it.

- **`phase_fifo`** (used twice, as the TX FIFO and the RX FIFO): a
  dual-clock FIFO with Gray-coded pointers and two-flop synchronizers. It
  absorbs the phase difference between the PLD clock and the transceiver
  clocks. Its depth is 8.
- **`byte_serializer`:** pops one 32-bit word every second transceiver
  clock and sends it as low half, then high half. It starts only once the TX
  FIFO holds two words. Until then, or if the FIFO runs dry, it sends the
  sync word.
- **`enc8b10b`:** two encoders in cascade. Byte 0 uses the disparity left by
  the previous cycle, and byte 1 uses the disparity left by byte 0. The code
  tables are those of IEEE 802.3 clause 36, in the function
  `bert_pkg::enc8b10b_f`, and include the D.x.A7 alternates and the
  K28.y/K23/27/29/30.7 control codes. When `coded` is 0 the encoder is
  bypassed: the 16 raw bits go out, and the serializer must work with 16-bit
  words.
- **`word_aligner`:** described in step 2 above.
- **`dec8b10b`:** looks up the 6-bit and 4-bit sub-blocks in the forms used
  at the current running disparity. It then re-encodes the result and
  compares it with the received code group. A code group that matches only
  under the opposite disparity is a disparity error. One that matches under
  neither is invalid. Both set the byte's error flag. After an invalid code
  group the running disparity follows the received bits.
- **`byte_deserializer`** and **`byte_ordering`:** described in step 3 above.
- **`reset_ctrl`:** holds the transmit side in reset until the transmit PLL
  has been locked for `HOLD` (16) cycles. It holds the receive side until the
  transmit side runs and the clock recovery unit has reported frequency lock
  for `HOLD` cycles. The user button resets both sides. Losing either lock
  resets the side that depends on it.

## Clocks and rates

| mode | line rate | serializer word | transceiver clock | PLD clock | PLD payload |
|---|---|---|---|---|---|
| 8B/10B | 5 Gb/s | 20 bits | 250 MHz | 125 MHz | 32 bits = 4 Gb/s |
| non-coded | 5 Gb/s | 16 bits | 312.5 MHz | 156.25 MHz | 32 bits = 5 Gb/s |

`pld_clk` must run at exactly half of `tx_pcs_clk` and come from the same
source. `rx_pcs_clk` is the recovered clock: same frequency, any phase. The
error detector compares one 32-bit word per PLD clock; the end-to-end test
checks this rate. The 48-bit word counter wraps only after 2.8e14 words. At
1e-12, a BER measurement to 3/BER confidence needs about 1e11 words, far
below that.

## Top-level interface (`bert_top`)

| port | dir | meaning |
|---|---|---|
| `pld_clk`, `tx_pcs_clk`, `rx_pcs_clk` | in | clocks as above |
| `rst_btn` | in | user reset; hold it while changing `cfg` |
| `pll_locked`, `rx_freqlock` | in | transmit PLL lock and clock-recovery frequency lock |
| `tx_parallel[19:0]` | out | to the serializer (bits [15:0] in non-coded mode), bit 0 first |
| `rx_parallel[19:0]` | in | from the deserializer, arbitrary word boundary |
| `cfg` (`bert_cfg_t`) | in | `coded`, `prbs23`, `num_cycle[15:0]` |
| `inject_err` | in | single-bit error injection pulse (PLD clock) |
| `status` (`bert_status_t`) | out | generator and detector states, `syncstatus`, `byteorder_done`, `lock`, `pattern_match`, `error_flag`, `log_overflow` |
| `log_rd_en`, `log_rec`, `log_empty` | in/out | error record FIFO, show-ahead |
| `counters` (`err_counters_t`) | out | words, errored words, flips per direction, word errors, dropped records |

Parameters: `LOG_DEPTH` (512), `FIFO_DEPTH` (8), `RST_HOLD` (16) and
`SYNC_N` (3). The source gives none of these numbers.

## How far it follows the original design

Taken from the source:
- the two state machines, with their state names, transition conditions and
  actions;
- the self-seeding scheme, and pattern match after a run of error-free words;
- the rule that pattern match, once declared, holds through error bursts;
- the PRBS lengths, and error injection on the least significant bit;
- the 32-bit and 40-bit datapaths, and the half-rate PLD clock;
- the order of the channel blocks, and the cascaded, bypassable 8B/10B
  coding;
- one pattern for alignment, ordering and synchronization;
- logging of error types, counters and time stamps in a FIFO.

Chosen here, where the source gives only the purpose or nothing at all:
- the PRBS polynomials;
- the sync and start-of-frame values;
- the aligner's sync rule and its frozen offset;
- the slip-once byte ordering;
- the FIFO construction and depths;
- the priming of the transmit FIFO;
- the log record layout and one shared record FIFO (the source speaks of
  FIFOs);
- the counter widths;
- the reset sequence;
- counting disparity errors and received control characters as word errors.

Not built:
- the analog transceiver parts: serializer, deserializer, transmit and
  receive PLLs, clock recovery;
- run-time reconfiguration of pre-emphasis, equalization and output swing;
- the USB/FTDI link and the PC software;
- the optical hardware.

A loss-of-sync state machine in the aligner is also missing: once aligned,
only a reset re-aligns. Frequency lock comes from the clock recovery unit and
is an input here.

## 8B/10B error spreading

In a coded link, one line bit flip can damage more than one byte. The flipped
code group is either decoded as a wrong byte or is invalid. The disturbed
running disparity can also make a later, intact code group fail its
disparity check. `tb/mc_8b10b_tb.sv` repeats the source's Monte-Carlo
experiment on this encoder and decoder: 10,000 single flips at random
positions in random data. A typical run gives:

| | this decoder | source (10,000 flips at 1e-4) |
|---|---|---|
| wrong data bits in valid code groups | 7412 | 7239 |
| word errors in the flipped code group | 6418 | 6409 (13469 − 5135 − 1393 − 532) |
| word errors, next code group | 3297 | 5135 |
| word errors, second code group | 935 | 1393 |
| word errors, third and later | 312 | 532 |

The errors inside the flipped code group agree closely. The spread into
later code groups is smaller here but falls off the same way. A likely
cause is that the spread depends on how a decoder tracks disparity after an
error: this one follows the received bits, and the source does not say how
its simulated decoder does it. The data pattern may also differ; random
bytes are used here.

## Simulating

Every testbench is self-checking and ends with a line
`TB_RESULT checks=<n> failures=<n>`. With Verilator 5, from the directory
above `rtl/` and `tb/`:

```
verilator --binary --timing --timescale 1ns/1ps -Wno-fatal -y rtl -y tb +libext+.sv -Irtl \
    rtl/bert_pkg.sv tb/bert_top_tb.sv --top-module bert_top_tb
obj_dir/Vbert_top_tb
```

Use the same command for any other testbench.

| testbench | what it checks |
|---|---|
| `bert_top_tb` | Full design at default parameters, looped back through `tb/serial_link_model.sv` (a behavioural serializer, link and deserializer with bit flips on request). It covers 8B/10B and non-coded modes, PRBS-7 and PRBS-23 and several bit offsets. It checks link start-up and the rate, injected errors, flip directions and word errors, the log, a 700-word error burst that overflows the log, and that pattern match holds through the burst. Each mechanism is counted, and one never seen fails the test. It runs in about 10 s. |
| `mc_8b10b_tb` | the error-spreading experiment above |
| `prbs_gen_tb` … `reset_ctrl_tb` | one per block, against independently computed values. The 8B/10B tests use code groups copied from the standard's tables. |

To change the PRBS polynomials, edit `prbs_gen`. To change the sync or
start-of-frame words, edit the constants in `bert_pkg`. If you do, check that
the non-coded pattern still occurs only once in the repeated sync word.
