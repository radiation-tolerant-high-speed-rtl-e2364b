# A radiation-tolerant serial link for SRAM-based FPGAs

SRAM-based FPGAs are attractive for detector front-ends because they are
flexible and fast. Radiation, however, flips bits in three places:
- in the data on the serial line;
- in the flip-flops of the design;
- in the configuration memory that defines the circuit itself.

This design is one end of a bi-directional, byte-oriented serial link. It
defends against each of these with its own mechanism:

| Threat | Mechanism |
|---|---|
| Bit errors and bursts on the line | Reed-Solomon code over GF(2^8), spread over two codewords by an interleaver |
| Overhead wasted on a quiet line | An **adaptive protection level**: each receiver measures its error rate and asks the far end for more or less parity |
| Upsets in the block that finds packet boundaries | Distributed triple modular redundancy (TMR): three copies, with voters on every feedback path and on the outputs |
| Upsets in the configuration memory | A read-back **scrubber** that compares each configuration frame with a golden copy and rewrites only the frames that differ |

A self-synchronizing scrambler keeps the line DC-balanced. A PRBS-31
tester generates and checks traffic, so the link's response to injected
faults can be measured.

The target is a Kintex-7 FPGA with its multi-gigabit (GTX) transceivers, at
a line rate of 6.25 Gbps. The transceiver, the configuration memory with its
access port, and the golden-copy memory are outside this RTL. They appear as
ports of the top module, and the testbenches model them.

## Data path at a glance

```
TX: user/tester byte -> scrambler -> RS encoder (level L_peer) -> interleaver (2 codewords)
        -> framer (sync, levels) -> gtx_tx_word
RX: gtx_rx_word -> frame aligner (TMR) -> header reader -> deinterleaver
        -> RS decoder -> descrambler -> user/tester byte
                               |
                               v
                    protection controller -> level requested from the peer
```

- Everything moves one 8-bit symbol per clock, on a single clock.
- `rtl/serial_link_top.sv` connects the chain; its opening comment lists the
  ports.
- Each receiver chooses the protection level for the direction it
  receives. The choice travels to the far end in the header of this end's
  own transmitted packets.

## The line code

### Scrambler

`sync_scrambler` is a multiplicative scrambler with polynomial
1 + x^39 + x^58, working MSB first:
- Each transmitted bit is the data bit XORed with the transmitted bits 39 and
  58 positions earlier.
- The descrambler (same module, `DESCRAMBLE=1`) does the same with the
  received bits, so it synchronizes by itself after 58 bits.
- It sits *before* the Reed-Solomon encoder, so the decoder corrects errors
  before descrambling. This avoids the scrambler's error multiplication, where
  one wrong bit would become three.
- The header and parity bytes are not scrambled.

### Reed-Solomon levels

The code is RS(255, 255−NPAR) over GF(2^8):
- field polynomial x^8+x^4+x^3+x^2+1 (0x11D);
- generator roots α^0 … α^(NPAR−1).

There are four levels (`prot_e` in `serial_link_pkg`):

| Level | NPAR | Corrects per codeword | Payload per packet | Efficiency |
|---|---|---|---|---|
| `PROT_NONE` | 0 | 0 | 510 bytes | 99.2 % |
| `PROT_T2` | 4 | 2 symbols | 502 bytes | 97.7 % |
| `PROT_T4` | 8 | 4 symbols | 494 bytes | 96.1 % |
| `PROT_T8` | 16 | 8 symbols | 478 bytes | 93.0 % |

The codeword length stays 255 at every level. Only the split between data
and parity changes, so packets have a fixed length and the aligner never
needs to know the level. `rs_encoder` is the usual LFSR division by the
generator polynomial. It holds the coefficients of all four generators,
computed at elaboration by `rs_gen_poly`. It changes level only at the
start of a pair of codewords.

### Interleaver

Two consecutive codewords A and B are written into one bank of a
two-bank buffer and read out alternately: A0 B0 A1 B1 … A254 B254.

A burst of b consecutive line symbols therefore puts at most ⌈b/2⌉ errors
into each codeword. At level T8, any burst up to 16 symbols is corrected,
which is any bit burst up to 121 bits. This is twice what one codeword
alone could take. `deinterleaver` undoes the order on the receive side.

### Packet format

| Byte | Content |
|---|---|
| 0–1 | sync word 0xF628 |
| 2 | `{2'b00, p, p, p}`: level `p` of this packet's two codewords |
| 3 | `{2'b00, q, q, q}`: level `q` this end asks the far end to use |
| 4–513 | 510 interleaved symbols (two codewords) |

- Packets follow each other without gaps.
- The header is not RS-protected. Each level is sent three times and decoded
  by bitwise majority (`rx_deframer`).
- When the three copies differ, the receiver reports it (`hdr_copy_err`).
  At level `PROT_NONE` this is the only evidence of line errors, apart from
  loss of lock.

## The Reed-Solomon decoder

`rs_decoder` is the largest block: about 6,000 cells of the 7,200 in one
link end. It must keep up with one symbol per clock at every level. It is a
three-stage pipeline, and each stage works on a different codeword:

1. **Syndromes.** As the 255 symbols arrive (highest degree first), 16
   Horner accumulators form S_j = r(α^j). The symbols are stored in one of
   four codeword slots of a buffer RAM. The level of the codeword
   (`in_prot`) fixes how many syndromes are used.
2. **Key equation.** Berlekamp-Massey runs one iteration per clock: NPAR
   iterations, each updating the locator Λ(x), the previous locator B(x)
   and the degree L. One more clock forms Ω(x) = S(x)·Λ(x) mod x^NPAR.
   At 17 cycles at most, this stage finishes well inside one codeword time.
3. **Chien search and Forney.** The stored symbols are read back in
   transmission order. For position i, both Λ and Ω are evaluated at α^−i by
   registers that are multiplied by constant powers of α each cycle. Where
   Λ(α^−i) = 0, the error value is Ω(α^−i) / Λ_odd(α^−i). This is Forney's
   formula for a first consecutive root of α^0: Λ_odd is the sum of Λ's odd
   terms, which equals x·Λ'(x) in characteristic 2. The value is added to the
   symbol. Only the 255−NPAR data symbols are output. The division uses a
   GF inverse function written as combinational logic.

Things to know when using or changing the decoder:

- **Latency.** The first corrected data symbol is sampled NPAR + 5 clock
  edges after the edge that took the last received symbol.
  `tb_rs_decoder` measures this at every level.
- **Why four slots.** While stage 1 fills one slot, stage 3 may still be
  reading the previous codeword, and one slot waits for stage 2. The fourth
  slot absorbs the case where stage 3 starts late. `overrun` pulses if a
  codeword ever finds no free slot, which the fixed packet timing prevents.
- **Failure detection.** A codeword is *uncorrectable* when L > NPAR/2, or
  when the Chien search finds a number of roots different from L. The
  decision is known only at the end of stage 3. So the data has already been
  passed on when `cw_fail` rises with `cw_done`: downstream logic must treat
  `cw_fail` as a flag on the codeword just delivered. `cw_nerr` gives the
  number of symbols corrected.
- **Level per codeword.** The level travels with each codeword through the
  pipeline, so a change of level between packets needs no flushing.

## Adaptive protection level

`protection_controller` sits on the receive side and counts in windows of
`WIN` = 1024 codewords:

- **Step up** one level at the end of a window that saw any of these:
  - an uncorrectable codeword;
  - a loss of lock;
  - a header copy error;
  - a codeword that needed more than half of its level's corrections
    (`nerr·4 > NPAR`).
- **Step down** one level after `HOLD` = 4 windows in a row with no
  corrected symbol and no header error.
- After reset, both the request and the transmit level are the strongest
  (`PROT_T8`). The link therefore starts safe and relaxes on a clean line.

The chosen level is a *request*:
1. It goes into byte 3 of this end's outgoing packets.
2. The far end's `rx_deframer` reads it as `peer_req`.
3. The far end's encoder uses it from its next codeword pair.

A change of level therefore takes effect after about two packets in each
direction. During that time the packets still say which level they carry,
so the decoder is never confused.

Both directions adapt independently. `tx_force_*` and `req_force_*`
override the automatic choice, for tests or for a fixed-overhead mode.

## Frame alignment with distributed TMR

The transceiver delivers bytes whose boundaries are arbitrary. For each of
the 8 bit offsets, `frame_aligner` looks for the sync word in the last 24
received bits. It has three states:

| State | Behaviour |
|---|---|
| HUNT | The first hit fixes the bit offset and the packet position. |
| VERIFY | The sync word must appear again at the same offset one packet later, 3 times in a row. |
| LOCK | Bytes are passed on with their position in the packet. 4 missed sync words in a row return to HUNT and pulse `lol`. |

This block is the single point of failure of the receiver. An upset in its
offset or position register would corrupt packets until lock is lost and
found again. It is therefore triplicated (`frame_aligner_tmr`):
- The whole state of one copy (state, offset, position, counters, the
  24-bit history, and the registered outputs) is one packed struct,
  `align_t`.
- Each of the three copies computes its next state from the **majority of
  all three registers**, through its own voter (`tmr_voter`). A fourth
  voter forms the outputs.
- An upset in any one register, or in one copy's combinational logic or
  voter, is outvoted immediately and overwritten at the next clock edge.
  Upsets do not accumulate.
- `tmr_mismatch` reports cycles where the copies disagree.
- The `upset` input XORs a pattern into any copy's register, for
  fault-injection tests. Tie it to zero in use.

The triplication is written out by hand. A synthesis flow must be told to
keep the three copies, for example with keep or no-merge attributes, or it
will merge them.

## Configuration scrubber

`config_scrubber` runs through all configuration frames without end. For
each frame it:
1. requests a read-back (`cfg_rd_req`, `cfg_rd_frame`);
2. compares each returned word with the golden copy (`gold_addr`, word
   address frame·101+word, with data used two clock edges later);
3. rewrites the whole frame from the golden copy, one word per clock, if any
   word differed.

Only corrupted frames are written, and the link keeps running meanwhile.

- The default size fits a Kintex-7 XC7K325T: 28,326 frames of 101 32-bit
  words.
- A clean frame costs about 107 cycles, so one pass over the device takes
  about 3.0 million cycles (about 19 ms at 156.25 MHz).
- `status.scrub_frames` and `status.scrub_repairs` count scanned and
  repaired frames.

The port is deliberately abstract:
- frames are linear numbers;
- the read-back answers with 101 words at any pace;
- writes are word by word.

On a real device these map onto the internal configuration access port.
That mapping needs its command sequence (sync, frame address register,
read/write commands, pad frames) and a linear-to-frame-address
translation, and neither is included here. The memory model
`tb/config_memory_model.sv` shows the expected behaviour.

## Link tester

`link_tester` sends a PRBS-31 sequence (x^31+x^28+1) and checks it with a
self-synchronizing checker. The checker predicts each bit from the 31
received before it, so it needs no seed and recovers by itself. Its
counters:
- `test_bytes`: bytes checked;
- `test_errors`: errored bytes, where one wrong bit counts up to three
  times.

The first 12 bytes after reset are not checked. This covers the history
fill and the descrambler's 58-bit synchronization.

## Status

All counters are in the `link_status_t` struct on the top's `status` port:
- lock, losses of lock;
- codewords, corrected symbols, uncorrectable codewords;
- TMR disagreements, level changes;
- scrubbed and repaired frames;
- tester bytes and errors.

These are the quantities needed to measure the mean time between failures
and between losses of lock in a fault-injection campaign.
`tb_fault_campaign` shows such a campaign in simulation.

One property of the adaptive scheme shows up in such a campaign. At
`PROT_NONE` the receiver has no parity, so line errors in the payload go
unseen. The only evidence is header copy errors and losses of lock, so the
level climbs back slowly. At one error per 300 bytes this takes on the order
of a hundred packets. If that window of unprotected data is unacceptable,
change the step-down limit in `protection_controller` so that `PROT_T2` is
the floor. `req_force_*` can only pin one fixed level.

## Where this design departs from, or goes beyond, its source

The published description of this link gives these things:
- the architecture;
- the mechanisms: self-synchronizing scrambler, RS with adaptive level,
  interleaver that doubles the correction capability, distributed TMR on the
  frame aligner, read-back scrubber, tester;
- the Kintex-7 target and the 6.25 Gbps line rate.

It does not give any of the following, so these are this design's own
choices:
- the scrambler polynomial;
- the RS code parameters and the set of levels;
- the interleaving depth (2, the smallest that doubles the correctable
  burst);
- the packet and header format;
- the alignment rule and its counts;
- the rule and thresholds for changing the level;
- the decoder architecture;
- the tester's sequence;
- the scrubber's device size, taken from the Kintex-7 family.

Other departures:

- **Rate.** The datapath carries one byte per clock. 6.25 Gbps needs
  781.25 M symbols/s, which one byte lane cannot reach in Kintex-7 fabric.
  The full rate needs a 4-byte-wide datapath at 195.3 MHz, which is not
  built. At 156.25 MHz this RTL carries 1.25 Gbps per direction.
- **Clocking.** One clock drives the transmit and receive sides. A real
  transceiver gives a recovered receive clock, which would need a clock
  domain crossing, or a shared reference with an elastic buffer.
- **Scrubber port.** The scrubber's port is abstract (see above), and the
  published scrubber's specific technique is not reproduced. The generic
  read-back, compare, and rewrite-the-frame scheme is.
- **TMR.** TMR is applied by hand rather than by a synthesis tool, with the
  same structure: triplicated logic, registers and voters, and voted
  outputs.
- **Decoder failure flag.** The decoder passes on the data of an
  uncorrectable codeword, flagged after the fact, instead of discarding it.

## Files

- `rtl/serial_link_pkg.sv` holds the shared types, constants and GF(2^8)
  functions. Each other file in `rtl/` holds one module, whose opening
  comment gives its interface and timing.
- `tb/tb_<module>.sv` is a self-checking testbench for each block. Most
  check against independent reference models: `tb/rs_ref_pkg.sv` does GF
  arithmetic with log/antilog tables, and there is a bit-level scrambler
  model.
  - `tb_rs_decoder` decodes random codewords with up to T errors at every
    level, plus codewords beyond T.
  - `tb_frame_aligner_tmr` injects upsets into single copies and checks
    that nothing reaches the outputs.
- The system tests connect two link ends through
  `tb/serial_channel_model.sv`. The channel shifts the bit alignment and
  injects bit errors and bursts.
  - `tb_serial_link_top` uses small windows and a 16-frame configuration
    memory. It checks every mechanism in turn: lock, level going down on a
    clean line and up on errors, header vote, correction, burst correction,
    uncorrectable report, TMR masking, loss of lock and relock, and scrub
    repair.
  - `tb_serial_link_full` runs the top with every default parameter and
    the full-size configuration memory.
  - `tb_fault_campaign` is a small fault-injection campaign. It injects all
    three fault kinds at random times: line bit errors, upsets in single
    aligner copies, and configuration upsets. It runs four phases:
    1. sparse errors from reset;
    2. a clean line, where the level falls to none;
    3. denser errors, which reach the data until the level rises again;
    4. random bit slips of the line, each of which must cause one loss of
       lock and a relock.

    For each phase it prints the mean cycles between tester-visible errors
    and between losses of lock. A typical run corrects every error in
    phase 1. In phase 3 the tester errors drop from about 1,100 per 100
    packets at level none to zero once the level has risen. No upset and no line error
    causes a loss of lock. A slip takes about 3,900 cycles (under 8 packets)
    from slip to relock. Every configuration upset is repaired.

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and ends.
With Verilator 5:

```sh
verilator --binary --timing --top-module tb_serial_link_top \
    -y rtl -y tb +libext+.sv rtl/serial_link_pkg.sv tb/rs_ref_pkg.sv \
    tb/tb_serial_link_top.sv
./obj_dir/Vtb_serial_link_top
```

To simulate another block, replace `tb_serial_link_top` everywhere in the
command with that block's testbench name.

To change the code strength, edit `npar_of` and `prot_e` in
`serial_link_pkg`; `NPAR_MAX` bounds the decoder's size. To change the
packet format, edit `tx_framer` and `rx_deframer` together, and keep
`FRAME_LEN` in the package consistent.
