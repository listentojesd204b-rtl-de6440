# A compact JESD204B Subclass 1 receiver

High-channel-count ultrasound front ends digitise hundreds of channels at tens
of megasamples per second. LVDS needs too many pins for that. JESD204B moves
the samples over a few multi-gigabit serial lanes instead. It also offers
*deterministic latency*: after every start-up, a sample taken at a given
SYSREF-related instant reaches the fabric after the same number of clocks.
This RTL is the receive side of such a link. It sits behind FPGA transceivers,
which recover the bit stream and decode 8b/10b. From their output it
synchronises the link, checks the lane configuration, removes scrambling and
lane-to-lane skew, and hands the fabric one aligned word per lane per clock.

The design is a small receive-only core. It supports Subclass 1 only and has
one clock domain. All lanes are processed four octets per clock. At
12.8 Gb/s per lane this is a 320 MHz clock (12.8 Gb/s / 10 bits per octet /
4 octets). The structure follows the ListenToJESD204B receiver (Bhattacharjee
et al., 2025). Where that description stops, the JESD204B standard and the
choices listed under "Departures and open points" fill the gaps.

## Structure

```
                        jesd204b_rx (top)
  reset_n, sysref ──► global_signals ──► lmfc_gen ──► lmfc_tick (shared by all links)
                                                  │
  per link: jesd204b_link ◄───────────────────────┘
     gtx[lane] ──► data_path (one per lane)
                    input reg → octet_align → descrambler ─┬─► elastic_buffer → output reg ──► rx_data
                                                           ├─► cgs_fsm       (per-lane CGS)
                                                           └─► ilas_monitor  (per-lane ILAS)
                   control_fsm    ── sync (SYNC~), gtx_en_char_align, rx_reset_gt
                   buffer_release ── joint release of the lane buffers at an LMFC boundary
                   frame_marker   ── rx_frame
```

| File | Role |
|---|---|
| `rtl/jesd_pkg.sv` | shared types: transceiver word, lane word, link states, ILAS configuration, checksum |
| `rtl/global_signals.sv` | reset synchroniser, SYSREF edge detector |
| `rtl/lmfc_gen.sv` | local multiframe clock, restarted by SYSREF |
| `rtl/octet_align.sv` | finds the frame boundary inside the 4-octet word and rotates |
| `rtl/descrambler.sv` | 32-bit parallel descrambler, 1 + x^14 + x^15 |
| `rtl/cgs_fsm.sv` | per-lane code group synchronisation |
| `rtl/ilas_monitor.sv` | per-lane ILAS check and configuration capture |
| `rtl/elastic_buffer.sv` | per-lane circular FIFO |
| `rtl/buffer_release.sv` | releases all buffers of a link together |
| `rtl/frame_marker.sv` | frame-start flags on the output |
| `rtl/control_fsm.sv` | link bring-up and fault handling |
| `rtl/data_path.sv` | one lane, all stages |
| `rtl/jesd204b_link.sv` | one link of `L` lanes |
| `rtl/jesd204b_rx.sv` | top: `LINKS` links sharing one LMFC |

## How a link comes up

The receiver drives the whole start-up. The transmitter only reacts to the
receiver's SYNC~ line (port `sync`, active low). `control_fsm` walks through
five states:

1. **ST_RESET.** `rx_reset_gt` is high for `RESET_CYCLES` clocks. This resets
   the transceivers.
2. **ST_WAIT_FOR_PHY.** The FSM waits for the transceivers' `rx_reset_done`.
   `gtx_en_char_align` is high, so the transceivers may comma-align.
3. **ST_CGS (code group synchronisation).** SYNC~ is held low. A JESD204B
   transmitter answers this by sending the comma /K28.5/ continuously. Each
   lane's `cgs_fsm` counts consecutive all-/K28.5/ words and declares the lane
   synchronised after `K_MIN_OCTETS` such octets (4, as in the standard).
   Every lane must then stay synchronised for `CGS_STABLE_CYCLES` consecutive
   cycles. This is the stability counter; a lane that drops out restarts it.
   SYSREF must also have set the LMFC at least once. SYNC~ is then released,
   always in a cycle where `lmfc_tick` is high. An assertion in `control_fsm`
   checks this rule.
4. **ST_ILAS (initial lane alignment sequence).** On its own next multiframe
   boundary, the transmitter sends the ILAS on every lane. The ILAS is four
   multiframes of F*K octets each. Each one starts with /R/ (K28.0) and ends
   with /A/ (K28.3). The second one holds /Q/ (K28.4) and 14 configuration
   octets. Each lane checks the ILAS independently. The controller also
   waits until the elastic buffers have been released (see below).
5. **ST_SYNCED.** User data flows. `rx_valid` is high for every word of user
   data, which is every clock. There is no backpressure: the fabric must take
   every word.

Typical numbers at the default size (F = K = 16, so a multiframe is 64 words):
from SYNC~ release to the first valid output word takes 386 clocks. That is
the wait for the transmitter's next multiframe, plus the 256-word ILAS, plus
the wait for the release boundary and the pipeline.

### Faults and recovery

| Where | Condition | Goes to |
|---|---|---|
| ST_ILAS | any lane reports an ILAS error | ST_CGS (SYNC~ low again) |
| ST_ILAS | an elastic buffer overflows before release | ST_CGS |
| ST_ILAS | no completed ILAS within `ILAS_TIMEOUT` clocks | ST_CGS |
| ST_SYNCED | `ERR_THRESHOLD` words with disparity or not-in-table errors | ST_RESET |
| ST_SYNCED | buffer overflow | ST_RESET |

Every entry into ST_CGS and every cycle in ST_RESET or ST_WAIT_FOR_PHY raises
`lane_clear`. This restarts the lane FSMs, the ILAS monitors, the aligners
and the buffers.

A second assertion in `control_fsm` allows only the transitions described
above: RESET to WAIT_FOR_PHY, WAIT_FOR_PHY to CGS, CGS to ILAS, ILAS to CGS
or SYNCED, and SYNCED to RESET.

## Deterministic latency: LMFC and buffer release

This is the part that takes most care to understand.

SYSREF is a slow periodic signal distributed to the ADC and the FPGA with
matched delay. `global_signals` samples it with two flops and detects its
rising edge. `lmfc_gen` then restarts a word counter on every edge. The
counter wraps every F*K/4 clocks (one multiframe of F*K octets at 4 octets
per clock). `lmfc_tick` marks counter value 0, the local multiframe clock
(LMFC) boundary. The transmitter derives its own LMFC from the same SYSREF.
Both ends therefore agree on where multiframes start, up to a fixed offset.

The lanes do not arrive together: traces, transceivers and the octet
alignment all add skew. Each lane's `elastic_buffer` starts writing at its
own first ILAS word (the /R/) and sets `ready`. `buffer_release` waits until
all lanes of the link are ready. At the next `lmfc_tick` it releases them all
in the same cycle. Each buffer then reads from address 0 at one word per
clock, so word *n* of every lane comes out in the same cycle. Reading always
starts on a local multiframe boundary, so the output timing relative to
SYSREF is the same after every start-up, whatever the skew. The testbenches
check exactly this. They restart a link with different lane delays and
require the first valid word to appear at the same LMFC phase.

The buffer must hold the words that arrive between a lane's ILAS start and
the release:

    DEPTH >= F*K/4 (one multiframe) + maximum skew in words

The default of 128 words covers F = K = 16 (64 words) plus 64 words of skew.
If a lane fills its buffer before the release, `overflow` is set and the link
goes back to CGS.

All links of the top share one LMFC, so they release on common multiframe
boundaries too.

## The lane datapath

`data_path` takes the transceiver word `gt_word_t`: 32 data bits, plus per
octet a control-character flag `charisk`, `disperr` and `notintable`. Octet 0
sits in bits [7:0] and is the first on the wire. The stages are:

| Stage | Cycles | Function |
|---|---|---|
| input register | 1 | registers the transceiver word; `dec_err` = any disparity / not-in-table flag |
| `octet_align` | 2 | rotates the word so frames start in octet 0 |
| `descrambler` | 1 | produces the unmodified word and the descrambled data side by side |
| `elastic_buffer` | write, then wait for release | stores {is_data, word} |
| buffer read + output register | 2 | two cycles after release the first word is at the output |

**Octet alignment.** The transceiver aligns to the comma, but in a 4-octet
word the frame may still start at any of four positions. The ILAS begins at a
frame boundary, and the transmitter sends only /K28.5/ before it. So the
first octet after the /K28.5/ run that is not /K28.5/ is octet 0 of a frame.
That octet is the /R/. `octet_align` is disarmed during CGS (`hold`). After
CGS it latches the position of that octet as its rotation `offset`. From then
on it outputs the four octets starting at `offset` in the stream {previous
word, current word}.

**Descrambling.** JESD204B scrambles user data with the self-synchronous
polynomial 1 + x^14 + x^15. This works bit-serially, octet 0 first and each
octet MSB first. The descrambler computes d[n] = s[n] ^ s[n-14] ^ s[n-15]
from the received bits s. It handles 32 bits per clock: a 47-bit window holds
the 15 previous received bits followed by the current word, and all 32
outputs follow from this window in parallel. The history always comes from
the received stream, including the unscrambled /K/ and ILAS words. A
transmitter whose scrambler state is its last 15 transmitted bits therefore
needs no reset alignment. With `DESCRAMBLING = 0` the data passes through
unchanged.

**Word classification.** `cgs_fsm` and `ilas_monitor` watch the unmodified
word: control characters and the ILAS are never scrambled. Because the /R/
sits in octet 0, the ILAS is exactly F*K words long. For the word at hand,
the ILAS monitor says whether it starts the ILAS, lies inside it, or is user
data. The buffer stores ILAS words unmodified and data words descrambled,
each with an `is_data` flag. `rx_valid` follows that flag once the link is in
ST_SYNCED.

**ILAS check.** In every multiframe the monitor checks the /R/ and /A/
positions, and in the second one the /Q/. It keeps configuration octets 2..15
of the second multiframe (`ilas_cfg_t`, standard JESD204B layout). At the
end of the ILAS it compares L-1, F-1, K-1 and SCR with its own parameters. It
also compares FCHK with the sum of all fields modulo 256. Any mismatch sets
the sticky `ilas_err`. The captured configuration is available at the top as
`ilas_cfg` (DID, BID, LID, M, N, N', S, CS, HD, CF, subclass, version).

## Output

For link *k*:

- `rx_data[k]` holds lane *i* in bits [32i+31:32i], octet 0 in the low byte.
- `rx_valid[k]` is high for user-data words. Once synchronised it is high on
  every clock.
- `rx_frame[k][j]` is high when octet *j* of the word is the first octet of a
  frame. The released stream starts on a multiframe boundary, so
  `frame_marker` counts octets modulo F from there. F = 16 flags octet 0 of
  every fourth word; F = 4 flags octet 0 of every word; F = 6 gives the
  pattern 0001, 0100, 0001, ...

The output is AXI-Stream-like (TDATA/TVALID) without TREADY.

## Parameters

| Parameter | Default | Range | Origin of the default |
|---|---|---|---|
| `LINKS` | 1 | 1 .. `MAX_LINKS` | range from the reference design; 1 chosen |
| `L` | 4 | 1 .. `MAX_LANES` | four lanes per link in the reference design |
| `F` | 16 | 4 .. 32 | octets per frame of a 16-channel, 16-bit ADC on 2 lanes |
| `K` | 16 | 1 .. 32, with F*K a multiple of 4 and >= 20 | chosen |
| `DESCRAMBLING` | 1 | 0 / 1 | |
| `DATA_WIDTH` | 32 | 32 only | |
| `BUFFER_DEPTH` | 128 | power of two, >= F*K/4 + skew | chosen |
| `K_MIN_OCTETS` | 4 | | JESD204B minimum /K/ count |
| `RESET_CYCLES` | 16 | | chosen |
| `CGS_STABLE_CYCLES` | 8 | | chosen |
| `ERR_THRESHOLD` | 4 | | chosen |
| `ILAS_TIMEOUT` | 4096 | > 4*F*K/4 plus a multiframe | chosen |
| `MAX_LANES` | 4 | up to 32 | the reference wrapper's lane limit; the submodules take 32 |
| `MAX_LINKS` | 4 | | the reference design's link limit |

The top stops elaboration with an error for L, LINKS, F or K out of range.
Raise `MAX_LANES` or `MAX_LINKS` to build a wider receiver.

The receiver must be built with the transmitter's L, F, K and scrambling
setting. It checks them in the ILAS and refuses a link that differs.

## Departures and open points

- **Polynomial.** The reference description writes the scrambler polynomial
  as x^14 + x^13 + 1. A JESD204B link needs 1 + x^14 + x^15, and that is what
  is built. The printed form matches it only if its exponents are read as
  zero-based tap positions of a 15-bit history (taps 13 and 14 = delays 14
  and 15).
- **8b/10b.** Decoding is left to the transceivers. The aligner works on
  decoded octets.
- **States.** The reference state diagram draws four states and sends
  "frame errors" from Synced back to Reset. Its text names five states
  (including ST_ILAS) and speaks of re-entering CGS on misalignment. Both are
  built: decoding errors go to ST_RESET, ILAS and buffer faults to ST_CGS.
- **Own choices.** These come from the standard or are this design's own: the
  counter values, the ILAS timeout, the octet-alignment rule, the buffer
  depth, the `rx_frame` format and the `global_signals` contents.
- **Not implemented.** Character replacement of /A/ and /F/ in non-scrambled
  data (JESD204B frame/lane alignment monitoring during data). A programmable
  release buffer delay (RBD). Subclasses 0 and 2. Run-time configuration.
  Each link must see the same L, F and K.
- **Startup latency.** The reference implementation reports 13 clocks before
  the first valid sample, without a reference point. Here the fixed pipeline
  from transceiver word to output is 6 clocks, plus the wait in the elastic
  buffer for the release boundary. The 13-clock figure is not reproduced.
  The reference hardware reached lane synchronisation within 15 frame
  clocks, again without a stated starting point. Here CGS takes one word of
  /K/ (at `K_MIN_OCTETS = 4`), then `CGS_STABLE_CYCLES` clocks, then the wait
  for the next LMFC boundary. That wait is at most F*K/4 = 64 clocks at the
  default size. This is not checked against the reference figure.
- **Not checked here.** FPGA timing at 320 MHz and resource use. No FPGA
  tools were run.

## Simulation

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.
`tb/jesd_tx_model.sv` is a behavioural transmitter and channel, for
simulation only. It has its own LMFC, answers SYNC~, builds the ILAS
(including the configuration checksum), and scrambles bit-serially. Per lane
it can add a delay, an octet shift and disparity errors, and it can corrupt
the checksum. `tb/tb_link_check.sv` is the scoreboard for one link's output.

- `tb_jesd204b_rx` is the end-to-end test. It runs a 2-link x 4-lane receiver
  with scrambling on, next to a 1-link x 2-lane receiver without scrambling
  (F = K = 16, the two-lane link of one 16-channel ADC). It walks through
  start-up, error-triggered reset, ILAS checksum failure, restart with new
  skews (same output phase required), and buffer overflow. It counts each
  mechanism and fails if one never happened.
- `tb_jesd204b_rx_full` runs the top at its default parameters through one
  start-up and 2000 data words.
- `tb_afe_capture` replays the reference hardware test: a 16-channel,
  16-bit, 80 MS/s ADC on one two-lane link (L = 2, F = 16, K = 16) at
  12.8 Gb/s per lane. It sends a ramp and a 5 MHz sine, each with scrambling
  on and off, for 8000 samples per channel. The testbench turns the lane
  words back into samples with the JESD204B transport mapping: lane 0 holds
  converters 0..7 and lane 1 converters 8..15, MSB octet first. It checks
  every sample. It also requires `rx_valid` to stay high from the first
  sample on, so the link sustains 80 MS/s per channel. A default-size
  receiver (L = 4) would reject this 2-lane transmitter in the ILAS check,
  so the test sets L = 2.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/jesd_pkg.sv tb/jesd_tb_pkg.sv tb/tb_jesd204b_rx.sv \
    --top-module tb_jesd204b_rx -o sim
./obj_dir/sim
```

Swap in any other testbench name. `jesd_tb_pkg.sv` is needed only by the
testbenches that use the transmitter model (`tb_data_path`,
`tb_jesd204b_link`, `tb_jesd204b_rx`, `tb_jesd204b_rx_full`,
`tb_afe_capture`). Each test
finishes in well under a second of wall time.
