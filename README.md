# A packet-switched FX correlator in SystemVerilog

A radio interferometer correlates the signals of every pair of antennas, at every
frequency channel. The number of pairs grows as the square of the number of
antennas, so the correlator quickly becomes the largest digital system of the
telescope. This design splits that work into two kinds of processing node.
Identical boards connect them through an ordinary 10 Gb Ethernet switch.

* **F processors** turn each antenna's sampled voltage into a spectrum: mixing to
  baseband, polyphase filter bank, FFT, equalization, requantization to 4 bits.
  They then transpose the spectra so that one packet holds 128 consecutive time
  samples of a single channel of one antenna.
* **X processors** each own a fixed subset of channels (engine *g* of 16 takes
  every 16th channel). They receive the packets of every antenna for their
  channels, form all antenna-pair products (visibilities), and accumulate them
  over a long integration. The accumulated results go out as packets to a
  data-acquisition port.

Every packet carries its antenna index and a *master counter* (MCNT) that says which
time block and channel it holds. Because of this, no global wiring or synchronous
backplane is needed. Packets may arrive reordered, late, or not at all, and the
receive side is built to tolerate each of these. Scaling to more antennas means
adding boards and switch ports.

The default build is the 16-antenna, dual-polarization ("full Stokes"), 2048-channel,
4-bit system. It has 8 boards, each with one F processor for 2 antennas and one
X processor with 2 X engines.

## Data path of one board

```
 adc[2 ant][2 pol][4 lanes] ──► dds_lo + ddc (x4) ──► pfb_fir (x2) ──► biplex_fft (x2)
        ──► eq_requant (x2) ──► corner_turn ──► f_packetizer ──► (XAUI stream)
                                                                     │
 eth_rx ──► loopback_merge ◄── loop_out ── tx_mux ◄──────────────────┘
                 │                          │  ▲ accumulated-output packets
                 ▼                          ▼  │
            pkt_switch                   eth_tx, eth_tx_dest
            │        │
   rx_buffer ─► xeng_core ─► win_valid ─► vacc      (one chain per X engine, 2 per board)
```

`packet_correlator` (top) instantiates `N_ANT/2` boards (`f_processor` + `x_processor`).
Its ports are the ADC samples, the 1PPS/arm sync inputs, the LO frequency, the FFT
shift schedule, an equalizer coefficient write port, the integration length, and
per board a transmit stream with a destination port number and a receive stream.
The Ethernet switch sits outside the design. Port `N_NODE` of the switch is the
data-acquisition port.

### Packets

All streams use `corr_pkg::pkt_t` = `{valid, sop, eop, data[63:0]}`, one word per clock,
with no back-pressure except on the accumulator outputs.

| packet | word 0 | following words |
|---|---|---|
| F data | `{antenna[15:0], MCNT[47:0]}` | `T_ACC/4` words; word *w* holds time samples 4*w*..4*w*+3, sample *i* in bits `[16i +: 16]` as `{xre, xim, yre, yim}` (4-bit two's complement each) |
| accumulated output | `{16'hFFFF, engine[7:0], count[15:0], channel[15:0], block[7:0]}` | word 1 `{acc_len[15:0], start sweep[47:0]}`, then for stage 0..S-1 and polarization XX, YY, XY, YX a word `{re[31:0], im[31:0]}` |

`MCNT = time_block * NCHAN + channel`. Both antennas of a board share it. The packet's
X engine is `MCNT mod 16`, its board is engine/2, and the engine's *window number* is
`MCNT / 16`. Window number mod 128 is the engine's local channel; window number / 128
is the time block ("sweep").

## F processor

* **Digital LO and down-converter** (`dds_lo`, `ddc`). A 32-bit phase accumulator
  addresses a 256 × 8-bit sine table, so the mixing frequency can be set at run time.
  Four real 8-bit samples arrive per clock. They are mixed, then filtered by a 16-tap
  windowed-sinc low-pass that keeps one complex sample per clock, which is half of the
  digitized band. The filter length and shape are this design's choice.
* **Polyphase filter bank** (`pfb_fir` + `biplex_fft`). An 8-tap polyphase FIR uses a
  sinc window (one channel per lobe) with a Hamming taper over all 8 × 2048 samples.
  A 2048-point radix-2 *biplex* FFT follows. Biplex means the two polarizations of an
  antenna share every butterfly: each stage's commutator interleaves the two streams,
  so one complex multiplier per stage serves both. Each stage has a run-time optional
  divide-by-2 (`fft_shift`, one bit per stage). Overflow saturates and raises `ovf`.
  A final reorder buffer gives natural channel order. Latency at N = 2048 is
  `(N-1+log2 N) + N + 1` clocks.
* **Equalization and requantization** (`eq_requant`). Each channel and polarization
  has an 18-bit unsigned gain (12 fractional bits, initially 1.0) that can be
  rewritten at any time. The result is rounded to 15 levels (−7..+7), so positive and
  negative ranges match. At gain 1.0 the top 4 bits of the 18-bit FFT output are kept.
* **Sync** (`sync_gen`). A slow asynchronous *arm* is synchronized, and the next
  rising edge of 1PPS then produces one sync pulse. That pulse restarts the LO phase,
  the filter-bank frame, the transpose banks, and MCNT on every board together.
* **Transpose and packetizer** (`corner_turn`, `f_packetizer`). The 4-bit spectra of
  both antennas are written into one bank of a double-buffered memory as
  [channel][time]. A full bank is 128 spectra, and it is read out as one packet per
  (channel, antenna). Packets are paced, one every `T_ACC/ANT` clocks, so a bank's
  4096 packets are spread evenly over the time the next bank takes to fill. Sending
  them as a burst would leave gaps longer than the receive time-out.

## X processor

* **`tx_mux`**. Packets from the F processor whose MCNT belongs to an engine on this
  board are *self-addressed*. Commercial switches do not send a packet back to its
  source, so these go straight to the loopback path. The other packets are buffered
  whole and sent to the switch, with the destination board as `eth_tx_dest`. In gaps
  between F packets, the two accumulators' output packets go to the
  data-acquisition port.
* **`loopback_merge`**. Loopback packets would otherwise arrive far ahead of their
  siblings from other boards, since those take the switch latency, and the receive
  buffer would reject the late ones. A loopback packet is therefore released only
  once a packet with the same or a later MCNT has come through the switch. As a
  safeguard, it is also released when the loop buffer is 3/4 full.
* **`pkt_switch`**. Routes each packet to engine `MCNT mod 2` of the board. Packets
  for another board, accumulator packets, and antenna indices out of range are
  dropped and counted.
* **`rx_buffer`** is the heart of the loss tolerance. It is a circular buffer of
  `N_WIN` = 8 windows, one window being all antennas' samples of one engine channel.
  * **Addressing.** Packets are placed by window number mod 8 and by antenna.
  * **Sliding filter.** A packet is accepted only if its window lies within ±3 of the
    highest window seen so far and has not been read out yet. A packet with a wild
    MCNT is thus rejected instead of corrupting the buffer.
  * **Readout.** Once data arrive 4 windows ahead of the oldest unread window, that
    window is read out, antenna by antenna and sample by sample, at the X engine's
    rate. Antennas whose packet never came read as zeros: a per-slot "received"
    mask acts as zero-on-readout.
  * **Time-out.** If nothing is accepted for `TIMEOUT` clocks (16 windows), the
    buffer drops its lock, so one bad MCNT seen at start-up cannot wedge it.
* **`xeng_core`**. The X engine is free running, with `floor(N/2)+1` = 9 stages.
  * **Inputs.** It takes one antenna sample per clock, `N·T_ACC` clocks per window,
    antennas in blocks of `T_ACC` samples.
  * **Pairing.** Stage *s* multiplies the current antenna *a* with antenna *a−s* of
    the same window. When *a < s*, a switch instead pairs antenna *a* of the
    *previous* window with antenna *a+N−s*, so each stage is busy every clock.
  * **Products.** Each stage has four complex multiply-accumulators, for XX\*, YY\*,
    XY\* and YX\*.
  * **Output.** After `T_ACC` samples the sums go into an output shift register.
    Each result is tagged with its (block, stage), whether it belongs to the previous
    window, and a 2-bit window tag.
* **`win_valid`** keeps a 4-entry history of window tags, which gives each result the
  channel and sweep of the window it came from and marks results of windows that were
  not filled.
* **`vacc`** is the long-term accumulator: 128 channels × 16 × 9 entries × 4
  polarizations, 32-bit, double-buffered, with a count of accumulated windows per
  channel.
  * **Integration.** One integration is `acc_len` sweeps of the engine's channels.
  * **Readout.** When a result of the next integration arrives, accumulation moves
    to the other bank. After a hold-off for the trailing previous-window results,
    the finished bank is read out as packets and zeroed as it is read.

## Where this departs from the paper's system

* Vendor and off-chip parts are not built:
  * The ADC, XAUI transceivers, 10GbE MAC/PHY, Ethernet switch, DDR2 DIMM and
    PowerPC are absent.
  * The XAUI link is a direct wire, and the 10GbE cores are replaced by the
    `eth_tx`/`eth_rx` packet ports.
  * The DRAM accumulator is an on-chip array.
  * Control registers are ports.
* One clock drives everything. The original X boards run from their own oscillators,
  asynchronous to the F boards; those clock-domain crossings are not modelled.
* One X processor is built per F board. The original system grouped four X processors
  on one large board, which makes no logical difference.
* The filter bank has 8 taps. The system description says 8, while a block diagram
  of the same system labels the filter "4 tap".
* The on-board multiply-and-accumulate path of the single-board variant of the
  F processor is not built. Its 4-bit spectra are available on `f_processor.spec_out`.
* Sizes the source leaves open were chosen here: `N_WIN` = 8, the time-out, FIFO
  depths, accumulator widths, the packet formats above, and the pacing of F packets.

## How far it is tested

Each test prints `TB_RESULT checks=… failures=…`.

* `tb_packet_correlator` is the end-to-end test, with 4 antennas and 16 channels.
  * **Setup.** It drives noise with a common component and routes packets through a
    behavioural switch. It records every board's 4-bit spectra.
  * **Checks.** It recomputes every visibility and count in every accumulated-output
    packet (1807 checks).
  * **Injected faults.** A far-future MCNT is sent before data starts; the buffer must
    lock onto it, then time out. One data packet is dropped, and the reference zeroes
    its samples. One stale packet must be rejected, and one packet with an invalid
    antenna must be dropped.
  * **Mechanisms.** It also requires loopback traffic, integrations on every engine,
    and no overrun.
* `tb_packet_correlator_full` is the same test with the top at its default parameters
  (16 antennas, 2048 channels, 8 boards). It takes about 1.5 million clocks,
  1.2 million checks, and about 1.5 minutes in Verilator.
* Unit tests:
  * `tb_biplex_fft`: against a direct DFT, with latency and overflow.
  * `tb_xeng_core`: every product of every baseline, completeness, latency.
  * `tb_rx_buffer`: scrambled order, lost packet, interfering packet, time-out.
  * `tb_dds_lo`: LO outputs against sine and cosine computed in floating point.
  * `tb_eq_requant`: rounding, saturation and live gain updates.
  * `tb_sync_gen`: arm/1PPS behaviour and sync timing.
  * `tb_ddc`: mixer and low-pass output against a filter recomputed in the test.
  * `tb_pfb_fir`: every polyphase FIR output against the window recomputed in the
    test, with latency and sync.
  * The remaining blocks are covered by the end-to-end test.

To run a test with plain Verilator:

```
verilator --binary --timing -Irtl -y rtl rtl/corr_pkg.sv tb/tb_packet_correlator.sv \
          --top-module tb_packet_correlator -o sim && ./obj_dir/sim
```
