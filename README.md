# HTSP: interleaved AXI-Stream channels over a 100 Gb/s Ethernet MAC

Detector read-out links usually have to carry more than one stream: bulk image data,
register reads and writes, asynchronous status messages. Putting them on one fibre saves
cables and vacuum feed-throughs, but only if one stream that is blocked at the receiver
does not stop the others. The High Throughput Serial Protocol (HTSP) solves this with
a thin layer of logic on top of the 100 Gb/s Ethernet hard IP found in current FPGAs:

* the hard MAC/PCS already appends and checks a frame check sequence (FCS), aligns and
  reorders the four 25 Gb/s lanes, and, with the RS-FEC block, corrects bit errors;
* HTSP adds only what the hard IP lacks: up to 16 **virtual channels** (VCs), each an
  independent AXI4-Stream, multiplexed onto the link in bounded pieces, and a
  **per-VC pause** that lets each receiver buffer throttle its own sender.

This repository holds a synthesizable SystemVerilog model of the HTSP core at its
100 Gb/s operating point (512-bit words at 195.66 MHz, 16 VCs, 8 kB bursts), with
self-checking testbenches. The Ethernet hard IP itself is not part of it; the core ends
at the MAC's AXI-Stream ports.

## Structure

```
 app_tx[0..15] ─► htsp_tx_fifo ─► htsp_axis_mux ─► htsp_tx ─► htsp_saf_fifo ─► mac_tx ─┐
   (per VC)        (per VC)            ▲  round robin,  framing     store and         │
                                       │  burst limit   header/     forward           │  100G MAC
                            remote_pause                footer                        │  + RS-FEC
                                       │                  ▲ local_pause               │  + GT
 app_rx[0..15] ◄─ htsp_rx_fifo ◄─ htsp_axis_demux ◄─ htsp_rx ◄──────────────────── mac_rx ◄┘
   (per VC)        pause threshold      by VC         checks, restores
                                                       segments, pauses
```

| Module | Role |
|---|---|
| `htsp_pkg` | word width, beat struct (`beat_t`: data, keep, 8-bit user, last), header/footer field offsets and packing functions |
| `htsp_tx_fifo` | per-VC outbound FIFO (32 words) |
| `htsp_axis_mux` | round-robin arbiter that cuts frames into segments of at most one burst and skips VCs paused by the far end |
| `htsp_tx` | wraps each segment in a header word and a footer word; sends header-only keep-alive frames |
| `htsp_saf_fifo` | store-and-forward FIFO: a frame goes to the MAC only once it is complete |
| `htsp_rx` | validates headers and footers, restores each segment's keep, last and user bits, tracks link state and the far end's pauses |
| `htsp_axis_demux` | steers payload words to the FIFO of their VC |
| `htsp_rx_fifo` | per-VC inbound FIFO (4096 words) that raises the VC's pause at half full |
| `htsp_fwft_fifo` | storage shared by the three FIFOs: synchronous-read RAM plus output register |
| `htsp_core` | the top level: all of the above, one clock domain |

Everything runs on the MAC's AXI-Stream clock. The application side therefore sees the
same 512-bit, 195.66 MHz streams; clock-domain crossing, if needed, is left to the user.

## The HTSP frame

Each segment travels as one raw Ethernet frame: a 64-byte header word, the payload
words, and a footer word. A frame that is only a header is a keep-alive. All fields sit
in one 512-bit word with byte *i* in bits `8i+7:8i`; multi-byte fields are little-endian.

Header (word 0 of every frame):

| Bytes | Field | Content |
|---|---|---|
| 5:0 | DestMac | `rem_mac` input |
| 11:6 | SrcMac | `loc_mac` input |
| 13:12 | EtherType | `ETHER_TYPE` parameter, default `16'hB588` (0x88, 0xB5 on the wire, the IEEE local-experimental type) |
| 14 | Version | 0x01 |
| 15 | TID | transaction ID, +1 for every frame sent, header-only ones included |
| 17:16 | Pause | sender's RX FIFO pause bits, bit *v* for VC *v* |
| 18 | VC | VC of the payload |
| 19 | TUserFirst | TUSER of the segment's first word |
| 20 | OpCodeEn | bit 0: OpCodeData is valid |
| 29:21 | reserved | zero |
| 31:30 | HdrXsum | Internet checksum of the header: the ones'-complement sum of all 32 16-bit words of the header is 0xFFFF |
| 47:32 | OpCodeData | 128-bit op-code |
| 63:48 | UserData | 128-bit `tx_user_data`, sampled for every header |

Footer (last word of a data frame; keep = 6 bytes):

| Bytes | Field | Content |
|---|---|---|
| 0 | TKeepLast | number of valid bytes in the last payload word, 1..64 |
| 1 | TLast/TUser | bit 0: the application's TLAST; bits 7:1: TUSER[7:1] of the last payload word |
| 3:2 | Pause | the header's pause bits OR-ed with every pause bit seen while the payload was sent |
| 5:4 | PayloadSize | payload bytes, checked by the receiver |

There is no CRC field: the MAC's FCS covers the whole frame, and the receiving MAC
reports a bad FCS in TUSER bit 0 of the frame's last word.

The header is a full word although only 55 of its bytes are used: packing payload into
the spare bytes would need byte-shifting logic across 64 byte lanes, and with 8 kB
bursts the 9 spare bytes cost 0.1 % of the bandwidth.

## Interleaving: segments and their reassembly

This is the part that needs the most care, because three modules share it.

**Cutting.** `htsp_axis_mux` serves one VC at a time. It passes that VC's words until
either the application's TLAST or the burst limit (`tx_burst_words`, default and
maximum 128 words = 8 kB) is reached, then marks the word `seg_last` and arbitrates
again, round-robin from the VC after the one just served. A VC takes part only if its
remote pause bit is low when a segment starts; once started, a segment always runs to
its end. No cycle is lost between segments: when idle, the next winner is chosen
combinationally and its first word is offered at once.

**Framing.** `htsp_tx` puts the VC index and the segment's first TUSER byte into the
header, forwards the payload with all keep bits set (the MAC requires full words inside
a frame), and records the real keep of the last word, its TLAST and its upper TUSER
bits in the footer. A segment of N words leaves as N+2 words in N+2 cycles.

**Restoring.** `htsp_rx` cannot tell the last payload word until the footer arrives,
so it holds one word back. Each new payload word releases the one before with full keep;
the footer releases the held word with the keep rebuilt from the byte count, TLAST from
the footer and TUSER = {footer TUSER[7:1], TUserFirst[0] if the segment had one word}.
The first word of a segment gets TUserFirst. A segment that ended on the burst limit
leaves with TLAST low, so the application frame simply continues in the VC's RX FIFO
when the next segment of that VC arrives, however many other VCs' segments came in
between.

Only the first and last TUSER bytes of each segment cross the link. An application
that sets TUSER on middle words of a frame loses it; the usual use, start-of-frame on
the first word and status such as end-of-frame-error on the last, survives intact.

## Flow control: local and remote pause

Each `htsp_rx_fifo` compares its fill level with `RX_PAUSE_THRESH` (default half of
4096 words). The 16 results are the **local pauses**; `htsp_tx` writes the current
value into every header it sends. `htsp_rx` takes the **remote pauses** from every good
header and footer it receives, and the MUX uses them. A paused VC stops at the end of
its current segment; the others continue.

The words above the threshold must absorb everything already on its way when the pause
rises. Worst case, in words: the pause waits for the next header from this side (up to
256 cycles of keep-alive period if this side is idle, or one segment of 130 if it is
busy), the far end finishes the segment it is sending (128), its store-and-forward FIFO
may already hold up to 512 words for the VC, plus the round trip through both MACs and
the fibre. Without the MAC latency that is under 1 000 words, leaving the 2 048-word
headroom room for a MAC and fibre delay of about 1 000 cycles (5 µs). An arriving word
that finds the FIFO full is dropped and `rx_overflow[v]` pulses; in correct operation it
never does.

The link is considered up once a good header has arrived, and down after
`LINK_TIMEOUT` (default 1024) cycles without one. While it is down every remote pause
reads as set, so no data is sent into a link that is not known to be alive. Header-only
frames sent every `KEEPALIVE_CYCLES` (default 256) idle cycles bring it up and keep it up;
the timer restarts whenever any frame leaves, so on a busy link no keep-alive frames
are sent at all.

## Errors

`htsp_rx` drops a frame whose header has the wrong version or EtherType, a bad
checksum or a VC index of `NUM_VC` or more (`rx_hdr_err`). For a data frame it checks
the MAC's FCS flag, that there was at least one payload word, and that PayloadSize
equals the bytes received; on failure the held word leaves with TLAST and TUSER bit 1
(end-of-frame error) set and `rx_frame_err` pulses. The words of the segment already
delivered cannot be recalled; the error bit tells the application to discard the frame.
The footer of an errored frame does not update the remote pauses (its header, protected by its own checksum, already has). TID is not checked; the last one
received is available on `rx_tid` for debugging.

## Timing and throughput

* Link cost of a segment of N words: N + 3 cycles (header, footer, and the MAC's one
  idle cycle between frames). At 8 kB this is 128/131 = 97.7 % of the line rate.
* A frame of S bytes needs ceil(S/64) words in ceil(words/burst) segments.
* Latency from the first word into `app_tx` to the first word out of `app_rx`,
  looped back: min(N, 128) + 10 cycles plus the MAC/PHY/fibre latency. It grows with the
  frame up to one burst because `htsp_saf_fifo` must hold a whole segment before the MAC
  may start sending it; beyond one burst it is flat.

Simulated with a 20-cycle loopback in place of the hard IP (`tb_htsp_frame_sweep`,
`tb_htsp_core`):

| Frame | Cycles per frame | Payload rate at 195.66 MHz | Frame rate |
|---|---|---|---|
| 256 B | 7 | 57.2 Gb/s | 27.95 MHz |
| 1 kB | 19 | 84.4 Gb/s | 10.30 MHz |
| 4 kB | 67 | 95.7 Gb/s | 2.92 MHz |
| 8 kB | 131 | 97.9 Gb/s | 1.49 MHz |
| 1 MB | 16 768 | 97.9 Gb/s | 11.67 kHz |
| 8 kB, 2 kB bursts | 140 | 91.6 Gb/s | 1.40 MHz |

These follow the published formula with a 3-cycle overhead and match the published
calculated values (27.9 MHz at 256 B, 11.6 kHz at 1 MB, 97.7 % at 8 kB). The published
hardware measurements showed a fourth overhead cycle for frames above 768 bytes, which
was attributed to the hard IP; the loopback model does not reproduce it. The published
latency at and above 8 kB is 1.176 µs (230 cycles) through real hard IP; this model's
core accounts for 138 of them at 8 kB, the rest being MAC, RS-FEC, transceivers and
fibre.

## Parameters of `htsp_core`

| Parameter | Default | Origin |
|---|---|---|
| `NUM_VC` | 16 | the published maximum (16 pause bits); 1..16 allowed |
| `MAX_PAYLOAD_BYTES` | 8192 | the published burst size; must be a multiple of 64 |
| `TX_FIFO_DEPTH` | 32 | this design's choice; shallow, as the published block RAM count does not grow with the number of VCs |
| `RX_FIFO_DEPTH` | 4096 | this design's choice (4096 × 512 bit is eight 4K×72 UltraRAMs, the per-VC RAM count of the published resource table) |
| `RX_PAUSE_THRESH` | `RX_FIFO_DEPTH/2` | this design's choice |
| `SAF_DEPTH` | 512 | this design's choice; must exceed `MAX_PAYLOAD_BYTES/64 + 2` |
| `KEEPALIVE_CYCLES` | 256 | this design's choice |
| `LINK_TIMEOUT` | `4*KEEPALIVE_CYCLES` | this design's choice |
| `ETHER_TYPE` | `16'hB588` | this design's choice |

Other ports: `tx_burst_words` (run-time burst limit in words, 0 = maximum),
`loc_mac`/`rem_mac`, `tx_user_data`/`rx_user_data`, an op-code channel
(`tx_op_valid`/`tx_op_ready`/`tx_op_data` in, a one-cycle `rx_op_valid` with
`rx_op_data` out; an op-code rides on the next header, data or keep-alive), and status:
`link_up`, `local_pause`, `remote_pause`, `rx_overflow`, `rx_hdr_err`, `rx_frame_err`,
`tx_hdr_only_sent`, `tx_frame_sent`, `rx_hdr_only_rcvd`, `rx_tid`.

## What follows the published design and what does not

Taken from the published description: the block structure and its pause paths, the
512-bit/195.66 MHz datapath, up to 16 VCs, the header and footer fields and their byte
positions, version 0x01, the keep-alive timer that restarts on every full frame, the
8 kB burst, interleaving of partial frames, the FCS error flag in the MAC's TUSER, the
store-and-forward FIFO before the MAC, and the receiver's checks.

Chosen here, where the description is silent or loose:

* byte order of multi-byte fields; EtherType value; the checksum algorithm;
* TKeepLast holds a byte count (a 64-bit keep does not fit in its one byte), so keep
  vectors must be contiguous from byte 0;
* the published header table lists OpCodeEn at byte 20 and also "Reserved" at 29:20
  while the text counts 10 reserved bytes; here byte 20 is OpCodeEn and 21..29 are zero;
* the footer pause is read as a sticky OR over the frame;
* TUSER is 8 bits per word; bit 0 of the MAC's RX TUSER is the FCS error, bit 1 of the
  core's output TUSER is the end-of-frame error (the published footer text speaks of the
  TUSER bits "with respect to the last byte", which hints at per-byte TUSER; with one
  TUSER byte per word the last word's byte is used);
* round-robin arbitration, pause sampled at segment start, run-time burst limit encoding;
* FIFO depths, pause threshold, keep-alive period, link time-out, and forcing all remote
  pauses while the link is down;
* a single clock domain; all FIFOs are built on one first-word-fall-through helper,
  `htsp_fwft_fifo`, whose array has a registered read port (so it maps to block RAM or
  UltraRAM) followed by an output register; a word written into an empty FIFO is
  readable two cycles later.

Not included: the Ethernet MAC/PCS, RS-FEC and transceivers (vendor hard IP; their
AXI-Stream ports are the core's `mac_*` ports), and the benchmark firmware used to
characterise the protocol (PRBS generator and checker, stream profiler). The published
design also uses DSP slices in the interleaving logic; how is not described, and nothing
here maps to them. The published resource figures also mention a "minimal interleaving"
build option without describing it; it is not modelled.

## Testbenches

All are self-checking, end with a `TB_RESULT checks=N failures=M` line and stop
themselves with a watchdog. `htsp_tb_pkg` rebuilds header and footer words byte by byte,
independently of `htsp_pkg`; `caui_loopback_model` stands in for the MAC, FEC,
transceivers and fibre (fixed latency, one idle cycle between frames, optional
corruption of a frame with the FCS error flag set, and a cut that loses every word).

| Testbench | What it exercises |
|---|---|
| `tb_htsp_tx_fifo` | ordering, full, two-cycle write-to-read latency |
| `tb_htsp_rx_fifo` | pause threshold timing, overflow drop, ordering |
| `tb_htsp_saf_fifo` | no release before TLAST, no gaps inside a frame |
| `tb_htsp_axis_mux` | per-VC order, segment limits (changed at run time), pause, round-robin order |
| `tb_htsp_tx` | every header/footer field against the reference, keep-alive timing, op-code, N+2 cycles per segment |
| `tb_htsp_rx` | reassembly, keep/last/user restoration, pauses, link up/down, each error case |
| `tb_htsp_axis_demux` | VC decoding |
| `tb_htsp_core` | the whole core at default size, looped back: link-up, latency, bandwidth, all 16 VCs with interleaving and a long pause on one VC, op-code, user data, a damaged frame, a cut fibre (link loss and recovery); counts that each mechanism occurred |
| `tb_htsp_vc_count` | the core built with 1 and with 3 VCs: 8 kB bandwidth and mixed, stalled traffic with all data compared |
| `tb_htsp_frame_sweep` | cycles per frame from 64 B to 1 MB against the N+3 formula |

Run one with Verilator 5, from the repository root, for example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
  rtl/htsp_pkg.sv tb/tb_htsp_core.sv --top-module tb_htsp_core -o sim
./obj_dir/sim
```

`tb_htsp_core` and `tb_htsp_frame_sweep` run the core with all parameters at their
defaults and finish in well under a minute. The unit testbenches shrink depths, VC
counts and burst sizes to reach corner cases quickly.
