# USB 3.0 SuperSpeed device controller built from FPGA logic and a gigabit transceiver

A USB 3.0 device usually needs an external chip: either a USB PHY or a complete
USB controller. This design needs neither. The general-purpose multi-gigabit
transceiver of an FPGA (a Xilinx 7-series GTX in the hardware the design comes from)
does the 5 Gb/s serial work. Everything else is ordinary logic: the link training
state machine, scrambling, the link layer, the protocol layer and the endpoints.

The one thing a USB 3.0 PHY does that a generic transceiver cannot do is
**LFPS (Low-Frequency Periodic Signaling)**. This is a slow square wave (20–100 ns
period) sent in bursts with electrical idle between them. The link partners use it
to find each other before training and to wake each other from low-power states. A
transceiver built for 5 Gb/s data has no LFPS generator. The central trick of the
design is to produce LFPS *through* the data path:

- the 8b/10b encoder is bypassed;
- the transmitter is fed raw 40-bit words of all ones and all zeros;
- electrical idle is switched on between bursts.

On the receive side, the transceiver's electrical-idle detector is good enough to
see LFPS arriving.

The RTL is a device, not a host. It exposes one bulk-IN endpoint (EP1) and one
bulk-OUT endpoint (EP2) to user logic through two dual-clock FIFOs. EP0 handles
enumeration.

## Block structure

```
            user clock domain          |               125 MHz word clock domain
                                       |
 in_wr_* ──► usb3_async_fifo (EP1) ────┼──► usb3_protocol ◄──► usb3_endpoints
 out_rd_* ◄─ usb3_async_fifo (EP2) ◄───┼───      │  ▲            (EP0 requests, descriptors,
                                       |         ▼  │             EP1/EP2 NRDY/ERDY state)
                                       |       usb3_link  (framing, CRCs, LGOOD/LCRD, credits)
                                       |         │  ▲
                                       |   usb3_ltssm (training, U-states) ──► LFPS control
                                       |         │  ▲                │
                                       |       usb3_pipe (scrambler) │    usb3_lfps_tx / usb3_lfps_rx
                                       |         │  ▲                │
                                       |     gt_txdata / gt_rxdata, TXELECIDLE, RXELECIDLE, ...
                                       |         to / from the transceiver (outside this RTL)
```

`usb3_device_top` wires the chain together: transceiver, then PIPE, then LTSSM and
link, then protocol, then endpoints. Two things sit beside the chain. The first is
the pair of LFPS blocks, which replace the missing LFPS circuits of a real USB PHY.
The second is the pair of clock-crossing FIFOs to the user. A single transmit
multiplexer in the top chooses what the transceiver sends:

| LTSSM situation | `gt_txdata` | `gt_tx8b10bbypass` |
|---|---|---|
| Polling.LFPS, U-state exit (LFPS generator active) | raw 40-bit LFPS word | `8'h0F` |
| Polling.RxEQ / Active / Configuration / Idle | TSEQ, TS1, TS2 or idle from the LTSSM, through the scrambler | `8'h00` |
| U0 | link-layer word, through the scrambler | `8'h00` |

In the non-LFPS rows, `gt_txdata[31:0]` is the data word (byte 0 is sent first) and
`gt_txdata[35:32]` holds its four K flags for the transceiver's 8b/10b encoder.
Packing the K flags into the upper bits this way is this design's own choice. When
connecting a real GTX, route these bits to TXCHARISK.

Everything in the controller runs on `clk`, the 125 MHz word clock. A 5 Gb/s line
gives 500 MB/s after 8b/10b, which is four bytes per 8 ns. In the reference hardware
this clock comes from the transceiver's TXOUTCLK through a PLL. User logic can
therefore never share it, which is why the FIFOs exist.

## Making LFPS with a gigabit transmitter (`usb3_lfps_tx`)

With 8b/10b bypassed on all four byte lanes, a 40-bit word leaves the transmitter
unchanged and takes 40 × 0.2 ns = 8 ns.

- **Why one word is not enough.** A word of all ones gives an 8 ns high level. That
  is shorter than half of the fastest legal LFPS period (20 ns / 2 = 10 ns).
- **The period.** The generator holds the high level for `HALF_PERIOD_WORDS = 2`
  words (`40'hFF_FFFF_FFFF` twice), then the low level for two words of zeros. One
  period is therefore 4 words = **32 ns**.
- **The burst.** A Polling burst is `BURST_PERIODS = 32` periods. That is 128 words =
  1.024 µs, inside the 0.6–1.4 µs window for tBurst.
- **The gap.** After the burst, `tx_elecidle` goes high and the line sits in
  electrical idle. The next burst starts `REPEAT_WORDS = 1250` words (10 µs) after
  the previous one started, which is the nominal Polling tRepeat.

A wake-up burst (used to leave U1/U2/U3) has the same square wave. It is a single
burst of `WAKE_PERIODS = 2500` periods (80 µs), the shortest length that meets the
U1-exit, U2-exit and U1-wakeup limits at once.

The LTSSM asks for LFPS the way a USB 3.0 PHY is asked for it on a PIPE interface.
It drives four request signals (`req_txpd`, `req_rxpd`, `req_txdetectrx`,
`req_txelecidle`), and the generator recognises two combinations of them:

| LFPS use | TXPD / RXPD | TXDETECTRX | TXELECIDLE | Generator behaviour |
|---|---|---|---|---|
| Link initialisation (Polling) | `00` | 1 | 1 | bursts repeat every tRepeat while the combination holds |
| Wake-up | `01` | – | 0 | one wake burst when the combination starts |

Every other combination produces no LFPS. This includes receiver detection, which
the LTSSM requests in power state `10` (P2).

A generic transceiver would read TXDETECTRX = 1 as "detect a receiver". The generator
therefore passes TXDETECTRX on to the transceiver (`tx_detectrx`) only when it is not
part of the Polling request. On the transceiver side, `tx_elecidle` is high between
bursts and low while a burst is on the line.

Interface and timing:

- a burst that has started always finishes;
- `burst_done` pulses in the last word of every burst;
- `active` is high while a burst is on the line;
- the first burst starts the clock after its request is seen;
- the first word of every burst is a high word.

## Recognising LFPS (`usb3_lfps_rx`)

The receiver tells the controller only one thing about LFPS: `RXELECIDLE` is 0 while
LFPS (or any signal) is present. The detector counts the length of each low period of
`rx_elecidle`, and the distance from one start to the next, in 8 ns words.

- **Polling LFPS** is a burst of 75–175 words (0.6–1.4 µs). It must start 750–1750
  words (6–14 µs) after the previous good burst. `polling_det` pulses at the end of
  such a burst, so the first detection needs two bursts. The limits are the Polling
  row of the LFPS timing table, applied on the receive side.
- **Wake-up LFPS**: `wake_det` pulses once per burst, one clock after the burst has
  lasted `WAKE_MIN = 75` words (600 ns). It pulses while the burst is still on the
  line, so the controller can answer before the partner stops.

`rx_elecidle` must already be synchronous to `clk` and free of glitches.

## Link training (`usb3_ltssm`)

The LTSSM follows the high-level path Inactive → Rx.Detect → Polling → U0 → U1 / U2 / U3:

| State | What the device does | Leaves when |
|---|---|---|
| Inactive | electrical idle | `enable` is high |
| Rx.Detect | `txpd = rxpd = 10`, asserts `txdetectrx` while `phystatus` is low | `phystatus` goes high (receiver detection finished) |
| Polling.LFPS | requests Polling LFPS (`txpd = rxpd = 00`, `txdetectrx = 1`, `tx_elecidle = 1`) | the partner's Polling LFPS was recognised and the own burst has ended |
| Polling.RxEQ | sends `TSEQ_COUNT` TSEQ ordered sets (unscrambled) to train the partner's equaliser | the count is reached |
| Polling.Active | sends TS1 | `RX_TS_COUNT` (8) consecutive TS1 or TS2 received |
| Polling.Configuration | sends TS2 | 8 consecutive TS2 received **and** at least `TS2_TX_MIN` (16) TS2 sent |
| Polling.Idle | sends scrambled logical idle | `IDLE_RX_WORDS` (2) consecutive idle words received |
| U0 | the link layer owns the transmitter (`link_active`) | `go_u1` / `go_u2` / `go_u3` |
| U1, U2, U3 | electrical idle, `txpd = rxpd = 01` | own `wake_req`, or the partner's wake LFPS |
| U-exit | requests one wake-up burst (`txpd = rxpd = 01`, `tx_elecidle = 0`) | own burst finished and partner's LFPS seen, then U0 |

Details:

- **Ordered sets.** Ordered sets are word-aligned, with COM in byte 0.
  - A TSEQ is 32 symbols, i.e. 8 words: COM followed by the scrambler's output
    sequence from its seed (`FF 17 C0 14 B2 E7 …`).
  - TS1 and TS2 are 16 symbols: four COMs, then link functions, then ten copies of
    their identifier (D10.2 for TS1, D5.2 for TS2).
- **Scramblers switched on together.** Scrambling is switched on in both directions
  at Polling.Idle. The COM symbols in the training sets have already reset both
  scramblers, so the two ends enter U0 with their scramblers in step.
- **Entering U1/U2/U3.** In a full USB 3.0 link this is negotiated with LGO_Ux link
  commands. Here it is a direct request on `go_u1`/`go_u2`/`go_u3`.
- **Leaving U1/U2/U3.** The way back to U0 is this design's own reading. LFPS wakes
  a partner in a low-power state, so each side sends a wake burst and returns to U0
  when both have been seen. USB 3.0 proper goes through Recovery at this point.
  Recovery's ordered sets would also realign the scramblers. In their place the
  transmitter is fed COM words in U1, U2, U3 and U-exit. That holds its scrambler at
  the seed, and the words that reach the line as U0 resumes reseed the partner's
  descrambler. The partner is expected to do the same.
- **State kept through U1/U2/U3.** The link layer keeps its header sequence numbers,
  credits and owed link commands. The endpoints keep the address, configuration and
  EP2 sequence number. All of this is cleared only when the link trains again.

Not modelled:

- Recovery, Hot Reset, Compliance, Loopback, SS.Disabled;
- the warm-reset LFPS;
- all LTSSM timeouts.

A link that loses training therefore stays where it is until `enable` is dropped.

## Scrambling (`usb3_pipe`, `usb3_scrambler`)

The PIPE module scrambles the words it sends and descrambles the words it receives.
Each direction is one `usb3_scrambler` with one clock of latency.

The LFSR is the USB 3.0 one, G(X) = X¹⁶ + X⁵ + X⁴ + X³ + 1, seeded with `FFFF`. Each
word is handled as four symbols in line order, byte 0 first:

- a COM reseeds the LFSR;
- a SKP leaves it unchanged;
- every other symbol advances it by eight bits;
- when scrambling is enabled, data symbols are XORed with those eight bits.

Received words must already be symbol-aligned (comma alignment in the transceiver)
and 8b/10b-decoded.

## Link layer (`usb3_link`)

The link layer is active in U0. It sends one 32-bit word per clock. Outside U0 it
sends nothing, but its sequence numbers and credits are kept through U1, U2 and U3. In each word
slot it picks, in priority order:

1. **A pending link command.** This is `LCSTART` (`SLC SLC SLC EPF`) followed by one
   word that carries the 16-bit link control word twice. The link control word is
   an 11-bit command plus CRC-5 (polynomial `0x05`). Two commands are used:
   - `LGOOD_n` (type 00, sub-type = header sequence number n) acknowledges a
     received header;
   - `LCRD_x` (type 01, x = A…D in turn) hands a header buffer back to the host.
2. **A header packet from the protocol layer.** It is sent only if the host still
   has a free header buffer. The sender starts with `HDR_CREDITS = 4`; each header
   sent uses one and each received `LCRD` returns one. A header packet is:
   - `HPSTART`;
   - three header double-words;
   - `{link control word, CRC-16}`, with CRC-16 polynomial `0x100B` over the three
     double-words. The link control word carries the 3-bit header sequence number
     and its CRC-5.

   If the header announces data, the payload follows straight away as `DPPSTART`,
   the payload words, the CRC-32 (reflected `EDB88320`, inverted) and `DPPEND`.
3. **Logical idle**, which is a data word of zeros and leaves the link scrambled.

While a header waits for a credit, `tx_stall_cnt` counts the cycles. Link commands
never interrupt a packet.

On the receive side, the same framing is parsed.

- **Headers.** A header is passed up (`rx_hdr_valid`) only if all three of these
  hold:
  - its CRC-16 is correct;
  - the CRC-5 of its link control word is correct;
  - its sequence number is the expected one.

  The header is then answered with `LGOOD_n` and `LCRD_x`. A header that fails any of
  these is counted in `rx_hdr_err_cnt` and not answered.
- **Payload.** Payload words are passed up one clock late. The delay lets the word
  in front of `DPPEND` be recognised as the CRC-32 rather than data. `rx_pl_end`
  then reports in `rx_pl_good` whether the CRC matched.

Not implemented:

- retry signalling with LBAD / LRTY, and with it header retransmission;
- the power-management link commands (LGO_Ux, LAU, LXU, LPMA);
- LUP / LDN;
- SKP insertion.

A host that relies on any of these will not work with this link layer.

## Protocol layer and endpoints (`usb3_protocol`, `usb3_endpoints`)

The protocol layer handles one transaction at a time. Header fields use the
USB 3.0 layout:

- transaction packet (TP): sub-type in DW1[3:0], retry bit DW1[6], direction
  DW1[7], endpoint DW1[11:8], NumP DW1[20:16], sequence DW1[25:21];
- data packet header: sequence DW1[4:0], setup bit DW1[15], length DW1[31:16];
- both: packet type in DW0[4:0], device address in DW0[31:25].

| Host sends | Device answers |
|---|---|
| ACK TP, IN, EP1 | a data packet from the bulk-in FIFO: min(FIFO words, 256) words with the sequence number the host asked for. If the FIFO is empty, NRDY, and later ERDY once data arrives. |
| Data packet, OUT, EP2 | A packet with a good CRC-32 and the expected sequence number is committed to the FIFO and acknowledged with ACK(seq+1). A packet with a bad CRC or wrong sequence is discarded and answered with an ACK with the retry bit set. If the FIFO cannot hold a whole packet, the answer is NRDY, followed by ERDY once it can. |
| Data packet with setup bit, EP0 | The 8 SETUP bytes go to the endpoint block and are acknowledged. |
| ACK TP, IN, EP0 | the control data stage: the selected descriptor, capped by wLength |
| Data packet, OUT, EP0 | acknowledged and ignored (e.g. SET_SEL) |
| STATUS TP, EP0 | ACK; a pending SET_ADDRESS or SET_CONFIGURATION takes effect now |

Bulk-out data is written into the FIFO as it arrives. The FIFO's write side can
*commit* what it has written (make it visible to the reader) or *discard* it. A
packet that later fails its CRC therefore never reaches the user. The endpoint block
keeps the following state:

- the device address and configuration;
- the EP2 sequence number;
- the "NRDY was sent, ERDY is owed" flags.

Descriptors are served from a small built-in table, 84 bytes in total:

| Descriptor | Size | Contents |
|---|---|---|
| Device | 18 bytes | vendor and product ID come from parameters, 0 by default |
| Configuration | 44 bytes | one interface with a bulk-IN and a bulk-OUT endpoint, each with 1024-byte packets and a SuperSpeed companion descriptor (no bursts) |
| BOS | 22 bytes | |

Not built:

- bursts (several packets outstanding per request);
- resending an IN packet the host asks for again (there is no replay buffer);
- STALL, isochronous and interrupt endpoints, streams;
- payloads that are not a multiple of 4 bytes, except descriptors.

## Clock-domain crossing FIFOs (`usb3_async_fifo`)

This is a standard Gray-pointer asynchronous FIFO with `2^ADDR_W` entries: 2048 ×
32 bits, 8 KiB, eight full packets.

- Pointers have one extra wrap bit. Gray copies of them cross through two flip-flops.
- Full and empty are computed from the synchronised pointers. The fill levels on each
  side are therefore conservative by the synchroniser delay.
- Reads are show-ahead.
- Two write-side controls decide what the reader sees:
  - `wr_commit` publishes everything written so far;
  - `wr_discard` rewinds to the last commit.
- The bulk-in FIFO ties `wr_commit` high.

## Top-level interface (`usb3_device_top`)

| Group | Signals |
|---|---|
| Clocking | `clk` (125 MHz word clock), `rst_n`, `enable` |
| Transceiver, transmit | `gt_txdata[39:0]`, `gt_tx8b10bbypass`, `gt_txelecidle`, `gt_txdetectrx`, `gt_txpd`, `gt_rxpd` |
| Transceiver, receive | `gt_rxdata[31:0]`, `gt_rxcharisk[3:0]` (aligned, decoded), `gt_rxelecidle`, `gt_phystatus` |
| Power management | `go_u1`, `go_u2`, `go_u3`, `wake_req` |
| User side (`user_clk`) | `in_wr_en`/`in_wr_data`/`in_full` (bulk-in, EP1), `out_rd_en`/`out_rd_data`/`out_empty` (bulk-out, EP2, show-ahead) |
| Status | `ltssm_state`, `dev_addr`, `configured`, `status` (counters: IN and OUT packets, NRDY, ERDY, retries, SETUPs, credit-stall cycles, LGOOD received, link commands sent, header errors) |

The transceiver itself and the PLL are not part of this RTL. Both are vendor
primitives, and their signals are ports of the top. The `enable` input takes the
place of the LTSSM's reasons for leaving Inactive.

Parameters, with their defaults:

| Parameter | Default | Meaning |
|---|---|---|
| `FIFO_ADDR_W` | 11 | FIFO depth 2^11 words |
| `MAX_PKT_BYTES` | 1024 | bulk maximum packet size |
| `TSEQ_COUNT` | 65536 | TSEQ ordered sets in Polling.RxEQ |
| `LFPS_REPEAT` | 1250 | Polling tRepeat in words (10 µs) |

The lower-level blocks carry further parameters: LFPS timings, training counts and
header credits.

## Performance

The datapath moves one 32-bit word per clock, which is 500 MB/s of payload-capable
bandwidth. The host model in the end-to-end testbench answers at once. Against it,
with 1024-byte packets, the simulated rates are:

| Direction | Data | Cycles | Rate |
|---|---|---|---|
| Bulk-in | 32 KiB | 8864 | 462 MB/s |
| Bulk-out | 8 KiB | 2208 | 463 MB/s |

The published hardware measured more than 320 MB/s in both directions against a
real PC host. A real host's latency between packets, which is not modelled here,
explains the difference. The design does not implement bursts, which would hide
that latency.

The bit error rate (better than 10⁻¹³ in the hardware, measured over 3 TB) depends
on the transceiver, board and cable, not on this logic. The logic's part is
detection: CRC-5 and CRC-16 on headers, CRC-32 on payloads.

## Verification

Each block has a self-checking testbench in `tb/`. The CRC and scrambler reference
models are written independently of the RTL, in `tb_usb3_ref_pkg`. Every testbench:

- prints `TB_RESULT checks=N failures=M`;
- contains a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_usb3_lfps_tx` | word-exact LFPS waveform: 2 + 2 words, 128-word bursts, 1250-word repeat, electrical idle in the gaps, 2500-period wake burst |
| `tb_usb3_lfps_rx` | accepts in-range bursts and repeats; rejects bursts that are too short or too long and repeats that are too slow; wake detection time |
| `tb_usb3_pipe` | random words with COM, SKP and framing symbols, compared with the reference scrambler; the known sequence after a COM; loopback; pass-through with scrambling off |
| `tb_usb3_ltssm` | the whole training sequence against a link-partner model, with `TSEQ_COUNT` reduced; TS counts; U-state entry and exit both ways |
| `tb_usb3_link` | framing and all three CRCs; LGOOD/LCRD answers; rejection of a bad header; payload CRC flags; credit exhaustion, stall and release by LCRD; state kept through a low-power state and cleared by retraining |
| `tb_usb3_protocol` | each transaction of the protocol table, FIFO commit/discard, the 256-word packet limit |
| `tb_usb3_endpoints` | descriptors byte by byte, wLength truncation, deferred address and configuration, ERDY requests |
| `tb_usb3_async_fifo` | data order across unrelated 100 MHz / 125 MHz clocks (depth reduced to 16), full/empty, commit/discard |

`tb_usb3_device_top` runs the whole controller at its **default parameters**,
including all 65536 TSEQs. A host-and-transceiver model (`tb/`) drives it through:

- Rx.Detect, LFPS handshake, training and enumeration;
- bulk-in and bulk-out traffic with data checking and rate measurement;
- a retry, NRDY/ERDY in both directions and a credit stall;
- U1/U2/U3 with wake-up from either side;
- a bulk-out packet afterwards, with address and configuration still in place.

It counts every one of these mechanisms and fails if any of them never happened. Compiled
with Verilator, it runs in about a second on a workstation.

To run it with plain Verilator (5.x) from the repository root:

```
verilator --binary --timing -Wno-fatal -y rtl -y tb +libext+.sv -Irtl -Itb \
  rtl/usb3_pkg.sv tb/tb_usb3_ref_pkg.sv tb/tb_usb3_device_top.sv \
  --top-module tb_usb3_device_top -o sim
./obj_dir/sim
```

To run a block's own test, replace the top module and testbench file with that
testbench.

## How closely this follows the published design

These parts follow the publication closely:

- the overall split of the serial interface engine into PIPE, link (with LTSSM),
  protocol and endpoint modules;
- the three endpoints;
- the clock arrangement and the need for FIFOs;
- the LFPS-through-the-data-path method, with its exact numbers: 40-bit raw words,
  TX8B10BBYPASS = `8'h0F`, two words per half period, 32 ns period, 32 periods per
  Polling burst, electrical idle between bursts, 10 µs repeat;
- the LFPS timing limits;
- the Rx.Detect handshake on TXDETECTRX/PHYSTATUS;
- the order of the training steps (LFPS, TSEQ, TS1, TS2, U0);
- RXELECIDLE as the LFPS detector;
- the signal combinations that start Polling and wake-up LFPS, including the
  power-down setting `01` while waking a partner.

The publication describes the higher layers only by their purpose. Everything below
comes from the USB 3.0 rules or is this design's own choice:

- ordered-set contents, counts and the Polling.Idle step;
- framing symbols, link control words, CRCs and header credits;
- packet formats and transaction rules;
- descriptors;
- how U1/U2/U3 are left.

Where the publication says more than one thing, this design makes a choice:

- **Which signals start LFPS.** It gives PIPE-level start conditions for LFPS and,
  separately, the raw-word method of making it. Here the LTSSM issues exactly those
  conditions and the LFPS generator turns them into raw words. The generator keeps
  TXDETECTRX away from the transceiver during Polling.
- **Power state for receiver detection.** The publication gives none. Receiver
  detection uses power state `10` so that it cannot be mistaken for the Polling
  condition.
- **Transceiver power during LFPS.** It describes a standard PHY as turning the
  gigabit transceiver off for LFPS. Here the transceiver must stay powered
  (TXPD = `00`) during Polling, because it is the transceiver that draws the square
  wave.

The published controller also has a host variant, with enumeration and
device-driver modules. It is not part of this device RTL.

Known limits, in short:

- no Recovery, warm reset or LTSSM timeouts (COM words stand in for Recovery's
  scrambler realignment after a U-state exit);
- no link-level retry or header replay, and no SKP insertion;
- no bursts and no IN replay;
- word-granular bulk payloads.

These are enough for a cooperative host and a clean link, as in the testbench. A
production device talking to arbitrary hosts would need them.
