# FPGA logic for a multi-channel DAQ board with long-distance links

This design is the FPGA logic of a data-acquisition (DAQ) core board for
nuclear physics experiments. In such experiments the detectors sit far from
the workstations that store and analyse the data, often kilometres away. The
board does three jobs:

- it digitises detector signals with an 8-channel, 24-bit simultaneous-sampling
  ADC at up to 16 kSPS;
- it merges those samples with data from other boards, which arrive over a
  short electrical serial link;
- it streams the result to a workstation over optical fibre.

Commands travel the other way. The workstation sends synchronisation commands
down the fibre. The board forwards them to the other boards on the electrical
link and can use them to restart the local ADC conversions.

The same four-layer transmission stack is used on both links:

| Layer | Job |
|---|---|
| LLC | Segmentation, sequence numbers, retransmission |
| MAC | Framing |
| SYN | Gives synchronisation commands priority |
| PHY | Line coding |

On the optical link the PHY is the FPGA's built-in multi-gigabit transceiver,
which is a vendor block and not part of this RTL. On the electrical link the
PHY is written here. It does 8B/10B coding, oversampling clock recovery,
comma alignment and a CRC-16 check. Any frame that fails the check is dropped
whole.

Everything runs in one clock domain, `clk`, at 40 MHz by default.

## Board data flow

```
 ADC (4 serial lines) --> adc_collect --sample set--> +-------------+
                                                      | data_gather |--> optical LLC -> MAC -> SYN --> gtx_* (GTX)
 electrical link --> transceive --> data buffer ----> |  merge FIFO |                              <-- gtx_* (GTX)
 (elink_rx/tx)       (LLC/MAC/SYN/PHY)  (sync_fifo)   +-------------+        |                  |
                          ^                                                  v host_* (packets)  v sync commands
                          +---------------- commands forwarded -------------------------------------+
                                                                      CMD_ADC_SYNC --> adc_sync_n pulse
```

`daq_top` instantiates these blocks:

| Instance | Module | Role |
|---|---|---|
| `u_adc` | `adc_collect` | Reads the ADC frames and drives the ADC's SYNC line. |
| `u_elink` | `transceive` | The electrical link: the whole stack, including the PHY. |
| `u_data_buffer` | `sync_fifo` | Holds packets that arrive on the electrical link (1024 words, each with a last-word flag). |
| `u_gather` | `data_gather` | Merges local sample sets and buffered packets into the merge FIFO. |
| `u_opt_llc`, `u_opt_mac`, `u_opt_syn` | `llc`, `mac`, `syn` | The optical stack, whose byte port is `gtx_*`. |
| `u_loop_test` | `loop_test` | Counter generator and checker for the link loopback test. |

A counter next to the data buffer tracks how many complete packets it holds.
The gather only copies a buffered packet once all of it has arrived. Without
this, a packet trickling in over the slow electrical link would block the
merge FIFO while local samples waited. A set that arrives while the previous
one is still waiting is lost, and the `lost_sets` counter records it.

## Packet format produced by the gather

Each ADC conversion becomes one packet of 17 16-bit words:

| word | contents |
|---|---|
| 0 | `{4'hA, BOARD_ID[3:0], set_counter[7:0]}` |
| 1 + 2c | `{status_header_c[7:0], result_c[23:16]}` for channel c = 0..7 |
| 2 + 2c | `result_c[15:0]` (the last word carries `tlast`) |

Packets from other boards are copied unchanged. Packets are never interleaved.
Between packets a waiting local set always goes first, because the ADC cannot
be paused.

## The transmission stack

Each layer has a streaming valid/ready interface, in the style of AXI-Stream
(`*_tdata`, `*_tvalid`, `*_tready`, `*_tlast`). The exception is the SYN–PHY
boundary, which is a GMII-style byte port: `txd`/`tx_en` and `rxd`/`rx_dv`,
with a strobe `gmii_ce` that marks the byte slots. On the electrical link
`gmii_ce` comes from the PHY, one pulse per symbol slot. On the optical link
it is the input `gtx_ce`, which may be held high. The SYN layer samples the
receive side on its own strobe, `gmii_rx_ce`:

- behind the electrical PHY it is always high, because checked frames leave
  that PHY at one byte per clock;
- on the optical link it is `gtx_ce`.

A frame's bytes must arrive on consecutive strobes.

### LLC: stop-and-wait retransmission (`llc`)

**Transmit.** Packets of 16-bit words are cut into segments of at most
`SEG_WORDS` (32) words. A segment always ends at a packet end. Each segment
gets an 8-bit sequence number and is kept in a buffer. The LLC then waits for
an ACK carrying the same number. If no ACK arrives within `TIMEOUT` (16384)
cycles, it sends the segment again. Only one segment is outstanding at a time.

**Receive.** A well-formed segment with the expected number is acknowledged
and released with the packet boundaries restored. If the previous segment
arrives again, because its ACK was lost, it is acknowledged again and
discarded. Any other segment is discarded without an ACK.

**Priority.** ACKs to be sent go ahead of data.

Two counters report on the transmit side: `retransmits` and `segments_sent`.

### MAC: framing (`mac`)

A frame is sent as bytes in this order:

1. `{ftype[1:0], last, 5'b0}`, where `ftype` is DATA = 00, ACK = 01 or SYNC = 11;
2. `seq`;
3. `len` (the number of words);
4. the payload words, high byte first.

On receive, the MAC checks three things: that the header is complete, that the
type is known, and that the word count equals `len`.

### SYN: timely commands (`syn`)

A synchronisation command is a two-byte frame, `{0xC0, code}`. Whenever a new
frame may start, a waiting command goes before any waiting MAC frame. A command
therefore waits at most for the one frame already on the line plus the gap.
The SYN layer also enforces `IFG` (6) idle slots between frames. On receive, a
frame that starts with `0xC0` is reported on `sync_valid`/`sync_cmd`. Every
other frame goes to the MAC.

Commands are not retransmitted. A command frame that is corrupted on the
electrical link is dropped by the CRC check and lost.

### PHY of the electrical link (`phy`)

This is the part with the most inside. It has these sub-blocks:

| Module | Job |
|---|---|
| `enc_8b10b` | 8B/10B encoder |
| `dec_8b10b` | 8B/10B decoder |
| `crc16` | One-byte CRC step |
| `phy_ser` | Serializer |
| `phy_deser` | Deserializer with clock recovery |
| `phy_rx_fifo` | Receive frame FIFO with commit and roll-back |
| `sync_fifo` | Transmission FIFO |

**Line format.** One symbol slot lasts 10·`OVS` clock cycles, and the line
runs at `clk/OVS` bit/s. With `OVS` = 4 at 40 MHz that is 10 Mbit/s, or 1
Mbyte/s. A frame on the line looks like this:

```
... K28.5 K28.5 | K27.7 | byte0 ... byteN-1 | CRC[15:8] CRC[7:0] | K29.7 | K28.5 ...
```

- The CRC is CRC-16/CCITT: polynomial 0x1021, initial value 0xFFFF, taken
  over the frame bytes.
- K28.5 (0xBC, a comma) fills idle time. It is also inserted inside a frame
  if the Transmission FIFO runs dry, and the receiver skips it there.
- Symbols carry the usual running disparity.
- A frame of N bytes occupies N + 5 slots.

**Transmit path.** The data select chooses between two sources:

- GMII bytes, in normal operation;
- received frames, in `loop_mode`.

It writes the chosen bytes, each tagged with a frame-end flag, into the
Transmission FIFO. A state machine (IDLE → DATA → CRC1 → CRC2 → EOF → GAP)
then encodes and serializes one symbol per slot.

**Clock recovery and alignment.** `phy_deser` samples the line once per clock,
so each bit is sampled `OVS` times.

- A phase counter restarts at every transition it sees. The bit is taken in
  the middle of its `OVS` samples.
- The recovered bits shift through a window, which is searched for the
  K28.5 comma (either running disparity).
- When a comma is found, the symbol boundary is fixed. `aligned` rises, and
  10-bit symbols leave on `sym_valid`.

This tolerates any phase between sender and receiver. It assumes both ends run
at the same nominal clock. A frequency offset larger than about one sample per
run of five equal bits (the longest run in 8B/10B) would break it.

**Error judgment and the frame FIFO.** Between K27.7 and K29.7 the receiver
passes the decoded bytes through the CRC. It writes them into `phy_rx_fifo`
two symbols late, so the two CRC bytes are never written. The FIFO writes each
frame tentatively. At K29.7 it commits the frame if both of these hold:

- the CRC residue is zero;
- no code or disparity error was seen.

Otherwise it rolls the write pointer back. A frame that overflows the FIFO is
also dropped. The reader therefore only ever sees complete, checked frames.
They leave on `gmii_rxd`/`gmii_rx_dv` at one byte per clock, with at least
one idle cycle between frames. Releasing them at full speed, rather than one
byte per slot, removes a second frame time from every acknowledgement round
trip. In loop mode, received frames go back to the transmitter one byte per
slot instead. Three counters report what happened: `frames_ok`,
`frames_bad` and `sym_errs`.

### Timing of a segment on the electrical link

A 17-word segment has this timing:

| Step | Cost |
|---|---|
| MAC frame | 37 bytes |
| Line | 42 slots (1680 cycles) |
| Read-out after the frame is checked | One byte per clock |
| Acknowledgement frame | 3 bytes, 8 slots |

Two linked `transceive` blocks at their default parameters, carrying
back-to-back 17-word packets, need about 2280 cycles per packet. That is
about 17.5 k packets per second.

## Link loopback test (`loop_test`)

The optical link is tested by sending a counter through the transceiver and
checking it on return. The transceiver is put in loopback, or the far end
echoes the data.

**Starting the test.** With `test_mode` high, `daq_top` freezes the optical
stack: its SYN layer gets no byte slots. The 16-bit transceiver port then
carries `loop_test`'s counter, one word per clock.

**Checking.** The checker locks once two returning words in a row count up
by one. Bytes of frames still in flight when the test starts therefore do not
count. From then on, every word must be the previous word plus one.

- A single corrupted word costs one error. After it the checker keeps
  counting on.
- Two wrong words in a row make it take the received word as the new
  reference. A lost or repeated word therefore costs two errors, and then the
  checker recovers.

**Results.** `test_locked`, `test_words_ok` and `test_word_errs` report the
result.

**Rate.** At 16 bits per clock the port carries 800 Mbit/s with a 50 MHz
clock, which is 1 Gbit/s on the fibre after 8B/10B. With the 40 MHz system
clock it carries 640 Mbit/s. Outside test mode only `gtx_txd[7:0]` is used,
and the upper byte is zero.

## ADC interface (`adc_collect`)

The ADC drives the data interface:

- a data clock, `adc_dclk`;
- a frame marker, `adc_drdy`;
- four data lines, `adc_dout[3:0]`.

Each line carries two channels. Each channel is 32 bits: an 8-bit status
header and then a 24-bit result, MSB first. The ADC changes the bits on the
rising edge of the data clock. They are sampled after a two-flip-flop
synchroniser, at the falling edge of the synchronised clock. `adc_drdy` high
marks the first bit.

- **Data clock limit.** The data clock must be slower than `clk/4`.
- **Output.** One pulse on `sample_valid` delivers all 8 results and headers.
- **Sync.** A `sync_req` pulse drives `adc_sync_n` low for `SYNC_CYCLES`
  clocks, which restarts the conversions of all channels together.

The testbench model `tb/ad7779_model.sv` behaves this way.

## Top-level interface (`daq_top`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | 40 MHz clock, asynchronous active-low reset |
| `adc_dclk`, `adc_drdy`, `adc_dout[3:0]` | in | ADC data interface |
| `adc_sync_n` | out | ADC SYNC, active low |
| `elink_tx`, `elink_rx` | out/in | electrical serial link (differential buffers outside) |
| `gtx_ce` | in | byte-slot strobe of the transceiver's parallel port |
| `gtx_txd[15:0]`, `gtx_tx_en` | out | to the transceiver: frame bytes on [7:0], or the test counter |
| `gtx_rxd[15:0]`, `gtx_rx_dv` | in | from the transceiver: frame bytes on [7:0], or the returning test words |
| `test_mode` | in | run the link loopback test instead of the frame stack |
| `host_tdata[15:0]`, `host_tvalid`, `host_tlast` | out | packets the workstation sends to the board |
| `elink_aligned` | out | electrical receiver is comma-aligned |
| `elink_frames_bad` | out | frames dropped by the CRC check |
| `elink_retransmits`, `opt_retransmits` | out | LLC retransmissions, per link |
| `lost_sets`, `local_pkts`, `ext_pkts` | out | gather statistics |
| `test_locked`, `test_words_ok[31:0]`, `test_word_errs` | out | loopback test result |

### Parameters

| parameter | default | meaning |
|---|---|---|
| `BOARD_ID` | 0 | written into word 0 of local packets |
| `N_CH`, `SAMPLE_W` | 8, 24 | ADC channels and result width |
| `OVS` | 4 | electrical link: clock cycles per bit |
| `SEG_WORDS` | 32 | LLC segment size in words |
| `TIMEOUT` | 16384 | LLC retransmission timeout in cycles |
| `BUF_DEPTH`, `MERGE_DEPTH` | 1024, 1024 | data buffer and merge FIFO, in words |

Command codes are defined in `rtl/daq_pkg.sv`. `CMD_ADC_SYNC` (0x01) also
restarts the local ADC. Every command received from the fibre is forwarded to
the electrical link.

## Capacity, and what is and is not covered

**ADC stream to the workstation.** At 16 kSPS the board produces one 17-word
packet every 2500 cycles, which is 544 kbyte/s. The optical stack sends one in
about 43 cycles plus the ACK round trip. Stop-and-wait therefore keeps up
while the fibre round trip is below about 60 µs, which is roughly 6 km at
5 µs/km. The timeout of 16384 cycles (410 µs) bounds the usable distance at
about 40 km. With a second board's stream merged in, the optical link has to
carry two packets per 2500 cycles, so the round trip must stay below about
1150 cycles:

- `tb_two_boards` passes with 2.5 km of fibre modelled;
- with 5 km it loses sets.

The tens of kilometres that such systems may span need more than one
outstanding packet per round trip: larger segments holding several packets,
or a sliding window. Neither is built here.

**A remote board sending its own full 16 kSPS stream** needs one packet per
2500 cycles. The electrical link gives one per about 2280, so one such board
fits, with about 9% to spare for retransmissions. A segment always ends at a
packet end, so raising `SEG_WORDS` does not help here. More boards, or a
noisy link, would need segments that hold several packets, or a faster line.

**The 1 Gbit/s test.** The original test sent a 16-bit counter at 50 MHz
through the transceiver, which is 1 Gbit/s after 8B/10B. The loopback test
mode does the same at 16 bits per clock. Framed data, however, uses only 8
bits per clock: at most 320 Mbit/s at 40 MHz, or 400 Mbit/s at 50 MHz. The
design also has a single clock, whereas the original ran the transceiver
side on its own 50 MHz clock.

**Outside this RTL:**

- the multi-gigabit transceiver and SFP optics;
- the LVDS/RS485 drivers and equalizer;
- the SPI configuration flash;
- clocking, with a single clock assumed;
- power;
- the ADC's SPI register configuration. Only its SYNC command is generated.

**No CRC on the optical link.** The optical path adds no CRC of its own.
Corruption there is caught only by the MAC's length and type checks.

## Departures from the original description

- **Chosen here.** These formats and sizes are this design's own choices:
  - every frame, header and command format;
  - the CRC polynomial;
  - stop-and-wait retransmission and its sizes;
  - the packet format;
  - the arbitration rule in the gather;
  - all FIFO depths.
- **Loop mode.** Loop mode of the PHY (received frames sent back out through
  the data select) is one reading of that select's second input.
- **Optical port width.** Frames use one byte of the 16-bit optical port per
  system clock. The full width is used only by the loopback test.
- **Command forwarding.** Forwarding every command to the electrical link is
  assumed.
- **Electrical link hardware.** On the original board, incoming electrical
  data passes an equalizer and a separate serial-to-parallel converter chip,
  and commands leave through an RS485 transceiver. Here both directions use
  one serial pair, handled by the FPGA-internal PHY described above. The
  differential and RS485 drivers themselves are outside the RTL.

## Verification

Each block has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each one
prints `TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_enc_8b10b`, `tb_dec_8b10b` | Code words from the standard tables; every data byte and control character in both disparities against the coding rules (ones count, disparity, run length); decoder error flags for invalid words and wrong disparity. |
| `tb_crc16` | Known check values, and a zero residue over data plus CRC. |
| `tb_phy_ser`, `tb_phy_deser` | Bit order and timing; recovery and comma alignment from a random phase after random junk bits. |
| `tb_phy_rx_fifo` | Commit, roll-back, symbol errors and overflow. |
| `tb_phy` | Two PHYs over a wire: byte-exact frames, a flipped bit drops exactly the hit frame, and loop mode. |
| `tb_syn` | Command priority and latency bound, gap length, and byte-exact frames. |
| `tb_mac` | Frame layout of random segments under back-pressure, the round trip through the receive side, and truncated frames. |
| `tb_llc` | Two LLCs with lost data frames and lost ACKs: every packet arrives once and in order. |
| `tb_transceive` | The full stack over a noisy line: CRC drops, retransmissions and commands. |
| `tb_adc_collect`, `tb_data_gather`, `tb_sync_fifo` | Their interfaces against reference models. |
| `tb_loop_test` | Counting, locking, the error count for a corrupted and a dropped word, and relocking after a restart. |

`tb_daq_top` runs the top at its default parameters with:

- the ADC model at 16 kSPS;
- a remote board (a `transceive`) on the electrical link, with bit errors
  injected for part of the run;
- a workstation stack on the transceiver port.

It checks these things:

- every local and remote packet reaches the workstation word-exact;
- no sample set is lost;
- streams were merged;
- CRC drops and retransmissions occurred;
- commands were forwarded;
- exactly one ADC sync took place;
- in test mode, with the transceiver port looped back and one word
  corrupted, the checker locks and reports exactly one bad word.

`tb_two_boards` runs the capacity case for the electrical link. A remote
front-end board streams its own 16 kSPS ADC data over the link while the core
board runs its own ADC at the same rate. The workstation sits behind 2.5 km
of fibre, modelled as 500 cycles of delay each way. Every set of both boards
must reach the workstation, no set may be lost, and the remote board may not
build up a backlog.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/daq_pkg.sv tb/tb_daq_top.sv --top tb_daq_top
./obj_dir/Vtb_daq_top
```

The top-level run takes a few seconds. The RTL is plain synthesizable
SystemVerilog-2017, with asynchronous active-low reset throughout.
