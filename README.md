# XAUI with 1+1 protection and dynamically reconfigurable transceivers

This design is a 10 Gb/s XAUI interface in SystemVerilog. XAUI is the four-lane, 8B/10B-coded
serial form of the XGMII, the 10 Gigabit Ethernet MAC–PHY interface. It carries one 64-bit
XGMII stream across a backplane or a board. The stream is sent on **two** XAUI ports at once:

- **XAUI0** is the working channel;
- **XAUI1** is the protection channel.

The receiving side picks one of the two with `xaui_sel`. If XAUI0 fails, traffic moves to
XAUI1 without stopping the sender. This is "1+1 protection".

A board processor manages the design through a small register bus. Through it, the processor can:

- tune the analog settings of each of the eight serial lanes while the link runs: transmit
  swing (VOD), transmit pre-emphasis, and receive equalisation and DC gain;
- read those settings back;
- switch each port into serial loopback;
- watch lane synchronisation and alignment.

A dynamic reconfiguration controller carries out the tuning. After reset it also runs the
receivers' offset cancellation.

The design follows a published FPGA design, which built the same thing from a vendor's
transceiver and reconfiguration IP cores. Those cores are not available as source code. Here
the digital part of both is written out:

- the XGXS coding sublayer of IEEE 802.3ae clause 48;
- the transceiver's reconfiguration port;
- the controller.

The analog PMA (serialiser, CDR, line buffers) stays outside the design. The design's lane
ports are the 20-bit parallel words at the PMA boundary.

```
                        phy_mgmt_clk domain                       xgmii_clk domain
 gmpi_* bus ──► xaui_lmpi ──lmpi_*──► xaui_reconfig ──reconfig_to_xcvr[3:0]──┬──────────────┐
   (board        │  registers           offset cancel,  ◄─xaui0_reconfig_from─┤              │
   processor)    │                      Analog Controls ◄─xaui1_reconfig_from─┼───┐          │
                 └─ xgmii_loop[0], [2], status                               ▼   ▼          │
                                                          ┌──────────── xaui_xcvr XAUI0 ───┐│
 xgmii_txd/txc (64+8) ──────────────┬────────────────────►│ tx_pcs ─► tx_lane[4]×20 ─► PMA ││
                                    │                     │ rx_pcs ◄─ rx_lane[4]×20 ◄─ PMA ││
                                    │                     └──► xaui0_xgmii_rxd/rxc ────────┘│
                                    │                     ┌──────────── xaui_xcvr XAUI1 ────┘
                                    └────────────────────►│  (same, channels 4-7)
                                                          └──► xaui1_xgmii_rxd/rxc
                         xaui_sel ─► mux ─► xgmii_rxd/rxc
```

## XGMII and lane word format

The XGMII side is 64 bits wide and single data rate: one `xgmii_clk` edge carries two 32-bit
XGMII columns. The XGMII of the standard is 32 bits wide on both clock edges. The 64-bit,
single-edge form used here is the usual on-chip equivalent, and it matches the 64-bit receive
buses of the reference design.

- Column 0 is in bits `[31:0]` and comes first in time.
- Byte lane *i* of column *c* is `txd[32c+8i +: 8]`. Its control flag is `txc[4c+i]`.
- Control characters are the standard ones: Idle 07, Start FB, Terminate FD, Error FE,
  Sequence 9C.
- A Start is always in byte lane 0 of a column. The testbench places it in column 0 or
  column 1 (the waveform of the reference design shows `txc = 1f` with FB in byte 4).

Each lane carries one 20-bit word per clock, two 10-bit code groups:

- bits `[9:0]` hold the group of column 0;
- bits `[19:10]` hold the group of column 1;
- bit 0 is bit *a* of the code, the first bit on the line.

At 156.25 MHz this gives 64 × 156.25 MHz = 10 Gb/s on the XGMII side. Each lane carries
20 × 156.25 MHz = 3.125 Gb/s of line rate, the standard XAUI lane rate. No part of the data
path stalls. The receive path of each port runs on the clock recovered from its lanes, and a
rate-match FIFO brings its output back onto `xgmii_clk`.

## Transmit path (`xaui_tx_pcs`)

Each byte goes through an 8B/10B encoder (`xaui_enc8b10b`). Each lane keeps its own running
disparity, which is chained through the two encoders of the lane within one clock. Columns are
mapped as clause 48 requires:

| XGMII column | code groups sent |
|---|---|
| all eight bytes Idle, and ≥ `A_PERIOD` columns since the last ‖A‖ | ‖A‖: K28.3 on all four lanes |
| all Idle otherwise | ‖K‖: K28.5 on all four lanes (the comma) |
| Idle inside a mixed column | /K/ |
| Start / Terminate / Error / Sequence | K27.7 / K29.7 / K30.7 / K28.4 |
| reserved control byte | /E/ (K30.7) |
| data | Dx.y |

The output is registered: lane words appear one clock after the XGMII input. The ‖A‖ column is
what the receiver uses to deskew the lanes. ‖K‖ is what it uses to find code-group boundaries.

## Receive path (`xaui_rx_pcs`)

The receive path is the part with the most state. Per lane, it runs a word aligner and two
8B/10B decoders. After them come one deskew block for all four lanes and the mapping back to
XGMII.

### Word aligner (`xaui_word_aligner`)

A lane arrives cut at an arbitrary bit offset. The aligner works as follows:

- It joins the current word with the previous one into a 40-bit window.
- It looks for the 7-bit comma (`0011111` or `1100000` in bit order a…g) at each of the 20
  possible offsets.
- It reads the output from the window at the offset where the comma starts a code group.

Synchronisation is a simplified form of the clause 48 state machine:

- Out of sync, each comma moves the alignment.
- `SYNC_COMMAS` (4) commas in a row at the same offset declare `sync`.
- In sync, `BAD_COMMAS` (4) commas in a row at a different offset drop sync.
- In sync, `BAD_WORDS` (4) output words in a row holding an invalid code group also drop sync.
  The decoders behind the aligner report these on `cg_err`. This rule is what makes a dead or
  disconnected lane lose sync.

Latency: 1 clock.

### 8B/10B decoder (`xaui_dec8b10b`)

The decoder is combinational. It decodes the 6-bit and 4-bit sub-blocks on their own and
accepts either disparity form of each. A code group that is in neither form of the table is
flagged. A running-disparity violation between valid code groups is **not** detected. This is
a simplification.

### Deskew (`xaui_deskew`)

The four lanes may arrive skewed against each other. Each lane writes its code groups into a
shift register of `DEPTH` (16) code groups.

- **ACQUIRE state.** The block waits until every lane has seen an /A/. For each lane it records
  how many code groups ago that /A/ arrived (*age_i*). Lane *i* is then read at depth
  *age_i − min(age)*. The four /A/ of one ‖A‖ column now leave in the same output column, and
  `aligned` rises. `align_event` pulses once when the delays are taken.
- **ALIGNED state.** The block checks the output. A column where some lanes carry /A/ but others
  do not is a misalignment. `MIS_LIMIT` (2) of these in a row send the block back to ACQUIRE.
  So does loss of word sync on any lane.

The largest skew that can be corrected is `DEPTH − 2` = 14 code groups, which is 140 bit times.
An ‖A‖ is sent every `A_PERIOD` ≥ 16 columns. A skew of that size therefore cannot pair an /A/
with the wrong column.

### Mapping back to XGMII

- /K/, /A/ and /R/ become Idle (07).
- /S/, /T/, /E/ and /Q/ become FB, FD, FE and 9C with the control bit set.
- An invalid code group becomes Error (FE).
- While the lanes are not aligned, the output carries the Local Fault ordered set
  (9C 00 00 01) in every column, as clause 48 requires.

The output is registered.

### Rate match (`xaui_rate_match`)

Everything up to this point runs on the port's recovered clock (`xaui0_rx_clk`,
`xaui1_rx_clk`). That clock comes from the far transmitter's oscillator and differs from the local
`xgmii_clk` by up to a few hundred ppm. The rate-match FIFO is a dual-clock FIFO of `DEPTH`
(16) XGMII words. It crosses into `xgmii_clk` and absorbs the offset by changing the number of
*filler* words. A filler word is a 64-bit word whose two columns are equal and either all Idle
or Local Fault, so it never lies inside a frame.

- **Write side.** At a fill of `HI` (12) words or more, an arriving filler word is dropped
  (`del`). A word that meets a full FIFO is lost and flagged (`ovf`).
- **Read side.** At a fill of `LO` (4) words or fewer, if the last word sent out was a filler, it
  is sent again instead of reading (`ins`). An empty FIFO after a non-filler word produces an
  Error word (`unf`). After reset the read side sends Local Fault until `LO` words have gathered.
- **Pointers.** They cross in Gray code through two-flop synchronisers, so each side sees a fill
  level a few clocks old. The margins between `LO`, `HI` and the ends of the FIFO cover that.

Clause 48 adds and removes single ‖R‖ columns on the code-group side. This FIFO works on decoded
words and moves two columns at a time, which keeps it one word wide. The inter-frame gap shrinks
or grows by 8 bytes, not 4.

## The transceiver (`xaui_xcvr`)

One `xaui_xcvr` stands for one four-channel transceiver instance. It contains:

- the transmit and receive paths;
- the serial loopback at the PMA boundary (`xgmii_loop`, synchronised into the receive clock).
  In loopback a CDR would lock to the local transmitter, so `rx_clk` must then be `xgmii_clk`;
- the reconfiguration port, which runs on the management clock.

### Reconfiguration port protocol (this design's own)

Both transceivers share one 4-bit bus from the controller, `reconfig_to_xcvr`:

| bit | meaning |
|---|---|
| 0 | serial frame data, LSB first |
| 1 | frame enable: high for exactly `FRAME_BITS` (16) clocks |
| 2 | one-clock pulse: start offset cancellation |
| 3 | one-clock pulse: reset the port (settings back to their defaults) |

A frame (`frame_t` in `xaui_pkg`) has these fields, from LSB to MSB:

| field | bits | meaning |
|---|---|---|
| `write` | 1 | 1 = write, 0 = read |
| `chan` | 3 | logical channel 0-7 |
| `duplex` | 2 | 00 TX and RX, 01 RX only, 10 TX only (11 is refused by the controller) |
| `set` | 10 | settings: VOD[2:0], pre-emphasis setting[2:0], EQ[1:0], DC gain[1:0] |

A transceiver takes a frame whose channel lies in its range. XAUI0 has `BASE_CH` = 0 (channels
0-3) and XAUI1 has `BASE_CH` = 4 (channels 4-7). It then:

- applies the write to the transmit fields, the receive fields or both;
- selects that channel for read-back;
- pulses an acknowledge.

A frame of the wrong length is dropped and flagged. Each transceiver answers on its own 17-bit
`reconfig_from_xcvr`:

| bits | meaning |
|---|---|
| [9:0] | settings of the selected channel |
| [10] | offset cancellation done on all channels |
| [11] | acknowledge (one clock) |
| [15:12] | done, per channel |
| [16] | a frame of wrong length was dropped |

Offset cancellation is modelled as a timer. It calibrates the four receivers one after another,
`OC_CYCLES` (32) clocks each. The settings go to the PMA on `pma_set`. Their analog effect is
not modelled.

## Reconfiguration controller (`xaui_reconfig`)

State sequence:

```
RESET ─► OC_START ─► OC_WAIT ──(both ports done)──► IDLE ─► SHIFT (16 clocks) ─► ACK ─► IDLE
```

- **RESET.** Pulses the port reset.
- **OC_START, OC_WAIT.** Start offset cancellation and wait until both transceivers report it
  done. `reconfig_busy` stays high until then.
- **IDLE.** Accepts a one-clock `lmpi_write_all` or `lmpi_read`.
- **SHIFT.** The request's codes are translated to setting numbers and the frame is shifted out
  one bit per clock.
- **ACK.** The controller waits up to `ACK_TIMEOUT` (8) clocks for the acknowledge of the
  transceiver that owns the channel (channel MSB selects XAUI0/XAUI1). On a read, the settings
  are translated back into the input codes and presented on `rd_*` with a one-clock
  `data_valid`.

`reconfig_busy` is high in every state except IDLE.

Input codes:

| input | accepted codes | setting |
|---|---|---|
| `lmpi_tx_vodctrl[2:0]` | 000-111 except 011 | VOD = code |
| `lmpi_tx_preemp[4:0]` | 00000, 00001, 00101, 01001, 01101, 10001, 10101 | 0-6 in that order |
| `lmpi_rx_eqctrl[1:0]` | 00-11 | EQ = code |
| `lmpi_rx_eqdcgain[1:0]` | 00-10 | DC gain = code |
| `lmpi_rx_tx_duplex_sel[1:0]` | 00, 01, 10 | both / RX / TX |

Only the fields of the part being written must be legal. `reconfig_error` is set by any of:

- a reserved code;
- a request during busy;
- write and read requested together;
- a missing acknowledge.

It stays set until the next accepted request. The default settings after reset are VOD 4,
pre-emphasis 0, EQ 0, DC gain 0.

## Register bus (`xaui_lmpi`)

This is a synchronous bus on `phy_mgmt_clk`. With `gmpi_xaui_cs` high:

- a one-clock `gmpi_wen` writes `gmpi_data` to `gmpi_addr`;
- a one-clock `gmpi_ren` reads. The data is on `gmpi_rdata` from the next clock and is held.

| addr | name | access | contents |
|---|---|---|---|
| 0x00 | SCRATCH | r/w | 16 free bits |
| 0x01 | CMD | w | [0] start write, [1] start read (one-clock pulses to the controller) |
| 0x02 | CHANNEL | r/w | [2:0] channel (0-3 XAUI0, 4-7 XAUI1) |
| 0x03 | DUPLEX | r/w | [1:0] duplex select |
| 0x04 | VODCTRL | r/w | [2:0], reset 4 |
| 0x05 | PREEMP | r/w | [4:0], reset 0 |
| 0x06 | EQCTRL | r/w | [1:0], reset 0 |
| 0x07 | EQDCGAIN | r/w | [1:0], reset 0 |
| 0x08 | STATUS | r | [0] busy, [1] error, [2] read data valid, [3] xaui_sel |
| 0x09 | READBACK | r | [2:0] VOD, [7:3] pre-emphasis, [9:8] EQ, [11:10] DC gain; reading clears STATUS[2] |
| 0x0A | LOOP | r/w | [3:0] xgmii_loop: bit 0 XAUI0, bit 2 XAUI1 |
| 0x0B | XAUI0_STAT | r | [3:0] lane sync, [4] aligned |
| 0x0C | XAUI1_STAT | r | [3:0] lane sync, [4] aligned |

Other addresses read 0. A typical tuning sequence:

1. Write CHANNEL, DUPLEX and the four setting registers.
2. Write 1 to CMD.
3. Poll STATUS until busy is 0.
4. Check the error bit.

## Protection switching

Both ports always transmit the same stream, and both receive buses are brought out. `xaui_sel`
(0 XAUI0, 1 XAUI1) is synchronised into `xgmii_clk` and switches the mux that drives
`xgmii_rxd/rxc`. It comes from outside: on the original board, a CPLD decides it.

When the working channel loses signal:

1. Its lanes lose sync (the `BAD_WORDS` rule).
2. The deskew drops alignment.
3. Its receive bus shows Local Fault, and the processor sees it in XAUI0_STAT.

A frame in flight at the moment of switching is lost or cut short. Frames after it come from
XAUI1.

## Clocks, reset and timing

- `phy_mgmt_clk` clocks the register bus, the controller and the transceivers' reconfiguration
  ports. The testbench runs it at 100 MHz.
- `xgmii_clk` clocks the transmit path and the XGMII receive buses: 156.25 MHz, period 6.4 ns.
- `xaui0_rx_clk` and `xaui1_rx_clk` are the recovered lane clocks of the two ports, at nominally
  the same rate. They clock each receive path up to its rate-match FIFO. The end-to-end test runs
  XAUI1's recovered clock first 0.2 % slow, then 0.4 % fast.
- `rst` is the global asynchronous reset, active high. Each domain has its own reset
  synchroniser (`xaui_rst_sync`).
- The few signals that cross domains are slow levels and use two-flop synchronisers
  (`xaui_sync`): loopback, `xaui_sel` and lane status. The receive data crosses through the
  rate-match FIFO.

Measured timing:

- **Latency.** In XAUI0's serial loopback, a Start character takes **15 `xgmii_clk` cycles**
  (96 ns) from `xgmii_txd` to `xaui0_xgmii_rxd`, with zero skew between the lanes. Of these:
  - 6 clocks are the transmit path, the loopback register, and the aligner, deskew and output
    registers of the receiver;
  - the rest is the rate-match FIFO, whose fill settles just above `LO` words, plus its pointer
    synchronisers.

  An external lane skew adds its deskew delay. (The
  reference design reports about 6.6 µs from its upstream to its downstream packet tables, but
  that figure includes the vendor's PMA model and FIFOs and cannot be compared.)
- **Throughput.** One 64-bit word per clock, with no stall.
- **Reconfiguration write.** About 16 + 4 management clocks (under 0.2 µs at 100 MHz).
- **Start-up.** Offset cancellation takes 4 × `OC_CYCLES` clocks plus the synchroniser delays.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `xaui_top`, `xaui_xcvr`, `xaui_tx_pcs` | `A_PERIOD` | 16 | minimum columns between ‖A‖ |
| `xaui_top`, `xaui_xcvr` | `OC_CYCLES` | 32 | offset cancellation time per channel |
| `xaui_xcvr` | `BASE_CH` | 0 / 4 | first logical channel of the port |
| `xaui_reconfig` | `CHANNELS` | 8 | channels controlled (2 ports × 4 lanes) |
| `xaui_reconfig` | `ACK_TIMEOUT` | 8 | clocks to wait for an acknowledge |
| `xaui_word_aligner` | `SYNC_COMMAS`, `BAD_COMMAS`, `BAD_WORDS` | 4, 4, 4 | sync acquire and loss |
| `xaui_deskew` | `DEPTH`, `MIS_LIMIT` | 16, 2 | deskew depth, misalignments before reacquire |
| `xaui_rate_match` | `DEPTH`, `HI`, `LO` | 16, 12, 4 | FIFO words, delete and insert thresholds |

The eight channels, four lanes per port, 3.125 Gb/s lanes and the default Analog Controls
values are those of the reference design. The other defaults are this design's choices.

## Where this design departs from the reference design

- **Vendor IP.** The transceiver and reconfiguration controller were vendor IP cores.
  - Their PCS function is rebuilt from IEEE 802.3ae clause 48.
  - Their serial reconfiguration protocol, frame format and register map are this design's own.
  - The vendor controller's other modes are not built: TX data-rate division, and channel and
    PLL reconfiguration. The reference design does not use them either.
- **Not built.**
  - The analog PMA is absent: serialiser, CDR, deserialiser and buffers. The recovered clocks
    come in as ports.
  - The TX/RX phase-compensation FIFOs, the byte serialiser/deserialiser and byte ordering are
    absent too. The PCS works 20 bits wide on `xgmii_clk` (transmit) or the recovered clock
    (receive), so no width change is needed. The rate-match FIFO does the receive clock crossing.
- **Rate match on XGMII words.** Rate matching moves two-column filler words after decoding, not
  single ‖R‖ columns before it.
- **Simplified clause 48.**
  - ‖A‖ is spaced by a fixed `A_PERIOD`, not randomly 16-31 columns apart.
  - No ‖R‖ columns are sent.
  - The sync state machine is simplified.
  - Disparity errors are not detected.
- **Added ports.** The port list goes beyond the reference's pin table:
  - `gmpi_rdata` (the reference lists only an input data bus);
  - the transmit XGMII bus and `xgmii_clk`;
  - a selected receive bus;
  - the lane and settings ports towards the PMA.
- **Busy.** `reconfig_busy` is also high during writes and reads, not only during offset
  cancellation.
- **Receive buses.** The reference pin table can be read as saying that XAUI0's receive bus is
  valid only while `xaui_sel` is 0. Here both receive buses are always live, and the selection
  is made on the added `xgmii_rxd/rxc`.
- **One reconfiguration bus.** The reference drawing shows a `reconfig_to_xcvr[3:0]` arrow to each
  transceiver. Here one bus goes to both, and each transceiver takes the frames addressed to its
  own channels.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends with a line
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_xaui_enc8b10b` | standard code groups written out by hand; every byte and K code in both disparities checked for disparity rules, running-disparity update, run length ≤ 5 and uniqueness |
| `tb_xaui_dec8b10b` | hand-written code groups; every encoder output in both disparities decodes back; invalid groups raise `err` |
| `tb_xaui_tx_pcs` | random XGMII traffic; lanes decoded again and compared with the mapping worked out in the test; running disparity; ‖A‖ spacing |
| `tb_xaui_word_aligner` | random bit offsets; sync within 400 clocks; decoded sequence equals sent; re-sync after an offset change; dead lane drops sync |
| `tb_xaui_deskew` | per-lane skews of 0-12 code groups; output columns whole and consecutive; re-acquire through loss of sync and through the misalignment counter |
| `tb_xaui_rx_pcs` | TX→RX with 0-110 bit lane delays; Local Fault before alignment; exact column stream after; a flipped bit shows as Error and `code_err` |
| `tb_xaui_xcvr` | power-up settings; offset cancellation timing per channel; TX/RX/both writes to the addressed channel only; foreign channels ignored; short frame dropped; loopback and skewed external traffic |
| `tb_xaui_reconfig` | start-up sequence; all legal pre-emphasis and VOD codes; duplex; read-back translation; reserved codes; ack timeout; busy for `FRAME_BITS` + 4 clocks |
| `tb_xaui_rate_match` | write clock 0.8 % fast, then 0.8 % slow; frames pass unchanged, only filler words deleted or inserted, both seen, no overflow or underflow |
| `tb_xaui_lmpi` | reset values; read/write of every register; chip select; command pulses; status bits; read latency of one clock |
| `tb_xaui_top` | whole design at default parameters (see below) |

`tb_xaui_top` runs the whole design end to end with every parameter at its default. It does the
following:

1. Waits for offset cancellation.
2. Writes and reads back the settings of channel 5, then has a reserved code refused.
3. Turns on XAUI0's loopback. XAUI1 runs over a model that skews each lane by a random number of
   bits.
4. Sends fourteen Ethernet-sized frames of lengths 0x588, 0x577, 0x5a, 0x151, 0x12f, 0x230,
   0x440, 0xa5, 0x72, 0x2c1, 0xfb, 0x511, 0x582 and 0xd2 bytes, each with preamble and SFD.
   These are the packet lengths the reference design simulated. It checks length and contents
   of every frame on both ports and on the selected output, and measures the loopback latency.
5. Fails XAUI0 and checks loss of alignment and Local Fault.
6. Switches `xaui_sel` to XAUI1 and checks that the next fourteen frames arrive.

Each mechanism is counted and must occur at least once: offset cancellation, write, read, error,
loopback, deskew, link loss, Local Fault, switching, and rate-match insertion and deletion.
XAUI1's recovered clock runs 0.2 % slow in the first half and 0.4 % fast in the second.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/xaui_pkg.sv tb/tb_xaui_top.sv --top-module tb_xaui_top -o sim
obj_dir/sim
```

Replace `tb_xaui_top` with any other testbench name to run a block test. A seed can be given
with `+verilator+seed+N`; the testbenches use `$urandom`. The full test simulates about 25 µs
and takes seconds.
