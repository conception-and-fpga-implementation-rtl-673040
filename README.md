# An IEEE 802.11s mesh MAC transmitter in SystemVerilog

A mesh point in an 802.11s network has to turn an MSDU handed down by the upper
MAC into a sequence of frames on the air. The sequence is: an RTS, then the data
frame (split into fragments if it is long) once the peer answers with CTS, then
a wait for the ACK. The transmitter also answers the peer's frames, sending a
CTS for an RTS and an ACK for a data frame. Before each frame it has to win the
medium: the network allocation vector (NAV) must be zero and the carrier must be
idle, and if they are not, the transmitter backs off for a random number of
slots.

This RTL implements such a transmitter. It follows the architecture of
L. Chaari, R. Ayadi and L. Kamoun, *"Conception and FPGA implementation of IEEE
802.11s mesh network MAC layer transmitter"*, which splits the transmitter into
four cooperating sub-modules:

| sub-module | module | job |
|---|---|---|
| transmission control | `transmission_control` | decides which frame to send next and steps it through build, medium access and transmission |
| frame computing | `frame_computing` | builds the header fields: frame control, duration/ID, addresses, sequence control |
| allocation control | `allocation_control` | checks NAV and carrier sense, counts attempts, runs the backoff |
| frame transmission | `frame_transmission` | a 4-bit-select multiplexer feeding a 32-bit shift register that serialises the frame |

A fifth block, `msdu_buffer`, holds the MSDUs. `mac_tx_top` connects all five.
The paper names its sub-modules and signals, lists their rules and shows
simulation waveforms. It does not give widths, handshake timing, the buffer
layout or the timeouts. Those are choices made here, and the sections below say
which is which.

Not included: the PHY, the receiver, and the upper MAC. The receiver is the part
that raises `rec_rts`/`rec_cts`/`rec_data`/`rec_ack`/`rec_group` and keeps the
NAV. Their
signals are ports of `mac_tx_top`.

## One frame exchange, step by step

Every frame goes through the same four phases in `transmission_control`, with
level handshakes between the sub-modules:

```
 BUILD    en_buildframe=1, frame_subtype  ──►  frame computing  ──► frame_done
 MEDIUM   en_medium (or en_retry)          ──►  allocation ctrl  ──► access_granted | tx_fail
 TX       transmit=1                        ──►  frame transmission ─► transmit_complete
 RELEASE  all requests low; wait until every answer is low again
```

`en_buildframe` stays high through MEDIUM and TX, so the header registers stay
valid until the last bit is out. The original waveforms show the same thing:
build enable, medium enable and transmit all fall together when the transmission
completes.

What starts a frame, and what the controller waits for after it:

| event (state) | frame sent | then |
|---|---|---|
| `rec_rts` (idle) | CTS to `peer_addr` | wait for `rec_data` |
| `rec_data` (idle, or after our CTS) | ACK to `peer_addr` | idle |
| `msdurdy` (idle) | RTS to the MSDU's receiver | wait for `rec_cts` |
| `rec_cts` (after RTS) | DATA, first fragment | wait for `rec_ack` |
| `rec_ack`, more fragments left | DATA, next fragment (no new RTS) | wait for `rec_ack` |
| `rec_ack`, last fragment | — | `msdu_sent`, idle |
| no `rec_ack` for `RESP_TIMEOUT` cycles | DATA again, Retry bit set, via `en_retry` | wait for `rec_ack` |
| no `rec_cts` for `RESP_TIMEOUT` cycles | RTS again via `en_retry` | wait for `rec_cts` |
| no `rec_data` after our CTS | — | idle |
| `tx_fail` from allocation control | — | `msdu_dropped`, idle |

The paper gives the rows for `rec_rts`, `rec_data`, `msdurdy` and `rec_cts`,
and the data retry when no ACK comes. The timeouts, the RTS retry, the burst of
fragments without a new RTS and the drop are this design's additions. Without them the controller would wait forever for an answer that
never comes. When several requests arrive in the same idle cycle, responses come
first: `rec_rts`, then `rec_data`, then `msdurdy`. The upper MAC must drop
`msdurdy` in the cycle in which it sees `msdu_sent` or `msdu_dropped`. The
controller does not take a new MSDU in that cycle.

## Frame subtypes and bit order

This is the point that most needs care when reading the design next to the
paper. All frame fields are held with the 802.11 bit numbering: bit 0 is the
first bit on the air, and `tx_line` sends every field LSB first. The 6-bit
`frame_subtype` is frame-control bits b7..b2, i.e. `{subtype[3:0], type[1:0]}`.

The paper writes subtypes, and the waveform values of its frame-control and
duration fields, starting with b0/b2, the first bit sent. Read in that order,
all of its numbers agree with 802.11:

| frame | paper writes | `frame_subtype` here | 802.11 type / subtype |
|---|---|---|---|
| ACK | `101011` | `6'b110101` (`FS_ACK`) | control / 1101 |
| DATA | `010000` | `6'b000010` (`FS_DATA`) | data / 0000 |
| CTS | `100011` (waveform) | `6'b110001` (`FS_CTS`) | control / 1100 |
| RTS | `101101` | `6'b101101` (`FS_RTS`) | control / 1011 |
| PS-Poll | `100101` | `6'b101001` (`FS_PS_POLL`) | control / 1010 |
| CF-Poll | `010110` | `6'b011010` (`FS_CF_POLL`) | data / 0110 |

The paper's text gives CTS as `010011`, but its waveform shows `100011`. The
waveform's code is the 802.11 CTS and is the one used here.

The duration/ID rules show the same reversal. The paper says a PS-Poll frame's
DID is the NAV "with the last two bits replaced by 1". Its waveform turns NAV
`1010101010101001` into DID `1001010101010111`, which is the NAV written
backwards with the last two characters set. The last characters are therefore
b15 and b14. The CF-Poll value the paper prints, `0000000000000001`, is then
`16'h8000`. `did_entity` implements the 802.11 encodings:

| frame | DID |
|---|---|
| PS-Poll | `{2'b11, nav_reg[13:0]}` (association ID) |
| CF-Poll | `16'h8000` |
| any other | `{1'b0, nav_reg[14:0]}` (duration) |

The testbenches `tb_fch_entity` and `tb_did_entity` check the exact strings
printed in the waveforms, reversed as described above.

## Frame computing

`frame_computing` runs its four entities in turn when `en_buildframe` rises:

1. **Address generation** (`addr_gen`) reads the MSDU descriptor at `buff_ptr`.
   ACK and CTS frames skip the read and address the peer (`peer_addr`).
   The addresses used for each frame kind:

   | frame | ADDR1 | ADDR2 | ADDR3 | ADDR4 |
   |---|---|---|---|---|
   | ACK, CTS | peer | – | – | – |
   | RTS, PS-Poll | RA | own | – | – |
   | data (mesh, 4 addresses) | RA | own | DA | SA |
   | management | RA | own | 0 (BSSID unused by a mesh point) | – |

2. **Sequence control** (`fsc_entity`) is produced for data frames only. It is
   `{seq[11:0], frag[3:0]}`. The sequence number advances once per new MSDU.
   An MSDU body longer than `FRAG_BYTES` (2304) raises `fragment` (the paper's
   FRAGMENT). It is then sent as 2304-byte fragments. A retransmission keeps its
   sequence and fragment numbers.
3. **Frame control** (`fch_entity`): protocol 00, type and subtype from
   `frame_subtype`, ToDS = FromDS = 1 for data frames (four-address mesh format),
   MoreFragments, Retry. The power-management, more-data, WEP and order bits are
   0.
4. **Duration/ID** (`did_entity`), from `nav_reg` at build time, as above.

`frame_done` then rises and stays high until `en_buildframe` falls. The header
goes to frame transmission as one `frame_hdr_t` struct. The body itself is not
copied: `hdr.body_word` and `hdr.body_len` point into the buffer at the current
fragment. `frame_done` rises on the 13th clock edge after `en_buildframe` goes
high, or on the 5th for ACK and CTS, which read nothing from the buffer.

## Frame transmission

`frame_transmission` has a multiplexer over FCH, DID, ADDR1..4, sequence control
and body words, a 4-bit select, and a 32-bit shift register, as the paper
describes. The select walks the fields in 802.11 header order:

```
FCH  DID  ADDR1  [ADDR2]  [ADDR3]  [SEQ CTRL]  [ADDR4]  [BODY words...]
```

A 48-bit address is loaded in two pieces (32 + 16 bits). Each body word is
read from the buffer, and the last word is cut to the remaining bytes. Cycle
cost: one load cycle for each of the twelve select positions the frame passes
(a field it carries or one it skips), one extra cycle per body word for the
buffer read, and one cycle per bit. `tx_en` is high exactly on the bit cycles,
so an ACK is 16+16+48 = 80 `tx_en` cycles and a data frame with a 100-byte body
is 16+16+4·48+16+800 = 1040. The end-to-end testbench checks the number of
`tx_en` cycles of every frame it decodes. After the last bit the block
waits for `phy_done` (the PHY's "OK"), then holds `transmit_complete` until
`transmit` falls.

Neither QoS/HT control fields nor a CRC-32 FCS are sent. The paper's multiplexer
has no such inputs, and it does not describe a CRC circuit. A PHY or a wrapper
that needs the FCS has to append it.

## Medium access: collision avoidance, retry counter, backoff

`allocation_control` holds the three entities of the paper.

- **Collision avoidance** (`collision_avoidance`). On `en_retry` it first counts
  one attempt. The medium is free when `nav_reg == 0` and `carrier_sense == 0`;
  a free medium is granted at once. A busy medium counts one attempt. Once the
  count passes `RETRY_THRESHOLD` (10, the paper's value), access is refused with
  `tx_fail`. Otherwise a backoff is started, and `access_granted` follows when it
  ends.
- **Retry counter** (`retry_counter`): +1 per cycle of `start_count`, cleared by
  reset. The paper's waveform shows the count 1, 2, 3, 4 and then 0 after reset,
  which the testbench reproduces. The transmission control clears it when a CTS
  or an ACK arrives, and when an MSDU is dropped. The receiver clears it with a
  `rec_group` pulse when it hears a broadcast or multicast frame.
- **Backoff** (`backoff`): CW = min(CWmax, (CWmin+1)·2^count − 1), Random = a
  16-bit LFSR masked by CW (so uniform on [0, CW]), Backoff Time = Random ×
  SlotTime, reported in µs on `backoff_val`. The countdown runs one slot per
  `SLOT_CYCLES` clocks and is frozen while the medium is busy.

CWmin = 31, CWmax = 1023 and the 20 µs slot are the 802.11 DSSS values. The
paper's waveforms print backoff times from 20 µs to 5100 µs, all multiples of
20 µs. The paper computes CW from two counts, SSRC and SLRC; here one attempt
count serves both. Every MSDU goes RTS first and then DATA, and a CTS clears
the count. So at any moment only one of the two 802.11 counts could be
non-zero, and the single count holds its value.

## MSDU buffer and descriptor format

`msdu_buffer` is a simple dual-port RAM of 2048 × 32 bits (8 KiB): one write
port for the upper MAC, one read port shared by frame computing and frame
transmission (never active together). An MSDU descriptor starts at `buff_ptr`:

| word | content |
|---|---|
| +0, +1 | RA (receiver, next hop): bits 31:0, then 47:32 in the low half |
| +2, +3 | DA (final destination) |
| +4, +5 | SA (original source) |
| +6 | body length in bytes, bits 15:0 |
| +7 … | body, 4 bytes per word, first byte in bits 7:0 |

The body includes the 802.11s mesh header (flags, TTL, mesh sequence number,
address extension). The upper MAC prepares it; the transmitter does not build
it. 8 KiB holds one descriptor with the largest mesh data body (7955 bytes).

## Top-level interface (`mac_tx_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst` | in | 1 | clock; synchronous active-high reset |
| `buf_wr_en`, `buf_wr_addr`, `buf_wr_data` | in | 1, 11, 32 | buffer write port |
| `msdurdy`, `buff_ptr` | in | 1, 11 | an MSDU is ready at `buff_ptr` |
| `msdu_sent`, `msdu_dropped` | out | 1 | one-cycle result pulses |
| `rec_data`, `rec_cts`, `rec_rts`, `rec_ack` | in | 1 | receiver events |
| `rec_group` | in | 1 | receiver heard a broadcast/multicast frame (clears the attempt count) |
| `peer_addr` | in | 48 | transmitter of the received frame (for ACK/CTS) |
| `nav_reg` | in | 16 | NAV register |
| `own_addr` | in | 48 | this station's address |
| `carrier_sense` | in | 1 | from the PHY |
| `phy_done` | in | 1 | PHY "OK" after the last bit |
| `tx_line`, `tx_en` | out | 1 | serial frame, LSB first; `tx_en` marks valid bits |
| `frame_subtype`, `fragment`, `retry_count`, `backoff_val` | out | 6, 1, 8, 16 | status |

## Parameters

| parameter | default | origin |
|---|---|---|
| `RETRY_THRESHOLD` | 10 | paper |
| `CW_MIN`, `CW_MAX` | 31, 1023 | 802.11 DSSS |
| `SLOT_TIME_US` | 20 | 802.11 DSSS; consistent with the paper's waveforms |
| `CLK_MHZ`, `SLOT_CYCLES` | 50, 1000 | own choice |
| `FRAG_BYTES` | 2304 | own choice (802.11 maximum MSDU); must be a multiple of 4 |
| `RESP_TIMEOUT` | 16384 cycles (≈ 328 µs) | own choice |
| `BUF_DEPTH` | 2048 words | own choice |

## Where this departs from the paper, and what is missing

- Two signal names are not the paper's. The paper writes `en_meduim` and
  `access_garanted`; here they are `en_medium` and `access_granted`.
- The CTS code follows the paper's waveform (`100011`), not its text (`010011`).
- A single attempt count replaces the SSRC/SLRC pair, with one limit (10) for
  both.
- The paper says the sequence counter advances "for each successive frame".
  Here it advances once per MSDU, and all fragments of an MSDU share it, as
  802.11 requires. Control frames carry no sequence control field.
- Frame transmission starts on `transmit`, as in the paper's sequence diagram.
  The paper's prose says it is activated by FRAGMENT; here FRAGMENT only selects
  the part of the body that is sent.
- Management frames get correct headers, but the controller never starts one,
  and no body is sent for them.
- The response timeouts, RTS retry, fragment bursts, `tx_fail`/drop and
  request priority are additions.
- No CRC FCS, no QoS/HT control fields, no mesh header generation.
- The receiver, PHY and the other 802.11s services (routing, security,
  interworking, management) are not part of this RTL.

## Verification

Every module has a self-checking testbench in `tb/` named `tb_<module>`. Each
prints `TB_RESULT checks=N failures=M` and stops itself after a fixed number of
cycles if it hangs. The reference values are worked out inside each testbench,
independently of the RTL. They cover the strings printed in the paper's
waveforms (frame control, duration/ID, retry counter), contention windows and
backoff lengths against a reference LFSR, the full serial bit stream against
one assembled field by field, and every exchange in the table above.

`tb_mac_tx_top` runs the complete transmitter with all default parameters. The
testbench plays the upper MAC, the peer station and the PHY, and decodes every
frame on `tx_line` (header fields and body bytes). It makes each of these
happen at least once and counts them: CTS answer, ACK answer, an
RTS/CTS/DATA/ACK exchange, a 5000-byte MSDU sent as three fragments, a lost ACK
and retransmission, backoff on a busy carrier, deferral on a non-zero NAV,
an MSDU dropped after ten retransmissions, the attempt count cleared by a
broadcast reception, and the largest mesh data body (7955 bytes) sent as four
fragments. It simulates about 8 ms of 50 MHz time in well under a second.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps rtl/mac_tx_pkg.sv -y rtl -y tb \
          --top-module tb_mac_tx_top tb/tb_mac_tx_top.sv -o sim
./obj_dir/sim
```

Replace `tb_mac_tx_top` with any other `tb_<module>`. The RTL uses only
synthesizable constructs (enums, packed structs, a package, `always_ff`/
`always_comb`) and a few concurrent assertions on the handshakes.
