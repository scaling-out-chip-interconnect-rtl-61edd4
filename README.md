# RXL: flit sequence integrity through switches with implicit sequence numbers

## The problem

CXL 3.0 and PCIe 6.0 links run at 64 GT/s with PAM4 signalling. At that rate the raw bit
error rate is allowed to be as high as 1e-6. Each 256-byte flit is therefore protected twice:

- a light forward error correction (FEC) repairs most errors on the spot;
- a 64-bit CRC catches what the FEC cannot repair.

Flit order is tracked with a 10-bit flit sequence number (FSN) in the 2-byte header. That
field is shared: when a flit piggybacks an acknowledgment for the reverse direction, the
FSN holds the acknowledgment number instead of the flit's own sequence number.

On a point-to-point link this works. Once a switch sits in the path, it does not. A switch
that receives a flit it cannot repair simply discards it. If the next flit that arrives is
one whose FSN carries an acknowledgment, the receiver has no way to see that a flit is
missing. It then delivers data out of order, silently. The more switch levels there are,
the more often this happens.

## The idea: implicit sequence numbers

The sender never writes its sequence number (SeqNum) into the flit. Instead, it mixes the
SeqNum into the CRC:

- **Sender.** Before computing the CRC over header and payload, the sender XORs the 10-bit
  SeqNum into the 10 lowest bits of the payload. The flit itself goes out with the
  unmodified payload.
- **Receiver.** The receiver keeps the number it expects next (ESeqNum). It repeats the same
  XOR with ESeqNum and compares the CRC it computes with the CRC it received.

The CRC matches only if two things hold: the flit is intact, and it is the flit the
receiver expected. If a flit was dropped anywhere on the way, every later flit was encoded
with a SeqNum one higher than the receiver's ESeqNum. The very next flit therefore fails
the check, whatever its header carries.

Because the SeqNum no longer needs a header field, the header's FSN is free to carry only
acknowledgments. It is zero when there is nothing to acknowledge.

The hardware cost is 10 XOR gates in front of an existing CRC generator.

The CRC stops being a per-link check. It becomes an end-to-end CRC (ECRC) that only the two
endpoints compute. The layering becomes:

| Node     | Transport: ECRC + ISN | Link: FEC | Link: sequence tracking |
|----------|-----------------------|-----------|-------------------------|
| endpoint | generate / check      | yes       | no                      |
| switch   | no                    | yes       | no                      |

A switch keeps no sequence state at all. It corrects what FEC can correct, and re-encodes.
If it cannot correct a flit, it discards it and reports the discard. Recovery is left to the
endpoints.

The ECRC also covers the switch's own datapath. Corruption inside a switch (a buffer bit
flip, a logic fault) happens after the incoming FEC check and before the outgoing FEC
encoding. It is invisible to the link-layer FEC, but it breaks the end-to-end CRC.

## Flit format

A flit is a 2048-bit vector `flit[8*i +: 8]` = byte i.

| Bytes    | Field   | Contents |
|----------|---------|----------|
| 0..1     | header  | `{FSN[9:8], ReplayCmd[1:0], Types[3:0], FSN[7:0]}` from bit 15 down to bit 0 |
| 2..241   | payload | 240 bytes; payload bits 0..9 (bits 16..25 of the flit) take the SeqNum XOR in the CRC |
| 242..249 | ECRC    | 64 bits |
| 250..255 | FEC     | 6 check bytes |

ReplayCmd values:

| Value | Name   | Meaning |
|-------|--------|---------|
| 0     | NONE   | no acknowledgment; FSN = 0 |
| 1     | ACK    | FSN = last SeqNum received in order |
| 2     | NACK   | FSN = last SeqNum received in order; replay everything after it (go-back-N) |
| 3     | NACK_1 | single-flit replay; decoded but never generated |

Types = 0 marks an idle flit, which carries only an acknowledgment. Every other value is
passed to and from the upper layer unchanged.

The ECRC is CRC-64/ECMA-182: polynomial 0x42F0E1EBA9EA3693, initial value 0, no reflection,
no final XOR. It is computed over the 242-byte message with the SeqNum XORed in, most
significant bit first, starting from byte 241. Over the 9 ASCII bytes "123456789" (no
SeqNum) it gives 0x6C40DF5F0B497347. `tb_isn_ecrc_gen` checks this value.

## The FEC: three interleaved single-symbol correctors

The 250 bytes of header, payload and CRC are split into three sub-blocks. Byte i goes to
sub-block i mod 3, which gives 84, 83 and 83 data bytes. Each sub-block is a Reed-Solomon
code over GF(2^8) with two check bytes, which is enough to correct any single wrong byte
per sub-block. Since three consecutive bytes fall into three different sub-blocks, any
burst of up to three bytes (24 bits) is corrected.

The code is built as follows. The field polynomial is 0x11D and alpha = 0x02. For one
sub-block:

- **Positions.** Codeword position 0 holds the first check byte p0, position 1 the second
  check byte p1, and position j+2 data byte j.
- **Roots.** The codeword polynomial has roots alpha^0 and alpha^1.
- **Encoding.** With A = sum(d_j) and B = sum(d_j · alpha^(j+2)):
  - p1 = (A + B) / (1 + alpha), where 1/(1+alpha) = 0xF4;
  - p0 = A + p1.
  
  B is evaluated with Horner's rule: one multiply-by-alpha (a shift and a conditional XOR)
  per byte, with no general multiplier.
- **Decoding.** The syndromes are S0 = sum(c_k) and S1 = sum(c_k · alpha^k).
  - S0 = S1 = 0: the sub-block is clean.
  - Both non-zero: a single error of value S0 sits at the position k where S0 · alpha^k = S1.
    All positions are compared in parallel.
- **Uncorrectable.** The codes are *shortened*: a full-length code would have 255
  positions, and only 85 or 86 are used. When several bytes of a sub-block are hit, the
  syndromes often point to a position that does not exist. The decoder reports such cases
  as uncorrectable, as it does when exactly one syndrome is zero. In the test, about 64%
  of random double-byte errors are caught this way. The rest are miscorrected, and only
  the ECRC catches them.
- **Check-byte placement.** The six check bytes follow the same mod-3 rule:

  | Bytes    | Sub-block |
  |----------|-----------|
  | 250, 253 | 1         |
  | 251, 254 | 2         |
  | 252, 255 | 0         |

  Within each pair, the first byte is p0 and the second p1.

`fec_enc` and `fec_dec` are purely combinational.

## Endpoint protocol

An endpoint (`rxl_endpoint`) is a transmitter (`rxl_tx`) and a receiver (`rxl_rx`) that
share the acknowledgment traffic. Each receiver reports two things to the transmitter of
the same endpoint:

- `peer_*`: what the far side acknowledged;
- `fb_*`: what this side must acknowledge to the far side.

### Transmitter: numbering and the retry buffer

Each new data flit gets the next SeqNum (`wr_seq`), is ECRC-encoded with it, and is stored
in a circular retry buffer at index SeqNum mod RETRY_DEPTH. Three 10-bit pointers describe
the buffer:

- `ack_seq`: the oldest flit not yet acknowledged;
- `snd_seq`: the next flit to put on the link;
- `wr_seq`: the next new SeqNum.

The buffer is full when `wr_seq - ack_seq = RETRY_DEPTH`. While it is full, `in_ready` is
low.

An ACK or NACK carrying number n acknowledges everything up to and including n, so
`ack_seq` becomes n+1. A NACK also rewinds `snd_seq` to n+1. Every flit from there to
`wr_seq` is then sent again, in order, from the buffer. Replayed flits keep their original
SeqNum, but their header is rebuilt, so they carry an up-to-date acknowledgment. While a
replay is in progress, new payloads wait.

Two rules protect the buffer from stale or bogus feedback:

- Feedback whose number does not lie in `[ack_seq-1, wr_seq-1]` is ignored.
- An ACK that acknowledges flits the replay has not yet re-sent moves `snd_seq` forward.

A replay timer covers feedback that never arrives: a lost last flit, a lost NACK, or a
lost ACK. The timer runs while data flits are unacknowledged and no replay is running. It
restarts whenever the acknowledgment point moves. After REPLAY_TIMEOUT cycles without
progress, the transmitter replays from `ack_seq`.

### Receiver: ESeqNum, NACK and forwarding in order

A flit leaving the FEC decoder is accepted only if the decoder did not flag it and its ECRC
matches with ESeqNum. The receiver then handles it as follows:

- **Accepted data flit.** The payload goes to the upper layer and ESeqNum advances. The
  ReplayCmd/FSN of the header goes to the local transmitter.
- **Any other flit.** It is dropped. A NACK with FSN = ESeqNum-1 is raised. From then on
  everything is discarded until a flit is accepted again, which happens when the replay
  arrives.

Nothing is ever delivered out of order or twice. Because the receiver only ever accepts
ESeqNum, a corrupted header cannot be mistaken for anything else either: its ACK is simply
not used.

While the receiver waits for the replay, it repeats the NACK every NACK_TIMEOUT cycles, in
case the flit that carried the NACK was itself lost.

### Acknowledgments: piggybacking, coalescing and idle flits

An acknowledgment normally rides in the header of the next outgoing flit, data or replay.
This piggybacking costs no bandwidth. An acknowledgment becomes urgent in three cases:

- it is a NACK;
- ACK_COALESCE accepted data flits are waiting for it;
- the oldest of them has waited ACK_TIMEOUT cycles.

If an acknowledgment is urgent and the transmitter has nothing to send, it emits an
*idle flit* (Types = 0) only to carry it. The default ACK_COALESCE = 10 means at most one
such flit per ten data flits.

An idle flit is ECRC-encoded with the SeqNum the next data flit will get, but it does not
use that number up:

- it is not stored in the retry buffer;
- the receiver checks it against ESeqNum, passes its acknowledgment on, and does not
  advance ESeqNum.

An idle flit therefore passes only if nothing before it is missing. This keeps its
acknowledgment trustworthy. Losing one idle flit costs nothing but a late acknowledgment.

The buffer-free rule matters. If idle flits took a SeqNum and a buffer slot, two endpoints
with both retry buffers full and an ACK lost could deadlock: neither could send the flit
that would free the other. Because idle flits are exempt, an acknowledgment can always be
sent. An accepted idle flit also ends a wait for replay, because it proves the far side has
sent nothing the receiver lacks.

## The switch

`rxl_switch` has two independent directions. Each direction is an `rxl_switch_port`,
which works in four steps:

1. It registers the incoming flit.
2. It decodes the flit with `fec_dec`.
3. If the flit was correctable, it re-encodes it with fresh check bytes (`fec_enc`) and
   registers it again.
4. If the flit was uncorrectable, it drops it and pulses `*_drop` for one cycle.

Latency is two cycles. The switch never looks at the header, the FSN or the ECRC.

The `*_int_err` inputs XOR an error pattern into the decoded flit, between decoder and
encoder. They model an internal switch fault, which only the endpoint ECRC can detect. Tie
them to zero in normal use.

## Top level and timing

`rxl_top` connects a host endpoint, a switch and a device endpoint. There are four link
hops (`h2s`, `s2d`, `d2s`, `s2h`). On each hop, a 2048-bit error mask `err_*` is XORed onto
the flit to model channel errors. The physical layer itself is not modelled.

One flit moves per clock and per direction. At 500 MHz this is one 256-byte flit every
2 ns, the rate of a x16 link at 64 GT/s.

Latencies with no errors:

| Path | Latency |
|------|---------|
| upper layer into the transmitter → flit leaves the transmitter | 1 cycle |
| through the switch | 2 cycles |
| receiver → upper-layer output | 1 cycle |
| host input to device output (`h_in_*` to `d_out_*`, and the reverse) | 4 cycles |
| two endpoints wired directly (`tb_rxl_endpoint`) | 2 cycles |

The upper-layer interface is a valid/ready handshake with a 4-bit type and a 240-byte
payload. On the output side there is no back-pressure: the receiving upper layer must
accept one flit per cycle.

Event outputs, each a one-cycle pulse:

| Output | Event |
|--------|-------|
| `ev_replay` | NACK-started replay |
| `ev_timeout` | timer-started replay |
| `ev_stall` | payload held back |
| `ev_accept` | flit accepted |
| `ev_reject` | flit rejected |
| `ev_fec_corrected` | endpoint FEC corrected a flit |
| `ev_fec_uncorrectable` | endpoint FEC could not correct a flit |
| `sw_*_drop` | switch dropped a flit |
| `sw_*_corrected` | switch FEC corrected a flit |

On the `[1:0]` event buses, bit 0 is the host and bit 1 the device.

## Parameters

The parameters are in `rxl_top`, `rxl_endpoint`, `rxl_tx` and `rxl_rx`. Where the defaults
come from:

| Parameter | Default | Origin |
|---|---|---|
| `RETRY_DEPTH` | 64 | A 100 ns retry round trip at one flit per 2 ns is 50 flits in flight. Rounded up to a power of two. |
| `ACK_COALESCE` | 10 | One acknowledgment per ten flits, the coalescing level used in the reliability analysis. |
| `REPLAY_TIMEOUT` | 256 | Design choice, well above the round trip of the top level. |
| `ACK_TIMEOUT` | 64 | Design choice. |
| `NACK_TIMEOUT` | 512 | Design choice. |

The flit geometry is fixed in `rxl_pkg`: 2 + 240 + 8 + 6 bytes, 3-way FEC, 10-bit sequence
numbers.

At the default sizes, each endpoint holds a 64 × 1924-bit retry buffer.

## Departures from the source description, and limits

- **Where the SeqNum enters the CRC.** The scheme can be described as a CRC over a wider
  input (header, payload and SeqNum). Here it is implemented as the equivalent XOR of the
  SeqNum into the low 10 payload bits ahead of an unchanged 242-byte CRC.
- **Codes and bit positions.** The CRC polynomial, the GF(2^8) polynomial, the RS code
  construction, the order of the check bytes, and the bit positions of the header fields
  are all this design's choices. They are not the values of the CXL specification. The
  field sizes and the header field order do follow the CXL 256-byte flit.
- **Sub-block sizes.** The sub-blocks are 84/83/83 bytes in sub-block order 0/1/2. The
  usual description lists "83, 83, 84". The sizes are the same; only which sub-block gets
  the extra byte differs.
- **Switch drop reports.** A switch reports a drop only as an output pulse. Carrying the
  report back to the originator is not modelled.
- **Single-flit replay.** Single-flit replay (ReplayCmd 3) is never generated. Go-back-N is
  the only recovery. A received ReplayCmd 3 is ignored.
- **Protocol details that are design choices.** The idle flit rules, the NACK repetition,
  the replay timer and all three timeout values.
- **Topology.** Only a single switch level is instantiated. `rxl_switch` can be chained
  for more levels without changes to the endpoints. With L switch levels, the round trip is
  about 4 + 4L cycles, plus up to 10 flits of ACK coalescing. That stays within the
  64-entry buffer at full rate up to L = 12.
- **Outside the design.** The physical layer and the CXL transaction layer. The reliability
  figures for real error rates (uncorrectable flit rate 3e-5, undetected rate around 1e-24)
  are analytical. The testbenches use far higher injected error rates to exercise every
  path.
- **A replayed flit lost again.** While a receiver waits for a replay, it does not send a
  second NACK when further flits are rejected. If the first replayed flit is itself lost,
  recovery waits for the sender's replay timer (256 cycles) or the repeated NACK
  (512 cycles), not for one more round trip.
- **Header-less variant.** The source also suggests dropping the FSN and ReplayCmd fields
  altogether and sending acknowledgments as separate messages. That variant is not built.
- **Clock rate.** The FEC and CRC are single-cycle combinational blocks over the full flit.
  Meeting 500 MHz would need pipelining, which would only add latency.

## Verification

Every testbench in `tb/` is self-checking. Each one prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog. `tb_rxl_ref_pkg` holds independent
reference models: a bit-serial CRC, a GF multiplier built from carry-less multiplication,
and a syndrome-based RS encoder.

| Testbench | What it checks |
|---|---|
| `tb_isn_ecrc_gen` | the CRC check value; random vectors against the model; different SeqNums give different CRCs; linearity |
| `tb_isn_ecrc_check` | a match only with the right ESeqNum; random corruption is detected |
| `tb_fec_enc` | zero syndromes; check bytes equal the model |
| `tb_fec_dec` | any single byte error per sub-block is corrected; 3-byte bursts are corrected; double errors are mostly flagged |
| `tb_rxl_tx` | numbering, piggybacked headers, buffer-full stall, NACK replay, timer replay, idle flits (small buffer) |
| `tb_rxl_rx` | in-order acceptance, ACK coalescing and urgency, NACK on corruption and on FEC failure, NACK repetition, idle flits |
| `tb_rxl_switch` | correction, drop with report, re-encoding, internal corruption passed through |
| `tb_rxl_endpoint` | two endpoints wired directly; both directions; random bursts and drops |
| `tb_rxl_top` | full top at default parameters, 1500 flits each way, with link bursts, uncorrectable flits and switch-internal corruption |

In `tb_rxl_top`, every payload must arrive exactly once and in order. The test also counts
each recovery path and fails if any never occurred: switch corrections, switch drops,
endpoint FEC corrections and failures, ECRC rejects, NACK replays, timer replays, stalls,
internal errors, piggybacked ACKs and idle ACK flits.

A final phase of `tb_rxl_top` measures what retries cost. The host streams 4000 flits back
to back while the switch drops about one flit in 100. A lost flit usually costs 9 to 10
cycles: the next flit is rejected, the NACK travels back, and the replay begins. A replayed
flit that is dropped again costs a replay timeout. Averaged over a run, the cost is 9 to 19
cycles per drop. Scaled to an uncorrectable flit rate of 3e-5 on each of the two links,
this gives a bandwidth loss of about 0.06%. The estimate of about 0.3% for the same case
assumes a 100 ns (50-flit) retry round trip. This model has no link or PHY delay, so its
round trip is shorter.

To simulate a testbench with Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/rxl_pkg.sv tb/tb_rxl_ref_pkg.sv tb/tb_rxl_top.sv --top-module tb_rxl_top
./obj_dir/Vtb_rxl_top +verilator+seed+7
```

Replace `tb_rxl_top` with any other testbench name.
