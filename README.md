# Back-end logic for an asymmetric front-end readout network

This RTL is the digital core of a back-end unit for small and medium-size
particle-physics data acquisition. One back-end serves up to 32 front-end
cards. The links between them are deliberately lopsided:

- **Back-end to front-ends: one shared fanout line.** A single 100 Mbps
  Manchester-coded stream is copied electrically to every card. It carries
  the system clock (the cards recover it), triggers and synchronisation
  commands, register accesses and data requests.
- **Front-end to back-end: one 400 Mbps point-to-point link per card.** The
  card transmits synchronously to the recovered clock. The back-end samples
  the link with ordinary FPGA I/O pins and its own copy of the same clock (a
  *system-synchronous* receiver), so no multi-gigabit transceiver is needed
  per card.

The back-end gathers the data fragments that every card produces for an
event. It checks them and packs them into 8 KB buffers in the SDRAM of a
system-on-chip. A processor then ships those buffers as jumbo Ethernet
frames. The processor, the Ethernet MAC, the SDRAM, the FPGA I/O primitives
and the off-board chips are not part of this RTL. The design reaches them
through plain ports: a buffer-descriptor FIFO interface and an AXI-4 write
master.

## Three virtual channels on every link

Both directions time-multiplex three independent bit streams, called
*virtual channels*. Each channel gets a fixed share of the bit slots:

| channel | purpose | fanout slots (A,B,A,C) | return slots (A,B,C,C) |
|---|---|---|---|
| A | triggers, synchronisation; busy/ack and trigger primitives back | 50 % | 25 % |
| B | register access (request out, response back) | 25 % | 25 % |
| C | data requests out, event data packets back | 25 % | 50 % |

The bits of channel B are inverted on the wire in both directions. An idle
channel sends 0s. The idle line therefore carries a fixed pattern (A=0,
B=1 after inversion, C=0), and receivers find the slot boundaries by
searching for it.

### Messages on channels A and B, and data requests

Every message is a start bit (1), a payload sent MSB first, and a parity bit.

- **VC A, 8 bits.**
  - Outbound bits, MSB to LSB: reserved, WRITE_CLOCK_SYNCH, SAMPLING_START,
    SAMPLING_STOP (the trigger), CLEAR_EVENT_COUNT, CLEAR_TIME_STAMP,
    EVENT_TYPE[1:0].
  - Inbound bits: SET_BUSY (D7), CLEAR_BUSY (D6), two reserved bits, and four
    trigger-primitive bits (D3..D0).
- **VC B, 62 bits.** BC (broadcast), TargetID[4:0], PE (parity error seen),
  FE (access error), WR, RD, ByteEnable[3:0], Address[15:0], Data[31:0].
  - A card answers every request addressed to it, or broadcast, with the
    same format.
- **VC C data request, 36 bits.** A 4-bit opcode (1 = send next packet) and
  a 32-bit *unary* target mask, one bit per card. One request can therefore
  wake any set of cards at once.

The definitions are in `tdcm_pkg` as packed structs, so the field order in
the source is the order on the wire.

### Data packets on channel C

A front-end answers each request with exactly one packet, sent as 16-bit
words, MSB first:

```
START_OF_PACKET (0xA55A)
header:  bit15=0 | SOE | EOE | size in bytes [12:0]
payload: ceil(size/2) words, rounded up to an even count, 0x0000 padding
CRC-32 high word, CRC-32 low word
```

- **SOE** marks a card's first packet of an event. Its payload carries the
  32-bit event number and the 48-bit timestamp.
- **EOE** marks the card's last packet of the event.
- **CRC:** polynomial 0x04C11DB7, MSB first, initial value 0xFFFFFFFF, no
  final inversion. It covers the header word and the payload words.

## Line coding

**Fanout (`fanout_tx`, `fanout_rx`).**
- The transmitter emits two line bits per 100 MHz clock (data bit, then its
  inverse), meant for a DDR output register. Idle looks like `01100101`
  repeated.
- The front-end side receiver has to find two things:
  - the Manchester phase: it slips half a bit whenever two equal half-bits
    are seen;
  - the slot boundary: it waits for the decoded idle pattern `0100`.
- It reports lock after 4 idle patterns in a row and drops lock on any
  Manchester violation.

**Front-end link (`fe_link_tx`, `be_link_rx`).**
- After reset the transmitter sends `1010...` for `TRAIN_CYCLES`. The
  default is 10,000,000 clocks, i.e. 100 ms at 100 MHz. On a real board the
  back-end uses this time to tune its input delays.
- It then sends four bits per clock (bit 3 first): `{A, ~B, C, C}`,
  scrambled by a self-synchronising x^43+1 scrambler: `s = d XOR s[t-43]`.
- The receiver works on the 4-bit words from the I/O deserializer, whose
  word boundary is arbitrary:
  - The descrambler needs no alignment. It is correct 43 bits after any
    start.
  - Alignment comes after it: the receiver tests the four rotations of the
    last eight descrambled bits for the idle word `0100`.
  - It locks after 16 matching words at the same rotation and stays locked
    until reset.
- **Why 16 words and not fewer:** when the transmitter leaves training, its
  scrambler state is zero. For 43 bits the receiver then XORs real data with
  training bits, and the result is a steady `0001` stream, which contains
  `0100` at the wrong rotation for about 11 words. Any lock count above 11
  rides through this.

## Getting data in: DataPump and FE-FIFO

Each link has a 1024-word (2 KB) first-word-fall-through FIFO (`fwft_fifo`),
fed by `vcc_rx`, which finds START_OF_PACKET and stores header, payload and
CRC words.

The per-link `data_pump` owns a single request token:
- It asks for a packet only when the FIFO has room for the largest allowed
  packet (2 KB).
- It then waits until that packet has fully arrived before it can ask again.

Flow control is therefore by construction: a FIFO can never overflow, and a
slow event builder simply stalls the pumps (`pump_stalled`). With a 2 KB
FIFO and a 2 KB maximum packet, "room for the largest packet" means an empty
FIFO. A larger `FIFO_DEPTH` allows a request to overlap the draining of the
previous packet.

`vcc_req_tx` collects all pumps that are requesting when the channel is free
and sends one message with their combined mask.

## Event building

`event_builder` scans the FIFOs of the active links round-robin, one per
clock. An event goes through four phases:

1. **Start of event.**
   - The first packet of every active card must have SOE set; if not, the
     builder halts with `error_no_soe`.
   - The builder reads each SOE packet itself. The first one sets the
     expected event number and timestamp; every other card's values must
     match, or the builder halts (`error_mismatch`).
   - A bad CRC on an SOE packet also halts it (`error_crc`). Halting is
     deliberate: the paper's design stops rather than mixing events.
2. **Header.** Once all active cards have delivered SOE, the packet mover
   writes an event header record.
3. **Data.** Each available packet is handed to `packet_mover`. A packet
   with a bad CRC is dropped, and the event is marked incomplete; packets are
   not retransmitted. EOE ends a card's contribution.
4. **End.** When every card has sent EOE, a global End-Of-Event record is
   written and the next event starts.

## Buffers in SDRAM: PacketMover

The processor pre-allocates a pool of 8 KB buffers. It pushes their
descriptors, `{address[31:0], length[15:0]}`, into **O_FIFO** and pops
filled ones from **I_FIFO**. After sending a buffer it pushes the descriptor
back into O_FIFO.

`packet_mover` writes the records into the current buffer:

```
event header  0xEB0E, n_frontends, evnum[31:16], evnum[15:0],
              ts[47:32], ts[31:16], ts[15:0], 0
packet        header word, link number, payload words (padding included)
end of event  0xEE0E | incomplete, dropped packets, evnum[31:16], evnum[15:0]
```

- **Fit check.** The packet size is in the FIFO's first word, visible
  before anything is read. So the mover knows before moving a packet whether
  the whole record fits in the current buffer. If it does not, the buffer
  goes to I_FIFO with its fill length and a new one is taken from O_FIFO.
  Records never straddle buffers.
- **Empty O_FIFO.** The mover waits, and `buffer_waits` counts it.
- **CRC check.** The CRC is computed while the packet streams to SDRAM. If
  it turns out wrong, the fill pointer is simply not advanced, so the next
  record overwrites the bad one and no copy or second pass is needed.
- **Early hand-over.** `flush` (processor request) retires a partly filled
  buffer at once; `flush_on_end` does so after each End-Of-Event.
- **Writes.** Words are packed two per 32-bit beat, first word in the low
  half. `axi_burst_writer` writes them as INCR bursts of up to 16 beats that
  never cross a 4 KB boundary.

## Local event generator and BERT

Cards can be emulated so the event builder can be exercised without them.
With `cfg_emulate` set, the 32 link inputs come from 32 `fe_emulator`
instances instead of the pins. They are not shortcuts:
- They decode the real fanout output with a front-end `fanout_rx` and
  message deserializers.
- They answer through real `fe_link_tx` transmitters, with a short 64-clock
  training.
- A triggered event becomes available with SAMPLING_STOP, or one is always
  available with `cfg_emu_free_run`. It is acknowledged with SET_BUSY on
  VC A.
- An event is one SOE packet and `cfg_emu_npkts` data packets of
  `cfg_emu_size` bytes. Payload word k of card i is `{i[4:0], k[10:0]} XOR
  event_number[15:0]`. The last packet carries EOE, followed by CLEAR_BUSY.
- `emu_crc_corrupt[i]` spoils the CRC of card i's next data packet.
- On VC B each emulated card has:
  - a serial number at address 0 (`0xD7A00000 + id`);
  - a scratch register at address 1;
  - a bus error (FE=1) at any other address.

`prbs_bert` generates and checks PRBS7/15/23/31, four bits per clock:
- The checker is self-synchronising: each bit is predicted from earlier
  received bits.
- After a 64-bit warm-up it counts mispredictions.
- A single injected bit error therefore shows up as exactly 3 errors.
- With `cfg_bert` and `cfg_emulate` set, the emulated links carry the
  pattern; `bert_link` selects the link the checker watches.

## Files

| file | block |
|---|---|
| `rtl/tdcm_pkg.sv` | message structs, constants, CRC-32 step, record markers |
| `rtl/fwft_fifo.sv` | FE-FIFO, O_FIFO, I_FIFO |
| `rtl/msg_serializer.sv`, `rtl/msg_deserializer.sv` | message framing on one channel |
| `rtl/fanout_tx.sv`, `rtl/fanout_rx.sv` | fanout line coding (back-end and card side) |
| `rtl/fe_link_tx.sv`, `rtl/be_link_rx.sv` | 400 Mbps link coding (card and back-end side) |
| `rtl/trigger_ctrl.sv` | VC A: triggers out, busy and primitives in |
| `rtl/vcb_master.sv` | VC B: register requests out, responses in |
| `rtl/vcc_req_tx.sv`, `rtl/data_pump.sv`, `rtl/vcc_rx.sv` | VC C request and receive path |
| `rtl/event_builder.sv`, `rtl/packet_mover.sv`, `rtl/axi_burst_writer.sv` | event building into SDRAM |
| `rtl/fe_emulator.sv`, `rtl/prbs_bert.sv` | local event generator, bit error rate tester |
| `rtl/tdcm_top.sv` | the whole back-end |
| `tb/tb_<block>.sv` | self-checking testbench of each block |
| `tb/axi_mem_model.sv` | SDRAM stand-in: AXI-4 write slave with random stalls |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself,
with a watchdog. For example, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/tdcm_pkg.sv tb/tb_tdcm_top.sv --top-module tb_tdcm_top
obj_dir/Vtb_tdcm_top +verilator+rand+reset+2
```

`tb_tdcm_top` runs the complete back-end with every parameter at its
default: 32 links, 2 KB FIFOs, 8 KB buffers. It uses the emulated cards and
takes about a second. It goes through these steps:
1. With nothing attached, no link may lock.
2. Switching to emulation locks all 32 links.
3. A VC B broadcast read must come back with a bus error from every card,
   and an addressed read returns card 7's serial number.
4. Four triggered events of 32 x 3 packets follow, one with a corrupted
   CRC. Only two buffers exist at first, and they are recycled slowly, so
   the mover must wait for one.
5. A flush retires the last partial buffer, and the BERT checks a clean
   loop and one injected error.

It parses every SDRAM record: event numbers, timestamps, every payload word,
flags, and the incomplete marker and drop count. It also counts each
mechanism, and reports a failure for any that never happened: mode switch,
lock, trigger, busy set and clear, broadcast bus error, data request, pump
stall, buffer swap, buffer wait, CRC drop, incomplete event, flush and BERT
error.

Block testbenches check against models written independently of the RTL:
- a reference CRC and reference LFSRs;
- a bit-level descrambler and frame parser;
- a Manchester line driver with random phase and slips.

## Choices made here and departures

The protocol is specified only partly. The paper gives the formats,
coding, slot orders, scrambler and the DataPump/EventBuilder/PacketMover
behaviour. The following are choices made in this design:

- **Parity polarity.** Even.
- **Start bit value.** 1.
- **START_OF_PACKET value.** 0xA55A.
- **VC C opcode.** 4 bits wide.
- **CRC-32 details.** Seed, bit order and coverage.
- **Inbound VC A bit positions.** The outbound format is given; the inbound
  one is only described as comparable.
- **SOE payload layout.** Where the event number and timestamp sit in the
  SOE payload.
- **SDRAM record layouts and descriptor format.**
- **Lock criteria** of both receivers.
- **Flush rules.**
- **Burst length.**
- **Emulator packet contents** and the emulator's shortened training.
- **Payload padding.** The prose asks for an even number of payload words;
  a figure suggests an odd count (2N words plus one padding word). The even
  count is used.
- **DataPump threshold.** "Room for the next packet" is taken as room for
  the largest packet (2 KB), since the next packet's size is unknown when it
  is requested.
- **SOE CRC errors** halt the builder. Data-packet CRC errors only drop the
  packet.
- **Processor interface.** No register map is given, so configuration and
  status are plain ports of `tdcm_top`.
- **Card ID assignment.** At start-up the processor gives each card its
  port number as ID. It reads every card's unique serial number with a
  broadcast VC B read, then broadcasts the serial-to-port list, and each
  card picks out its own entry. `vcb_master` carries these broadcasts, but
  the list format is not specified. The emulated cards therefore have fixed
  IDs (their port number) and a 32-bit serial number rather than a 53-bit
  one; they do not take part in the procedure.

Outside this RTL: input delay calibration during training (done with FPGA
delay primitives), the DDR output and deserializer primitives, the processor
software (UDP/IP headers, Ethernet flow control, buffer recycling), the
Ethernet MAC, and the SDRAM. With the default 8 KB buffers the design matches
jumbo frames. A 1.5 KB Ethernet MTU needs `BUF_BYTES` lowered.
