# Slice Agent: slice-aware uplink framing for a shared O-RAN radio unit

## The problem

Several operators or services can share one O-RAN radio unit (O-RU). Each of them has its own
distributed unit (DU), and each DU schedules its own users. On the downlink this is easy: every
DU sends its own data. The uplink is the hard part. The radio unit produces one stream of
frequency-domain IQ samples for the whole carrier. Inside the radio unit, nothing knows which
physical resource blocks (PRBs), in which OFDM symbols, belong to which DU. Only the DUs'
schedulers know.

The Slice Agent closes this gap with information the DUs already send. Before each uplink slot,
every DU sends O-RAN control-plane (C-plane) messages. These say which PRBs and symbols it
expects data on, tagged with an extended antenna-carrier identifier (eAxC ID). The agent
decodes these messages ahead of time. It turns them into a per-symbol list of packets to send.
When the symbol arrives from the low PHY, it cuts the symbol into one Ethernet frame per slice
and PRB group. Each frame carries an 802.1Q VLAN tag derived from the eAxC ID, so an ordinary
VLAN-aware switch can steer each slice's frames to its own DU. No fronthaul element needs
anything specialised.

This RTL implements the agent as a three-stage pipeline with a control unit, at the sizes of
the published FPGA prototype:

- 1024-record C-plane FIFOs;
- 14 symbol buffers of 512 entries;
- a 32-entry list of latency-critical slices;
- 16-bit IQ samples;
- 30 PRBs per frame, for a 1500-byte MTU.

## Where it sits

```
 DU C-plane ──► cplane_decoder ──► type "1" unit ─┐  2x1 per   ┌► symbol buffer 0  ┐  14:1
 (bytes)              │                           ├─ symbol ──►│   ...             ├──────► encapsulation ──► Ethernet
                      │  eAxC ID in list?         │            └► symbol buffer 13 ┘  symb_sel   ▲     │       (bytes)
                      └──────► type "2" unit ─────┘                                              │     ▼
 M-plane, time ids ──► control_unit (parameters, slice list, slot timing)             low PHY IQ bytes ◄ start byte
```

The top module `slice_agent` has only plain ports:

| group | ports | direction and meaning |
|---|---|---|
| C-plane | `cp_tdata[7:0]`, `cp_tvalid`, `cp_tlast`, `cp_tready` | in: one message per `cp_tlast`, starting at the eCPRI common header; never back-pressured |
| management | `cfg_we`, `cfg_in` (`sa_cfg_t`), `slice_add`, `slice_remove`, `slice_id`, `slice_add_fail`, `n_type1_slices` | load parameters; add or remove type "1" eAxC IDs |
| time | `frame_id`, `subframe_id`, `slot_id`, `symbol_id` | in: the radio unit's current air-interface position |
| low PHY | `phy_start`, `phy_start_byte[15:0]`, `phy_tdata`, `phy_tvalid`, `phy_tready` | request IQ bytes of the current symbol, from a byte offset |
| Ethernet | `eth_tdata[7:0]`, `eth_tvalid`, `eth_tlast`, `eth_tready` | out: complete frames, one byte per clock |
| metrics | FIFO occupancies; discarded records; symbol-buffer overflows; late discards; sent frames; rejected messages; scheduled slices; write-backs | counters for monitoring |
| status | `cfg_rd`, `symb_sel`, `next_symbol`, `sched_busy`, `fifo_drop`, `symbuf_count[14]` | parameters in use, symbol positions, unit activity, buffer fill |

The following are outside the agent and reach it through these ports:

- the C-plane receiver and the fronthaul multiplexer;
- the NETCONF management plane;
- the time synchronisation;
- the low PHY;
- the Ethernet MAC.

The end-to-end testbench contains behavioural stand-ins for the time base, the low PHY and the
DUs.

## The slot pipeline

The timing has a simple invariant. **Stage 2 prepares slot n+1 during slot n, and stage 3 sends
slot n during slot n.** The C-plane messages for a slot arrive before that slot starts, so they
can be decoded and turned into packet lists in time.

1. **Decoding (`cplane_decoder`).** The decoder parses section-type-1 messages byte by byte.
   - As soon as the two eAxC ID bytes are in, the ID is looked up in the slice list. The
     answer decides where all of the message's sections go: listed slices to the type "1"
     unit, all others to the type "2" unit.
   - Each section becomes one 73-bit record (`sched_rec_t`): target slot, eAxC ID, section ID,
     start symbol, number of symbols, start PRB and number of PRBs.
   - The decoder rejects a message and counts it in `reject_count` if it is a downlink message,
     is not a real-time control message, uses another section type, or starts at symbol 14 or
     later.
   - A `numPrbc` of 0 means "up to the top of the 273-PRB carrier".

2. **Scheduling (`sched_unit` = `cplane_fifo` + `sched_process`).** Each unit holds its records
   in a 1024-deep FIFO. A record is processed when its frame, subframe and slot equal the
   *next* slot (`next_slot` from the control unit). Processing splits the slice into packets
   and writes each packet's description (`pkt_info_t`: slot, eAxC ID, section ID, start PRB,
   PRB count) into the buffer of every symbol the slice covers, all in the same clock. The
   14-bit write mask plays the role of the 1x14 demultiplexer.

3. **Encapsulation (`encapsulation` + `mult_unit`).** The 14:1 read multiplexer connects the
   buffer of the symbol on air (`symb_sel`). For each entry of the current slot, the unit:
   - computes the payload length PL = 3·IQw·N + 12 and the low-PHY start byte
     SB = 3·IQw·S, where IQw is the IQ width in bits, N the number of PRBs and S the start
     PRB (one registered clock);
   - pulses `phy_start` with SB;
   - sends a 34-byte header;
   - forwards PL − 12 IQ bytes from the low PHY.

   When the buffer holds nothing more for the current slot, it waits for the next symbol.

Buffers between the stages absorb their different, variable speeds.

## The two scheduling units

This is the part of the design that needs the most care. It is where slices are isolated from
each other.

### Processing time

For one record of n_PRB PRBs with a limit of n_PRBpkt PRBs per packet, the unit makes
n_pkt = ⌈n_PRB / n_PRBpkt⌉ packets. The last packet takes the remainder. Each packet costs two
clocks: CALC works out its start PRB and size, and WRITE writes it. A run over the FIFO opens
with a START clock and ends with one clock that finds nothing more to do. So a run over slices
i = 1..k costs

    t_proc = 1 + Σ 2·n_pkt(i) + 1 clocks.

A slice spanning several symbols costs no extra time, because all its symbols are written in
parallel.

### Type "1" unit

The type "1" unit is strictly in order. It starts a run whenever its FIFO head matches the next
slot, and stops at the first head that does not match. That head then waits until its slot
comes. Its timing is therefore deterministic. A listed, latency-critical slice (URLLC) never
waits behind unrelated traffic.

The price is that the DUs must send type "1" messages in slot order. A record for a slot that
has already passed never matches again and blocks the unit for good. This is the behaviour the
design is meant to have, not a defect of the RTL. The `t1_fifo_count` metric shows it.

### Type "2" unit

The type "2" unit accepts messages in any order.

- **Passes.** It works in passes. A pass starts after every slot change (`swap`) and after
  every new record, and visits exactly the records present when it starts.
- **Matching records** are processed as in type "1".
- **Write-back.** A record for another slot is popped and written back to the tail of its own
  FIFO. This takes one clock. It waits while the decoder is using the FIFO's single write port.
- **Cost of write-back.** Throughput therefore depends on how many future records the FIFO
  already holds.
- **Overflow.** A record arriving at a full FIFO is discarded (`t2_drop_count`). This is the
  failure the high-density mMTC case is meant to show (see below for when it happens).
- **Stale records.** A type "2" record whose slot has passed is written back forever, until
  the FIFO is reset. The design does not expire it.

### Shared symbol buffers

Both units write into the same 14 symbol buffers. For each symbol, `sym_write_mux` gives the
type "1" write priority. If a type "2" write would lose even one of its symbols to type "1",
the multiplexer holds the whole write back with `t2_ready`, and the type "2" unit repeats it in
a later clock. The paper states the priority. Holding the write back instead of dropping it is
this implementation's choice, so that a packet always reaches every symbol it belongs to.

### Isolation in practice

The end-to-end test overfills the type "2" FIFO with 1100 mMTC records for a distant slot,
while URLLC messages for the next slot arrive on the type "1" path. Every URLLC frame still
leaves in its own symbol. At the same time, exactly the records that did not fit are reported
as discarded.

## Fragmentation into packets

The limit on PRBs per packet comes from the MTU. At 16-bit IQ, one PRB is 48 bytes, so a
1500-byte MTU allows 30 PRBs per packet. The limit is a run-time parameter (`max_prb_pkt`,
1..511), so 9000-byte jumbo frames (187 PRBs) also work.

The published example splits a 61-PRB slice into "PRBs 0–30 and 31–60". That example conflicts
with the 30-PRB limit and with the packet-count equation. This design follows the equation:
61 PRBs make packets of 30, 30 and 1.

## Frame format

One frame per packet, one byte per clock. The header is 34 bytes:

| bytes | content |
|---|---|
| 0–11 | destination MAC, source MAC (from the parameters) |
| 12–15 | 802.1Q tag: TPID 0x8100; PCP 0, DEI 0, VLAN ID = eAxC ID bits 11:0 |
| 16–17 | EtherType 0xAEFE (eCPRI) |
| 18–21 | eCPRI common header: revision 1, message type 0 (IQ data), payload size = PL |
| 22–25 | PC_ID = eAxC ID, sequence number (one counter for all flows), E bit set |
| 26–29 | O-RAN U-plane common header: uplink, payload version 1, frame, subframe, slot, symbol |
| 30–33 | section header: section ID, start PRB, number of PRBs (0 encodes more than 255) |
| 34… | PL − 12 = 3·IQw·N IQ bytes from the low PHY |

The VLAN tag as the slice identity, the eCPRI header and the 12-byte application overhead
follow the paper. The exact VID mapping, the PCP value and the shared sequence counter are this
implementation's choices.

The low PHY sees `phy_start` in the clock after the entry is taken. It then has the 34 header
clocks to position itself at the start byte. IQ bytes are taken with `phy_tvalid` and
`phy_tready`, and the Ethernet side may stall the frame with `eth_tready`.

A frame of N PRBs at 16-bit IQ occupies the output for 34 + 48·N clocks plus two clocks of
set-up. A 30-PRB frame takes 1476 clocks.

### Late entries

If a symbol's buffer holds more frames than fit in one symbol period, the unfinished entries
stay in the buffer. They are found again one slot later, when their slot is neither the current
nor the next one. The unit then discards them and counts them in `late_drop_count`, so they
cannot block the buffer. Entries already written for the next slot are left alone.

## Control unit

- **`param_config`** holds `sa_cfg_t`:
  - MAC addresses;
  - IQ width;
  - numerology μ;
  - frequency range;
  - PRBs per packet.

  Values are fixed on writing: an IQ width of 0 or above 16 becomes 16, μ above 4 becomes 4,
  and 0 PRBs per packet becomes 1. The reset values are the prototype's: 16-bit IQ, μ = 1, FR1,
  30 PRBs per packet.
- **`slice_list`** is a 32-entry content-addressable list of type "1" eAxC IDs. All entries are
  compared in parallel, which is why this list dominates the logic cost.
  - An add goes to the lowest free entry.
  - A duplicate add is ignored.
  - An add to a full list raises `slice_add_fail`.
  - A remove in the same clock as an add wins.
- **`pipeline_control`** registers the current position and derives:
  - the next slot (2^μ slots per subframe, 10 subframes, frame wrapping at 256);
  - a one-clock `swap` strobe on each slot change;
  - `symb_sel` for the read multiplexer.

## Sizes and what they allow

| parameter | default | where it comes from |
|---|---|---|
| `T2_FIFO_DEPTH` | 1024 records | the prototype's FIFO |
| `T1_FIFO_DEPTH` | 1024 records | not given; taken equal to type "2" |
| `SYM_BUF_DEPTH` | 512 entries × 14 | the prototype's symbol buffers |
| `LIST_SIZE` | 32 eAxC IDs | the prototype's slice list |
| `max_prb_pkt` | 30 (run time) | 1500-byte MTU at 16-bit IQ |
| carrier | 273 PRBs | 100 MHz FR1 carrier |

Against the scenarios the design was evaluated with:

- **mMTC, 600 or 1200 one-PRB slices per slot, arriving at random over the two slots before
  their own.** These fit. Every new record starts a type "2" pass, so records for the next slot
  leave the FIFO as they arrive. Only records two slots ahead wait there. In simulation the
  FIFO peaked at 328 and 622 records, and no record was lost.
- **mMTC, 1200 slices whose messages all arrive before the previous slot.** These do not fit.
  The whole slot waits in the FIFO at once, and the 176 records beyond 1024 are discarded
  every slot: 528 of 3600 over three slots.

  This is the overflow the high-density case is meant to show. The published prototype lost
  27% of its records with arrivals spread over two slots. That suggests its type "2" unit
  leaves more records waiting than this one does.
- **Four 30-PRB URLLC slices.** These take 4 of the 32 list entries and 10 clocks of
  scheduling per slot.
- **One-PRB slices on every PRB-symbol (3822 per slot).** The symbol buffers can hold these
  (273 entries per buffer against 512), but the type "2" FIFO cannot.

The output stream carries one byte per clock. At 600 small frames per 0.5 ms slot it needs at
least a 98.4 MHz clock. A fully loaded 273-PRB carrier needs several hundred MB/s per antenna.
That is beyond a byte-wide port, and a real deployment would widen the stream.

## Departures and open points

- **Byte-wide streams.** The published design does not give a bus width or a clock rate.
- **Symbol buffers.** Each is a single FIFO of 65-bit `pkt_info_t` entries. The prototype used
  two FPGA FIFO primitives per symbol.
- **Swap input.** The type "2" FIFO's "swap" input in the published figure is realised as the
  pass trigger of the scheduling process.
- **Choices the paper does not make.** These are listed in the module comments:
  - decoder writes take precedence over write-backs;
  - the late-entry discard;
  - the parameter range fixing;
  - the message-reject rules.
- **Which slot a record must match.** The published text says a type "2" record "not relevant
  for the current time slot" is written back, but it also says processing starts when the record
  matches the identifiers "for the next time slot". Both units here compare with the next slot,
  which is what the slot pipeline needs.
- **Processing time of one packet.** The text gives "2 clock cycles" for a single packet, while
  its processing-time equation gives 1 + 2 + 1 = 4 for a run over one single-packet slice. The
  RTL follows the equation: 2 clocks per packet, plus one opening and one closing clock per
  run.
- **Records the RTL never expires.** It does not protect against a stale type "1" head or an
  endless type "2" write-back. Both are consequences of the published scheme.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends with a
`TB_RESULT checks=N failures=M` line and has a watchdog.

- **`tb_oran_pkg`** builds C-plane messages and defines the low PHY's test pattern.
- **Block tests** compare against independently computed values: packet splits, processing
  time in clocks, frame bytes, slot arithmetic, FIFO behaviour at full and empty, and
  multiplexer priority.
- **`tb_workload_mmtc`** runs the three mMTC loads above at full size. It checks that every
  accepted slice yields exactly its frame, in its symbol, and that sent = frames + discarded.
  It requires the exact discard count when a whole slot arrives early.
- **`tb_slice_agent`** runs the whole agent at its default sizes for six slots. It checks:
  - every Ethernet frame byte by byte;
  - that each frame starts within its own slot and symbol;
  - that all expected frames arrive;
  - that the overflow and late counts are exact.

  It also counts each mechanism and fails if any never occurred. The mechanisms are type
  "1"/"2" routing, write-back, type "1" waiting, type "2" held by type "1", FIFO overflow,
  multi-packet slices, multi-symbol slices, slot swaps, stages 2 and 3 overlapping, and late
  discards.

To run a test with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
  rtl/sa_pkg.sv tb/tb_oran_pkg.sv tb/tb_slice_agent.sv --top-module tb_slice_agent -o sim
./obj_dir/sim
```

Replace `tb_slice_agent` with any other `tb_*` name to run that block's test. The end-to-end
test simulates about 670,000 clocks and takes seconds.

## Files

- **`rtl/sa_pkg.sv`**: shared constants, record types and the configuration struct.
- **`rtl/sync_fifo.sv`**: the generic first-word-fall-through FIFO under both FIFO kinds.
- **The rest of `rtl/`**: one module per file, named as in the diagram above.
- **`tb/`**: one `tb_<module>.sv` per module, plus `tb_oran_pkg.sv`.
