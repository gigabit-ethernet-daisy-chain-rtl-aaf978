# Gigabit Ethernet daisy chain for detector read-out boards

The COMET straw-tube tracker is read out by boards that sit inside the
detector's gas manifold, in vacuum. Each cable that leaves the manifold needs a
vacuum feedthrough, and there is no room (and too much radiation) for an
Ethernet switch inside. The answer is to chain the boards: every board has two
Gigabit Ethernet ports, one toward the DAQ PC and one toward the next board
further out, and only the first board of a chain is cabled to the outside.

This RTL is the FPGA logic that makes one board a link in such a chain. It has
to do two different jobs on the same pair of ports:

* **Slow control over UDP** must reach any board directly. The DAQ PC sends a
  frame addressed to the MAC address of the target board; every board on the
  way passes it on unchanged, the target keeps it, and the reply travels back
  the same way. This is plain frame forwarding, done by the **Path
  Controller**.
* **Event data over TCP** must arrive without loss at the full rate of the
  link. Forwarding TCP frames the same way would not work: frames of two
  boards would meet in the output of an intermediate board, one would be
  dropped, and TCP retransmission would throttle and destabilise the chain.
  So TCP is *not* forwarded. Each board terminates a TCP connection from the
  board behind it, stores the received events, and re-sends them together
  with its own events on its own TCP connection toward the DAQ PC. This
  store-and-merge is done by the **Data Carrier**.

Each board therefore contains two TCP/IP engines (engine 0 facing the previous
board, engine 1 facing the next board or the DAQ PC) and two SFP physical
layers. Those four are third-party IP cores and are not part of this RTL;
every signal that would go to them is a port of the top module.

```
                       Trigger I/F --trig,evnum--> Data I/F --64-bit words--+
                                                                            |
  Module Control <--- slow-control bus (from engine 1) ---------+           |
                                                                |           v
  +--------------------------- network_processor ---------------|-------------------+
  |   events @133 MHz:    engine 0 TCP rx --> FIFO --+                       |      |
  |                                                  +-> TCP Arbiter --> engine 1 TCP tx
  |                       Data I/F --> ring buffer --+                              |
  |                                                                                 |
  |   frames @125 MHz:  SFP0 rx -> Selector0 --own/bcast--> engine 0                |
  |                                   \--other/bcast--> Arbiter1 <-- engine 1       |
  |                                                        \--> SFP1 tx             |
  |                     SFP1 rx -> Selector1 --own/bcast--> engine 1                |
  |                                   \--other/bcast--> Arbiter0 <-- engine 0       |
  |                                                        \--> SFP0 tx             |
  +---------------------------------------------------------------------------------+
     port 0: previous board (further from the DAQ PC)   port 1: next board or DAQ PC
```

## The frame path (Path Controller)

All frames are byte streams in the GMII style: one byte per 125 MHz clock and
an enable that is high for the whole frame, preamble and start-of-frame
delimiter included (`daisy_pkg::gmii_t`). The Path Controller is two
**Selectors** and two **Arbiters** cross-connected:

| from | matching MAC of the same-side engine | broadcast FF:FF:FF:FF:FF:FF | any other address |
|---|---|---|---|
| SFP port 0 (Selector0) | engine 0 | engine 0 and SFP port 1 | SFP port 1 |
| SFP port 1 (Selector1) | engine 1 | engine 1 and SFP port 0 | SFP port 0 |

A frame from engine 0 leaves by port 0 and a frame from engine 1 by port 1, each
through that port's Arbiter.

**Selector** (`frame_selector`). The destination address arrives 8 bytes into
the stream (after 7 preamble bytes and the delimiter). The Selector delays the
stream through a 14-byte shift register. When the first byte of a frame
reaches the end of the register, all six address bytes are inside it, so the
route is decided in that clock and held for the rest of the frame. The cost is
a fixed latency of 15 clocks (120 ns); nothing is buffered beyond that.

**Arbiter** (`frame_arbiter`). It merges the Selector stream of the opposite
port with the frames of its own engine. Its rule is *first come, first
served, the loser is discarded*: the first frame to start while the output is
free is sent whole; a frame that starts on the other input while one is being
sent is dropped whole, there is no queue. The output also stays reserved for
12 idle clocks after each frame, which keeps the Ethernet inter-frame gap on
the wire; a frame that starts inside that gap is dropped too. If two frames
start in the same clock, the local engine wins. Each decision is reported as a
one-clock pulse (`sent_*`, `drop_*`).

Dropping is acceptable because only UDP slow control and the engines' own
control traffic (ARP, TCP acknowledgements) share an Arbiter with forwarded
frames. Slow control is rare, and a lost request is simply repeated by the
DAQ software. TCP event data never pass through a Selector-to-Arbiter path:
they are addressed to the MAC address of engine 0 of the next board, so that
board's Selector0 hands them to its own engine.

## The event path (Data Carrier)

### Event format

Every event is one 64-bit header word followed by `nwords` 64-bit payload
words (`daisy_pkg::ev_header_t`):

| bits | 63..32 | 31..16 | 15..0 |
|---|---|---|---|
| header | event number | board ID | `nwords` |

On the TCP byte streams the same words are sent most significant byte first.
The length field is what lets every buffer find event boundaries in a plain
byte stream. The board ID lets the DAQ PC tell apart the events of the
different boards, which all arrive on one TCP connection. The event number is
what the merge is ordered by.

### Ring buffer and FIFO

`ring_buffer` (64 bit x 4096) holds the board's own events, written by the
Data I/F. `rx_fifo` (8 bit x 65536) holds the events received from the
previous board on engine 0. The FIFO is also the TCP receive buffer: its fill
level goes back to engine 0 (`sitcp0_tcp_rx_wc`), which shrinks the TCP window
it advertises, so the previous board stops sending before the FIFO can
overflow. Nothing is lost on a full FIFO as long as that loop works; a byte
that arrives anyway is dropped and raises the sticky `rx_overflow` flag.

Both buffers parse the length field of each header on the write side and
count the headers written. On the read side each fetches the header of its
oldest event into a register (`head`, `head_valid`) before the event is
opened. The TCP Arbiter can therefore compare the two oldest event numbers
without reading any data. Popping the head opens the event, and its payload
is then read word by word.

An event counts as present as soon as its header is in the buffer. Its tail
may still be arriving while it is read out. This matters for the ring buffer:
the 37112-byte events of the throughput measurement are larger than its
32768 bytes, so it could never hold one whole event. The event leaves at 1
byte per clock while the Data I/F fills the buffer at up to 2 bytes per clock
(one 16-bit sample per clock), so an event streams through a buffer smaller
than itself. If the reader catches up with the writer, it waits for the next
word. When the buffer is full, the
Data I/F pauses the digitizer read-out (`adc_ready` low).

### TCP Arbiter

`tcp_arbiter` is a three-state machine:

* **SUSPENSION** (after reset and between events). If only the ring buffer
  has an event, go to **MYROESTI**; if only the FIFO has one, go to
  **NEIGHBOR**. If both do, compare the event numbers: a smaller number in the
  ring buffer goes to MYROESTI; otherwise (larger or equal) go to NEIGHBOR.
* **MYROESTI / NEIGHBOR**: send exactly one event from that source, then
  return to SUSPENSION.

Sending the older event first gives every board in the chain the same
priority. A board's own new event waits behind any older event that is
already in its FIFO, wherever in the chain that event came from. No board can
therefore monopolise the link, and boards near the DAQ PC gain no lasting
advantage over those further out. This does not give a strict global
order: an older event that is still on its way from a board further out
can be overtaken. The numbers are compared modulo 2^32, so
the order also holds across a counter wrap.

The datapath behind the states loads the header into an output word register
when a state is entered. The payload then goes through a two-word read-ahead
queue. Bytes go out most significant first, one per 133 MHz clock while
engine 1's `tx_full` is low. Reads are issued only while the queue has room,
which hides the one-clock read latency of the buffers. An event therefore
leaves without gaps at 133 MB/s (1064 Mbit/s), more than the about 950 Mbit/s
that TCP can carry on Gigabit Ethernet. The only idle clock is the one spent
in SUSPENSION between events.

## Around the network processor

* **Trigger I/F** (`trigger_if`). A two-flop synchronizer and edge detector
  turn the trigger input into a one-clock pulse, 3 clocks after the edge. The
  event number counts *every* trigger, starting at 0. Boards fed by a common
  trigger therefore keep identical numbering, even when one of them is busy.
* **Data I/F** (`data_if`). On a trigger it records the event number, pulses
  `adc_start`, writes the header and then packs `PAYLOAD_WORDS` x 4 16-bit
  samples, first sample in the top bits. A trigger that arrives while an event
  is being built is ignored and flagged on `trig_ignored`. This is how the
  chain behaves above its saturation rate. The default `PAYLOAD_WORDS = 4638`
  gives 37112-byte events.
* **Module Control** (`module_control`). It executes slow-control requests
  from engine 1's UDP service. A request is a write or read strobe with a
  32-bit address and 8-bit data; it is answered one clock later with
  `sc_ack` and the read data. There are 16 byte registers. Registers 0 (high
  byte) and 1 (low byte) are the board ID; the rest are brought out on `regs`
  as front-end settings. Accesses outside the map are acknowledged, writes to
  them are ignored and reads return 0.

## Clocks and top-level interface

The frame path runs on `clk_gmii` (125 MHz) and everything else on `clk_sys`
(133 MHz), each with a synchronous active-high reset. The two domains never
exchange signals in this logic: they meet only inside the TCP/IP engines. Both
SFP ports are assumed to deliver their receive streams on the common 125 MHz
clock.

Top module `roesti_fpga` (parameters `RING_DEPTH=4096`, `FIFO_DEPTH=65536`,
`PAYLOAD_WORDS=4638`, `NREG=16`):

| group | ports | connects to |
|---|---|---|
| trigger, digitizer | `trig_in`, `adc_start`, `adc_valid`, `adc_data[15:0]`, `adc_ready` | trigger connector; sample stream from the ADC read-out |
| SFP ports | `sfp0_rx/tx`, `sfp1_rx/tx` (`gmii_t`) | 1000BASE-X PCS/PMA cores, port 0 toward the previous board |
| engine frame side | `sitcp0_rx/tx`, `sitcp1_rx/tx` (`gmii_t`), `mac0`, `mac1` | GMII side of TCP/IP engines 0 and 1 and their MAC addresses |
| engine 0 TCP receive | `sitcp0_tcp_rx_wr`, `sitcp0_tcp_rx_data[7:0]`, `sitcp0_tcp_rx_wc[15:0]` | received byte stream; FIFO fill level for the window |
| engine 1 TCP transmit | `sitcp1_tcp_tx_data[7:0]`, `sitcp1_tcp_tx_wr`, `sitcp1_tcp_tx_full` | byte stream toward the DAQ PC |
| slow control | `sc_we`, `sc_re`, `sc_addr[31:0]`, `sc_wd[7:0]`, `sc_ack`, `sc_rd[7:0]` | UDP slow-control bus of engine 1 |
| status | `regs`, `stat_sel0/1`, `stat_arb0/1`, `arb_state`, `ev_done`, `daq_busy`, `trig_ignored`, `rx_overflow` | settings and event counters |

## How far this follows the original design

Taken from the published design: the block structure (Trigger I/F, Data I/F,
Module Control, Network Processor with Path Controller, Data Carrier, two
engines and two SFP interfaces); the Selector routing rule including
broadcast; which Arbiter takes which inputs; the discard-the-latter collision
rule; the three-state TCP Arbiter with its transitions and its
smaller-number-first rule; the ring buffer and FIFO sizes; the FIFO acting as
the TCP receive buffer; the two clock frequencies; and the event size of the
throughput measurement.

Choices of this implementation, where the original says nothing:

* GMII-style byte framing and the 15-clock delay-line address check.
* The Arbiter's tie rule (local engine first) and the reserved inter-frame gap.
* The event header layout, byte order and 32-bit event number, with the
  modulo-2^32 comparison.
* Header parsing and header registers in both buffers.
* Events readable while still being written. The original says an event is
  arbitrated once a buffer holds it, but its 37112-byte events do not fit the
  4096 x 64-bit ring buffer, so an event must be able to stream through.
* Counting every trigger for the event number, and ignoring triggers while
  an event is built.
* The digitizer interface (a 16-bit sample stream with back-pressure). The
  real board reads out ASD, DRS4 and ADC chips, whose read-out logic is not
  described.
* Fixed-size events (the real COMET events vary in size; only the Data I/F
  would need to change, the rest handles any length up to 65535 words).
* Module Control's register map and bus timing.

Not included: the two TCP/IP engines with their UDP slow-control service, the
two 1000BASE-X PCS/PMA cores with their transceivers, and the analog front
end and ADC. These are external IP or chips. Also left out is the fail-safe
mode the original asks for, in which a chain with a broken link sends its data
the other way. It is named as a requirement but never described. The frame
path here is symmetric and would carry such traffic. The event path runs one
way only, from port 0 to engine 1.

## Verification

Every module has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each
prints `TB_RESULT checks=N failures=M`, and each has a watchdog.

| testbench | what it establishes |
|---|---|
| `tb_trigger_if` | one pulse per edge, 3-clock latency, numbers 0,1,2,..., reset |
| `tb_data_if` | header and sample packing, ignored trigger, read-out paused by back-pressure |
| `tb_module_control` | write/read-back of all registers, 1-clock acknowledge, board ID, unmapped addresses |
| `tb_frame_selector` | own / broadcast / foreign frames (also one-byte-off addresses) routed byte-exact, 15-clock latency |
| `tb_frame_arbiter` | reference model of the collision rule: overlaps, ties, frames inside and just after the gap; output gap >= 12 |
| `tb_path_controller` | all four inputs with random addresses, traffic in both directions, one deliberate collision |
| `tb_ring_buffer`, `tb_rx_fifo` | small depths: wrap, full, events longer than the buffer, header fetch, window obeyed, overflow flag |
| `tb_tcp_arbiter` | order R0 F1 F2 R2 R3 F5 F6 R7 for preloaded events (tie to the FIFO), state per event, gap-free one byte per clock, random stalls, counter wrap |
| `tb_data_carrier` | both buffers and the arbiter together: window and back-pressure both hold data back, older event first |
| `tb_network_processor` | both clocks running: every frame route incl. broadcast and a collision, status pulse counts, event merge with its state sequence |
| `tb_roesti_fpga` | **three boards chained at full default size** |
| `tb_chain_throughput` | six boards at full size: rate below and above saturation, fair share |

`tb_roesti_fpga` cables three boards as in a real chain. It stands in for the
TCP engines by handing each board's transmit stream to the receive side of the
board in front, held off when that board's FIFO is nearly full. The DAQ end
accepts 8 bytes in 9. Eight common triggers are fired faster than the chain can
drain. The DAQ side checks that every accepted event of every board arrives
whole (37112 bytes each, every sample checked), in order per board. On the
frame side it checks a slow-control frame passing two boards to the third, a
broadcast seen by all three, and a reply colliding with the first board's own
frame. It fails if any of these mechanisms never occurred: own-address match,
pass-through, broadcast, collision drop, MYROESTI, NEIGHBOR, ignored trigger,
ring-buffer back-pressure, closed TCP window, slow-control acknowledge. A run
moves 10 events (371 kB) through the chain and takes a few seconds.

`tb_chain_throughput` repeats the throughput measurement with six boards at
full size. In this test the DAQ end takes a byte every clock, so the chain
itself is the only limit. The test has two phases:

* **Below saturation.** Every board accepts every trigger, and all events
  arrive.
* **Far above saturation.** The DAQ end receives 1.0000 bytes per clock over a
  150 000-clock window. That is 1064 Mbit/s. The only idle clocks are the one
  per event spent in SUSPENSION. Surplus triggers are ignored. The six boards
  accept between 3 and 5 of the 10 triggers each. The test requires this
  spread to be at most 2, as its check that the oldest-first rule keeps the
  boards equal.

Each phase checks every event as `tb_roesti_fpga` does. The test takes about
10 seconds.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
    rtl/daisy_pkg.sv tb/tb_roesti_fpga.sv --top-module tb_roesti_fpga
./obj_dir/Vtb_roesti_fpga
```

Not verified: chains longer than six boards, runs of more than a few dozen
events, and anything
involving the real TCP/IP engines or PHYs. The TCP link in the testbench is
an ideal byte pipe with a window, not a TCP implementation.

## Files

`rtl/daisy_pkg.sv` holds shared types and constants. The other files in `rtl/`
hold one module each: `roesti_fpga` (top), `network_processor`,
`path_controller`, `frame_selector`, `frame_arbiter`, `data_carrier`,
`ring_buffer`, `rx_fifo`, `tcp_arbiter`, `trigger_if`, `data_if` and
`module_control`. Two memories dominate the area: the ring buffer (256 kbit)
and the FIFO (512 kbit), both written as plain arrays with a registered read
port so that they map onto block RAM.
