# EMiX inter-FPGA bridges: carrying a many-core's NoC across FPGAs

A tiled many-core such as OpenPiton quickly outgrows one FPGA. EMiX emulates it on several
FPGAs by cutting the tile array along tile boundaries. Every on-chip network (NoC) link that
crosses a cut then has to travel from one FPGA to another. The idea is to use two kinds of
inter-FPGA link together:

* inside a **pair** of adjacent FPGAs, a direct optical **Aurora** link (QSFP-1). It is fast and
  has low latency, but it only reaches the neighbour.
* between pairs, **100 Gb Ethernet** through a switch (QSFP-0). Every FPGA can reach every other
  one this way, but the latency is higher and frames can be lost.

The software on the emulated chip must not notice the cut. Every flit (the 64-bit unit a NoC
link carries per transfer) that leaves a tile towards another FPGA must arrive at the
neighbouring tile intact and in order, on the same NoC. Each of the three NoCs must keep
flowing even when another one is blocked. This RTL is the part of each FPGA that does this:
the bridges between the NoC links at a partition edge and the Aurora or Ethernet cores. It
follows the EMiX design of Kropotov, Moreto and Salami (BSC). The paper describes what the
bridges do but not how they are built, so nearly every mechanism below is this design's own
choice. The last sections list which parts are which.

## The partitioned system

The reference configuration has 64 tiles on 8 FPGAs, with 8 tiles per FPGA. The mesh is cut
vertically, so each FPGA holds one column of tiles:

```
          pair 1                     pair 2                          pair 4
  +--------+   +--------+      +--------+   +--------+         +--------+   +--------+
  | FPGA1  |AU | FPGA2  | ETH  | FPGA3  |AU | FPGA4  | ETH ... | FPGA7  |AU | FPGA8  |
  |chipset |===|        |~~~~~~|        |===|        |~~~~~    |        |===|        |
  | 8 tiles|   | 8 tiles| sw.  | 8 tiles|   | 8 tiles|         | 8 tiles|   | 8 tiles|
  +--------+   +--------+      +--------+   +--------+         +--------+   +--------+
   AU = Aurora point-to-point (QSFP-1)   ETH = 100 Gb Ethernet via switch (QSFP-0)
```

FPGA1 also holds the chip bridge and peripherals (UART, HBM, Ethernet). They are not part of
this RTL. Each FPGA has two partition edges, west and east. Each edge is served by an
Aurora bridge, by an Ethernet (CMAC) bridge, or by nothing at the outer edges of the mesh. The
edges alternate along the chain. The default `emix_node` is an inner FPGA such as FPGA2, with
Aurora to the west and Ethernet to the east. With horizontal partitioning the same node serves
north and south edges; only the port names say west and east.

## Channels

A tile has three NoCs, each with one 64-bit link per direction. A column of `TILES_PER_EDGE`
tiles therefore has `NCH = 3 * TILES_PER_EDGE` channels leaving through an edge and as many
entering. With the default of 8 tiles, that is 24 each way. Tile `t`, NoC `n` is channel
`t*3 + n` on both FPGAs. The far bridge therefore delivers each flit to the tile in the same
row, on the same NoC it left from. At the tile side every channel has a plain valid/ready
handshake: a flit moves in a cycle where both are high.

## Frames

A bridge turns its channels into one stream of 64-bit words. The stream is split into frames.
The first word of a frame is a header (`frame_hdr_t` in `emix_pkg`). It is followed by `len`
flits, all of one channel. The last word of the frame is marked.

| bits  | field          | meaning                                                   |
|-------|----------------|-----------------------------------------------------------|
| 63:56 | `magic`        | 0xE7; a header with anything else is rejected             |
| 55:48 | `len`          | flits that follow (0 to `MAX_BURST`; 0 = header only)      |
| 47:40 | `data_ch`      | channel of those flits                                    |
| 39    | `credit_valid` | the credit fields below are meaningful                    |
| 38    | `seq_valid`    | frame is numbered (0 only for pure acknowledgements)      |
| 31:24 | `credit_ch`    | channel whose receive space is returned                   |
| 23:16 | `credit_cnt`   | number of flit slots returned                             |
| 15:8  | `seq`          | frame number, modulo 256                                  |
| 7:0   | `ack`          | next frame number the sender of this header expects      |

Aurora carries these frames as they are, one Aurora frame each. Ethernet wraps each one as
described in [The Ethernet path](#the-ethernet-path-loss-and-repair).

## Credit flow control: keeping the NoCs independent

OpenPiton avoids protocol deadlock by giving different message classes different NoCs. If the
three NoCs shared one link with plain back-pressure, one blocked NoC would block the other two,
and the emulated chip could deadlock where the real one would not. So every channel has its own
receive buffer of `RX_DEPTH` flits on the far FPGA, and the sender keeps a credit counter per
channel:

* At reset each counter holds `RX_DEPTH`. Sending a flit takes one credit.
* `noc_link_tx` picks channels round robin. It only considers a channel that has a buffered
  flit and at least one credit. It sends `min(buffered, credits, MAX_BURST)` flits in one
  frame.
* When a tile takes a flit from a receive buffer (`rx_pop`), one credit for that channel
  becomes pending on that FPGA. Each outgoing header returns all pending credits of one
  channel, round robin. When there is no data to send, a header-only frame returns them.
* A received flit therefore always finds room in its buffer. The receive side needs no
  back-pressure, which suits Aurora and the CMAC, whose receive interfaces cannot be stalled.
  If a flit ever finds its buffer full, `rx_overflow` is set and an assertion fires in
  simulation.

A channel with data but no credit raises `credit_stall`. This is normal while a tile on the
far side is not taking flits.

## The Ethernet path: loss and repair

Ethernet may drop frames: the switch can be congested, or a frame can arrive with a bad frame
check sequence (FCS). Ethernet itself does not resend anything. The CMAC bridge therefore adds
a go-back-N protocol around the frames (module `link_replay`, block "retransmission"):

1. **Numbering and replay buffer.** `link_replay` sits after the frame builder and numbers
   every frame (`seq`). It keeps a copy in a circular buffer of 2^`REPLAY_LOG2` words until the
   copy is acknowledged. At most 15 frames may be unacknowledged. A full buffer or window
   back-pressures the frame builder.
2. **Strict in-order receive.** The receiving `noc_link_rx` runs with `DROP_OOS = 1`. It
   accepts only the frame number it expects next. Any other numbered frame is ignored
   completely, including its flits and its credits, and `seq_err` pulses.
3. **Cumulative acknowledgement.** Every header going back carries the receiver's next
   expected number in `ack`. A header-only, unnumbered frame (`seq_valid = 0`) carries it when
   the number has changed and nothing else is waiting. An acknowledgement frees every frame
   before that number.
4. **Timeout.** If frames stay unacknowledged for `TIMEOUT` NoC cycles with no progress,
   sending restarts from the oldest unacknowledged frame. Everything after it is sent again
   (`retx` pulses).

Credits ride only in numbered frames. A lost frame's credits are therefore repeated with it,
and a duplicate's credits are never counted twice. Acknowledgements and rewinds take effect
only between frames on the output, so a frame is never cut.

On the wire each frame becomes one Ethernet frame (`eth_tx_encap`):

| bytes        | content                                                    |
|--------------|------------------------------------------------------------|
| 0-5          | destination MAC (the paired FPGA, `peer_mac`)              |
| 6-11         | source MAC (`my_mac`)                                      |
| 12-13        | EtherType 0x88B5 (IEEE local experimental)                 |
| 14-15        | zero, so that the frame words stay 8-byte aligned          |
| 16 and after | the frame words, least significant byte first              |

Frames shorter than 64 bytes are padded with zeros. The CMAC appends the FCS. Words are packed
eight to a 512-bit beat, with `tkeep` marking the valid bytes.

`eth_rx_decap` stores each incoming frame whole before passing it on. The CMAC reports a bad
FCS only with the last beat, so the decision must wait for it. A frame is dropped whole if any
of these holds:

* the FCS is bad (`drop_fcs`);
* it is not from the paired FPGA, not addressed to this FPGA, or has another EtherType
  (`drop_addr`; the switch may flood such frames);
* its receive buffer of 2^`BEATS_LOG2` beats has no room (`drop_full`).

Good frames are unpacked into words. The two Ethernet header words are removed; the padding
is passed on and skipped by the frame parser.

The Aurora path uses the same frame builder and parser but no replay: Aurora is treated as a
lossless link. A frame number out of order is only reported there.

## Clock domains

Each bridge has two clocks:

* `noc_clk`: the clock of the emulated tiles, 50 MHz in the reference prototype. Frame
  building, credits, replay and frame parsing run here.
* `link_clk`: the user clock of the Aurora or CMAC core. Only the CMAC packing and unpacking
  run here.

Words cross between the two in `axis_async_fifo`, a Gray-code pointer FIFO with two-flop
synchronisers. Each domain has its own active-low asynchronous reset. Assert the resets
together. Both FPGAs of a pair run the same nominal NoC clock, so frames arrive no faster than
they are consumed. Unlimited clock drift between the two crystals is not absorbed: if the
Aurora receive FIFO ever overflows, `cdc_overflow` is set.

## Module map

```
emix_node                     one FPGA: channel mapping, two edges
  emix_edge (x2)              chooses the bridge of one edge by parameter
    noc_aurora_bridge         Aurora path
      noc_link_tx             channel buffers, credits, arbitration, headers
        noc_chan_fifo (xNCH)
      axis_async_fifo (x2)    NoC clock <-> Aurora user clock
      noc_link_rx             frame parser, receive buffers, credit return
        noc_chan_fifo (xNCH)
    noc_cmac_bridge           Ethernet path
      noc_link_tx
      link_replay             go-back-N numbering, replay buffer, timeout
      axis_async_fifo (x2)
      eth_tx_encap            Ethernet header, padding, 64->512-bit packing
      eth_rx_decap            store-and-forward filter, 512->64-bit unpacking
      noc_link_rx (DROP_OOS)
emix_pkg                      constants, header and status types, MAC helpers
```

Parameters and their defaults:

| parameter        | default       | where                    | meaning                                |
|------------------|---------------|--------------------------|----------------------------------------|
| `TILES_PER_EDGE` | 8             | `emix_node`              | tiles along an edge (reference: 8)     |
| `WEST_LINK`, `EAST_LINK` | `LINK_AURORA`, `LINK_CMAC` | `emix_node` | link kind per edge, or `LINK_NONE` |
| `NCH`            | 24            | bridges                  | channels per edge = 3 x tiles          |
| `TX_DEPTH`       | 4             | bridges                  | send buffer per channel (flits)        |
| `RX_DEPTH`       | 8             | bridges                  | receive buffer per channel = credits   |
| `MAX_BURST`      | 8             | bridges                  | flits per frame at most                |
| `CDC_LOG2`       | 5             | bridges                  | clock-crossing FIFO depth, log2 words  |
| `REPLAY_LOG2`    | 8             | `noc_cmac_bridge`        | replay buffer, log2 words              |
| `TIMEOUT`        | 1024          | `noc_cmac_bridge`        | NoC cycles before going back           |
| `BEATS_LOG2`     | 3             | `eth_rx_decap`           | Ethernet receive buffer, log2 beats    |

`emix_node` has these interfaces:

* **Tile side, per edge:** `*_out_*` carry channels leaving the FPGA and `*_in_*` carry
  channels entering it. They are `[TILES_PER_EDGE][3]` arrays of valid, ready and 64-bit
  data.
* **Aurora, per edge (`*_au_*`):** the 64-bit framing user interface of an Aurora 64B/66B
  core: `tdata`, `tkeep`, `tlast`, `tvalid`, and `tready` on transmit.
* **CMAC, per edge (`*_cm_*`):** the 512-bit user interface of a 100G CMAC. `tuser` on
  receive flags a bad FCS.
* **Configuration:** `my_mac`, `w_peer_mac`, `e_peer_mac`.
* **Status:** `w_status` and `e_status`, of type `link_status_t`.

Only the interface chosen by the edge's parameter is active. The other one is driven idle.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops on its own, with a watchdog.
They run with plain Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  --top-module tb_emix_node -y rtl -y tb +libext+.sv -Irtl rtl/emix_pkg.sv tb/tb_emix_node.sv
obj_dir/Vtb_emix_node
```

| testbench              | what it shows                                                                 |
|------------------------|-------------------------------------------------------------------------------|
| `tb_emix_node`         | two default FPGAs in a ring, 24 channels x 200 flits per edge each way, Aurora and lossy Ethernet; counts stalls, retransmissions and drops |
| `tb_emix_system`       | the 64-tile, 8-FPGA chain: 4 Aurora pairs, 3 Ethernet links, mesh edges closed |
| `tb_noc_aurora_bridge` | two Aurora bridges back to back; credit stalls; first-flit latency            |
| `tb_noc_cmac_bridge`   | two CMAC bridges through a switch model that spoils and floods frames         |
| `tb_link_replay`       | go-back-N over a channel that loses 1 frame in 8                              |
| `tb_noc_link_tx`, `tb_noc_link_rx` | frame building and parsing against hand models                    |
| `tb_eth_tx_encap`, `tb_eth_rx_decap` | Ethernet byte layout, padding, filtering, buffer-full drops     |
| `tb_noc_chan_fifo`, `tb_axis_async_fifo`, `tb_emix_pkg` | building blocks                           |

`tb/noc_traffic.sv` stands in for a column of tiles. It sends numbered flits on every channel
and checks what arrives. `tb/eth_link_model.sv` stands in for two CMACs and the switch. These
two behavioural models are the only stand-ins: the Aurora link is modelled by wires, and all
RTL is the real design. A full-size run of `tb_emix_node` takes about 20 seconds, most of it
compiling.

## Where this follows the source, and where it does not

**Taken from the EMiX design:**

* tiles cut at NoC boundaries;
* three 64-bit NoCs per tile;
* 8 tiles per FPGA;
* FPGA pairs joined by Aurora, and pairs joined by 100 Gb Ethernet through a switch;
* bridges that multiplex the crossing NoC channels into one stream per link, cross clock
  domains and demultiplex at the far end;
* Ethernet frames with per-FPGA source and destination MAC addresses;
* retransmission of lost Ethernet frames;
* the 50 MHz NoC clock.

**This design's own choices** (the source gives no details):

* the frame header and its fields;
* per-channel credit flow control and header-only credit frames;
* round-robin arbitration, burst length and all buffer sizes;
* the EtherType and the 2-byte alignment pad;
* store-and-forward receive filtering;
* go-back-N with cumulative acknowledgements, the window and the timeout;
* a single-lane, 64-bit Aurora interface and the 512-bit CMAC interface;
* valid/ready at the tile side;
* one bridge per partition edge.

The source uses the vendor's AXI-Stream switch and clock-converter IP. Here they are replaced
by the small modules above, which do the same jobs.

**Not included:**

* the tiles (cores, caches, routers);
* the chipset and its peripherals;
* the Aurora and CMAC cores with their transceivers;
* the QSFP cables and the switch.

`emix_node` ends at their interfaces.

## Limits worth knowing

* The 8-bit channel fields allow at most 256 channels per edge, that is 85 tiles. OpenPiton's
  upper limit of 256 tiles per dimension would need wider fields.
* Frame numbers are 8 bits and the replay window is 15 frames. This is ample for a link whose
  round trip is a few microseconds at 50 MHz. A much slower network would need a larger window
  and a longer timeout, which means changing `WIN_LOG2` and `TIMEOUT`.
* The Aurora path has no retransmission and no use of Aurora's native flow control. Under
  sustained full load with clock drift between the two FPGAs, `cdc_overflow` would report lost
  words rather than prevent them.
* `link_replay` handles a received acknowledgement only between frames on its output. A
  frame-length delay in freeing buffer space results, and nothing else.
* Tested only in simulation. The test traffic is random: varied valid/ready timing, sinks that
  stop for hundreds of cycles, 3-8 % of Ethernet frames spoiled, and flooded foreign frames.
  It has not been run on FPGAs or against the vendor cores.
