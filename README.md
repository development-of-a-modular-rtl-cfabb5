# A modular readout chain for a highly granular calorimeter

This design moves data from tens of thousands of calorimeter channels to a
PC through three layers of small, identical boards, and carries control,
timing and "stop" information back the other way. Front-end cards on the
detector (**DIF**, detector interface) collect bytes from the readout ASICs
and send them over a 50 Mbit/s serial link to a concentrator (**LDA**, link
data aggregator) that serves ten DIFs. Each LDA packs what it receives into
raw Ethernet frames for a PCI Express card in the DAQ PC (**ODR**, off-detector
receiver), which terminates four LDAs. A clock and control card (**CCC**)
turns commands from a control PC and external triggers into fast commands
sent to every LDA, which repeat them to their DIFs; any DIF that cannot take
more data answers with *busy*, which travels back to the CCC and blocks
further triggers.

The guiding rule is that every stage gathers a complete packet before passing
it on (store and forward), so a stage never emits half a packet because its
source stalled, and that every downstream element accepts whatever it is
given: there is no flow control on the links, only busy.

The SystemVerilog here covers all the logic of that chain. Boards'
analog parts (LVDS drivers, clock oscillators, optical PHYs), the PCI Express
DMA engine and memory of the ODR, and the detector ASICs are outside it: the
top level brings their signals out as ports.

## Hierarchy

```
daq_top
 ├─ ccc_control         RS232 commands, external trigger, busy veto
 │   ├─ uart_rx
 │   ├─ busy_dec  x8    busy from each LDA output
 │   └─ fast_enc        pulse-width coded fast commands
 ├─ lda  x N_LDA (4)
 │   ├─ link_rxtx x10   serial link to each DIF (enc_8b10b, dec_8b10b)
 │   ├─ pkt_fifo  x21   10 upstream, 10 downstream, 1 control
 │   ├─ pkt_arbiter     10:1 packet multiplexer
 │   ├─ eth_tx, eth_rx  raw Ethernet (crc32_eth)
 │   ├─ lda_control     routes control packets to one DIF or all
 │   └─ lda_dif_signals fast-line fan-out, busy OR towards the CCC
 │       └─ busy_dec x10, busy_enc
 ├─ dif  x N_LDA*N_DIF (40)
 │   ├─ link_rxtx
 │   ├─ dif_control     front-end data into blocks, echo, mode bits
 │   ├─ pkt_fifo  x3    data, echo, neighbour
 │   ├─ pkt_arbiter     3:1, adds the DIF header
 │   ├─ fe_signals      fast_dec, slow clock, train, power pulsing, busy
 │   └─ busy_enc
 └─ odr
     ├─ eth_rx, eth_tx  x4 ports
     ├─ pkt_fifo  x8
     └─ pkt_arbiter     4:1 onto the host stream
```

`daq_pkg` holds the shared constants: system sizes, the link's control
characters, the fast-command enum, packet type codes, control opcodes, the
EtherType and the broadcast MAC.

## Clocks

One 50 MHz clock (`clk`) runs the CCC, the LDAs' link side and every DIF;
in the real system the CCC distributes it (from its own oscillator or from the
machine clock, chosen by `clk_sel`), so all links share its frequency and the
simulation treats them as one clock domain. The Ethernet side of LDA and ODR
runs at 125 MHz (`clk_eth`, one GMII byte per clock = 1 Gbit/s), and the
ODR hands data to the host on its own clock (`clk_host`). Every crossing
between these domains is a `pkt_fifo`; nothing else crosses.

## The DIF–LDA link

`link_rxtx` sends one bit per 50 MHz clock, i.e. 50 Mbit/s, most significant
bit of each ten-bit code group first. Bytes are 8b/10b coded (`enc_8b10b`,
`dec_8b10b`, standard code tables), which keeps the AC-coupled line
DC-balanced and leaves 40 Mbit/s, one byte every ten clocks, for payload.

Framing is this design's own:

| Character | Meaning |
|-----------|---------|
| K28.5 | idle, and word alignment |
| K27.7 | start of packet |
| K29.7 | end of packet |

The transmitter sends K28.5 whenever it has nothing to send and at least two
idles between packets. A packet whose source marks it damaged (`tx_err` on
its last byte) is closed with a comma instead of the end marker, so the far
end receives it flagged. The receiver searches the bit stream for the comma,
declares `link_up` once aligned, and drops alignment after `ERR_LIMIT` (4)
consecutive bad code groups. A packet broken by a code error, by a new start
marker or by a comma is delivered with `rx_err` set on its last byte; nothing
is ever silently shortened.

## Packets, FIFOs and headers

All packet interfaces are byte streams with `valid`, `data`, `last`, `err`
and (where back-pressure exists) `ready`.

`pkt_fifo` is the store-and-forward element. The writer side counts
complete packets; the count and the read pointer cross the clock boundary in
Gray code through two flops. The reader sees `r_valid` only while at least
one complete packet is stored, so once a packet starts on the read side it
never stalls for lack of data. If a packet does not fit, the FIFO ends it at
the last free word, marks it with `err`, and throws the rest of that packet
away (`drop_cnt` counts the lost bytes); `w_ready` low tells a source that can
wait (the DIF's busy logic uses this as "buffer full").

`pkt_arbiter` takes whole packets from N inputs in round-robin order and can
put one byte in front of each. A packet's way to the host therefore reads:

| Byte | Added by | Content |
|------|----------|---------|
| 0 | ODR | port (LDA) number, 0..3 |
| 1 | LDA | link (DIF) number, 0..9 |
| 2 | DIF | `{type[1:0], dif_id[5:0]}`, type 2'b10 data, 2'b11 echo |
| 3.. | DIF | front-end bytes, or the echoed command |

An Ethernet frame's minimum payload is 46 bytes, so short packets reach the
host padded with zeros; the host finds the real data length in the front-end
data themselves. A front-end block is at most `MAX_BLOCK` = 1498 bytes, so
with the two added bytes it fits one standard 1500-byte frame payload.

## The DIF

`dif_control` cuts the front-end byte stream into blocks: a block ends at
`fe_last` or when it reaches `MAX_BLOCK` bytes. Control packets coming down
the link start with an opcode:

| Opcode | Action |
|--------|--------|
| 0x01 ECHO | the whole packet is sent back up as an echo packet |
| 0x02 SET_MODE | next byte: bit 0 power pulsing on, bit 1 redundancy on |

Damaged control packets change no mode bit (an echo of a damaged packet still
returns, so the sender can see what arrived).

`fe_signals` decodes the fast line and drives the ASIC side: `trig_out` one
clock per trigger, `train_start` one clock at a bunch-train start, the ASIC
slow clock `slowclk` (clk/10 = 5 MHz) whose divider is restarted by the sync
command so that all DIFs run in phase, and `asic_pwr_on`, which with power
pulsing enabled is on only between train start and train end. Busy is raised
when the ASIC memory is full (`ram_full`) or the DIF's data FIFO cannot take a
byte.

### Redundancy through the neighbour

Pairs of DIFs (2k, 2k+1 on one LDA) are joined by a ribbon. With redundancy
enabled, a DIF whose link receiver has lost alignment (cable pulled, LDA
port dead) sends its packets, already headed with its own id, to its
neighbour, which forwards them over its own link like its own traffic. The
choice of route is made only between packets. A DIF that is itself routing
to its neighbour ignores what arrives from the neighbour, so a packet cannot
circle when both are cut off. When the link comes back, the DIF uses it
again. With redundancy disabled, a DIF whose link is down holds its packets;
its buffer fills and its busy stops data taking, rather than data disappearing.
The LDA sees redirected packets on the neighbour's link number, with the true
origin in the DIF header byte.

## Busy and fast commands

Both ride on single wires of the HDMI cable, which are AC coupled. Busy is
therefore sent as a *clock*: `busy_enc` toggles the line every `HALF` clocks
(25 MHz) while busy and switches its driver off otherwise. `busy_dec` looks
only for edges: busy is asserted on any edge of the synchronised line and
released `TIMEOUT` (8) clocks after the last one, whatever level the
undriven line floats to. The LDA ORs its DIFs' busy and re-encodes it towards
the CCC.

Fast commands are pulses on the trigger line whose width says what they are:
1 clock trigger, 2 sync, 3 bunch-train start, 4 bunch-train end, each followed
by at least 2 low clocks. A trigger therefore occupies the line for 3 clocks,
and `fast_enc` gives triggers priority over the other commands. The LDA
repeats the line to its DIFs through one register.

## The CCC

`ccc_control` reads single-letter commands from a 115200-baud RS232 line:
`R`/`X` start/stop a run (only during a run are external triggers taken),
`T` software trigger, `S` sync, `B`/`E` bunch-train start/end, `M`/`I` machine
or internal clock. The external trigger input is synchronised with two flops
and its rising edge taken. While any LDA reports busy, triggers are not sent
but counted in `trig_veto`; sent ones are counted in `trig_sent`. A trigger
edge reaches the CCC outputs 4 clocks after the pin, and a DIF's `trig_out`
a few clocks later (one LDA register and the pulse-width decode).

## Control path

The host writes a control packet `[target, length, command bytes...]` to the
ODR with the port of the LDA. The ODR sends it as an Ethernet frame to that
LDA's MAC; the LDA accepts frames to its own MAC or to broadcast with
EtherType 0x88B5, checks the FCS, and `lda_control` writes the `length`
command bytes into the downstream FIFO of DIF `target`, or of every DIF if
`target` is 0xFF. Frame padding after the command is discarded. A damaged
frame or a malformed packet is dropped and counted (`ctrl_drop`).

## Ethernet

`eth_tx` builds a raw frame: preamble, SFD, destination, source,
EtherType 0x88B5, payload padded to 46 bytes, CRC-32 FCS, then a 12-byte gap.
`eth_rx` filters on destination and EtherType, holds back the last four
bytes so the FCS never reaches the payload stream, and flags the last byte
with `err` if the FCS is wrong. There is no VLAN, no IP and no retransmission:
the links are point to point.

## Where this departs from the paper or fills its gaps

- The paper names 8b/10b but not the link framing, the busy timeout, the
  pulse-width command set, the control packet layout or the opcodes. All of
  these are this design's choices, made as simply as the described behaviour
  allows.
- The paper describes the ODR as a commercial PCI Express board with DMA and
  on-board memory; only its packet logic is here. The host side is a byte
  stream.
- The Ethernet PHYs, the HDMI/LVDS physical layer, the CCC's clock inputs
  and fan-out, and the detector ASICs are not logic and are not modelled; in
  `daq_top` the cables are wires, with `cable_ok` to break one.
- The link's clock recovery is not modelled: both ends share the 50 MHz
  clock the CCC distributes, as the paper's system does, and the receiver
  only has to find the word boundary.
- The paper's DIF reads ASICs over a daisy chain whose protocol it does not
  give; here the front end is a byte stream (`fe_valid/fe_data/fe_last`).
- Buffer sizes (2048 bytes per link FIFO) are not given by the paper; they
  hold one full-size packet plus room for the next.

## Throughput

One link carries at most 40 Mbit/s of payload. Reading the ASICs at 5 MHz
limits a DIF to about 20 Mbit/s, so ten DIFs need 200 Mbit/s from an LDA, and
even ten links at the full 40 Mbit/s (400 Mbit/s) stay well inside the
1 Gbit/s Ethernet link (a frame costs 38 bytes of overhead on up to 1500,
under 3 %). A hardware test of the original system ran ten links at
28 Mbit/s each, 280 Mbit/s into one LDA; the same load fits this RTL. Four
LDAs at 200 Mbit/s give 800 Mbit/s into one ODR; its host stream moves one
byte per `clk_host` clock (1.6 Gbit/s at 200 MHz, enough for four LDAs
even at their 400 Mbit/s worst case). Beyond that, the PCI Express transfer
and the writing to disc are host-side matters outside this logic.

## Simulating

Each block has a self-checking testbench in `tb/`, named `tb_<block>`, which
prints `TB_RESULT checks=N failures=M`. With plain Verilator:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb --top-module tb_dif \
    rtl/daq_pkg.sv tb/tb_dif.sv rtl/*.sv
./obj_dir/Vtb_dif
```

(list `rtl/daq_pkg.sv` and, for the Ethernet testbenches, `tb/tb_eth_pkg.sv`
first). `tb_daq_top` runs the chain end to end at 2 LDAs of 4 DIFs with small
buffers and a fast UART, and makes every mechanism happen at least once:
data, echo, broadcast command, run start, external and software triggers,
sync, train start, power pulsing, busy veto, buffer-full busy, link loss,
redundancy, clock selection and host back-pressure; it counts each and fails
if one never occurred. `tb_daq_full` runs the full-size system (4 LDAs of 10
DIFs, default parameters) through link start-up, a trigger, data from two DIFs
and an echo.
